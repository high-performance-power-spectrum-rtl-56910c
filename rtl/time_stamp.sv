// time_stamp - timestamp and marker counters.
//
// Two W-bit counters, as in the paper. The Timestamp counter counts rising
// edges of the reference clock and is cleared by every marker pulse; the
// Marker counter counts marker pulses and is cleared only by reset. Both
// inputs come from outside and are brought into the system clock through a
// two-flop synchronizer before their rising edges are detected, so the
// reference clock must stay below half the system clock. A marker edge
// clears the timestamp to 0 even if a reference edge comes in the same clock.
//
// latch (the first sample of a new cycle) copies both counters into
// ts_latched / mk_latched; the live values are also available.
module time_stamp #(
  parameter int unsigned W = 32
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         ref_clk,
  input  logic         marker,
  input  logic         latch,
  output logic [W-1:0] ts_live,
  output logic [W-1:0] mk_live,
  output logic [W-1:0] ts_latched,
  output logic [W-1:0] mk_latched,
  output logic         marker_seen   // one-clock pulse per marker edge
);

  logic [2:0] ref_s, mk_s;   // two synchronizer flops, one edge-detect flop

  wire ref_rise = ref_s[1] & ~ref_s[2];
  wire mk_rise  = mk_s[1]  & ~mk_s[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ref_s       <= '0;
      mk_s        <= '0;
      ts_live     <= '0;
      mk_live     <= '0;
      ts_latched  <= '0;
      mk_latched  <= '0;
      marker_seen <= 1'b0;
    end else begin
      ref_s       <= {ref_s[1:0], ref_clk};
      mk_s        <= {mk_s[1:0], marker};
      marker_seen <= mk_rise;
      if (mk_rise)       ts_live <= '0;
      else if (ref_rise) ts_live <= ts_live + 1'b1;
      if (mk_rise)       mk_live <= mk_live + 1'b1;
      if (latch) begin
        ts_latched <= ts_live;
        mk_latched <= mk_live;
      end
    end
  end

endmodule
