// data_sampler - de-multiplexes the two time-multiplexed LVDS lanes into
// 4-channel sample sets, clocked by the external strobe.
//
// Lane A carries CH1 and CH2, lane B carries CH3 and CH4, four lines each;
// the data change on both edges of the strobe (as in the paper), so the
// strobe is used as a double-data-rate capture clock. Each edge takes the
// value that was on the lanes during the half-period that the edge ends:
// the falling edge takes CH1 / CH3, which are taken to be sent while the
// strobe is high, and the rising edge takes CH2 / CH4, sent while it is low
// (which half carries which channel is this design's choice). The lanes
// must therefore hold their value for a short hold time after each edge,
// as a source-synchronous transmitter's output delay gives.
//
// On every rising edge the complete set {CH4,CH3,CH2,CH1} of the period that
// just ended is registered on set_data with set_valid high; both outputs
// belong to the strobe domain and go straight into the dual-clock Input
// FIFO. enable (system clock domain, "running") is synchronized into the
// strobe domain with two flip-flops; while it is low set_valid stays low.
// One set per strobe period: the per-channel sample rate equals the strobe
// frequency.
module data_sampler
  import psa_pkg::*;
(
  input  logic                strobe,   // capture clock, both edges
  input  logic                rst_n,
  input  logic                enable,   // asynchronous to strobe
  input  logic [SAMPLE_W-1:0] lane_a,   // CH1 while strobe high, CH2 while low
  input  logic [SAMPLE_W-1:0] lane_b,   // CH3 while strobe high, CH4 while low
  output logic                set_valid,
  output sample_set_t         set_data
);

  logic [1:0] en_sync;
  sample_t    hi_a, hi_b;   // CH1, CH3 taken on the falling edge
  logic       hi_ok;

  always_ff @(negedge strobe or negedge rst_n) begin
    if (!rst_n) begin
      hi_a  <= '0;
      hi_b  <= '0;
      hi_ok <= 1'b0;
    end else begin
      hi_a  <= sample_t'(lane_a);
      hi_b  <= sample_t'(lane_b);
      hi_ok <= en_sync[1];
    end
  end

  always_ff @(posedge strobe or negedge rst_n) begin
    if (!rst_n) begin
      en_sync   <= '0;
      set_valid <= 1'b0;
      set_data  <= '0;
    end else begin
      en_sync   <= {en_sync[0], enable};
      set_valid <= hi_ok & en_sync[1];
      set_data  <= '{sample_t'(lane_b), hi_b, sample_t'(lane_a), hi_a};
    end
  end

endmodule
