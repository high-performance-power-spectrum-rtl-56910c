// result_data_buffer - collects the results of one STA and sends them to the
// SDRAM in the order the paper gives: the NPT averages first, then the NPT
// peaks. One location is a 128-bit word holding the four channels' 32-bit
// values, CH1 in bits 31:0.
//
// Averages and peaks arrive together, one frequency point per clock, and are
// written into two NPT-word memories by index. When the last point has been
// written the buffer drains: it offers 2*NPT words on out_valid / out_ready,
// out_last on the final one. Results of the next STA arriving before the
// drain has finished are dropped and flagged by a one-clock overrun pulse (an
// STA lasts BLOCKS * 3 * NPT clocks, the drain 2*NPT when the SDRAM keeps up).
//
// AVG_EN / PEAK_EN select the configuration. The source built an
// average-only and a peak-only device as separate configurations; with one
// of them cleared here, that unit's memory is left out and only its NPT
// words are sent. Both set (the default) gives the order above.
//
// Timing: reads are synchronous into registers; one word per clock while
// out_ready stays high.
module result_data_buffer
  import psa_pkg::*;
#(
  parameter int unsigned NPT     = 256,
  parameter bit          AVG_EN  = 1'b1,   // averages are stored and sent
  parameter bit          PEAK_EN = 1'b1    // peaks are stored and sent
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   avg_valid,
  input  logic [$clog2(NPT)-1:0] avg_idx,
  input  pwr_set_t               avg_data,
  input  logic                   pk_valid,
  input  logic [$clog2(NPT)-1:0] pk_idx,
  input  pwr_set_t               pk_data,
  output logic                   out_valid,
  input  logic                   out_ready,
  output pwr_set_t               out_data,
  output logic                   out_last,
  output logic                   overrun
);

  localparam int unsigned AW    = $clog2(NPT);
  localparam int unsigned NSETS = int'(AVG_EN) + int'(PEAK_EN);

  logic          draining;
  logic [AW:0]   rptr;          // 0 .. NSETS*NPT-1
  wire           load = (!out_valid || out_ready) && draining;
  wire           rd_last = (rptr == (AW+1)'(NSETS * NPT - 1));
  // the results of both units arrive together; either one marks the end
  wire           in_valid = AVG_EN ? avg_valid : pk_valid;
  wire [AW-1:0]  in_idx   = AVG_EN ? avg_idx : pk_idx;
  wire           fill_done = in_valid && !draining && (in_idx == AW'(NPT - 1));
  // peaks are read in the second half when both are present
  wire           rd_pk = PEAK_EN && (!AVG_EN || rptr[AW]);
  pwr_set_t      avg_q, pk_q;
  logic          sel_pk;

  if (AVG_EN) begin : g_avg
    pwr_set_t mem [NPT];
    always_ff @(posedge clk) begin
      if (avg_valid && !draining) mem[avg_idx] <= avg_data;
      if (load) avg_q <= mem[rptr[AW-1:0]];
    end
  end else begin : g_no_avg
    assign avg_q = '0;
  end

  if (PEAK_EN) begin : g_pk
    pwr_set_t mem [NPT];
    always_ff @(posedge clk) begin
      if (pk_valid && !draining) mem[pk_idx] <= pk_data;
      if (load) pk_q <= mem[rptr[AW-1:0]];
    end
  end else begin : g_no_pk
    assign pk_q = '0;
  end

  always_ff @(posedge clk) if (load) sel_pk <= rd_pk;
  assign out_data = sel_pk ? pk_q : avg_q;

  initial assert (AVG_EN || PEAK_EN) else $error("at least one of AVG_EN, PEAK_EN must be set");

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      draining  <= 1'b0;
      rptr      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      overrun   <= 1'b0;
    end else if (clear) begin
      draining  <= 1'b0;
      rptr      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      overrun   <= 1'b0;
    end else begin
      overrun <= draining && (avg_valid || pk_valid);
      if (fill_done) begin
        draining <= 1'b1;
        rptr     <= '0;
      end
      if (load) begin
        out_valid <= 1'b1;
        out_last  <= rd_last;
        rptr      <= rptr + 1'b1;
        if (rd_last) draining <= 1'b0;
      end else if (out_valid && out_ready) begin
        out_valid <= 1'b0;
        out_last  <= 1'b0;
      end
    end
  end

endmodule
