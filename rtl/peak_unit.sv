// peak_unit - peak power per frequency point over one STA, with the index of
// the block in which the peak occurred, four channels at once.
//
// For every frequency point a memory entry holds, per channel, the largest
// 32-bit power seen so far in the STA and its block index. The first block of
// an STA loads the entry; later blocks replace it only when strictly larger
// (ties keep the earlier block). In the last block the final peak is sent out
// as one 32-bit word per channel: bits 31:IW hold the upper 32-IW bits of the
// peak power and bits IW-1:0 the block index (IW = log2(BLOCKS) = 7). The
// paper states that the 32-bit word carries both; the split is this design's.
//
// Timing: like avg_unit, one power set per clock, output 2 clocks after input.
module peak_unit
  import psa_pkg::*;
#(
  parameter int unsigned NPT    = 256,
  parameter int unsigned BLOCKS = 128
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   in_valid,
  input  logic [$clog2(NPT)-1:0] in_idx,
  input  logic                   in_last,
  input  pwr_set_t               in_pwr,
  output logic                   out_valid,
  output logic [$clog2(NPT)-1:0] out_idx,
  output pwr_set_t               out_peak
);

  localparam int unsigned AW = $clog2(NPT);
  localparam int unsigned IW = $clog2(BLOCKS);
  typedef struct packed {
    pwr_t          value;
    logic [IW-1:0] block;
  } peak_t;
  typedef peak_t [NCH-1:0] peak_set_t;

  peak_set_t     pk_mem [NPT];
  peak_set_t     pk_q, upd;
  logic [IW-1:0] blk;
  logic          s1_valid;
  logic [AW-1:0] s1_idx;
  pwr_set_t      s1_pwr;
  logic [IW-1:0] s1_blk;
  logic          s1_first_blk, s1_last_blk;

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      if (s1_first_blk || s1_pwr[c] > pk_q[c].value) upd[c] = '{value: s1_pwr[c], block: s1_blk};
      else                                           upd[c] = pk_q[c];
    end
  end

  always_ff @(posedge clk) begin
    pk_q <= pk_mem[in_idx];
    if (s1_valid && !s1_last_blk) pk_mem[s1_idx] <= upd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      blk          <= '0;
      s1_valid     <= 1'b0;
      s1_idx       <= '0;
      s1_pwr       <= '0;
      s1_blk       <= '0;
      s1_first_blk <= 1'b0;
      s1_last_blk  <= 1'b0;
      out_valid    <= 1'b0;
      out_idx      <= '0;
      out_peak     <= '0;
    end else if (clear) begin
      blk       <= '0;
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      s1_valid     <= in_valid;
      s1_idx       <= in_idx;
      s1_pwr       <= in_pwr;
      s1_blk       <= blk;
      s1_first_blk <= (blk == '0);
      s1_last_blk  <= (blk == IW'(BLOCKS - 1));
      if (in_valid && in_last) blk <= blk + 1'b1;
      out_valid <= s1_valid && s1_last_blk;
      out_idx   <= s1_idx;
      for (int c = 0; c < NCH; c++) out_peak[c] <= {upd[c].value[PWR_W-1:IW], upd[c].block};
    end
  end

  initial assert (BLOCKS == (1 << IW)) else $error("BLOCKS must be a power of two");

endmodule
