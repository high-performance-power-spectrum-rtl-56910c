// avg_unit - average power per frequency point over one short term
// accumulation (STA) of BLOCKS blocks, four channels at once.
//
// The paper averages the power spectrum over 128 blocks of 256 points. Each
// incoming power set (in_idx = frequency point N, in_last on N = NPT-1) is
// added to an accumulator word in a memory of NPT entries, one accumulator of
// PWR_W + log2(BLOCKS) bits per channel, so no sum can overflow. In the first
// block of an STA the accumulator is loaded instead of added to; in the last
// block the sum is not written back but divided by BLOCKS (a right shift,
// truncating) and sent out as out_avg at out_idx, in the order received.
// BLOCKS must be a power of two.
//
// Timing: one read-modify-write per clock (read in the arrival clock, add and
// write or output in the next), so outputs follow inputs by 2 clocks and the
// unit accepts one power set every clock. sta_done pulses with the last
// average of an STA. blk is the index of the block being accumulated.
module avg_unit
  import psa_pkg::*;
#(
  parameter int unsigned NPT    = 256,
  parameter int unsigned BLOCKS = 128
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      in_valid,
  input  logic [$clog2(NPT)-1:0]    in_idx,
  input  logic                      in_last,
  input  pwr_set_t                  in_pwr,
  output logic                      out_valid,
  output logic [$clog2(NPT)-1:0]    out_idx,
  output pwr_set_t                  out_avg,
  output logic                      sta_done,
  output logic [$clog2(BLOCKS)-1:0] blk
);

  localparam int unsigned AW    = $clog2(NPT);
  localparam int unsigned SHIFT = $clog2(BLOCKS);
  localparam int unsigned ACC_W = PWR_W + SHIFT;
  typedef logic [ACC_W-1:0] acc_t;
  typedef acc_t [NCH-1:0]   acc_set_t;

  acc_set_t acc_mem [NPT];
  acc_set_t acc_q;
  logic     s1_valid, s1_last;
  logic [AW-1:0] s1_idx;
  pwr_set_t s1_pwr;
  logic     s1_first_blk, s1_last_blk;
  acc_set_t sum;

  always_comb begin
    for (int c = 0; c < NCH; c++)
      sum[c] = (s1_first_blk ? acc_t'(0) : acc_q[c]) + acc_t'(s1_pwr[c]);
  end

  always_ff @(posedge clk) begin
    acc_q <= acc_mem[in_idx];
    if (s1_valid && !s1_last_blk) acc_mem[s1_idx] <= sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      blk          <= '0;
      s1_valid     <= 1'b0;
      s1_last      <= 1'b0;
      s1_idx       <= '0;
      s1_pwr       <= '0;
      s1_first_blk <= 1'b0;
      s1_last_blk  <= 1'b0;
      out_valid    <= 1'b0;
      out_idx      <= '0;
      out_avg      <= '0;
      sta_done     <= 1'b0;
    end else if (clear) begin
      blk       <= '0;
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
      sta_done  <= 1'b0;
    end else begin
      s1_valid     <= in_valid;
      s1_last      <= in_last;
      s1_idx       <= in_idx;
      s1_pwr       <= in_pwr;
      s1_first_blk <= (blk == '0);
      s1_last_blk  <= (blk == SHIFT'(BLOCKS - 1));
      if (in_valid && in_last) blk <= blk + 1'b1;   // wraps after BLOCKS-1
      out_valid <= s1_valid && s1_last_blk;
      sta_done  <= s1_valid && s1_last_blk && s1_last;
      out_idx   <= s1_idx;
      for (int c = 0; c < NCH; c++) out_avg[c] <= pwr_t'(sum[c] >> SHIFT);
    end
  end

  initial assert (BLOCKS == (1 << SHIFT)) else $error("BLOCKS must be a power of two");

endmodule
