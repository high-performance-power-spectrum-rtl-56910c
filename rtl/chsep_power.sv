// chsep_power - channel separation and power computation for four channels.
//
// Each FFT core transforms two real channels packed as one complex input
// (core A: CH1 + j*CH2, core B: CH3 + j*CH4). The output frame of each core
// is written into a frame memory by its index k. When both frames are
// complete, the unit walks N = 0 .. NPT-1, reads X[N] and X[(NPT-N) mod NPT]
// of both cores, and forms for each pair of channels
//
//   CH1_real = (Re[N] + Re[M]) / 2      CH1_imag = (Im[N] - Im[M]) / 2
//   CH2_real = (Im[N] + Im[M]) / 2      CH2_imag = (Re[M] - Re[N]) / 2
//
// with M = NPT-N, then CHx_pwr = CHx_real^2 + CHx_imag^2 as an unsigned
// 32-bit value (FFT_W = 16 gives at most 2^31). The paper prints the Im sum
// and the Im difference the other way round between CH1_imag and CH2_real;
// that form does not separate the channels, so the standard separation of
// two real transforms is used here. "/2" is an arithmetic shift.
//
// Timing: one power set per clock, out_idx = N in natural order, starting
// 2 clocks after the second frame completes; NPT + 2 clocks per frame. A new
// frame arriving while the previous one is still being read, or a second
// frame from one core before the other core's frame, is dropped and raises
// overrun (the FFT cores take 3*NPT clocks per frame, so this does not happen when
// they are fed as in the top level).
module chsep_power
  import psa_pkg::*;
#(
  parameter int unsigned NPT = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  // FFT core A (CH1 real part, CH2 imaginary part)
  input  logic                    a_valid,
  input  logic [$clog2(NPT)-1:0]  a_idx,
  input  logic signed [FFT_W-1:0] a_re,
  input  logic signed [FFT_W-1:0] a_im,
  // FFT core B (CH3, CH4)
  input  logic                    b_valid,
  input  logic [$clog2(NPT)-1:0]  b_idx,
  input  logic signed [FFT_W-1:0] b_re,
  input  logic signed [FFT_W-1:0] b_im,
  // power of the four channels at frequency point out_idx
  output logic                    out_valid,
  output logic [$clog2(NPT)-1:0]  out_idx,
  output logic                    out_last,
  output pwr_set_t                out_pwr,
  output logic                    overrun
);

  localparam int unsigned AW = $clog2(NPT);
  typedef logic signed [FFT_W-1:0] smp_t;
  typedef logic signed [FFT_W:0]   sum_t;

  logic [2*FFT_W-1:0] mem_a [NPT];
  logic [2*FFT_W-1:0] mem_b [NPT];
  logic [AW:0]        cnt_a, cnt_b;
  logic               busy;
  logic [AW-1:0]      n;
  // pipeline stage 1: memory read
  logic               s1_valid, s1_last;
  logic [AW-1:0]      s1_idx;
  logic [2*FFT_W-1:0] an_q, am_q, bn_q, bm_q;

  wire a_full     = (cnt_a == (AW+1)'(NPT));
  wire b_full     = (cnt_b == (AW+1)'(NPT));
  wire frame_done = a_full && b_full;
  wire [AW-1:0] m = AW'(NPT) - n;   // (NPT - n) mod NPT

  always_ff @(posedge clk) begin
    if (a_valid && !busy && !a_full) mem_a[a_idx] <= {a_re, a_im};
    if (b_valid && !busy && !b_full) mem_b[b_idx] <= {b_re, b_im};
    an_q <= mem_a[n];
    am_q <= mem_a[m];
    bn_q <= mem_b[n];
    bm_q <= mem_b[m];
  end

  // Separation of one complex frame pair (X[N], X[M]) into two channel powers.
  function automatic pwr_t power(input sum_t re2, input sum_t im2);
    smp_t re, im;
    logic signed [2*FFT_W-1:0] rr, ii;
    re = smp_t'(re2 >>> 1);
    im = smp_t'(im2 >>> 1);
    rr = re * re;
    ii = im * im;
    return pwr_t'(rr) + pwr_t'(ii);
  endfunction

  function automatic pwr_t [1:0] separate(input logic [2*FFT_W-1:0] xn, input logic [2*FFT_W-1:0] xm);
    sum_t rn, in_, rm, im_;
    pwr_t [1:0] p;
    rn  = sum_t'(smp_t'(xn[2*FFT_W-1:FFT_W]));
    in_ = sum_t'(smp_t'(xn[FFT_W-1:0]));
    rm  = sum_t'(smp_t'(xm[2*FFT_W-1:FFT_W]));
    im_ = sum_t'(smp_t'(xm[FFT_W-1:0]));
    p[0] = power(rn + rm, in_ - im_);   // real channel (re input)
    p[1] = power(in_ + im_, rm - rn);   // imaginary channel (im input)
    return p;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_a     <= '0;
      cnt_b     <= '0;
      busy      <= 1'b0;
      n         <= '0;
      s1_valid  <= 1'b0;
      s1_last   <= 1'b0;
      s1_idx    <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_last  <= 1'b0;
      out_pwr   <= '0;
      overrun   <= 1'b0;
    end else if (clear) begin
      cnt_a     <= '0;
      cnt_b     <= '0;
      busy      <= 1'b0;
      n         <= '0;
      s1_valid  <= 1'b0;
      s1_last   <= 1'b0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      overrun   <= 1'b0;
    end else begin
      overrun <= (a_valid && (busy || a_full)) || (b_valid && (busy || b_full));
      if (a_valid && !busy && !a_full) cnt_a <= cnt_a + 1'b1;
      if (b_valid && !busy && !b_full) cnt_b <= cnt_b + 1'b1;
      if (!busy && frame_done) begin
        busy  <= 1'b1;
        n     <= '0;
        cnt_a <= '0;
        cnt_b <= '0;
      end else if (busy) begin
        n <= n + 1'b1;
        if (n == AW'(NPT - 1)) busy <= 1'b0;
      end
      // stage 1: X[N], X[M] read this cycle
      s1_valid <= busy;
      s1_idx   <= n;
      s1_last  <= busy && (n == AW'(NPT - 1));
      // stage 2: separation and power
      out_valid <= s1_valid;
      out_idx   <= s1_idx;
      out_last  <= s1_last;
      if (s1_valid) out_pwr <= {separate(bn_q, bm_q), separate(an_q, am_q)};
    end
  end

endmodule
