// tb_psa_rate - input-rate test of the whole engine at its default size
// (256-point blocks, 128 blocks per STA) with the source's 66 MHz system
// clock.
//
// The source states that with an FFT core needing about 3 clocks per point
// the design sustains up to 22 MHz per channel at 66 MHz. This test runs
// two phases against two behavioural FFT cores of exactly 3 clocks per
// point and an SDRAM that is always ready:
//  1. strobe 21.7 MHz for one complete STA and more: every set the sampler
//     takes must reach the channel buffers (none lost in the input FIFO),
//     the FLAGS register must show no overflow or overrun, and the SDRAM
//     must receive one input word per 8 sets and the 512 result words;
//  2. strobe 22.5 MHz, above what 3-clock cores can take: the frame period
//     then set by the cores is measured and must be at most 3N + 8 clocks,
//     and the input FIFO must overflow (the loss is flagged, not hidden).
// The clock and strobe rates and the 3 clocks per point follow the source;
// the 8-clock frame overhead budget is this design's own.
module tb_psa_rate;
  import psa_pkg::*;
  localparam int N  = 256;
  localparam int SB = 128;
  localparam int AW = 23;
  localparam int KW = $clog2(N);
  localparam realtime TCLK = 15.15;   // 66 MHz

  logic clk = 0, rst_n = 1;
  logic strobe = 0, ref_clk = 0, marker = 0;
  logic [3:0] lane_a = 0, lane_b = 0;
  logic bus_cs = 0, bus_we = 0;
  logic [3:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic fft_clear;
  logic fa_in_ready, fa_in_valid, fa_out_valid, fb_in_ready, fb_in_valid, fb_out_valid;
  logic signed [15:0] fa_in_re, fa_in_im, fa_out_re, fa_out_im;
  logic signed [15:0] fb_in_re, fb_in_im, fb_out_re, fb_out_im;
  logic [KW-1:0] fa_out_idx, fb_out_idx;
  logic sdram_valid, sdram_ready = 1;
  logic [AW-1:0] sdram_addr;
  logic [127:0] sdram_data;

  int checks = 0, failures = 0;
  realtime half = 23.0;               // strobe half-period, ns

  psa_top dut (.*);

  fft_core_model #(.N(N)) u_fa (.clk, .rst_n, .clear(fft_clear), .in_ready(fa_in_ready),
    .in_valid(fa_in_valid), .in_re(fa_in_re), .in_im(fa_in_im),
    .out_valid(fa_out_valid), .out_idx(fa_out_idx), .out_re(fa_out_re), .out_im(fa_out_im));
  fft_core_model #(.N(N)) u_fb (.clk, .rst_n, .clear(fft_clear), .in_ready(fb_in_ready),
    .in_valid(fb_in_valid), .in_re(fb_in_re), .in_im(fb_in_im),
    .out_valid(fb_out_valid), .out_idx(fb_out_idx), .out_re(fb_out_re), .out_im(fb_out_im));

  always #(TCLK / 2) clk = ~clk;
  always #151 ref_clk = ~ref_clk;
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // random 4-bit samples, CH1 / CH3 while the strobe is high, 2 ns after each edge
  initial begin
    sample_set_t s;
    #3;
    forever begin
      s = sample_set_t'($urandom);
      strobe = 1;
      #2 lane_a = s[0]; lane_b = s[2];
      #(half - 2);
      strobe = 0;
      #2 lane_a = s[1]; lane_b = s[3];
      #(half - 2);
    end
  end

  // counters
  longint n_taken = 0, n_moved = 0, n_in_words = 0, n_res_words = 0, n_ovf = 0, n_sta = 0;
  longint cyc = 0, last_start = 0, min_gap = 0, n_start = 0;
  always @(posedge strobe) if (dut.set_valid) n_taken++;
  always @(posedge clk) begin
    cyc++;
    if (dut.fifo_out_valid && dut.fifo_out_ready) n_moved++;
    if (dut.fifo_overflow) n_ovf++;
    if (dut.sta_done) n_sta++;
    if (sdram_valid && sdram_ready) begin
      if (sdram_addr < AW'(1 << 22)) n_in_words++; else n_res_words++;
    end
    if (dut.start_a) begin
      if (n_start > 0 && (min_gap == 0 || cyc - last_start < min_gap)) min_gap = cyc - last_start;
      last_start = cyc;
      n_start++;
    end
  end

  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); bus_cs = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_cs = 0; bus_we = 0;
    @(negedge clk);
  endtask
  task automatic rd(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk); bus_cs = 1; bus_we = 0; bus_addr = a;
    @(negedge clk); bus_cs = 0; d = bus_rdata;
  endtask

  initial begin
    logic [31:0] d;
    flags_t f;
    longint sets0, words0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // input area: the lower half of the SDRAM; results: the upper half
    wr(REG_INPUT_LAST, 32'((1 << 17) - 1));
    wr(REG_RESULT_START, 32'(1 << 17));
    wr(REG_COMMAND, 32'(CMD_SETUP));
    wr(REG_COMMAND, 32'(CMD_START));

    // phase 1: 21.7 MHz, one STA and a bit
    repeat (200) @(posedge clk);
    n_taken = 0; n_moved = 0;
    sets0 = 0;
    while (n_sta < 1) @(posedge clk);
    repeat (2000) @(posedge clk);
    half = 1000.0;                    // slow the strobe right down to let the pipe drain
    repeat (300) @(posedge clk);
    // sets already in the FIFO when the counters were cleared may add a few
    check(n_moved >= n_taken && n_moved <= n_taken + 16,
          $sformatf("sets taken %0d, reached the buffers %0d", n_taken, n_moved));
    check(n_ovf == 0, $sformatf("%0d input FIFO overflows at 21.7 MHz", n_ovf));
    rd(REG_FLAGS, d); f = flags_t'(d[3:0]);
    check(f.running && !f.fifo_overflow && !f.fft_overrun && !f.result_overrun,
          $sformatf("FLAGS %b after the 21.7 MHz phase", d[3:0]));
    check(n_res_words == 2 * N, $sformatf("%0d result words, expected %0d", n_res_words, 2 * N));
    words0 = n_in_words;
    check(words0 >= (n_moved - 8) / 8 && words0 <= (n_moved + 200) / 8,
          $sformatf("%0d input words for %0d sets", words0, n_moved));
    $display("phase 1: %0d sets, %0d frames, %0d input words, %0d result words",
             n_moved, n_start, n_in_words, n_res_words);

    // phase 2: 22.5 MHz, above the cores' rate
    half = 22.2;
    min_gap = 0; n_start = 0;
    repeat (40 * 3 * N) @(posedge clk);
    check(n_start > 30, $sformatf("only %0d frames in phase 2", n_start));
    check(min_gap <= 3 * N + 8, $sformatf("frame period %0d clocks, budget %0d", min_gap, 3 * N + 8));
    check(n_ovf > 0, "no input FIFO overflow above the cores' rate");
    rd(REG_FLAGS, d); f = flags_t'(d[3:0]);
    check(f.fifo_overflow, "FLAGS overflow bit after phase 2");
    $display("phase 2: frame period %0d clocks = %.2f MHz per channel at 66 MHz, %0d overflows",
             min_gap, 66.0 * N / real'(min_gap), n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
