// tb_psa_avg - end-to-end test of the power spectrum engine built with the average
// unit only, at reduced size (32-point blocks, 8 blocks per STA, 2 STAs per
// cycle, 4096-word SDRAM): each STA sends only its 32 averages.
//
// The testbench plays the board around the engine: it drives the two LVDS
// lanes with four test channels (a tone at a different frequency point on
// each channel plus small random noise), a reference clock and marker
// pulses, connects two behavioural FFT cores and an SDRAM model, and talks
// to the register bus like the control FPGA.
//
// Checks:
//  * every result word written to the SDRAM equals a reference computed by
//    the testbench from the FFT core outputs it observes (separation, power,
//    sum / STA_BLOCKS, peak with block index), and lands at the next address
//    of the circular result area, averages first, then peaks;
//  * every raw input word holds, in order, sample sets that were sent;
//  * the averaged spectrum (the peak spectrum when only the peak unit is
//    built) of each channel is largest at its tone's point;
//  * Status, Marker and Flags registers.
// Mechanisms made to happen and counted (a failure if one never happens):
// bank swaps, write stalls with both banks full (FFT held off), input FIFO
// overflow (SDRAM held off), completed STAs, wraps of the input and result
// areas, input/result contention at the SDRAM mux, cycle starts latching the
// counters, STOP/START restart, and marker resets of the timestamp.
//
// The sizes, the block structure and the STA / cycle lengths follow the
// source; the FFT and SDRAM port protocols, the register map and the test
// signals are this design's own.
module tb_psa_avg;
  import psa_pkg::*;
  localparam int N   = 32;
  localparam int SB  = 8;        // blocks per STA
  localparam int AW  = 12;        // SDRAM word address bits
  localparam bit AVG = 1'b1;      // average unit present
  localparam bit PK  = 1'b0;       // peak unit present
  localparam int NRES = N * (int'(AVG) + int'(PK)); // result words per STA
  localparam int BS  = 5;           // words per block = 2**BS
  localparam int KW  = $clog2(N);
  localparam int HALF = 23;         // strobe half-period, ns: 21.7 MHz (clk = 10 ns)

  logic clk = 0, rst_n = 1;
  logic strobe = 0, ref_clk = 0, marker = 0;
  logic [3:0] lane_a = 0, lane_b = 0;
  logic bus_cs = 0, bus_we = 0;
  logic [3:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic fft_clear;
  logic fa_in_ready, fa_in_valid, fa_out_valid, fb_in_ready, fb_in_valid, fb_out_valid;
  logic fa_rdy_m, fb_rdy_m;
  logic signed [15:0] fa_in_re, fa_in_im, fa_out_re, fa_out_im;
  logic signed [15:0] fb_in_re, fb_in_im, fb_out_re, fb_out_im;
  logic [KW-1:0] fa_out_idx, fb_out_idx;
  logic sdram_valid, sdram_ready, sdram_ready_tb = 1;
  logic [AW-1:0] sdram_addr;
  logic [127:0] sdram_data;
  bit hold_fft = 0, hold_sdram = 0;

  int checks = 0, failures = 0;

  psa_top #(.NPT(32), .STA_BLOCKS(8), .CYCLE_STAS(2), .SDRAM_AW(12), .PEAK_EN(1'b0)) dut (.*);

  fft_core_model #(.N(N)) u_fa (.clk, .rst_n, .clear(fft_clear), .in_ready(fa_rdy_m),
    .in_valid(fa_in_valid), .in_re(fa_in_re), .in_im(fa_in_im),
    .out_valid(fa_out_valid), .out_idx(fa_out_idx), .out_re(fa_out_re), .out_im(fa_out_im));
  fft_core_model #(.N(N)) u_fb (.clk, .rst_n, .clear(fft_clear), .in_ready(fb_rdy_m),
    .in_valid(fb_in_valid), .in_re(fb_in_re), .in_im(fb_in_im),
    .out_valid(fb_out_valid), .out_idx(fb_out_idx), .out_re(fb_out_re), .out_im(fb_out_im));
  assign fa_in_ready = fa_rdy_m & !hold_fft;
  assign fb_in_ready = fb_rdy_m & !hold_fft;
  assign sdram_ready = sdram_ready_tb & !hold_sdram;

  always #5 clk = ~clk;
  always #151 ref_clk = ~ref_clk;
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // ------------------------------------------------------------ mechanisms
  int n_swap = 0, n_stall = 0, n_ovf = 0, n_sta = 0, n_inwrap = 0, n_reswrap = 0;
  int n_contend = 0, n_cycle = 0, n_restart = 0, n_marker = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.g_cb[0].u_cb.swapped) n_swap++;
    if (dut.fifo_out_valid && !dut.cb_in_ready[0]) n_stall++;
    if (dut.fifo_overflow) n_ovf++;
    if (dut.sta_done) n_sta++;
    if (dut.in_wrap) n_inwrap++;
    if (dut.res_wrap) n_reswrap++;
    if (dut.idb_out_valid && dut.rdb_valid && sdram_ready && dut.running) n_contend++;
    if (dut.cycle_start) n_cycle++;
    if (dut.restart) n_restart++;
    if (dut.u_ts.marker_seen) n_marker++;
  end

  // ------------------------------------------------------------ input drive
  function automatic sample_t tone(input int c, input int n);
    real v;
    int  k, r;
    k = (N / 16) * (c + 1) + 1;
    v = 5.0 * $cos(2.0 * 3.14159265358979 * real'(k * (n % N)) / real'(N) + 0.3 * c);
    r = $rtoi(v + ((v >= 0.0) ? 0.5 : -0.5)) + $urandom_range(2) - 1;
    if (r > 7) r = 7;
    if (r < -8) r = -8;
    return sample_t'(r);
  endfunction

  sample_set_t sent [$];
  int n_global = 0;
  initial begin
    sample_set_t s;
    #3;
    forever begin
      for (int c = 0; c < 4; c++) s[c] = tone(c, n_global);
      n_global++;
      // CH1 / CH3 while the strobe is high, CH2 / CH4 while it is low,
      // changing 2 ns after each edge
      strobe = 1;
      #2 lane_a = s[0]; lane_b = s[2];
      #(HALF - 2);
      strobe = 0;
      #2 lane_a = s[1]; lane_b = s[3];
      sent.push_back(s);
      if (sent.size() > 20000) void'(sent.pop_front());
      #(HALF - 2);
    end
  end

  int markers = 0;
  initial begin
    #1000;
    forever begin
      #($urandom_range(20000, 60000));
      @(negedge ref_clk); #20 marker = 1; markers++; #60 marker = 0;
    end
  end

  // ------------------------------------------------------------ reference model
  int  ar [N], ai [N], br [N], bi [N];
  int  na = 0, nb = 0, blk = 0;
  longint unsigned acc [N][4];
  logic [31:0] pkv [N][4];
  int  pkb [N][4];
  pwr_set_t exp_q [$];

  function automatic longint hf(input longint v);
    return (v >= 0) ? v / 2 : -((-v + 1) / 2);
  endfunction

  task automatic frame_pair();
    for (int k = 0; k < N; k++) begin
      int m;
      longint p [4];
      m = (N - k) % N;
      for (int g = 0; g < 2; g++) begin
        longint rk, ik, rm, im, r1, i1, r2, i2;
        rk = (g == 0) ? ar[k] : br[k]; ik = (g == 0) ? ai[k] : bi[k];
        rm = (g == 0) ? ar[m] : br[m]; im = (g == 0) ? ai[m] : bi[m];
        r1 = hf(rk + rm); i1 = hf(ik - im); r2 = hf(ik + im); i2 = hf(rm - rk);
        p[2*g] = r1 * r1 + i1 * i1;
        p[2*g+1] = r2 * r2 + i2 * i2;
      end
      for (int c = 0; c < 4; c++) begin
        acc[k][c] = (blk == 0) ? longint'(p[c]) : acc[k][c] + longint'(p[c]);
        if (blk == 0 || p[c] > longint'(pkv[k][c])) begin pkv[k][c] = 32'(p[c]); pkb[k][c] = blk; end
      end
    end
    blk++;
    if (blk == SB) begin
      pwr_set_t w;
      if (AVG) for (int k = 0; k < N; k++) begin
        for (int c = 0; c < 4; c++) w[c] = pwr_t'(acc[k][c] / SB);
        exp_q.push_back(w);
      end
      if (PK) for (int k = 0; k < N; k++) begin
        for (int c = 0; c < 4; c++) w[c] = {pkv[k][c][31:$clog2(SB)], $clog2(SB)'(pkb[k][c])};
        exp_q.push_back(w);
      end
      blk = 0;
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (fft_clear) begin
      na = 0; nb = 0; blk = 0; exp_q.delete();
    end else begin
      if (fa_out_valid) begin ar[fa_out_idx] = fa_out_re; ai[fa_out_idx] = fa_out_im; na++; end
      if (fb_out_valid) begin br[fb_out_idx] = fb_out_re; bi[fb_out_idx] = fb_out_im; nb++; end
      if (na == N && nb == N) begin frame_pair(); na = 0; nb = 0; end
    end
  end

  // ------------------------------------------------------------ SDRAM side
  int res_start, exp_res_addr, exp_in_addr, in_last_word;
  int n_res_words = 0, n_in_words = 0, n_skip = 0, sta_checked = 0, res_in_sta = 0;
  bit spec_checked = 0;
  pwr_set_t avg_seen [N];
  bit writes_while_stopped = 0;

  task automatic check_spectrum();
    for (int c = 0; c < 4; c++) begin
      int best; logic [31:0] bv;
      best = 1; bv = 0;
      for (int k = 1; k <= N / 2; k++) if (avg_seen[k][c] > bv) begin bv = avg_seen[k][c]; best = k; end
      check(best == (N / 16) * (c + 1) + 1, $sformatf("ch%0d spectrum peaks at %0d", c + 1, best));
    end
    spec_checked = 1;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (dut.restart) begin
      exp_in_addr = 0; exp_res_addr = res_start; res_in_sta = 0;
    end else if (sdram_valid && sdram_ready) begin
      if (!dut.running) writes_while_stopped = 1;
      if (int'(sdram_addr) >= res_start) begin
        pwr_set_t e;
        check(int'(sdram_addr) == exp_res_addr, $sformatf("result address %h expected %h", sdram_addr, exp_res_addr));
        exp_res_addr = (exp_res_addr == (1 << AW) - 1) ? res_start : exp_res_addr + 1;
        if (exp_q.size() == 0) check(0, "result word without reference");
        else begin
          e = exp_q.pop_front();
          check(sdram_data == e, $sformatf("result word %0d of STA: %h expected %h", res_in_sta, sdram_data, e));
        end
        if (res_in_sta < N) avg_seen[res_in_sta] = sdram_data;
        res_in_sta++;
        n_res_words++;
        if (res_in_sta == NRES) begin
          res_in_sta = 0; sta_checked++;
          if (!spec_checked) check_spectrum();
        end
      end else begin
        check(int'(sdram_addr) == exp_in_addr, "input address");
        exp_in_addr = (exp_in_addr == in_last_word) ? 0 : exp_in_addr + 1;
        for (int i = 0; i < 8; i++) begin
          sample_set_t sv;
          int tries;
          sv = sdram_data[16*i +: 16];
          tries = 0;
          while (sent.size() > 0 && sent[0] != sv && tries < 3000) begin void'(sent.pop_front()); tries++; n_skip++; end
          check(sent.size() > 0 && sent[0] == sv, "input word holds sets that were sent");
          if (sent.size() > 0) void'(sent.pop_front());
        end
        n_in_words++;
      end
    end
  end

  // ------------------------------------------------------------ register bus
  task automatic wr(input logic [3:0] a, input logic [31:0] d);
    @(negedge clk); bus_cs = 1; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_cs = 0; bus_we = 0;
    @(negedge clk);
  endtask
  task automatic rd(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk); bus_cs = 1; bus_we = 0; bus_addr = a;
    @(negedge clk); bus_cs = 0; d = bus_rdata;
  endtask

  task automatic wait_sta(input int target);
    while (sta_checked < target) @(posedge clk);
  endtask

  initial begin
    logic [31:0] d;
    flags_t f;
    int skip0, blk_clk;
    blk_clk = N * 2 * HALF / 10;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // input area: block 0 only (32 words); result area: the last block
    in_last_word = (1 << BS) - 1;
    res_start = (1 << AW) - (1 << BS);
    wr(REG_INPUT_LAST, 0);
    wr(REG_RESULT_START, ((1 << AW) >> BS) - 1);
    wr(REG_COMMAND, CMD_SETUP);
    wr(REG_COMMAND, CMD_START);
    // one full STA
    wait_sta(1);
    $display("first STA checked at %0t", $time);
    // FFT cores held off: both banks fill, the writer stalls
    @(negedge clk) hold_fft = 1;
    repeat (3 * blk_clk) @(posedge clk);
    @(negedge clk) hold_fft = 0;
    repeat (2 * blk_clk) @(posedge clk);
    // SDRAM held off: buffers fill, the input FIFO overflows
    @(negedge clk) hold_sdram = 1;
    repeat (1000) @(posedge clk);
    @(negedge clk) hold_sdram = 0;
    repeat (200) @(posedge clk);
    rd(REG_FLAGS, d);
    f = flags_t'(d[3:0]);
    check(f.fifo_overflow && f.running, "FLAGS after overflow");
    check(!f.fft_overrun && !f.result_overrun, "no separator / result overrun");
    // STOP: nothing is processed or written
    wr(REG_COMMAND, CMD_STOP);
    repeat (20) @(posedge clk);
    writes_while_stopped = 0;
    repeat (3000) @(posedge clk);
    check(!writes_while_stopped, "SDRAM written while stopped");
    rd(REG_FLAGS, d);
    f = flags_t'(d[3:0]);
    check(!f.running, "not running after STOP");
    // START again: a fresh STA from the SETUP addresses
    skip0 = n_skip;
    wr(REG_COMMAND, CMD_START);
    begin
      int s0;
      s0 = sta_checked;
      wait_sta(s0 + 1);
    end
    rd(REG_FLAGS, d);
    check(d[3:0] == 4'b0001, $sformatf("FLAGS after restart %h", d));
    rd(REG_STATUS, d);
    check(d == 32'(exp_res_addr), $sformatf("STATUS %h expected %h", d, exp_res_addr));
    rd(REG_MK_LIVE, d);
    // a marker that rose in the last few clocks may not be counted yet
    check(d == 32'(markers) || d + 1 == 32'(markers), $sformatf("marker count %0d expected %0d", d, markers));
    rd(REG_MARKER, d);
    check(d <= 32'(markers), "latched marker count");
    // mechanisms
    check(n_swap > 2 * SB, "bank swaps");
    check(n_stall > 0, "write stall with both banks full");
    check(n_ovf > 0, "input FIFO overflow");
    check(n_sta >= 2, "completed STAs");
    check(n_inwrap > 0 && n_reswrap > 0, "circular area wraps");
    check(n_contend > 0, "input / result contention");
    check(n_cycle >= 2, "cycle starts");
    check(n_restart == 2, "restarts");
    check(n_marker > 0, "marker pulses");
    check(n_res_words >= 2 * NRES, "result words");
    $display("swaps %0d stalls %0d overflows %0d STAs %0d wraps %0d/%0d contention %0d cycles %0d restarts %0d markers %0d",
             n_swap, n_stall, n_ovf, n_sta, n_inwrap, n_reswrap, n_contend, n_cycle, n_restart, n_marker);
    $display("result words %0d input words %0d skipped sets %0d (%0d after restart) STAs checked %0d",
             n_res_words, n_in_words, n_skip, n_skip - skip0, sta_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd20_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
