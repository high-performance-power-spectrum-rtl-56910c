// tb_sdram_mux - self-checking test of the SDRAM write mux and its two
// circular address areas. The input area is set to blocks 0..1 (64 words)
// and the result area to the last two blocks, so both wrap often. Random
// input and result words are offered with random SDRAM back-pressure; every
// write must carry the next word of its stream at the next address of its
// area, input words win when both wait, nothing is written while enable is
// low, and load returns both pointers to their starts.
//
// The two circular areas with fixed outer ends follow the source; block size
// and input priority are this design's own.
module tb_sdram_mux;
  localparam int AW = 23, BS = 5;
  logic clk = 0, rst_n = 1, load = 0, enable = 0;
  logic [AW-BS-1:0] input_last_blk = 1, result_start_blk = 18'h3FFFE;
  logic in_valid = 0, in_ready, res_valid = 0, res_ready;
  logic [127:0] in_data = 0, res_data = 0, sdram_data;
  logic sdram_valid, sdram_ready = 0, in_wrap, res_wrap;
  logic [AW-1:0] sdram_addr, result_addr;
  int checks = 0, failures = 0;
  int exp_in = 0, exp_res = (1 << AW) - 64;
  int n_in = 0, n_res = 0, n_in_wrap = 0, n_res_wrap = 0, n_prio = 0;
  bit do_load = 0;

  sdram_mux #(.AW(AW), .BLK_SHIFT(BS)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    if (in_wrap) n_in_wrap++;
    if (res_wrap) n_res_wrap++;
  end

  always @(negedge clk) if (rst_n) begin
    // new offers only when the previous one was taken (valid stays up)
    if (!(in_valid && !in_ready)) begin in_valid = ($urandom_range(2) == 0); in_data = {4{$urandom}}; end
    if (!(res_valid && !res_ready)) begin res_valid = ($urandom_range(1) == 0); res_data = {4{$urandom}}; end
    sdram_ready = ($urandom_range(3) != 0);
    load = do_load;
    #1;
    if (load) begin
      exp_in = 0; exp_res = (1 << AW) - 64;
    end else if (!enable) begin
      check(!sdram_valid && !in_ready && !res_ready, "activity while disabled");
    end else if (sdram_valid && sdram_ready) begin
      check(result_addr == AW'(exp_res), "status address");
      if (in_valid) begin
        check(in_ready && !res_ready, "input word must win");
        check(sdram_addr == AW'(exp_in) && sdram_data == in_data, $sformatf("input write at %h expected %h", sdram_addr, exp_in));
        exp_in = (exp_in == 63) ? 0 : exp_in + 1;
        n_in++;
        if (res_valid) n_prio++;
      end else begin
        check(res_ready, "result ready");
        check(sdram_addr == AW'(exp_res) && sdram_data == res_data, $sformatf("result write at %h expected %h", sdram_addr, exp_res));
        exp_res = (exp_res == (1 << AW) - 1) ? (1 << AW) - 64 : exp_res + 1;
        n_res++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    do_load = 1;
    @(negedge clk); enable = 1; do_load = 0;
    repeat (1500) @(posedge clk);
    @(negedge clk); enable = 0;
    repeat (50) @(posedge clk);
    @(negedge clk); enable = 1; do_load = 1;
    @(negedge clk); do_load = 0;
    repeat (1500) @(posedge clk);
    check(n_in_wrap > 3 && n_res_wrap > 3, $sformatf("wraps %0d / %0d", n_in_wrap, n_res_wrap));
    check(n_prio > 50, "priority case never seen");
    check(n_in > 500 && n_res > 300, $sformatf("writes %0d / %0d", n_in, n_res));
    $display("input writes %0d result writes %0d", n_in, n_res);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
