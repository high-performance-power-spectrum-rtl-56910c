// tb_control_unit - self-checking test of the command sequencer with a
// small cycle (4-point blocks, 2 blocks per STA, 2 STAs per cycle = 16
// samples). Checks SETUP latching, START (running, one restart pulse,
// cleared flags), STOP, a cycle_start pulse on the first sample of every
// 16, restart of the count on START, and the sticky error flags.
//
// SETUP / START / STOP and the 128 x 128 x 256 cycle follow the source;
// the restart pulse and the sticky flags are this design's own.
module tb_control_unit;
  import psa_pkg::*;
  logic clk = 0, rst_n = 1;
  logic cmd_setup = 0, cmd_start = 0, cmd_stop = 0;
  logic [17:0] setup_input_last = 0, setup_result_start = 0, input_last_blk, result_start_blk;
  logic running, restart, sample_accepted = 0, cycle_start;
  logic ev_fifo_overflow = 0, ev_fft_overrun = 0, ev_result_overrun = 0;
  flags_t flags;
  int checks = 0, failures = 0, n_restart = 0, n_cs = 0, n_samp = 0;
  int cs_at [$];

  control_unit #(.NPT(4), .STA_BLOCKS(2), .CYCLE_STAS(2), .BAW(18)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic pulse(ref logic s);
    @(negedge clk); s = 1; @(negedge clk); s = 0;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (restart) n_restart++;
    if (cycle_start) cs_at.push_back(n_samp - 1);   // index of the sample that started it
    if (sample_accepted) n_samp++;
  end

  task automatic samples(input int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk); sample_accepted = 1;
      @(negedge clk); sample_accepted = 0;
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    setup_input_last = 18'd100; setup_result_start = 18'd200;
    pulse(cmd_setup);
    @(negedge clk);
    check(input_last_blk == 100 && result_start_blk == 200, "SETUP latches addresses");
    setup_input_last = 18'd7;
    @(negedge clk);
    check(input_last_blk == 100, "addresses change only on SETUP");
    check(!running, "idle after reset");
    pulse(cmd_start);
    @(negedge clk);
    check(running && flags.running, "running after START");
    check(n_restart == 1, "one restart pulse");
    n_samp = 0; cs_at.delete();
    samples(40);
    @(negedge clk);
    check(cs_at.size() == 3, $sformatf("%0d cycle starts in 40 samples", cs_at.size()));
    foreach (cs_at[i]) check(cs_at[i] == 16 * i, $sformatf("cycle start at sample %0d", cs_at[i]));
    // sticky flags
    pulse(ev_fifo_overflow); pulse(ev_result_overrun);
    repeat (3) @(negedge clk);
    check(flags.fifo_overflow && flags.result_overrun && !flags.fft_overrun, "sticky flags");
    pulse(cmd_stop);
    @(negedge clk);
    check(!running && !flags.running, "stopped");
    check(flags.fifo_overflow, "flags survive STOP");
    // START again: new cycle begins with the next sample
    pulse(cmd_start);
    @(negedge clk);
    check(running && flags == flags_t'(4'b0001), "START clears flags");
    n_samp = 0; cs_at.delete();
    samples(3);
    @(negedge clk);
    check(cs_at.size() == 1 && cs_at[0] == 0, "cycle restarts after START");
    check(n_restart == 2, "restart on each START");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
