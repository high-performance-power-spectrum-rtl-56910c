// tb_sync_fifo - self-checking test of the synchronous FIFO: random pushes
// and pops against a queue model, full / empty flags, overflow pulses on a
// push into a full FIFO, first-word-fall-through data, and clear.
//
// The source does not describe this FIFO; all of it is this design's own.
module tb_sync_fifo;
  logic clk = 0, rst_n = 1, clear = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, overflow;
  logic [15:0] in_data = 0, out_data;
  int checks = 0, failures = 0, n_ovf = 0, n_pop = 0, n_full = 0;
  logic [15:0] q [$];

  sync_fifo #(.WIDTH(16), .DEPTH(16)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // an edge, so that the asynchronous reset acts

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      // phases: fill-heavy, drain-heavy, balanced
      int pp = (i < 1000) ? 80 : (i < 2000) ? 20 : 50;
      @(negedge clk);
      check(out_valid == (q.size() != 0), "out_valid vs model");
      check(in_ready == (q.size() != 16), "in_ready vs model");
      if (q.size() != 0) check(out_data == q[0], $sformatf("head %h exp %h", out_data, q[0]));
      if (q.size() == 16) n_full++;
      in_valid = ($urandom_range(99) < pp);
      in_data  = 16'($urandom);
      out_ready = ($urandom_range(99) >= pp);
      #1;
      begin
        bit do_push, do_pop;
        do_push = in_valid && in_ready;
        do_pop  = out_ready && out_valid;
        @(posedge clk);
        if (do_pop) begin void'(q.pop_front()); n_pop++; end
        if (do_push) q.push_back(in_data);
      end
    end
    in_valid = 0;
    // clear empties the FIFO
    @(negedge clk); clear = 1; @(negedge clk); clear = 0; q.delete();
    check(!out_valid && in_ready, "clear empties");
    check(n_full > 10, "FIFO never became full");
    check(n_ovf > 5, "no overflow pulses seen");
    check(n_pop > 500, "too few pops");
    $display("pops %0d overflows %0d", n_pop, n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // overflow must pulse one clock after each push into a full FIFO
  logic exp_ovf = 0;
  always @(posedge clk) begin
    if (rst_n && !clear) begin
      check(overflow == exp_ovf, "overflow flag");
      if (overflow) n_ovf++;
    end
    exp_ovf <= in_valid && !in_ready;
  end

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
