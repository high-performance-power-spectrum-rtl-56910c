// tb_result_data_buffer - self-checking test of the result buffer: averages
// and peaks of two STAs are written in a shuffled point order; the drained
// sequence must be the 256 averages in point order, then the 256 peaks, with
// out_last on word 511, under random out_ready. Writing during a drain must
// raise overrun. With out_ready held high the drain takes 512 clocks.
//
// Averages first, then peaks, follows the source; the 128-bit word per point
// and the overrun rule are this design's own.
module tb_result_data_buffer;
  import psa_pkg::*;
  localparam int N = 256;
  logic clk = 0, rst_n = 1, clear = 0;
  logic avg_valid = 0, pk_valid = 0, out_valid, out_ready = 0, out_last, overrun;
  logic [7:0] avg_idx = 0, pk_idx = 0;
  pwr_set_t avg_data = '0, pk_data = '0, out_data;
  int checks = 0, failures = 0, cyc = 0;
  pwr_set_t ea [N], ep [N];
  int n_rx = 0, t0, t1;
  bit rand_ready = 1;

  result_data_buffer #(.NPT(N)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) if (rst_n) begin
    out_ready = rand_ready ? ($urandom_range(2) != 0) : 1'b1;
    #1;
    if (out_valid && out_ready) begin
      pwr_set_t e;
      e = (n_rx < N) ? ea[n_rx] : ep[n_rx - N];
      check(out_data == e, $sformatf("word %0d", n_rx));
      check(out_last == (n_rx == 2 * N - 1), "out_last");
      if (n_rx == 0) t0 = cyc;
      if (n_rx == 2 * N - 1) t1 = cyc;
      n_rx++;
    end
  end

  task automatic fill();
    int perm [N];
    for (int i = 0; i < N - 1; i++) perm[i] = i;
    perm[N-1] = N - 1;               // the last point closes the STA
    for (int i = N - 2; i > 0; i--) begin
      int j, t;
      j = $urandom_range(i); t = perm[i]; perm[i] = perm[j]; perm[j] = t;
    end
    for (int k = 0; k < N; k++) begin ea[k] = {$urandom, $urandom, $urandom, $urandom}; ep[k] = {$urandom, $urandom, $urandom, $urandom}; end
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      avg_valid = 1; pk_valid = 1; avg_idx = 8'(perm[i]); pk_idx = 8'(perm[i]);
      avg_data = ea[perm[i]]; pk_data = ep[perm[i]];
    end
    @(negedge clk); avg_valid = 0; pk_valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    fill();
    // a write during the drain is an overrun
    @(negedge clk); avg_valid = 1; avg_idx = 3;
    @(negedge clk); avg_valid = 0;
    check(overrun == 1, "overrun not flagged");
    wait (n_rx == 2 * N);
    n_rx = 0; rand_ready = 0;
    fill();
    wait (n_rx == 2 * N);
    check(t1 - t0 == 2 * N - 1, $sformatf("drain took %0d clocks", t1 - t0 + 1));
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
