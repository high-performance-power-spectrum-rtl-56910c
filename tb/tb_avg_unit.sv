// tb_avg_unit - self-checking test of the STA averager at its full size
// (256 points, 128 blocks). Two STAs of random 32-bit power sets are fed
// with random idle clocks between them; the TB keeps 64-bit sums per point
// and channel. Averages (sum / 128, truncated) must come out only during the
// last block of each STA, two clocks after the matching input, and sta_done
// must pulse once per STA with the last point.
//
// The 128-block average follows the source; the truncating divide and the
// two-clock output latency checked here are this design's own choices.
module tb_avg_unit;
  import psa_pkg::*;
  localparam int N = 256, B = 128;
  logic clk = 0, rst_n = 1, clear = 0;
  logic in_valid = 0, in_last = 0, out_valid, sta_done;
  logic [7:0] in_idx = 0, out_idx;
  pwr_set_t in_pwr = '0, out_avg;
  logic [6:0] blk;
  int checks = 0, failures = 0, cyc = 0;
  longint unsigned sum [N][4];
  int n_out = 0, n_done = 0;
  int in_cyc [N];

  avg_unit #(.NPT(N), .BLOCKS(B)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (sta_done) n_done++;
    if (out_valid) begin
      n_out++;
      check(cyc - in_cyc[out_idx] == 2, "latency");
      for (int c = 0; c < 4; c++)
        check(out_avg[c] == pwr_t'(sum[out_idx][c] / B),
              $sformatf("k=%0d ch%0d avg %0d expected %0d", out_idx, c + 1, out_avg[c], sum[out_idx][c] / B));
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      for (int k = 0; k < N; k++) for (int c = 0; c < 4; c++) sum[k][c] = 0;
      for (int b = 0; b < B; b++)
        for (int k = 0; k < N; k++) begin
          @(negedge clk);
          while ($urandom_range(7) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1; in_idx = 8'(k); in_last = (k == N - 1);
          for (int c = 0; c < 4; c++) begin
            in_pwr[c] = (s == 0 && c == 0) ? 32'hFFFF_FFFF : $urandom;  // worst case on CH1
            sum[k][c] += in_pwr[c];
          end
          in_cyc[k] = cyc;   // sampled on the next edge, result after the one after
        end
      @(negedge clk); in_valid = 0;
      repeat (5) @(negedge clk);
      check(n_out == (s + 1) * N, $sformatf("outputs %0d after STA %0d", n_out, s));
      check(n_done == s + 1, "sta_done count");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
