// tb_peak_unit - self-checking test of the peak detector at full size.
// Random powers (with ties on one channel, and small values so that ties
// are frequent) over two STAs; the TB tracks the peak and the first block in
// which it occurred. Each output word must equal {peak[31:7], block}.
//
// The peak with its block index follows the source; the bit split of the
// word and the tie rule checked here are this design's own.
module tb_peak_unit;
  import psa_pkg::*;
  localparam int N = 256, B = 128;
  logic clk = 0, rst_n = 1, clear = 0;
  logic in_valid = 0, in_last = 0, out_valid;
  logic [7:0] in_idx = 0, out_idx;
  pwr_set_t in_pwr = '0, out_peak;
  int checks = 0, failures = 0;
  logic [31:0] pk [N][4];
  int          pb [N][4];
  int n_out = 0, n_nonzero_blk = 0;

  peak_unit #(.NPT(N), .BLOCKS(B)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    n_out++;
    for (int c = 0; c < 4; c++) begin
      check(out_peak[c] == {pk[out_idx][c][31:7], 7'(pb[out_idx][c])},
            $sformatf("k=%0d ch%0d peak %h expected %h/%0d", out_idx, c + 1, out_peak[c], pk[out_idx][c], pb[out_idx][c]));
      if (pb[out_idx][c] != 0) n_nonzero_blk++;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++) begin
      for (int b = 0; b < B; b++)
        for (int k = 0; k < N; k++) begin
          @(negedge clk);
          if ($urandom_range(9) == 0) begin in_valid = 0; @(negedge clk); end
          in_valid = 1; in_idx = 8'(k); in_last = (k == N - 1);
          for (int c = 0; c < 4; c++) begin
            in_pwr[c] = (c == 3) ? 32'($urandom_range(20)) << 7 : $urandom;
            if (b == 0 || in_pwr[c] > pk[k][c]) begin pk[k][c] = in_pwr[c]; pb[k][c] = b; end
          end
        end
      @(negedge clk); in_valid = 0;
      repeat (5) @(negedge clk);
      check(n_out == (s + 1) * N, "output count");
    end
    check(n_nonzero_blk > N, "block index never non-zero");
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
