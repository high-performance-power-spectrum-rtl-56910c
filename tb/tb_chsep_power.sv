// tb_chsep_power - self-checking test of channel separation and power.
//
// Frame 1: random 16-bit FFT outputs for both cores, delivered in a shuffled
// index order; every power value is compared with an integer reference
// written from the separation formulas. Frame 2: the TB builds the complex
// transform of two known real signals per core (x1 + j*x2) in double
// precision; the power of each separated channel must match |X1(k)|^2 and
// |X2(k)|^2 of the signals transformed one at a time, within rounding. The
// test also checks the N+2 clock output timing and the overrun flag.
//
// The separation follows the source's method with its imaginary-part
// formulas corrected; the frame storage and timing are this design's own.
module tb_chsep_power;
  import psa_pkg::*;
  localparam int N = 256;
  logic clk = 0, rst_n = 1, clear = 0;
  logic a_valid = 0, b_valid = 0;
  logic [7:0] a_idx = 0, b_idx = 0;
  logic signed [15:0] a_re = 0, a_im = 0, b_re = 0, b_im = 0;
  logic out_valid, out_last, overrun;
  logic [7:0] out_idx;
  pwr_set_t out_pwr;
  int checks = 0, failures = 0, cyc = 0;
  int fr [2][N], fi [2][N];         // frame given to the DUT, per core
  longint expp [N][4];              // expected power
  real    tol [N][4];
  int     got = 0, first_cyc = -1, done_cyc;

  chsep_power #(.NPT(N)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic longint hf(input longint v);  // floor(v/2)
    return (v >= 0) ? v / 2 : -((-v + 1) / 2);
  endfunction

  task automatic send_frame();
    int perm [N];
    for (int i = 0; i < N; i++) perm[i] = i;
    perm.shuffle();
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      a_valid = 1; b_valid = 1;
      a_idx = 8'(perm[i]); b_idx = 8'(perm[i]);
      a_re = 16'(fr[0][perm[i]]); a_im = 16'(fi[0][perm[i]]);
      b_re = 16'(fr[1][perm[i]]); b_im = 16'(fi[1][perm[i]]);
    end
    @(negedge clk); a_valid = 0; b_valid = 0; done_cyc = cyc;
  endtask

  always @(negedge clk) if (rst_n && out_valid) begin
    if (first_cyc < 0) first_cyc = cyc;
    check(out_idx == 8'(got), "output order");
    check(out_last == (got == N - 1), "out_last");
    for (int c = 0; c < 4; c++) begin
      automatic real d = real'(out_pwr[c]) - real'(expp[got][c]);
      check((d <= tol[got][c]) && (d >= -tol[got][c]),
            $sformatf("k=%0d ch%0d power %0d expected %0d", got, c + 1, out_pwr[c], expp[got][c]));
    end
    got++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- frame 1: random spectra, exact reference
    for (int g = 0; g < 2; g++)
      for (int k = 0; k < N; k++) begin
        fr[g][k] = $signed(16'($urandom)); fi[g][k] = $signed(16'($urandom));
      end
    for (int k = 0; k < N; k++)
      for (int g = 0; g < 2; g++) begin
        automatic int m = (N - k) % N;
        automatic longint r1 = hf(fr[g][k] + fr[g][m]), i1 = hf(fi[g][k] - fi[g][m]);
        automatic longint r2 = hf(fi[g][k] + fi[g][m]), i2 = hf(fr[g][m] - fr[g][k]);
        expp[k][2*g]   = r1 * r1 + i1 * i1;
        expp[k][2*g+1] = r2 * r2 + i2 * i2;
        tol[k][2*g] = 0.0; tol[k][2*g+1] = 0.0;
      end
    got = 0; first_cyc = -1;
    send_frame();
    wait (got == N);
    check(first_cyc - done_cyc <= 3, $sformatf("first output %0d clocks after frame", first_cyc - done_cyc));
    check(overrun == 0, "no overrun expected");
    // ---- frame 2: two real signals per core, compare with single transforms
    begin
      real x [4][N], pr [4][N];
      real zr, zi, ar, ai, ang;
      for (int c = 0; c < 4; c++)
        for (int n = 0; n < N; n++)
          x[c][n] = 4096.0 * ($itor($urandom_range(15)) - 8.0) +
                    20000.0 * $cos(2.0 * 3.14159265358979 * (c * 17 + 5) * n / N);
      for (int k = 0; k < N; k++) begin
        for (int c = 0; c < 4; c++) begin
          ar = 0; ai = 0;
          for (int n = 0; n < N; n++) begin
            ang = -2.0 * 3.14159265358979 * ((n * k) % N) / N;
            ar += x[c][n] * $cos(ang); ai += x[c][n] * $sin(ang);
          end
          pr[c][k] = (ar / N) * (ar / N) + (ai / N) * (ai / N);
          if (c % 2 == 1) begin
            // z = x_even + j x_odd  ->  Z = X_even + j X_odd
            fr[c/2][k] = $rtoi(zr - ai / N + ((zr - ai / N) >= 0 ? 0.5 : -0.5));
            fi[c/2][k] = $rtoi(zi + ar / N + ((zi + ar / N) >= 0 ? 0.5 : -0.5));
          end else begin
            zr = ar / N; zi = ai / N;
          end
        end
        for (int c = 0; c < 4; c++) begin
          expp[k][c] = longint'(pr[c][k]);
          tol[k][c]  = 4.0 * $sqrt(pr[c][k]) + 4.0;   // rounding of Z and of /2
        end
      end
    end
    got = 0;
    send_frame();
    // a frame arriving while busy must raise overrun
    @(negedge clk); a_valid = 1; a_idx = 0;
    @(negedge clk); a_valid = 0;
    check(overrun == 1, "overrun flag");
    wait (got == N);
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
