// tb_channel_buffer - self-checking test of the ping-pong block buffer.
//
// A random stream of samples is written with random gaps; a reader starts a
// bank read at random times after rd_avail. Every block read must equal the
// next N samples written, in order, as N back-to-back beats starting one
// clock after rd_start, with out_first / out_last on the ends. The reader is
// slow in one phase so that both banks fill and the writer must stall
// (in_ready low); the test counts stalls and bank swaps.
//
// The bank pair per channel follows the source; the streaming handshake and
// latencies checked here are this design's own.
module tb_channel_buffer;
  localparam int N = 256;
  logic clk = 0, rst_n = 1, clear = 0;
  logic in_valid = 0, in_ready, rd_avail, rd_start = 0;
  logic out_valid, out_first, out_last, swapped;
  logic [3:0] in_data = 0, out_data;
  int checks = 0, failures = 0;
  int n_stall = 0, n_swap = 0, n_blocks = 0, beat = 0, start_cyc = -10, cyc = 0;
  logic [3:0] wq [$];
  int slow = 1;

  channel_buffer #(.N(N), .W(4)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;   // an edge, so that the asynchronous reset acts
  always @(posedge clk) cyc++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // writer
  always @(negedge clk) if (rst_n) begin
    if (in_valid && !in_ready) n_stall++;
    if (!(in_valid && !in_ready)) begin
      in_valid = ($urandom_range(3) != 0);
      in_data  = 4'($urandom);
    end
  end
  always @(posedge clk) if (in_valid && in_ready) wq.push_back(in_data);
  always @(posedge clk) if (swapped) n_swap++;

  // checker and reader, both on the falling edge (after the DUT's updates)
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      // rd_start is sampled on the edge after it is raised; the first beat
      // is valid after the next edge.
      check(cyc - start_cyc == beat + 2, "beat not back-to-back after rd_start");
      check(out_first == (beat == 0), "out_first");
      check(out_last == (beat == N - 1), "out_last");
      if (wq.size() == 0) check(0, "read more than written");
      else check(out_data == wq.pop_front(), "data order");
      beat = (beat == N - 1) ? 0 : beat + 1;
      if (beat == 0) n_blocks++;
    end
    rd_start = 0;
    if (rd_avail && beat == 0 && cyc > start_cyc + N + 3)
      if ($urandom_range(slow ? 400 : 3) == 0) begin rd_start = 1; start_cyc = cyc; end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (8000) @(posedge clk);
    slow = 0;
    repeat (8000) @(posedge clk);
    check(n_stall > 0, "writer never stalled");
    check(n_swap >= n_blocks && n_blocks > 20, $sformatf("swaps %0d blocks %0d", n_swap, n_blocks));
    $display("blocks %0d swaps %0d stall cycles %0d", n_blocks, n_swap, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
