// tb_input_fifo - self-checking test of the dual-clock Input FIFO.
//
// Write clock: a strobe of about 22 MHz with a random half-period of
// 20-28 ns; read clock: 100 MHz. Every written word carries a sequence
// number, so the reader can tell exactly which words were lost.
//  phase A  random writes and reads: all words out, in order, no overflow
//  phase B  reader stalled while the writer keeps writing: exactly DEPTH
//           words are kept, every dropped word gives one overflow pulse,
//           the kept words come out in order afterwards
//  phase C  words left in the FIFO are discarded by clear; nothing old
//           comes out, and later words pass normally
//
// The source only names an Input FIFO; its use as the clock-domain crossing,
// its depth and its loss accounting are this design's own.
module tb_input_fifo;
  localparam int DEPTH = 16;
  logic rst_n = 1, wclk = 0, rclk = 0, clear = 0;
  logic in_valid = 0, out_valid, out_ready = 0, overflow;
  logic [15:0] in_data = 0, out_data;
  int checks = 0, failures = 0;
  int n_ovf = 0, n_skip = 0, n_recv = 0;
  int wr_pct = 0, rd_pct = 0;
  logic [15:0] seq = 0;
  logic [15:0] sent [$];

  input_fifo #(.WIDTH(16), .DEPTH(DEPTH)) dut (.*);

  always #5 rclk = ~rclk;
  initial begin
    #3;
    forever #(20 + $urandom_range(0, 8)) wclk = ~wclk;
  end
  initial #1 rst_n = 0;   // an edge, so that the asynchronous reset acts

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // writer: drive at the falling edge, the FIFO samples at the rising edge
  always @(negedge wclk) if (rst_n) begin
    in_valid = ($urandom_range(0, 99) < wr_pct);
    if (in_valid) begin
      in_data = seq;
      sent.push_back(seq);
      seq++;
    end
  end

  // reader: choose ready at the falling edge; a word shown with valid and
  // ready leaves at the next rising edge
  always @(negedge rclk) if (rst_n) begin
    out_ready = ($urandom_range(0, 99) < rd_pct);
    #1;
    if (out_valid && out_ready) begin
      n_recv++;
      while (sent.size() != 0 && sent[0] != out_data) begin
        void'(sent.pop_front());
        n_skip++;
      end
      check(sent.size() != 0, $sformatf("word %h was never written", out_data));
      if (sent.size() != 0) void'(sent.pop_front());
    end
  end

  always @(posedge rclk) if (overflow) n_ovf++;

  initial begin
    int kept, skip0;
    #50 rst_n = 1;
    // phase A
    wr_pct = 80; rd_pct = 50;
    repeat (20000) @(posedge rclk);
    wr_pct = 0;
    repeat (100) @(posedge rclk);
    check(n_recv > 3000, $sformatf("only %0d words in phase A", n_recv));
    check(n_skip == 0, $sformatf("phase A lost %0d words", n_skip));
    check(n_ovf == 0, "overflow in phase A");
    check(sent.size() == 0 && !out_valid, "phase A words left over");
    // phase B
    rd_pct = 0; wr_pct = 100;
    repeat (300 * 5) @(posedge rclk);   // about 300 writes into a stalled FIFO
    wr_pct = 0;
    repeat (50) @(posedge rclk);
    kept = sent.size();
    n_recv = 0;
    rd_pct = 100;
    repeat (100) @(posedge rclk);
    check(n_recv == DEPTH, $sformatf("stalled FIFO kept %0d words, expected %0d", n_recv, DEPTH));
    // the first DEPTH words were kept; the rest were dropped
    check(n_skip == 0, "phase B kept words out of order");
    check(n_ovf == sent.size(), $sformatf("%0d overflow pulses for %0d lost words", n_ovf, sent.size()));
    check(sent.size() == kept - DEPTH, $sformatf("lost %0d of %0d words", sent.size(), kept));
    check(!out_valid, "phase B words left over");
    sent.delete();
    // phase C
    rd_pct = 0; wr_pct = 100;
    repeat (5 * 5) @(posedge rclk);
    wr_pct = 0;
    repeat (30) @(posedge rclk);
    check(out_valid, "words before clear");
    @(negedge rclk) clear = 1;
    @(negedge rclk) clear = 0;
    sent.delete();
    repeat (2) @(negedge rclk);
    check(!out_valid, "clear did not empty the FIFO");
    skip0 = n_skip; n_recv = 0;
    wr_pct = 60; rd_pct = 70;
    repeat (5000) @(posedge rclk);
    wr_pct = 0;
    repeat (100) @(posedge rclk);
    check(n_recv > 500, $sformatf("only %0d words after clear", n_recv));
    check(n_skip == skip0, "words lost after clear");
    check(sent.size() == 0, "words left over after clear");
    $display("overflow pulses %0d", n_ovf);
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
