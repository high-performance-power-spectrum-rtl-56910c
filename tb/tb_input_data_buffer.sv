// tb_input_data_buffer - self-checking test of the raw data packer: random
// sample sets in, random out_ready; each 128-bit word must hold the next
// eight sets, oldest in bits 15:0. A long out_ready-low phase must fill the
// FIFO and hold the writer off (in_ready low) without losing a set.
//
// The source only names this buffer; the 8-sets-per-word packing checked
// here is this design's own.
module tb_input_data_buffer;
  import psa_pkg::*;
  logic clk = 0, rst_n = 1, clear = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  sample_set_t in_data = '0;
  logic [127:0] out_data;
  int checks = 0, failures = 0, n_words = 0, n_hold = 0;
  sample_set_t q [$];
  bit block_out = 0;

  input_data_buffer dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // Inputs change on the falling edge; the handshakes they make are then
  // fixed until the rising edge, where they take effect.
  always @(negedge clk) if (rst_n) begin
    if (!(in_valid && !in_ready)) begin
      in_valid = ($urandom_range(1) == 0);
      in_data  = sample_set_t'($urandom);
    end
    out_ready = !block_out && ($urandom_range(3) != 0);
    #1;
    if (out_valid && out_ready) begin
      logic [127:0] e;
      for (int i = 0; i < 8; i++) e[16*i +: 16] = q.pop_front();
      check(out_data == e, $sformatf("word %h expected %h", out_data, e));
      n_words++;
    end
    if (in_valid && in_ready) q.push_back(in_data);
    if (in_valid && !in_ready) n_hold++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
    block_out = 1;
    repeat (500) @(posedge clk);
    block_out = 0;
    repeat (2000) @(posedge clk);
    check(n_hold > 0, "writer was never held off");
    check(n_words > 200, $sformatf("only %0d words", n_words));
    $display("words %0d hold cycles %0d", n_words, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
