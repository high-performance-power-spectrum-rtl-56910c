// tb_data_sampler - self-checking test of the strobe-clocked lane
// de-multiplexer.
//
// The strobe runs at about 22 MHz, the paper's top sample rate, with a
// random half-period of 20-30 ns for each half. CH1 / CH3 are put on the
// lanes 2 ns after each rising edge and CH2 / CH4 2 ns after each falling
// edge (this design's lane convention and a small transmitter output delay).
// Every emitted set must equal the next set sent, in order; after enable
// rises at most a few sets (the enable synchronizer) may be skipped; a few sets
// may follow enable falling, then nothing may come out; all sets sent while
// enabled come out.
//
// Both-edge data and the two lanes follow the source; which strobe half
// carries which channel is this design's own convention.
module tb_data_sampler;
  import psa_pkg::*;
  logic rst_n = 1, enable = 0, strobe = 0;
  logic [3:0] lane_a = 0, lane_b = 0;
  logic set_valid;
  sample_set_t set_data;
  int checks = 0, failures = 0;
  sample_set_t sent [$];
  int n_out = 0, n_sent = 0, n_skip = 0, n_per = 0, tail = 0;
  bit may_skip = 0;

  data_sampler dut (.*);

  initial #1 rst_n = 0;   // an edge, so that the asynchronous reset acts

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // strobe and data generator: each set occupies one strobe period,
  // high half first
  initial begin
    sample_set_t s;
    #3;
    forever begin
      s = sample_set_t'($urandom);
      strobe = 1;
      #2 lane_a = s[0]; lane_b = s[2];
      #(18 + $urandom_range(0, 10));
      strobe = 0;
      #2 lane_a = s[1]; lane_b = s[3];
      #(18 + $urandom_range(0, 10));
      // sets sent up to a few periods after enable falls may still pass
      // the enable synchronizer
      tail = enable ? 4 : (tail > 0 ? tail - 1 : 0);
      if (enable || tail > 0) begin sent.push_back(s); n_sent++; end
      n_per++;
    end
  end

  // outputs are registered on the rising edge; look at them half a period later
  always @(negedge strobe) if (rst_n && set_valid) begin
    sample_set_t e;
    n_out++;
    while (may_skip && sent.size() > 1 && sent[0] != set_data && n_skip < 4) begin
      void'(sent.pop_front());
      n_skip++;
    end
    may_skip = 0;
    if (sent.size() == 0) check(0, $sformatf("set emitted that was not sent t=%0t", $time));
    else begin
      e = sent.pop_front();
      check(set_data == e, $sformatf("set %h expected %h", set_data, e));
    end
  end

  initial begin
    #100 rst_n = 1;
    repeat (40) @(posedge strobe);
    check(n_out == 0, "output while disabled");
    for (int round = 0; round < 3; round++) begin
      #($urandom_range(1, 40));
      may_skip = 1; n_skip = 0;
      enable = 1;
      repeat (1000 + $urandom_range(0, 500)) @(posedge strobe);
      #($urandom_range(1, 40));
      enable = 0;
      repeat (6) @(posedge strobe);
      check(sent.size() <= 4, $sformatf("round %0d: %0d sent sets never came out", round, sent.size()));
      check(n_skip <= 3, $sformatf("round %0d: %0d sets lost at enable", round, n_skip));
      sent.delete();
      n_out = 0;
      repeat (30) @(posedge strobe);
      check(n_out == 0, $sformatf("round %0d: output while disabled", round));
    end
    $display("strobe periods: %0d, sets sent while enabled: %0d", n_per, n_sent);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
