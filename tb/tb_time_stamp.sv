// tb_time_stamp - self-checking test of the timestamp and marker counters.
// A 3.3 MHz reference clock (unrelated to the 100 MHz test clock) and
// marker pulses at random intervals are applied. After each marker pulse
// has settled, the timestamp must equal the number of reference edges since
// that marker and the marker count the number of markers since reset; a
// latch pulse must copy both counters.
//
// The counters and their clearing follow the source; the synchronizers and
// the separate live values are this design's own.
module tb_time_stamp;
  logic clk = 0, rst_n = 1, ref_clk = 0, marker = 0, latch = 0;
  logic [31:0] ts_live, mk_live, ts_latched, mk_latched;
  logic marker_seen;
  int checks = 0, failures = 0;
  int ref_edges = 0, markers = 0;

  time_stamp #(.W(32)) dut (.*);
  always #5 clk = ~clk;
  always #151 ref_clk = ~ref_clk;
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge ref_clk) ref_edges++;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 20; m++) begin
      // marker pulse placed between reference edges, away from them
      @(negedge ref_clk); #20 marker = 1; #60 marker = 0;
      markers++;
      ref_edges = 0;
      repeat ($urandom_range(20, 200)) @(posedge clk);
      @(negedge ref_clk); #40;
      check(ts_live == 32'(ref_edges), $sformatf("timestamp %0d expected %0d", ts_live, ref_edges));
      check(mk_live == 32'(markers), $sformatf("marker %0d expected %0d", mk_live, markers));
      @(negedge clk); latch = 1; @(negedge clk); latch = 0;
      check(ts_latched == 32'(ref_edges) && mk_latched == 32'(markers), "latched values");
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
