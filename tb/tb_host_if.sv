// tb_host_if - self-checking test of the register interface: writes and
// read-back of the SETUP registers, one-clock command pulses for each
// command code, read-back of every status register one clock after the
// read, and no effect of accesses without chip select.
//
// The registers' contents follow the source (Status, Timestamp, Marker);
// the map and the bus timing are this design's own.
module tb_host_if;
  import psa_pkg::*;
  logic clk = 0, rst_n = 1;
  logic bus_cs = 0, bus_we = 0;
  logic [3:0] bus_addr = 0;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic cmd_setup, cmd_start, cmd_stop;
  logic [17:0] setup_input_last, setup_result_start;
  logic [22:0] result_addr = 23'h12345;
  logic [31:0] ts_latched = 32'hA0A0_0001, mk_latched = 32'hB0B0_0002, ts_live = 32'hC0C0_0003, mk_live = 32'hD0D0_0004;
  flags_t flags = flags_t'(4'b1011);
  int checks = 0, failures = 0;
  int n_setup = 0, n_start = 0, n_stop = 0;

  host_if #(.BAW(18), .AW(23)) dut (.*);
  always #5 clk = ~clk;
  initial #1 rst_n = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) begin
    if (cmd_setup) n_setup++;
    if (cmd_start) n_start++;
    if (cmd_stop)  n_stop++;
  end

  task automatic wr(input logic [3:0] a, input logic [31:0] d, input bit cs = 1);
    @(negedge clk); bus_cs = cs; bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_cs = 0; bus_we = 0;
    @(negedge clk);   // command pulses come one clock after the write
  endtask

  task automatic rd(input logic [3:0] a, output logic [31:0] d);
    @(negedge clk); bus_cs = 1; bus_we = 0; bus_addr = a;
    @(negedge clk); bus_cs = 0; d = bus_rdata;
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wr(REG_INPUT_LAST, 32'h0000_1234);
    wr(REG_RESULT_START, 32'h0003_F000);
    check(setup_input_last == 18'h1234 && setup_result_start == 18'h3F000, "SETUP arguments");
    rd(REG_INPUT_LAST, d);   check(d == 32'h1234, "read INPUT_LAST");
    rd(REG_RESULT_START, d); check(d == 32'h3F000, "read RESULT_START");
    wr(REG_INPUT_LAST, 32'h0000_0555, 0);
    check(setup_input_last == 18'h1234, "write without chip select ignored");
    wr(REG_COMMAND, CMD_SETUP);
    check(n_setup == 1 && n_start == 0 && n_stop == 0, "SETUP pulse");
    wr(REG_COMMAND, CMD_START);
    check(n_setup == 1 && n_start == 1 && n_stop == 0, "START pulse");
    wr(REG_COMMAND, CMD_STOP);
    check(n_setup == 1 && n_start == 1 && n_stop == 1, "STOP pulse");
    wr(REG_COMMAND, CMD_NONE);
    check(n_setup + n_start + n_stop == 3, "no pulse for CMD_NONE");
    rd(REG_STATUS, d);    check(d == 32'h12345, "STATUS");
    rd(REG_TIMESTAMP, d); check(d == 32'hA0A0_0001, "TIMESTAMP");
    rd(REG_MARKER, d);    check(d == 32'hB0B0_0002, "MARKER");
    rd(REG_TS_LIVE, d);   check(d == 32'hC0C0_0003, "TS_LIVE");
    rd(REG_MK_LIVE, d);   check(d == 32'hD0D0_0004, "MK_LIVE");
    rd(REG_FLAGS, d);     check(d == 32'hB, "FLAGS");
    rd(4'hF, d);          check(d == 0, "unused address reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
