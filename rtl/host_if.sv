// host_if - register interface between the compute FPGA and the control
// FPGA (which holds the PCI controller and forwards the host's accesses).
//
// The paper says the interface has control and data lines, a set of
// registers and a protocol, without details. This design uses a synchronous
// register bus: bus_cs with bus_we writes bus_wdata to bus_addr in that
// clock; bus_cs without bus_we reads, bus_rdata is valid the next clock.
// Register map (psa_pkg): COMMAND (write cmd_e, gives a one-clock command
// pulse), INPUT_LAST and RESULT_START (the SETUP arguments), STATUS (next
// result word address), TIMESTAMP / MARKER (latched at the start of the
// current cycle), TS_LIVE / MK_LIVE (running counters), FLAGS (flags_t).
module host_if
  import psa_pkg::*;
#(
  parameter int unsigned BAW = 18,
  parameter int unsigned AW  = 23
) (
  input  logic           clk,
  input  logic           rst_n,
  // bus from the control FPGA
  input  logic           bus_cs,
  input  logic           bus_we,
  input  logic [3:0]     bus_addr,
  input  logic [31:0]    bus_wdata,
  output logic [31:0]    bus_rdata,
  // to the control unit
  output logic           cmd_setup,
  output logic           cmd_start,
  output logic           cmd_stop,
  output logic [BAW-1:0] setup_input_last,
  output logic [BAW-1:0] setup_result_start,
  // status sources
  input  logic [AW-1:0]  result_addr,
  input  logic [31:0]    ts_latched,
  input  logic [31:0]    mk_latched,
  input  logic [31:0]    ts_live,
  input  logic [31:0]    mk_live,
  input  flags_t         flags
);

  wire wr = bus_cs & bus_we;
  wire rd = bus_cs & ~bus_we;
  cmd_e cmd;
  assign cmd = cmd_e'(bus_wdata[1:0]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_setup          <= 1'b0;
      cmd_start          <= 1'b0;
      cmd_stop           <= 1'b0;
      setup_input_last   <= '0;
      setup_result_start <= '1;
      bus_rdata          <= '0;
    end else begin
      cmd_setup <= wr && bus_addr == REG_COMMAND && cmd == CMD_SETUP;
      cmd_start <= wr && bus_addr == REG_COMMAND && cmd == CMD_START;
      cmd_stop  <= wr && bus_addr == REG_COMMAND && cmd == CMD_STOP;
      if (wr && bus_addr == REG_INPUT_LAST)   setup_input_last   <= bus_wdata[BAW-1:0];
      if (wr && bus_addr == REG_RESULT_START) setup_result_start <= bus_wdata[BAW-1:0];
      if (rd) begin
        case (bus_addr)
          REG_INPUT_LAST:   bus_rdata <= 32'(setup_input_last);
          REG_RESULT_START: bus_rdata <= 32'(setup_result_start);
          REG_STATUS:       bus_rdata <= 32'(result_addr);
          REG_TIMESTAMP:    bus_rdata <= ts_latched;
          REG_MARKER:       bus_rdata <= mk_latched;
          REG_TS_LIVE:      bus_rdata <= ts_live;
          REG_MK_LIVE:      bus_rdata <= mk_live;
          REG_FLAGS:        bus_rdata <= 32'(flags);
          default:          bus_rdata <= '0;
        endcase
      end
    end
  end

endmodule
