// control_unit - runs the host commands and sequences the engine.
//
// SETUP copies the two area addresses written by the host (last block of the
// input area, first block of the result area) into the active configuration.
// START sets running and issues a one-clock restart pulse that empties the
// whole pipeline (FIFOs, channel buffers, FFT frames, accumulators) and
// reloads the SDRAM pointers, so processing and SDRAM writing begin afresh
// from the SETUP addresses, and clears the sticky error flags. STOP clears
// running: the sampler takes no more data and the SDRAM port is held.
// (The paper gives the three commands and their effect; discarding a partial
// STA on restart is this design's choice.)
//
// The unit counts the sample sets accepted into the channel buffers. One
// cycle is CYCLE_STAS STAs of STA_BLOCKS blocks of NPT samples (128 x 128 x
// 256 in the paper); cycle_start pulses with the first sample of each cycle,
// which latches the timestamp and marker counters.
module control_unit
  import psa_pkg::*;
#(
  parameter int unsigned NPT        = 256,
  parameter int unsigned STA_BLOCKS = 128,
  parameter int unsigned CYCLE_STAS = 128,
  parameter int unsigned BAW        = 18     // block address width
) (
  input  logic           clk,
  input  logic           rst_n,
  // commands from the host interface
  input  logic           cmd_setup,
  input  logic           cmd_start,
  input  logic           cmd_stop,
  input  logic [BAW-1:0] setup_input_last,
  input  logic [BAW-1:0] setup_result_start,
  // engine control
  output logic           running,
  output logic           restart,
  output logic [BAW-1:0] input_last_blk,
  output logic [BAW-1:0] result_start_blk,
  // events
  input  logic           sample_accepted,
  output logic           cycle_start,
  input  logic           ev_fifo_overflow,
  input  logic           ev_fft_overrun,
  input  logic           ev_result_overrun,
  output flags_t         flags
);

  localparam longint unsigned SPC = longint'(NPT) * STA_BLOCKS * CYCLE_STAS;
  localparam int unsigned     CW  = $clog2(SPC);

  logic [CW-1:0] sample_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running          <= 1'b0;
      restart          <= 1'b0;
      input_last_blk   <= '0;
      result_start_blk <= '1;
      sample_cnt       <= '0;
      cycle_start      <= 1'b0;
      flags            <= '0;
    end else begin
      restart     <= cmd_start;
      cycle_start <= 1'b0;
      if (cmd_setup) begin
        input_last_blk   <= setup_input_last;
        result_start_blk <= setup_result_start;
      end
      if (cmd_start) begin
        running    <= 1'b1;
        sample_cnt <= '0;
        flags      <= '0;
      end else begin
        if (cmd_stop) running <= 1'b0;
        if (sample_accepted) begin
          cycle_start <= (sample_cnt == '0);
          sample_cnt  <= (sample_cnt == CW'(SPC - 1)) ? '0 : sample_cnt + 1'b1;
        end
        if (ev_fifo_overflow)  flags.fifo_overflow  <= 1'b1;
        if (ev_fft_overrun)    flags.fft_overrun    <= 1'b1;
        if (ev_result_overrun) flags.result_overrun <= 1'b1;
      end
      flags.running <= cmd_start | (running & ~cmd_stop);
    end
  end

endmodule
