// psa_pkg - types and constants shared by the power spectrum engine.
//
// The engine takes four 4-bit real input channels, transforms them in
// 256-point blocks with two complex FFT cores (two real channels per core),
// computes 32-bit power per frequency point, and averages / peak-detects it
// over 128 blocks (one short term accumulation, STA). Results and raw input
// are written to an external SDRAM as 128-bit words.
//
// Paper numbers: 4 channels, 4-bit samples, 256-point FFT, 32-bit power,
// 128 blocks per STA, 128 STAs per cycle, 32-bit timestamp/marker counters.
// Own choices: the 16-bit FFT data path, the 128-bit SDRAM word, the host
// register map and the command encoding below.
package psa_pkg;

  localparam int unsigned NCH      = 4;   // input channels
  localparam int unsigned SAMPLE_W = 4;   // bits per input sample
  localparam int unsigned FFT_W    = 16;  // FFT core data width
  localparam int unsigned PWR_W    = 32;  // power value width
  localparam int unsigned WORD_W   = NCH * PWR_W; // SDRAM word, 128 bits

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  // One sample of each channel: [0] = CH1 ... [3] = CH4.
  typedef sample_t [NCH-1:0] sample_set_t;
  typedef logic [PWR_W-1:0] pwr_t;
  // One 32-bit value per channel, [0] = CH1; also one SDRAM word.
  typedef pwr_t [NCH-1:0] pwr_set_t;

  // Host commands (written to REG_COMMAND).
  typedef enum logic [1:0] {
    CMD_NONE  = 2'd0,
    CMD_SETUP = 2'd1,
    CMD_START = 2'd2,
    CMD_STOP  = 2'd3
  } cmd_e;

  // Host register map (word addresses on the control-FPGA bus).
  localparam logic [3:0] REG_COMMAND      = 4'd0; // W: cmd_e in bits 1:0
  localparam logic [3:0] REG_INPUT_LAST   = 4'd1; // RW: last block of the input area
  localparam logic [3:0] REG_RESULT_START = 4'd2; // RW: first block of the result area
  localparam logic [3:0] REG_STATUS       = 4'd3; // R: SDRAM word address of the next result write
  localparam logic [3:0] REG_TIMESTAMP    = 4'd4; // R: timestamp latched at cycle start
  localparam logic [3:0] REG_MARKER       = 4'd5; // R: marker count latched at cycle start
  localparam logic [3:0] REG_TS_LIVE      = 4'd6; // R: running timestamp counter
  localparam logic [3:0] REG_MK_LIVE      = 4'd7; // R: running marker counter
  localparam logic [3:0] REG_FLAGS        = 4'd8; // R: flags_t

  // Sticky status flags, cleared by START.
  typedef struct packed {
    logic result_overrun;  // an STA ended while the previous one was still being written
    logic fft_overrun;     // an FFT frame arrived while the separator was busy
    logic fifo_overflow;   // input FIFO was full, a sample set was lost
    logic running;         // START given, no STOP since (not sticky)
  } flags_t;

endpackage
