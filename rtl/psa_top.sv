// psa_top - power spectrum engine of the compute FPGA.
//
// Four real input channels arrive as two 4-line lanes time-multiplexed on
// both edges of a strobe. The sampler rebuilds 4-channel sample sets; they
// pass an input FIFO and go both to the raw input data buffer (SDRAM input
// area) and to four ping-pong channel buffers of NPT samples. Each pair of
// channel buffers feeds one external complex FFT core (CH1 + jCH2 to core A,
// CH3 + jCH4 to core B). The core outputs are separated into four real
// spectra and turned into 32-bit power values, which are averaged and
// peak-detected over STA_BLOCKS blocks (one STA). The averages and peaks of
// each STA go to the SDRAM result area. A control unit runs the SETUP,
// START and STOP commands that arrive over the register bus of the control
// FPGA, and a time stamp unit counts reference clock and marker pulses.
//
// External parts, not in this module: the two FFT cores (fa_* / fb_*
// ports: frames of NPT samples in, NPT indexed results out, a core takes a
// new frame when its *_in_ready is high; fft_clear resets them), the SDRAM
// and its controller (sdram_* valid/ready word write port), the LVDS
// receivers (lane_a, lane_b, strobe are their outputs) and the control
// FPGA (bus_*). The sampler and the write side of the input FIFO run on
// the strobe itself; everything else runs on clk (66 MHz in the paper).
// The FIFO carries the sets across; ref_clk and marker are synchronized
// into clk. rst_n resets both domains asynchronously.
//
// AVG_EN and PEAK_EN leave out the averaging or the peak unit, giving the
// average-only and peak-only devices that the paper built as separate
// configurations; both are present by default.
//
// The block structure follows the paper's figure of the compute FPGA; the
// FFT data format (sample in the top 4 bits of a 16-bit word), the SDRAM word
// of 128 bits and the register bus are this design's choices.
module psa_top
  import psa_pkg::*;
#(
  parameter int unsigned NPT         = 256,
  parameter int unsigned STA_BLOCKS  = 128,
  parameter int unsigned CYCLE_STAS  = 128,
  parameter int unsigned FIFO_DEPTH  = 16,
  parameter int unsigned SDRAM_AW    = 23,
  parameter int unsigned BLK_SHIFT   = 5,
  parameter bit          AVG_EN      = 1'b1,  // average-power unit present
  parameter bit          PEAK_EN     = 1'b1,  // peak-power unit present
  localparam int unsigned KW  = $clog2(NPT),
  localparam int unsigned BAW = SDRAM_AW - BLK_SHIFT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // LVDS receiver outputs
  input  logic                    strobe,
  input  logic [SAMPLE_W-1:0]     lane_a,
  input  logic [SAMPLE_W-1:0]     lane_b,
  // time stamp inputs
  input  logic                    ref_clk,
  input  logic                    marker,
  // register bus from the control FPGA
  input  logic                    bus_cs,
  input  logic                    bus_we,
  input  logic [3:0]              bus_addr,
  input  logic [31:0]             bus_wdata,
  output logic [31:0]             bus_rdata,
  // FFT core A (CH1, CH2) and B (CH3, CH4)
  output logic                    fft_clear,
  input  logic                    fa_in_ready,
  output logic                    fa_in_valid,
  output logic signed [FFT_W-1:0] fa_in_re,
  output logic signed [FFT_W-1:0] fa_in_im,
  input  logic                    fa_out_valid,
  input  logic [KW-1:0]           fa_out_idx,
  input  logic signed [FFT_W-1:0] fa_out_re,
  input  logic signed [FFT_W-1:0] fa_out_im,
  input  logic                    fb_in_ready,
  output logic                    fb_in_valid,
  output logic signed [FFT_W-1:0] fb_in_re,
  output logic signed [FFT_W-1:0] fb_in_im,
  input  logic                    fb_out_valid,
  input  logic [KW-1:0]           fb_out_idx,
  input  logic signed [FFT_W-1:0] fb_out_re,
  input  logic signed [FFT_W-1:0] fb_out_im,
  // SDRAM write port
  output logic                    sdram_valid,
  input  logic                    sdram_ready,
  output logic [SDRAM_AW-1:0]     sdram_addr,
  output logic [WORD_W-1:0]       sdram_data
);

  // ---------------------------------------------------------------- control
  logic           running, restart;
  logic           cmd_setup, cmd_start, cmd_stop;
  logic [BAW-1:0] setup_input_last, setup_result_start;
  logic [BAW-1:0] input_last_blk, result_start_blk;
  logic           cycle_start;
  flags_t         flags;
  logic [31:0]    ts_live, mk_live, ts_latched, mk_latched;
  logic [SDRAM_AW-1:0] result_addr;

  // ---------------------------------------------------------------- input
  logic        set_valid;
  sample_set_t set_data;
  logic        fifo_out_valid, fifo_out_ready, fifo_overflow;
  sample_set_t fifo_out_data;
  logic [NCH-1:0] cb_in_ready, cb_avail, cb_out_valid, cb_out_first, cb_out_last, cb_swapped;
  logic [NCH-1:0][SAMPLE_W-1:0] cb_out_data;
  logic        idb_in_ready, idb_out_valid, idb_out_ready;
  logic [WORD_W-1:0] idb_out_data;
  logic        start_a, start_b;
  wire         pop = fifo_out_valid & fifo_out_ready;

  data_sampler u_sampler (
    .strobe, .rst_n, .enable(running), .lane_a, .lane_b,
    .set_valid, .set_data
  );

  input_fifo #(.WIDTH($bits(sample_set_t)), .DEPTH(FIFO_DEPTH)) u_input_fifo (
    .rst_n,
    .wclk(strobe), .in_valid(set_valid), .in_data(set_data),
    .rclk(clk), .clear(restart),
    .out_valid(fifo_out_valid), .out_ready(fifo_out_ready), .out_data(fifo_out_data),
    .overflow(fifo_overflow)
  );

  // A set leaves the FIFO only when every channel buffer and the raw data
  // buffer can take it, so all four channel buffers stay in step.
  assign fifo_out_ready = (&cb_in_ready) & idb_in_ready;

  for (genvar c = 0; c < NCH; c++) begin : g_cb
    channel_buffer #(.N(NPT), .W(SAMPLE_W)) u_cb (
      .clk, .rst_n, .clear(restart),
      .in_valid(pop), .in_ready(cb_in_ready[c]), .in_data(fifo_out_data[c]),
      .rd_avail(cb_avail[c]), .rd_start((c < 2) ? start_a : start_b),
      .out_valid(cb_out_valid[c]), .out_first(cb_out_first[c]), .out_last(cb_out_last[c]),
      .out_data(cb_out_data[c]), .swapped(cb_swapped[c])
    );
  end

  input_data_buffer #(.PACK(WORD_W / $bits(sample_set_t)), .DEPTH(FIFO_DEPTH)) u_idb (
    .clk, .rst_n, .clear(restart),
    .in_valid(pop), .in_ready(idb_in_ready), .in_data(fifo_out_data),
    .out_valid(idb_out_valid), .out_ready(idb_out_ready), .out_data(idb_out_data)
  );

  // ---------------------------------------------------------------- FFT ports
  // Both cores start a frame together, so that their output frames pair up
  // in the channel separator.
  assign start_a = (&cb_avail) & fa_in_ready & fb_in_ready & running;
  assign start_b = start_a;
  assign fft_clear   = restart;
  assign fa_in_valid = cb_out_valid[0];
  assign fa_in_re    = {cb_out_data[0], {(FFT_W-SAMPLE_W){1'b0}}};
  assign fa_in_im    = {cb_out_data[1], {(FFT_W-SAMPLE_W){1'b0}}};
  assign fb_in_valid = cb_out_valid[2];
  assign fb_in_re    = {cb_out_data[2], {(FFT_W-SAMPLE_W){1'b0}}};
  assign fb_in_im    = {cb_out_data[3], {(FFT_W-SAMPLE_W){1'b0}}};

  // ---------------------------------------------------------------- spectra
  logic          pw_valid, pw_last, fft_overrun;
  logic [KW-1:0] pw_idx;
  pwr_set_t      pw_data;
  logic          avg_valid, pk_valid, sta_done;
  logic [KW-1:0] avg_idx, pk_idx;
  pwr_set_t      avg_data, pk_data;
  logic [$clog2(STA_BLOCKS)-1:0] avg_blk;
  logic          rdb_valid, rdb_ready, rdb_last, rdb_overrun;
  pwr_set_t      rdb_data;

  chsep_power #(.NPT(NPT)) u_chsep (
    .clk, .rst_n, .clear(restart),
    .a_valid(fa_out_valid), .a_idx(fa_out_idx), .a_re(fa_out_re), .a_im(fa_out_im),
    .b_valid(fb_out_valid), .b_idx(fb_out_idx), .b_re(fb_out_re), .b_im(fb_out_im),
    .out_valid(pw_valid), .out_idx(pw_idx), .out_last(pw_last), .out_pwr(pw_data),
    .overrun(fft_overrun)
  );

  if (AVG_EN) begin : g_avg
    avg_unit #(.NPT(NPT), .BLOCKS(STA_BLOCKS)) u_avg (
      .clk, .rst_n, .clear(restart),
      .in_valid(pw_valid), .in_idx(pw_idx), .in_last(pw_last), .in_pwr(pw_data),
      .out_valid(avg_valid), .out_idx(avg_idx), .out_avg(avg_data),
      .sta_done, .blk(avg_blk)
    );
  end else begin : g_no_avg
    assign avg_valid = 1'b0;
    assign avg_idx   = '0;
    assign avg_data  = '0;
    assign avg_blk   = '0;
    assign sta_done  = pk_valid && pk_idx == KW'(NPT - 1);
  end

  if (PEAK_EN) begin : g_peak
    peak_unit #(.NPT(NPT), .BLOCKS(STA_BLOCKS)) u_peak (
      .clk, .rst_n, .clear(restart),
      .in_valid(pw_valid), .in_idx(pw_idx), .in_last(pw_last), .in_pwr(pw_data),
      .out_valid(pk_valid), .out_idx(pk_idx), .out_peak(pk_data)
    );
  end else begin : g_no_peak
    assign pk_valid = 1'b0;
    assign pk_idx   = '0;
    assign pk_data  = '0;
  end

  result_data_buffer #(.NPT(NPT), .AVG_EN(AVG_EN), .PEAK_EN(PEAK_EN)) u_rdb (
    .clk, .rst_n, .clear(restart),
    .avg_valid, .avg_idx, .avg_data, .pk_valid, .pk_idx, .pk_data,
    .out_valid(rdb_valid), .out_ready(rdb_ready), .out_data(rdb_data), .out_last(rdb_last),
    .overrun(rdb_overrun)
  );

  // ---------------------------------------------------------------- SDRAM
  logic in_wrap, res_wrap;

  sdram_mux #(.AW(SDRAM_AW), .BLK_SHIFT(BLK_SHIFT)) u_mux (
    .clk, .rst_n, .load(restart), .enable(running),
    .input_last_blk, .result_start_blk,
    .in_valid(idb_out_valid), .in_ready(idb_out_ready), .in_data(idb_out_data),
    .res_valid(rdb_valid), .res_ready(rdb_ready), .res_data(rdb_data),
    .sdram_valid, .sdram_ready, .sdram_addr, .sdram_data,
    .result_addr, .in_wrap, .res_wrap
  );

  // ---------------------------------------------------------------- control
  control_unit #(.NPT(NPT), .STA_BLOCKS(STA_BLOCKS), .CYCLE_STAS(CYCLE_STAS), .BAW(BAW)) u_ctrl (
    .clk, .rst_n, .cmd_setup, .cmd_start, .cmd_stop,
    .setup_input_last, .setup_result_start,
    .running, .restart, .input_last_blk, .result_start_blk,
    .sample_accepted(pop), .cycle_start,
    .ev_fifo_overflow(fifo_overflow), .ev_fft_overrun(fft_overrun),
    .ev_result_overrun(rdb_overrun), .flags
  );

  time_stamp #(.W(32)) u_ts (
    .clk, .rst_n, .ref_clk, .marker, .latch(cycle_start),
    .ts_live, .mk_live, .ts_latched, .mk_latched, .marker_seen()
  );

  host_if #(.BAW(BAW), .AW(SDRAM_AW)) u_host (
    .clk, .rst_n, .bus_cs, .bus_we, .bus_addr, .bus_wdata, .bus_rdata,
    .cmd_setup, .cmd_start, .cmd_stop, .setup_input_last, .setup_result_start,
    .result_addr, .ts_latched, .mk_latched, .ts_live, .mk_live, .flags
  );

endmodule
