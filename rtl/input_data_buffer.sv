// input_data_buffer - packs raw sample sets into SDRAM words and queues them.
//
// Every sample set (one 4-bit sample of each of the four channels, 16 bits)
// that enters the channel buffers is also kept as raw input data in the
// SDRAM. PACK = 8 sets are packed into one 128-bit word, the oldest set in
// bits 15:0, and the word is pushed into a DEPTH-word FIFO that waits for the
// SDRAM write port. in_ready is low only when a word is complete and the FIFO
// is full. Packing and the FIFO depth are this design's choice.
//
// Timing: a word is offered on out_valid one clock after its last set came in.
module input_data_buffer
  import psa_pkg::*;
#(
  parameter int unsigned PACK  = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           clear,
  input  logic                           in_valid,
  output logic                           in_ready,
  input  sample_set_t                    in_data,
  output logic                           out_valid,
  input  logic                           out_ready,
  output logic [PACK*$bits(sample_set_t)-1:0] out_data
);

  localparam int unsigned SW = $bits(sample_set_t);
  localparam int unsigned CW = (PACK > 1) ? $clog2(PACK) : 1;

  logic [PACK-1:0][SW-1:0] pack_q;
  logic [CW-1:0]           cnt;
  logic                    fifo_ready;
  logic                    unused_ovf;

  wire last = (cnt == CW'(PACK - 1));
  wire acc  = in_valid & in_ready;
  logic [PACK-1:0][SW-1:0] word;

  always_comb begin
    word      = pack_q;
    word[cnt] = in_data;
  end

  assign in_ready = ~last | fifo_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      pack_q <= '0;
    end else if (clear) begin
      cnt <= '0;
    end else if (acc) begin
      pack_q <= word;
      cnt    <= last ? '0 : cnt + 1'b1;
    end
  end

  sync_fifo #(.WIDTH(PACK*SW), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n, .clear,
    .in_valid (acc & last),
    .in_ready (fifo_ready),
    .in_data  (word),
    .out_valid, .out_ready, .out_data,
    .overflow (unused_ovf)   // cannot happen: the word is only pushed when ready
  );

endmodule
