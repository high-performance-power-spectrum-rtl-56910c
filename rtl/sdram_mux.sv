// sdram_mux - SDRAM write port of the engine: merges the raw input data and
// the result streams and generates their addresses.
//
// The SDRAM is used as two circular buffers (as in the paper). The input
// area starts at word 0 and ends with the last word of block input_last_blk;
// the result area starts at the first word of block result_start_blk and ends
// with the last SDRAM word. A block is 2**BLK_SHIFT words (32 words = one
// 256-sample block of raw input). Each pointer wraps to its area's start when
// it passes the area's end; in_wrap / res_wrap pulse when that happens.
// load (START) reloads both pointers to their starts.
//
// The input stream has priority, since raw samples arrive in real time; a
// result word goes out when no input word is waiting. The port is a
// valid/ready handshake: a word with its address is written when sdram_valid
// and sdram_ready are both high. enable low (STOP) holds both streams.
// result_addr is the address of the next result word (the Status register).
module sdram_mux
  import psa_pkg::*;
#(
  parameter int unsigned AW        = 23,
  parameter int unsigned BLK_SHIFT = 5
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic                  enable,
  input  logic [AW-BLK_SHIFT-1:0] input_last_blk,
  input  logic [AW-BLK_SHIFT-1:0] result_start_blk,
  // raw input data
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [WORD_W-1:0]     in_data,
  // results
  input  logic                  res_valid,
  output logic                  res_ready,
  input  logic [WORD_W-1:0]     res_data,
  // SDRAM write port
  output logic                  sdram_valid,
  input  logic                  sdram_ready,
  output logic [AW-1:0]         sdram_addr,
  output logic [WORD_W-1:0]     sdram_data,
  // status
  output logic [AW-1:0]         result_addr,
  output logic                  in_wrap,
  output logic                  res_wrap
);

  logic [AW-1:0] in_ptr, res_ptr;
  wire  [AW-1:0] in_end    = {input_last_blk, {BLK_SHIFT{1'b1}}};
  wire  [AW-1:0] res_start = {result_start_blk, {BLK_SHIFT{1'b0}}};
  wire           sel_in    = in_valid;

  assign sdram_valid = enable && (in_valid || res_valid);
  assign sdram_addr  = sel_in ? in_ptr : res_ptr;
  assign sdram_data  = sel_in ? in_data : res_data;
  assign in_ready    = enable && sdram_ready && sel_in;
  assign res_ready   = enable && sdram_ready && !sel_in;
  assign result_addr = res_ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_ptr   <= '0;
      res_ptr  <= '0;
      in_wrap  <= 1'b0;
      res_wrap <= 1'b0;
    end else if (load) begin
      in_ptr   <= '0;
      res_ptr  <= res_start;
      in_wrap  <= 1'b0;
      res_wrap <= 1'b0;
    end else begin
      in_wrap  <= 1'b0;
      res_wrap <= 1'b0;
      if (in_valid && in_ready) begin
        if (in_ptr == in_end) begin
          in_ptr  <= '0;
          in_wrap <= 1'b1;
        end else begin
          in_ptr <= in_ptr + 1'b1;
        end
      end
      if (res_valid && res_ready) begin
        if (res_ptr == {AW{1'b1}}) begin
          res_ptr  <= res_start;
          res_wrap <= 1'b1;
        end else begin
          res_ptr <= res_ptr + 1'b1;
        end
      end
    end
  end

  // The areas must not overlap: the input area ends below the result area.
  a_areas: assert property (@(posedge clk) disable iff (!rst_n) enable |-> input_last_blk < result_start_blk);
  // A word offered to the SDRAM stays until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n || load)
                           sdram_valid && !sdram_ready |=> sdram_valid || !enable);

endmodule
