// sync_fifo - synchronous first-word-fall-through FIFO.
//
// Used inside the input data buffer to hold packed words until the SDRAM
// port takes them. A push while full is dropped and reported by a one-clock
// overflow pulse.
// out_data shows the oldest word whenever out_valid is high; a word leaves on
// out_valid & out_ready. clear empties the FIFO synchronously.
// Depth and width are parameters; the paper does not describe this FIFO.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             overflow
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wptr, rptr;
  logic [AW:0]      count;

  wire push = in_valid & in_ready;
  wire pop  = out_valid & out_ready;

  assign in_ready  = (count != DEPTH[AW:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr     <= '0;
      rptr     <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      wptr     <= '0;
      rptr     <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= in_valid & ~in_ready;
      if (push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

endmodule
