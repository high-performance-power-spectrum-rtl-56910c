// input_fifo - dual-clock Input FIFO between the strobe-clocked sampler and
// the system clock domain.
//
// Sample sets are written on the strobe (wclk) and read on the system clock
// (rclk). The usual asynchronous FIFO scheme is used: binary and Gray-coded
// read and write pointers one bit wider than the address, each Gray pointer
// passed to the other domain through two flip-flops; full and empty are
// computed from the local pointer and the synchronized remote one, so both
// are pessimistic and never wrong. The read side is first-word-fall-through:
// out_data shows the oldest set while out_valid is high; it leaves on
// out_valid & out_ready. A write while full is dropped (the input is real
// time and cannot be held back); every such loss toggles a flag that is
// carried into rclk and shows there as a one-clock overflow pulse.
// clear (rclk) discards the contents by moving the read pointer up to the
// synchronized write pointer. The paper names an Input FIFO; that it is the
// clock-domain crossing, and its depth, are this design's choices.
module input_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16   // power of two
) (
  input  logic             rst_n,
  // write side, strobe domain
  input  logic             wclk,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  // read side, system clock domain
  input  logic             rclk,
  input  logic             clear,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic             overflow
);

  localparam int unsigned AW = $clog2(DEPTH);
  typedef logic [AW:0] ptr_t;

  logic [WIDTH-1:0] mem [DEPTH];
  ptr_t wbin, wgray, rbin, rgray;
  ptr_t rgray_w1, rgray_w2;      // read pointer in the write domain
  ptr_t wgray_r1, wgray_r2;      // write pointer in the read domain
  logic ovf_toggle;
  logic [2:0] ovf_sync;

  function automatic ptr_t bin2gray(input ptr_t b);
    return b ^ (b >> 1);
  endfunction

  function automatic ptr_t gray2bin(input ptr_t g);
    ptr_t b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ------------------------------------------------------------ write side
  wire full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  wire push = in_valid & ~full;
  ptr_t wbin_next;
  assign wbin_next = wbin + ptr_t'(push);

  always_ff @(posedge wclk) begin
    if (push) mem[wbin[AW-1:0]] <= in_data;
  end

  always_ff @(posedge wclk or negedge rst_n) begin
    if (!rst_n) begin
      wbin       <= '0;
      wgray      <= '0;
      rgray_w1   <= '0;
      rgray_w2   <= '0;
      ovf_toggle <= 1'b0;
    end else begin
      wbin       <= wbin_next;
      wgray      <= bin2gray(wbin_next);
      rgray_w1   <= rgray;
      rgray_w2   <= rgray_w1;
      if (in_valid && full) ovf_toggle <= ~ovf_toggle;
    end
  end

  // ------------------------------------------------------------ read side
  assign out_valid = (rgray != wgray_r2);
  assign out_data  = mem[rbin[AW-1:0]];
  wire  pop = out_valid & out_ready;
  ptr_t rbin_next;
  assign rbin_next = clear ? gray2bin(wgray_r2) : rbin + ptr_t'(pop);

  always_ff @(posedge rclk or negedge rst_n) begin
    if (!rst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
      ovf_sync <= '0;
      overflow <= 1'b0;
    end else begin
      rbin     <= rbin_next;
      rgray    <= bin2gray(rbin_next);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      ovf_sync <= {ovf_sync[1:0], ovf_toggle};
      overflow <= ovf_sync[2] ^ ovf_sync[1];
    end
  end

  initial assert (DEPTH == (1 << AW) && AW >= 2) else $error("DEPTH must be a power of two, at least 4");

endmodule
