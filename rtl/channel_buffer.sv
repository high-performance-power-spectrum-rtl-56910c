// channel_buffer - ping-pong block buffer in front of an FFT core input.
//
// Two banks of N samples. Samples are written in order into the write bank;
// when it holds N samples it is marked full and the banks swap, so that the
// next block is collected in the other bank while the full one is read out
// into the FFT core (the buffer-pair scheme of the paper). If the new write
// bank is still full (the FFT side has not yet taken it) in_ready goes low
// and the writer stalls; upstream the Input FIFO absorbs the stall.
//
// Read side: rd_avail is high while a full bank waits. A one-clock rd_start
// streams that bank out as N consecutive out_valid beats, sample 0 first,
// with out_first / out_last on the first and last beat; the bank is freed
// when its last sample has been read. The first beat appears one clock after
// rd_start. The memories are read synchronously (block RAM style).
module channel_buffer #(
  parameter int unsigned N = 256,
  parameter int unsigned W = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  // write side
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  // read side
  output logic         rd_avail,
  input  logic         rd_start,
  output logic         out_valid,
  output logic         out_first,
  output logic         out_last,
  output logic [W-1:0] out_data,
  // one-clock pulse whenever the banks swap
  output logic         swapped
);

  localparam int unsigned AW = $clog2(N);

  logic [W-1:0]  bank0 [N];
  logic [W-1:0]  bank1 [N];
  logic          wbank, rbank;
  logic [AW-1:0] waddr, raddr;
  logic [1:0]    full;
  logic          reading;

  wire wr      = in_valid & in_ready;
  wire wr_done = wr && (waddr == AW'(N - 1));
  wire rd_go   = rd_start & rd_avail;
  wire rd_done = reading && (raddr == AW'(N - 1));

  assign in_ready = ~full[wbank];
  assign rd_avail = full[rbank] & ~reading;

  always_ff @(posedge clk) begin
    if (wr && !wbank) bank0[waddr] <= in_data;
    if (wr &&  wbank) bank1[waddr] <= in_data;
    if (reading) out_data <= rbank ? bank1[raddr] : bank0[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank     <= 1'b0;
      rbank     <= 1'b0;
      waddr     <= '0;
      raddr     <= '0;
      full      <= '0;
      reading   <= 1'b0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      swapped   <= 1'b0;
    end else if (clear) begin
      wbank     <= 1'b0;
      rbank     <= 1'b0;
      waddr     <= '0;
      raddr     <= '0;
      full      <= '0;
      reading   <= 1'b0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      swapped   <= 1'b0;
    end else begin
      // write side
      swapped <= wr_done;
      if (wr) waddr <= wr_done ? '0 : waddr + 1'b1;
      if (wr_done) wbank <= ~wbank;
      // read side
      out_valid <= reading;
      out_first <= reading && (raddr == '0);
      out_last  <= rd_done;
      if (rd_go) begin
        reading <= 1'b1;
        raddr   <= '0;
      end else if (reading) begin
        raddr <= raddr + 1'b1;
        if (rd_done) begin
          reading <= 1'b0;
          rbank   <= ~rbank;
        end
      end
      // bank state: set by the writer, cleared by the reader (different banks)
      for (int b = 0; b < 2; b++) begin
        if (wr_done && wbank == b[0])        full[b] <= 1'b1;
        else if (rd_done && rbank == b[0])   full[b] <= 1'b0;
      end
    end
  end

  // A bank is never written while it is full, nor read while it is not.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n) wr |-> !full[wbank]);
  a_read_full:    assert property (@(posedge clk) disable iff (!rst_n) reading |-> full[rbank]);

endmodule
