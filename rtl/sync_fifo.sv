// sync_fifo -- single-clock first-word-fall-through FIFO.
//
// Used as the FIFO behind each chip's ping-pong buffer and as the write and
// read buffers of the SPI core. rd_data always shows the oldest entry while
// empty is low; rd_en pops it. A push into a full FIFO or a pop from an
// empty one is ignored (and flagged by an assertion). Depth must be a power
// of two. Depths are this design's choice; the readout system only names
// the FIFOs.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [W-1:0]             wr_data,
  input  logic                     rd_en,
  output logic [W-1:0]             rd_data,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW:0]   wptr, rptr;

  wire do_wr = wr_en && !full;
  wire do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (do_wr) wptr <= wptr + 1'b1;
      if (do_rd) rptr <= rptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wptr[AW-1:0]] <= wr_data;
  end

  assign rd_data = mem[rptr[AW-1:0]];
  assign count   = wptr - rptr;
  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);

  // synthesis-neutral checks of the handshake rules
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty));
endmodule
