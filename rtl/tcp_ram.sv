// tcp_ram -- ping-pong buffer for the pixel-level configuration stream.
//
// The per-pixel trim table of a whole FEE does not fit in the FPGA, so it
// is streamed from TCP one chip at a time: each bank of this RAM holds one
// chip's table (ROWS x COLS words of W bits, 1/12 of the FEE), and while
// the configuration sequencer shifts one bank into a chip, the next chip's
// table is written into the other bank.
//
// Words arrive in image order (row 0 columns 0..COLS-1, row 1, ...) and
// are reorganised on the way in: the chip is cut into REGIONS column
// bands (ARRAYIN chains) of COLS/REGIONS columns, and within a band the
// chain runs as a snake, even local columns top to bottom and odd ones
// bottom to top. A word goes to region col / (COLS/REGIONS) at chain
// position lc*ROWS + (lc even ? row : ROWS-1-row). The reader then sees,
// at address i, the i-th pixel of all REGIONS chains at once.
//
// Interface: in_valid/in_ready stream; in_ready is low while the write
// bank is still full. rd_avail says a complete bank is ready; rd_addr
// gives rd_data (all regions) one clock later; rd_release frees the bank
// being read. Streaming one chip at a time through a ping-pong pair is
// what the readout firmware does; the input order and the snake direction
// are this design's choices.
module tcp_ram #(
  parameter int unsigned ROWS    = 128,
  parameter int unsigned COLS    = 96,
  parameter int unsigned REGIONS = 4,
  parameter int unsigned W       = 32
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  output logic                               in_ready,
  input  logic [W-1:0]                       in_data,
  output logic                               rd_avail,
  input  logic [$clog2(ROWS*COLS/REGIONS)-1:0] rd_addr,
  output logic [REGIONS-1:0][W-1:0]          rd_data,
  input  logic                               rd_release
);
  localparam int unsigned RCOLS = COLS / REGIONS;
  localparam int unsigned PIX   = ROWS * RCOLS;      // pixels per chain
  localparam int unsigned AW    = $clog2(PIX);

  // one memory per region; the top address bit selects the bank

  logic [$clog2(ROWS)-1:0] row;
  logic [$clog2(COLS)-1:0] col;
  logic                    wbank, rbank;
  logic [1:0]              full;

  assign in_ready = !full[wbank];
  assign rd_avail = full[rbank];

  logic [$clog2(REGIONS)-1:0] reg_sel;
  logic [AW-1:0]              waddr;
  always_comb begin
    int unsigned lc;
    reg_sel = ($bits(reg_sel))'(int'(col) / RCOLS);
    lc      = int'(col) % RCOLS;
    waddr   = AW'(lc * ROWS + ((lc % 2 == 0) ? int'(row) : ROWS - 1 - int'(row)));
  end

  wire wr = in_valid && in_ready;
  wire last_word = (row == ($bits(row))'(ROWS - 1)) && (col == ($bits(col))'(COLS - 1));

  // one two-bank memory per region, so each maps onto its own block RAM
  for (genvar r = 0; r < REGIONS; r++) begin : g_reg
    logic [W-1:0] mem [2*PIX];
    always_ff @(posedge clk) begin
      if (wr && int'(reg_sel) == r) mem[int'(wbank) * PIX + int'(waddr)] <= in_data;
      rd_data[r] <= mem[int'(rbank) * PIX + int'(rd_addr)];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row <= '0; col <= '0; wbank <= 1'b0; rbank <= 1'b0; full <= '0;
    end else begin
      if (wr) begin
        if (col == ($bits(col))'(COLS - 1)) begin
          col <= '0;
          row <= last_word ? '0 : row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
        if (last_word) begin
          full[wbank] <= 1'b1;
          wbank       <= !wbank;
        end
      end
      if (rd_release && full[rbank]) begin
        full[rbank] <= 1'b0;
        rbank       <= !rbank;
      end
    end
  end
endmodule
