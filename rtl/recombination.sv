// recombination -- merges the twelve chip FIFOs of one FEE into a single
// module image stream.
//
// The chips of a FEE are tiled TILE_X wide and TILE_Y high (6 x 2, chip 0
// to 5 on the top row, 6 to 11 below), each ROWS x COLS pixels, giving a
// 256 x 576 module image. Every chip FIFO already holds its frame in row
// order, so the module raster is produced by taking, for each module row,
// COLS pixels from each chip of that chip row in turn. The output beat
// carries the pixel zero-padded to 32 bits plus start-of-frame and
// end-of-line flags.
//
// Handshake: out_valid/out_ready; a beat moves when both are high. The
// output is taken straight from the selected FIFO head (no register), so
// the block adds no latency and moves one pixel per clock while the
// selected FIFO is non-empty. The tiling is the one shown for the subunit
// image; the module raster order is this design's choice.
//
// Constant outputs: out_beat.fee is 0 here (the FEE number is set by the
// polling arbiter that merges the FEEs) and out_beat.data[31:28] is the
// zero padding of the 28-bit pixel.
module recombination
  import heps_pkg::*;
#(
  parameter int unsigned TILE_X  = CHIPS_X,
  parameter int unsigned TILE_Y  = CHIPS_Y,
  parameter int unsigned ROWS    = 128,
  parameter int unsigned COLS    = 96,
  parameter int unsigned W       = 28
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic [TILE_X*TILE_Y-1:0][W-1:0]     fifo_data,
  input  logic [TILE_X*TILE_Y-1:0]            fifo_empty,
  output logic [TILE_X*TILE_Y-1:0]            fifo_rd,
  output logic                                  out_valid,
  input  logic                                  out_ready,
  output pix_beat_t                             out_beat
);
  localparam int unsigned NCH = TILE_X * TILE_Y;
  localparam int unsigned MR  = ROWS * TILE_Y;

  logic [$clog2(MR)-1:0]      mrow;
  logic [$clog2(TILE_X)-1:0] cx;
  logic [$clog2(COLS)-1:0]    col;
  logic [$clog2(NCH)-1:0]     chip;

  always_comb begin
    chip = ($bits(chip))'((int'(mrow) / ROWS) * TILE_X + int'(cx));
    out_valid     = !fifo_empty[chip];
    out_beat      = '0;
    out_beat.data = 32'(fifo_data[chip]);
    out_beat.sof  = (mrow == '0) && (cx == '0) && (col == '0);
    out_beat.eol  = (cx == ($bits(cx))'(TILE_X - 1)) && (col == ($bits(col))'(COLS - 1));
    fifo_rd       = '0;
    fifo_rd[chip] = out_valid && out_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mrow <= '0;
      cx   <= '0;
      col  <= '0;
    end else if (out_valid && out_ready) begin
      if (col == ($bits(col))'(COLS - 1)) begin
        col <= '0;
        if (cx == ($bits(cx))'(TILE_X - 1)) begin
          cx   <= '0;
          mrow <= (mrow == ($bits(mrow))'(MR - 1)) ? '0 : mrow + 1'b1;
        end else begin
          cx <= cx + 1'b1;
        end
      end else begin
        col <= col + 1'b1;
      end
    end
  end
endmodule
