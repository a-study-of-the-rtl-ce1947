// tb_recombination -- twelve chip FIFO models hold small frames; chip FIFOs
// run empty at random. The output must be the module raster: module row
// R, chips (R / ROWS)*6 .. +5 left to right, COLS pixels each, with sof on
// the first pixel and eol on the last pixel of each module row.
module tb_recombination;
  import heps_pkg::*;
  import tb_heps_pkg::*;
  localparam int CX = 6, CY = 2, ROWS = 3, COLS = 4, W = 28, NCH = CX * CY;
  logic clk = 0, rst_n = 0;
  logic [NCH-1:0][W-1:0] fifo_data;
  logic [NCH-1:0] fifo_empty, fifo_rd;
  logic out_valid, out_ready;
  pix_beat_t out_beat;
  int checks = 0, failures = 0;
  localparam int QN = 3 * ROWS * COLS;
  logic [W-1:0] qm [NCH][QN];
  int rp [NCH];
  logic [NCH-1:0] hide;

  recombination #(.TILE_X(CX), .TILE_Y(CY), .ROWS(ROWS), .COLS(COLS), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always_comb
    for (int c = 0; c < NCH; c++) begin
      fifo_empty[c] = (rp[c] >= QN) || hide[c];
      fifo_data[c]  = (rp[c] < QN) ? qm[c][rp[c]] : '0;
    end
  always @(posedge clk) begin
    hide      <= NCH'($urandom) & NCH'($urandom);
    out_ready <= ($urandom % 4 != 0);
    for (int c = 0; c < NCH; c++) if (rst_n && fifo_rd[c]) rp[c] <= rp[c] + 1;
  end

  int n = 0;
  localparam int PER_FRAME = NCH * ROWS * COLS;
  always @(negedge clk) if (rst_n && out_valid && out_ready) begin
    int f, k, mr, x, chip, row, col;
    f = n / PER_FRAME; k = n % PER_FRAME;
    mr = k / (CX * COLS); x = k % (CX * COLS);
    chip = (mr / ROWS) * CX + x / COLS; row = mr % ROWS; col = x % COLS;
    checks++;
    if (out_beat.data != 32'(pix_val(f, chip, row, col))) begin
      failures++; $display("beat %0d: %h exp chip %0d (%0d,%0d) %h", n, out_beat.data, chip, row, col, pix_val(f, chip, row, col));
    end
    checks++;
    if (out_beat.sof != (k == 0) || out_beat.eol != (x == CX * COLS - 1)) begin
      failures++; $display("flags at beat %0d", n);
    end
    n <= n + 1;
  end

  initial begin
    out_ready = 0; hide = '0;
    for (int f = 0; f < 3; f++)
      for (int c = 0; c < NCH; c++)
        for (int p = 0; p < ROWS * COLS; p++) qm[c][f * ROWS * COLS + p] = pix_val(f, c, p / COLS, p % COLS);
    for (int c = 0; c < NCH; c++) rp[c] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (n != 3 * PER_FRAME) begin failures++; $display("beats %0d exp %0d", n, 3 * PER_FRAME); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
