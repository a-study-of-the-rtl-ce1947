// tb_pingpong_bram -- feeds frames of chain-ordered words and checks that
// the chip FIFO returns each frame in image (row-major) order; stalls the
// reader so that both banks fill and checks that the next frame is
// dropped and counted while the buffered ones still come out intact.
module tb_pingpong_bram;
  import tb_heps_pkg::*;
  localparam int ROWS = 4, COLS = 24, CHAINS = 12, W = 28;
  localparam int STEPS = ROWS * COLS / CHAINS, NPIX = ROWS * COLS;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  logic [$clog2(STEPS)-1:0] in_step = 0;
  logic [CHAINS-1:0][W-1:0] in_words = '0;
  logic out_rd, out_empty;
  logic [W-1:0] out_data;
  logic [15:0] drop_count;
  int checks = 0, failures = 0;
  bit reader_on = 1;

  pingpong_bram #(.ROWS(ROWS), .COLS(COLS), .CHAINS(CHAINS), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic send_frame(int f);
    for (int p = 0; p < STEPS; p++) begin
      @(posedge clk);
      in_valid <= 1; in_step <= ($bits(in_step))'(p); in_last <= (p == STEPS - 1);
      for (int c = 0; c < CHAINS; c++)
        in_words[c] <= pix_val(f, 0, ro_row(p, ROWS), ro_col(c, p, ROWS, COLS, CHAINS));
      @(posedge clk);
      in_valid <= 0;
      repeat (18) @(posedge clk);
    end
  endtask

  // expected frame sequence out of the FIFO
  int exp_frames[$];
  int got = 0, fidx = 0;
  assign out_rd = rst_n && reader_on && !out_empty && ($urandom % 3 != 0);
  always @(posedge clk) if (out_rd) begin
    int f, row, col;
    f = exp_frames[fidx]; row = got / COLS; col = got % COLS;
    checks++;
    if (out_data != pix_val(f, 0, row, col)) begin
      failures++; $display("frame %0d pixel (%0d,%0d): %h exp %h", f, row, col, out_data, pix_val(f, 0, row, col));
    end
    if (got == NPIX - 1) begin got <= 0; fidx <= fidx + 1; end else got <= got + 1;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    exp_frames = '{0, 1, 2, 3};
    send_frame(0);
    send_frame(1);
    repeat (200) @(posedge clk);
    checks++;
    if (fidx != 2) begin failures++; $display("after two frames fidx=%0d", fidx); end
    // stall the reader: frames 2 and 3 fill both banks, frame 4 is dropped
    reader_on = 0;
    send_frame(2);
    send_frame(3);
    send_frame(4);
    checks++;
    if (drop_count != 1) begin failures++; $display("drop_count=%0d", drop_count); end
    reader_on = 1;
    repeat (NPIX * 8) @(posedge clk);
    checks++;
    if (fidx != 4) begin failures++; $display("frames out %0d exp 4", fidx); end
    checks++;
    if (!out_empty) begin failures++; $display("extra data in FIFO"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
