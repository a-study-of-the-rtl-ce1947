// tb_tcp_ram -- streams three chip tables in image order (with random
// gaps) and reads each bank back: address i of region r must hold pixel
// (row, col) of the snake order worked out here. Also checks that the
// stream is held off (in_ready low) while both banks are full and that a
// release lets the next table in.
module tb_tcp_ram;
  import tb_heps_pkg::*;
  localparam int ROWS = 4, COLS = 24, REG = 4, W = 32;
  localparam int RC = COLS / REG, PIX = ROWS * RC;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [W-1:0] in_data = 0;
  logic rd_avail, rd_release = 0;
  logic [$clog2(PIX)-1:0] rd_addr = 0;
  logic [REG-1:0][W-1:0] rd_data;
  int checks = 0, failures = 0;

  tcp_ram #(.ROWS(ROWS), .COLS(COLS), .REGIONS(REG), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int t_sent = 0, k = 0;   // table and word being sent
  int stalls = 0;
  always @(posedge clk) begin
    if (in_valid && in_ready) begin
      if (k == ROWS * COLS - 1) begin k <= 0; t_sent <= t_sent + 1; end else k <= k + 1;
    end
    if (in_valid && !in_ready) stalls++;
  end
  always @(negedge clk) begin
    in_valid = rst_n && t_sent < 3 && ($urandom % 4 != 0);
    in_data  = cfg_val(t_sent, k / COLS, k % COLS);
  end

  task automatic check_bank(int t);
    for (int i = 0; i < PIX; i++) begin
      @(posedge clk); rd_addr <= ($bits(rd_addr))'(i);
      @(posedge clk); @(negedge clk);
      for (int r = 0; r < REG; r++) begin
        int lc, rr, row, col;
        lc = i / ROWS; rr = i % ROWS;
        row = (lc % 2 == 0) ? rr : ROWS - 1 - rr;
        col = r * RC + lc;
        checks++;
        if (rd_data[r] != cfg_val(t, row, col)) begin
          failures++; $display("table %0d region %0d addr %0d: %h exp %h", t, r, i, rd_data[r], cfg_val(t, row, col));
        end
      end
    end
    @(posedge clk); rd_release <= 1;
    @(posedge clk); rd_release <= 0;
    @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // let tables 0 and 1 fill both banks; table 2 must wait
    repeat (ROWS * COLS * 4) @(posedge clk);
    checks++;
    if (!rd_avail || t_sent != 2) begin failures++; $display("avail=%0d t_sent=%0d", rd_avail, t_sent); end
    checks++;
    if (stalls == 0) begin failures++; $display("stream never held off"); end
    for (int t = 0; t < 3; t++) begin
      while (!rd_avail) @(negedge clk);
      check_bank(t);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (rd_avail) begin failures++; $display("bank still available"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
