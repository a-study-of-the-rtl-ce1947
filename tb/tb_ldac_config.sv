// tb_ldac_config -- a RAM model offers one table per chip; a chip-side
// model captures ARRAYIN on every rising CLK_SPI edge into the chip(s)
// whose chip select is low. Standard mode: each chip must receive its own
// table, one chip at a time, in PIX x W clock periods each. Calibration
// mode: all chips together receive one table. Checks the number of
// CLK_SPI periods, the bit order (MSB first), one refresh pulse per run
// and the total duration.
module tb_ldac_config;
  localparam int NC = 3, PIX = 5, REG = 4, W = 8, DIV = 4;
  logic clk = 0, rst_n = 0;
  logic start = 0, cal_mode = 0;
  logic rd_avail, rd_release;
  logic [$clog2(PIX)-1:0] rd_addr;
  logic [REG-1:0][W-1:0] rd_data;
  logic clk_spi, refresh, busy, done;
  logic [NC-1:0] cs_n;
  logic [REG-1:0] array_in;
  int checks = 0, failures = 0;

  ldac_config #(.N_CHIPS(NC), .PIX_PER_REGION(PIX), .REGIONS(REG), .W(W), .CLK_DIV(DIV)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [W-1:0] tval(int t, int r, int i);
    return W'(t * 61 + r * 17 + i * 5 + 1);
  endfunction

  // RAM model: table t available after a short delay, one-clock read
  int table_n = 0, avail_dly = 0;
  assign rd_avail = (avail_dly == 0);
  always @(posedge clk) begin
    for (int r = 0; r < REG; r++) rd_data[r] <= tval(table_n, r, int'(rd_addr));
    if (rd_release) begin table_n <= table_n + 1; avail_dly <= 7; end
    else if (avail_dly != 0) avail_dly <= avail_dly - 1;
  end

  // chip models
  logic [REG-1:0][W-1:0] got [NC][PIX];
  int nbits [NC];
  int refreshes = 0, periods = 0, overlap = 0;
  logic clk_spi_d = 0, refresh_d = 0;
  always @(posedge clk) begin
    clk_spi_d <= clk_spi; refresh_d <= refresh;
    if (refresh && !refresh_d) refreshes++;
    if ($countones(~cs_n) > 1 && !cal_mode) overlap++;
    if (clk_spi && !clk_spi_d) begin
      periods++;
      for (int c = 0; c < NC; c++) if (!cs_n[c]) begin
        int p, b;
        p = nbits[c] / W; b = W - 1 - nbits[c] % W;
        if (p < PIX) for (int r = 0; r < REG; r++) got[c][p][r][b] = array_in[r];
        nbits[c]++;
      end
    end
  end

  task automatic run(bit cal);
    int t0, dur;
    for (int c = 0; c < NC; c++) nbits[c] = 0;
    periods = 0; refreshes = 0; table_n = 0;
    @(posedge clk); cal_mode <= cal; start <= 1;
    @(posedge clk); start <= 0;
    t0 = $time;
    @(posedge clk);
    while (busy) @(posedge clk);
    dur = ($time - t0) / 10;
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (nbits[c] != PIX * W) begin failures++; $display("cal=%0d chip %0d got %0d bits", cal, c, nbits[c]); end
      for (int i = 0; i < PIX; i++) for (int r = 0; r < REG; r++) begin
        checks++;
        if (got[c][i][r] != tval(cal ? 0 : c, r, i)) begin
          failures++; $display("cal=%0d chip %0d pix %0d reg %0d: %h exp %h", cal, c, i, r, got[c][i][r], tval(cal ? 0 : c, r, i));
        end
      end
    end
    checks++;
    if (periods != (cal ? 1 : NC) * PIX * W) begin failures++; $display("periods %0d", periods); end
    checks++;
    if (refreshes != 1) begin failures++; $display("refreshes %0d", refreshes); end
    checks++;
    if (overlap != 0) begin failures++; $display("two chip selects low in standard mode"); end
    // duration: per chip PIX*W shift periods + setup + hold, plus refresh,
    // plus waiting for the table and loading it
    checks++;
    if (dur < (cal ? 1 : NC) * (PIX * W + 2) * DIV + DIV) begin failures++; $display("too short %0d", dur); end
    $display("cal=%0d duration %0d clocks", cal, dur);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
