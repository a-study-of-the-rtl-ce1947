// tb_u4fcp_full -- the readout subunit at its full size, every parameter
// of the top at its default: 2 FEEs of 12 BP40 chips of 128 x 96 pixels,
// 12 readout chains per chip, 28-bit counters, 33-bit DDR addresses.
//
// One complete operation: the 12288-pixel configuration table is loaded in
// calibration mode into all 12 chips of FEE 0 and checked bit by bit, then
// one internally timed frame is read out of all 24 chips. All 2 x 147456
// output beats are checked against the tiled 256 x 576 module image of
// each FEE. Checked timing: the 344064 serial clock periods of a frame fit
// in the default 360000-clock frame period (1 kHz at 360 MHz), and the
// configuration of one table takes 98304 CLK_SPI periods.
module tb_u4fcp_full;
  import heps_pkg::*;
  import tb_heps_pkg::*;
  localparam int NF = 2, NC = 12, ROWS = 128, COLS = 96, CH = 12, RW = 28;
  localparam int CREG = 4, CW = 32;
  localparam int CPIX = ROWS * COLS / CREG;
  localparam int IMG = 2 * ROWS * (NC / 2) * COLS;
  localparam int FRAME_BITS = ROWS * COLS / CH * RW * CH;   // 344064

  logic clk = 0, rst_n = 0, clk_ro = 0, rst_ro_n = 0;
  logic rbcp_act = 0, rbcp_we = 0, rbcp_re = 0, rbcp_ack;
  logic [31:0] rbcp_addr = 0;
  logic [7:0] rbcp_wd = 0, rbcp_rd;
  logic [NF-1:0] i2c_scl_o, i2c_sda_o, i2c_scl_i, i2c_sda_i;
  logic [NF-1:0] gspi_sck, gspi_mosi, gspi_miso, wb_irq;
  logic ext_trig = 0;
  logic cfg_valid = 0, cfg_ready;
  logic [CW-1:0] cfg_data = 0;
  logic [NF-1:0] px_clk_spi, px_refresh;
  logic [NF-1:0][NC-1:0] px_cs_n;
  logic [NF-1:0][CREG-1:0] px_array_in;
  logic ro_frame;
  logic [NF-1:0][NC-1:0] ro_sdata;
  logic [32:0] m_awaddr, m_araddr;
  logic [7:0] m_awlen, m_arlen;
  logic [2:0] m_awsize, m_arsize;
  logic [1:0] m_awburst, m_arburst, m_bresp, m_rresp;
  logic m_awvalid, m_awready, m_wlast, m_wvalid, m_wready, m_bvalid, m_bready;
  logic m_arvalid, m_arready, m_rlast, m_rvalid, m_rready;
  logic [31:0] m_wdata, m_rdata;
  logic [3:0] m_wstrb;
  logic [1:0] out_valid, out_ready;
  pix_beat_t out_beat;
  logic [31:0] frame_count;
  logic [15:0] frame_skips, ddr_errors;
  logic [NF-1:0][NC-1:0] chip_drop;
  int checks = 0, failures = 0;

  u4fcp_top dut (.*);

  always #4 clk = ~clk;
  int clk_cyc = 0;
  always @(posedge clk) clk_cyc++;
  always #1.4 clk_ro = ~clk_ro;

  initial begin
    #40ms;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  for (genvar f = 0; f < NF; f++) begin : g_f
    for (genvar c = 0; c < NC; c++) begin : g_c
      bp40_model #(.CHIP(f * NC + c), .ROWS(ROWS), .COLS(COLS), .CHAINS(CH), .BITS(RW))
        u_chip (.clk(clk_ro), .frame(ro_frame && rst_ro_n), .sdata(ro_sdata[f][c]));
    end
  end

  axi_mem_model #(.ADDR_W(33)) u_mem (
    .clk(clk_ro), .awaddr(m_awaddr), .awlen(m_awlen), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready),
    .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready),
    .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready));

  assign i2c_scl_i = i2c_scl_o;
  assign i2c_sda_i = i2c_sda_o;
  assign gspi_miso = gspi_mosi;

  task automatic rbcp(logic we, logic [3:0] slv, logic [7:0] a, logic [7:0] wd, output logic [7:0] rd);
    @(posedge clk);
    rbcp_act <= 1; rbcp_we <= we; rbcp_re <= !we; rbcp_addr <= {16'h0, slv, 4'h0, a}; rbcp_wd <= wd;
    @(posedge clk);
    rbcp_act <= 0; rbcp_we <= 0; rbcp_re <= 0;
    do @(posedge clk); while (!rbcp_ack);
    rd = rbcp_rd;
  endtask

  // configuration stream: one table (number 7)
  int cfg_k = 0;
  logic cfg_on = 0;
  always @(posedge clk) if (rst_n && cfg_valid && cfg_ready) begin
    if (cfg_k == ROWS * COLS - 1) cfg_on <= 0;
    cfg_k <= cfg_k + 1;
  end
  always @(negedge clk) begin
    cfg_valid = rst_n && cfg_on;
    cfg_data  = cfg_val(7, cfg_k / COLS, cfg_k % COLS);
  end

  // capture on FEE 0: all chips share the stream in calibration mode, so
  // chip 0 is captured in full and the others are compared with it
  logic [CW-1:0] got [CREG][CPIX];
  int nbits [NC];
  int spi_periods = 0, mismatch = 0;
  logic spi_d = 0;
  always @(posedge clk) begin
    spi_d <= px_clk_spi[0];
    if (rst_n && px_clk_spi[0] && !spi_d) begin
      spi_periods++;
      if (!px_cs_n[0][0]) begin
        int p, b;
        p = nbits[0] / CW; b = CW - 1 - nbits[0] % CW;
        for (int r = 0; r < CREG; r++) got[r][p][b] = px_array_in[0][r];
      end
      for (int c = 0; c < NC; c++) if (!px_cs_n[0][c]) nbits[c]++;
      if (px_cs_n[0] != '0) mismatch++;
    end
  end

  // output checker
  int k_pos [NF];
  int n_beats = 0;
  always @(negedge clk_ro) if (rst_ro_n) begin
    for (int p = 0; p < 2; p++) if (out_valid[p] && out_ready[p]) begin
      int f, k, mr, x, chip, row, col;
      logic [27:0] v;
      f = int'(out_beat.fee);
      k = k_pos[f];
      mr = k / ((NC / 2) * COLS); x = k % ((NC / 2) * COLS);
      chip = (mr / ROWS) * (NC / 2) + x / COLS; row = mr % ROWS; col = x % COLS;
      v = out_beat.data[27:0];
      checks++;
      if (v != pix_val(0, f * NC + chip, row, col) || out_beat.sof != (k == 0)
          || out_beat.eol != (x == (NC / 2) * COLS - 1)) begin
        failures++;
        if (failures < 20) $display("fee %0d beat %0d: %h exp %h", f, k, v, pix_val(0, f * NC + chip, row, col));
      end
      k_pos[f] = k + 1;
      n_beats++;
    end
  end
  always @(posedge clk_ro) out_ready <= {2{1'($urandom % 8 != 0)}};

  // frame timing
  int ro_cyc = 0, t_fall = 0;
  logic fr_d = 0;
  always @(posedge clk_ro) if (rst_ro_n) begin
    ro_cyc++;
    fr_d <= ro_frame;
    if (fr_d && !ro_frame) t_fall = ro_cyc;
  end

  initial begin
    logic [7:0] d;
    int t0, cfg_clocks, ro_clocks;
    k_pos[0] = 0; k_pos[1] = 0;
    for (int c = 0; c < NC; c++) nbits[c] = 0;
    repeat (5) @(posedge clk);
    rst_n <= 1; rst_ro_n <= 1;
    repeat (5) @(posedge clk);

    // calibration-mode configuration of FEE 0
    cfg_on <= 1;
    rbcp(1, 4, 0, 8'h0C, d);
    t0 = clk_cyc;
    do rbcp(0, 4, 5, 8'h00, d); while (!d[2]);
    cfg_clocks = clk_cyc - t0;
    checks++;
    if (spi_periods != CPIX * CW) begin failures++; $display("CLK_SPI periods %0d exp %0d", spi_periods, CPIX * CW); end
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (nbits[c] != CPIX * CW) begin failures++; $display("chip %0d got %0d bits", c, nbits[c]); end
    end
    checks++;
    if (mismatch != 0) begin failures++; $display("chip selects differ in calibration mode"); end
    for (int r = 0; r < CREG; r++)
      for (int i = 0; i < CPIX; i++) begin
        int lc, row, col;
        lc = i / ROWS; row = (lc % 2 == 0) ? i % ROWS : ROWS - 1 - i % ROWS;
        col = r * (COLS / CREG) + lc;
        checks++;
        if (got[r][i] != cfg_val(7, row, col)) begin
          failures++;
          if (failures < 20) $display("region %0d pix %0d: %h exp %h", r, i, got[r][i], cfg_val(7, row, col));
        end
      end
    checks++;      // CLK_SPI = 125 MHz / 4: 4 clocks per bit, plus table load and refresh
    if (cfg_clocks < CPIX * CW * 4 || cfg_clocks > CPIX * CW * 4 + 2 * ROWS * COLS + 1000) begin
      failures++; $display("configuration took %0d clocks", cfg_clocks);
    end
    $display("configuration: %0d clocks for %0d CLK_SPI periods", cfg_clocks, spi_periods);

    // one frame
    rbcp(1, 4, 0, 8'h01, d);
    @(posedge clk_ro);
    while (frame_count == 0) @(posedge clk_ro);
    rbcp(1, 4, 0, 8'h00, d);
    @(posedge clk_ro);
    while (!dut.ro_busy) @(posedge clk_ro);
    while (dut.ro_busy) @(posedge clk_ro);
    ro_clocks = ro_cyc - t_fall;
    checks++;
    if (ro_clocks < FRAME_BITS || ro_clocks > FRAME_BITS + 10) begin
      failures++; $display("serial readout took %0d clocks, expected %0d", ro_clocks, FRAME_BITS);
    end
    checks++;
    if (FRAME_BITS + 10 > 360000) begin failures++; $display("frame does not fit the period"); end
    $display("serial readout: %0d clocks (frame period 360000)", ro_clocks);
    while (n_beats < NF * IMG) @(posedge clk_ro);
    repeat (2000) @(posedge clk_ro);
    checks++;
    if (k_pos[0] != IMG || k_pos[1] != IMG) begin failures++; $display("beats per FEE %0d %0d exp %0d", k_pos[0], k_pos[1], IMG); end
    checks++;
    if (frame_count != 1 || frame_skips != 0 || chip_drop != '0 || ddr_errors != 0 || u_mem.errors != 0) begin
      failures++; $display("frames %0d skips %0d drops %h errors %0d/%0d", frame_count, frame_skips, chip_drop, ddr_errors, u_mem.errors);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
