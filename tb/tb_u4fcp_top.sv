// tb_u4fcp_top -- end-to-end test of one readout subunit at reduced sizes
// (chips of 4 x 24 pixels, a 8 KB DDR window, short frame period). 24
// behavioural BP40 chips, an AXI memory, an I2C slave on FEE 0 and an SPI
// loop-back surround the top; the host side is driven through RBCP.
//
// The run goes: I2C write and read-back, SPI byte, standard configuration
// of the 12 chips of FEE 0 and calibration-mode configuration of FEE 1,
// free-running frames, a too-short period that forces frame skips, a
// switch of the output port, a stalled output that fills the DDR window
// and makes chips drop frames, and externally triggered frames. Every
// output beat is checked for its chip, row and column against the tiled
// module image; the frame number must be the same across an image and
// rise from image to image (exactly the frame index while nothing was
// dropped). Each mechanism is counted and one that never happened counts
// as a failure.
module tb_u4fcp_top;
  import heps_pkg::*;
  import tb_heps_pkg::*;
  localparam int NF = 2, NC = 12, ROWS = 4, COLS = 24, CH = 12, RW = 28;
  localparam int CREG = 4, CW = 32, DIV = 4, AW = 13, PERIOD = 3000;
  localparam int STEPS = ROWS * COLS / CH;
  localparam int CPIX = ROWS * COLS / CREG;
  localparam int IMG = 2 * ROWS * (NC / 2) * COLS;     // beats per FEE image

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
  logic [AW-1:0] m_awaddr, m_araddr;
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

  u4fcp_top #(.ROWS(ROWS), .COLS(COLS), .ADDR_W(AW), .FRAME_PERIOD_RST(PERIOD)) dut (.*);

  always #4 clk = ~clk;          // 125 MHz
  always #1.4 clk_ro = ~clk_ro;  // ~360 MHz

  initial begin
    #20ms;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------------------------------------------------------- chips
  for (genvar f = 0; f < NF; f++) begin : g_f
    for (genvar c = 0; c < NC; c++) begin : g_c
      bp40_model #(.CHIP(f * NC + c), .ROWS(ROWS), .COLS(COLS), .CHAINS(CH), .BITS(RW))
        u_chip (.clk(clk_ro), .frame(ro_frame && rst_ro_n), .sdata(ro_sdata[f][c]));
    end
  end

  // ---------------------------------------------------------------- DDR
  axi_mem_model #(.ADDR_W(AW)) u_mem (
    .clk(clk_ro), .awaddr(m_awaddr), .awlen(m_awlen), .awvalid(m_awvalid), .awready(m_awready),
    .wdata(m_wdata), .wlast(m_wlast), .wvalid(m_wvalid), .wready(m_wready),
    .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready),
    .araddr(m_araddr), .arlen(m_arlen), .arvalid(m_arvalid), .arready(m_arready),
    .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast), .rvalid(m_rvalid), .rready(m_rready));

  // ---------------------------------------------------------------- I2C / SPI
  logic slv_sda;
  wire  scl0 = i2c_scl_o[0];
  wire  sda0 = i2c_sda_o[0] & slv_sda;
  i2c_slave_model #(.ADDR(7'h50)) u_i2c (.clk, .scl(scl0), .sda(sda0), .sda_o(slv_sda));
  assign i2c_scl_i = {i2c_scl_o[1], scl0};
  assign i2c_sda_i = {i2c_sda_o[1], sda0};
  assign gspi_miso = gspi_mosi;          // loop-back

  // ---------------------------------------------------------------- mechanisms
  int n_int_frames = 0, n_ext_frames = 0, n_skip = 0, n_drop = 0, n_poll_switch = 0;
  int n_full = 0, n_port [2], n_wrap = 0, n_cfg_std = 0, n_cfg_cal = 0, n_i2c = 0, n_spi = 0;
  int n_images [NF];

  // ---------------------------------------------------------------- host side
  task automatic rbcp(logic we, logic [3:0] slv, logic [7:0] a, logic [7:0] wd, output logic [7:0] rd);
    @(posedge clk);
    rbcp_act <= 1; rbcp_we <= we; rbcp_re <= !we; rbcp_addr <= {16'h0, slv, 4'h0, a}; rbcp_wd <= wd;
    @(posedge clk);
    rbcp_act <= 0; rbcp_we <= 0; rbcp_re <= 0;
    do @(posedge clk); while (!rbcp_ack);
    rd = rbcp_rd;
  endtask
  task automatic wr(logic [3:0] slv, logic [7:0] a, logic [7:0] d);
    logic [7:0] x;
    rbcp(1, slv, a, d, x);
  endtask
  task automatic rd(logic [3:0] slv, logic [7:0] a, output logic [7:0] d);
    rbcp(0, slv, a, 8'h00, d);
  endtask
  task automatic expect8(string what, logic [7:0] got, logic [7:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask
  localparam logic [3:0] S_I2C0 = 0, S_SPI0 = 2, S_REGS = 4;
  task automatic i2c_cmd(logic [7:0] txr, logic [7:0] cr);
    logic [7:0] sr;
    if (cr[4]) wr(S_I2C0, 3, txr);
    wr(S_I2C0, 4, cr);
    do rd(S_I2C0, 4, sr); while (sr[1]);      // TIP
    wr(S_I2C0, 4, 8'h01);
  endtask
  task automatic set_period(int p);
    for (int i = 0; i < 4; i++) wr(S_REGS, 8'(1 + i), 8'(p >> (8 * i)));
  endtask
  task automatic wait_ro(int n);
    repeat (n) @(posedge clk_ro);
  endtask

  // configuration stream feeder: tables from a list
  int cfg_tables [$];
  int cfg_k = 0;
  always @(posedge clk) if (rst_n && cfg_valid && cfg_ready) begin
    if (cfg_k == ROWS * COLS - 1) begin cfg_k <= 0; void'(cfg_tables.pop_front()); end
    else cfg_k <= cfg_k + 1;
  end
  always @(negedge clk) begin
    cfg_valid = rst_n && cfg_tables.size() != 0;
    cfg_data  = cfg_tables.size() != 0 ? cfg_val(cfg_tables[0], cfg_k / COLS, cfg_k % COLS) : '0;
  end

  // chip configuration capture (both FEEs)
  logic [CW-1:0] cfg_got [NF][NC][CREG][CPIX];
  int cfg_bits [NF][NC];
  logic [NF-1:0] spi_d = 0;
  always @(posedge clk) begin
    spi_d <= px_clk_spi;
    for (int f = 0; f < NF; f++)
      if (px_clk_spi[f] && !spi_d[f])
        for (int c = 0; c < NC; c++) if (!px_cs_n[f][c]) begin
          int p, b;
          p = cfg_bits[f][c] / CW; b = CW - 1 - cfg_bits[f][c] % CW;
          if (p < CPIX) for (int r = 0; r < CREG; r++) cfg_got[f][c][r][p][b] = px_array_in[f][r];
          cfg_bits[f][c]++;
        end
  end
  task automatic check_cfg(int f, int c, int t);
    checks++;
    if (cfg_bits[f][c] != CPIX * CW) begin failures++; $display("fee %0d chip %0d: %0d config bits", f, c, cfg_bits[f][c]); end
    for (int r = 0; r < CREG; r++)
      for (int i = 0; i < CPIX; i++) begin
        int lc, row, col;
        lc = i / ROWS; row = (lc % 2 == 0) ? i % ROWS : ROWS - 1 - i % ROWS;
        col = r * (COLS / CREG) + lc;
        checks++;
        if (cfg_got[f][c][r][i] != cfg_val(t, row, col)) begin
          failures++; $display("fee %0d chip %0d region %0d pix %0d: %h exp %h", f, c, r, i, cfg_got[f][c][r][i], cfg_val(t, row, col));
        end
      end
  endtask

  // ---------------------------------------------------------------- output checker
  int k_pos [NF];
  int img_frame [NF][NC];
  int last_frame [NF][NC];
  logic seen_drop = 0;
  int last_fee = -1;
  logic [AW-1:0] last_aw = 0;
  logic ext_phase = 0;
  logic frame_d = 0;
  logic [NF-1:0][NC-1:0] drop_d = '0;
  always @(posedge clk_ro) if (rst_ro_n) begin
    frame_d <= ro_frame;
    if (ro_frame && !frame_d) begin if (ext_phase) n_ext_frames++; else n_int_frames++; end
    drop_d <= chip_drop;
    if (chip_drop != '0) seen_drop = 1;
    if (m_awvalid && m_awready) begin
      if (m_awaddr < last_aw) n_wrap++;
      last_aw <= m_awaddr;
    end
  end
  always @(negedge clk_ro) if (rst_ro_n) begin
    for (int p = 0; p < 2; p++) if (out_valid[p] && out_ready[p]) begin
      int f, k, mr, x, chip, row, col, fr;
      logic [27:0] v;
      n_port[p]++;
      checks++;
      if (p != 0 && out_valid[0]) begin failures++; $display("both ports valid"); end
      f = int'(out_beat.fee);
      if (last_fee >= 0 && f != last_fee) n_poll_switch++;
      last_fee = f;
      k = k_pos[f];
      mr = k / ((NC / 2) * COLS); x = k % ((NC / 2) * COLS);
      chip = (mr / ROWS) * (NC / 2) + x / COLS; row = mr % ROWS; col = x % COLS;
      v = out_beat.data[27:0];
      fr = int'(v[27:22]);
      if (k == 0 || chip != ((k - 1) / ((NC / 2) * COLS) / ROWS) * (NC / 2) + ((k - 1) % ((NC / 2) * COLS)) / COLS)
        ; // new chip segment: frame checked below
      if (row == 0 && col == 0 && (mr % ROWS) == 0) begin
        // first pixel of this chip in this image
        checks++;
        if (n_images[f] > 0 && fr <= last_frame[f][chip] && !(last_frame[f][chip] == 63)) begin
          failures++; $display("fee %0d chip %0d: frame %0d after %0d", f, chip, fr, last_frame[f][chip]);
        end
        if (!seen_drop) begin
          checks++;
          if (fr != (n_images[f] % 64)) begin failures++; $display("fee %0d chip %0d: frame %0d, image %0d", f, chip, fr, n_images[f]); end
        end
        img_frame[f][chip] = fr;
      end
      checks++;
      if (v != pix_val(img_frame[f][chip], f * NC + chip, row, col)) begin
        failures++;
        if (failures < 20) $display("fee %0d beat %0d: %h exp frame %0d chip %0d (%0d,%0d) %h", f, k, v, img_frame[f][chip], f * NC + chip, row, col, pix_val(img_frame[f][chip], f * NC + chip, row, col));
      end
      checks++;
      if (out_beat.sof != (k == 0) || out_beat.eol != (x == (NC / 2) * COLS - 1)) begin
        failures++; $display("fee %0d beat %0d: flags sof %0d eol %0d", f, k, out_beat.sof, out_beat.eol);
      end
      if (k == IMG - 1) begin
        k_pos[f] = 0; n_images[f]++;
        for (int c = 0; c < NC; c++) last_frame[f][c] = img_frame[f][c];
      end else k_pos[f] = k + 1;
    end
  end

  // ready pattern of the output: random, or held off
  logic hold_out = 0;
  always @(posedge clk_ro) out_ready <= hold_out ? 2'b00 : {2{1'($urandom % 8 != 0)}};

  // ---------------------------------------------------------------- the run
  initial begin
    logic [7:0] d;
    for (int f = 0; f < NF; f++) begin
      k_pos[f] = 0; n_images[f] = 0;
      for (int c = 0; c < NC; c++) begin cfg_bits[f][c] = 0; img_frame[f][c] = 0; last_frame[f][c] = 0; end
    end
    n_port[0] = 0; n_port[1] = 0;
    repeat (5) @(posedge clk);
    rst_n <= 1; rst_ro_n <= 1;
    repeat (5) @(posedge clk);

    // I2C: write 0x77 to register 0x21 of the EEPROM-like slave, read it back
    wr(S_I2C0, 0, 8'd3); wr(S_I2C0, 1, 8'd0); wr(S_I2C0, 2, 8'h80);
    i2c_cmd(8'hA0, 8'h90); i2c_cmd(8'h21, 8'h10); i2c_cmd(8'h77, 8'h50);
    i2c_cmd(8'hA0, 8'h90); i2c_cmd(8'h21, 8'h10); i2c_cmd(8'hA1, 8'h90);
    i2c_cmd(8'h00, 8'h68);
    rd(S_I2C0, 3, d);
    expect8("i2c read back", d, 8'h77);
    expect8("i2c slave memory", u_i2c.mem[8'h21], 8'h77);
    if (d == 8'h77) n_i2c++;

    // SPI: one byte through the loop-back
    wr(S_SPI0, 0, 8'h50);
    wr(S_SPI0, 2, 8'hA5);
    do rd(S_SPI0, 1, d); while (!d[7]);
    rd(S_SPI0, 2, d);
    expect8("spi loop-back", d, 8'hA5);
    if (d == 8'hA5) n_spi++;

    // standard configuration of FEE 0: table c for chip c
    for (int c = 0; c < NC; c++) cfg_tables.push_back(c);
    wr(S_REGS, 0, 8'h08);
    do rd(S_REGS, 5, d); while (!d[2]);
    for (int c = 0; c < NC; c++) check_cfg(0, c, c);
    n_cfg_std++;
    // calibration mode on FEE 1: table 40 into all chips at once
    cfg_tables.push_back(40);
    wr(S_REGS, 0, 8'h2C);
    do rd(S_REGS, 5, d); while (!d[2]);
    for (int c = 0; c < NC; c++) check_cfg(1, c, 40);
    n_cfg_cal++;
    checks++;
    if (cfg_bits[0][0] != CPIX * CW) begin failures++; $display("FEE 0 was written in FEE 1's run"); end

    // free-running frames
    wr(S_REGS, 0, 8'h01);
    wait_ro(PERIOD * 4);
    // too short a period: frames due while the chips still send are skipped
    set_period(PERIOD / 2);
    wait_ro(PERIOD * 3);
    set_period(PERIOD);
    n_skip = int'(frame_skips);
    // switch the output port
    wr(S_REGS, 0, 8'h11);
    wait_ro(PERIOD * 3);
    // hold the output: the DDR window fills, chips drop frames
    hold_out = 1;
    for (int i = 0; i < 12; i++) begin
      wait_ro(PERIOD / 2);
      rd(S_REGS, 5, d);
      if (d[3]) n_full++;
    end
    hold_out = 0;
    wait_ro(PERIOD * 3);
    // external trigger
    wr(S_REGS, 0, 8'h13);
    wait_ro(PERIOD);
    ext_phase = 1;
    for (int i = 0; i < 3; i++) begin
      @(posedge clk_ro) ext_trig <= 1;
      wait_ro(10);
      @(posedge clk_ro) ext_trig <= 0;
      wait_ro(PERIOD / 4);
      if (i == 2) begin          // a trigger while the chips still send
        @(posedge clk_ro) ext_trig <= 1;
        wait_ro(10);
        @(posedge clk_ro) ext_trig <= 0;
      end
      wait_ro(PERIOD);
    end
    // stop and drain
    wr(S_REGS, 0, 8'h10);
    wait_ro(PERIOD * 4);
    for (int f = 0; f < NF; f++) for (int c = 0; c < NC; c++) if (chip_drop[f][c]) n_drop++;
    n_skip = int'(frame_skips);

    checks++;
    if (k_pos[0] != 0 || k_pos[1] != 0) begin failures++; $display("partial image left: %0d %0d", k_pos[0], k_pos[1]); end
    checks++;
    if (n_images[0] != n_images[1]) begin failures++; $display("images %0d / %0d", n_images[0], n_images[1]); end
    checks++;
    if (ddr_errors != 0 || u_mem.errors != 0) begin failures++; $display("AXI errors %0d %0d", ddr_errors, u_mem.errors); end
    checks++;
    if (int'(frame_count) != n_int_frames + n_ext_frames) begin failures++; $display("frame_count %0d", frame_count); end

    $display("mechanisms: int_frames=%0d ext_frames=%0d skips=%0d chip_drops=%0d poll_switches=%0d ddr_full=%0d port0=%0d port1=%0d ddr_wraps=%0d cfg_std=%0d cfg_cal=%0d i2c=%0d spi=%0d images=%0d",
             n_int_frames, n_ext_frames, n_skip, n_drop, n_poll_switch, n_full, n_port[0], n_port[1], n_wrap,
             n_cfg_std, n_cfg_cal, n_i2c, n_spi, n_images[0]);
    begin
      int m [13];
      m = '{n_int_frames, n_ext_frames, n_skip, n_drop, n_poll_switch, n_full, n_port[0], n_port[1],
            n_wrap, n_cfg_std, n_cfg_cal, n_i2c, n_spi};
      foreach (m[i]) begin
        checks++;
        if (m[i] == 0) begin failures++; $display("mechanism %0d never happened", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
