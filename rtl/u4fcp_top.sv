// u4fcp_top -- FPGA firmware of one detector subunit's processing board:
// readout of 2 FEEs x 12 BP40 chips, pixel-level configuration, and the
// Wishbone slow-control bus.
//
// Readout path (clk_ro, the LVDS bit clock, 360 MHz for 1 kHz frames):
//   frame_gen -> frame pulse to all chips
//   per chip:  serial_parallel -> pingpong_bram (reorder to image order,
//              chip FIFO)
//   per FEE:   recombination (12 chip FIFOs -> module raster)
//   polling    (round robin, line by line, over the two FEEs)
//   ddr_fifo   (DDR3 behind an AXI4 port used as a large FIFO) -> one of
//              two TCP output ports (10 Gb/s or 1 Gb/s, chosen by out_sel)
// Configuration path (clk, the 125 MHz reference):
//   rbcp_wb_bridge (UDP register access -> Wishbone) to
//     wb_i2c_master x N_FEE (IOB monitors, potentiometers, IO expanders
//     that also drive the chip selects for global configuration),
//     wb_spi_master x N_FEE (BP40 global parameter chain),
//     ctrl_regs (run/stop, trigger, frame period, config start/mode,
//     output port, FEE select)
//   tcp_ram -> ldac_config (per-pixel trim tables streamed from TCP one
//     chip at a time into ARRAYIN[3:0] with CS[11:0], CLK_SPI, refresh);
//     the pixel-config lines go to the FEE chosen by fee_sel.
// The network stacks, the DDR3 controller and the chips are outside this
// module; their signals are ports. run, ext_trig, out_sel and status bits
// cross between the clocks through two-flop synchronisers; frame_period
// and fee_sel are static while in use. The block structure follows the
// firmware block diagram of the subunit; the clocking split, the register
// and address maps and the stream formats are this design's choices.
//
// Constant outputs: the fixed AXI fields of the DDR port and the padding
// bits of out_beat (see ddr_fifo).
module u4fcp_top
  import heps_pkg::*;
#(
  parameter int unsigned N_FEE_P    = N_FEE,
  parameter int unsigned CHIPS      = CHIPS_PER_FEE,
  parameter int unsigned ROWS       = CHIP_ROWS,
  parameter int unsigned COLS       = CHIP_COLS,
  parameter int unsigned RO_CHAINS  = RO_REGIONS,
  parameter int unsigned RO_W       = RO_BITS,
  parameter int unsigned CFG_REG    = CFG_REGIONS,
  parameter int unsigned CFG_W      = CFG_BITS,
  parameter int unsigned CFG_CLK_DIV = 4,
  parameter int unsigned ADDR_W     = 33,
  parameter int unsigned MAX_BURST  = 16,
  parameter logic [31:0] FRAME_PERIOD_RST = 32'd360000
) (
  input  logic                        clk,        // 125 MHz reference
  input  logic                        rst_n,
  input  logic                        clk_ro,     // readout (LVDS bit) clock
  input  logic                        rst_ro_n,
  // UDP register access from the 1 Gb/s stack
  input  logic                        rbcp_act,
  input  logic [31:0]                 rbcp_addr,
  input  logic                        rbcp_we,
  input  logic [7:0]                  rbcp_wd,
  input  logic                        rbcp_re,
  output logic                        rbcp_ack,
  output logic [7:0]                  rbcp_rd,
  // I2C to the IOB, one bus per FEE
  output logic [N_FEE_P-1:0]          i2c_scl_o,
  output logic [N_FEE_P-1:0]          i2c_sda_o,
  input  logic [N_FEE_P-1:0]          i2c_scl_i,
  input  logic [N_FEE_P-1:0]          i2c_sda_i,
  // SPI global-parameter chain, one per FEE
  output logic [N_FEE_P-1:0]          gspi_sck,
  output logic [N_FEE_P-1:0]          gspi_mosi,
  input  logic [N_FEE_P-1:0]          gspi_miso,
  output logic [N_FEE_P-1:0]          wb_irq,
  // external frame trigger
  input  logic                        ext_trig,
  // pixel-configuration stream from TCP
  input  logic                        cfg_valid,
  output logic                        cfg_ready,
  input  logic [CFG_W-1:0]            cfg_data,
  // pixel-configuration lines to the chips
  output logic [N_FEE_P-1:0]          px_clk_spi,
  output logic [N_FEE_P-1:0][CHIPS-1:0] px_cs_n,
  output logic [N_FEE_P-1:0][CFG_REG-1:0] px_array_in,
  output logic [N_FEE_P-1:0]          px_refresh,
  // readout link
  output logic                        ro_frame,
  input  logic [N_FEE_P-1:0][CHIPS-1:0] ro_sdata,
  // AXI4 master to the DDR3 memory controller (clk_ro domain)
  output logic [ADDR_W-1:0]           m_awaddr,
  output logic [7:0]                  m_awlen,
  output logic [2:0]                  m_awsize,
  output logic [1:0]                  m_awburst,
  output logic                        m_awvalid,
  input  logic                        m_awready,
  output logic [31:0]                 m_wdata,
  output logic [3:0]                  m_wstrb,
  output logic                        m_wlast,
  output logic                        m_wvalid,
  input  logic                        m_wready,
  input  logic [1:0]                  m_bresp,
  input  logic                        m_bvalid,
  output logic                        m_bready,
  output logic [ADDR_W-1:0]           m_araddr,
  output logic [7:0]                  m_arlen,
  output logic [2:0]                  m_arsize,
  output logic [1:0]                  m_arburst,
  output logic                        m_arvalid,
  input  logic                        m_arready,
  input  logic [31:0]                 m_rdata,
  input  logic [1:0]                  m_rresp,
  input  logic                        m_rlast,
  input  logic                        m_rvalid,
  output logic                        m_rready,
  // image stream to the TCP stacks: port 0 = 10 Gb/s, 1 = 1 Gb/s
  output logic [1:0]                  out_valid,
  input  logic [1:0]                  out_ready,
  output pix_beat_t                   out_beat,
  // status (clk_ro domain)
  output logic [31:0]                 frame_count,
  output logic [15:0]                 frame_skips,
  output logic [N_FEE_P-1:0][CHIPS-1:0] chip_drop,   // chip dropped a frame at least once
  output logic [15:0]                 ddr_errors
);
  localparam int unsigned STEPS = ROWS * COLS / RO_CHAINS;
  localparam int unsigned N_SLV = 2 * N_FEE_P + 1;
  localparam int unsigned CPIX  = ROWS * COLS / CFG_REG;

  // ================= configuration domain =================
  wb_req_t [N_SLV-1:0] wb_req;
  wb_rsp_t [N_SLV-1:0] wb_rsp;

  rbcp_wb_bridge #(.N_SLV(N_SLV)) u_bridge (
    .clk, .rst_n, .rbcp_act, .rbcp_addr, .rbcp_we, .rbcp_wd, .rbcp_re,
    .rbcp_ack, .rbcp_rd, .wb_req, .wb_rsp);

  logic [N_FEE_P-1:0] i2c_irq, spi_irq;
  for (genvar f = 0; f < N_FEE_P; f++) begin : g_slow
    wb_i2c_master u_i2c (
      .clk, .rst_n, .wb_req(wb_req[f]), .wb_rsp(wb_rsp[f]), .irq(i2c_irq[f]),
      .scl_o(i2c_scl_o[f]), .sda_o(i2c_sda_o[f]), .scl_i(i2c_scl_i[f]), .sda_i(i2c_sda_i[f]));
    wb_spi_master u_spi (
      .clk, .rst_n, .wb_req(wb_req[N_FEE_P + f]), .wb_rsp(wb_rsp[N_FEE_P + f]), .irq(spi_irq[f]),
      .sck(gspi_sck[f]), .mosi(gspi_mosi[f]), .miso(gspi_miso[f]));
  end
  assign wb_irq = i2c_irq | spi_irq;

  logic        run, ext_mode, cal_mode, cfg_start, out_sel, fee_sel;
  logic [31:0] frame_period;
  logic        cfg_busy, cfg_done;
  logic [1:0]  ro_busy_s, ddr_full_s;
  logic        ro_busy, ddr_full;

  ctrl_regs #(.FRAME_PERIOD_RST(FRAME_PERIOD_RST)) u_regs (
    .clk, .rst_n, .wb_req(wb_req[2*N_FEE_P]), .wb_rsp(wb_rsp[2*N_FEE_P]),
    .run, .ext_trig(ext_mode), .cal_mode, .cfg_start, .out_sel, .fee_sel, .frame_period,
    .ro_busy(ro_busy_s[1]), .cfg_busy, .cfg_done, .ddr_full(ddr_full_s[1]));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ro_busy_s <= '0; ddr_full_s <= '0;
    end else begin
      ro_busy_s  <= {ro_busy_s[0], ro_busy};
      ddr_full_s <= {ddr_full_s[0], ddr_full};
    end
  end

  // pixel-level configuration
  logic                         pr_avail, pr_release;
  logic [$clog2(CPIX)-1:0]      pr_addr;
  logic [CFG_REG-1:0][CFG_W-1:0] pr_data;
  logic                         l_clk_spi, l_refresh;
  logic [CHIPS-1:0]             l_cs_n;
  logic [CFG_REG-1:0]           l_array_in;

  tcp_ram #(.ROWS(ROWS), .COLS(COLS), .REGIONS(CFG_REG), .W(CFG_W)) u_tcp_ram (
    .clk, .rst_n, .in_valid(cfg_valid), .in_ready(cfg_ready), .in_data(cfg_data),
    .rd_avail(pr_avail), .rd_addr(pr_addr), .rd_data(pr_data), .rd_release(pr_release));

  ldac_config #(.N_CHIPS(CHIPS), .PIX_PER_REGION(CPIX), .REGIONS(CFG_REG), .W(CFG_W),
                .CLK_DIV(CFG_CLK_DIV)) u_ldac (
    .clk, .rst_n, .start(cfg_start), .cal_mode,
    .rd_avail(pr_avail), .rd_addr(pr_addr), .rd_data(pr_data), .rd_release(pr_release),
    .clk_spi(l_clk_spi), .cs_n(l_cs_n), .array_in(l_array_in), .refresh(l_refresh),
    .busy(cfg_busy), .done(cfg_done));

  always_comb begin
    for (int f = 0; f < N_FEE_P; f++) begin
      px_clk_spi[f]  = 1'b0;
      px_cs_n[f]     = '1;
      px_array_in[f] = '0;
      px_refresh[f]  = 1'b0;
    end
    px_clk_spi[fee_sel]  = l_clk_spi;
    px_cs_n[fee_sel]     = l_cs_n;
    px_array_in[fee_sel] = l_array_in;
    px_refresh[fee_sel]  = l_refresh;
  end

  // ================= readout domain =================
  logic [N_FEE_P-1:0][CHIPS-1:0] sp_busy;
  logic [1:0] out_sel_s;

  always_ff @(posedge clk_ro) begin
    if (!rst_ro_n) out_sel_s <= '0;
    else           out_sel_s <= {out_sel_s[0], out_sel};
  end

  frame_gen u_frame (
    .clk(clk_ro), .rst_n(rst_ro_n), .run, .ext_mode, .ext_trig_in(ext_trig),
    .period(frame_period), .ro_busy, .frame(ro_frame), .frame_count, .skip_count(frame_skips));

  assign ro_busy = |sp_busy;

  logic      [N_FEE_P-1:0] rc_valid, rc_ready;
  pix_beat_t [N_FEE_P-1:0] rc_beat;

  for (genvar f = 0; f < N_FEE_P; f++) begin : g_fee
    logic [CHIPS-1:0][RO_W-1:0] cf_data;
    logic [CHIPS-1:0]           cf_empty, cf_rd;

    for (genvar c = 0; c < CHIPS; c++) begin : g_chip
      logic                              v, last;
      logic [$clog2(STEPS)-1:0]          step;
      logic [RO_CHAINS-1:0][RO_W-1:0]    words;
      logic [15:0]                       drops;

      serial_parallel #(.CHAINS(RO_CHAINS), .BITS(RO_W), .STEPS(STEPS)) u_sp (
        .clk(clk_ro), .rst_n(rst_ro_n), .frame(ro_frame), .sdata(ro_sdata[f][c]),
        .out_valid(v), .out_step(step), .out_words(words), .out_last(last), .busy(sp_busy[f][c]));

      pingpong_bram #(.ROWS(ROWS), .COLS(COLS), .CHAINS(RO_CHAINS), .W(RO_W)) u_pp (
        .clk(clk_ro), .rst_n(rst_ro_n), .in_valid(v), .in_step(step), .in_words(words),
        .in_last(last), .out_rd(cf_rd[c]), .out_data(cf_data[c]), .out_empty(cf_empty[c]),
        .drop_count(drops));

      assign chip_drop[f][c] = (drops != '0);
    end

    recombination #(.TILE_X(CHIPS / CHIPS_Y), .TILE_Y(CHIPS_Y), .ROWS(ROWS), .COLS(COLS), .W(RO_W)) u_rc (
      .clk(clk_ro), .rst_n(rst_ro_n), .fifo_data(cf_data), .fifo_empty(cf_empty), .fifo_rd(cf_rd),
      .out_valid(rc_valid[f]), .out_ready(rc_ready[f]), .out_beat(rc_beat[f]));
  end

  logic      pl_valid, pl_ready;
  pix_beat_t pl_beat;

  polling #(.N_IN(N_FEE_P)) u_poll (
    .clk(clk_ro), .rst_n(rst_ro_n), .in_valid(rc_valid), .in_ready(rc_ready), .in_beat(rc_beat),
    .out_valid(pl_valid), .out_ready(pl_ready), .out_beat(pl_beat));

  logic [ADDR_W-2:0] ddr_used;

  ddr_fifo #(.ADDR_W(ADDR_W), .DATA_W(32), .MAX_BURST(MAX_BURST)) u_ddr (
    .clk(clk_ro), .rst_n(rst_ro_n), .in_valid(pl_valid), .in_ready(pl_ready), .in_beat(pl_beat),
    .awaddr(m_awaddr), .awlen(m_awlen), .awsize(m_awsize), .awburst(m_awburst),
    .awvalid(m_awvalid), .awready(m_awready), .wdata(m_wdata), .wstrb(m_wstrb), .wlast(m_wlast),
    .wvalid(m_wvalid), .wready(m_wready), .bresp(m_bresp), .bvalid(m_bvalid), .bready(m_bready),
    .araddr(m_araddr), .arlen(m_arlen), .arsize(m_arsize), .arburst(m_arburst),
    .arvalid(m_arvalid), .arready(m_arready), .rdata(m_rdata), .rresp(m_rresp), .rlast(m_rlast),
    .rvalid(m_rvalid), .rready(m_rready),
    .out_sel(out_sel_s[1]), .out_valid, .out_ready, .out_beat,
    .used_words(ddr_used), .ddr_full, .resp_errors(ddr_errors));

  logic unused;
  assign unused = ^ddr_used;
endmodule
