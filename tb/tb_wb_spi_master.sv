// tb_wb_spi_master -- drives the SPI core through its Wishbone registers
// against a behavioural shift-register slave. For each of the four
// CPOL/CPHA modes and several clock dividers it queues four random bytes
// (ICNT = 3), enables the core and waits for the interrupt; the slave
// must have received the bytes MSB first and the read buffer must return
// the slave's bytes. Also checks the SCK half period (2^sel clocks), the
// write-collision flag on a full write buffer and the flag clears.
module tb_wb_spi_master;
  import heps_pkg::*;
  logic clk = 0, rst_n = 0;
  wb_req_t wb_req;
  wb_rsp_t wb_rsp;
  logic irq, sck, mosi, miso;
  int checks = 0, failures = 0;

  wb_spi_master dut (.*);
  always #4 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wb_wr(logic [7:0] a, logic [7:0] d);
    @(posedge clk);
    wb_req <= '{cyc: 1'b1, stb: 1'b1, we: 1'b1, adr: a, dat: d};
    do @(posedge clk); while (!wb_rsp.ack);
    wb_req <= '0;
  endtask
  task automatic wb_rd(logic [7:0] a, output logic [7:0] d);
    @(posedge clk);
    wb_req <= '{cyc: 1'b1, stb: 1'b1, we: 1'b0, adr: a, dat: 8'h00};
    do @(posedge clk); while (!wb_rsp.ack);
    d = wb_rsp.dat;
    wb_req <= '0;
  endtask
  task automatic check(string what, logic [7:0] got, logic [7:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  // slave: samples MOSI and shifts MISO on the edges the mode defines
  logic cpol = 0, cpha = 0;
  logic [7:0] s_tx [4], s_rx [4];
  int   nbit = 0;
  logic sck_d = 0;
  assign miso = (nbit < 32) ? s_tx[nbit / 8][7 - nbit % 8] : 1'b0;
  int last_edge = -1, cyc = 0, min_half = 1 << 30, max_half = 0;
  always @(posedge clk) begin
    cyc++;
    sck_d <= sck;
    if (sck != sck_d) begin
      // sample edge: leading (sck leaves the idle level) for CPHA=0
      if (((sck ^ cpol) == 1'b1) == (cpha == 1'b0)) begin
        if (nbit < 32) s_rx[nbit / 8][7 - nbit % 8] <= mosi;
        nbit <= nbit + 1;
      end
      if (last_edge >= 0 && cyc - last_edge < 100) begin
        if (cyc - last_edge < min_half) min_half = cyc - last_edge;
        if (cyc - last_edge > max_half) max_half = cyc - last_edge;
      end
      last_edge = cyc;
    end
  end

  task automatic xfer(int mode, int sel);
    logic [7:0] m_tx [4], d;
    cpol = mode[1]; cpha = mode[0];
    for (int i = 0; i < 4; i++) begin m_tx[i] = 8'($urandom); s_tx[i] = 8'($urandom); end
    wb_wr(0, {4'b0001, cpol, cpha, 2'(sel)});        // SPE = 0
    wb_wr(3, {2'd3, 4'b0, 2'(sel >> 2)});             // ICNT = 3
    @(posedge clk); nbit = 0;
    min_half = 1 << 30; max_half = 0; last_edge = -1;
    for (int i = 0; i < 4; i++) wb_wr(2, m_tx[i]);
    wb_rd(1, d); check("write buffer full", d & 8'h08, 8'h08);
    wb_wr(2, 8'hEE);                                  // collides
    wb_rd(1, d); check("wcol", d & 8'h40, 8'h40);
    wb_wr(1, 8'h40);
    wb_rd(1, d); check("wcol cleared", d & 8'h40, 8'h00);
    wb_wr(0, {4'b1101, cpol, cpha, 2'(sel)});        // SPIE, SPE
    @(posedge clk);
    while (!irq) @(posedge clk);
    wb_rd(1, d); check("spif", d & 8'h80, 8'h80);
    checks++;
    if (nbit != 32) begin failures++; $display("mode %0d: %0d bits", mode, nbit); end
    for (int i = 0; i < 4; i++) begin
      check($sformatf("mode %0d sel %0d slave rx %0d", mode, sel, i), s_rx[i], m_tx[i]);
      wb_rd(2, d);
      check($sformatf("mode %0d sel %0d master rx %0d", mode, sel, i), d, s_tx[i]);
    end
    wb_rd(1, d); check("read buffer empty", d & 8'h01, 8'h01);
    checks++;
    if (min_half != (1 << sel) || max_half > (1 << sel) + 1) begin  // +1: idle clock between bytes
      failures++; $display("half period %0d..%0d, expected %0d", min_half, max_half, 1 << sel);
    end
    wb_wr(1, 8'h80);
    @(posedge clk);
    check("irq cleared", {7'b0, irq}, 8'h00);
    // idle level of SCK follows CPOL
    check("sck idle", {7'b0, sck}, {7'b0, cpol});
  endtask

  initial begin
    logic [7:0] d;
    wb_req = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wb_rd(0, d); check("spcr reset", d, 8'h10);
    wb_rd(1, d); check("spsr reset", d, 8'h05);
    for (int mode = 0; mode < 4; mode++)
      for (int sel = 0; sel < 5; sel += 2) xfer(mode, sel);
    xfer(int'($urandom_range(0, 3)), 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
