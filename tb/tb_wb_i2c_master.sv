// tb_wb_i2c_master -- drives the I2C core through its Wishbone registers
// against a behavioural EEPROM-like slave on an open-drain bus. Covers:
// addressed write of a pointer and data bytes, repeated START and read
// back with ACK/NACK, a wrong address that must return RXACK=1, the BUSY
// flag between START and STOP, the interrupt flag and its clear, and the
// SCL period, which must be 4*(PRER+1) clocks plus the two-clock
// hand-over between bits.
module tb_wb_i2c_master;
  import heps_pkg::*;
  logic clk = 0, rst_n = 0;
  wb_req_t wb_req;
  wb_rsp_t wb_rsp;
  logic irq, scl_o, sda_o, slv_sda;
  wire  scl = scl_o;
  wire  sda = sda_o & slv_sda;
  int checks = 0, failures = 0;

  wb_i2c_master dut (.clk, .rst_n, .wb_req, .wb_rsp, .irq, .scl_o, .sda_o, .scl_i(scl), .sda_i(sda));
  i2c_slave_model #(.ADDR(7'h50)) slv (.clk, .scl, .sda, .sda_o(slv_sda));
  always #4 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
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
  // issue a command and wait for the interrupt flag, then clear it
  task automatic cmd(logic [7:0] c, output logic [7:0] sr);
    wb_wr(4, c);
    @(posedge clk);
    while (!irq) @(posedge clk);
    wb_rd(4, sr);
    wb_wr(4, 8'h01);   // IACK
  endtask
  task automatic send(logic [7:0] b, logic [7:0] c, logic exp_nack);
    logic [7:0] sr;
    wb_wr(3, b);
    cmd(c, sr);
    check("rxack", {7'b0, sr[7]}, {7'b0, exp_nack});
  endtask
  task automatic recv(logic [7:0] c, logic [7:0] exp);
    logic [7:0] sr, d;
    cmd(c, sr);
    wb_rd(3, d);
    check("rxr", d, exp);
  endtask

  // SCL period measurement
  int last_rise = -1, min_per = 1 << 30, max_per = 0;
  int cyc = 0;
  logic scl_d = 1;
  always @(posedge clk) begin
    cyc++;
    scl_d <= scl;
    if (dut.ys != dut.Y_BITS) last_rise = -1;   // only bits within one byte
    else if (scl && !scl_d) begin
      if (last_rise >= 0) begin
        if (cyc - last_rise < min_per) min_per = cyc - last_rise;
        if (cyc - last_rise > max_per) max_per = cyc - last_rise;
      end
      last_rise = cyc;
    end
  end

  initial begin
    logic [7:0] d, sr;
    wb_req = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wb_rd(0, d); check("prer lo reset", d, 8'hFF);
    wb_rd(1, d); check("prer hi reset", d, 8'hFF);
    wb_wr(0, 8'd4); wb_wr(1, 8'd0);
    wb_rd(0, d); check("prer lo", d, 8'd4);
    wb_wr(2, 8'h80);
    wb_rd(2, d); check("ctr", d, 8'h80);

    // write 0x5A, 0xC3 at pointer 0x10
    send(8'hA0, 8'h90, 0);                 // STA|WR, address+W
    wb_rd(4, sr); check("busy after start", sr & 8'h40, 8'h40);
    send(8'h10, 8'h10, 0);                 // pointer
    send(8'h5A, 8'h10, 0);
    send(8'hC3, 8'h50, 0);                 // WR|STO
    wb_rd(4, sr); check("busy after stop", sr & 8'h40, 8'h00);
    check("slave mem 10", slv.mem[8'h10], 8'h5A);
    check("slave mem 11", slv.mem[8'h11], 8'hC3);
    check("slave writes", 8'(slv.writes), 8'd2);

    // SCL period with PRER = 4
    checks++;
    if (max_per == 0 || min_per < 4 * 5 || max_per > 4 * 5 + 3) begin
      failures++; $display("SCL period %0d..%0d, expected %0d..%0d", min_per, max_per, 20, 23);
    end

    // read back: pointer, repeated start, two bytes, third at 0x12 untouched
    send(8'hA0, 8'h90, 0);
    send(8'h10, 8'h10, 0);
    send(8'hA1, 8'h90, 0);                 // repeated START, address+R
    recv(8'h20, 8'h5A);                    // RD, ACK
    recv(8'h20, 8'hC3);
    recv(8'h68, 8'(8'h12 * 7 + 3));        // RD|NACK|STO
    check("slave reads", 8'(slv.reads), 8'd3);

    // wrong address is not acknowledged
    send(8'h84, 8'h90, 1);
    cmd(8'h40, sr);                        // STO
    check("stops", 8'(slv.stops), 8'd3);
    check("starts", 8'(slv.starts), 8'd4);

    // random bytes at random prescale
    for (int n = 0; n < 6; n++) begin
      logic [7:0] p, v;
      p = 8'($urandom_range(1, 6)); v = 8'($urandom);
      min_per = 1 << 30; max_per = 0; last_rise = -1;
      wb_wr(0, p);
      send(8'hA0, 8'h90, 0);
      send(8'(8'h40 + n), 8'h10, 0);
      send(v, 8'h50, 0);
      send(8'hA0, 8'h90, 0);
      send(8'(8'h40 + n), 8'h10, 0);
      send(8'hA1, 8'h90, 0);
      recv(8'h68, v);
      checks++;
      if (max_per == 0 || min_per < 4 * (p + 1) || max_per > 4 * (p + 1) + 3) begin
        failures++; $display("SCL period %0d..%0d at PRER=%0d", min_per, max_per, p);
      end
    end
    // the interrupt flag stays low once acknowledged
    check("irq cleared", {7'b0, irq}, 8'h00);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
