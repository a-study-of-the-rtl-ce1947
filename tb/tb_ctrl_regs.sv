// tb_ctrl_regs -- checks reset values, random writes and read-back of the
// control byte and the frame period, the one-clock start pulse, the
// status bits and the sticky configuration-done flag (set by cfg_done,
// cleared by a new start).
module tb_ctrl_regs;
  import heps_pkg::*;
  logic clk = 0, rst_n = 0;
  wb_req_t wb_req;
  wb_rsp_t wb_rsp;
  logic run, ext_trig, cal_mode, cfg_start, out_sel, fee_sel;
  logic [31:0] frame_period;
  logic ro_busy = 0, cfg_busy = 0, cfg_done = 0, ddr_full = 0;
  int checks = 0, failures = 0;

  ctrl_regs dut (.*);
  always #4 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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
  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("%s: got %h exp %h", what, got, exp); end
  endtask

  int starts = 0;
  logic start_d = 0;
  always @(posedge clk) begin
    start_d <= cfg_start;
    if (rst_n && cfg_start) starts++;
    if (rst_n && cfg_start && start_d) begin failures++; $display("start pulse longer than one clock"); end
  end

  initial begin
    logic [7:0] d;
    wb_req = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    check("period reset", frame_period, 32'd360000);
    wb_rd(0, d); check("ctrl reset", d, 0);
    for (int n = 0; n < 50; n++) begin
      logic [31:0] p; logic [7:0] c;
      p = $urandom; c = 8'($urandom) & 8'h37;      // no start bit
      for (int i = 0; i < 4; i++) wb_wr(8'(1 + i), p[8*i +: 8]);
      wb_wr(0, c);
      check("period", frame_period, p);
      for (int i = 0; i < 4; i++) begin wb_rd(8'(1 + i), d); check("period byte", d, p[8*i +: 8]); end
      wb_rd(0, d); check("ctrl", d, c);
      check("outputs", {fee_sel, out_sel, cal_mode, ext_trig, run}, {c[5], c[4], c[2], c[1], c[0]});
    end
    check("no start yet", starts, 0);
    // status and sticky done
    ro_busy = 1; cfg_busy = 0; ddr_full = 1;
    wb_rd(5, d); check("status", d, 8'b1001);
    @(posedge clk); cfg_done <= 1; @(posedge clk); cfg_done <= 0;
    ro_busy = 0; ddr_full = 0; cfg_busy = 1;
    wb_rd(5, d); check("status done", d, 8'b0110);
    wb_wr(0, 8'h08);                               // start
    wb_rd(5, d); check("done cleared by start", d, 8'b0010);
    check("one start", starts, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
