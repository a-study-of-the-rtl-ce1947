// tb_rbcp_wb_bridge -- five Wishbone slave models with random acknowledge
// delays (slave 3 never acknowledges) sit behind the bridge. Random RBCP
// reads and writes must reach exactly the addressed slave with the right
// register address and data, and reads must return the slave's byte.
// Accesses to slave 3 must end after TIMEOUT clocks with data 0, and
// accesses to an unused slave number at once with data 0.
module tb_rbcp_wb_bridge;
  import heps_pkg::*;
  localparam int N = 5, TMO = 20;
  logic clk = 0, rst_n = 0;
  logic rbcp_act = 0, rbcp_we = 0, rbcp_re = 0, rbcp_ack;
  logic [31:0] rbcp_addr = 0;
  logic [7:0]  rbcp_wd = 0, rbcp_rd;
  wb_req_t [N-1:0] wb_req;
  wb_rsp_t [N-1:0] wb_rsp;
  int checks = 0, failures = 0;

  rbcp_wb_bridge #(.N_SLV(N), .TIMEOUT(TMO)) dut (.*);
  always #4 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // slave models: a register file each, ack after a random delay
  logic [7:0] regs [N][256];
  int dly [N];
  int writes [N];
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      wb_rsp[i].ack <= 1'b0;
      if (rst_n && wb_req[i].cyc && wb_req[i].stb && !wb_rsp[i].ack && i != 3) begin
        if (dly[i] == 0) begin
          wb_rsp[i].ack <= 1'b1;
          wb_rsp[i].dat <= regs[i][wb_req[i].adr];
          if (wb_req[i].we) begin regs[i][wb_req[i].adr] <= wb_req[i].dat; writes[i]++; end
          dly[i] <= $urandom_range(0, 4);
        end else dly[i] <= dly[i] - 1;
      end
    end
  end
  // no slave but the addressed one may see a cycle
  int stray = 0;
  logic [3:0] cur_sel = 0;
  always @(posedge clk)
    for (int i = 0; i < N; i++) if (wb_req[i].cyc && i != int'(cur_sel)) stray++;

  task automatic access(logic we, logic [3:0] sel, logic [7:0] a, logic [7:0] wd,
                        output logic [7:0] rd, output int lat);
    cur_sel = sel;
    @(posedge clk);
    rbcp_act <= 1; rbcp_we <= we; rbcp_re <= !we;
    rbcp_addr <= {16'h0, sel, 4'h0, a}; rbcp_wd <= wd;
    @(posedge clk);
    rbcp_act <= 0; rbcp_we <= 0; rbcp_re <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; end while (!rbcp_ack);
    rd = rbcp_rd;
  endtask

  initial begin
    logic [7:0] shadow [N][256];
    logic [7:0] rd;
    int lat;
    for (int i = 0; i < N; i++) begin
      dly[i] = 0; writes[i] = 0; wb_rsp[i] = '0;
      for (int a = 0; a < 256; a++) begin regs[i][a] = 8'($urandom); shadow[i][a] = regs[i][a]; end
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 400; n++) begin
      logic [3:0] sel; logic [7:0] a, d; logic we;
      sel = 4'($urandom_range(0, N - 1)); if (sel == 3) sel = 4'd4;
      a = 8'($urandom); d = 8'($urandom); we = 1'($urandom);
      access(we, sel, a, d, rd, lat);
      if (we) shadow[sel][a] = d;
      else begin
        checks++;
        if (rd != shadow[sel][a]) begin failures++; $display("read slave %0d reg %h: %h exp %h", sel, a, rd, shadow[sel][a]); end
      end
      checks++;
      if (lat > 8) begin failures++; $display("latency %0d", lat); end
    end
    for (int i = 0; i < N; i++) for (int a = 0; a < 256; a++) begin
      checks++;
      if (regs[i][a] != shadow[i][a]) begin failures++; $display("slave %0d reg %h: %h exp %h", i, a, regs[i][a], shadow[i][a]); end
    end
    // silent slave: timeout
    access(0, 4'd3, 8'h10, 8'h00, rd, lat);
    checks++;
    if (rd != 0 || lat < TMO || lat > TMO + 3) begin failures++; $display("timeout: rd %h lat %0d", rd, lat); end
    // unused slave number
    access(0, 4'd9, 8'h10, 8'h00, rd, lat);
    checks++;
    if (rd != 0 || lat > 3) begin failures++; $display("unmapped: rd %h lat %0d", rd, lat); end
    checks++;
    if (stray != 0) begin failures++; $display("%0d stray cycles", stray); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
