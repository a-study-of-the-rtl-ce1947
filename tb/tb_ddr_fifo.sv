// tb_ddr_fifo -- a stream of beats with random flags goes through the DDR
// FIFO into a behavioural AXI4 memory with random stalls. The memory is
// shrunk to 4 KB (ADDR_W = 12) so the write pointer wraps several times
// and the FIFO runs full while the sink is held off. Checks: every beat
// comes out once, in order, with its flags, on the port chosen by
// out_sel; no burst crosses 4 KB; the full flag was seen.
module tb_ddr_fifo;
  import heps_pkg::*;
  localparam int ADDR_W = 12, N = 6000;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready;
  pix_beat_t in_beat;
  logic [ADDR_W-1:0] awaddr, araddr;
  logic [7:0] awlen, arlen;
  logic [2:0] awsize, arsize;
  logic [1:0] awburst, arburst, bresp, rresp;
  logic awvalid, awready, wlast, wvalid, wready, bvalid, bready;
  logic arvalid, arready, rlast, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0] wstrb;
  logic out_sel;
  logic [1:0] out_valid, out_ready;
  pix_beat_t out_beat;
  logic [ADDR_W-2:0] used_words;
  logic ddr_full;
  logic [15:0] resp_errors;
  int checks = 0, failures = 0;

  ddr_fifo #(.ADDR_W(ADDR_W), .MAX_BURST(16)) dut (.*);
  axi_mem_model #(.ADDR_W(ADDR_W)) mem (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic pix_beat_t beat_of(int i);
    pix_beat_t b;
    b = '0;
    b.data = 32'((i * 2654435761) & 32'h0FFFFFFF);
    b.sof = (i % 97 == 0);
    b.eol = (i % 13 == 12);
    b.fee = i[3];
    return b;
  endfunction

  int sent = 0, got = 0, fulls = 0, wrong_port = 0;
  bit hold_sink = 0;
  logic gap;
  assign in_valid = rst_n && (sent < N) && !gap;
  assign in_beat  = beat_of(sent);
  always @(posedge clk) begin
    gap <= ($urandom % 4 == 0);
    if (in_valid && in_ready) sent <= sent + 1;
    out_ready <= hold_sink ? 2'b00 : 2'($urandom);
    if (ddr_full) fulls++;
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (out_valid[!out_sel]) begin wrong_port++; failures++; $display("valid on unselected port"); end
    if (out_valid[out_sel] && out_ready[out_sel]) begin
      pix_beat_t e;
      e = beat_of(got);
      checks++;
      if (out_beat != e) begin failures++; $display("beat %0d: %p exp %p", got, out_beat, e); end
      got <= got + 1;
    end
  end

  initial begin
    out_sel = 0; gap = 1;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2000) @(posedge clk);
    // hold the sink: the 1024-word DDR fills up
    hold_sink = 1;
    repeat (6000) @(posedge clk);
    hold_sink = 0;
    repeat (3000) @(posedge clk);
    out_sel = 1;                     // switch to the 1 Gb/s port
    while (got < N) @(posedge clk);
    repeat (50) @(posedge clk);
    checks++;
    if (got != N) begin failures++; $display("got %0d of %0d", got, N); end
    checks++;
    if (fulls == 0) begin failures++; $display("DDR never full"); end
    checks++;
    if (mem.errors != 0) begin failures++; $display("AXI protocol errors %0d", mem.errors); end
    checks++;
    if (mem.wbursts * 16 < 4 * 1024 / 4 * 3) begin failures++; $display("too few bursts %0d, no wrap", mem.wbursts); end
    $display("bursts w=%0d r=%0d fulls=%0d", mem.wbursts, mem.rbursts, fulls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
