// tb_sync_fifo -- random push/pop against a queue reference; checks data
// order, first-word-fall-through, full/empty flags and the fill count.
module tb_sync_fifo;
  localparam int W = 16, DEPTH = 8;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, rd_en = 0;
  logic [W-1:0] wr_data = 0, rd_data;
  logic full, empty;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];
  int fulls = 0;

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      // check flags and head against the reference
      checks++;
      if (count != ($bits(count))'(q.size()) || empty != (q.size() == 0) || full != (q.size() == DEPTH)) begin
        failures++; $display("flags: count=%0d ref=%0d", count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (rd_data != q[0]) begin failures++; $display("data %h exp %h", rd_data, q[0]); end
      end
      if (full) fulls++;
      wr_en   = !full && ($urandom % 100 < (i < 2500 ? 70 : 30));
      rd_en   = !empty && ($urandom % 100 < (i < 2500 ? 40 : 70));
      wr_data = W'($urandom);
      @(posedge clk);
      #1;
      if (rd_en) void'(q.pop_front());
      if (wr_en) q.push_back(wr_data);
      wr_en = 0; rd_en = 0;
    end
    checks++;
    if (fulls == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
