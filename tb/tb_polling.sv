// tb_polling -- two sources send lines (eol on the last beat) with random
// gaps; the sink stalls at random. Checks: every beat arrives in order
// per source, tagged with its source number; lines are never interleaved;
// while both sources have data the grant alternates line by line.
module tb_polling;
  import heps_pkg::*;
  localparam int LINE = 5, NLINES = 40;
  logic clk = 0, rst_n = 0;
  logic [1:0] in_valid, in_ready;
  pix_beat_t [1:0] in_beat;
  logic out_valid, out_ready;
  pix_beat_t out_beat;
  int checks = 0, failures = 0;

  polling #(.N_IN(2)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int sent[2] = '{0, 0};
  logic gap[2];
  always_comb
    for (int s = 0; s < 2; s++) begin
      in_valid[s]     = rst_n && sent[s] < LINE * NLINES && !gap[s];
      in_beat[s]      = '0;
      in_beat[s].data = 32'(s * 100000 + sent[s]);
      in_beat[s].eol  = (sent[s] % LINE == LINE - 1);
      in_beat[s].sof  = (sent[s] == 0);
    end
  always @(posedge clk) begin
    for (int s = 0; s < 2; s++) begin
      if (in_valid[s] && in_ready[s]) sent[s] <= sent[s] + 1;
      gap[s] <= (s == 1) ? ($urandom % 8 == 0) : ($urandom % 5 == 0);
    end
    out_ready <= ($urandom % 3 != 0);
  end

  int got[2] = '{0, 0};
  int cur = -1, lines = 0, alternations = 0, last_line_src = -1;
  always @(posedge clk) if (out_valid && out_ready) begin
    int s;
    s = int'(out_beat.fee);
    checks++;
    if (out_beat.data != 32'(s * 100000 + got[s])) begin
      failures++; $display("src %0d beat %h exp %0d", s, out_beat.data, got[s]);
    end
    checks++;
    if (cur != -1 && cur != s) begin failures++; $display("line interleaved"); end
    got[s] <= got[s] + 1;
    if (out_beat.eol) begin
      cur <= -1; lines <= lines + 1;
      if (last_line_src != -1 && last_line_src != s) alternations <= alternations + 1;
      last_line_src <= s;
    end else cur <= s;
  end

  initial begin
    out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (5000) @(posedge clk);
    checks++;
    if (got[0] != LINE * NLINES || got[1] != LINE * NLINES) begin
      failures++; $display("got %0d %0d", got[0], got[1]);
    end
    checks++;
    if (alternations < NLINES) begin failures++; $display("alternations %0d", alternations); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
