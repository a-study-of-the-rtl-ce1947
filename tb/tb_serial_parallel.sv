// tb_serial_parallel -- a BP40 model sends two frames; every rebuilt
// 28-bit word of every chain and step is compared with the value the
// model put on that pixel, and the spacing of the words (one step per
// 12 x 28 = 336 bit clocks) and the latency after the frame pulse are
// checked.
module tb_serial_parallel;
  import tb_heps_pkg::*;
  localparam int ROWS = 2, COLS = 24, CHAINS = 12, BITS = 28, SD = 2;
  localparam int STEPS = ROWS * COLS / CHAINS;
  logic clk = 0, rst_n = 0, frame = 0, sdata;
  logic out_valid, out_last, busy;
  logic [$clog2(STEPS)-1:0] out_step;
  logic [CHAINS-1:0][BITS-1:0] out_words;
  int checks = 0, failures = 0;

  serial_parallel #(.CHAINS(CHAINS), .BITS(BITS), .STEPS(STEPS), .START_DELAY(SD)) dut (.*);
  bp40_model #(.CHIP(5), .ROWS(ROWS), .COLS(COLS), .CHAINS(CHAINS), .BITS(BITS), .START_DELAY(SD))
    chip (.clk, .frame, .sdata);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0, fall_cyc = 0, last_v = 0, nsteps = 0, fnum = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (out_valid) begin
      for (int c = 0; c < CHAINS; c++) begin
        logic [27:0] e;
        e = pix_val(fnum, 5, ro_row(int'(out_step), ROWS), ro_col(c, int'(out_step), ROWS, COLS, CHAINS));
        checks++;
        if (out_words[c] != e) begin
          failures++; $display("frame %0d step %0d chain %0d: %h exp %h", fnum, out_step, c, out_words[c], e);
        end
      end
      checks++;
      if (int'(out_step) != nsteps) begin failures++; $display("step number %0d exp %0d", out_step, nsteps); end
      checks++;
      if (nsteps == 0) begin
        // frame driven low at fall_cyc; first bit sampled 2+SD clocks later,
        // word valid one clock after the 336th bit
        if (cyc - fall_cyc != 2 + SD + CHAINS * BITS) begin
          failures++; $display("latency %0d", cyc - fall_cyc);
        end
      end else if (cyc - last_v != CHAINS * BITS) begin
        failures++; $display("step spacing %0d", cyc - last_v);
      end
      last_v <= cyc;
      checks++;
      if (out_last != (nsteps == STEPS - 1)) begin failures++; $display("out_last"); end
      if (nsteps == STEPS - 1) begin nsteps <= 0; fnum <= fnum + 1; end
      else nsteps <= nsteps + 1;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 2; f++) begin
      repeat (5) @(posedge clk);
      frame <= 1;
      repeat (4) @(posedge clk);
      frame <= 0; fall_cyc = cyc;
      @(posedge clk);
      while (busy) @(posedge clk);
    end
    repeat (10) @(posedge clk);
    checks++;
    if (fnum != 2) begin failures++; $display("frames seen %0d", fnum); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
