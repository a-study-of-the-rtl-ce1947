// tb_frame_gen -- internal mode: frame pulses must come exactly PERIOD
// clocks apart, each FRAME_PULSE_W clocks wide, and be counted; a busy
// readout turns due frames into skips. External mode: one pulse per
// rising trigger edge, two synchroniser clocks plus one after the edge.
// Stopping the run stops the pulses.
module tb_frame_gen;
  localparam int PW = 4;
  logic clk = 0, rst_n = 0;
  logic run = 0, ext_mode = 0, ext_trig_in = 0, ro_busy = 0;
  logic [31:0] period = 50;
  logic frame;
  logic [31:0] frame_count;
  logic [15:0] skip_count;
  int checks = 0, failures = 0;

  frame_gen #(.FRAME_PULSE_W(PW)) dut (.*);
  always #4 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int cyc = 0, last_rise = -1, width = 0, rises = 0;
  int gaps [$];
  int widths [$];
  logic frame_d = 0;
  always @(posedge clk) begin
    cyc++;
    frame_d <= rst_n && frame;
    if (!rst_n) ;
    else if (frame) width++;
    if (rst_n && frame && !frame_d) begin
      rises++;
      if (last_rise >= 0) gaps.push_back(cyc - last_rise);
      last_rise = cyc;
    end
    if (rst_n && !frame && frame_d) begin widths.push_back(width); width = 0; end
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d exp %0d", what, got, exp); end
  endtask

  initial begin
    int fc, sc, t;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // internal mode
    run <= 1;
    repeat (50 * 10 - 10) @(posedge clk);  // first pulse 3 clocks after run
    check("rises", rises, 10);
    foreach (gaps[i]) check("gap", gaps[i], 50);
    foreach (widths[i]) check("width", widths[i], PW);
    check("frame_count", int'(frame_count), rises);
    check("skips", int'(skip_count), 0);
    // busy readout: frames due while busy are skipped
    fc = int'(frame_count);
    ro_busy <= 1;
    repeat (50 * 4) @(posedge clk);
    ro_busy <= 0;
    check("no frames while busy", int'(frame_count), fc);
    check("skips while busy", int'(skip_count), 4);
    // change period
    period <= 37;
    repeat (120) @(posedge clk);
    gaps.delete();
    repeat (37 * 5 + 2) @(posedge clk);
    foreach (gaps[i]) check("gap 37", gaps[i], 37);
    check("gaps counted", gaps.size(), 5);
    // stop
    run <= 0;
    repeat (5) @(posedge clk);
    fc = int'(frame_count);
    repeat (200) @(posedge clk);
    check("stopped", int'(frame_count), fc);
    // external trigger mode
    ext_mode <= 1; run <= 1;
    repeat (10) @(posedge clk);
    fc = int'(frame_count);
    for (int n = 0; n < 8; n++) begin
      int wait_c;
      repeat ($urandom_range(10, 30)) @(posedge clk);
      ext_trig_in <= 1; t = cyc;
      @(posedge clk);
      while (!frame) @(posedge clk);
      check("trigger latency", cyc - t, 4);
      repeat ($urandom_range(2, 8)) @(posedge clk);
      ext_trig_in <= 0;
    end
    check("ext frames", int'(frame_count) - fc, 8);
    // a second trigger during the pulse is a skip
    repeat (10) @(posedge clk);
    sc = int'(skip_count);
    ext_trig_in <= 1; @(posedge clk); ext_trig_in <= 0; @(posedge clk);
    ext_trig_in <= 1; @(posedge clk); ext_trig_in <= 0;
    repeat (10) @(posedge clk);
    check("retrigger skipped", int'(skip_count) - sc, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
