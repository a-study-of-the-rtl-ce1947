// frame_gen -- produces the frame pulse that makes every BP40 chip output
// the photon counts of the elapsed frame interval.
//
// The interval comes either from an internal counter (period register, in
// readout clocks; 360000 gives 1 kHz at 360 MHz) or from an external
// trigger input (rising edge). run and ext_trig_in arrive from other
// clock domains and pass two-flop synchronisers; period is treated as
// static while running. A frame pulse is FRAME_PULSE_W clocks wide. If a
// frame is due while the previous readout is still in progress (ro_busy)
// it is not issued and skip_count counts it. frame_count counts issued
// frames. Internal-counter and external-trigger operation are those of
// the readout system; the synchronisers, pulse width and skip rule are
// this design's choices.
module frame_gen #(
  parameter int unsigned FRAME_PULSE_W = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run,          // async
  input  logic        ext_mode,     // async, 1 = external trigger
  input  logic        ext_trig_in,  // async trigger input
  input  logic [31:0] period,
  input  logic        ro_busy,
  output logic        frame,
  output logic [31:0] frame_count,
  output logic [15:0] skip_count
);
  logic [1:0] run_s, mode_s, trg_s;
  logic       trg_d;
  logic [31:0] cnt;
  logic [$clog2(FRAME_PULSE_W+1)-1:0] pw;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run_s <= '0; mode_s <= '0; trg_s <= '0; trg_d <= 1'b0;
    end else begin
      run_s  <= {run_s[0], run};
      mode_s <= {mode_s[0], ext_mode};
      trg_s  <= {trg_s[0], ext_trig_in};
      trg_d  <= trg_s[1];
    end
  end

  wire running = run_s[1];
  wire due_int = running && !mode_s[1] && (cnt == '0);
  wire due_ext = running &&  mode_s[1] && trg_s[1] && !trg_d;
  wire due     = due_int || due_ext;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt <= '0; pw <= '0; frame_count <= '0; skip_count <= '0;
    end else begin
      if (!running || mode_s[1]) cnt <= '0;
      else cnt <= (cnt >= period - 1) ? '0 : cnt + 1'b1;
      if (pw != '0) pw <= pw - 1'b1;
      if (due) begin
        if (ro_busy || pw != '0) skip_count <= skip_count + 1'b1;
        else begin
          pw          <= ($bits(pw))'(FRAME_PULSE_W);
          frame_count <= frame_count + 1'b1;
        end
      end
    end
  end
  assign frame = (pw != '0);
endmodule
