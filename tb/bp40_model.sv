// bp40_model -- behavioural model of the readout side of one BP40 chip
// (not synthesizable logic). On every frame pulse it sends its pixel
// counters on one serial line: START_DELAY clocks after the pulse falls,
// for each of ROWS*COLS/CHAINS pixel steps, bit-planes 27..0 each holding
// chains CHAINS-1..0. Chain c covers columns c*COLS/CHAINS onward as a
// snake. The counter values are tb_heps_pkg::pix_val(frame, CHIP, row,
// col), with frame counting the pulses seen.
module bp40_model
  import tb_heps_pkg::*;
#(
  parameter int CHIP        = 0,
  parameter int ROWS        = 128,
  parameter int COLS        = 96,
  parameter int CHAINS      = 12,
  parameter int BITS        = 28,
  parameter int START_DELAY = 2
) (
  input  logic clk,
  input  logic frame,
  output logic sdata
);
  int fnum = 0;
  logic prev = 1'b0;
  initial begin
    sdata = 1'b0;
    forever begin
      @(posedge clk);
      if (prev && !frame) begin
        repeat (START_DELAY) @(posedge clk);
        for (int p = 0; p < ROWS * COLS / CHAINS; p++)
          for (int b = BITS - 1; b >= 0; b--)
            for (int c = CHAINS - 1; c >= 0; c--) begin
              logic [27:0] v;
              v = pix_val(fnum, CHIP, ro_row(p, ROWS), ro_col(c, p, ROWS, COLS, CHAINS));
              sdata <= v[b];
              @(posedge clk);
            end
        sdata <= 1'b0;
        fnum++;
        prev = 1'b0;
      end else begin
        prev = frame;
      end
    end
  end
endmodule
