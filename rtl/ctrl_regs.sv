// ctrl_regs -- the small set of registers the DAQ uses directly: run/stop,
// trigger source, frame period, pixel-configuration start and mode, and
// the output port; plus a read-only status byte.
//
// Map (8-bit Wishbone slave, ack in the cycle after the request):
//   0 CTRL   rw {0, 0, fee_sel, out_sel, cfg_start, cal_mode, ext_trig, run}
//            cfg_start (bit 3) is a command: writing 1 gives a one-clock
//            pulse on cfg_start and reads back 0.
//   1..4 FRAME_PERIOD[31:0], little endian, in readout clocks
//   5 STATUS r {0, 0, 0, 0, ddr_full, cfg_done, cfg_busy, ro_busy}
//            cfg_done is sticky and cleared by a new cfg_start.
// The registers exist for frame rate, trigger, start/stop and
// configuration, as in the firmware; their layout and the reset frame
// period (1 kHz at 360 MHz) are this design's choices.
module ctrl_regs
  import heps_pkg::*;
#(
  parameter logic [31:0] FRAME_PERIOD_RST = 32'd360000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  wb_req_t     wb_req,
  output wb_rsp_t     wb_rsp,
  output logic        run,
  output logic        ext_trig,
  output logic        cal_mode,
  output logic        cfg_start,
  output logic        out_sel,
  output logic        fee_sel,
  output logic [31:0] frame_period,
  input  logic        ro_busy,
  input  logic        cfg_busy,
  input  logic        cfg_done,
  input  logic        ddr_full
);
  logic done_sticky;
  wire  wb_hit = wb_req.cyc && wb_req.stb && !wb_rsp.ack;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      run <= 1'b0; ext_trig <= 1'b0; cal_mode <= 1'b0; cfg_start <= 1'b0;
      out_sel <= 1'b0; fee_sel <= 1'b0; frame_period <= FRAME_PERIOD_RST;
      done_sticky <= 1'b0; wb_rsp <= '0;
    end else begin
      wb_rsp.ack <= wb_hit;
      cfg_start  <= 1'b0;
      if (cfg_done) done_sticky <= 1'b1;
      if (wb_hit) begin
        unique case (wb_req.adr[2:0])
          3'd0: wb_rsp.dat <= {2'b00, fee_sel, out_sel, 1'b0, cal_mode, ext_trig, run};
          3'd1: wb_rsp.dat <= frame_period[7:0];
          3'd2: wb_rsp.dat <= frame_period[15:8];
          3'd3: wb_rsp.dat <= frame_period[23:16];
          3'd4: wb_rsp.dat <= frame_period[31:24];
          3'd5: wb_rsp.dat <= {4'b0, ddr_full, done_sticky, cfg_busy, ro_busy};
          default: wb_rsp.dat <= 8'h00;
        endcase
        if (wb_req.we) begin
          unique case (wb_req.adr[2:0])
            3'd0: begin
              run       <= wb_req.dat[0];
              ext_trig  <= wb_req.dat[1];
              cal_mode  <= wb_req.dat[2];
              cfg_start <= wb_req.dat[3];
              if (wb_req.dat[3]) done_sticky <= 1'b0;
              out_sel   <= wb_req.dat[4];
              fee_sel   <= wb_req.dat[5];
            end
            3'd1: frame_period[7:0]   <= wb_req.dat;
            3'd2: frame_period[15:8]  <= wb_req.dat;
            3'd3: frame_period[23:16] <= wb_req.dat;
            3'd4: frame_period[31:24] <= wb_req.dat;
            default: ;
          endcase
        end
      end
    end
  end
endmodule
