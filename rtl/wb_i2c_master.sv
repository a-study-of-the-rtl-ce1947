// wb_i2c_master -- Wishbone-controlled I2C master for the IOB slow-control
// bus (IO expanders, digital potentiometers, PMBus voltage/current
// monitors).
//
// Structure: a register block (prescale, control, TX, RX, command,
// status), a byte controller (the write/read FSM) that runs one command,
// and a bit controller that cuts every bus bit into four quarter phases
// and drives SCL and SDA. One command may combine START, a byte write or
// a byte read, and STOP, in that order; a write returns the slave's
// acknowledge bit in the status register, a read sends the ACK bit given
// in the command.
//
// Registers (8-bit Wishbone, one clock wait state, ack in the next cycle):
//   0 PRER_LO  rw  prescale low byte
//   1 PRER_HI  rw  prescale high byte
//   2 CTR      rw  bit 7 = core enable
//   3 TXR/RXR  w: byte to send; r: last byte received
//   4 CR/SR    w: command {STA, STO, RD, WR, ACK, 0, 0, IACK}
//              r: status  {RXACK, BUSY, 0, 0, 0, 0, TIP, IF}
// Timing: a quarter phase lasts PRER+1 clocks, so SCL runs at
// f_clk / (4 * (PRER + 1)) (125 MHz / 4 / 313 = 100 kHz for PRER = 312).
// SDA and SCL are open drain: scl_o/sda_o = 0 pulls the line low, 1
// releases it; scl_i/sda_i are the line levels. No clock stretching and
// no multi-master arbitration. The register set and the byte/bit
// controller split follow the firmware's I2C core; the register addresses
// and bit positions are this design's choices.
module wb_i2c_master
  import heps_pkg::*;
#(
  parameter logic [15:0] PRESCALE_RST = 16'hFFFF
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_req_t wb_req,
  output wb_rsp_t wb_rsp,
  output logic    irq,
  output logic    scl_o,
  output logic    sda_o,
  input  logic    scl_i,
  input  logic    sda_i
);
  // ---------------- registers ----------------
  logic [15:0] prer;
  logic        en;
  logic [7:0]  txr, rxr;
  logic        rxack, busy_bus, tip, irq_flag, ack_to_send;
  logic        cmd_sta, cmd_sto, cmd_rd, cmd_wr;   // pending command bits
  logic        cmd_go;
  logic        cmd_done;

  wire wb_hit = wb_req.cyc && wb_req.stb && !wb_rsp.ack;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prer <= PRESCALE_RST; en <= 1'b0; txr <= '0;
      cmd_sta <= 1'b0; cmd_sto <= 1'b0; cmd_rd <= 1'b0; cmd_wr <= 1'b0; ack_to_send <= 1'b0;
      cmd_go <= 1'b0; irq_flag <= 1'b0;
      wb_rsp <= '0;
    end else begin
      wb_rsp.ack <= wb_hit;
      cmd_go     <= 1'b0;
      if (cmd_done) irq_flag <= 1'b1;
      if (wb_hit) begin
        unique case (wb_req.adr[2:0])
          3'd0: wb_rsp.dat <= prer[7:0];
          3'd1: wb_rsp.dat <= prer[15:8];
          3'd2: wb_rsp.dat <= {en, 7'b0};
          3'd3: wb_rsp.dat <= rxr;
          3'd4: wb_rsp.dat <= {rxack, busy_bus, 4'b0, tip, irq_flag};
          default: wb_rsp.dat <= 8'h00;
        endcase
        if (wb_req.we) begin
          unique case (wb_req.adr[2:0])
            3'd0: prer[7:0]  <= wb_req.dat;
            3'd1: prer[15:8] <= wb_req.dat;
            3'd2: en         <= wb_req.dat[7];
            3'd3: txr        <= wb_req.dat;
            3'd4: begin
              if (wb_req.dat[0]) irq_flag <= 1'b0;
              if (en && !tip && |wb_req.dat[7:4]) begin
                cmd_sta <= wb_req.dat[7]; cmd_sto <= wb_req.dat[6];
                cmd_rd  <= wb_req.dat[5]; cmd_wr  <= wb_req.dat[4];
                ack_to_send <= wb_req.dat[3];
                cmd_go  <= 1'b1;
              end
            end
            default: ;
          endcase
        end
      end
    end
  end
  assign irq = irq_flag;

  // ---------------- bit controller ----------------
  typedef enum logic [2:0] {B_IDLE, B_START, B_STOP, B_WRITE, B_READ} bcmd_t;
  bcmd_t       bcmd;          // bit operation in progress
  logic        bgo;           // start a bit operation (from byte controller)
  bcmd_t       bgo_cmd;
  logic        bgo_din;
  logic        bdin;
  logic        bdone;         // pulse: bit operation finished
  logic        bdout;         // bit read from SDA
  logic [1:0]  phase;
  logic [15:0] qcnt;
  logic        scl_q, sda_q;
  logic        sda_s, scl_s;  // synchronised inputs

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bcmd <= B_IDLE; phase <= '0; qcnt <= '0; scl_q <= 1'b1; sda_q <= 1'b1;
      bdone <= 1'b0; bdout <= 1'b0; bdin <= 1'b1; sda_s <= 1'b1; scl_s <= 1'b1;
    end else begin
      sda_s <= sda_i;
      scl_s <= scl_i;
      bdone <= 1'b0;
      if (bcmd == B_IDLE) begin
        if (bgo) begin
          bcmd <= bgo_cmd; bdin <= bgo_din; phase <= '0; qcnt <= '0;
        end
      end else if (qcnt == prer) begin
        qcnt  <= '0;
        phase <= phase + 1'b1;
        // levels for the next quarter phase
        unique case (bcmd)
          B_START: unique case (phase)
            2'd0: begin sda_q <= 1'b1; scl_q <= 1'b1; end
            2'd1: begin sda_q <= 1'b0; scl_q <= 1'b1; end
            2'd2: begin sda_q <= 1'b0; scl_q <= 1'b0; end
            2'd3: ;
          endcase
          B_STOP: unique case (phase)
            2'd0: begin sda_q <= 1'b0; scl_q <= 1'b1; end
            2'd1: begin sda_q <= 1'b1; scl_q <= 1'b1; end
            2'd2: ;
            2'd3: ;
          endcase
          B_WRITE, B_READ: unique case (phase)
            2'd0: scl_q <= 1'b1;
            2'd1: begin scl_q <= 1'b1; bdout <= sda_s; end
            2'd2: scl_q <= 1'b0;
            2'd3: ;
          endcase
          default: ;
        endcase
        if (phase == 2'd3) begin
          bcmd  <= B_IDLE;
          bdone <= 1'b1;
        end
      end else begin
        qcnt <= qcnt + 1'b1;
        // first quarter of a data bit: SCL low, SDA gets the bit
        if (phase == 2'd0 && qcnt == '0) begin
          unique case (bcmd)
            B_WRITE: begin scl_q <= 1'b0; sda_q <= bdin; end
            B_READ:  begin scl_q <= 1'b0; sda_q <= 1'b1; end
            B_STOP:  begin scl_q <= 1'b0; sda_q <= 1'b0; end
            B_START: begin sda_q <= 1'b1; end
            default: ;
          endcase
        end
      end
    end
  end
  assign scl_o = scl_q;
  assign sda_o = sda_q;

  // ---------------- byte controller (W/R FSM) ----------------
  typedef enum logic [2:0] {Y_IDLE, Y_START, Y_BITS, Y_ACK, Y_STOP} ystate_t;
  ystate_t    ys;
  logic [7:0] sr;
  logic [2:0] bcnt;
  logic       issued;         // bit operation for the current step issued

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ys <= Y_IDLE; sr <= '0; bcnt <= '0; issued <= 1'b0; tip <= 1'b0; cmd_done <= 1'b0;
      rxr <= '0; rxack <= 1'b0; busy_bus <= 1'b0;
    end else begin
      cmd_done <= 1'b0;
      unique case (ys)
        Y_IDLE: if (cmd_go) begin
          tip    <= 1'b1;
          sr     <= txr;
          bcnt   <= 3'd7;
          issued <= 1'b0;
          ys     <= cmd_sta ? Y_START : ((cmd_rd || cmd_wr) ? Y_BITS : Y_STOP);
        end
        Y_START: if (!issued) issued <= 1'b1;
                 else if (bdone) begin
                   issued <= 1'b0; busy_bus <= 1'b1;
                   ys <= (cmd_rd || cmd_wr) ? Y_BITS : (cmd_sto ? Y_STOP : Y_IDLE);
                   if (!(cmd_rd || cmd_wr) && !cmd_sto) begin tip <= 1'b0; cmd_done <= 1'b1; end
                 end
        Y_BITS: if (!issued) issued <= 1'b1;
                else if (bdone) begin
                  issued <= 1'b0;
                  sr     <= {sr[6:0], bdout};
                  if (bcnt == 3'd0) ys <= Y_ACK;
                  else bcnt <= bcnt - 1'b1;
                end
        Y_ACK: if (!issued) issued <= 1'b1;
               else if (bdone) begin
                 issued <= 1'b0;
                 if (cmd_rd) rxr <= sr;
                 else        rxack <= bdout;
                 if (cmd_sto) ys <= Y_STOP;
                 else begin ys <= Y_IDLE; tip <= 1'b0; cmd_done <= 1'b1; end
               end
        Y_STOP: if (!issued) issued <= 1'b1;
                else if (bdone) begin
                  issued <= 1'b0; busy_bus <= 1'b0;
                  ys <= Y_IDLE; tip <= 1'b0; cmd_done <= 1'b1;
                end
        default: ys <= Y_IDLE;
      endcase
    end
  end

  // bit operation requested in the current byte-controller step
  always_comb begin
    bgo     = (ys != Y_IDLE) && !issued;
    bgo_cmd = B_IDLE;
    bgo_din = 1'b1;
    unique case (ys)
      Y_START: bgo_cmd = B_START;
      Y_BITS:  begin bgo_cmd = cmd_rd ? B_READ : B_WRITE; bgo_din = cmd_rd ? 1'b1 : sr[7]; end
      Y_ACK:   begin bgo_cmd = cmd_rd ? B_WRITE : B_READ; bgo_din = ack_to_send; end
      Y_STOP:  bgo_cmd = B_STOP;
      default: ;
    endcase
  end

  logic unused;
  assign unused = scl_s;
endmodule
