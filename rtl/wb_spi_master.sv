// wb_spi_master -- Wishbone-controlled SPI master for the BP40 global
// parameter chain (the gain/offset DACs such as GDAC).
//
// The global parameters of a BP40 are loaded like an SPI stream, so the
// host only needs the data register (SPDR, fed byte by byte) and the
// control register (SPCR, clock divider and phase). Bytes written to SPDR
// go into a write buffer; the control FSM takes them one at a time into
// the shift register, clocks them out on MOSI (MSB first) while clocking
// MISO in, and puts the received byte into a read buffer that is read back
// through SPDR.
//
// Registers (8-bit Wishbone, ack in the cycle after the request):
//   0 SPCR rw {SPIE, SPE, 0, MSTR, CPOL, CPHA, SPR[1:0]}
//   1 SPSR r  {SPIF, WCOL, 0, 0, WFFULL, WFEMPTY, RFFULL, RFEMPTY}
//          w  writing 1 to bit 7 / bit 6 clears SPIF / WCOL
//   2 SPDR w: push into write buffer (WCOL if full); r: pop read buffer
//   3 SPER rw {ICNT[1:0], 0, 0, 0, 0, ESPR[1:0]}
// SCK period = 2^({ESPR,SPR}+1) clocks of the 125 MHz reference (16 ns
// .. 1 ms). CPOL sets the idle level; CPHA = 0 samples on the leading
// edge, CPHA = 1 on the trailing edge. SPIF rises after ICNT+1 completed
// bytes; irq = SPIE & SPIF. The register names and the buffer/FSM/shift
// register structure are those of the firmware's SPI core; the bit
// positions and the divider formula are this design's choices.
module wb_spi_master
  import heps_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_req_t wb_req,
  output wb_rsp_t wb_rsp,
  output logic    irq,
  output logic    sck,
  output logic    mosi,
  input  logic    miso
);
  localparam int unsigned FCW = $clog2(FIFO_DEPTH) + 1;

  logic [7:0] spcr, sper;
  logic       spif, wcol;
  wire        spie = spcr[7];
  wire        spe  = spcr[6];
  wire        cpol = spcr[3];
  wire        cpha = spcr[2];
  wire [3:0]  sel  = {sper[1:0], spcr[1:0]};
  wire [1:0]  icnt = sper[7:6];

  // buffers
  logic       wf_wr, wf_rd, wf_full, wf_empty;
  logic [7:0] wf_q;
  logic       rf_wr, rf_rd, rf_full, rf_empty;
  logic [7:0] rf_q, rx_byte;
  logic [FCW-1:0] wf_cnt, rf_cnt;

  sync_fifo #(.W(8), .DEPTH(FIFO_DEPTH)) u_wbuf (
    .clk, .rst_n, .wr_en(wf_wr), .wr_data(wb_req.dat), .rd_en(wf_rd),
    .rd_data(wf_q), .full(wf_full), .empty(wf_empty), .count(wf_cnt));
  sync_fifo #(.W(8), .DEPTH(FIFO_DEPTH)) u_rbuf (
    .clk, .rst_n, .wr_en(rf_wr), .wr_data(rx_byte), .rd_en(rf_rd),
    .rd_data(rf_q), .full(rf_full), .empty(rf_empty), .count(rf_cnt));

  // ---------------- Wishbone interface ----------------
  wire wb_hit = wb_req.cyc && wb_req.stb && !wb_rsp.ack;
  logic byte_done;
  logic [1:0] done_cnt;

  assign wf_wr = wb_hit && wb_req.we && wb_req.adr[1:0] == 2'd2 && !wf_full;
  assign rf_rd = wb_hit && !wb_req.we && wb_req.adr[1:0] == 2'd2 && !rf_empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      spcr <= 8'h10; sper <= 8'h00; spif <= 1'b0; wcol <= 1'b0; wb_rsp <= '0; done_cnt <= '0;
    end else begin
      wb_rsp.ack <= wb_hit;
      if (byte_done) begin
        if (done_cnt == icnt) begin
          done_cnt <= '0;
          spif     <= 1'b1;
        end else begin
          done_cnt <= done_cnt + 1'b1;
        end
      end
      if (wb_hit) begin
        unique case (wb_req.adr[1:0])
          2'd0: wb_rsp.dat <= spcr;
          2'd1: wb_rsp.dat <= {spif, wcol, 2'b00, wf_full, wf_empty, rf_full, rf_empty};
          2'd2: wb_rsp.dat <= rf_q;
          2'd3: wb_rsp.dat <= sper;
        endcase
        if (wb_req.we) begin
          unique case (wb_req.adr[1:0])
            2'd0: begin
              spcr <= wb_req.dat;
              if (!wb_req.dat[6]) done_cnt <= '0;
            end
            2'd1: begin
              if (wb_req.dat[7]) spif <= 1'b0;
              if (wb_req.dat[6]) wcol <= 1'b0;
            end
            2'd2: if (wf_full) wcol <= 1'b1;
            2'd3: sper <= wb_req.dat;
          endcase
        end
      end
    end
  end
  assign irq = spie && spif;

  // ---------------- control FSM and shift register ----------------
  typedef enum logic {C_IDLE, C_XFER} cstate_t;
  cstate_t    cs;
  logic [15:0] div;
  logic [15:0] half;              // half SCK period in clocks
  logic [3:0]  edges;             // SCK edges done in this byte (16 per byte)
  logic        sck_int;           // SCK before polarity
  logic [7:0]  tx, rx;
  logic        mosi_q;

  assign half = 16'(1) << sel;
  assign wf_rd = (cs == C_IDLE) && spe && !wf_empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cs <= C_IDLE; div <= '0; edges <= '0; sck_int <= 1'b0; tx <= '0; rx <= '0;
      mosi_q <= 1'b0; byte_done <= 1'b0; rf_wr <= 1'b0; rx_byte <= '0;
    end else begin
      byte_done <= 1'b0;
      rf_wr     <= 1'b0;
      unique case (cs)
        C_IDLE: begin
          sck_int <= 1'b0;
          if (wf_rd) begin
            tx     <= wf_q;
            div    <= '0;
            edges  <= '0;
            cs     <= C_XFER;
            if (!cpha) mosi_q <= wf_q[7];
          end
        end
        C_XFER: begin
          if (div == half - 1'b1) begin
            div     <= '0;
            sck_int <= !sck_int;
            edges   <= edges + 1'b1;
            if (!sck_int) begin            // leading edge
              if (!cpha) rx <= {rx[6:0], miso};
              else begin mosi_q <= tx[7]; tx <= {tx[6:0], 1'b0}; end
            end else begin                 // trailing edge
              if (!cpha) begin
                tx <= {tx[6:0], 1'b0};
                mosi_q <= tx[6];
              end else rx <= {rx[6:0], miso};
            end
            if (edges == 4'd15) begin
              cs        <= C_IDLE;
              byte_done <= 1'b1;
              rx_byte   <= cpha ? {rx[6:0], miso} : rx;
              rf_wr     <= !rf_full;
            end
          end else begin
            div <= div + 1'b1;
          end
        end
      endcase
    end
  end

  assign sck  = sck_int ^ cpol;
  assign mosi = mosi_q;

  logic unused;
  assign unused = ^{wf_cnt, rf_cnt, spcr[5:4], sper[5:2]};
endmodule
