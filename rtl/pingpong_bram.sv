// pingpong_bram -- per-chip ping-pong frame buffer that turns readout order
// into image order, followed by the chip's output FIFO.
//
// The deserialiser delivers, once per pixel step, one 28-bit word from
// each of the twelve region chains. Chain c covers chip columns 8c..8c+7
// and runs as a snake: local column lc = step / ROWS, row = step % ROWS
// for even lc and ROWS-1 - step % ROWS for odd lc. The words of a step are
// written one per clock (twelve clocks, far less than the 336 clocks
// between steps) at address row*COLS + 8c + lc of the write bank.
//
// Two banks (BRAM@1, BRAM@2) alternate: while frame n is written into one
// bank, frame n-1 is read from the other in address order, i.e. row by
// row, and pushed into the FIFO. If at the start of a frame no bank is
// free the whole frame is dropped and drop_count increments. Reading has
// one clock of RAM latency; a read is only issued while the FIFO has room
// for it and the one already in flight.
//
// The ping-pong pair and the FIFO are the chip's buffers named in the
// firmware block diagram; the address mapping (this reorganisation) and
// the drop policy are this design's reading of it.
module pingpong_bram #(
  parameter int unsigned ROWS       = 128,
  parameter int unsigned COLS       = 96,
  parameter int unsigned CHAINS     = 12,
  parameter int unsigned W          = 28,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [$clog2(ROWS*COLS/CHAINS)-1:0] in_step,
  input  logic [CHAINS-1:0][W-1:0]      in_words,
  input  logic                          in_last,
  // chip FIFO, first-word-fall-through
  input  logic                          out_rd,
  output logic [W-1:0]                  out_data,
  output logic                          out_empty,
  output logic [15:0]                   drop_count
);
  localparam int unsigned NPIX  = ROWS * COLS;
  localparam int unsigned AW    = $clog2(NPIX);
  localparam int unsigned CCOLS = COLS / CHAINS;        // columns per chain
  localparam int unsigned STEPS = ROWS * CCOLS;
  localparam int unsigned PW    = $clog2(STEPS);
  localparam int unsigned CW    = $clog2(CHAINS);
  localparam int unsigned FCW   = $clog2(FIFO_DEPTH) + 1;

  logic [W-1:0] bank0 [NPIX];
  logic [W-1:0] bank1 [NPIX];

  // ---------------- write side ----------------
  logic                    full0, full1;      // bank holds a complete frame
  logic                    wr_drop;           // current frame is dropped
  logic                    wbank;
  logic [CHAINS-1:0][W-1:0] hold;
  logic [PW-1:0]           hold_step;
  logic                    hold_last;
  logic [CW:0]             wcnt;              // chain being written, CHAINS = idle
  logic                    rd_busy;
  logic                    rbank;

  // address of chain wc for hold_step
  logic [CW-1:0]           wc;
  logic [AW-1:0]           waddr;
  always_comb begin
    int unsigned lc, r, row;
    wc  = wcnt[CW-1:0];
    lc  = int'(hold_step) / ROWS;
    r   = int'(hold_step) % ROWS;
    row = (lc % 2 == 0) ? r : (ROWS - 1 - r);
    waddr = AW'(row * COLS + int'(wc) * CCOLS + lc);
  end

  wire writing = (wcnt != (CW+1)'(CHAINS));

  always_ff @(posedge clk) begin
    if (writing && !wr_drop) begin
      if (wbank == 1'b0) bank0[waddr] <= hold[wc];
      else               bank1[waddr] <= hold[wc];
    end
  end

  // bank free for writing: not full and not being read
  wire free0 = !full0 && !(rd_busy && rbank == 1'b0);
  wire free1 = !full1 && !(rd_busy && rbank == 1'b1);

  logic set_full, set_bank;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_drop    <= 1'b0;
      wbank      <= 1'b0;
      wcnt       <= (CW+1)'(CHAINS);
      hold       <= '0;
      hold_step  <= '0;
      hold_last  <= 1'b0;
      drop_count <= '0;
    end else begin
      if (in_valid) begin
        hold      <= in_words;
        hold_step <= in_step;
        hold_last <= in_last;
        wcnt      <= '0;
        if (in_step == '0) begin
          // start of a frame: choose a bank
          if (free0 && (!free1 || wbank == 1'b1)) begin
            wbank <= 1'b0; wr_drop <= 1'b0;
          end else if (free1) begin
            wbank <= 1'b1; wr_drop <= 1'b0;
          end else begin
            wr_drop    <= 1'b1;
            drop_count <= drop_count + 1'b1;
          end
        end
      end else if (writing) begin
        wcnt <= wcnt + 1'b1;
      end
    end
  end

  assign set_full = writing && (wcnt == (CW+1)'(CHAINS - 1)) && hold_last && !wr_drop;
  assign set_bank = wbank;

  // ---------------- read side ----------------
  logic [AW-1:0]  raddr;
  logic           rd_pend;              // RAM output valid next cycle
  logic [W-1:0]   rdata;
  logic [FCW-1:0] fcount;
  logic           ffull;

  wire issue = rd_busy && (int'(fcount) + int'(rd_pend) < FIFO_DEPTH - 1);
  wire rd_end = issue && (raddr == AW'(NPIX - 1));

  always_ff @(posedge clk) begin
    if (issue) rdata <= (rbank == 1'b0) ? bank0[raddr] : bank1[raddr];
  end


  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_busy <= 1'b0;
      rbank   <= 1'b0;
      raddr   <= '0;
      rd_pend <= 1'b0;
      full0   <= 1'b0;
      full1   <= 1'b0;
    end else begin
      rd_pend <= issue;
      if (issue) raddr <= rd_end ? '0 : raddr + 1'b1;
      if (rd_end) rd_busy <= 1'b0;
      // bank flags
      if (set_full) begin
        if (set_bank == 1'b0) full0 <= 1'b1; else full1 <= 1'b1;
      end
      if (!rd_busy) begin
        if (full0) begin
          rd_busy <= 1'b1; rbank <= 1'b0; full0 <= 1'b0;
        end else if (full1) begin
          rd_busy <= 1'b1; rbank <= 1'b1; full1 <= 1'b0;
        end
      end
    end
  end

  sync_fifo #(.W(W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .wr_en   (rd_pend),
    .wr_data (rdata),
    .rd_en   (out_rd),
    .rd_data (out_data),
    .full    (ffull),
    .empty   (out_empty),
    .count   (fcount)
  );

  a_step_spacing: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> !writing);
  // not needed: reads are issued only while the FIFO has room for them
  logic unused_bits;
  assign unused_bits = ^{ffull};
endmodule
