// ddr_fifo -- uses an external DDR3 memory, reached through the AXI4 slave
// port of the FPGA vendor's memory controller, as one large FIFO between
// the merged image stream and the TCP output.
//
// Incoming beats are packed into 32-bit words (the 28-bit pixel in bits
// 27:0, end-of-line in bit 30, start-of-frame in bit 31, FEE number in bit
// 28) and collected in a small input FIFO. A write engine moves them to
// DDR in INCR bursts at a write pointer that wraps around the whole
// 2^ADDR_W-byte space (8 GB for ADDR_W = 33); a read engine fetches
// committed words back from the read pointer into a small output FIFO
// whenever that FIFO has room for a full burst. A burst is as long as the
// data allows, up to MAX_BURST beats, and never crosses a 4 KB boundary,
// so no word is stranded at the end of a frame. A read burst only covers
// words whose write response has arrived. DDR space is counted as taken
// from the moment a write burst is issued until the read burst that
// fetches it back has completed, so a write can never overwrite data still
// being read; the FIFO is full when that count reaches 2^(ADDR_W-2) words.
// One write and one read burst may be in flight at the same time.
//
// The output goes to one of two TCP ports, selected by out_sel (0: the
// 10 Gb/s link, 1: the 1 Gb/s link). The DDR-as-FIFO idea is the one of
// the readout firmware; data width, burst policy and flag packing are this
// design's choices.
//
// Constant outputs: AxSIZE (4 bytes), AxBURST (INCR), WSTRB (all bytes),
// the upper bits of AxLEN above MAX_BURST-1 and the padding bits 31:28 of
// out_beat.data are fixed by this format.
module ddr_fifo
  import heps_pkg::*;
#(
  parameter int unsigned ADDR_W    = 33,
  parameter int unsigned DATA_W    = 32,
  parameter int unsigned MAX_BURST = 16,
  parameter int unsigned BUF_DEPTH = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // merged image stream
  input  logic                 in_valid,
  output logic                 in_ready,
  input  pix_beat_t            in_beat,
  // AXI4 master toward the memory controller
  output logic [ADDR_W-1:0]    awaddr,
  output logic [7:0]           awlen,
  output logic [2:0]           awsize,
  output logic [1:0]           awburst,
  output logic                 awvalid,
  input  logic                 awready,
  output logic [DATA_W-1:0]    wdata,
  output logic [DATA_W/8-1:0]  wstrb,
  output logic                 wlast,
  output logic                 wvalid,
  input  logic                 wready,
  input  logic [1:0]           bresp,
  input  logic                 bvalid,
  output logic                 bready,
  output logic [ADDR_W-1:0]    araddr,
  output logic [7:0]           arlen,
  output logic [2:0]           arsize,
  output logic [1:0]           arburst,
  output logic                 arvalid,
  input  logic                 arready,
  input  logic [DATA_W-1:0]    rdata,
  input  logic [1:0]           rresp,
  input  logic                 rlast,
  input  logic                 rvalid,
  output logic                 rready,
  // output to the two TCP ports
  input  logic                 out_sel,
  output logic [1:0]           out_valid,
  input  logic [1:0]           out_ready,
  output pix_beat_t            out_beat,
  // status
  output logic [ADDR_W-2:0]    used_words,
  output logic                 ddr_full,
  output logic [15:0]          resp_errors
);
  localparam int unsigned BYTES = DATA_W / 8;
  localparam int unsigned BSH   = $clog2(BYTES);
  localparam int unsigned CAPW  = ADDR_W - BSH;            // log2 of capacity in words
  localparam int unsigned BW    = $clog2(MAX_BURST) + 1;
  localparam int unsigned FCW   = $clog2(BUF_DEPTH) + 1;
  localparam int unsigned PAGEW = 4096 / BYTES;            // words per 4 KB

  // ---------------- input FIFO ----------------
  logic [DATA_W-1:0] in_word, ififo_data;
  logic              ififo_full, ififo_empty, ififo_rd;
  logic [FCW-1:0]    ififo_cnt;

  always_comb begin
    in_word = '0;
    in_word[27:0] = in_beat.data[27:0];
    in_word[28]   = in_beat.fee;
    in_word[30]   = in_beat.eol;
    in_word[31]   = in_beat.sof;
  end
  assign in_ready = !ififo_full;

  sync_fifo #(.W(DATA_W), .DEPTH(BUF_DEPTH)) u_ififo (
    .clk, .rst_n, .wr_en(in_valid && !ififo_full), .wr_data(in_word),
    .rd_en(ififo_rd), .rd_data(ififo_data), .full(ififo_full), .empty(ififo_empty), .count(ififo_cnt));

  // ---------------- pointers and fill level ----------------
  logic [CAPW-1:0] wptr, rptr;       // word pointers
  logic [CAPW:0]   used;             // committed words not yet claimed by a read
  logic [CAPW:0]   occ;              // words occupying DDR (until read back)
  logic [CAPW:0]   reserved;         // words of the write burst in flight
  logic [BW-1:0]   wr_done_len, rd_done_len;

  function automatic logic [BW-1:0] burst_len(input logic [CAPW-1:0] ptr, input int unsigned avail);
    int unsigned to_page, n;
    to_page = PAGEW - (int'(ptr) % PAGEW);
    n = avail;
    if (n > MAX_BURST) n = MAX_BURST;
    if (n > to_page)   n = to_page;
    return BW'(n);
  endfunction

  // ---------------- write engine ----------------
  typedef enum logic [1:0] {W_IDLE, W_ADDR, W_DATA, W_RESP} wstate_t;
  wstate_t         ws;
  logic [BW-1:0]   wlen, wbeat;

  wire [CAPW:0] space = (CAPW+1)'(1) << CAPW;
  wire          can_wr = !ififo_empty &&
                         ((occ + (CAPW+1)'(burst_len(wptr, int'(ififo_cnt)))) <= space);

  assign awaddr  = ADDR_W'(wptr) << BSH;
  assign awlen   = 8'(wlen - 1'b1);
  assign awsize  = 3'(BSH);
  assign awburst = 2'b01;
  assign awvalid = (ws == W_ADDR);
  assign wdata   = ififo_data;
  assign wstrb   = '1;
  assign wvalid  = (ws == W_DATA) && !ififo_empty;
  assign wlast   = (wbeat == wlen - 1'b1);
  assign ififo_rd = wvalid && wready;
  assign bready  = (ws == W_RESP);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ws <= W_IDLE; wlen <= '0; wbeat <= '0; wptr <= '0;
    end else begin
      unique case (ws)
        W_IDLE: if (can_wr) begin
          wlen <= burst_len(wptr, int'(ififo_cnt));
          ws   <= W_ADDR;
        end
        W_ADDR: if (awready) begin ws <= W_DATA; wbeat <= '0; end
        W_DATA: if (wvalid && wready) begin
          wbeat <= wbeat + 1'b1;
          if (wlast) ws <= W_RESP;
        end
        W_RESP: if (bvalid) begin
          wptr        <= wptr + CAPW'(wlen);
          ws          <= W_IDLE;
        end
        default: ws <= W_IDLE;
      endcase
    end
  end
  assign reserved = (ws != W_IDLE) ? (CAPW+1)'(wlen) : '0;
  // completed bursts update the fill counters in the same clock as the
  // pointers, so the next decision already sees them
  assign wr_done_len = (ws == W_RESP && bvalid) ? wlen : '0;

  // ---------------- read engine ----------------
  typedef enum logic [1:0] {R_IDLE, R_ADDR, R_DATA} rstate_t;
  rstate_t         rs;
  logic [BW-1:0]   rlen;
  logic [FCW-1:0]  ofifo_cnt;
  logic            ofifo_full, ofifo_empty, ofifo_rd;
  logic [DATA_W-1:0] ofifo_data;

  wire can_rd = (used != '0) && (int'(ofifo_cnt) + MAX_BURST <= BUF_DEPTH);

  assign araddr  = ADDR_W'(rptr) << BSH;
  assign arlen   = 8'(rlen - 1'b1);
  assign arsize  = 3'(BSH);
  assign arburst = 2'b01;
  assign arvalid = (rs == R_ADDR);
  assign rready  = (rs == R_DATA);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rs <= R_IDLE; rlen <= '0; rptr <= '0;
    end else begin
      unique case (rs)
        R_IDLE: if (can_rd) begin
          rlen <= burst_len(rptr, (used > (CAPW+1)'(MAX_BURST)) ? MAX_BURST : int'(used));
          rs   <= R_ADDR;
        end
        R_ADDR: if (arready) rs <= R_DATA;
        R_DATA: if (rvalid && rlast) begin
          rptr        <= rptr + CAPW'(rlen);
          rs          <= R_IDLE;
        end
        default: rs <= R_IDLE;
      endcase
    end
  end

  // the read engine subtracts at issue time so a second read never
  // re-reads the same words
  assign rd_done_len = (rs == R_DATA && rvalid && rlast) ? rlen : '0;

  logic [BW-1:0] rd_issue_len;
  assign rd_issue_len = (rs == R_ADDR && arready) ? rlen : '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      used <= '0;
      occ  <= '0;
    end else begin
      used <= used + (CAPW+1)'(wr_done_len) - (CAPW+1)'(rd_issue_len);
      occ  <= occ  + (CAPW+1)'(wr_done_len) - (CAPW+1)'(rd_done_len);
    end
  end

  // AXI error responses (SLVERR/DECERR) on either channel are counted
  always_ff @(posedge clk) begin
    if (!rst_n) resp_errors <= '0;
    else resp_errors <= resp_errors
                        + 16'((bvalid && bready && bresp != 2'b00) ? 1 : 0)
                        + 16'((rvalid && rready && rresp != 2'b00) ? 1 : 0);
  end

  sync_fifo #(.W(DATA_W), .DEPTH(BUF_DEPTH)) u_ofifo (
    .clk, .rst_n, .wr_en(rvalid && rready), .wr_data(rdata),
    .rd_en(ofifo_rd), .rd_data(ofifo_data), .full(ofifo_full), .empty(ofifo_empty), .count(ofifo_cnt));

  // ---------------- output port select ----------------
  always_comb begin
    out_beat      = '0;
    out_beat.data = {4'b0, ofifo_data[27:0]};
    out_beat.fee  = ofifo_data[28];
    out_beat.eol  = ofifo_data[30];
    out_beat.sof  = ofifo_data[31];
    out_valid     = '0;
    out_valid[out_sel] = !ofifo_empty;
  end
  assign ofifo_rd = !ofifo_empty && out_ready[out_sel];

  assign used_words = (ADDR_W-1)'(occ + reserved);
  assign ddr_full   = (occ + reserved) >= space;

  a_rlast_len: assert property (@(posedge clk) disable iff (!rst_n)
                                (ws == W_DATA && wvalid && wready && wlast) |-> (wbeat == wlen - 1'b1));
  // not needed: the buffer cannot overflow (reads are issued against its free space) and bit 29 is a spare
  logic unused_bits;
  assign unused_bits = ^{ofifo_full, ofifo_data[29]};
endmodule
