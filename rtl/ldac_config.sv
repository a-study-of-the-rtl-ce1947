// ldac_config -- sequencer for the pixel-level configuration chain of the
// twelve BP40 chips of a FEE.
//
// Each chip takes its per-pixel trim (LDAC) table through four serial
// chains ARRAYIN[3:0], each 24 columns x 128 rows = PIX_PER_REGION pixels
// of W bits, clocked by CLK_SPI while the chip's active-low chip select is
// pulled down. The twelve chips share the four data lines and the clock,
// so the chip select picks the chip. A chip therefore takes
// PIX_PER_REGION * W = 24*128*32 CLK_SPI periods.
//
// Standard mode (cal_mode = 0): chips 0..N_CHIPS-1 are configured one after
// the other, each with its own table from the ping-pong RAM. Calibration
// mode (cal_mode = 1): all chip selects go low together and one table is
// shifted into all chips at once, twelve times faster. After the last chip
// a single refresh pulse (one CLK_SPI period) tells the chips to take over
// the new values.
//
// Timing: CLK_SPI has a period of CLK_DIV clocks, low in the first half.
// A data bit is put on ARRAYIN at the start of the period (falling edge of
// CLK_SPI) and is stable across the rising edge in the middle. Bits go
// MSB first. Chip select falls one CLK_SPI period before the first bit and
// rises one period after the last. The RAM is read one pixel ahead, so
// CLK_SPI runs without gaps inside a chip. The mode handling, the chain
// geometry and the per-chip clock count follow the readout system; the
// clock edges used, the bit order and the setup periods are this design's
// choices.
module ldac_config #(
  parameter int unsigned N_CHIPS        = 12,
  parameter int unsigned PIX_PER_REGION = 3072,
  parameter int unsigned REGIONS        = 4,
  parameter int unsigned W              = 32,
  parameter int unsigned CLK_DIV        = 4
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,      // pulse
  input  logic                                 cal_mode,   // sampled at start
  // ping-pong RAM
  input  logic                                 rd_avail,
  output logic [$clog2(PIX_PER_REGION)-1:0]    rd_addr,
  input  logic [REGIONS-1:0][W-1:0]            rd_data,
  output logic                                 rd_release,
  // chip side
  output logic                                 clk_spi,
  output logic [N_CHIPS-1:0]                   cs_n,
  output logic [REGIONS-1:0]                   array_in,
  output logic                                 refresh,
  output logic                                 busy,
  output logic                                 done       // pulse at the end
);
  localparam int unsigned AW = $clog2(PIX_PER_REGION);
  localparam int unsigned DW = $clog2(CLK_DIV);

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_LOAD, S_SETUP, S_SHIFT, S_HOLD, S_REFRESH} state_t;
  state_t state;

  logic [DW-1:0]               div;
  wire                         period_end = (div == DW'(CLK_DIV - 1));
  logic                        mode;
  logic [$clog2(N_CHIPS)-1:0]  chip;
  logic [AW-1:0]               idx;
  logic [$clog2(W)-1:0]        bitn;
  logic [REGIONS-1:0][W-1:0]   sr;

  // RAM address: current pixel + 1 while shifting, 0 before a chip
  always_comb begin
    if (state == S_SHIFT && idx != AW'(PIX_PER_REGION - 1)) rd_addr = idx + 1'b1;
    else                                                    rd_addr = '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; div <= '0; mode <= 1'b0; chip <= '0; idx <= '0; bitn <= '0;
      sr <= '0; rd_release <= 1'b0; done <= 1'b0;
    end else begin
      rd_release <= 1'b0;
      done       <= 1'b0;
      div        <= (state == S_IDLE || state == S_WAIT || state == S_LOAD || period_end) ? '0 : div + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          mode  <= cal_mode;
          chip  <= '0;
          state <= S_WAIT;
        end
        S_WAIT: if (rd_avail) state <= S_LOAD;        // rd_addr = 0 now
        S_LOAD: begin                                   // rd_data holds pixel 0
          sr    <= rd_data;
          idx   <= '0;
          bitn  <= '0;
          state <= S_SETUP;
        end
        S_SETUP: if (period_end) state <= S_SHIFT;
        S_SHIFT: if (period_end) begin
          if (bitn == ($bits(bitn))'(W - 1)) begin
            bitn <= '0;
            sr   <= rd_data;                            // next pixel
            if (idx == AW'(PIX_PER_REGION - 1)) begin
              state      <= S_HOLD;
              rd_release <= 1'b1;
            end else begin
              idx <= idx + 1'b1;
            end
          end else begin
            bitn <= bitn + 1'b1;
            for (int r = 0; r < REGIONS; r++) sr[r] <= {sr[r][W-2:0], 1'b0};
          end
        end
        S_HOLD: if (period_end) begin
          if (mode || chip == ($bits(chip))'(N_CHIPS - 1)) state <= S_REFRESH;
          else begin
            chip  <= chip + 1'b1;
            state <= S_WAIT;
          end
        end
        S_REFRESH: if (period_end) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    clk_spi  = (state == S_SHIFT) && (div >= DW'(CLK_DIV / 2));
    refresh  = (state == S_REFRESH);
    busy     = (state != S_IDLE);
    cs_n     = '1;
    if (state == S_SETUP || state == S_SHIFT) begin
      if (mode) cs_n = '0;
      else      cs_n[chip] = 1'b0;
    end
    for (int r = 0; r < REGIONS; r++) array_in[r] = (state == S_SHIFT) ? sr[r][W-1] : 1'b0;
  end

  a_cs_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                                (!mode && state == S_SHIFT) |-> $onehot(~cs_n));
endmodule
