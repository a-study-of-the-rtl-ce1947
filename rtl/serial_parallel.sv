// serial_parallel -- deserialiser for one BP40 LVDS readout link.
//
// A BP40 chip is read out through twelve region chains (ARRAYOUT[11:0]),
// each a snake through 8 columns x 128 rows = 1024 pixels, and all twelve
// chains are multiplexed onto one serial line. After every frame pulse the
// line carries 1024 pixel steps; within one step the bit-planes come MSB
// first (B27 .. B0) and every bit-plane holds one bit of chain 11, then
// chain 10, ... chain 0. That is 12 x 28 = 336 serial bits per step.
//
// The block shifts the 336 bits of a step into one shift register and then
// presents the twelve rebuilt 28-bit words together for one cycle
// (out_valid), with the step number. The bit order is the one printed in
// the readout timing of the chip; the delay of START_DELAY clocks between
// the falling edge of the frame pulse and the first data bit is this
// design's choice (in hardware it is fixed by the link's input-delay
// constraints). One bit is taken per clock: clk is the LVDS bit clock
// (360 MHz for 1 kHz frames).
//
// Timing: out_valid of step p comes one clock after its last serial bit.
// busy is high from the frame pulse until the last step has been delivered.
module serial_parallel #(
  parameter int unsigned CHAINS      = 12,
  parameter int unsigned BITS        = 28,
  parameter int unsigned STEPS       = 1024,
  parameter int unsigned START_DELAY = 2
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         frame,      // frame pulse sent to the chip
  input  logic                         sdata,      // serial LVDS data (after the input buffer)
  output logic                         out_valid,
  output logic [$clog2(STEPS)-1:0]     out_step,
  output logic [CHAINS-1:0][BITS-1:0]  out_words,  // index = chain number
  output logic                         out_last,   // with the last step of a frame
  output logic                         busy
);
  localparam int unsigned NBITS = CHAINS * BITS;
  localparam int unsigned SW    = $clog2(STEPS);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_RECV} state_t;
  state_t state;

  logic                         frame_d;
  logic [$clog2(START_DELAY+1):0] dly;
  logic [$clog2(NBITS)-1:0]     bitcnt;
  logic [SW-1:0]                step;
  logic [NBITS-1:0]             sr;
  logic [NBITS-1:0]             sr_full;

  // Rebuild the words: serial bit k (k = 0 first) is plane k / CHAINS
  // (bit BITS-1-plane) of chain CHAINS-1 - k % CHAINS. After NBITS shifts
  // bit k sits at sr position NBITS-1-k.
  always_comb begin
    for (int c = 0; c < CHAINS; c++)
      for (int b = 0; b < BITS; b++)
        out_words[c][b] = sr_full[NBITS-1 - ((BITS-1-b)*CHAINS + (CHAINS-1-c))];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      frame_d   <= 1'b0;
      dly       <= '0;
      bitcnt    <= '0;
      step      <= '0;
      sr        <= '0;
      sr_full   <= '0;
      out_valid <= 1'b0;
      out_step  <= '0;
      out_last  <= 1'b0;
    end else begin
      frame_d   <= frame;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        S_IDLE: if (frame_d && !frame) begin
          dly   <= '0;
          state <= (START_DELAY == 0) ? S_RECV : S_WAIT;
          step  <= '0;
          bitcnt <= '0;
        end
        S_WAIT: begin
          dly <= dly + 1'b1;
          if (dly == ($bits(dly))'(START_DELAY - 1)) state <= S_RECV;
        end
        S_RECV: begin
          sr <= {sr[NBITS-2:0], sdata};
          if (bitcnt == ($bits(bitcnt))'(NBITS - 1)) begin
            bitcnt    <= '0;
            sr_full   <= {sr[NBITS-2:0], sdata};
            out_valid <= 1'b1;
            out_step  <= step;
            out_last  <= (step == SW'(STEPS - 1));
            step      <= step + 1'b1;
            if (step == SW'(STEPS - 1)) state <= S_IDLE;
          end else begin
            bitcnt <= bitcnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) || frame || frame_d || out_valid;
  // not needed: the oldest bit is only ever shifted out
  logic unused_bits;
  assign unused_bits = ^{sr[NBITS-1]};
endmodule
