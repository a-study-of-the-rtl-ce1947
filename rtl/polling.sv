// polling -- round-robin merge of the FEE image streams into one stream.
//
// Each input is a recombined module stream (valid/ready, beats with
// start-of-frame and end-of-line flags). The arbiter grants one input at a
// time and keeps the grant until that input has delivered a whole module
// line (a beat with eol); only then does it move on, to the next input in
// turn that has data. Each beat passed on is tagged with its input number
// in the fee field. Lines are never interleaved, so a line is always
// contiguous downstream.
//
// Timing: no register in the data path; one beat per clock. Only the
// name of this stage is given for the readout firmware; the line-by-line
// round robin is this design's choice.
module polling
  import heps_pkg::*;
#(
  parameter int unsigned N_IN = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic      [N_IN-1:0]  in_valid,
  output logic      [N_IN-1:0]  in_ready,
  input  pix_beat_t [N_IN-1:0]  in_beat,
  output logic                  out_valid,
  input  logic                  out_ready,
  output pix_beat_t             out_beat
);
  localparam int unsigned GW = (N_IN > 1) ? $clog2(N_IN) : 1;

  logic [GW-1:0] grant;
  logic          mid_line;   // a line of the granted input is in progress

  always_comb begin
    out_valid       = in_valid[grant];
    out_beat        = in_beat[grant];
    out_beat.fee    = grant[0];
    in_ready        = '0;
    in_ready[grant] = out_ready;
  end

  // next input in turn with data, starting after the current grant
  logic [GW-1:0] next_g;
  always_comb begin
    next_g = grant;
    for (int k = N_IN - 1; k >= 1; k--) begin
      logic [GW-1:0] cand;
      cand = GW'((int'(grant) + k) % N_IN);
      if (in_valid[cand]) next_g = cand;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      grant    <= '0;
      mid_line <= 1'b0;
    end else if (out_valid && out_ready) begin
      if (out_beat.eol) begin
        mid_line <= 1'b0;
        grant    <= GW'((int'(grant) + 1) % N_IN);
      end else begin
        mid_line <= 1'b1;
      end
    end else if (!mid_line && !in_valid[grant]) begin
      grant <= next_g;
    end
  end
endmodule
