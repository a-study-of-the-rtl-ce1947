// rbcp_wb_bridge -- turns single-byte register accesses arriving over UDP
// (the RBCP register-access protocol of the 1 Gb/s network stack) into
// Wishbone cycles, and decodes the address onto the slave cores.
//
// A write (rbcp_we) or read (rbcp_re) pulse with rbcp_addr and rbcp_wd
// starts one Wishbone access to the slave chosen by addr[15:12]; the low
// byte of the address is the register inside that slave. When the slave
// acknowledges, rbcp_ack pulses for one clock with the read data on
// rbcp_rd. Accesses to an unused slave number, or that get no ack within
// TIMEOUT clocks, are acknowledged with data 0 so the host never hangs.
//
// Slave map of the subunit: 0, 1 = I2C cores of FEE 0 / 1; 2, 3 = SPI
// cores of FEE 0 / 1; 4 = control registers. That map and the choice of
// the RBCP command interface are this design's; the firmware is described
// only as carrying a UDP-to-Wishbone bridge in front of several I2C and
// SPI cores.
module rbcp_wb_bridge
  import heps_pkg::*;
#(
  parameter int unsigned N_SLV   = 5,
  parameter int unsigned TIMEOUT = 255
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 rbcp_act,
  input  logic [31:0]          rbcp_addr,
  input  logic                 rbcp_we,
  input  logic [7:0]           rbcp_wd,
  input  logic                 rbcp_re,
  output logic                 rbcp_ack,
  output logic [7:0]           rbcp_rd,
  output wb_req_t [N_SLV-1:0]  wb_req,
  input  wb_rsp_t [N_SLV-1:0]  wb_rsp
);
  logic        active;
  logic [3:0]  sel;
  logic        we;
  logic [7:0]  adr, dat;
  logic [7:0]  tmo;

  wire valid_sel = (int'(sel) < N_SLV);
  wire slv_ack   = valid_sel && wb_rsp[sel].ack;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active <= 1'b0; sel <= '0; we <= 1'b0; adr <= '0; dat <= '0; tmo <= '0;
      rbcp_ack <= 1'b0; rbcp_rd <= '0;
    end else begin
      rbcp_ack <= 1'b0;
      if (!active) begin
        if (rbcp_act && (rbcp_we || rbcp_re)) begin
          active <= 1'b1;
          sel    <= rbcp_addr[15:12];
          adr    <= rbcp_addr[7:0];
          we     <= rbcp_we;
          dat    <= rbcp_wd;
          tmo    <= '0;
        end
      end else begin
        tmo <= tmo + 1'b1;
        if (slv_ack || !valid_sel || tmo == 8'(TIMEOUT)) begin
          active   <= 1'b0;
          rbcp_ack <= 1'b1;
          rbcp_rd  <= (slv_ack && !we) ? wb_rsp[sel].dat : 8'h00;
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N_SLV; i++) begin
      wb_req[i]     = '0;
      wb_req[i].adr = adr;
      wb_req[i].dat = dat;
      wb_req[i].we  = we;
      if (active && int'(sel) == i && !wb_rsp[i].ack) begin
        wb_req[i].cyc = 1'b1;
        wb_req[i].stb = 1'b1;
      end
    end
  end
  // not needed: address bits outside the slave and register fields
  logic unused_bits;
  assign unused_bits = ^{rbcp_addr[31:16], rbcp_addr[11:8]};
endmodule
