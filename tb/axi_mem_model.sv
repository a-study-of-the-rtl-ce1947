// axi_mem_model -- behavioural AXI4 slave memory standing in for the DDR3
// memory controller (not synthesizable). Write and read channels run
// independently; ready signals stall at random when STALL is set. It
// flags bursts that cross a 4 KB boundary and counts bursts.
module axi_mem_model #(
  parameter int ADDR_W = 33,
  parameter bit STALL  = 1
) (
  input  logic              clk,
  input  logic [ADDR_W-1:0] awaddr,
  input  logic [7:0]        awlen,
  input  logic              awvalid,
  output logic              awready,
  input  logic [31:0]       wdata,
  input  logic              wlast,
  input  logic              wvalid,
  output logic              wready,
  output logic [1:0]        bresp,
  output logic              bvalid,
  input  logic              bready,
  input  logic [ADDR_W-1:0] araddr,
  input  logic [7:0]        arlen,
  input  logic              arvalid,
  output logic              arready,
  output logic [31:0]       rdata,
  output logic [1:0]        rresp,
  output logic              rlast,
  output logic              rvalid,
  input  logic              rready
);
  logic [31:0] mem [logic [ADDR_W-1:0]];
  int errors = 0;
  int wbursts = 0, rbursts = 0;

  function automatic bit stall();
    return STALL && ($urandom % 4 == 0);
  endfunction

  initial begin
    awready = 0; wready = 0; bvalid = 0; bresp = 0;
    forever begin
      logic [ADDR_W-1:0] a; int n;
      @(posedge clk);
      awready <= !stall();
      if (awvalid && awready) begin
        a = awaddr; n = awlen + 1;
        if ((a % 4096) + 4 * n > 4096) begin errors++; $display("AXI: write burst crosses 4KB at %h", a); end
        awready <= 0;
        for (int i = 0; i < n; ) begin
          wready <= !stall();
          @(posedge clk);
          if (wvalid && wready) begin
            mem[a + ADDR_W'(4 * i)] = wdata;
            if (wlast != (i == n - 1)) begin errors++; $display("AXI: wlast wrong"); end
            i++;
          end
        end
        wready <= 0;
        bvalid <= 1; bresp <= 0;
        do @(posedge clk); while (!bready);
        bvalid <= 0;
        wbursts++;
      end
    end
  end

  initial begin
    arready = 0; rvalid = 0; rlast = 0; rdata = 0; rresp = 0;
    forever begin
      logic [ADDR_W-1:0] a; int n;
      @(posedge clk);
      arready <= !stall();
      if (arvalid && arready) begin
        a = araddr; n = arlen + 1;
        if ((a % 4096) + 4 * n > 4096) begin errors++; $display("AXI: read burst crosses 4KB at %h", a); end
        arready <= 0;
        for (int i = 0; i < n; ) begin
          if (!stall()) begin
            rvalid <= 1;
            rdata  <= mem.exists(a + ADDR_W'(4 * i)) ? mem[a + ADDR_W'(4 * i)] : 32'hDEADBEEF;
            rlast  <= (i == n - 1);
            do @(posedge clk); while (!rready);
            i++;
          end else begin
            rvalid <= 0;
            @(posedge clk);
          end
        end
        rvalid <= 0; rlast <= 0;
        rbursts++;
      end
    end
  end
endmodule
