// i2c_slave_model -- behavioural I2C slave with a 256-byte register file
// (not synthesizable), sampled on the system clock. First byte after the
// address sets the register pointer; further written bytes are stored at
// the pointer, which then increments. Reads return mem[pointer++].
// Addresses other than ADDR are not acknowledged.
module i2c_slave_model #(
  parameter logic [6:0] ADDR = 7'h50
) (
  input  logic clk,
  input  logic scl,
  input  logic sda,
  output logic sda_o      // 0 = pull SDA low
);
  logic [7:0] mem [256];
  logic [7:0] ptr;
  int writes = 0, reads = 0, starts = 0, stops = 0;

  logic scl_d = 1, sda_d = 1;
  typedef enum {IDLE, ADDRB, WRB, RDB, ACKW, ACKR} st_t;
  st_t st = IDLE;
  int  bitn = 0;
  logic [7:0] sr;
  logic first = 0, selected = 0, rd = 0, drive_ack = 0;
  logic [7:0] tx;

  initial begin
    sda_o = 1;
    for (int i = 0; i < 256; i++) mem[i] = 8'(i * 7 + 3);
    ptr = 0;
  end

  always @(posedge clk) begin
    scl_d <= scl; sda_d <= sda;
    if (scl && scl_d && sda_d && !sda) begin        // START
      starts++; st <= ADDRB; bitn <= 0; sda_o <= 1;
    end else if (scl && scl_d && !sda_d && sda) begin  // STOP
      stops++; st <= IDLE; sda_o <= 1;
    end else if (scl && !scl_d) begin               // rising SCL: sample
      case (st)
        ADDRB, WRB: begin
          sr = {sr[6:0], sda};
          if (bitn == 7) begin
            if (st == ADDRB) begin
              selected <= (sr[7:1] == ADDR); rd <= sr[0]; first <= 1;
            end else if (selected) begin
              if (first) ptr <= sr; else begin mem[ptr] <= sr; ptr <= ptr + 1; writes++; end
              first <= 0;
            end
            st <= ACKW; bitn <= 0;
          end else bitn <= bitn + 1;
        end
        ACKR: begin   // master ack after a read byte
          if (sda) st <= IDLE; else begin st <= ACKW; drive_ack <= 1; end
        end
        RDB: bitn <= bitn + 1;
        default: ;
      endcase
    end else if (!scl && scl_d) begin               // falling SCL: drive
      case (st)
        ACKW: if (!drive_ack) begin
                sda_o <= selected ? 1'b0 : 1'b1;
                drive_ack <= 1;
              end else begin
                drive_ack <= 0;
                bitn <= 0;
                if (rd && selected) begin
                  tx = mem[ptr]; ptr <= ptr + 1; reads++;
                  sr <= tx; sda_o <= tx[7]; st <= RDB;
                end else begin
                  sda_o <= 1; st <= selected ? WRB : IDLE;
                end
              end
        RDB:  if (bitn == 8) begin sda_o <= 1; st <= ACKR; end
              else sda_o <= sr[7 - bitn];
        default: ;
      endcase
    end
  end
endmodule
