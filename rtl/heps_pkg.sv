// heps_pkg -- constants and types shared by the subunit readout firmware.
//
// Geometry follows the readout system described for the BP40-based
// subunit: a FEE carries 12 BP40 chips tiled 6 x 2, each chip 128 rows by
// 96 columns. For readout a chip is cut into 12 chains (ARRAYOUT) of 8
// columns, and each pixel word is 28 bits (two 14-bit threshold counters).
// For pixel configuration the same chip is cut into 4 chains (ARRAYIN) of
// 24 columns, and each pixel takes 32 shift clocks. The field layout of
// the pixel-configuration word and the order of the two counters inside
// the readout word are this design's own choice.
package heps_pkg;

  localparam int unsigned CHIPS_PER_FEE = 12;
  localparam int unsigned N_FEE         = 2;
  localparam int unsigned CHIPS_X       = 6;
  localparam int unsigned CHIPS_Y       = 2;
  localparam int unsigned CHIP_ROWS     = 128;
  localparam int unsigned CHIP_COLS     = 96;
  localparam int unsigned RO_REGIONS    = 12;   // ARRAYOUT[11:0]
  localparam int unsigned RO_BITS       = 28;   // B27..B0
  localparam int unsigned CNT_BITS      = 14;   // per threshold
  localparam int unsigned CFG_REGIONS   = 4;    // ARRAYIN[3:0]
  localparam int unsigned CFG_BITS      = 32;   // shift clocks per pixel

  // Readout word of one pixel: two threshold counters.
  typedef struct packed {
    logic [CNT_BITS-1:0] cnt_hi;
    logic [CNT_BITS-1:0] cnt_lo;
  } pix_word_t;

  // Pixel configuration word as shifted into ARRAYIN.
  typedef struct packed {
    logic [18:0] pad;        // zero padding
    logic        cal_en;     // calibration input enable
    logic [1:0]  gain;       // preamplifier gain
    logic [4:0]  ldac_hi;    // local threshold trim, high threshold
    logic [4:0]  ldac_lo;    // local threshold trim, low threshold
  } pix_cfg_t;

  // Wishbone (classic, single access) request and response.
  typedef struct packed {
    logic        cyc;
    logic        stb;
    logic        we;
    logic [7:0]  adr;
    logic [7:0]  dat;
  } wb_req_t;

  typedef struct packed {
    logic        ack;
    logic [7:0]  dat;
  } wb_rsp_t;

  // One beat of the image stream after recombination.
  typedef struct packed {
    logic        sof;   // first pixel of a module frame
    logic        eol;   // last pixel of a module line
    logic        fee;   // which FEE (set by polling)
    logic [31:0] data;  // zero-padded pixel word
  } pix_beat_t;

endpackage
