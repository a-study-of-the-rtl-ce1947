# Readout firmware for a BP40 hybrid-pixel detector subunit

A detector subunit of the HEPS-BPIX pixel detector is a module of
256 × 576 pixels. It is built from two front-end boards (FEEs), and each
FEE carries twelve BP40 readout chips of 128 × 96 pixels. Each pixel
counts photons against two thresholds, with 14 bits per threshold, so a
pixel yields a 28-bit word. Each chip sends its whole frame over **one
LVDS line**. At 1000 frames per second that needs a 360 MHz bit clock.
The same chips take a 32-bit trim word for every pixel through four
serial chains. A full set of trim tables is far larger than the
FPGA's block RAM.

The firmware in this repository does two jobs on one FPGA:

* **Readout.** It turns 24 serial bit streams into one image stream in
  raster order, buffers it in DDR3 used as a very deep FIFO, and hands it
  to a 10 Gb/s or a 1 Gb/s TCP link.
* **Configuration.** It takes the per-pixel trim tables from the network
  one chip at a time, so only 1/12 of a FEE's tables is ever on chip. It
  also gives the host register access, over UDP and Wishbone, to I2C and
  SPI cores and to a few control registers.

The network stacks, the DDR3 controller, the chips and the boards are not
part of the RTL. Their signals are ports of the top module `u4fcp_top`.

## The serial readout order, and undoing it

This is the part that takes the most care.

A chip is cut into **12 readout chains** (`ARRAYOUT[11:0]`). Chain `c`
covers columns `8c … 8c+7`. It runs through them as a snake: down the
first column, up the second, and so on, for 8 × 128 = 1024 pixel steps.
All twelve chains share the one serial line:

```
for step p = 0 .. 1023:
  for bit b = 27 .. 0:           (bit-planes, MSB first)
    for chain c = 11 .. 0:
      send bit b of pixel (chain c, step p)
```

That is 336 serial bits per step and 344 064 bits per frame. At 360 MHz
this takes 955.7 µs, which fits inside the 1 ms frame period.

The pixel behind chain `c` at step `p`:

```
lc  = p / 128                         local column within the chain
row = (lc even) ? p % 128 : 127 - p % 128
col = 8c + lc
```

Undoing this takes three stages, one chip each:

1. **`serial_parallel`** shifts the 336 bits of a step into one register.
   It then presents all twelve 28-bit words at once, one clock after the
   last bit. Word `c`, bit `b` sits at shift-register position
   `335 − ((27 − b)·12 + (11 − c))`.
   * Data starts `START_DELAY` (= 2) clocks after the falling edge of the
     frame pulse.
   * `busy` covers the whole frame. The frame generator uses it to refuse
     frames that would overlap.
2. **`pingpong_bram`** writes the twelve words of a step into one bank,
   one word per clock, at address `row·96 + col`. That turns the snake
   into raster order. Meanwhile the other bank holds the previous frame:
   it is read in address order into the chip's output FIFO.
   * If no bank is free when a frame starts, the whole frame is dropped
     and `drop_count` goes up. A frame is never half-written.
3. **`recombination`** (one per FEE) builds the module raster from the
   twelve chip FIFOs.
   * The chips are tiled six wide and two high: chips 0–5 on top, 6–11
     below.
   * Module row `r` takes 96 pixels from each of chips `(r/128)·6 + 0 … 5`
     in turn.
   * A beat carries the pixel (zero-padded to 32 bits), `sof` on the first
     pixel of a frame and `eol` on the last pixel of a 576-pixel row.

**`polling`** then merges the two FEE streams. It grants one FEE a whole
row, up to its `eol`, and then moves to the other. It never interleaves
pixels inside a row, and it tags each beat with its FEE number.

**`ddr_fifo`** packs each beat into a 32-bit word:

| bits  | content         |
|-------|-----------------|
| 27:0  | pixel           |
| 28    | FEE             |
| 30    | end of line     |
| 31    | start of frame  |

It writes the words as AXI4 INCR bursts into a ring that spans the whole
2^33-byte (8 GB) address space.
* A burst is as long as the data in hand allows, up to 16 beats. It never
  crosses a 4 KB page.
* A read engine brings the words back as soon as their write response has
  arrived, and `out_sel` routes them to one of two output ports.
* DDR space counts as taken from the moment a write is issued until the
  read of it completes. A write therefore never overwrites data still
  being read back.
* When the ring is full, back-pressure reaches the chip FIFOs, and then
  the ping-pong buffers start dropping frames.

## Streaming the pixel configuration

Configuration also uses chains: four of them (`ARRAYIN[3:0]`), each 24
columns wide, again snaking through 128 rows. One CLK_SPI clocks all
twelve chips of a FEE, and an active-low chip select per chip decides who
listens. One chip takes 4 chains × 3072 pixels, i.e. 3072 × 32 =
98 304 CLK_SPI periods.

* **`tcp_ram`** receives the table of one chip in image order from the
  TCP stream.
  * It stores the table by chain: region `r = col / 24`, address
    `lc·128 + (lc even ? row : 127 − row)` with `lc = col % 24`. This is
    the order in which the bits must be shifted.
  * It has two banks. While `ldac_config` shifts one chip's table out of
    one bank, the network fills the other. The stream is held off
    (`in_ready` low) while both banks are full.
* **`ldac_config`** reads all four regions in parallel, one pixel ahead.
  It shifts each 32-bit word MSB first on the four `ARRAYIN` lines. CLK_SPI
  is the 125 MHz clock divided by 4 (31.25 MHz).
  * **Standard mode:** the chip selects go low one chip at a time, and
    each chip gets its own table.
  * **Calibration mode:** all twelve chip selects go low together and one
    table is shifted once, twelve times faster.
  * After the last chip, one CLK_SPI-long `refresh` pulse is sent.
  * Measured: a calibration-mode load takes 405 520 clocks of 125 MHz
    (3.2 ms). A standard-mode load of twelve chips takes about 12 times
    as long.

The pixel word layout in `heps_pkg::pix_cfg_t` is this design's choice:
`{pad[18:0], cal_en, gain[1:0], ldac_hi[4:0], ldac_lo[4:0]}`. The RTL
never looks inside the word.

## Slow control

A UDP register-access stream (RBCP) drives the host side. `rbcp_wb_bridge`
turns each single-byte read or write into one Wishbone cycle.
`addr[15:12]` selects the slave and `addr[7:0]` the register. Accesses to
an unused slave, or accesses that time out after 255 clocks, complete with
data 0.

| slave | core                      | registers (8 bit) |
|-------|---------------------------|-------------------|
| 0, 1  | `wb_i2c_master`, FEE 0 / 1 | 0/1 prescale lo/hi, 2 control (bit 7 enable), 3 TX (write) / RX (read), 4 command (write) / status (read) |
| 2, 3  | `wb_spi_master`, FEE 0 / 1 | 0 SPCR, 1 SPSR, 2 SPDR (write buffer / read buffer), 3 SPER |
| 4     | `ctrl_regs`               | 0 control, 1–4 frame period (little endian), 5 status |

### I2C command and status registers

* **Command:** `{STA, STO, RD, WR, ACK, –, –, IACK}`.
* **Status:** `{RxACK, BUSY, 0000, TIP, IF}`.
* **SCL period:** 4·(prescale+1) clocks, plus two clocks between bits.

The I2C core reaches the IOB's IO expanders, digital potentiometers and
power monitors.

### SPI

The SPI core loads the BP40 global parameters.
* Bytes written to SPDR are shifted out MSB first.
* SCK half period: 2^{ESPR,SPR} clocks.
* CPOL and CPHA are selectable.
* SPIF is raised after ICNT+1 bytes.
* A write into a full write buffer sets WCOL.

### Control register bits

* **Control (register 0):** bit 0 run, 1 external trigger, 2 calibration
  mode, 3 start configuration (self-clearing), 4 output port (0 =
  10 Gb/s, 1 = 1 Gb/s), 5 FEE whose pixel chains are configured.
* **Status (register 5):** bit 0 readout busy, 1 configuration busy,
  2 configuration done (sticky), 3 DDR full.
* **Frame period:** resets to 360 000 readout clocks (1 kHz).

`frame_gen` produces the frame pulse, four readout clocks wide:
* **Internal mode:** one pulse every `period` clocks.
* **External trigger mode:** one pulse per rising edge of `ext_trig`,
  4 clocks after the edge through a two-flop synchroniser.

While the chips are still sending, or a pulse is still active, a frame
that falls due is not issued. It is counted in `frame_skips`.

## Clocks

* **`clk`, 125 MHz:** the register bus, the I2C/SPI cores and the
  configuration path.
* **`clk_ro`, the LVDS bit clock (360 MHz):** the whole readout path,
  including the DDR AXI port.

`run`, `ext_trig`, `out_sel` and the two status bits cross between the
clocks through two-flop synchronisers. `frame_period` and `fee_sel` are
treated as static while in use: change them only while stopped.

## Files

| file | block |
|------|-------|
| `rtl/heps_pkg.sv` | geometry constants, Wishbone structs, stream beat, word layouts |
| `rtl/sync_fifo.sv` | first-word-fall-through FIFO (chip FIFOs, SPI buffers, DDR staging) |
| `rtl/serial_parallel.sv`, `rtl/pingpong_bram.sv`, `rtl/recombination.sv`, `rtl/polling.sv`, `rtl/ddr_fifo.sv` | readout path |
| `rtl/tcp_ram.sv`, `rtl/ldac_config.sv` | pixel configuration path |
| `rtl/rbcp_wb_bridge.sv`, `rtl/wb_i2c_master.sv`, `rtl/wb_spi_master.sv`, `rtl/ctrl_regs.sv`, `rtl/frame_gen.sv` | control |
| `rtl/u4fcp_top.sv` | the subunit |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_u4fcp_top.sv` | end-to-end test at reduced size |
| `tb/tb_u4fcp_full.sv` | one full-size operation with every top parameter at its default |
| `tb/bp40_model.sv`, `tb/axi_mem_model.sv`, `tb/i2c_slave_model.sv`, `tb/tb_heps_pkg.sv` | behavioural chip, DDR and I2C device models, and test helpers |

All parameter defaults are the real sizes:
* 2 FEEs, 12 chips, 128 × 96 pixels;
* 12 readout chains of 28 bits;
* 4 configuration chains of 32 bits;
* 33-bit DDR byte address.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Each has a watchdog. Example with Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_u4fcp_top \
  rtl/heps_pkg.sv tb/tb_heps_pkg.sv -y rtl -y tb tb/tb_u4fcp_top.sv
./obj_dir/Vtb_u4fcp_top
```

### End-to-end test (`tb_u4fcp_top`)

It uses chips of 4 × 24 pixels and an 8 KB DDR window. It runs the
following, and counts each as a mechanism that must occur at least once:
* an I2C write and read-back, and an SPI loop-back byte;
* a standard-mode configuration of FEE 0 and a calibration-mode
  configuration of FEE 1, checked bit by bit;
* internally timed frames, and frame skips caused by a too-short period;
* a switch of the output port;
* a stalled output that fills and wraps the DDR ring and makes the chips
  drop frames;
* externally triggered frames.

Every output beat is checked for chip, row, column and frame number.

### Full-size test (`tb_u4fcp_full`)

It loads a calibration table into the 12 chips of a FEE. It then reads
one 1 kHz frame from all 24 full-size chips and checks all 294 912
pixels. It also checks:
* the serial readout time of 344 064 clocks against the 360 000-clock
  period;
* the 98 304 CLK_SPI periods of a chip configuration.

It runs in about 20 s.

## How far it follows the source design, and where it departs

The following come from the description of the real firmware:
* the block structure;
* the chip geometry;
* the serial bit order;
* the snake chains;
* the two configuration modes;
* the streaming of trim tables one chip at a time;
* the DDR used as a FIFO;
* the two output links;
* the Wishbone I2C/SPI cores with the register names of the original cores.

These are choices of this design, and a reader must not take them as the
original firmware's:
* all register and address maps and bit positions;
* the DDR word packing and burst policy;
* the drop policy of the ping-pong buffers;
* the FEE arbitration granularity (one module row);
* the CLK_SPI divider and edge use;
* the frame pulse width, and the 2-clock start delay of the serial data;
* the use of 32 shift clocks per trim word.

On the last point, the description speaks once of 28-bit trim words but
sizes everything else for 32.

Known gaps and limits:
* **On-chip RAM.** Double-buffering a full frame of every chip needs
  24 × 2 × 12 288 × 28 bits = 16.5 Mb. The trim-table RAM adds 0.8 Mb.
  Together that is more than the 16 Mb of block RAM of the Kintex-7 the
  real board uses. The real firmware must buffer less per chip, and how it
  does so is not described.
* **The LVDS input stage** (IDELAY/ISERDES and its delay constraints) is
  not modelled. The deserialiser takes one already-sampled bit per clock.
* **The I2C core** has no clock stretching and no multi-master
  arbitration.
* **Global-parameter chip selects.** The SPI core has no chip select of
  its own. On the boards these come from the I2C IO expanders.
* **Outside the RTL:** the network stacks (TCP 10G/XGMII, TCP/UDP
  1G/RGMII), the DDR3 controller, voltage compensation (host software
  using the I2C monitors and potentiometers) and the aggregation of 40
  subunits.
