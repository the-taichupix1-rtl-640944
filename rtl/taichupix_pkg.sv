// taichupix_pkg - constants and types shared by the TaichuPix1 readout logic.
//
// The pixel matrix has 96 double columns of 128 pixels (64 rows x 2 columns).
// Double columns 0..47 carry the FE-I3-like in-pixel logic, 48..95 the
// ALPIDE-like logic. Time is counted by an 8-bit timer at 40 MHz (25 ns per
// step). Each hit leaves the chip as one 32-bit word: data-available flag,
// 8-bit timestamp, 9-bit double-column address, 10-bit row address and a
// 4-bit pattern field. The field widths and bit positions are those of the
// chip's output format; putting the 7-bit in-column pixel address in the
// row field and sending the pattern as zero are choices of this design.
`timescale 1ns / 1ps

package taichupix_pkg;

  localparam int unsigned N_DCOL         = 96;   // double columns
  localparam int unsigned N_DCOL_FEI3    = 48;   // FE-I3-like double columns (0..47)
  localparam int unsigned N_PIX          = 128;  // pixels per double column
  localparam int unsigned PIX_AW         = 7;    // ADDRESS[6:0]
  localparam int unsigned TS_W           = 8;    // TIMER[7:0]
  localparam int unsigned N_GROUP        = 3;    // fast readout groups
  localparam int unsigned DCOL_PER_GROUP = 32;   // 64 columns per group
  localparam int unsigned DCOL_AW        = 7;    // enough for 96 double columns

  // Column hit record stored in fifo_column: {timestamp, pixel address}
  typedef struct packed {
    logic [TS_W-1:0]   ts;
    logic [PIX_AW-1:0] addr;
  } col_hit_t;

  localparam int unsigned COL_HIT_W = $bits(col_hit_t);  // 15

  // 32-bit output word
  typedef struct packed {
    logic        avail;     // [31]    1 = data valid
    logic [7:0]  ts;        // [30:23] timestamp
    logic [8:0]  dcol;      // [22:14] double-column address
    logic [9:0]  row;       // [13:4]  pixel address inside the double column
    logic [3:0]  pattern;   // [3:0]   compression pattern (sent as 0)
  } out_word_t;

  // Register map of the SPI configuration interface
  typedef enum logic [6:0] {
    REG_CTRL   = 7'h00,  // [0] trigger mode [1] debug mode [4:2] group enable
                         // [5] serializer enable [6] PRBS self-test
    REG_TRGLAT = 7'h01,  // [7:0] trigger latency, 25 ns ticks
    REG_TRGWIN = 7'h02,  // [2:0] trigger window, ticks (1..7)
    REG_IDAC   = 7'h03,  // [7:0] current DAC code
    REG_VDAC   = 7'h04,  // [9:0] voltage DAC code
    REG_PIXCFG = 7'h05,  // write: [6:0] dcol [13:7] pixel [14] mask [15] pulse enable
    REG_PULSE  = 7'h06,  // write: [0] DPULSE strobe [1] APULSE strobe
    REG_FIFO   = 7'h07,  // read : pops one word of fifo_chip (debug mode)
    REG_STATUS = 7'h08   // read : fifo_chip fill level
  } reg_addr_e;

endpackage
