// lfmp_pkg: constants and types shared by the LF-MightyPix readout.
//
// The matrix size (28 columns x 23 rows), the 5-bit pixel configuration
// (4-bit TDAC plus a comparator enable) and the 32-bit output packet follow
// the chip description. The widths inside the packet are this design's own
// choice: 5-bit column and row addresses, an 11-bit leading-edge timestamp in
// units of half a timestamp-clock period (6.25 ns at 80 MHz) and an 11-bit
// trailing-edge timestamp in units of a full period (12.5 ns). Together they
// fill exactly 32 bits.
`timescale 1ns / 1fs

package lfmp_pkg;

  localparam int unsigned N_COLS = 28;
  localparam int unsigned N_ROWS = 23;
  localparam int unsigned COL_W  = 5;
  localparam int unsigned ROW_W  = 5;
  localparam int unsigned TS_W   = 11;
  localparam int unsigned TDAC_W = 4;
  localparam int unsigned PKT_W  = 32;
  localparam int unsigned CHG_W  = 16;   // charge in electrons, behavioural front-end only

  // 5-bit in-pixel configuration RAM word
  typedef struct packed {
    logic [TDAC_W-1:0] tdac;     // comparator threshold trim
    logic              en_comp;  // 1: comparator output enabled
  } pix_cfg_t;

  // one hit as it leaves the chip, MSB first on the serial line
  typedef struct packed {
    logic [COL_W-1:0] col;
    logic [ROW_W-1:0] row;
    logic [TS_W-1:0]  le;   // leading edge, dual-edge counter (6.25 ns LSB)
    logic [TS_W-1:0]  te;   // trailing edge, single-edge counter (12.5 ns LSB)
  } hit_pkt_t;

  // comma character sent when no packet is pending (K28.5)
  localparam logic [7:0] K28_5 = 8'hBC;

endpackage
