// pixel_config_ram: the 5-bit configuration memory inside every pixel.
//
// Holds the 4-bit threshold trim (TDAC) and the 1-bit switch that enables the
// comparator output. The five bits are written together when `we` is high at
// a rising clock edge and are read continuously by the analog front-end.
// The chip stores these bits in a small per-pixel RAM; here it is a 5-bit
// register. The write path (one word addressed by column and row from the
// periphery) and the reset value (TDAC 0, comparator disabled, so that an
// unconfigured matrix stays quiet) are this design's own choices: the chip
// description does not say how the bits are loaded.
`timescale 1ns / 1fs

module pixel_config_ram
  import lfmp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,     // asynchronous, active low
  input  logic     we,        // write strobe for this pixel
  input  pix_cfg_t wdata,
  output pix_cfg_t cfg        // stored word, drives TDAC and en_comp
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  cfg <= '0;
    else if (we) cfg <= wdata;
  end

endmodule
