// ser_rx: receiver model of the serial output, for the testbenches.
//
// Samples the line on the falling edge of the bit clock (the transmitter
// changes it on the rising edge), finds the symbol boundary from the first
// K28.5 comma, then decodes every 10 bits with the reference 8b/10b decoder.
// Data characters are collected four at a time, first byte most significant,
// into 32-bit words. Counts commas, invalid symbols, commas inside a packet
// and packets that followed the previous one without a comma in between.
`timescale 1ns / 1fs

module ser_rx
  import ref8b10b_pkg::*;
(
  input logic clk_ser,
  input logic rst_n,
  input logic ser_out
);

  localparam logic [9:0] COMMA_N = 10'b0011111010;
  localparam logic [9:0] COMMA_P = 10'b1100000101;

  logic [31:0] words [$];     // received packets, oldest first
  realtime     word_t [$];    // arrival time of each
  int          n_comma = 0, n_err = 0, n_b2b = 0;

  logic [9:0]  win = '0;
  logic [31:0] acc = '0;
  bit          aligned = 0, prev_last = 0;
  int          bitpos = 0, nbytes = 0;

  always @(negedge clk_ser) begin
    logic [7:0] d;
    bit         k, ok;
    if (rst_n) begin
      win = {win[8:0], ser_out};
      if (!aligned) begin
        if (win == COMMA_N || win == COMMA_P) begin
          aligned = 1;
          bitpos  = 0;
          n_comma++;
        end
      end else begin
        bitpos++;
        if (bitpos == 10) begin
          bitpos = 0;
          if (win == COMMA_N || win == COMMA_P) begin
            if (nbytes != 0) n_err++;
            n_comma++;
            prev_last = 0;
          end else begin
            decode(win, d, k, ok);
            if (!ok || k) n_err++;
            else begin
              if (nbytes == 0 && prev_last) n_b2b++;
              acc = {acc[23:0], d};
              nbytes++;
              prev_last = 0;
              if (nbytes == 4) begin
                words.push_back(acc);
                word_t.push_back($realtime);
                nbytes    = 0;
                prev_last = 1;
              end
            end
          end
        end
      end
    end
  end

endmodule
