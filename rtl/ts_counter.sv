// ts_counter: dual-edge timestamp counter of the chip periphery.
//
// Two binary counters advance on opposite edges of the timestamp clock: one
// on the rising edge, one on the falling edge. Their sum is the number of
// clock edges since reset, so it advances every half period (6.25 ns at the
// 80 MHz timestamp clock); this is the leading-edge timestamp `ts_de`. The
// rising-edge counter alone is the full-period timestamp `ts_se` used for
// the trailing edge. Both are distributed to every hit-buffer cell.
// Dual-edge counting and the 80 MHz / 6.25 ns figures follow the chip
// description; the two-counter structure and the 11-bit width are this
// design's choice. `ts_de` is a combinational sum and may glitch right after
// an edge; the hit buffers sample it on the opposite edge, when it is stable.
// Both counters wrap modulo 2**TS_W.
`timescale 1ns / 1fs

module ts_counter
  import lfmp_pkg::*;
(
  input  logic            clk,     // timestamp clock, 80 MHz
  input  logic            rst_n,   // asynchronous, active low
  output logic [TS_W-1:0] ts_de,   // edges since reset (LSB = half period)
  output logic [TS_W-1:0] ts_se    // rising edges since reset (LSB = period)
);

  logic [TS_W-1:0] cnt_p, cnt_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cnt_p <= '0;
    else        cnt_p <= cnt_p + 1'b1;
  end

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) cnt_n <= '0;
    else        cnt_n <= cnt_n + 1'b1;
  end

  assign ts_de = cnt_p + cnt_n;
  assign ts_se = cnt_p;

endmodule
