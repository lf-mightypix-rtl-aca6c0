// hit_buffer_cell: one hit-buffer cell, paired with one pixel.
//
// It records the timestamps of the leading and trailing edge of the pixel's
// comparator output and holds them until the end-of-column circuit reads the
// cell out. The chip stores the two timestamps in DRAM inside the cell; here
// they are registers.
//
// Operation. The comparator output `comp` is asynchronous. It is sampled on
// both clock edges: on the falling edge together with the dual-edge
// timestamp, and again on the rising edge. On each rising edge the cell looks
// at the last two samples and takes as leading edge the timestamp of the
// first sample that saw the comparator high after it had been low, so the
// leading edge is resolved to half a clock period (6.25 ns at 80 MHz). The
// trailing edge is taken on the first rising edge that sees the comparator
// low again, with the single-edge timestamp (12.5 ns). The cell then reports
// `full` until `rd` is high at a rising edge. While it is full, or while the
// comparator is still high from an earlier pulse, new pulses are not
// recorded: the cell has a dead time until it is read out and re-armed.
//
// Timing: `le` = number of timestamp-clock edges before the rise was seen,
// `te` = number of rising edges before the fall was seen. A pulse shorter
// than half a clock period may be missed. Storing both edges per pixel
// follows the chip description; the edge sampling, the state machine and the
// dead-time rule are this design's own.
`timescale 1ns / 1fs

module hit_buffer_cell
  import lfmp_pkg::*;
(
  input  logic            clk,     // timestamp clock
  input  logic            rst_n,   // asynchronous, active low
  input  logic            comp,    // comparator output of the pixel
  input  logic [TS_W-1:0] ts_de,   // dual-edge timestamp
  input  logic [TS_W-1:0] ts_se,   // single-edge timestamp
  input  logic            rd,      // read and clear, from end of column
  output logic            full,
  output logic [TS_W-1:0] le,
  output logic [TS_W-1:0] te
);

  typedef enum logic [1:0] {EMPTY, HIGH, HELD} cell_state_t;

  cell_state_t     state;
  logic            comp_n;    // sample at the last falling edge
  logic [TS_W-1:0] ts_n;      // timestamp at the last falling edge
  logic            comp_p;    // sample at the previous rising edge

  always_ff @(negedge clk or negedge rst_n) begin
    if (!rst_n) begin
      comp_n <= 1'b0;
      ts_n   <= '0;
    end else begin
      comp_n <= comp;
      ts_n   <= ts_de;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= EMPTY;
      comp_p <= 1'b0;
      le     <= '0;
      te     <= '0;
    end else begin
      comp_p <= comp;
      unique case (state)
        EMPTY: begin
          if (comp_n && !comp_p) begin
            // rose during the high half of the last period
            le <= ts_n;
            if (comp) state <= HIGH;
            else begin
              te    <= ts_se;
              state <= HELD;
            end
          end else if (comp && !comp_n) begin
            // rose during the low half of the last period
            le    <= ts_de;
            state <= HIGH;
          end
        end
        HIGH: begin
          if (!comp) begin
            te    <= ts_se;
            state <= HELD;
          end
        end
        HELD: begin
          if (rd) state <= EMPTY;
        end
        default: state <= EMPTY;
      endcase
    end
  end

  assign full = (state == HELD);

endmodule
