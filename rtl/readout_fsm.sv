// readout_fsm: periphery state machine that drains the end-of-column circuits.
//
// In state IDLE it searches, round robin starting after the last column it
// served, for an end-of-column circuit that holds a hit. It pops that hit,
// adds the column number, places the 32-bit packet in its output register
// and goes to SEND. In SEND the packet is offered to the serializer with a
// valid/ready handshake; in the cycle the serializer accepts it the machine
// can already pop the next hit, so with a ready serializer one packet leaves
// per clock cycle. The chip description names this state machine and its
// role between the columns and the serializer; the round-robin order and the
// handshake are this design's own.
`timescale 1ns / 1fs

module readout_fsm
  import lfmp_pkg::*;
#(
  parameter int unsigned COLS = N_COLS
) (
  input  logic             clk,
  input  logic             rst_n,
  // end-of-column side
  input  logic [COLS-1:0]  eoc_valid,
  input  logic [ROW_W-1:0] eoc_row [COLS],
  input  logic [TS_W-1:0]  eoc_le  [COLS],
  input  logic [TS_W-1:0]  eoc_te  [COLS],
  output logic [COLS-1:0]  eoc_pop,
  // serializer side
  output logic             pkt_valid,
  output hit_pkt_t         pkt,
  input  logic             pkt_ready
);

  typedef enum logic {IDLE, SEND} ro_state_t;

  ro_state_t        state;
  logic [COL_W-1:0] last;      // column served last
  logic [COL_W-1:0] pick;
  logic             found;
  logic             take;

  // round-robin search: first valid column after `last`
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int i = 1; i <= COLS; i++) begin
      automatic logic [COL_W-1:0] c = COL_W'((int'(last) + i) % COLS);
      if (!found && eoc_valid[c]) begin
        found = 1'b1;
        pick  = c;
      end
    end
  end

  assign take = found && (state == IDLE || pkt_ready);

  always_comb begin
    eoc_pop = '0;
    if (take) eoc_pop[pick] = 1'b1;
  end

  assign pkt_valid = (state == SEND);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      last  <= COL_W'(COLS - 1);
      pkt   <= '0;
    end else begin
      if (take) begin
        state <= SEND;
        last  <= pick;
        pkt   <= '{col: pick, row: eoc_row[pick], le: eoc_le[pick], te: eoc_te[pick]};
      end else if (state == SEND && pkt_ready) begin
        state <= IDLE;
      end
    end
  end

  // a packet stays stable until the serializer takes it
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           pkt_valid && !pkt_ready |=> pkt_valid && $stable(pkt));

endmodule
