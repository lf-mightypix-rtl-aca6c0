// end_of_column: column-drain end-of-column circuit.
//
// Every column of hit-buffer cells shares one end-of-column circuit, which
// sits between the cells and the readout state machine of the periphery. When
// its output register is free (or is being emptied by `pop` in the same
// cycle) and at least one cell of the column is full, it copies the full cell
// with the lowest row number into the register and pulses that cell's `rd`,
// which clears the cell at the same clock edge. A column therefore drains one
// hit per clock cycle. The register is offered to the state machine through
// `valid`/`row`/`le`/`te` and is released with `pop`.
//
// The column-drain architecture and the end-of-column circuit as mediator
// follow the chip description; the one-entry register, the lowest-row-first
// priority and the one-cycle timing are this design's own choices.
`timescale 1ns / 1fs

module end_of_column
  import lfmp_pkg::*;
#(
  parameter int unsigned ROWS = N_ROWS
) (
  input  logic             clk,
  input  logic             rst_n,
  // column bus to the cells
  input  logic [ROWS-1:0]  cell_full,
  input  logic [TS_W-1:0]  cell_le [ROWS],
  input  logic [TS_W-1:0]  cell_te [ROWS],
  output logic [ROWS-1:0]  cell_rd,
  // towards the readout state machine
  output logic             valid,
  output logic [ROW_W-1:0] row,
  output logic [TS_W-1:0]  le,
  output logic [TS_W-1:0]  te,
  input  logic             pop
);

  logic             load;
  logic             any_full;
  logic [ROW_W-1:0] sel;

  // priority encoder: lowest full row wins
  always_comb begin
    any_full = 1'b0;
    sel      = '0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      if (cell_full[r]) begin
        any_full = 1'b1;
        sel      = ROW_W'(r);
      end
    end
  end

  assign load = any_full && (!valid || pop);

  always_comb begin
    cell_rd = '0;
    if (load) cell_rd[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      row   <= '0;
      le    <= '0;
      te    <= '0;
    end else if (load) begin
      valid <= 1'b1;
      row   <= sel;
      le    <= cell_le[sel];
      te    <= cell_te[sel];
    end else if (pop) begin
      valid <= 1'b0;
    end
  end

  // the state machine only pops a register that holds a hit
  a_pop_valid: assert property (@(posedge clk) disable iff (!rst_n) pop |-> valid);

endmodule
