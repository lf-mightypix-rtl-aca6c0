// tb_end_of_column: checks the column-drain end-of-column circuit.
//
// The testbench models the 23 cells of one column: cells become full at
// random with random timestamps and are cleared when their `rd` is high at a
// clock edge. The state machine side pops the register at random. Checked
// every cycle: `rd` is one-hot and selects the lowest full row; a load
// happens exactly when a cell is full and the register is free or popped
// (one hit per cycle); the register then holds that cell's row and
// timestamps; every hit made full is delivered exactly once.
`timescale 1ns / 1fs

module tb_end_of_column;
  import lfmp_pkg::*;

  localparam int ROWS = N_ROWS;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [ROWS-1:0] cell_full = '0, cell_rd;
  logic [TS_W-1:0] cell_le [ROWS], cell_te [ROWS];
  logic valid, pop = 1'b0;
  logic [ROW_W-1:0] row;
  logic [TS_W-1:0] le, te;
  int checks = 0, failures = 0;

  initial #0.5 rst_n = 1'b0;   // falling edge so that the asynchronous reset acts
  int made = 0, delivered = 0, back_to_back = 0, multi = 0;

  end_of_column #(.ROWS(ROWS)) dut (
    .clk(clk), .rst_n(rst_n), .cell_full(cell_full), .cell_le(cell_le), .cell_te(cell_te),
    .cell_rd(cell_rd), .valid(valid), .row(row), .le(le), .te(te), .pop(pop));

  always #6.25 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_row;
    logic [TS_W-1:0] exp_le, exp_te;
    bit   exp_load, was_valid, was_pop;
    logic [ROWS-1:0] rd_q;
    for (int r = 0; r < ROWS; r++) begin
      cell_le[r] = '0;
      cell_te[r] = '0;
    end
    #3 rst_n = 1'b1;
    repeat (3000) begin
      @(negedge clk);
      // new hits in empty cells
      for (int r = 0; r < ROWS; r++)
        if (!cell_full[r] && $urandom_range(0, 15) == 0) begin
          cell_full[r] = 1'b1;
          cell_le[r]   = TS_W'($urandom);
          cell_te[r]   = TS_W'($urandom);
          made++;
        end
      pop = valid && ($urandom_range(0, 2) != 0);
      #1;
      // expected decision of this cycle
      exp_row = -1;
      for (int r = ROWS - 1; r >= 0; r--) if (cell_full[r]) exp_row = r;
      exp_load = (exp_row >= 0) && (!valid || pop);
      if ($countones(cell_full) > 1) multi++;
      check($countones(cell_rd) == (exp_load ? 1 : 0), "rd one-hot when loading");
      if (exp_load) begin
        check(cell_rd[exp_row], "lowest full row selected");
        exp_le = cell_le[exp_row];
        exp_te = cell_te[exp_row];
        if (pop) back_to_back++;
      end
      was_valid = valid;
      was_pop   = pop;
      rd_q = cell_rd;
      @(posedge clk);
      #0.5;
      if (was_pop) delivered++;
      for (int r = 0; r < ROWS; r++) if (rd_q[r]) cell_full[r] = 1'b0;
      #0.5;
      if (exp_load) begin
        check(valid, "register loaded");
        check(row == ROW_W'(exp_row) && le == exp_le && te == exp_te, "register content");
      end else if (was_pop) begin
        check(!valid, "register released");
      end else begin
        check(valid == was_valid, "register kept");
      end
    end
    // drain
    pop = 1'b0;
    repeat (200) begin
      @(negedge clk);
      pop = valid;
      #1;
      rd_q = cell_rd;
      @(posedge clk);
      #0.5;
      if (pop) delivered++;
      for (int r = 0; r < ROWS; r++) if (rd_q[r]) cell_full[r] = 1'b0;
    end
    check(delivered == made, "every hit delivered once");
    check(back_to_back > 0 && multi > 0, "all cases exercised");
    $display("made=%0d delivered=%0d back_to_back=%0d", made, delivered, back_to_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
