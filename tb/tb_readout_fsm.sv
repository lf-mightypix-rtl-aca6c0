// tb_readout_fsm: checks the periphery readout state machine.
//
// The 28 end-of-column circuits are modelled as queues of random hits. The
// serializer side is ready at random. Checked: every hit leaves exactly once
// as a packet with the right column, row and timestamps, in order within its
// column; the column served is the first non-empty one after the one served
// held_pkt (round robin); a packet stays stable while it waits; and with the
// serializer always ready and all columns filled, one packet leaves per
// clock cycle.
`timescale 1ns / 1fs

module tb_readout_fsm;
  import lfmp_pkg::*;

  localparam int COLS = N_COLS;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [COLS-1:0] eoc_valid, eoc_pop;
  logic [ROW_W-1:0] eoc_row [COLS];
  logic [TS_W-1:0] eoc_le [COLS], eoc_te [COLS];
  logic pkt_valid, pkt_ready = 1'b0;
  hit_pkt_t pkt;
  int checks = 0, failures = 0;

  initial #0.5 rst_n = 1'b0;   // falling edge so that the asynchronous reset acts

  hit_pkt_t q [COLS][$];     // hits waiting in each column
  hit_pkt_t sent [$];        // packets expected at the output, in order
  int made = 0, got = 0, stalls = 0, last_col = COLS - 1;

  readout_fsm #(.COLS(COLS)) dut (
    .clk(clk), .rst_n(rst_n), .eoc_valid(eoc_valid), .eoc_row(eoc_row), .eoc_le(eoc_le),
    .eoc_te(eoc_te), .eoc_pop(eoc_pop), .pkt_valid(pkt_valid), .pkt(pkt), .pkt_ready(pkt_ready));

  always #6.25 clk = ~clk;

  // drive the end-of-column outputs from the queues (called after each change)
  function automatic void refresh();
    for (int c = 0; c < COLS; c++) begin
      eoc_valid[c] = q[c].size() > 0;
      eoc_row[c]   = (q[c].size() > 0) ? q[c][0].row : '0;
      eoc_le[c]    = (q[c].size() > 0) ? q[c][0].le  : '0;
      eoc_te[c]    = (q[c].size() > 0) ? q[c][0].te  : '0;
    end
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  task automatic add_hit(input int c);
    hit_pkt_t h;
    h.col = COL_W'(c);
    h.row = ROW_W'($urandom_range(0, N_ROWS - 1));
    h.le  = TS_W'($urandom);
    h.te  = TS_W'($urandom);
    q[c].push_back(h);
    made++;
    refresh();
  endtask

  // one clock cycle of the environment; returns whether a packet left
  task automatic cycle(input bit ready_always, output bit left);
    int pops, exp_col;
    hit_pkt_t held_pkt;
    bit waiting;
    logic [COLS-1:0] pop_q;
    @(negedge clk);
    pkt_ready = ready_always || ($urandom_range(0, 2) == 0);
    #1;
    pops = $countones(eoc_pop);
    check(pops <= 1, "at most one pop");
    if (pops == 1) begin
      exp_col = -1;
      for (int i = 1; i <= COLS; i++)
        if (exp_col < 0 && eoc_valid[(last_col + i) % COLS]) exp_col = (last_col + i) % COLS;
      check(eoc_pop[exp_col], "round-robin order");
      sent.push_back(q[exp_col][0]);
      last_col = exp_col;
    end else begin
      check(!(|eoc_valid) || (pkt_valid && !pkt_ready), "pop when possible");
    end
    left    = pkt_valid && pkt_ready;
    waiting = pkt_valid && !pkt_ready;
    held_pkt  = pkt;
    if (left) begin
      check(sent.size() > 0 && pkt == sent[0], "packet content");
      if (sent.size() > 0) void'(sent.pop_front());
      got++;
    end
    pop_q = eoc_pop;
    @(posedge clk);
    #0.5;
    for (int c = 0; c < COLS; c++) if (pop_q[c]) void'(q[c].pop_front());
    refresh();
    #0.5;
    if (waiting) begin
      check(pkt_valid && pkt == held_pkt, "packet held while waiting");
      stalls++;
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit left;
    int n_left, cyc;
    refresh();
    #7 rst_n = 1'b1;   // just after a rising edge: the first cycle() sees the next one
    // random traffic, random back-pressure
    for (int i = 0; i < 3000; i++) begin
      if ($urandom_range(0, 3) == 0) add_hit($urandom_range(0, COLS - 1));
      cycle(1'b0, left);
    end
    repeat (400) cycle(1'b0, left);
    check(got == made, "all random hits delivered");
    // full rate: 10 hits in every column, serializer always ready
    for (int c = 0; c < COLS; c++) repeat (10) add_hit(c);
    n_left = 0; cyc = 0;
    while (n_left < 10 * COLS && cyc < 1000) begin
      cycle(1'b1, left);
      if (left) n_left++;
      cyc++;
    end
    check(cyc <= 10 * COLS + 2, "one packet per cycle");
    check(got == made && stalls > 0, "all delivered, stalls exercised");
    $display("made=%0d got=%0d stalls=%0d full-rate cycles=%0d", made, got, stalls, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
