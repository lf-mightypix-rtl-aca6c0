// tb_hit_buffer_cell: checks one hit-buffer cell against edge counting.
//
// The timestamp counter runs as in the chip (80 MHz, reset released while
// the clock is low, so edge n falls at n * 6.25 ns). Comparator pulses start
// at random times that never coincide with a clock edge. For each recorded
// pulse the expected leading-edge stamp is the number of clock edges before
// the rise, floor(t_rise / 6.25 ns), and the trailing-edge stamp the number
// of rising edges before the fall. Also checked: a pulse that arrives while
// the cell is full is not recorded, a pulse still high when the cell is read
// is not recorded (no re-arm without a low level), a pulse between two clock
// edges is missed, and `rd` empties the cell in one cycle.
`timescale 1ns / 1fs

module tb_hit_buffer_cell;
  import lfmp_pkg::*;

  localparam realtime HALF = 6.25;

  logic clk = 1'b0, rst_n = 1'b1, comp = 1'b0, rd = 1'b0;
  logic [TS_W-1:0] ts_de, ts_se, le, te;
  logic full;
  int checks = 0, failures = 0;

  initial #0.5 rst_n = 1'b0;   // falling edge so that the asynchronous reset acts
  int n_hits = 0, n_lost = 0, n_short = 0, n_nore = 0, n_odd = 0;

  ts_counter u_ts (.clk(clk), .rst_n(rst_n), .ts_de(ts_de), .ts_se(ts_se));
  hit_buffer_cell dut (.clk(clk), .rst_n(rst_n), .comp(comp), .ts_de(ts_de), .ts_se(ts_se),
                       .rd(rd), .full(full), .le(le), .te(te));

  always #HALF clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %t: full=%0d le=%0d te=%0d", what, $realtime, full, le, te);
    end
  endtask

  function automatic int edges_before(realtime t);
    return int'($floor(t / HALF));
  endfunction

  function automatic int rises_before(realtime t);
    return (edges_before(t) + 1) / 2;
  endfunction

  // wait until just after a clock edge plus a random offset
  task automatic to_random_phase();
    @(clk);
    #(0.5 + 0.25 * $urandom_range(0, 21));
  endtask

  // pulse that spans `n_edges` clock edges and ends at a random phase
  task automatic pulse(input int n_edges, output realtime t_r, output realtime t_f);
    comp = 1'b1; t_r = $realtime;
    repeat (n_edges) @(clk);
    #(0.5 + 0.25 * $urandom_range(0, 21));
    comp = 1'b0; t_f = $realtime;
  endtask

  task automatic read_out();
    @(negedge clk); rd = 1'b1;
    @(negedge clk); rd = 1'b0;
    check(!full, "cleared by rd");
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime tr, tf, dummy_r, dummy_f;
    logic [TS_W-1:0] le_exp, te_exp;
    #3.0 rst_n = 1'b1;
    repeat (3) @(posedge clk);
    check(!full, "empty after reset");
    for (int it = 0; it < 400; it++) begin
      // a normal pulse that spans at least one clock edge
      to_random_phase();
      pulse($urandom_range(1, 40), tr, tf);
      le_exp = TS_W'(edges_before(tr));
      te_exp = TS_W'(rises_before(tf));
      repeat (2) @(posedge clk);
      #1;
      check(full, "pulse recorded");
      check(le == le_exp, "leading edge");
      check(te == te_exp, "trailing edge");
      n_hits++;
      if (le[0]) n_odd++;
      // a second pulse while the cell is full is lost
      if ($urandom_range(0, 3) == 0) begin
        to_random_phase();
        pulse(2, dummy_r, dummy_f);
        repeat (2) @(posedge clk);
        #1;
        check(full && le == le_exp && te == te_exp, "held data kept");
        n_lost++;
      end
      // a pulse still high when the cell is read is not recorded
      if ($urandom_range(0, 4) == 0) begin
        to_random_phase();
        comp = 1'b1;
        read_out();
        repeat (3) @(posedge clk);
        comp = 1'b0;
        repeat (3) @(posedge clk);
        #1;
        check(!full, "no re-arm while high");
        n_nore++;
      end else begin
        read_out();
      end
      // a pulse between two edges is not seen
      if ($urandom_range(0, 4) == 0) begin
        @(clk);
        #1.0;
        comp = 1'b1;
        #3.0;
        comp = 1'b0;
        repeat (3) @(posedge clk);
        #1;
        check(!full, "short pulse missed");
        n_short++;
      end
    end
    check(n_odd > 0 && n_lost > 0 && n_nore > 0 && n_short > 0, "all cases exercised");
    $display("hits=%0d odd_le=%0d lost=%0d no_rearm=%0d short=%0d", n_hits, n_odd, n_lost, n_nore, n_short);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
