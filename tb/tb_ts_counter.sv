// tb_ts_counter: checks the dual-edge timestamp counter.
//
// An 80 MHz clock (12.5 ns) runs for more than one wrap of the 11-bit
// counters. The testbench counts clock edges and rising edges itself and,
// 1 ns after every edge, expects ts_de to equal the edge count and ts_se the
// rising-edge count, both modulo 2**11. It also checks that ts_de advances
// every 6.25 ns, i.e. once per half period.
`timescale 1ns / 1fs

module tb_ts_counter;
  import lfmp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1;
  logic [TS_W-1:0] ts_de, ts_se;
  int checks = 0, failures = 0;

  initial #0.5 rst_n = 1'b0;   // falling edge so that the asynchronous reset acts
  int edges = 0, rises = 0;
  realtime t_last;

  ts_counter dut (.clk(clk), .rst_n(rst_n), .ts_de(ts_de), .ts_se(ts_se));

  always #6.25 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %t: de=%0d se=%0d edges=%0d rises=%0d",
                                  what, $realtime, ts_de, ts_se, edges, rises);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [TS_W-1:0] prev;
    #3.0;                         // clock is low
    check(ts_de == 0 && ts_se == 0, "reset value");
    rst_n = 1'b1;
    prev   = ts_de;
    t_last = $realtime;
    repeat (4200) begin
      @(clk);
      if (clk) rises++;
      edges++;
      #1;
      check(ts_de == TS_W'(edges), "dual-edge count");
      check(ts_se == TS_W'(rises), "single-edge count");
      if (ts_de != prev) begin
        if (edges > 1) check($realtime - t_last == 6.25, "half-period step");
        t_last = $realtime;
      end
      prev = ts_de;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
