// tb_serializer: checks packet transfer, encoding and line rate.
//
// The packet side runs at 80 MHz, the bit clock at 1.28 GHz (0.78125 ns).
// Random 32-bit words are offered with random gaps and then as a
// continuous burst. The line is decoded by an independent receiver model.
// Checked: every word arrives once, in order and unchanged; no invalid
// symbol and no comma inside a packet; the idle line carries commas;
// packets are sent back to back when words are waiting; each accepted word
// reaches the receiver within 2 packet times; and during the burst a
// packet leaves at least every 60 bit periods (the 40 bits of one packet
// plus the clock-crossing overhead).
`timescale 1ns / 1fs

module tb_serializer;
  import lfmp_pkg::*;

  localparam realtime T_BIT = 0.78125;

  logic clk_ro = 1'b0, clk_ser = 1'b0, rst_n = 1'b1;
  logic wr_valid = 1'b0, wr_ready, ser_out;
  logic [PKT_W-1:0] wr_data = '0;
  int checks = 0, failures = 0;

  initial #0.5 rst_n = 1'b0;   // falling edge so that the asynchronous reset acts
  logic [31:0] sent [$];
  realtime sent_t [$];

  serializer dut (.clk_ro(clk_ro), .clk_ser(clk_ser), .rst_n(rst_n), .wr_valid(wr_valid),
                  .wr_data(wr_data), .wr_ready(wr_ready), .ser_out(ser_out));
  ser_rx rx (.clk_ser(clk_ser), .rst_n(rst_n), .ser_out(ser_out));

  always #6.25 clk_ro = ~clk_ro;
  always #(T_BIT / 2) clk_ser = ~clk_ser;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  task automatic send(input logic [31:0] w);
    @(negedge clk_ro);
    wr_valid = 1'b1;
    wr_data  = w;
    @(posedge clk_ro);
    while (!wr_ready) @(posedge clk_ro);
    sent.push_back(w);
    sent_t.push_back($realtime);
    #0.5;
    wr_valid = 1'b0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t0, t1;
    int n0;
    #3 rst_n = 1'b1;
    repeat (20) @(posedge clk_ro);
    check(rx.n_comma > 0, "idle commas");
    for (int i = 0; i < 200; i++) begin
      send($urandom);
      repeat ($urandom_range(0, 12)) @(posedge clk_ro);
    end
    // burst
    n0 = sent.size();
    for (int i = 0; i < 200; i++) send($urandom);
    repeat (40) @(posedge clk_ro);
    check(rx.words.size() == sent.size(), "word count");
    for (int i = 0; i < sent.size() && i < rx.words.size(); i++) begin
      check(rx.words[i] == sent[i], "word content");
      check(rx.word_t[i] - sent_t[i] < 2 * 40 * T_BIT + 4 * 12.5, "latency");
    end
    t0 = rx.word_t[n0];
    t1 = rx.word_t[n0 + 199];
    check((t1 - t0) / 199.0 <= 60 * T_BIT, "burst rate");
    check(rx.n_err == 0, "no coding errors");
    check(rx.n_b2b > 0, "back-to-back packets");
    $display("words=%0d commas=%0d b2b=%0d burst bits/packet=%0.1f", rx.words.size(), rx.n_comma,
             rx.n_b2b, (t1 - t0) / 199.0 / T_BIT);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
