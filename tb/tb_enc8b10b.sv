// tb_enc8b10b: exhaustive check of the 8b/10b encoder.
//
// Every data byte and every K28.y character is encoded under both running
// disparities and compared with the two-column reference tables, code and
// new running disparity alike. A few well-known code words are also checked
// literally, and every code word must have a disparity of 0 or +-2 with the
// sign the running disparity requires.
`timescale 1ns / 1fs

module tb_enc8b10b;
  import ref8b10b_pkg::*;

  logic       k, rd_in, rd_out;
  logic [7:0] data;
  logic [9:0] code;
  int checks = 0, failures = 0;

  enc8b10b dut (.k(k), .data(data), .rd_in(rd_in), .code(code), .rd_out(rd_out));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s: k=%0d data=%02h rd=%0d code=%010b", what, k, data, rd_in, code);
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
    logic [9:0] ec;
    bit         er;
    for (int kk = 0; kk < 2; kk++)
      for (int v = 0; v < 256; v++)
        for (int rr = 0; rr < 2; rr++) begin
          if (kk == 1 && v[4:0] != 5'd28) continue;
          k = bit'(kk); data = 8'(v); rd_in = bit'(rr);
          #1;
          encode(data, k, rd_in, ec, er);
          check(code == ec, "code");
          check(rd_out == er, "running disparity");
          check(disp(code, 10) inside {-2, 0, 2}, "disparity range");
          check(!(rd_in == 0 && disp(code, 10) < 0) && !(rd_in == 1 && disp(code, 10) > 0),
                "disparity sign");
        end
    // literal code words
    k = 1; data = 8'hBC; rd_in = 0; #1; check(code == 10'b0011111010, "K28.5 RD-");
    k = 1; data = 8'hBC; rd_in = 1; #1; check(code == 10'b1100000101, "K28.5 RD+");
    k = 0; data = 8'hB5; rd_in = 0; #1; check(code == 10'b1010101010, "D21.5");
    k = 0; data = 8'h00; rd_in = 0; #1; check(code == 10'b1001110100, "D0.0 RD-");
    k = 0; data = 8'hF1; rd_in = 0; #1; check(code == 10'b1000110111, "D17.7 RD- (A7)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
