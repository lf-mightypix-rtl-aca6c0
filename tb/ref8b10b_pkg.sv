// ref8b10b_pkg: reference 8b/10b encoder and decoder for the testbenches.
//
// Written from the published 8b/10b code tables with both running-disparity
// columns spelled out, independently of the encoder under test (which stores
// one column and derives the other). decode() finds a byte by trying every
// data and K28.y character under both running disparities.
`timescale 1ns / 1fs

package ref8b10b_pkg;

  // 5b/6b code abcdei: {RD- column, RD+ column}
  function automatic logic [11:0] t6(input int x);
    case (x)
      0:  return {6'b100111, 6'b011000};
      1:  return {6'b011101, 6'b100010};
      2:  return {6'b101101, 6'b010010};
      3:  return {6'b110001, 6'b110001};
      4:  return {6'b110101, 6'b001010};
      5:  return {6'b101001, 6'b101001};
      6:  return {6'b011001, 6'b011001};
      7:  return {6'b111000, 6'b000111};
      8:  return {6'b111001, 6'b000110};
      9:  return {6'b100101, 6'b100101};
      10: return {6'b010101, 6'b010101};
      11: return {6'b110100, 6'b110100};
      12: return {6'b001101, 6'b001101};
      13: return {6'b101100, 6'b101100};
      14: return {6'b011100, 6'b011100};
      15: return {6'b010111, 6'b101000};
      16: return {6'b011011, 6'b100100};
      17: return {6'b100011, 6'b100011};
      18: return {6'b010011, 6'b010011};
      19: return {6'b110010, 6'b110010};
      20: return {6'b001011, 6'b001011};
      21: return {6'b101010, 6'b101010};
      22: return {6'b011010, 6'b011010};
      23: return {6'b111010, 6'b000101};
      24: return {6'b110011, 6'b001100};
      25: return {6'b100110, 6'b100110};
      26: return {6'b010110, 6'b010110};
      27: return {6'b110110, 6'b001001};
      28: return {6'b001110, 6'b001110};
      29: return {6'b101110, 6'b010001};
      30: return {6'b011110, 6'b100001};
      default: return {6'b101011, 6'b010100};
    endcase
  endfunction

  // 3b/4b code fghj for data: {RD- column, RD+ column}; index 8 is A7
  function automatic logic [7:0] t4d(input int y);
    case (y)
      0: return {4'b1011, 4'b0100};
      1: return {4'b1001, 4'b1001};
      2: return {4'b0101, 4'b0101};
      3: return {4'b1100, 4'b0011};
      4: return {4'b1101, 4'b0010};
      5: return {4'b1010, 4'b1010};
      6: return {4'b0110, 4'b0110};
      7: return {4'b1110, 4'b0001};
      default: return {4'b0111, 4'b1000};
    endcase
  endfunction

  // 3b/4b code fghj for K28.y: {RD- column, RD+ column}
  function automatic logic [7:0] t4k(input int y);
    case (y)
      0: return {4'b1011, 4'b0100};
      1: return {4'b0110, 4'b1001};
      2: return {4'b1010, 4'b0101};
      3: return {4'b1100, 4'b0011};
      4: return {4'b1101, 4'b0010};
      5: return {4'b0101, 4'b1010};
      6: return {4'b1001, 4'b0110};
      default: return {4'b0111, 4'b1000};
    endcase
  endfunction

  function automatic int disp(input logic [9:0] v, input int n);
    int ones = 0;
    for (int i = 0; i < n; i++) ones += int'(v[i]);
    return 2 * ones - n;
  endfunction

  // encode one character; rd = 0 means negative running disparity
  function automatic void encode(input logic [7:0] d, input bit k, input bit rd,
                                 output logic [9:0] code, output bit rd_o);
    int x = int'(d[4:0]);
    int y = int'(d[7:5]);
    logic [11:0] p6;
    logic [7:0]  p4;
    logic [5:0]  c6;
    logic [3:0]  c4;
    bit          rdm;
    p6  = k ? {6'b001111, 6'b110000} : t6(x);
    c6  = rd ? p6[5:0] : p6[11:6];
    rdm = (disp({4'b0, c6}, 6) != 0) ? ~rd : rd;
    if (k) p4 = t4k(y);
    else if (y == 7 && ((!rdm && (x == 17 || x == 18 || x == 20)) ||
                        ( rdm && (x == 11 || x == 13 || x == 14)))) p4 = t4d(8);
    else p4 = t4d(y);
    c4   = rdm ? p4[3:0] : p4[7:4];
    rd_o = (disp({6'b0, c4}, 4) != 0) ? ~rdm : rdm;
    code = {c6, c4};
  endfunction

  // decode one symbol; ok = 0 if it is no valid character
  function automatic void decode(input logic [9:0] code, output logic [7:0] d,
                                 output bit k, output bit ok);
    logic [9:0] c;
    bit         r;
    ok = 0; d = '0; k = 0;
    for (int kk = 0; kk < 2; kk++)
      for (int v = 0; v < 256; v++)
        for (int rr = 0; rr < 2; rr++) begin
          if (kk == 1 && v[4:0] != 5'd28) continue;
          encode(8'(v), bit'(kk), bit'(rr), c, r);
          if (!ok && c == code) begin
            ok = 1; d = 8'(v); k = bit'(kk);
          end
        end
  endfunction

endpackage
