// enc8b10b: 8b/10b line encoder used by the serializer.
//
// Combinational. A byte HGF EDCBA is split into a 5-bit part (EDCBA, coded
// into 6 bits abcdei) and a 3-bit part (HGF, coded into 4 bits fghj), using
// the standard Widmer-Franaszek tables. The tables below give the code for a
// negative running disparity; for a positive running disparity the code is
// the bitwise complement whenever the negative-disparity code is unbalanced,
// and for the two balanced-but-disparity-dependent codes D.7 (6b) and D.x.3
// (4b). D.x.7 uses the alternate code A7 where the standard requires it to
// avoid runs of five equal bits. Control characters are supported only as
// K28.y (k = 1 with EDCBA = 28), which includes the comma K28.5.
//
// Output `code` is {a,b,c,d,e,i,f,g,h,j}: bit 9 (a) is sent first.
// `rd_in`/`rd_out` are the running disparity before and after the symbol
// (0 = negative). The chip description only says that the serializer
// encodes the data; the choice of 8b/10b is this design's own.
`timescale 1ns / 1fs

module enc8b10b (
  input  logic       k,        // control character (only K28.y)
  input  logic [7:0] data,     // HGFEDCBA
  input  logic       rd_in,
  output logic [9:0] code,
  output logic       rd_out
);

  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] c6;
  logic [3:0] c4;
  logic       rd_mid;
  logic       alt7;

  assign x = data[4:0];
  assign y = data[7:5];

  always_comb begin
    // 5b/6b, negative running disparity
    unique case (x)
      5'd0:  c6 = 6'b100111;  5'd1:  c6 = 6'b011101;
      5'd2:  c6 = 6'b101101;  5'd3:  c6 = 6'b110001;
      5'd4:  c6 = 6'b110101;  5'd5:  c6 = 6'b101001;
      5'd6:  c6 = 6'b011001;  5'd7:  c6 = 6'b111000;
      5'd8:  c6 = 6'b111001;  5'd9:  c6 = 6'b100101;
      5'd10: c6 = 6'b010101;  5'd11: c6 = 6'b110100;
      5'd12: c6 = 6'b001101;  5'd13: c6 = 6'b101100;
      5'd14: c6 = 6'b011100;  5'd15: c6 = 6'b010111;
      5'd16: c6 = 6'b011011;  5'd17: c6 = 6'b100011;
      5'd18: c6 = 6'b010011;  5'd19: c6 = 6'b110010;
      5'd20: c6 = 6'b001011;  5'd21: c6 = 6'b101010;
      5'd22: c6 = 6'b011010;  5'd23: c6 = 6'b111010;
      5'd24: c6 = 6'b110011;  5'd25: c6 = 6'b100110;
      5'd26: c6 = 6'b010110;  5'd27: c6 = 6'b110110;
      5'd28: c6 = 6'b001110;  5'd29: c6 = 6'b101110;
      5'd30: c6 = 6'b011110;  default: c6 = 6'b101011;
    endcase
    if (k) c6 = 6'b001111;                     // K28
    if (rd_in && ($countones(c6) != 3 || x == 5'd7)) c6 = ~c6;
    rd_mid = ($countones(c6) != 3) ? ~rd_in : rd_in;

    // 3b/4b, negative running disparity before the 4-bit block
    alt7 = (!rd_mid && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
           ( rd_mid && (x == 5'd11 || x == 5'd13 || x == 5'd14));
    if (k) begin
      unique case (y)
        3'd0: c4 = 4'b1011;  3'd1: c4 = 4'b0110;
        3'd2: c4 = 4'b1010;  3'd3: c4 = 4'b1100;
        3'd4: c4 = 4'b1101;  3'd5: c4 = 4'b0101;
        3'd6: c4 = 4'b1001;  default: c4 = 4'b0111;
      endcase
      if (rd_mid) c4 = ~c4;
    end else begin
      unique case (y)
        3'd0: c4 = 4'b1011;  3'd1: c4 = 4'b1001;
        3'd2: c4 = 4'b0101;  3'd3: c4 = 4'b1100;
        3'd4: c4 = 4'b1101;  3'd5: c4 = 4'b1010;
        3'd6: c4 = 4'b0110;  default: c4 = alt7 ? 4'b0111 : 4'b1110;
      endcase
      if (rd_mid && ($countones(c4) != 2 || y == 3'd3)) c4 = ~c4;
    end
    rd_out = ($countones(c4) != 2) ? ~rd_mid : rd_mid;
    code   = {c6, c4};
  end

endmodule
