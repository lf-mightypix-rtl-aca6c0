// serializer: 32-bit packet encoder and serial transmitter.
//
// Packets arrive from the readout state machine in the timestamp-clock
// domain (`clk_ro`) with a valid/ready handshake. Each packet is sent as four
// 8b/10b data symbols, most significant byte first, on the single output
// `ser_out`, one bit per cycle of `clk_ser` (1.28 GHz for the 1.28 Gbit/s
// line rate), bit a of every symbol first. When no packet is waiting the
// line carries the comma K28.5, which the receiver uses to find the symbol
// boundaries; packets may follow each other without commas in between.
//
// Clock crossing: the packet is held in `word_q` (clk_ro domain) and a
// request bit is toggled. The request is synchronised into the clk_ser domain
// with two flip-flops; at the next symbol boundary with the line idle the
// transmitter copies `word_q`, starts sending it and toggles the acknowledge
// bit, which is synchronised back with two flip-flops. `wr_ready` is high
// when request and acknowledge agree, so the next packet can be handed over
// while the current one is still being sent. Works for any ratio of the two
// clocks; latency from acceptance to the first bit is 3 to 13 clk_ser cycles.
//
// The 32-bit packets, the encoding step and the 1.28 Gbit/s line rate follow
// the chip description; the 8b/10b code, the symbol order, the comma filling
// and the clock crossing are this design's own choices.
`timescale 1ns / 1fs

module serializer
  import lfmp_pkg::*;
(
  input  logic             clk_ro,    // packet side clock (timestamp clock)
  input  logic             clk_ser,   // bit clock
  input  logic             rst_n,     // asynchronous, active low, both domains
  input  logic             wr_valid,
  input  logic [PKT_W-1:0] wr_data,
  output logic             wr_ready,
  output logic             ser_out
);

  // ---------------- clk_ro domain ----------------
  logic [PKT_W-1:0] word_q;
  logic             req_t;
  logic             ack_t;     // clk_ser domain, declared here for the synchroniser
  logic [1:0]       ack_sync;

  always_ff @(posedge clk_ro or negedge rst_n) begin
    if (!rst_n) begin
      word_q   <= '0;
      req_t    <= 1'b0;
      ack_sync <= '0;
    end else begin
      ack_sync <= {ack_sync[0], ack_t};
      if (wr_valid && wr_ready) begin
        word_q <= wr_data;
        req_t  <= ~req_t;
      end
    end
  end

  assign wr_ready = (req_t == ack_sync[1]);

  // ---------------- clk_ser domain ----------------
  logic [1:0]       req_sync;
  logic [23:0]      word_s;    // bytes still to send after the first
  logic [9:0]       shreg;
  logic [3:0]       bitcnt;
  logic [1:0]       byte_idx;
  logic             busy;
  logic             rd;

  logic             start;
  logic             enc_k;
  logic [7:0]       enc_d;
  logic [9:0]       enc_code;
  logic             enc_rd;

  assign start = !busy && (req_sync[1] != ack_t);

  // byte to encode at the next symbol boundary
  always_comb begin
    enc_k = 1'b0;
    enc_d = K28_5;
    if (busy) begin
      unique case (byte_idx)
        2'd1:    enc_d = word_s[23:16];
        2'd2:    enc_d = word_s[15:8];
        default: enc_d = word_s[7:0];
      endcase
    end else if (start) begin
      enc_d = word_q[31:24];
    end else begin
      enc_k = 1'b1;
    end
  end

  enc8b10b u_enc (
    .k      (enc_k),
    .data   (enc_d),
    .rd_in  (rd),
    .code   (enc_code),
    .rd_out (enc_rd)
  );

  always_ff @(posedge clk_ser or negedge rst_n) begin
    if (!rst_n) begin
      ack_t    <= 1'b0;
      req_sync <= '0;
      word_s   <= '0;
      shreg    <= '0;
      bitcnt   <= 4'd9;
      byte_idx <= '0;
      busy     <= 1'b0;
      rd       <= 1'b0;
    end else begin
      req_sync <= {req_sync[0], req_t};
      if (bitcnt == 4'd9) begin
        bitcnt <= '0;
        shreg  <= enc_code;
        rd     <= enc_rd;
        if (busy) begin
          byte_idx <= byte_idx + 1'b1;
          if (byte_idx == 2'd3) busy <= 1'b0;
        end else if (start) begin
          word_s   <= word_q[23:0];
          ack_t    <= ~ack_t;
          busy     <= 1'b1;
          byte_idx <= 2'd1;
        end
      end else begin
        bitcnt <= bitcnt + 1'b1;
        shreg  <= {shreg[8:0], 1'b0};
      end
    end
  end

  assign ser_out = shreg[9];

endmodule
