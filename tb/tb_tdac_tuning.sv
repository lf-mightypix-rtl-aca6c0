// tb_tdac_tuning: threshold tuning of the whole matrix through test injection.
//
// Runs the tuning procedure on the full 28 x 23 chip. All pixels start at
// TDAC 0, which is their highest threshold. In each step the same test charge
// is injected into every pixel that is not yet tuned. A pixel that answers
// keeps its present TDAC code as its tuned value. Every other pixel has its
// code raised by one, which lowers its threshold, and the step repeats. The
// injection reaches all pixels at once here, but each pixel's decision
// depends only on its own hits, which come back through the normal readout
// and serial line.
//
// Checked: every pixel is tuned; each tuned threshold (computed from the
// front-end model) lies within one TDAC step below the injected charge; no
// pixel answered at a code below its tuned one; and the spread of thresholds
// after tuning is much smaller than before.
`timescale 1ns / 1fs

module tb_tdac_tuning;
  import lfmp_pkg::*;

  localparam int  COLS = N_COLS, ROWS = N_ROWS;
  localparam int  STEP = 40, TH = 2200, QINJ = 2000;
  localparam realtime T_BIT = 0.78125;

  logic clk_ts = 1'b0, clk_ser = 1'b0, rst_n = 1'b1;
  logic cfg_we = 1'b0;
  logic [COL_W-1:0] cfg_col = '0;
  logic [ROW_W-1:0] cfg_row = '0;
  pix_cfg_t cfg_data = '0;
  logic [CHG_W-1:0] th_e = CHG_W'(TH);
  logic sensor_stb [COLS][ROWS];
  logic [CHG_W-1:0] sensor_q [COLS][ROWS];
  logic injection = 1'b0;
  logic [CHG_W-1:0] inj_q = CHG_W'(QINJ);
  logic en_inj [COLS][ROWS];
  logic ser_out;

  lf_mightypix dut (
    .clk_ts(clk_ts), .clk_ser(clk_ser), .rst_n(rst_n),
    .cfg_we(cfg_we), .cfg_col(cfg_col), .cfg_row(cfg_row), .cfg_data(cfg_data),
    .th_e(th_e), .sensor_stb(sensor_stb), .sensor_q(sensor_q),
    .injection(injection), .inj_q(inj_q), .en_inj(en_inj), .ser_out(ser_out));

  ser_rx rx (.clk_ser(clk_ser), .rst_n(rst_n), .ser_out(ser_out));

  always #6.25 clk_ts = ~clk_ts;
  always #(T_BIT / 2) clk_ser = ~clk_ser;

  int checks = 0, failures = 0;

  initial #0.5 rst_n = 1'b0;   // falling edge so that the asynchronous reset acts
  int tdac [COLS][ROWS];
  bit tuned [COLS][ROWS];

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  function automatic int mismatch_e(int c, int r);   // as documented in the top
    return (((c * 11 + r * 7) % 17) - 8) * 25;
  endfunction

  function automatic real spread(bit after);
    real s = 0.0, s2 = 0.0, t;
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++) begin
        t  = real'(TH + mismatch_e(c, r) - (after ? tdac[c][r] * STEP : 0));
        s  += t;
        s2 += t * t;
      end
    s  /= COLS * ROWS;
    s2 /= COLS * ROWS;
    return $sqrt(s2 - s * s);
  endfunction

  task automatic write_cfg(input int c, input int r, input int code);
    @(negedge clk_ts);
    cfg_we   = 1'b1;
    cfg_col  = COL_W'(c);
    cfg_row  = ROW_W'(r);
    cfg_data = '{tdac: TDAC_W'(code), en_comp: 1'b1};
    @(negedge clk_ts);
    cfg_we = 1'b0;
  endtask

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_tuned = 0, steps = 0, first, answered, thr;
    real sd0, sd1;
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++) begin
        sensor_stb[c][r] = 1'b0;
        sensor_q[c][r]   = '0;
        en_inj[c][r]     = 1'b1;
        tdac[c][r]       = 0;
        tuned[c][r]      = 0;
      end
    #3 rst_n = 1'b1;
    for (int code = 0; code < 16 && n_tuned < COLS * ROWS; code++) begin
      steps++;
      for (int c = 0; c < COLS; c++)
        for (int r = 0; r < ROWS; r++)
          if (!tuned[c][r]) begin
            tdac[c][r] = code;
            write_cfg(c, r, code);
          end
      repeat (4) @(posedge clk_ts);
      first = rx.words.size();
      #0.3 injection = 1'b1;
      #5   injection = 1'b0;
      repeat (3200) @(posedge clk_ts);     // 40 us: enough to read out 644 hits
      answered = 0;
      for (int i = first; i < rx.words.size(); i++) begin
        hit_pkt_t p;
        int c, r;
        p = rx.words[i];
        c = int'(p.col);
        r = int'(p.row);
        if (!tuned[c][r]) begin
          tuned[c][r] = 1;
          n_tuned++;
          answered++;
          // stays at this code: disable further injections into it
          en_inj[c][r] = 1'b0;
        end
      end
      $display("TDAC code %0d: %0d pixels answered, %0d tuned", code, answered, n_tuned);
    end
    check(n_tuned == COLS * ROWS, "every pixel tuned");
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++) begin
        thr = TH + mismatch_e(c, r) - tdac[c][r] * STEP;
        check(thr < QINJ && thr >= QINJ - STEP, "tuned threshold within one step");
      end
    sd0 = spread(0);
    sd1 = spread(1);
    check(sd1 < sd0 / 4.0 && sd1 <= STEP, "spread reduced");
    check(rx.n_err == 0, "no line coding errors");
    $display("threshold spread before %0.1f e-, after %0.1f e-, %0d steps", sd0, sd1, steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
