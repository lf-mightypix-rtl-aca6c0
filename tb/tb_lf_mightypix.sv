// tb_lf_mightypix: end-to-end test of the full 28 x 23 chip at its default size.
//
// The testbench configures every pixel through the configuration port,
// applies charge to pixels (sensor input) or injects test pulses, and decodes
// the serial output with an independent receiver model. For every charge it
// predicts, from the front-end model's documented formulas, when the
// comparator rises and falls, and from that the leading-edge stamp (clock
// edges before the rise, 6.25 ns units) and trailing-edge stamp (rising edges
// before the fall, 12.5 ns units), both modulo 2**11. Every packet must match
// a predicted hit of the same pixel within one stamp unit, and every
// predicted hit must arrive, unless its cell was still full when the new
// pulse came (dead time), in which case it must not arrive.
//
// Scenarios, each counted and required at least once: isolated hits,
// a leading edge on a falling clock edge (odd stamp), several full cells in
// one column (column drain), several columns waiting (round robin), a masked
// pixel (en_comp = 0), a hit below threshold made visible by its TDAC trim,
// a test-pulse injection, a full-matrix burst with back-to-back packets, a
// hit lost in a full cell, and idle commas. The burst also checks the output
// rate: at most 60 bit periods per packet at 1.28 Gbit/s.
`timescale 1ns / 1fs

module tb_lf_mightypix;
  import lfmp_pkg::*;

  localparam int  COLS = N_COLS, ROWS = N_ROWS;
  localparam real TD = 10.0, WALK = 5000.0, TMIN = 20.0, TPK = 10.0;  // front-end model defaults
  localparam int  STEP = 40, TH = 1800;
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
  logic [CHG_W-1:0] inj_q = '0;
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

  typedef struct {
    int col, row;
    int le, te;         // predicted stamps
    bit lost;           // expected to be dropped (cell was full)
    bit seen;
  } exp_hit_t;

  exp_hit_t exp_q [$];
  int tdac_of [COLS][ROWS];
  int checks = 0, failures = 0;

  initial #0.5 rst_n = 1'b0;   // falling edge so that the asynchronous reset acts
  int n_pkts = 0, n_odd = 0, n_multi_full = 0, n_rr = 0, n_lost = 0;
  int n_masked = 0, n_tdac = 0, n_inj = 0;

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

  function automatic int thr_of(int c, int r);
    int t = TH + mismatch_e(c, r) - tdac_of[c][r] * STEP;
    return (t < 0) ? 0 : t;
  endfunction

  function automatic bit close(int got, int want);
    int d = (got - want) & ((1 << TS_W) - 1);
    return d == 0 || d == 1 || d == (1 << TS_W) - 1;
  endfunction

  // predicted comparator pulse for charge q arriving now at pixel (c, r)
  function automatic void predict(int c, int r, int q, bit may_be_lost);
    exp_hit_t h;
    real ex, tr, tf;
    int thr = thr_of(c, r);
    if (q <= thr) return;
    ex = real'(q - thr);
    tr = $realtime + TD + WALK / ex;
    tf = tr + TMIN + TPK * ex / 1000.0;
    h.col  = c; h.row = r;
    h.le   = int'($floor(tr / 6.25)) & ((1 << TS_W) - 1);
    h.te   = ((int'($floor(tf / 6.25)) + 1) / 2) & ((1 << TS_W) - 1);
    h.lost = may_be_lost;
    h.seen = 0;
    exp_q.push_back(h);
  endfunction

  task automatic write_cfg(input int c, input int r, input int tdac, input bit en);
    @(negedge clk_ts);
    cfg_we   = 1'b1;
    cfg_col  = COL_W'(c);
    cfg_row  = ROW_W'(r);
    cfg_data = '{tdac: TDAC_W'(tdac), en_comp: en};
    @(negedge clk_ts);
    cfg_we   = 1'b0;
    tdac_of[c][r] = tdac;
  endtask

  // charge on one pixel; only predicted if the pixel is enabled
  task automatic hit(input int c, input int r, input int q, input bit enabled = 1);
    sensor_q[c][r]   = CHG_W'(q);
    sensor_stb[c][r] = 1'b1;
    if (enabled) predict(c, r, q, 0);
  endtask

  task automatic release_stb();
    #1;
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++) sensor_stb[c][r] = 1'b0;
  endtask

  // match received packets against predictions
  int rx_done = 0;
  always @(posedge clk_ts) begin
    while (rx_done < rx.words.size()) begin
      hit_pkt_t p;
      bit found;
      p = rx.words[rx_done];
      rx_done++;
      n_pkts++;
      if (p.le[0]) n_odd++;
      found = 0;
      for (int i = 0; i < exp_q.size(); i++)
        if (!found && !exp_q[i].seen && exp_q[i].col == int'(p.col) && exp_q[i].row == int'(p.row)) begin
          found = 1;
          exp_q[i].seen = 1;
          check(!exp_q[i].lost, "no packet for a hit in a full cell");
          check(close(int'(p.le), exp_q[i].le), "leading-edge stamp");
          check(close(int'(p.te), exp_q[i].te), "trailing-edge stamp");
          if (!close(int'(p.le), exp_q[i].le) || !close(int'(p.te), exp_q[i].te))
            $display("  pixel (%0d,%0d) le %0d/%0d te %0d/%0d", p.col, p.row, p.le, exp_q[i].le, p.te, exp_q[i].te);
        end
      check(found, "packet belongs to a predicted hit");
      if (!found) $display("  unexpected packet col=%0d row=%0d", p.col, p.row);
    end
  end

  // mechanism monitors
  always @(posedge clk_ts) begin
    if ($countones(dut.eoc_valid) >= 2) n_rr++;
    for (int c = 0; c < COLS; c++) if ($countones(dut.cell_full[c]) >= 2) n_multi_full++;
  end

  task automatic wait_drained(input int max_us);
    int guard = 0;
    // all non-lost predictions seen, then a little idle time
    forever begin
      int pending = 0;
      foreach (exp_q[i]) if (!exp_q[i].seen && !exp_q[i].lost) pending++;
      if (pending == 0 || guard > max_us * 80) break;
      @(posedge clk_ts);
      guard++;
    end
    repeat (20) @(posedge clk_ts);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t0, t1;
    int n0, n_exp_before;
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++) begin
        sensor_stb[c][r] = 1'b0;
        sensor_q[c][r]   = '0;
        en_inj[c][r]     = 1'b0;
        tdac_of[c][r]    = 0;
      end
    #3 rst_n = 1'b1;

    // configuration: all on, TDAC 0, pixel (5,5) masked
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++)
        write_cfg(c, r, 0, !(c == 5 && r == 5));
    repeat (10) @(posedge clk_ts);
    check(rx.n_comma > 0 && rx.words.size() == 0, "idle line after configuration");

    // A: isolated hits
    for (int i = 0; i < 40; i++) begin
      int c, r;
      c = $urandom_range(0, COLS - 1);
      r = $urandom_range(0, ROWS - 1);
      if (c == 5 && r == 5) c = 6;
      #(0.3 + 0.1 * $urandom_range(0, 50));
      hit(c, r, $urandom_range(2500, 20000));
      release_stb();
      #400;
    end
    wait_drained(20);

    // B: several full cells in one column, C: several columns at once
    for (int r = 0; r < ROWS; r += 2) hit(7, r, 12000);
    for (int c = 10; c < 20; c++) hit(c, 4, 9000);
    release_stb();
    wait_drained(20);

    // D: masked pixel gives nothing
    n_exp_before = rx.words.size();
    hit(5, 5, 15000, 0);
    release_stb();
    #2000;
    check(rx.words.size() == n_exp_before, "masked pixel silent");
    n_masked++;

    // E: below threshold with TDAC 0, above it after trimming
    n_exp_before = rx.words.size();
    hit(10, 3, thr_of(10, 3) - 50);            // predicts nothing
    release_stb();
    #2000;
    check(rx.words.size() == n_exp_before, "below threshold silent");
    write_cfg(10, 3, 5, 1);
    hit(10, 3, thr_of(10, 3) + 150);
    release_stb();
    wait_drained(10);
    check(rx.words.size() == n_exp_before + 1, "trimmed pixel fires");
    n_tdac++;

    // F: injection into one pixel only
    n_exp_before = rx.words.size();
    en_inj[20][15] = 1'b1;
    inj_q = 16'd8000;
    #0.7;
    injection = 1'b1;
    predict(20, 15, 8000, 0);
    #5 injection = 1'b0;
    wait_drained(10);
    check(rx.words.size() == n_exp_before + 1, "one injected hit");
    en_inj[20][15] = 1'b0;
    n_inj++;

    // G: whole-matrix burst, then a second hit into a cell still full
    n0 = rx.words.size();
    #0.45;
    for (int c = 0; c < COLS; c++)
      for (int r = 0; r < ROWS; r++)
        hit(c, r, 10000, !(c == 5 && r == 5));
    release_stb();
    #3000;
    check(dut.g_col[27].g_row[22].u_cell.full, "last cell still waiting");
    if (dut.g_col[27].g_row[22].u_cell.full) begin
      sensor_q[27][22] = 16'd10000;
      sensor_stb[27][22] = 1'b1;
      predict(27, 22, 10000, 1);
      release_stb();
      n_lost++;
    end
    wait_drained(100);
    check(rx.words.size() - n0 == COLS * ROWS - 1, "burst complete");
    t0 = rx.word_t[n0 + 10];
    t1 = rx.word_t[n0 + 610];
    check((t1 - t0) / 600.0 <= 60 * T_BIT, "burst output rate");
    $display("burst: %0.1f bit periods per packet", (t1 - t0) / 600.0 / T_BIT);

    // final accounting
    foreach (exp_q[i]) if (!exp_q[i].lost) check(exp_q[i].seen, "predicted hit arrived");
    check(rx.n_err == 0, "no line coding errors");
    check(n_odd > 0, "odd leading-edge stamp seen");
    check(n_multi_full > 0, "column with several full cells");
    check(n_rr > 0, "several columns waiting");
    check(rx.n_b2b > 0, "back-to-back packets");
    check(n_lost > 0 && n_masked > 0 && n_tdac > 0 && n_inj > 0, "masked, TDAC, injection, lost");
    $display("packets=%0d odd_le=%0d multi_full=%0d rr=%0d b2b=%0d commas=%0d lost=%0d masked=%0d tdac=%0d inj=%0d",
             n_pkts, n_odd, n_multi_full, n_rr, rx.n_b2b, rx.n_comma, n_lost, n_masked, n_tdac, n_inj);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
