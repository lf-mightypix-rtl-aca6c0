// tb_pixel_frontend: checks the behavioural analog front-end model.
//
// Charges around the threshold are applied from the sensor input and through
// injection. Checked against the model's documented formulas: no pulse
// below the effective threshold th + OFFSET - tdac * step; above it, the
// delay to the rising edge and the pulse width; a larger TDAC code lowers
// the threshold; en_comp = 0 suppresses the output; injection needs en_inj.
// It also checks the two trends the model is meant to show: larger charge
// gives a longer time over threshold and a shorter delay (time walk).
`timescale 1ns / 1fs

module tb_pixel_frontend;
  import lfmp_pkg::*;

  localparam int  OFFSET = 60, STEP = 40;
  localparam real TD = 10.0, WALK = 5000.0, TMIN = 20.0, TPK = 10.0;

  logic sensor_stb = 1'b0, injection = 1'b0, en_inj = 1'b0, en_comp = 1'b1, out;
  logic [CHG_W-1:0] sensor_q = '0, inj_q = '0, th_e = 16'd1800;
  logic [TDAC_W-1:0] tdac = '0;
  int checks = 0, failures = 0;
  real m_dly, m_width;
  realtime m_tr;

  pixel_frontend #(.OFFSET_E(OFFSET), .TDAC_STEP_E(STEP)) dut (
    .sensor_stb(sensor_stb), .sensor_q(sensor_q), .injection(injection), .en_inj(en_inj),
    .inj_q(inj_q), .th_e(th_e), .tdac(tdac), .en_comp(en_comp), .out(out));

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %t", what, $realtime);
    end
  endtask

  // apply a charge and measure the pulse; dly/width < 0 when there is none
  task automatic apply(input int q, input bit inj, output real dly, output real width);
    realtime t0;
    m_dly = -1.0; m_width = -1.0;
    if (inj) begin inj_q = CHG_W'(q); injection = 1'b1; end
    else begin sensor_q = CHG_W'(q); sensor_stb = 1'b1; end
    t0 = $realtime;
    fork
      begin
        @(posedge out); m_tr = $realtime; m_dly = m_tr - t0;
        @(negedge out); m_width = $realtime - m_tr;
      end
      #2000;
    join_any
    disable fork;
    injection = 1'b0; sensor_stb = 1'b0;
    #3000;
    dly = m_dly; width = m_width;
  endtask

  function automatic bit near(real a, real b);
    return (a - b < 0.001) && (b - a < 0.001);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real d, w, d_small, w_small, d_big, w_big;
    int thr;
    #10;
    for (int t = 0; t < 16; t += 5) begin
      tdac = TDAC_W'(t);
      thr  = 1800 + OFFSET - t * STEP;
      apply(thr - 20, 1'b0, d, w);
      check(d < 0, "no pulse below threshold");
      apply(thr + 20, 1'b0, d, w);
      check(near(d, TD + WALK / 20.0), "delay above threshold");
      check(near(w, TMIN + TPK * 20.0 / 1000.0), "width above threshold");
    end
    tdac = '0;
    thr  = 1800 + OFFSET;
    apply(thr + 500, 1'b0, d_small, w_small);
    apply(thr + 20000, 1'b0, d_big, w_big);
    check(w_big > w_small, "ToT grows with charge");
    check(d_big < d_small, "time walk");
    en_comp = 1'b0;
    apply(thr + 5000, 1'b0, d, w);
    check(d < 0, "en_comp off");
    en_comp = 1'b1;
    apply(thr + 5000, 1'b1, d, w);
    check(d < 0, "injection without en_inj");
    en_inj = 1'b1;
    apply(thr + 5000, 1'b1, d, w);
    check(near(d, TD + WALK / 5000.0) && near(w, TMIN + TPK * 5.0), "injection");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
