// pixel_frontend: behavioural model of the analog in-pixel readout.
//
// This is a behavioural model, not synthesizable logic. It stands for the
// analog chain inside each pixel: the injection capacitor Cinj with its
// switch en_inj, the charge-sensitive amplifier, the high-pass filter, the
// comparator with its global threshold Th plus the 4-bit trim TDAC, the
// en_comp switch and the output driver whose swing is limited by Vminus.
// The analog-only nodes (HV, BL, Vminus, the bias currents) have no port.
//
// Signal charge arrives as a number of electrons: `sensor_q` from the sensor
// diode, sampled on a rising edge of `sensor_stb`, or `inj_q` on a rising
// edge of `injection` when `en_inj` is set (both add up if they coincide).
// The effective threshold is
//     thr = th_e + OFFSET_E - tdac * TDAC_STEP_E   (electrons, at least 0),
// so a larger TDAC code lowers the threshold of this pixel. If the charge
// exceeds thr, the comparator goes high after
//     T_DELAY_NS + WALK_NS_E / (q - thr)           (time walk: small
//                                                   signals come later)
// and stays high for TOT_MIN_NS + TOT_NS_PER_KE * (q - thr) / 1000, so the
// time over threshold grows with the charge. A new charge arriving while a
// pulse is being formed is ignored. `out` is the comparator output gated by
// `en_comp`.
//
// The structure (CSA, comparator, threshold plus TDAC, en_comp, injection)
// follows the chip's pixel schematic; all numeric constants are this
// model's own placeholders, not measured values.
`timescale 1ns / 1fs

module pixel_frontend
  import lfmp_pkg::*;
#(
  parameter int  OFFSET_E      = 0,       // threshold mismatch of this pixel, e-
  parameter int  TDAC_STEP_E   = 40,      // threshold change per TDAC code, e-
  parameter real T_DELAY_NS    = 10.0,    // delay for a very large signal
  parameter real WALK_NS_E     = 5000.0,  // time-walk constant, ns * e-
  parameter real TOT_MIN_NS    = 20.0,
  parameter real TOT_NS_PER_KE = 10.0
) (
  input  logic              sensor_stb,
  input  logic [CHG_W-1:0]  sensor_q,
  input  logic              injection,
  input  logic              en_inj,
  input  logic [CHG_W-1:0]  inj_q,
  input  logic [CHG_W-1:0]  th_e,
  input  logic [TDAC_W-1:0] tdac,
  input  logic              en_comp,
  output logic              out
);


  logic comp_raw;
  int   q;
  int   thr;
  real  excess;

  initial comp_raw = 1'b0;

  always begin
    @(posedge sensor_stb or posedge injection);
    q = 0;
    if (sensor_stb)          q += int'(sensor_q);
    if (injection && en_inj) q += int'(inj_q);
    thr = int'(th_e) + OFFSET_E - int'(tdac) * TDAC_STEP_E;
    if (thr < 0) thr = 0;
    if (q > thr) begin
      excess = real'(q - thr);
      #(T_DELAY_NS + WALK_NS_E / excess) comp_raw = 1'b1;
      #(TOT_MIN_NS + TOT_NS_PER_KE * excess / 1000.0) comp_raw = 1'b0;
    end
  end

  assign out = comp_raw && en_comp;

endmodule
