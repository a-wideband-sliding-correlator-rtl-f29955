// gilbert_mixer: behavioural model of the Gilbert-cell double-balanced mixer.
//
// This is a behavioural model of an analog circuit, not synthesizable logic.
// In the real cell, transistors M1 and M2 turn the differential RF voltage into
// a differential current, and the four LO transistors M3-M6, driven as switches,
// steer that current to one or the other load resistor R, so the sign of the
// IF output follows the LO. The model keeps exactly that: with the LO pair
// driven one way (lo_p=1, lo_n=0) the differential IF voltage is
// +GAIN * (rf_p - rf_n); driven the other way it is -GAIN * (rf_p - rf_n); with
// both LO legs equal the switches are balanced and the output is zero.
// Voltages are signed millivolts, GAIN = GAIN_NUM/GAIN_DEN, and the output is
// split evenly between the two legs and clipped to the range of the type.
//
// In the channel sounder the LO pair is always a digital PN sequence r(t), so
// the mixer multiplies its RF input by +1 or -1 chip by chip. The gain value,
// the millivolt representation and the zero common mode are choices of this
// model; bias, noise, bandwidth and LO feed-through are not modelled.
//
// Timing: combinational, no delay.
module gilbert_mixer
  import sounder_pkg::*;
#(
  parameter int GAIN_NUM = 1,
  parameter int GAIN_DEN = 1
) (
  input  logic lo_p,
  input  logic lo_n,
  input  mv_t  rf_p,
  input  mv_t  rf_n,
  output mv_t  if_p,
  output mv_t  if_n
);

  localparam int VMAX = (1 <<< (MV_W - 1)) - 1;

  int v_rf;     // differential RF voltage
  int v_if;     // differential IF voltage

  always_comb begin
    v_rf = int'(rf_p) - int'(rf_n);
    if (lo_p == lo_n)  v_if = 0;
    else if (lo_p)     v_if =  (v_rf * GAIN_NUM) / GAIN_DEN;
    else               v_if = -(v_rf * GAIN_NUM) / GAIN_DEN;
    if (v_if >  2 * VMAX) v_if =  2 * VMAX;
    if (v_if < -2 * VMAX) v_if = -2 * VMAX;
    if_p = mv_t'(v_if >>> 1);
    if_n = mv_t'((v_if >>> 1) - v_if);
  end

endmodule
