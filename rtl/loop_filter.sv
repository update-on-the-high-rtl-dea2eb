// loop_filter: behavioural model of the PLL low pass filter (analog).
//
// A series R-C to ground: the pump current charges the capacitor C_F, whose
// voltage vint holds the integral of the current, and the resistor R_OHM adds
// the proportional term R*icp that gives the loop its stabilising zero.
// vctrl = vint + R_OHM*icp, clamped to 0..V_MAX.
//
// The model is event driven. The pump current is piecewise constant, so the
// charge is brought up to date whenever icp changes, using the current that
// flowed since the previous change; no time step is needed. Within one pump
// pulse vctrl therefore shows the step R*icp but not the small ramp of vint,
// which is added at the end of the pulse.
//
// The values (15 kOhm, 2.9 pF) give about 15 MHz loop bandwidth with a
// 100 uA pump and the model VCO; the paper gives no filter values.
`timescale 1ps / 1fs
module loop_filter #(
  parameter real R_OHM = 15.0e3,
  parameter real C_F   = 2.9e-12,
  parameter real V_MAX = 2.5,
  parameter real V_INIT = 0.0
) (
  input  real icp,
  output real vctrl
);
  real     vint, i_last, v_raw;
  realtime t_last;

  initial begin
    vint   = V_INIT;
    i_last = 0.0;
    t_last = 0.0;
  end

  // Integrate the current that flowed since the last change (time unit 1 ps).
  always @(icp) begin
    vint   = vint + i_last * (($realtime - t_last) * 1.0e-12) / C_F;
    if (vint < 0.0)   vint = 0.0;
    if (vint > V_MAX) vint = V_MAX;
    i_last = icp;
    t_last = $realtime;
  end

  assign v_raw = vint + R_OHM * icp;
  assign vctrl = (v_raw < 0.0) ? 0.0 : ((v_raw > V_MAX) ? V_MAX : v_raw);
endmodule
