// charge_pump: behavioural model of the PLL charge pump (an analog circuit).
//
// It turns the PFD's Up and Down pulses into the current that charges the
// loop filter: +I while only up is high, -I while only dn is high, nothing
// otherwise. The pump current sets the loop gain and hence the loop
// bandwidth, which the paper describes as programmable so that references of
// different quality can be used; here the 2-bit bw_sel chooses
// I = I_UNIT_A * (bw_sel + 1), i.e. 50, 100, 150 or 200 uA. The number of
// settings and the currents are this design's choice.
//
// Interface: icp is a real, in amperes, positive when charging. The model
// has no delay: icp follows up and dn at once.
`timescale 1ps / 1fs
module charge_pump #(
  parameter real I_UNIT_A = 50.0e-6
) (
  input  logic       up,
  input  logic       dn,
  input  logic [1:0] bw_sel,
  output real        icp
);
  real i_pump;

  assign i_pump = I_UNIT_A * real'(int'(bw_sel) + 1);
  assign icp    = (up ? i_pump : 0.0) - (dn ? i_pump : 0.0);
endmodule
