// lcpll: the shared clock generator, an LC-tank charge-pump PLL.
//
// The reference (500 MHz in the second prototype) passes an edge selector,
// then the PFD compares it with the VCO clock divided by 2**N_DIV. The charge
// pump and the R-C loop filter turn the PFD pulses into the VCO control
// voltage. The VCO (4 GHz) and every Div2 output are brought out: clk_tap[0]
// is the VCO, clk_tap[k] the VCO divided by 2**k, and clk_tap[N_DIV] is the
// feedback, which after lock is in phase with the selected reference edge.
// These are the stage clocks of the 16:1 serializers.
//
// ref_edge_sel = 0 locks to the rising edge of ref_clk, 1 to the falling edge
// (the reference is inverted before the PFD), so the user can move the data
// capturing edge by half a reference period. bw_sel sets the pump current and
// with it the loop bandwidth. rst_n resets the dividers and the PFD.
//
// PFD, dividers and the edge selector are logic; pump, filter and VCO are
// behavioural models, so the block as a whole is a behavioural model. The
// structure follows the paper's block diagrams; the edge selector and the
// programmable bandwidth are described there for the first prototype's PLL
// and carried over.
`timescale 1ps / 1fs
module lcpll #(
  parameter int unsigned N_DIV = locs_pkg::N_DIV
) (
  input  logic             ref_clk,
  input  logic             ref_edge_sel,
  input  logic [1:0]       bw_sel,
  input  logic             rst_n,
  output logic [N_DIV:0]   clk_tap,
  output logic             clk_vco_b,
  output real              vctrl
);
  logic ref_sel, up, dn;
  real  icp;

  assign ref_sel = ref_clk ^ ref_edge_sel;

  pfd u_pfd (
    .ref_clk (ref_sel),
    .fb_clk  (clk_tap[N_DIV]),
    .rst_n   (rst_n),
    .up      (up),
    .dn      (dn)
  );

  charge_pump u_cp (
    .up     (up),
    .dn     (dn),
    .bw_sel (bw_sel),
    .icp    (icp)
  );

  loop_filter u_lpf (
    .icp   (icp),
    .vctrl (vctrl)
  );

  lc_vco u_vco (
    .vctrl (vctrl),
    .clk   (clk_tap[0]),
    .clk_b (clk_vco_b)
  );

  for (genvar k = 0; k < N_DIV; k++) begin : g_div
    div2 u_div (
      .clk_in  (clk_tap[k]),
      .rst_n   (rst_n),
      .clk_out (clk_tap[k+1])
    );
  end
endmodule
