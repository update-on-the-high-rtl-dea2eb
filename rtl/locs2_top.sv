// locs2_top: double-lane 16:1 serializer with a shared LC-PLL (the paper's
// second prototype, LOCs2).
//
// One reference clock input feeds one PLL, which makes the four stage clocks
// (VCO/8, /4, /2 and the VCO itself: 0.5, 1, 2 and 4 GHz from a 500 MHz
// reference). The clocks are fanned out to LANES identical serializer lanes;
// each lane turns DATA_W parallel bits per reference cycle into one serial
// stream, 16 x 500 MHz = 8 Gbps. The slower stages receive a locally
// inverted clock as their complementary clock, the last 2:1 stage the VCO's
// own complementary output.
//
// Interface: data[l] is lane l's word, captured on the rising edge of the
// 0.5 GHz clock, which the PLL aligns to the reference edge chosen by
// ref_edge_sel; data should therefore change on the other reference edge.
// serial[l] goes to lane l's output driver, bit 0 of each word first, the
// first bit 29 bit periods after the capturing edge. clk_ser is the 4 GHz
// serializer clock, vctrl the PLL control voltage, for observation.
// The LVDS receivers, clock buffers, CML drivers and VCSEL drivers are analog
// and sit outside this module: data and ref_clk arrive, and serial leaves,
// as plain logic.
`timescale 1ps / 1fs
module locs2_top #(
  parameter int unsigned LANES  = locs_pkg::LANES,
  parameter int unsigned DATA_W = locs_pkg::DATA_W,
  parameter int unsigned N_DIV  = locs_pkg::N_DIV
) (
  input  logic                  ref_clk,
  input  logic                  ref_edge_sel,
  input  logic [1:0]            bw_sel,
  input  logic                  rst_n,
  input  logic [DATA_W-1:0]     data [LANES],
  output logic [LANES-1:0]      serial,
  output logic                  clk_ser,
  output real                   vctrl
);
  localparam int unsigned LEVELS = N_DIV + 1;

  logic [N_DIV:0]  clk_tap;
  logic            clk_vco_b;
  logic [LEVELS-1:0] clk_stage, clk_stage_b;

  lcpll #(.N_DIV(N_DIV)) u_pll (
    .ref_clk      (ref_clk),
    .ref_edge_sel (ref_edge_sel),
    .bw_sel       (bw_sel),
    .rst_n        (rst_n),
    .clk_tap      (clk_tap),
    .clk_vco_b    (clk_vco_b),
    .vctrl        (vctrl)
  );

  // Level i of the tree runs on VCO / 2**(N_DIV-i).
  for (genvar i = 0; i < LEVELS; i++) begin : g_clk
    assign clk_stage[i] = clk_tap[N_DIV-i];
    if (i == LEVELS - 1) begin : g_last
      assign clk_stage_b[i] = clk_vco_b;
    end else begin : g_inv
      assign clk_stage_b[i] = ~clk_tap[N_DIV-i];
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    serializer_lane #(.DATA_W(DATA_W)) u_lane (
      .clk_stage   (clk_stage),
      .clk_stage_b (clk_stage_b),
      .data        (data[l]),
      .serial      (serial[l])
    );
  end

  assign clk_ser = clk_tap[0];

  initial assert ((1 << LEVELS) == DATA_W)
    else $error("locs2_top: DATA_W must equal 2**(N_DIV+1)");
endmodule
