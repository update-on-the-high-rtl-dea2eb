// serializer_lane: 16:1 serializing unit of one lane.
//
// log2(DATA_W) mux2_stage levels form a binary tree: 16:8, 8:4, 4:2 and 2:1.
// Level i runs on clk_stage[i], each clock twice as fast as the one before
// (0.5, 1, 2 and 4 GHz in the second prototype; 312.5 MHz to 2.5 GHz in the
// first). Every level halves the width and doubles the rate, so a DATA_W-bit
// word captured on a rising edge of clk_stage[0] leaves as DATA_W serial bits,
// bit 0 first, each one half period of the fastest clock long (8 Gbps from a
// 4 GHz clock). Only the last level needs the true complementary clock pair;
// the others may be driven with a locally inverted copy.
//
// Interface: data is sampled on the rising edge of clk_stage[0]; serial is the
// output of the last 2:1 level and goes to the CML driver.
// Timing: the first bit of a word starts T0+T1+T2+T3/2 after its capturing
// edge (Ti = period of clk_stage[i]), 29 bit periods for DATA_W = 16, and the
// lane moves exactly DATA_W bits per period of clk_stage[0].
//
// The tree of 2:1 multiplexers and the clock plan are the paper's; the bit
// order (bit 0 first) follows from the cell chosen in mux2_stage.
`timescale 1ps / 1fs
module serializer_lane #(
  parameter int unsigned DATA_W = locs_pkg::DATA_W
) (
  input  logic [$clog2(DATA_W)-1:0] clk_stage,
  input  logic [$clog2(DATA_W)-1:0] clk_stage_b,
  input  logic [DATA_W-1:0]         data,
  output logic                      serial
);
  localparam int unsigned LEVELS = $clog2(DATA_W);

  // lvl[i] is the input of level i; level i has DATA_W >> i inputs.
  logic [DATA_W-1:0] lvl [LEVELS+1];

  assign lvl[0] = data;

  for (genvar i = 0; i < LEVELS; i++) begin : g_level
    localparam int unsigned W = DATA_W >> i;
    logic [W/2-1:0] q;
    mux2_stage #(.WIDTH_IN(W)) u_mux (
      .clk   (clk_stage[i]),
      .clk_b (clk_stage_b[i]),
      .d     (lvl[i][W-1:0]),
      .q     (q)
    );
    assign lvl[i+1] = {{(DATA_W - W/2){1'b0}}, q};
  end

  assign serial = lvl[LEVELS][0];

  initial assert (DATA_W >= 2 && (1 << LEVELS) == DATA_W)
    else $error("serializer_lane: DATA_W must be a power of two");
endmodule
