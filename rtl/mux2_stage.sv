// mux2_stage: one level of the binary-tree serializer, a WIDTH_IN:WIDTH_IN/2
// multiplexer built from half-rate 2:1 cells.
//
// On each rising edge of clk both halves of d are captured: d[H-1:0] into qa
// and d[WIDTH_IN-1:H] into qb (H = WIDTH_IN/2). On the rising edge of the
// complementary clock clk_b (the falling edge of clk) qb is copied into
// qb_hold, so that each half is stable for the whole phase in which it is
// selected. The clock level then steers the output: while clk is low q shows
// the first half (qa) of the word captured at the last rising edge, while clk
// is high it shows the second half (qb_hold) of the word captured one edge
// earlier. q therefore carries WIDTH_IN/2-bit words at twice the clock rate,
// bit j sending d[j] and then d[j+H]; chained 16:8, 8:4, 4:2, 2:1 this sends
// the parallel word out with bit 0 first.
//
// Timing: q changes on both edges of clk. The next level, clocked at twice
// the rate, samples q on its rising edges, which coincide with the edges of
// clk, so it takes the value held during the half period that just ended.
// The first half of a word appears at q half a clock period after the
// capturing edge and the second half one full period after it.
//
// The paper gives the tree of 2:1 multiplexers, static flip-flops and a pair
// of complementary clocks for the fastest one; the cell itself, the bit
// pairing and the absence of a reset are this design's choices.
`timescale 1ps / 1fs
module mux2_stage #(
  parameter int unsigned WIDTH_IN = 16
) (
  input  logic                  clk,
  input  logic                  clk_b,
  input  logic [WIDTH_IN-1:0]   d,
  output logic [WIDTH_IN/2-1:0] q
);
  localparam int unsigned H = WIDTH_IN / 2;

  logic [H-1:0] qa, qb, qb_hold;

  always_ff @(posedge clk) begin
    qa <= d[H-1:0];
    qb <= d[WIDTH_IN-1:H];
  end

  always_ff @(posedge clk_b) qb_hold <= qb;

  // Clock-steered output mux: each input is stable while it is selected.
  assign q = clk ? qb_hold : qa;

  initial assert (WIDTH_IN >= 2 && WIDTH_IN % 2 == 0)
    else $error("mux2_stage: WIDTH_IN must be even and at least 2");
endmodule
