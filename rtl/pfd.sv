// pfd: phase and frequency detector of the clock generator.
//
// Two flip-flops with their D inputs tied high: a rising edge of ref_clk sets
// up, a rising edge of fb_clk sets dn, and as soon as both are set they are
// cleared together. When the reference leads, up is high for the time by
// which it leads and dn only glitches; when the feedback leads, the roles swap.
// A feedback that runs slow lets up stay high for most of the period, so the
// detector also pulls the frequency in. rst_n (asynchronous, active low)
// clears both outputs.
//
// The paper names the block and its Up/Down outputs; the tri-state
// two-flip-flop structure is the usual textbook form and is this design's
// choice. The clearing path has no delay here; in silicon its delay sets the
// minimum pulse width that keeps the charge pump out of its dead zone.
`timescale 1ps / 1fs
module pfd (
  input  logic ref_clk,
  input  logic fb_clk,
  input  logic rst_n,
  output logic up,
  output logic dn
);
  logic clr;

  assign clr = (up & dn) | ~rst_n;

  always_ff @(posedge ref_clk or posedge clr) begin
    if (clr) up <= 1'b0;
    else     up <= 1'b1;
  end

  always_ff @(posedge fb_clk or posedge clr) begin
    if (clr) dn <= 1'b0;
    else     dn <= 1'b1;
  end
endmodule
