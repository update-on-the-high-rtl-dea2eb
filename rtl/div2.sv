// div2: divide-by-2 clock divider (the "Div2" boxes of the clock generator).
//
// A toggle flip-flop: clk_out inverts on every rising edge of clk_in, giving
// half the input frequency with a 50 % duty cycle. rst_n (asynchronous,
// active low) forces clk_out low so that a chain of dividers starts in a known
// phase; the reset is this design's addition. Chained three times after the
// VCO it gives the 2, 1 and 0.5 GHz clocks, the last one also being the PLL
// feedback. The rising edge of clk_out always coincides with a rising edge
// of clk_in.
`timescale 1ps / 1fs
module div2 (
  input  logic clk_in,
  input  logic rst_n,
  output logic clk_out
);
  always_ff @(posedge clk_in or negedge rst_n) begin
    if (!rst_n) clk_out <= 1'b0;
    else        clk_out <= ~clk_out;
  end
endmodule
