// tb_div2: self-checking test of the divide-by-2 clock divider.
//
// Holds the divider in reset (output must stay low while the 4 GHz input
// runs), releases it and then checks after every rising input edge that the
// output equals a reference toggle kept by the testbench, and that exactly
// one output period passes per two input periods (measured from the time
// between output rising edges).
`timescale 1ps / 1fs
module tb_div2;
  localparam realtime T = 250.0;
  logic clk_in = 1'b0, rst_n = 1'b0, clk_out;
  int checks = 0, failures = 0;
  logic ref_q = 1'b0;
  realtime t_rise = -1.0;

  div2 dut (.clk_in(clk_in), .rst_n(rst_n), .clk_out(clk_out));

  always #(T/2) clk_in = ~clk_in;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge clk_in) if (rst_n) ref_q <= ~ref_q;

  always @(posedge clk_in) begin
    #(T/4);
    check(clk_out === ref_q, rst_n ? "toggle" : "held in reset");
  end

  always @(posedge clk_out) begin
    if (t_rise >= 0.0) check($realtime - t_rise == 2.0 * T, "output period");
    t_rise = $realtime;
  end

  initial begin
    repeat (10) @(negedge clk_in);
    rst_n = 1'b1;
    repeat (100) @(negedge clk_in);
    rst_n = 1'b0;                         // asynchronous reset in mid-run
    #1.0 check(clk_out === 1'b0, "asynchronous reset");
    t_rise = -1.0;
    repeat (4) @(negedge clk_in);
    rst_n = 1'b1;
    repeat (50) @(negedge clk_in);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #(T * 10000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
