// tb_mux2_stage: self-checking test of one 16:8 level of the serializer tree.
//
// A 1 GHz clock (1000 ps) drives the stage; a new random word is applied on
// every falling edge. The testbench keeps its own copy of the last two words
// captured on rising edges and checks, a quarter period into each phase and
// again just before the phase ends, that the output shows the first half of
// the newest word while the clock is low and the second half of the word
// before it while the clock is high. Together this checks the function, the
// two output slots per clock cycle (twice the input rate) and the half-period
// latency.
`timescale 1ps / 1fs
module tb_mux2_stage;
  localparam int unsigned W = 16;
  localparam int unsigned H = W / 2;
  localparam realtime T = 1000.0;

  logic         clk = 1'b0;
  logic [W-1:0] d = '0;
  logic [H-1:0] q;
  int checks = 0, failures = 0;

  mux2_stage #(.WIDTH_IN(W)) dut (.clk(clk), .clk_b(~clk), .d(d), .q(q));

  always #(T/2) clk = ~clk;

  always @(negedge clk) d <= W'($urandom);

  logic [W-1:0] cap_cur = '0, cap_prev = '0;
  int n_edges = 0;
  always @(posedge clk) begin
    cap_prev <= cap_cur;
    cap_cur  <= d;
    n_edges  <= n_edges + 1;
  end

  task automatic check(input logic [H-1:0] got, input logic [H-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: q=%h expected %h", what, $time, got, exp);
    end
  endtask

  // High phase: second half of the word captured one edge earlier.
  always @(posedge clk) if (n_edges >= 3) begin
    #(T/8)       check(q, cap_prev[W-1:H], "high phase start");
    #(T/2 - T/4) check(q, cap_prev[W-1:H], "high phase end");
  end
  // Low phase: first half of the word captured at the last rising edge.
  always @(negedge clk) if (n_edges >= 3) begin
    #(T/8)       check(q, cap_cur[H-1:0], "low phase start");
    #(T/2 - T/4) check(q, cap_cur[H-1:0], "low phase end");
  end

  initial begin
    repeat (200) @(posedge clk);
    #1;
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
