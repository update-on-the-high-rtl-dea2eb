// tb_serializer_lane: self-checking test of the 16:1 serializing unit.
//
// Ideal clocks of the second prototype: 4 GHz (250 ps) for the last 2:1
// level and 2, 1 and 0.5 GHz made from it by toggling on rising edges, as the
// dividers of the PLL do. A random 16-bit word is applied on each falling
// edge of the 0.5 GHz clock. For every word captured on a rising edge of the
// 0.5 GHz clock at time tc the testbench expects bit k on the serial output
// from tc + 3625 ps + k*125 ps for 125 ps (first bit 29 bit periods after the
// capturing edge, bit 0 first, 8 Gbps), and samples each bit 5 ps after it
// should start and 5 ps before it should end. The expected latency is worked
// out from the stage clocks: T0 + T1 + T2 + T3/2 = 2000+1000+500+125 ps.
`timescale 1ps / 1fs
module tb_serializer_lane;
  localparam int unsigned W = 16;
  localparam realtime T3 = 250.0;            // fastest clock period
  localparam realtime UI = T3 / 2;           // bit period, 125 ps
  localparam realtime LAT = 2000.0 + 1000.0 + 500.0 + 125.0;

  logic [3:0] clk_stage = '0;
  logic [W-1:0] data = '0;
  logic serial;
  int checks = 0, failures = 0, words_checked = 0;

  serializer_lane #(.DATA_W(W)) dut (
    .clk_stage(clk_stage), .clk_stage_b(~clk_stage), .data(data), .serial(serial));

  always #(T3/2) clk_stage[3] = ~clk_stage[3];
  always @(posedge clk_stage[3]) clk_stage[2] <= ~clk_stage[2];
  always @(posedge clk_stage[2]) clk_stage[1] <= ~clk_stage[1];
  always @(posedge clk_stage[1]) clk_stage[0] <= ~clk_stage[0];

  always @(negedge clk_stage[0]) data <= W'($urandom);

  task automatic expect_word(input logic [W-1:0] w, input realtime tc);
    logic ok = 1'b1;
    #(LAT - ($realtime - tc));
    for (int k = 0; k < W; k++) begin
      #5.0;
      checks++;
      if (serial !== w[k]) begin ok = 0; failures++;
        $display("FAIL word %h bit %0d start at %0t: got %b", w, k, $time, serial); end
      #(UI - 10.0);
      checks++;
      if (serial !== w[k]) begin ok = 0; failures++;
        $display("FAIL word %h bit %0d end at %0t: got %b", w, k, $time, serial); end
      #5.0;
    end
    if (ok) words_checked++;
  endtask

  int n_words = 0;
  always @(posedge clk_stage[0]) begin
    automatic logic [W-1:0] w = data;
    automatic realtime tc = $realtime;
    n_words++;
    fork expect_word(w, tc); join_none
  end

  initial begin
    wait (n_words == 300);
    #(LAT + 3000.0);
    checks++;
    if (words_checked < 295) begin failures++; $display("FAIL only %0d words clean", words_checked); end
    $display("words serialized and checked: %0d", words_checked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #(2000.0 * 1000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
