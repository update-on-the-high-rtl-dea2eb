// tb_lc_vco: self-checking test of the VCO model.
//
// Sets control voltages and measures the average period over 100 cycles
// against f = 3.8 GHz + 0.5 GHz/V * vctrl, limited to 3.8..5.0 GHz: 0.4 V
// must give 4 GHz (250 ps), the frequency the second prototype runs at.
// Also checks that clk_b is the complement of clk.
`timescale 1ps / 1fs
module tb_lc_vco;
  real vctrl = 0.0;
  logic clk, clk_b;
  int checks = 0, failures = 0;

  lc_vco dut (.vctrl(vctrl), .clk(clk), .clk_b(clk_b));

  task automatic measure(input real v, input real f_exp_ghz);
    realtime t0, per;
    vctrl = v;
    repeat (3) @(posedge clk);
    t0 = $realtime;
    repeat (100) @(posedge clk);
    per = ($realtime - t0) / 100.0;
    checks++;
    if (per > 1000.0 / f_exp_ghz + 0.01 || per < 1000.0 / f_exp_ghz - 0.01) begin
      failures++;
      $display("FAIL vctrl=%f: period %f ps, expected %f", v, per, 1000.0 / f_exp_ghz);
    end
    #1.0;
    checks++;
    if (clk_b !== ~clk) begin failures++; $display("FAIL clk_b not complement"); end
  endtask

  initial begin
    measure(0.4, 4.0);
    measure(0.0, 3.8);
    measure(1.0, 4.3);
    measure(2.4, 5.0);
    measure(-1.0, 3.8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1.0e7;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
