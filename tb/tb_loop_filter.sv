// tb_loop_filter: self-checking test of the series R-C loop filter model.
//
// Drives current pulses and compares the control voltage with the closed
// form of a 15 kOhm resistor in series with 2.9 pF: during a pulse of
// current I the output steps by R*I; after a pulse of length t the capacitor
// has gained I*t/C. Also checks that a sink current lowers the voltage and
// that the voltage is clamped at 0 V.
`timescale 1ps / 1fs
module tb_loop_filter;
  localparam real R = 15.0e3, C = 2.9e-12, I = 100.0e-6;
  real icp = 0.0, vctrl, v_exp;
  int checks = 0, failures = 0;

  loop_filter dut (.icp(icp), .vctrl(vctrl));

  task automatic check(input real got, input real exp, input string what);
    checks++;
    if (got > exp + 1.0e-6 || got < exp - 1.0e-6) begin
      failures++;
      $display("FAIL %s: vctrl=%f expected %f", what, got, exp);
    end
  endtask

  initial begin
    #100.0;
    check(vctrl, 0.0, "initial");
    icp = I; #1.0;
    check(vctrl, R * I, "proportional step");
    #999.0;
    icp = 0.0; #1.0;
    v_exp = I * 1000.0e-12 / C;
    check(vctrl, v_exp, "charge after 1000 ps pulse");
    for (int k = 0; k < 10; k++) begin
      #500.0 icp = I; #300.0 icp = 0.0;
    end
    #1.0;
    v_exp = v_exp + 10 * I * 300.0e-12 / C;
    check(vctrl, v_exp, "charge after ten 300 ps pulses");
    icp = -I; #1.0;
    check(vctrl, 0.0, "sink step clamps at 0 V");
    #(400.0 - 1.0);
    icp = 0.0; #1.0;
    v_exp = v_exp - I * 400.0e-12 / C;
    check(vctrl, v_exp, "discharge after 400 ps");
    icp = -I; #1.0e5; icp = 0.0; #1.0;
    check(vctrl, 0.0, "integrator clamped at 0 V");
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
