// tb_charge_pump: self-checking test of the charge-pump model.
//
// Applies every combination of up, dn and the bandwidth setting and checks
// the output current against I = 50 uA * (bw_sel + 1), positive for up only,
// negative for dn only and zero otherwise.
`timescale 1ps / 1fs
module tb_charge_pump;
  logic up = 1'b0, dn = 1'b0;
  logic [1:0] bw_sel = '0;
  real icp, exp_i;
  int checks = 0, failures = 0;

  charge_pump dut (.up(up), .dn(dn), .bw_sel(bw_sel), .icp(icp));

  initial begin
    for (int b = 0; b < 4; b++)
      for (int u = 0; u < 2; u++)
        for (int d = 0; d < 2; d++) begin
          bw_sel = 2'(b); up = 1'(u); dn = 1'(d);
          #10.0;
          exp_i = 50.0e-6 * (b + 1) * (u - d);
          checks++;
          if (icp > exp_i + 1.0e-9 || icp < exp_i - 1.0e-9) begin
            failures++;
            $display("FAIL bw_sel=%0d up=%0d dn=%0d: icp=%g expected %g", b, u, d, icp, exp_i);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #1.0e6;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
