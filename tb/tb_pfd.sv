// tb_pfd: self-checking test of the phase and frequency detector.
//
// Two 2000 ps clocks with a programmed skew: when the reference leads by S
// the up pulse must last S and dn must stay low; when the feedback leads the
// roles swap; with zero skew neither output may rise for a measurable time.
// A feedback at half the reference frequency must leave up high for most of
// the time (frequency detection). Pulse widths are measured from the event
// times and compared with the programmed skew.
`timescale 1ps / 1fs
module tb_pfd;
  localparam realtime T = 2000.0;
  logic ref_clk = 1'b0, fb_clk = 1'b0, rst_n = 1'b0, up, dn;
  int checks = 0, failures = 0;

  pfd dut (.ref_clk(ref_clk), .fb_clk(fb_clk), .rst_n(rst_n), .up(up), .dn(dn));

  // Time-integrated up and dn, in ps.
  realtime t_up_rise, t_dn_rise, up_time = 0.0, dn_time = 0.0;
  always @(posedge up) t_up_rise = $realtime;
  always @(negedge up) up_time += $realtime - t_up_rise;
  always @(posedge dn) t_dn_rise = $realtime;
  always @(negedge dn) dn_time += $realtime - t_dn_rise;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t (up %0.1f dn %0.1f)", what, $time, up_time, dn_time); end
  endtask

  // n cycles with the feedback delayed by skew (negative: feedback first).
  task automatic run(input realtime skew, input int n);
    for (int i = 0; i < n; i++) begin
      if (skew >= 0.0) begin
        ref_clk = 1'b1; #(skew); fb_clk = 1'b1; #(T/2 - skew);
        ref_clk = 1'b0; #(skew); fb_clk = 1'b0; #(T/2 - skew);
      end else begin
        fb_clk = 1'b1; #(-skew); ref_clk = 1'b1; #(T/2 + skew);
        fb_clk = 1'b0; #(-skew); ref_clk = 1'b0; #(T/2 + skew);
      end
    end
  endtask

  realtime skews[6] = '{300.0, 37.5, 0.0, -200.0, -812.5, 900.0};

  initial begin
    #100.0;
    check(up === 1'b0 && dn === 1'b0, "reset");
    rst_n = 1'b1;
    foreach (skews[i]) begin
      up_time = 0.0; dn_time = 0.0;
      run(skews[i], 10);
      check(up === 1'b0 && dn === 1'b0, "idle between edges");
      if (skews[i] >= 0.0) begin
        check(up_time == 10 * skews[i], $sformatf("up width for skew %0.1f", skews[i]));
        check(dn_time == 0.0, $sformatf("no dn for skew %0.1f", skews[i]));
      end else begin
        check(dn_time == -10 * skews[i], $sformatf("dn width for skew %0.1f", skews[i]));
        check(up_time == 0.0, $sformatf("no up for skew %0.1f", skews[i]));
      end
    end
    // Frequency detection: feedback at half the reference rate.
    up_time = 0.0; dn_time = 0.0;
    for (int i = 0; i < 20; i++) begin
      ref_clk = 1'b1; #(T/4); if (i % 2 == 0) fb_clk = 1'b1; #(T/4);
      ref_clk = 1'b0; #(T/4); fb_clk = 1'b0; #(T/4);
    end
    check(up_time > 10.0 * dn_time && up_time > 0.4 * 20 * T, "frequency detection: slow feedback gives up");
    // Reset clears a pending up.
    ref_clk = 1'b1; #(T/4);
    check(up === 1'b1, "up pending");
    rst_n = 1'b0; #1.0;
    check(up === 1'b0, "reset clears up");
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
