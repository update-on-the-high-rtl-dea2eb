// tb_lcpll: self-checking test of the clock generator.
//
// A 500 MHz reference (2000 ps) is applied and the loop is left to lock.
// Then, for each setting under test, the testbench checks over 100 reference
// cycles that
//   * the VCO makes exactly 8 rising edges per reference period (4 GHz) and
//     the taps 4, 2 and 1 edges (2, 1 and 0.5 GHz);
//   * the 0.5 GHz feedback rises within 5 ps of the selected reference edge.
// Settings: rising-edge lock with bandwidth settings 1 and 3, then a switch
// to falling-edge lock, after which the feedback must move by half a
// reference period. The time taken to relock after each change is printed.
`timescale 1ps / 1fs
module tb_lcpll;
  localparam realtime TREF = 2000.0;
  localparam int unsigned N_DIV = 3;

  logic ref_clk = 1'b0, ref_edge_sel = 1'b0, rst_n = 1'b0;
  logic [1:0] bw_sel = 2'd1;
  logic [N_DIV:0] clk_tap;
  logic clk_vco_b;
  real vctrl;
  int checks = 0, failures = 0;

  lcpll #(.N_DIV(N_DIV)) dut (
    .ref_clk(ref_clk), .ref_edge_sel(ref_edge_sel), .bw_sel(bw_sel), .rst_n(rst_n),
    .clk_tap(clk_tap), .clk_vco_b(clk_vco_b), .vctrl(vctrl));

  always #(TREF/2) ref_clk = ~ref_clk;

  int tap_edges [N_DIV+1];
  for (genvar k = 0; k <= N_DIV; k++) begin : g_cnt
    always @(posedge clk_tap[k]) tap_edges[k]++;
  end

  realtime t_ref_edge, t_fb_edge;
  always @(ref_clk) if (ref_clk ^ ref_edge_sel) t_ref_edge = $realtime;
  always @(posedge clk_tap[N_DIV]) t_fb_edge = $realtime;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Wait until 20 consecutive feedback edges fall within 5 ps of the
  // selected reference edge; returns the number of reference cycles taken.
  task automatic wait_lock(output int cycles);
    int good = 0;
    cycles = 0;
    while (good < 20 && cycles < 5000) begin
      @(posedge clk_tap[N_DIV]);
      #1.0;
      cycles++;
      if (t_fb_edge - t_ref_edge < 5.0 || t_ref_edge - t_fb_edge > TREF - 5.0 ||
          t_ref_edge - t_fb_edge < 5.0 && t_ref_edge - t_fb_edge > -5.0) good++;
      else good = 0;
    end
  endtask

  task automatic check_locked(input string setting);
    int e0 [N_DIV+1];
    realtime worst = 0.0, err;
    @(posedge clk_tap[N_DIV]);
    #1.0;
    foreach (e0[k]) e0[k] = tap_edges[k];
    for (int c = 0; c < 100; c++) begin
      @(posedge clk_tap[N_DIV]);
      #1.0;
      err = t_fb_edge - t_ref_edge;
      if (err > TREF / 2) err -= TREF;
      if (err < 0.0) err = -err;
      if (err > worst) worst = err;
    end
    // Counts are taken over exactly 100 feedback periods.
    for (int k = 0; k <= N_DIV; k++)
      check(tap_edges[k] - e0[k] == (100 << (N_DIV - k)),
            $sformatf("%s: tap %0d made %0d edges in 100 reference cycles", setting, k, tap_edges[k] - e0[k]));
    check(worst < 5.0, $sformatf("%s: worst phase error %0.2f ps", setting, worst));
    $display("%s: locked, worst phase error %0.3f ps, vctrl %0.3f V", setting, worst, vctrl);
  endtask

  int cyc;
  initial begin
    #(5 * TREF);
    rst_n = 1'b1;
    wait_lock(cyc);
    $display("rising-edge lock after %0d reference cycles", cyc);
    check(cyc < 5000, "lock from power-up");
    check_locked("rising edge, bw_sel=1");

    bw_sel = 2'd3;
    wait_lock(cyc);
    check_locked("rising edge, bw_sel=3");

    ref_edge_sel = 1'b1;
    repeat (5) @(posedge ref_clk);
    wait_lock(cyc);
    $display("falling-edge lock after %0d reference cycles", cyc);
    check(cyc < 5000, "relock to falling edge");
    check_locked("falling edge, bw_sel=3");
    // The feedback must now rise when the reference falls.
    @(posedge clk_tap[N_DIV]);
    #(TREF/4);
    check(ref_clk === 1'b0, "feedback rises at the falling reference edge");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #(TREF * 20000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
