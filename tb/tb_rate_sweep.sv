// tb_rate_sweep: the serializer and the clock generator at the operating
// points the design is meant for.
//
// Part 1, serializer lanes. Four 16:1 lanes run side by side from ideal
// clocks at 4.0, 5.0 and 5.7 Gbps (the first prototype's nominal rate and the
// edges of its working range, with stage clocks of 1/32, 1/16, 1/8 and 1/4 of
// the bit rate, i.e. 312.5 MHz to 2.5 GHz at 5 Gbps) and at 8 Gbps (the
// second prototype). Each lane carries PRBS7 words; every bit is checked in
// its slot, 29 bit periods after the capturing edge, bit 0 first.
//
// Part 2, clock generator. PLL instances get references of f/8 for VCO
// frequencies f = 4.0, 4.6, 4.9 and 4.95 GHz (the second prototype's clock
// and points across the 4.6-5.0 GHz measured tuning range of the first
// LC-PLL; at exactly 5.0 GHz, the end of the model's range, the loop holds
// the frequency but has no room left to correct phase); each must lock, with 100 x 2^N_DIV VCO
// edges in 100 reference periods and the feedback within 5 ps of the reference.
// One more instance has four dividers, as the first prototype's LC-PLL had,
// and must lock at 4.9 GHz to a 306.25 MHz reference.
// A further instance gets the first prototype's 312.5 MHz reference, which
// would need a 2.5 GHz VCO: the LC oscillator cannot go that low, so the
// loop must end up pinned at its 3.8 GHz minimum instead of locking.
`timescale 1ps / 1fs
module tb_rate_sweep;
  localparam int unsigned W = 16;
  localparam int unsigned NR = 4;
  localparam real RATE_GBPS [NR] = '{4.0, 5.0, 5.7, 8.0};
  localparam int unsigned NP = 6;
  localparam real FVCO_GHZ [NP] = '{4.0, 4.6, 4.9, 4.95, 2.5, 4.9};
  // Divider chain length per instance: the last one is the first
  // prototype's LC-PLL, which divided its VCO by 16.
  localparam int unsigned NDIV [NP] = '{3, 3, 3, 3, 3, 4};

  int checks = 0, failures = 0;
  int lane_words_ok [NR];
  bit lane_done [NR];
  bit pll_done [NP];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // ---------------- Part 1 ----------------
  for (genvar r = 0; r < NR; r++) begin : g_rate
    localparam realtime UI = 1000.0 / RATE_GBPS[r];
    logic [3:0] clk_stage = '0;
    logic [W-1:0] data = '0;
    logic serial;
    logic [6:0] gen = 7'h5a;

    serializer_lane #(.DATA_W(W)) u_lane (
      .clk_stage(clk_stage), .clk_stage_b(~clk_stage), .data(data), .serial(serial));

    always #(UI) clk_stage[3] = ~clk_stage[3];          // period 2 UI
    always @(posedge clk_stage[3]) clk_stage[2] <= ~clk_stage[2];
    always @(posedge clk_stage[2]) clk_stage[1] <= ~clk_stage[1];
    always @(posedge clk_stage[1]) clk_stage[0] <= ~clk_stage[0];

    always @(negedge clk_stage[0]) begin
      logic [W-1:0] w;
      for (int k = 0; k < W; k++) begin
        w[k] = gen[6] ^ gen[5];
        gen  = {gen[5:0], w[k]};
      end
      data <= w;
    end

    task automatic expect_word(input logic [W-1:0] w, input realtime tc);
      bit ok = 1'b1;
      #(29.5 * UI - ($realtime - tc));
      for (int k = 0; k < W; k++) begin
        if (serial !== w[k]) ok = 1'b0;
        #(UI);
      end
      checks++;
      if (ok) lane_words_ok[r]++;
      else begin failures++; $display("FAIL %0.1f Gbps word %h at %0t", RATE_GBPS[r], w, $time); end
    endtask

    int n_words = 0;
    always @(posedge clk_stage[0]) if (!lane_done[r]) begin
      automatic logic [W-1:0] w = data;
      automatic realtime tc = $realtime;
      n_words++;
      if (n_words > 2) fork expect_word(w, tc); join_none
      if (n_words == 202) begin
        #(40.0 * UI);
        lane_done[r] = 1'b1;
      end
    end
  end

  // ---------------- Part 2 ----------------
  for (genvar p = 0; p < NP; p++) begin : g_pll
    localparam int unsigned ND = NDIV[p];
    localparam realtime TREF = 1000.0 * (1 << ND) / FVCO_GHZ[p];
    logic ref_clk = 1'b0, rst_n = 1'b0;
    logic [ND:0] clk_tap;
    logic clk_vco_b;
    real vctrl;
    realtime t_ref, t_fb;
    int vco_edges = 0;

    lcpll #(.N_DIV(ND)) u_pll (
      .ref_clk(ref_clk), .ref_edge_sel(1'b0), .bw_sel(2'd1), .rst_n(rst_n),
      .clk_tap(clk_tap), .clk_vco_b(clk_vco_b), .vctrl(vctrl));

    always #(TREF/2) ref_clk = ~ref_clk;
    always @(posedge ref_clk) t_ref = $realtime;
    always @(posedge clk_tap[ND]) t_fb = $realtime;
    always @(posedge clk_tap[0]) vco_edges++;

    initial begin
      realtime err, worst = 0.0;
      int e0;
      #(3 * TREF) rst_n = 1'b1;
      repeat (1500) @(posedge ref_clk);
      @(posedge ref_clk); #1.0;
      e0 = vco_edges;
      for (int c = 0; c < 100; c++) begin
        @(posedge ref_clk); #1.0;
        err = t_fb - t_ref;
        if (err > TREF / 2) err -= TREF;
        if (err < 0.0) err = -err;
        if (err > worst) worst = err;
      end
      if (FVCO_GHZ[p] >= 3.8) begin
        check(vco_edges - e0 == 100 * (1 << ND), $sformatf("VCO %0.2f GHz: %0d VCO edges per 100 reference periods", FVCO_GHZ[p], vco_edges - e0));
        check(worst < 5.0, $sformatf("VCO %0.2f GHz: phase error %0.2f ps", FVCO_GHZ[p], worst));
        $display("VCO %0.2f GHz from %0.2f MHz reference, divide by %0d: locked, phase error %0.3f ps, vctrl %0.3f V",
                 FVCO_GHZ[p], 1.0e6 / TREF, 1 << ND, worst, vctrl);
      end else begin
        // Out of range: the loop drives the VCO to its minimum and stays there.
        // 3.8 GHz for 100 x 3200 ps: 1216 edges.
        check(vco_edges - e0 >= 1215 && vco_edges - e0 <= 1217 && vctrl == 0.0,
              $sformatf("VCO target %0.2f GHz below range: %0d VCO edges per 100 reference periods", FVCO_GHZ[p], vco_edges - e0));
        $display("VCO target %0.2f GHz from %0.2f MHz reference: cannot lock, %0d VCO edges per 100 reference periods",
                 FVCO_GHZ[p], 1.0e6 / TREF, vco_edges - e0);
      end
      pll_done[p] = 1'b1;
    end
  end

  initial begin
    foreach (lane_words_ok[r]) begin lane_words_ok[r] = 0; lane_done[r] = 1'b0; end
    foreach (pll_done[p]) pll_done[p] = 1'b0;
    while (!(lane_done.and() && pll_done.and())) #(1000.0);
    for (int r = 0; r < NR; r++) begin
      check(lane_words_ok[r] == 200, $sformatf("%0.1f Gbps: %0d of 200 words clean", RATE_GBPS[r], lane_words_ok[r]));
      $display("%0.1f Gbps lane: %0d words clean", RATE_GBPS[r], lane_words_ok[r]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #(1.0e7);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
