// tb_locs2_top: end-to-end test of the double-lane serializer at its default
// size (2 lanes x 16 bits, 500 MHz reference, 4 GHz PLL, 8 Gbps per lane).
//
// Each lane is fed with a PRBS7 sequence (x^7 + x^6 + 1, the pattern used to
// characterise the chip), packed 16 bits per word with the earliest bit in
// bit 0; lane 1 starts from a different seed. Words change on the reference
// edge opposite to the one the PLL locks to. Two independent checkers run:
//   * a word checker: for each selected reference edge tc it expects bit k of
//     the word present at tc on the lane output in the middle of the bit slot
//     tc + 3625 ps + k*125 ps (first bit 29 bit periods after the capturing
//     edge, 16 bits per reference period);
//   * a PRBS checker that samples each lane in mid-bit on both edges of the
//     4 GHz clock and checks every bit against the previous seven, the way a
//     bit-error-rate tester does, without knowing the word boundaries.
// It also counts 4 GHz clock edges over 100 reference periods (must be 800).
// The run covers power-up lock, a change of the loop-bandwidth setting and
// a switch from rising- to falling-edge locking, each of which must happen
// and be followed by error-free data.
`timescale 1ps / 1fs
module tb_locs2_top;
  import locs_pkg::*;

  localparam realtime TREF = 2000.0;
  localparam realtime UI   = TREF / DATA_W;                 // 125 ps
  localparam realtime LAT  = 2000.0 + 1000.0 + 500.0 + 125.0;
  localparam int unsigned SETTLE = 400;                     // reference cycles

  logic ref_clk = 1'b0, ref_edge_sel = 1'b0, rst_n = 1'b0;
  logic [1:0] bw_sel = 2'd1;
  logic [DATA_W-1:0] data [LANES];
  logic [LANES-1:0] serial;
  logic clk_ser;
  real vctrl;
  int checks = 0, failures = 0;

  locs2_top dut (
    .ref_clk(ref_clk), .ref_edge_sel(ref_edge_sel), .bw_sel(bw_sel), .rst_n(rst_n),
    .data(data), .serial(serial), .clk_ser(clk_ser), .vctrl(vctrl));

  always #(TREF/2) ref_clk = ~ref_clk;

  // ---------------- PRBS7 sources ----------------
  logic [6:0] gen [LANES];
  initial for (int l = 0; l < LANES; l++) begin
    gen[l]  = 7'(7'h7f - 13 * l);
    data[l] = '0;
  end

  function automatic logic prbs_next(ref logic [6:0] s);
    logic b = s[6] ^ s[5];
    s = {s[5:0], b};
    return b;
  endfunction

  // New words on the edge the PLL does not lock to.
  always @(ref_clk) if (ref_clk == ref_edge_sel)
    for (int l = 0; l < LANES; l++) begin
      logic [DATA_W-1:0] w;
      for (int k = 0; k < DATA_W; k++) w[k] = prbs_next(gen[l]);
      data[l] <= w;
    end

  // ---------------- word checker ----------------
  bit checking = 1'b0;
  int words_ok [2];             // per ref_edge_sel value
  int word_errors = 0;

  task automatic expect_word(input int l, input logic [DATA_W-1:0] w, input realtime tc, input bit mode);
    bit ok = 1'b1;
    #(LAT + UI / 2 - ($realtime - tc));
    for (int k = 0; k < DATA_W; k++) begin
      checks++;
      if (serial[l] !== w[k]) begin
        ok = 1'b0; failures++;
        if (word_errors++ < 10) $display("FAIL lane %0d word %h bit %0d at %0t", l, w, k, $time);
      end
      #(UI);
    end
    if (ok) words_ok[mode]++;
  endtask

  always @(ref_clk) if (ref_clk != ref_edge_sel && checking)
    for (int l = 0; l < LANES; l++) begin
      automatic int li = l;
      automatic logic [DATA_W-1:0] w = data[l];
      automatic realtime tc = $realtime;
      automatic bit m = ref_edge_sel;
      fork expect_word(li, w, tc, m); join_none
    end

  // ---------------- PRBS (BER-tester style) checker ----------------
  logic [6:0] rx [LANES];
  int rx_bits = 0, rx_errors = 0;
  always @(clk_ser) begin
    #(UI / 2);
    for (int l = 0; l < LANES; l++) begin
      if (checking) begin
        rx_bits++;
        if (serial[l] !== (rx[l][6] ^ rx[l][5])) rx_errors++;
      end
      rx[l] = {rx[l][5:0], serial[l]};
    end
  end

  // ---------------- rate check ----------------
  int ser_edges = 0;
  always @(posedge clk_ser) ser_edges++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  int n_lock = 0, n_bw_change = 0, n_edge_switch = 0;

  task automatic run_phase(input string name, input int cycles);
    int e0, rb0, re0;
    int w0;
    repeat (SETTLE) @(posedge ref_clk);
    w0 = words_ok[0] + words_ok[1];
    rb0 = rx_bits; re0 = rx_errors;
    checking = 1'b1;
    repeat (8) @(posedge ref_clk);     // let the PRBS checker fill its history
    re0 = rx_errors; rb0 = rx_bits;
    e0 = ser_edges;
    repeat (100) @(posedge ref_clk);
    check(ser_edges - e0 == 100 * 8, $sformatf("%s: %0d serializer clock edges in 100 reference periods", name, ser_edges - e0));
    repeat (cycles - 100) @(posedge ref_clk);
    checking = 1'b0;
    #(2 * TREF + LAT);
    check(rx_errors == re0 && rx_bits - rb0 > 0, $sformatf("%s: PRBS checker saw %0d errors in %0d bits", name, rx_errors - re0, rx_bits - rb0));
    // Count the phase as locked only if the data came through clean.
    if (rx_errors == re0 && words_ok[0] + words_ok[1] - w0 >= LANES * (cycles - 10)) n_lock++;
    $display("%s: vctrl %0.3f V, PRBS bits %0d errors %0d, words ok (rising/falling) %0d/%0d",
             name, vctrl, rx_bits - rb0, rx_errors - re0, words_ok[0], words_ok[1]);
  endtask

  initial begin
    words_ok[0] = 0; words_ok[1] = 0;
    repeat (5) @(posedge ref_clk);
    rst_n = 1'b1;
    run_phase("rising edge, bw_sel=1", 300);
    bw_sel = 2'd3; n_bw_change++;
    run_phase("rising edge, bw_sel=3", 200);
    ref_edge_sel = 1'b1; n_edge_switch++;
    run_phase("falling edge, bw_sel=3", 300);

    check(n_lock == 3, "PLL lock phases");
    check(n_bw_change > 0, "bandwidth setting changed");
    check(n_edge_switch > 0, "reference edge switched");
    check(words_ok[0] >= LANES * 450, $sformatf("%0d clean words locked to the rising edge", words_ok[0]));
    check(words_ok[1] >= LANES * 280, $sformatf("%0d clean words locked to the falling edge", words_ok[1]));
    $display("mechanisms: lock %0d, bandwidth change %0d, edge switch %0d; words checked %0d",
             n_lock, n_bw_change, n_edge_switch, words_ok[0] + words_ok[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #(TREF * 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
