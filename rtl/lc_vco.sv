// lc_vco: behavioural model of the LC-tank voltage controlled oscillator.
//
// The frequency rises linearly with the control voltage,
// f = F_MIN_GHZ + KVCO_GHZ_PER_V * vctrl, limited to F_MIN_GHZ..F_MAX_GHZ.
// The range is the 3.8-5.0 GHz the paper expected from its LC oscillator,
// which covers the 4 GHz the second prototype needs; the gain is this
// design's choice. The model integrates phase: whenever the frequency
// changes, the phase gathered so far at the old frequency is banked and the
// next edge is rescheduled at the new one, so short control pulses (the
// proportional kicks of the loop filter) move the phase by exactly
// f-step x pulse-width, as in a real oscillator.
//
// Interface: clk and its complement clk_b (the oscillator is differential);
// clk starts low at time zero.
`timescale 1ps / 1fs
module lc_vco #(
  parameter real F_MIN_GHZ      = 3.8,
  parameter real F_MAX_GHZ      = 5.0,
  parameter real KVCO_GHZ_PER_V = 0.5
) (
  input  real  vctrl,
  output logic clk,
  output logic clk_b
);
  real f_ghz;

  assign f_ghz = (F_MIN_GHZ + KVCO_GHZ_PER_V * vctrl > F_MAX_GHZ) ? F_MAX_GHZ
               : ((F_MIN_GHZ + KVCO_GHZ_PER_V * vctrl < F_MIN_GHZ) ? F_MIN_GHZ
               : F_MIN_GHZ + KVCO_GHZ_PER_V * vctrl);

  real     phase;          // fraction of the current half period done
  real     f_seg;          // frequency of the current segment
  realtime t_seg;          // start of the current segment
  event    retime;

  always @(f_ghz) -> retime;

  initial begin
    clk   = 1'b0;
    phase = 0.0;
    forever begin
      t_seg = $realtime;
      f_seg = f_ghz;
      // Wait for the edge or for a change of frequency.
      fork
        #((1.0 - phase) * 500.0 / f_seg);   // half period is 500/f ps
        @(retime);
      join_any
      disable fork;
      phase = phase + ($realtime - t_seg) * f_seg / 500.0;
      // Toggle when less than the 1 fs time resolution is left.
      if ((1.0 - phase) * 500.0 / f_seg < 1.0e-3) begin
        clk   = ~clk;
        phase = 0.0;
        // Release the cancelled wait of the last segment, so that a
        // constant frequency does not let such waits pile up.
        -> retime;
      end
    end
  end

  assign clk_b = ~clk;
endmodule
