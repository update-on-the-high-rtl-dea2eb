// locs_pkg: constants shared by the double-lane 16:1 serializer.
//
// The serializer packs DATA_W parallel bits per reference cycle into one
// serial stream through log2(DATA_W) levels of 2:1 multiplexing. The clock
// generator divides its VCO by 2 at every level, so the same number also
// sets the length of the divider chain. LANES and DATA_W follow the paper's second
// prototype; N_DIV is derived from DATA_W.
`timescale 1ps / 1fs
package locs_pkg;
  localparam int unsigned LANES   = 2;    // two serializer lanes share one PLL
  localparam int unsigned DATA_W  = 16;   // parallel bits per lane per reference cycle
  localparam int unsigned N_DIV   = $clog2(DATA_W) - 1;  // Div2 stages between VCO and PFD (3)
endpackage
