# A double-lane 16:1 serializer with a shared LC-PLL

This is RTL for a radiation-tolerant serializer. Each of its two lanes takes a
16-bit word on every cycle of a 500 MHz reference clock and sends it out as one
8 Gbps serial stream. The serialization is done by a binary tree of 2:1
multiplexers. Every level of the tree halves the word width and doubles the
rate, so that only the last multiplexer has to run at the full bit rate. One
charge-pump PLL with an LC-tank oscillator serves both lanes. It makes the four
clocks the tree needs: 4 GHz from the oscillator, then 2 GHz, 1 GHz and
0.5 GHz from a chain of divide-by-2 stages. The 0.5 GHz clock doubles as the
PLL feedback, so it is phase-aligned to the reference.

The architecture is the one published for the second prototype, "LOCs2", of a
serializer ASIC for the ATLAS liquid-argon calorimeter read-out upgrade. That
chip is in a 0.25 µm silicon-on-sapphire CMOS process. Its first prototype,
"LOCs1", ran at 5 Gbps on one lane with the same multiplexer tree. This code
is an independent rendering of that architecture and is not the authors'
design database. The logic is synthesizable SystemVerilog: the multiplexer
stages, the dividers and the phase-frequency detector. The analog parts of the
PLL are event-driven behavioural models: the charge pump, the loop filter and
the VCO. They are just detailed enough for the loop to lock in simulation. Pad
drivers and receivers are not modelled (see "What is not here").

```
                    data[0] (16)                                         serial[0]
                        |                                                 (8 Gbps)
               +--------v-------+  8  +-------+  4  +-------+  2  +-------+   |
   lane 0      |     16:8       |---->|  8:4  |---->|  4:2  |---->|  2:1  |---+
               +--------^-------+     +---^---+     +---^---+     +---^---+
                        |0.5 GHz          |1 GHz        |2 GHz        |4 GHz (+ complement)
   lane 1      (identical, same clocks) ----> serial[1]
                        |                 |             |             |
          +-------------+-----------------+-------------+-------------+-----+
          |   lcpll   clk_tap[3] <-Div2- clk_tap[2] <-Div2- clk_tap[1] <-Div2- clk_tap[0] <- LC VCO
          |              |                                                 ^    |
 ref_clk -+-> edge sel -> PFD --up/dn--> charge pump --icp--> R-C filter --+    |
 500 MHz  |              ^ (feedback = clk_tap[3])                vctrl         |
          +-----------------------------------------------------------------------+
```

## The multiplexer tree

This is the part that needs the most care, because the whole datapath is
clocked by four related clocks and its outputs change on both clock edges.

### One level: `mux2_stage`

A level with N inputs is N/2 copies of a half-rate 2:1 cell. On the rising
edge of its clock `clk` it captures both halves of the input word:

- `qa` takes `d[N/2-1:0]`;
- `qb` takes `d[N-1:N/2]`.

On the rising edge of the complementary clock `clk_b`, which is the falling
edge of `clk`, the flip-flop `qb_hold` copies `qb`. The output is then steered
by the clock level:

```
q = clk ? qb_hold : qa
```

Each selected register changes only in the phase in which it is *not*
selected, so the output is free of races. While `clk` is low, `q` shows the
first half of the newest word. While `clk` is high, it shows the second half of
the word captured one edge earlier. One N-bit word per clock cycle thus becomes
two N/2-bit words per cycle, one per clock phase.

```
clk          ‾‾‾‾|____|‾‾‾‾|____|‾‾‾‾|____
capture      W0        W1        W2
q                 W0.lo W0.hi W1.lo W1.hi W2.lo
```

The source architecture calls for a pair of complementary clocks at the last
2:1 multiplexer, which must run at the full rate. Here every level has the
`clk_b` port. The top feeds the last level from the VCO's own complementary
output, and the three slower levels from an inverted copy of their clock.

### Four levels: `serializer_lane`

Level i runs on `clk_stage[i]`: 0.5, 1, 2 and 4 GHz. Level i+1 samples the
output of level i on its own rising edges. Those edges coincide with both
edges of the level-i clock, so level i+1 always takes the value that was held
for the half period just ended. Because output bit j of a level sends `d[j]`
first and `d[j+N/2]` second, the 16-bit word leaves **bit 0 first, bit 15
last**.

Timing, with Ti the period of `clk_stage[i]` (2000, 1000, 500 and 250 ps):

| quantity | value |
|---|---|
| bits per word cycle | 16 (one word per period of `clk_stage[0]`) |
| bit period | T3/2 = 125 ps (8 Gbps) |
| first bit of a word starts | T0 + T1 + T2 + T3/2 = 3625 ps = 29 bit periods after the capturing edge |
| level-to-level capture delay | Ti (the next level captures one period of the current level later) |

Nothing in the tree depends on the absolute frequency. With the first
prototype's clock plan (312.5 MHz to 2.5 GHz) the same lane is a 5 Gbps
serializer.

The reference clock, the PLL feedback and the rising edge of `clk_stage[0]`
coincide once the loop is locked. Input data is sampled on that edge, so it
must be stable around it. Change it on the opposite reference edge. The PLL's
edge-select input lets a user move the sampling point by half a reference
period instead of retiming the data.

## The clock generator: `lcpll`

| part | module | kind | what it does here |
|---|---|---|---|
| edge select | in `lcpll` | logic | `ref_clk ^ ref_edge_sel`: lock to the rising (0) or falling (1) reference edge |
| PFD | `pfd` | logic | two D flip-flops with D tied high, cleared together when both are set (tri-state PFD, no reset delay) |
| charge pump | `charge_pump` | model | ±I while only `up` / only `dn` is high; I = 50 µA·(`bw_sel`+1) |
| loop filter | `loop_filter` | model | series R-C, 15 kΩ and 2.9 pF; `vctrl = vint + R·icp`, clamped to 0–2.5 V |
| VCO | `lc_vco` | model | f = 3.8 GHz + 0.5 GHz/V·`vctrl`, limited to 3.8–5.0 GHz; complementary outputs |
| dividers | `div2` ×3 | logic | toggle flip-flops with asynchronous reset; the last one is the feedback |

The filter values give a loop bandwidth of about 15 MHz at the default pump
current, with the zero a factor of four below it. The source gives no values
for them. The 2-bit `bw_sel` scales the pump current. This provides the
programmable loop bandwidth that the source describes for its first-prototype
PLL, whose purpose is to suit references of different quality.

**How the analog models work.** Everything is event-driven; there is no time
step.

- The pump current is piecewise constant. The filter brings its capacitor
  charge up to date each time the current changes.
- The VCO integrates phase. Each time its frequency changes, it banks the
  fraction of the half period already completed and reschedules the next edge
  at the new frequency. A proportional kick of width w therefore advances the
  phase by Δf·w, as a real oscillator would.
- A simpler VCO, one that only samples its control voltage once per half
  period, would leave a static phase error of about 10 ps in this loop.

The loop is a type-II loop, and in simulation it behaves as follows:

- From power-up (VCO at 3.8 GHz) it locks to 500 MHz within about 110
  reference cycles (220 ns), with a control voltage of 0.400 V.
- The remaining phase error is below 1 ps.
- After a switch of `ref_edge_sel`, it relocks to the other reference edge in
  about 90 cycles.

The PFD's reset has zero delay. The up/down glitch that a real PFD keeps to
avoid the charge-pump dead zone therefore has zero width here.

Clock buffers are wires. The divider outputs switch in the same simulation
time step as the VCO edge that causes them. The slower levels therefore see
their clock edges in a later delta cycle than the faster ones, and this
ordering is what makes the tree sample correctly in simulation. On silicon,
the same relationship has to be guaranteed by the clock-buffer delays.

## Top level: `locs2_top`

| port | dir | width | meaning |
|---|---|---|---|
| `ref_clk` | in | 1 | 500 MHz reference, after its LVDS receiver |
| `ref_edge_sel` | in | 1 | 0: lock to the rising reference edge, 1: to the falling edge |
| `bw_sel` | in | 2 | PLL pump current / loop bandwidth setting |
| `rst_n` | in | 1 | active-low reset of the dividers and the PFD |
| `data[l]` | in | LANES × 16 | lane l's word, after its LVDS receivers; sampled on the locked reference edge |
| `serial` | out | LANES | one serial stream per lane, to the CML output drivers |
| `clk_ser` | out | 1 | 4 GHz serializer clock, for observation |
| `vctrl` | out | real | PLL control voltage, for observation |

| parameter | default | source |
|---|---|---|
| `LANES` | 2 | two lanes sharing one PLL, as published |
| `DATA_W` | 16 | 16-bit parallel input, as published |
| `N_DIV` | 3 | three Div2 between the 4 GHz VCO and the 0.5 GHz PFD input, as published |

`DATA_W` must equal 2^(N_DIV+1). `locs_pkg` holds these three numbers.

## Operating points

| case | runs? | notes |
|---|---|---|
| 2 lanes, 16 bits at 500 MHz, 8 Gbps per lane | yes | the default; end-to-end test at default parameters |
| PRBS 2^7−1 at 8 Gbps, the pattern used for the published jitter simulations | yes | 25 600 bits per run checked error-free; jitter itself is analog and not modelled |
| first prototype: 1 lane, 5 Gbps from 312.5 MHz, measured working range 4.0–5.7 Gbps | lane only | the lane is clean at 4.0, 5.0 and 5.7 Gbps with ideal clocks; the LC-VCO (3.8–5.0 GHz) cannot make the 2.0–2.85 GHz clock. The first prototype used a ring-oscillator PLL, which is not built. The PLL stays at 3.8 GHz with a 312.5 MHz reference |
| LC-PLL at 4.6–5.0 GHz, the measured range of the first LC-PLL | yes | locks at 4.6, 4.9 and 4.95 GHz with a divide-by-8 chain; at exactly 5.0 GHz the loop holds the frequency but has no headroom for phase. The first prototype's LC-PLL divided by 16; with `N_DIV`=4 it locks at 4.9 GHz to 306.25 MHz |

## Where this departs from the source, and what it adds

- **Bit order.** The source does not state it. Bit 0 is sent first; this
  follows from the pairing chosen in `mux2_stage`.
- **Bus widths in the block diagram.** The published LOCs2 diagram prints the
  widths 16, 8, 8, 8 between the levels. Its own level labels (16:8, 8:4, 4:2,
  2:1) and the first prototype's diagram give 16, 8, 4, 2. The RTL uses
  16, 8, 4, 2.
- **Edge selection and programmable bandwidth.** Both are described for the
  first prototype's ring-oscillator PLL. They are carried over here, on the
  stated basis that the low-speed CMOS circuits are inherited. The XOR
  implementation of the edge selector and the 2-bit current setting are this
  design's own choices.
- **Resets.** The source mentions none. The dividers and the PFD get an
  asynchronous active-low reset. The multiplexer tree has none: it is pure
  datapath and flushes within two word cycles.
- **Logic style.** In the second prototype the last 2:1 multiplexer and the
  first divider are CML and the rest is static CMOS. In RTL all of it is
  ordinary flip-flops.
- **Analog values.** The pump currents, the filter R and C, and the VCO gain
  are chosen here. Only the VCO's 3.8–5.0 GHz range comes from the source, as
  the range expected from its LC oscillator.

## What is not here

These blocks are analog and have no logic function. Their signals are the
top's ports:

- the LVDS receivers for data and reference;
- the clock fan-out buffers;
- the active-shunt-peaking CML output drivers;
- the four-lane VCSEL driver array: six pre-drive stages and one main drive
  stage, with active shunt peaking and external peaking control.

The first prototype's ring-oscillator PLL, its CML-to-CMOS converter and the
separate line/laser driver test structure are not part of this design.

## Files

| file | content |
|---|---|
| `rtl/locs_pkg.sv` | shared sizes |
| `rtl/mux2_stage.sv` | one tree level (half-rate 2:1 cells) |
| `rtl/serializer_lane.sv` | 16:1 tree |
| `rtl/div2.sv`, `rtl/pfd.sv` | PLL logic |
| `rtl/charge_pump.sv`, `rtl/loop_filter.sv`, `rtl/lc_vco.sv` | behavioural analog models |
| `rtl/lcpll.sv` | clock generator |
| `rtl/locs2_top.sv` | top |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_rate_sweep.sv` | lane at 4.0/5.0/5.7/8.0 Gbps and PLL across its tuning range |

## Simulating

Every file carries `` `timescale 1ps/1fs ``. The testbenches need Verilator 5
with timing support. Any testbench builds and runs like this:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/locs_pkg.sv tb/tb_locs2_top.sv --top-module tb_locs2_top -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself, with a
watchdog in case of a hang. All of them finish in well under a second of CPU
time. `tb_locs2_top` covers three phases, at the default size:

1. power-up lock with `bw_sel`=1;
2. a change to `bw_sel`=3;
3. a switch to falling-edge locking.

In each phase, every bit of both lanes is checked against the word it came
from, 29 bit periods after the capturing edge. An independent PRBS checker
reads the serial streams in mid-bit, without knowing the word boundaries, the
way a bit-error-rate tester does. The testbench also checks that the 4 GHz
clock makes exactly 800 edges per 100 reference periods. It fails if any of
the three phases does not come through clean.

Only the logic modules are synthesizable. The three analog models use `real`
ports and delays, and they are meant for simulation only.
