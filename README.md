# Unclocked mean-timer and coincidence-matrix trigger

A long scintillator strip read out by a photomultiplier at each end gives two
pulses. Their times depend on where along the strip the particle passed. Their
average does not: if light takes `Δ_L` to reach the left end and `Δ_R` to the
right, `Δ_L + Δ_R` is the strip's full propagation time, a constant. A
*mean-timer* produces, in real time, a pulse whose edge follows that average.
Here this is done in FPGA logic **without a clock**. Every output edge is
caused by input edges through fixed logic and routing delays. The time
resolution is therefore set by one routing step (579 ps, about ±290 ps after
quantisation), not by a 2 ns clock period.

The design serves a trigger with two hodoscopes (H1, H2) of 32 strips each:

```
128 PMT inputs ─► input delay (64 × 75 ps) ─► 1 ns pulse shortener ─┐
                                                                    ▼
            32 H1 mean-timers, 32 H2 mean-timers (tapped delay lines)
                                                                    ▼
             32 × 32 coincidence matrix with equalised timing ─► MATRIX-OUT (trigger)
                                                                ─► (H1+H2)-OUT, H2-OUT, H1-OUT
```

The matrix lets any set of (H1 strip, H2 strip) pairs raise the trigger. For
example, choosing pairs that point back to the target keeps scattered particles
and rejects beam-halo particles, which cross the hodoscopes parallel to the
beam. The matrix is built so that every pair's trigger comes out at the same
time.

The RTL follows a published FPGA implementation (on a Xilinx Virtex-5 board)
in its structure and sizes. The places where this model had to choose for
itself are listed in the last section.

## How a tapped-delay-line mean-timer works

Two delay lines of 54 taps with 53 equal steps of `D` = 579 ps run side by
side in opposite directions. The left pulse enters line L at tap 0. The right
pulse enters line R at the far end. AND gate `k` sees tap `k` of line L and
tap `53−k` of line R, which are the two taps sitting in the same logic block.

```
 left  ──► L0 ─D─► L1 ─D─► L2 ─ ··· ─► L53
            │       │       │            │
           AND0    AND1    AND2   ···  AND53 ──► 6-level OR tree ──► mt_out
            │       │       │            │
 right ──► R53 ◄─D─ R52 ◄─D─ R51 ◄ ··· ◄─ R0
```

The left pulse reaches AND `k` at `t_l + k·D` and the right pulse at
`t_r + (53−k)·D`. The first AND to see both pulses is the one where they pass
each other, so it fires at

```
t_fire ≈ (t_l + t_r)/2 + 53·D/2      (+0 … D/2, from the finite step)
```

This is the mean time plus a constant. The OR of all 54 ANDs adds a further
constant `6 × 250 ps`. In the default model the output follows
`(t_l+t_r)/2` by 16 843.5 ps plus 0–289.5 ps.

Points that matter when using or changing it:

* **Range.** The pulses meet inside the lines only while
  `|t_l − t_r| < 53·D ≈ 30.7 ns`. A 250 cm strip needs ±20 ns.
* **Pulse width.** An input pulse must be wider than `D`. Otherwise the two
  pulses can pass each other between two taps with no AND seeing both at
  once.
* **Strip-end effect.** When the pulses meet near an end of the lines, one of
  them may already be leaving the line, so only its trailing part overlaps
  the other. The AND then fires late. Keeping pulses short (1 ns, see the
  shortener) confines this to the last few taps.
* **Equal paths.** All steps must be equal, and all AND→OR paths must be
  equal. The original achieved this by hand placement and routing. In the RTL
  it holds by construction: each OR level is one delay, and every AND crosses
  exactly six levels.

## Coincidence matrix with equal timing

One matrix element (`matrix_element`) is a 3-input AND of its H1 channel, its
H2 channel and a static select bit. The AND output is OR-ed into a
coincidence line that passes through the element. H1 and H2 are passed on to
the neighbouring elements, so one wire per channel serves a whole column or
row.

The difficult part is the timing. H1 channel `i` runs up column `i` and
crosses one hop `a` per row. H2 channel `j` runs along row `j` and crosses one
hop `b` per column. Without correction, a pair would meet at different times
in different elements. The cure is to delay the inputs before they enter:
H1 channel `i` by `i·b` and H2 channel `j` by `j·a`. At element `(i, j)` both
signals have then been delayed by exactly `i·b + j·a`. The two pulses of any
pair therefore meet as they left the mean-timers, whatever the pair.

The three output lines are balanced in the same way:

| line | enters from | chained along | delay, any channel |
|---|---|---|---|
| H1-Output (OR of all H1) | top of each column, one more `a` | `b` per column | `N·a + (N−1)·b` |
| H2-Output (OR of all H2) | end of each row, one more `b` | `a` per row | `N·b + (N−1)·a` |
| Coincidence (OR of all selected ANDs) | up each column (`a` per row), then across the top | `b` per column | `N·a + (N−1)·b` after the pair met |

The coincidence line only says *that* a selected pair fired. Its timing is
taken from the H1-Output line. **MATRIX-OUT** is the coincidence line AND-ed
with H1-Output, so its edge comes from H1, or from H2 if H2 arrived later.
**(H1+H2)-OUT** is the OR of H1-OUT and H2-OUT.

With the defaults (`N = 32`, `a = 500 ps`, `b = 700 ps`), H1-OUT and
MATRIX-OUT follow the H1 mean-timer by 37.7 ns, and H2-OUT follows the H2
mean-timer by 37.9 ns.

## Input conditioning

* **Input delay** (`input_delay`): every input pin has a delay of
  0–63 steps of 75 ps (up to 4.725 ns). It cancels cable-length differences
  and the offsets between individual mean-timers. The setting is a static
  6-bit tap number.
* **Pulse shortener** (`pulse_shortener`): `dout = din AND NOT(din delayed by
  1 ns)`. A discriminator pulse of any length becomes a 1 ns pulse that starts
  at its leading edge. Shorter pulses pass unchanged. The top has
  `SHORTEN = 1` by default; with `SHORTEN = 0` the shortener is left out.

## Modelling delays

The whole function lives in delays, and RTL cannot express placed routing.
`delay_cell` is therefore a **behavioural model** of one route, or of `W`
parallel routes with equal delay. Each edge of each bit reappears `DELAY_PS`
later. This is a *transport* delay: a pulse shorter than the route still
passes, as it would through a chain of short physical segments. A plain
`assign #d` would absorb it. When `SYNTHESIS` is defined, the cell is a wire.
A synthesized netlist keeps the logic (ANDs, OR tree, matrix) but not the
timing. On a real device the timing must come from placement and routing
constraints, and must then be measured and trimmed with the input delays.

Every other module is ordinary synthesizable logic built around such cells:

| module | role |
|---|---|
| `mt_pkg` | shared constants and the tap type |
| `delay_cell` | behavioural route delay (transport), wire in synthesis |
| `input_delay` | 64-tap, 75 ps per-input delay: tapped chain + multiplexer |
| `pulse_shortener` | cuts pulses to 1 ns |
| `tapped_delay_line` | 54-tap line, 579 ps steps |
| `or_cascade` | 6-level tree of 2-input ORs, equal delay per level |
| `meantimer` | two opposed lines, 54 ANDs, OR tree |
| `matrix_element` | one selectable coincidence pixel |
| `coincidence_matrix` | N × N pixels, compensation, OR lines, re-timing, outputs |
| `trigger_top` | 4N inputs → 2N mean-timers → matrix → 4 outputs |

### `trigger_top` interface

| port | dir | width | meaning |
|---|---|---|---|
| `h1_l`, `h1_r`, `h2_l`, `h2_r` | in | N | discriminated PMT signals, left/right end of each strip |
| `tap_h1_l` … `tap_h2_r` | in | N × 6 | input delay settings, static |
| `sel` | in | N × N | `sel[i][j]` enables H1 strip `i` with H2 strip `j`, static |
| `mt_h1`, `mt_h2` | out | N | mean-timer outputs (monitor) |
| `matrix_out` | out | 1 | trigger |
| `h1h2_out`, `h1_out`, `h2_out` | out | 1 | auxiliary ORs |
| `coinc_out` | out | 1 | coincidence line before re-timing (monitor) |

There is no clock and no reset. Outputs are low while the inputs are low.
Configuration must be stable while pulses are in flight.

## Default numbers

| quantity | value | origin |
|---|---|---|
| strips per hodoscope `N` | 32 | original |
| delay-line taps / step | 54 / 579 ps | original |
| OR tree | 6 levels of 2-input ORs | original |
| OR level delay | 250 ps | model choice |
| input delay | 64 taps × 75 ps | original |
| shortened pulse | 1 ns | original |
| matrix hops `a` / `b` | 500 / 700 ps | model choice |

## Simulating

Use Verilator 5 with timing support. The package must be read first:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
    rtl/mt_pkg.sv tb/trigger_top_tb.sv --top-module trigger_top_tb -o sim
obj_dir/sim
```

Replace `trigger_top_tb` with any testbench in `tb/` (`<module>_tb` for each
module). Each testbench prints `TB_RESULT checks=N failures=M` and has a
watchdog. What they cover:

* `trigger_top_tb` runs the full-size design (64 mean-timers, 32 × 32 matrix)
  end to end. Particles hit random positions along 250 cm strips (80 ps/cm).
  Cables are random and compensated by the taps, and the pulses are 10 ns
  long. The selection is a diagonal band. The test checks every mean-timer
  against the mean of its inputs and checks each output's timing. It counts
  the following event kinds and fails if any kind never occurs: selected
  pairs firing, halo pairs suppressed, out-of-time pairs suppressed, H1 alone,
  and hits near a strip end. Building takes about a minute; the run takes
  seconds.
* `meantimer_tb` sweeps `t_l − t_r` over ±32.7 ns, which includes the
  no-output region beyond the lines. It checks each output against a
  gate-level reference and checks the mean-time property within `D/2`.
* `coincidence_matrix_tb` uses a random selection at 32 × 32, single and
  double hits, and in-time and late pairs.
* The rest check each block on its own: delays, taps, widths, every OR input
  and the exhaustive truth table of an element.

## Where this model departs from, or adds to, the original

* **Delays are ideal and fixed.** The original FPGA's real delays differed
  from its timing simulation. Its mean-timers worked over ±20 ns instead of
  the ±30 ns simulated, and showed a slope of 5 ps per ns from two slightly
  unequal lines, plus about 120 ps of jitter. None of this is modelled: here
  the range is the full 30.7 ns and the output is exact to within `D/2`.
* **OR-level and matrix-hop delays** (250, 500 and 700 ps) are
  placeholders. The original takes them from its routing and compensates the
  differences between mean-timers with the input delays. All hops of one
  kind are equal here, so every mean-timer is identical. As a result the
  total latency from input pin to MATRIX-OUT is about 54.5 ns plus the
  input-delay setting (16.8 ns mean-timer, 37.7 ns matrix). The original
  reports about 70 ns for the same path.
* **Gates have zero delay.** Only the routes carry delay.
* **Coincidence-line hops.** The original does not state their delays. Here
  they equal the H1 hops beside them, so the coincidence line arrives with
  H1-Output.
* **Re-timing** of the coincidence with H1-Output is an AND. The original
  names the operation but not its circuit.
* **(H1+H2)-OUT** is taken to be the OR of the two hodoscope ORs.
* **Pulse shortener.** Its circuit and its place after the input delay are
  this model's choices. The original only states that the inputs are
  shortened to 1 ns inside the FPGA.
* **Configuration** (delay taps, matrix selection) is a set of static ports.
  The original board sets them over VME through a web interface, which is
  not described and not part of this RTL. The LVDS receivers and NIM output
  drivers are pads and are not modelled.
