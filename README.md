# Gradient clocking on chip: SystemVerilog model of a PALS clock network

A chip split into many small clock islands normally either shares one
clock tree, whose skew between neighbouring islands grows with the chip's
width, or gives each island a free-running clock and pays for synchronizers
on every crossing. PALS takes a third route, described in *PALS: Distributed
Gradient Clocking on Chip* (Bund, Függer, Medina). Every island runs its own
oscillator, which has only two speeds: slow (rate 1) and fast (rate 1 + μ).
Each island keeps measuring the phase offset to each of its neighbours. A few
gates then pick the speed by the gradient clock synchronization (GCS) rule.
Under that rule the skew between neighbouring islands grows only with the
logarithm of the network diameter, the rate of every clock stays between 1
and (1 + μ)(1 + ρ), and no synchronizer sits in the control loop. The gates
are chosen so that a metastable measurement bit cannot upset the decision.

This directory holds a SystemVerilog model of that clock-generation network.
The measurement flip-flops and the control logic are synthesizable RTL. The
tunable ring oscillator, with the measurement taps built into its ring, is a
timed behavioural model. A line of nodes ties the parts together, and
testbenches check every part and the whole line.

## The rule a node follows

Node v runs fast when, for some level s ≥ 0, both of these hold:

* some neighbour is ahead of v by at least (2s+1)κ − δ, and
* no neighbour is behind v by more than (2s+1)κ + δ.

Otherwise v runs slow. Here κ is the threshold step and δ bounds the error
of a measurement. The rule's guarantees need κ > 2δ and μ > 2ρ, where ρ is
the oscillators' drift. Only finitely many levels are needed, because the
local skew is bounded. This design uses L = 2 levels per sign, which the
authors state is enough for networks of diameter up to about 80 when μ/ρ = 10.

Default numbers, taken from the authors' 15 nm implementation:

| quantity | value | meaning |
|---|---|---|
| T | 500 ps | slow-mode period (2 GHz) |
| μ | 1e-4 | fast mode is faster by this factor |
| ρ | 1e-5 | bound on oscillator drift (μ = 10ρ) |
| κ | 10 ps | threshold step |
| δ | 5 ps | measurement uncertainty |
| L | 2 | thresholds per sign |

With these numbers the theory bounds the global skew by μκD/(μ − 2ρ) =
12.5·D ps and the local skew by (⌈log_{μ/ρ}(1.25·D)⌉ + 1)·κ. With the
constants extracted from the laid-out design the global bound comes to
12.23·D ps instead: 36.69 ps for the 4-node line (D = 3) and 73.38 ps for 7
nodes (D = 6). The local bound is 2κ = 20 ps for both. The testbenches check
the global skew against the simple formula, 12.5·D ps.

## Offsets as unary words

A node never sees a neighbour's clock value directly. What it gets is a
2L-bit thermometer word per neighbour. In this design the word is always
written MSB first as Q^L … Q^1 Q^-1 … Q^-L. For an offset Ô (neighbour minus
node, positive when the neighbour is ahead):

| bit | is 1 when |
|---|---|
| Q^i (i ≥ 1) | Ô ≥ −(2i−1)κ − δ: the neighbour is not far behind |
| Q^-i (i ≥ 1) | Ô ≥ +(2i−1)κ − δ: the neighbour is ahead |

With L = 2, κ = 10 ps and δ = 5 ps the words read as follows:

| offset Ô | word |
|---|---|
| Ô < −35 ps | 0000 |
| −35 ≤ Ô < −15 | 1000 |
| −15 ≤ Ô < 5 | 1100 (aligned clocks) |
| 5 ≤ Ô < 25 | 1110 |
| 25 ≤ Ô | 1111 |

Because the thresholds are ordered, a word is always a run of ones followed
by zeros. In silicon a sample taken right at a threshold may be metastable,
but at most one bit at a time can be. `offset_meas` asserts the thermometer
shape. A violation means the offset has left the range that can be measured,
which is close to half a period.

## Turning time into bits: the taps in the ring

Sampling a neighbour's clock directly would need a long, uncalibrated delay
line. Instead the delay stages of the measured node w's own ring serve as
the time-to-digital converter. Let t_w be a rising edge of clk_w. The ring
has points whose rising edges fall at the following times:

| tap | rises at | stage before it |
|---|---|---|
| Q^2 | t_w − 3κ − δ | 2κ buffer |
| Q^1 | t_w − κ − δ | κ inverter |
| (top) | t_w − δ | δ stage to the clock output |
| Q^-1 | t_w + κ − δ | κ inverter |
| Q^-2 | t_w + 3κ − δ | 2κ buffer, then the starved inverters |

Each neighbour v has its own bank of 2L flip-flops at w's taps, clocked by
clk_v (`offset_meas`). At v's rising edge t_v, tap Q^-i reads 1 exactly when
t_v − t_w ≥ (2i−1)κ − δ. Since t_v − t_w is w's lead over v, the bank
produces the word above without any arithmetic. The word is produced inside
w but belongs to v's control module, so it is sent to v. In the port names,
Q_{a,b} is "a's offset as measured by b". A node therefore outputs
Q_{v,w} (`q_out`) and receives Q_{w,v} (`q_in`).

In `tunable_osc` the ring is a base node n0 that toggles every half period.
The clock and the taps are copies of n0, delayed by the stage delays in the
table. The half period is T/2 in slow mode and T/2/(1+μ) in fast mode, and
both are divided by (1 + drift) for the instance. The mode is read once per
half period, which gives a response time T_osc of about 250 ps, in line with
the extracted value. The oscillator runs only while `en` is high, so a
testbench can set initial skews through the start times.

## From words to a mode: the control module

The rule needs only the largest and the smallest offset. With unary words
both come from bitwise reductions (`gcs_minmax`):

* Q^-i_max = OR over the neighbours of Q^-i (someone is ahead by level i),
* Q^i_min = AND over the neighbours of Q^i (nobody is behind beyond level i).

`gcs_mode` then sets md = OR over i of (Q^i_min AND Q^-i_max). A node also
counts itself as a neighbour at offset zero. The zero-offset word 1^L 0^L is
neutral for both the AND and the OR, so it needs no gate. The same word is
tied to unused neighbour slots, and the measurement flip-flops reset to it.

The path is combinational from the snapshot to the oscillator, one AND and
one OR level. An AND or OR gate masks a metastable input whenever its other
inputs decide the output. md can therefore only be metastable when neither
the fast nor the slow condition holds, and then either speed is allowed. The
oscillator accepts any md and runs at some speed between slow and fast.

The timing per cycle is as follows:

1. v's rising edge samples the taps.
2. Within T_meas the words are stable.
3. Within T_ctr md is stable.
4. Within T_osc the new rate holds.

These are bounded by 525 ps and 250 ps, so T_max < 775 ps. This design
models only the flip-flop update and the T_osc of the oscillator. The gates
have zero delay.

## Node and line

`pals_node` wires one island, following the node schematic:

* the oscillator,
* one `offset_meas` bank per neighbour slot, clocked by that neighbour's
  clock,
* `gcs_minmax` and `gcs_mode`, which drive the oscillator's mode input.

By default N = 3 neighbour slots, as drawn for the node.

`pals_line` is the system that was simulated: NODES islands in a line, 4 by
default. Slot 0 of each node is its left neighbour and slot 1 its right one.
The end nodes tie their free slot to the zero-offset word. Each node gets a
fixed drift in [0, ρ], using the pattern 0, ρ, 2ρ/3, ρ/3, … from
`pals_pkg::node_drift`. The ports expose each node's clock, its mode, and
the two words its control module sees.

## What simulation of the line shows

`tb_pals_line` runs three start-up scenarios on the default 4-node line.
Each runs for 1000 ns, about 2000 cycles:

* **ahead**: node 1 starts 40 ps before the others.
* **behind**: node 1 starts 40 ps after the others.
* **gradient**: about 35 ps of skew per edge, 105 ps globally.

In all three the local skew falls below 20 ps. It ends at about 5 ps, which
is the κ − δ point where the fast trigger lets go:

| scenario | local skew at start | after 1000 ns | global after 1000 ns |
|---|---|---|---|
| ahead | 40 ps | 5.0 ps | 10 ps |
| behind | 40 ps | 5.0 ps | 8 ps |
| gradient | 35 ps | 5.0 ps | 13 ps |

In **ahead**, node 1 starts slow and nodes 0 and 2 start fast. Node 3 stays
slow until node 2 has moved far enough away from it, which happens at its
97th edge. Nodes 0 and 2 fall back to slow at about edge 700 to 760, when
they reach node 1. The testbench checks this order of events.

The gradient case falls in steps of 10 ps, from 35 to 25, 15 and then 5 ps,
edge by edge: the staircase that the authors report.

At each recorded edge the testbench also checks the following:

* the exact word each control module saw, predicted from the true edge
  times,
* the resulting mode,
* that a node meeting the fast condition is fast, and one meeting the slow
  condition is slow,
* every clock period,
* the skew bounds at the end.

## Other sizes, process corners and link delays

`tb_line_workloads` runs the other configurations side by side in one
simulation, each with its own copy of the checker `line_bench`:

| run | set-up | final local skew | final global skew |
|---|---|---|---|
| line7 | 7-node line, ahead / behind / gradient (105 ps over 6 edges) | 5.0 ps | 25 / 8 / 25 ps |
| var90 | 4-node line, T, κ and δ scaled to 90 %, ahead | 4.5 ps | 9 ps |
| var110 | same, scaled to 110 % | 5.5 ps | 11 ps |
| links7 | 7 nodes with clock-link delays, gradient / all started together | 5.0 / 4.0 ps | 21 / 4 ps |

The corners stand in for supply and transistor-size variation. A timed
behavioural model has no transistors, so every delay of the design is
scaled together instead. In links7 the clock of a node reaches its
neighbours over a link that is either fast (no added delay) or slow (1 ps
added, about what a small extra wire load costs at this clock rate).
Links leaving nodes 2, 3 and 4 start fast and the others slow. 50 ns after
each start the links leaving nodes 3 and 4 switch to slow. This is the
pattern that pushes a clock-generation grid with wait-for-all and
wait-for-one rules into a large local skew. The GCS rule is not affected by
it: a link delay only shifts each measurement by at most 1 ps, which stays
within δ. With link delays the words are shifted, so links7 checks the fast
and slow conditions, the periods and the skew bounds, but not the exact
words.

## A grid of nodes

In a grid a node has up to four neighbours. They share the taps of the
node's ring, and each has its own bank of flip-flops in it, which is
`pals_node` with N = 4. The bounds above give a local skew of at most 2κ =
20 ps even for a 32 × 32 grid (D = 62). `tb_pals_grid` wires a 16 × 16 grid
(D = 30) from `pals_node`, with slots west, east, north and south, and starts
every node at a random time within 20 ps. Over 200 ns it checks every word,
every mode, the fast and slow conditions, every period, and the local and
global skew at every edge. The largest local skew seen is 19.1 ps, at the
start, and the global skew ends at 15 ps. The 32 × 32 grid would take about
ten minutes to simulate, because simulation time grows faster than the
number of nodes. There is no grid top level in `rtl/`.

## What is modelled and what is not

The following follow the design:

* the algorithm and its thresholds,
* the word format,
* the tap positions (κ and 2κ stages, δ before the clock output),
* the flip-flop placement in the measured node's ring,
* the AND/OR control module,
* the node wiring,
* the line topology,
* all default numbers.

This model departs from it in these points:

* **The oscillator is behavioural.** The current-starved inverter ring is an
  analog circuit. The model has ideal stage delays (δ₀ = 0), a constant
  drift per instance, and taps of one polarity. The real ring alternates
  inverting stages and inverts its clock output to compensate. A synthesis
  tool that ignores the delays reports a combinational loop there, which is
  the ring itself.
* **Two-state simulation.** A flip-flop sampling exactly on a tap edge
  resolves to 0 or 1. The metastable value the analysis allows for is not
  represented.
* **No wire delays in the RTL.** The islands sit 200 µm apart. Clock and word
  wires have zero delay inside `pals_line`. Their uncertainty belongs to δ₀,
  which was extracted as below 4 ps. The links7 run adds clock-link delays
  in its testbench only.
* **Reset and enable.** The asynchronous reset of the measurement
  flip-flops, which loads the zero-offset word, and the oscillator enable
  are this design's additions. How a chip starts up is not specified.
* **ℓ = 2 against the drawings.** The control-module schematics are drawn
  for three levels, but the implementation uses two. L is a parameter and
  any L ≥ 1 works.
* **Not included:**
  * the first, linear delay-line measurement circuit, which was replaced by
    the taps in the ring because of its delay uncertainty,
  * the data links between islands, which are outside the clocking scheme,
  * a grid top level. A node with N = 4 slots is what a grid needs, and
    `tb_pals_grid` builds one from it.
  * the clock-tree and clock-grid baselines used for comparison.

## Files

| file | contents |
|---|---|
| `rtl/pals_pkg.sv` | shared constants (L, κ, δ, T, μ, ρ), word bit positions, drift pattern |
| `rtl/tunable_osc.sv` | behavioural two-speed ring oscillator with measurement taps |
| `rtl/offset_meas.sv` | 2L-flip-flop snapshot of a neighbour's taps, thermometer assertion |
| `rtl/gcs_minmax.sv` | AND/OR reduction to the smallest and largest offset |
| `rtl/gcs_mode.sv` | fast trigger: md = OR_i (Q^i_min AND Q^-i_max) |
| `rtl/pals_node.sv` | one island: oscillator, measurement banks, control |
| `rtl/pals_line.sv` | top level: a line of islands |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/line_bench.sv` | scenario driver and checker for a line, used by the two line testbenches |
| `tb/tb_line_workloads.sv` | 7-node line, process corners, link delays |
| `tb/tb_pals_grid.sv` | 16 × 16 grid of four-neighbour nodes |

Every module uses `timeunit 1ps; timeprecision 1fs;`. Femtosecond precision
is needed because μ = 1e-4 changes a half period by only 25 fs.

## Running it

With Verilator 5, the full line test is run like this (the other
testbenches work the same way):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  --top-module tb_pals_line rtl/pals_pkg.sv tb/tb_pals_line.sv
obj_dir/Vtb_pals_line
```

Each testbench prints `TB_RESULT checks=N failures=M`, and the line tests
also print their skew trajectories. `tb_line_workloads` takes a few
seconds, and `tb_pals_grid` takes about a minute to build and 40 s to run.
All the others finish in well under a second.

To change the design, start with the parameters:

* `pals_line`: NODES, L, T_SLOW, MU_F, RHO_F, KAPPA, DELTA.
* `pals_node`: N, for other topologies.

KAPPA and DELTA must keep κ > 2δ. The parameters of the rule must also meet
μ > 2ρ.
