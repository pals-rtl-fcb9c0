# PALS: a clock network that keeps neighbours in phase without a clock tree

A clock tree cannot keep the skew between *adjacent* flip-flops small on a
large die: somewhere two physically neighbouring leaves sit far apart in the
tree, and delay variation accumulates along that path, so the worst local skew
grows linearly with the die width. PALS (plesiochronous and locally
synchronous) drops the tree. Every module, or *node*, runs its own ring
oscillator at about 2 GHz. Each node measures the phase of its neighbours'
clocks and picks one of two rates: *slow* (the oscillator's natural rate) or
*fast* (that rate times 1 + mu, with mu = 1e-4). The rule that picks the rate
comes from gradient clock synchronisation (the OffsetGCS algorithm). Under it
the phase offset between neighbours grows only logarithmically with the network
diameter. Each link costs a few flip-flops and the controller a few gates.

This repository gives SystemVerilog for the network of the published
15 nm study ("PALS: Plesiochronous and Locally Synchronous Systems", Bund,
Függer, Lenzen, Medina, Rosenbaum). That network is four nodes in a line, with
kappa = 10 ps, delta = 5 ps and two threshold levels per sign. The digital part
(measurement flip-flops, min/max reduction, fast-trigger logic) is
synthesisable RTL. The oscillator is analog, so it is a timed behavioural model.
Together they simulate the whole closed loop in Verilator, down to
femtoseconds. The top level is a grid of any size, whose default of one row
of four nodes is that line. A larger grid is the case the skew bounds are
usually quoted for.

## The decision rule

Let `O_w = L_w - L_v` be how far neighbour `w`'s clock is ahead of node `v`'s
clock. Node `v` runs fast when, for some `s` in `{0 .. l}`, both of these hold:

* FT1: the neighbour furthest ahead has `O_max >= (2s+1)·kappa - delta`
* FT2: the neighbour furthest behind has `O_min >= -(2s+1)·kappa - delta`

Otherwise it runs slow. Put simply: speed up when someone is ahead by an odd
multiple of kappa, unless someone else is behind by the same amount. kappa is
the granularity of the rule. delta bounds the measurement error (wire and gate
uncertainty plus the drift during one loop delay). The theory needs
kappa > 2·delta. The 15 nm numbers are given as approximately 10 ps and 5 ps,
and the RTL uses exactly those values. With them, a line of 4 nodes (diameter
3) is guaranteed a local skew of at most 3·kappa = 30 ps, and a global skew of
at most 1.223·kappa·D = 36.7 ps.

### Only thresholds are measured

The rule only asks whether each offset has crossed the fixed thresholds
`±(2i-1)·kappa - delta`, for `i = 1 .. l+1`. So each link delivers a
thermometer word of `2(l+1)` bits, most significant bit first:

```
Q^{+(l+1)} .. Q^{+1}  Q^{-1} .. Q^{-(l+1)}
Q^{+i} = 1  iff  O_w >= -(2i-1)·kappa - delta     ("w is not too far behind")
Q^{-i} = 1  iff  O_w >= +(2i-1)·kappa - delta     ("w is far enough ahead")
```

With `l = 1` (two levels) the thresholds are -35, -15, +5 and +25 ps. Two
aligned clocks read `1100`. A neighbour 10 ps ahead reads `1110`. A neighbour
20 ps behind reads `1000`. A valid word always has the form `1…10…0`.
Metastability can leave one bit undecided, and that bit is always at the
boundary between the ones and the zeros.

This sign convention is the one used by the module specification and by the
tap phases drawn for the ring oscillator. One worked example in the paper's
text has the opposite polarity. It claims that a neighbour ahead by just over
kappa - delta gives `110000` on a six-bit word. That example disagrees with
the specification, with the tap phases and with the gate network, so the RTL
does not follow it.

### From words to a mode bit

Because the words are thermometer codes, the minimum and maximum over all
neighbours need no comparators:

* `Q^{+i}_min = AND over neighbours of Q^{+i}`: FT2 at level i holds for every neighbour.
* `Q^{-i}_max = OR over neighbours of Q^{-i}`: FT1 at level i holds for some neighbour.
* `MODE = OR over i of (Q^{+i}_min AND Q^{-i}_max)`.

These are `minmax` and `ft_mode`, wrapped together as `gcs_controller`. They
are pure combinational logic, a few gates deep (about 25 ps in the 15 nm
design). As a side effect, an AND or OR input that is decided masks an
undecided one.

## The oscillator is the measurement delay line

This part of the design is the least obvious. A naive time-to-digital
converter has two long delay lines. One carries the neighbour's clock past the
taps. The other delays the local clock to the middle of that range. Their
delay variation adds directly to delta. With ±5 % gate variation the
kappa/delta constraints then cannot be met at all. The built design instead
takes the taps from inside the measured node's own ring oscillator. The ring
already has a well-defined delay between its stages. All neighbours of that
node share the taps, and each neighbour gets its own flip-flops, placed at the
taps and clocked by the neighbour's clock.

One lap of the ring wavefront (half a clock period) runs, for `l = 1`:

```
tap Q+2 --2κ--> tap Q+1 --κ--> top --κ--> tap Q-1 --2κ--> tap Q-2 --starved INVs--> (inverted) tap Q+2
                                 |
                                 +--δ--> CLK_w   (output inverter)
```

Relative to the edge of `CLK_w` at time `L_w`, the taps switch at
`L_w - 3κ - δ`, `L_w - κ - δ`, `L_w + κ - δ` and `L_w + 3κ - δ`. Suppose node
`v` samples tap Q^{-1} on its own rising edge. It reads 1 exactly when that tap
has already switched, that is when `L_w - L_v >= κ - δ`. This is the threshold
the rule needs. The remaining uncertainty is only the short wiring from tap to
D pin and from `CLK_v` to the clock pin. In the 15 nm extraction it is below
4 ps.

The current-starved inverters at the bottom of the ring make up the rest of
the half period. The mode bit changes their delay. In `ring_osc` this is
modelled as a choice of delay made when the wavefront enters that segment.
A mode change therefore acts within half a period, which is the paper's
`T_osc` of about 250 ps.

### Loop timing

The flip-flops are clocked by `CLK_v`, and `MODE_v` is a combinational
function of them. So a decision is based on the offsets at the last rising
edge of `CLK_v`, and it reaches the oscillator within the next half period.
Measurement plus decision takes one clock period plus gate delay. The whole
loop `T_max` is under 775 ps. At mu = 1e-4, two clocks drift apart by less
than 0.1 ps during that time, which is small against delta.

## Blocks

| module | kind | what it is |
|---|---|---|
| `pals_pkg` | package | operating point: kappa, delta, half period (fs), mu and rho (ppm), number of levels |
| `ring_osc` | behavioural model | tunable ring oscillator with the tap chain; `en`, `mode` in; `clk`, `tap_pos`, `tap_neg` out |
| `offset_sampler` | RTL | the 2(l+1) measurement flip-flops of one directed link |
| `minmax` | RTL | AND/OR reduction of all neighbours' words |
| `ft_mode` | RTL | fast trigger: OR of per-level ANDs |
| `gcs_controller` | RTL | `minmax` followed by `ft_mode` |
| `pals_node` | RTL + model | one node: oscillator, controller, and a set of flip-flops for each neighbour |
| `pals_grid` | top | ROWS x COLS nodes (default 1 x 4, the line), each linked to its west, east, north and south neighbours |

Node `n = r·COLS + c` of `pals_grid` keeps its neighbours in the order west,
east, north, south, skipping those off the grid. So a line's end node has one
neighbour, and an inner grid node four. For each direction `d` it produces
`link[n][d]`: its own taps sampled with that neighbour's clock. The neighbour's
controller reads that word. All time parameters are in femtoseconds. That resolution is needed
because a fast-mode half period is only 25 fs shorter than a slow one.

Main parameters (defaults are the 15 nm design's):

| parameter | default | meaning |
|---|---|---|
| `LEVELS` | 2 | threshold levels per sign, l+1 (S = {0,1}) |
| `KAPPA` | 10 000 fs | threshold spacing kappa |
| `DELTA` | 5 000 fs | measurement uncertainty delta |
| `HALF` | 250 000 fs | half clock period (2 GHz) |
| `MU` | 100 ppm | fast-mode speed-up mu = 1e-4 |
| `DRIFT_PPM` | `'{3,10,0,7}` in `pals_grid` | oscillator frequency errors, within rho = 10 ppm; node (r, c) takes entry (r + c) mod 4 |
| `ROWS`, `COLS` | 1, 4 | grid size; the default is the four-node line |

With `l = 1`, a node never needs to tell apart offsets beyond ±35 ps. In a
line of four, that already covers the 40 ps start-up offsets below. Suppose a
network needs more range: its worst-case local skew plus its start-up skew is
larger. Then raise `LEVELS`, which adds 2·kappa of ring per level on each side.

## How it behaves

`tb_pals_line` runs two copies of the line side by side, with all parameters at
their defaults. These are the two start-up cases of the 15 nm Spice study:

* **Node 1 starts 40 ps ahead.** Nodes 0 and 2 go fast and node 1 stays slow.
  Node 3 only sees node 2, which starts level with it, so node 3 stays slow
  until node 2 has pulled ahead by kappa - delta. Then node 3 chases node 2.
  Over the last 100 ns of a 1000 ns run, the local skew stays within about
  5 ps and the global skew within 10 ps. Node 1 never runs fast.
* **Node 1 starts 40 ps behind.** Only node 1 runs fast, and it catches up in
  about 650 cycles (325 ns). By 600 ns the local skew is at or below 4.8 ps.

**Grids.** For a W x W grid the diameter is D = 2W - 2. With mu raised to
1e-3, the local-skew bound stays at 3·kappa = 30 ps up to W = 41, so it
covers the 32 x 32 grid. `tb_pals_grid` runs a 16 x 16 grid at mu = 1e-3 for
3000 cycles. The nodes start along a phase gradient: 4 ps per hop plus up to
8 ps of random offset, so about 120 ps from corner to corner. Links more than
5 ps apart close within a few hundred cycles. The local skew never exceeds
its starting value of 11.8 ps. The global skew stays where it started, because a gradient
below kappa - delta per link triggers nobody; it is still well inside
1.223·kappa·D = 367 ps. A 32 x 32 run of 300 cycles behaves the same way,
with a worst local skew of 11.9 ps. It is not kept as a testbench, because simulation time grows
with the square of the node count (about 3 minutes here).

In the steady state the nodes keep toggling near the kappa - delta = 5 ps
threshold. This is the small oscillation the rule is designed to produce.
The transistor-level simulation in the study shows the same pattern, settling
below 9 ps. Along the way `tb_pals_line` checks every clock period against the
rate bounds [1, (1+mu)(1+rho)]. In every cycle of every node, it also checks
the mode bit against the rule evaluated on the true clock-edge offsets.

## What is modelled, and what is not

* **The oscillator is an ideal behavioural model.** It has no jitter and no
  supply or temperature dependence, and the inverters in the ring are folded
  into clean, same-polarity taps. Its frequency error is a fixed per-instance
  parameter. Under synthesis its timing is dropped, so the taps and the clock
  are left undriven. This is expected.
* **Metastability is not represented.** A two-state simulator cannot hold the
  undecided value. When a clock edge and a tap edge fall in the same
  femtosecond, the flip-flop resolves by event order. The design's argument
  that at most one bit is undecided, and that the AND/OR network masks it, is
  therefore not exercised.
* **Wires are ideal.** The 200 µm links between nodes carry no delay. In the
  real design the tap-to-flip-flop and clock-to-flip-flop wiring is part of
  delta.
* **Reset and enable are additions.** `rst_n` loads every measurement
  word with the aligned code `1100`, so each node starts in slow mode. `en`
  starts each ring, which lets a test give nodes an initial phase offset.
* **A range assertion is an addition.** `offset_sampler` reports an error if a
  sampled word is not of the form `1…10…0`. Such a word means a neighbour has
  left the measurement range, and `LEVELS` is too small for the network.
* **Not included:**
  * The first-attempt linear delay-line measurement circuit, which cannot meet
    the kappa/delta constraints with realistic delay variation.
  * Locking the oscillators to a quartz reference, which the study suggests as
    a way to reach small rho.
  * The clock-tree baseline the study compares against.

## Simulating

Every file is plain SystemVerilog-2017. The oscillator model needs
Verilator's timing support. From the repository root:

```
verilator --binary --timing --assert --top-module tb_pals_line -Irtl -Itb \
    rtl/pals_pkg.sv tb/pals_tb_pkg.sv tb/tb_pals_line.sv \
    -y rtl -y tb +libext+.sv -o sim
./obj_dir/sim
```

Each testbench ends with a line `TB_RESULT checks=<n> failures=<m>` and has a
watchdog. Besides the end-to-end test there is one testbench per block:
`tb_ring_osc`, `tb_offset_sampler`, `tb_minmax`, `tb_ft_mode`,
`tb_gcs_controller` and `tb_pals_node`. The grid test is `tb_pals_grid`. The reference arithmetic they share is
in `tb/pals_tb_pkg.sv`: the threshold code of an offset, the fast trigger
evaluated from its definition, and a test for offsets too close to a threshold
to call.

To try other operating points, change the parameters of `pals_grid`. Examples
are `MU` for a larger speed-up, `LEVELS` for more measurement range, or
`DRIFT_PPM` for worse oscillators. The ring model stops with an error if kappa,
delta and the half period are inconsistent.
