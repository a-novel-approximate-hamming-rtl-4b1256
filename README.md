# Approximate Hamming weight unit built from saturating LUT compressors

A neuron in a binary spiking network sums its input by counting spikes. The
received-spike vector is `RV = SV & CV`: SV marks the neurons that fired in the
last time step and CV marks this neuron's presynaptic partners. The neuron's
input is the Hamming weight (number of ones) of RV. With 1024 inputs, an exact
1024-input counter is large and slow on an FPGA. RV is very sparse, though, and
biological synapses drop most spikes anyway (synaptic transmission failure). So
the count does not need to be exact.

This RTL follows the architecture of Akbarzadeh-Sherbaf et al., "A Novel
Approximate Hamming Weight Computing for Spiking Neural Networks: an FPGA
Friendly Architecture". The count is computed in two stages:

```
 sv ─┐                ┌──────────────────────────┐  compressed  ┌──────────────────┐
     ├─ AND ── rv ───▶│ approximate compressor   │────vector───▶│ linear adder     │──▶ hw
 cv ─┘    (N bits)    │ ceil(N/UI) units, each a │ (few bits)   │ (exact sum)      │
                      │ LUT-sized saturating cnt │              └──────────────────┘
                      └──────────────────────────┘
```

The first stage is made of compressor cells, each the size of one FPGA
lookup table (LUT). A cell counts the ones among its few inputs, but it has
too few output bits to report more than one, two or three. In a sparse
vector a cell almost never sees more ones than it can report, so little is
lost. The compressed vector that comes out is 2.5 to 1024 times shorter than
RV, and a small exact adder sums it. The result is never above the true
count. Whatever it misses plays the role of failed synapses.

Everything is combinational: `hw` is valid one propagation delay after `sv`
and `cv` change. There is no clock, reset or handshake.

## The three compressor cells

A 7-series LUT is either one 6-input, 1-output function (LUT6) or two 5-input
functions on shared inputs (a LUT5 pair, 2 outputs). The cell's name is
`[inputs:outputs)`.

| cell | module | inputs | output | value reported for k ones | exact for |
|---|---|---|---|---|---|
| `[6:1)` | `cmp6_1` | 6 | 1 bit | `min(k,1)` (the OR of the inputs) | 7 of 64 patterns |
| `[5:2)` | `cmp5_2` | 5 | 2-bit binary number | `min(k,3)` | 26 of 32 |
| `[5:2◇)` | `cmp5_2d` | 5 | 2 bits whose *number of ones* is the count (00, 01, 11) | `min(k,2)` | 16 of 32 |

The `◇` (non-positional) cell is less accurate than `[5:2)`. In exchange, its
outputs are single-bit operands, so the adder behind it is a plain bit counter
and not a sum of 2-bit numbers. The code 01 for a count of one is this
design's choice; 10 would work the same way.

## Stacking cells: two-level compressors

Feeding the output bits of a first row of cells into a second row compresses
further. Cells are chosen so that the first row's output bits exactly fill
the second row's inputs. That gives four shapes:

| shape | first level | second level | unit | configurations |
|---|---|---|---|---|
| A | 6 × LUT6 | 1 × LUT6 | `[36:1)` | D |
| B | 5 × LUT6 | 1 × LUT5 pair | `[30:2)`, `[30:2◇)` | E, F |
| C | 5 × LUT5 pair | 2 × LUT5 pair | `[25:4)`, `[25:4◇)` | H, I, K, L |
| D | 3 × LUT5 pair | 1 × LUT6 | `[15:1)` | G, J |

In shape C, the ten first-level output bits are split five and five. The
middle first-level cell therefore sends one bit to each second-level cell
(bit 0 to the first).

**How a second-level cell reads its inputs** is the most delicate point of
the design. After `[6:1)` or `[5:2◇)` cells, each incoming bit stands for one
spike, so the second level is the same cell again. After `[5:2)` cells, the
incoming bits are binary digits: bit 1 of each code is worth two spikes. A
LUT can implement any function of its inputs. So in configurations K and L the
second-level LUT5 pair (`cmp5_2w`) adds its inputs with weights 1 and 2 before
it saturates. A LUT6 second level (configuration J) needs no weights, because
it only asks whether any input is nonzero.

The paper does not say this in words. Its error curves require it: with
weighted inputs, configurations K and L track H and I at every density, as the
paper's error chart shows. With plain cells, L's error at 10 % density would be
about 16 %, not about 3 %.

All fifteen configurations, over 1024 inputs (the last unit is fed zeros
where 1024 is not a multiple of its input width):

| cfg | level 1 → level 2 | unit | units | adder operands | largest count |
|---|---|---|---|---|---|
| A | `[6:1)` | `[6:1)` | 171 | 171 × 1 bit | 171 |
| B | `[5:2◇)` | `[5:2◇)` | 205 | 410 × 1 bit | 410 |
| C | `[5:2)` | `[5:2)` | 205 | 205 × 2 bit | 615 |
| D | `[6:1)` → `[6:1)` | `[36:1)` | 29 | 29 × 1 | 29 |
| E | `[6:1)` → `[5:2◇)` | `[30:2◇)` | 35 | 70 × 1 | 70 |
| F | `[6:1)` → `[5:2)` | `[30:2)` | 35 | 35 × 2 | 105 |
| G | `[5:2◇)` → `[6:1)` | `[15:1)` | 69 | 69 × 1 | 69 |
| H | `[5:2◇)` → `[5:2◇)` | `[25:4◇)` | 41 | 164 × 1 | 164 |
| I | `[5:2◇)` → `[5:2)` | `[25:4)` | 41 | 82 × 2 | 246 |
| J | `[5:2)` → `[6:1)` | `[15:1)` | 69 | 69 × 1 | 69 |
| K | `[5:2)` → `[5:2◇)` | `[25:4◇)` | 41 | 164 × 1 | 164 |
| L | `[5:2)` → `[5:2)` | `[25:4)` | 41 | 82 × 2 | 246 |
| 216 | three LUT6 levels | `[216:1)` | 5 | 5 × 1 | 5 |
| 540 | 15 × `[36:1)` → `[15:1)` | `[540:1)` | 2 | 2 × 1 | 2 |
| 1024 | LUT6 tree 1024→171→29→5→1 | `[1024:1)` | 1 | 1 × 1 | 1 |

## Deep compressors

For very sparse vectors, such as the spike input of a network firing at a few
hertz, the paper also uses compressors more than two levels deep. They were
used in a network study, not in the synthesis results. Each reports one bit:
"at least one spike in this group". `[216:1)` is three LUT6 levels. `[540:1)`
is fifteen `[36:1)` units feeding a `[15:1)` unit. `[1024:1)` reduces the whole
vector to a single bit, the extreme case. Its tree shape (`lut6_tree`) is this
design's own.

## The unit: `approx_hw_top`

| port | dir | width | meaning |
|---|---|---|---|
| `sv` | in | N | spike vector |
| `cv` | in | N | connection vector of this neuron |
| `hw` | out | clog2(N+1) | approximate popcount(sv & cv) |

Parameters: `N` (default 1024) and `CFG` (an `ahw_pkg::cfg_e`, default `CFG_C`,
the most accurate `[5:2)` cell). All unit and adder sizes follow from these two
parameters through the functions in `ahw_pkg`. `hw` has the width of an exact
count of N bits, so every configuration has the same interface. Because the
compressors cap the count below N, its top bits can be constant zero (in
configuration C the largest value is 615). A deferred assertion checks in
simulation that `hw` never exceeds the exact count.

The final stage, `linear_adder`, is deliberately the simplest exact adder: a
chain of two-input adders. The paper uses it to isolate the effect of the
compressors, and any faster multi-operand adder or counter tree can replace
it.

## How accurate it is

Mean relative error `(exact − hw) / exact` in %, 1,000 uniformly random
1024-bit vectors per density, measured on this RTL (`tb_accuracy_sweep`):

| density | A | B | C | D | E | F | G=J | H | I | K | L | 216 | 540 | 1024 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|---|---|
| 1 % | 2.3 | 0.0 | 0.0 | 14.3 | 2.9 | 2.3 | 5.9 | 0.1 | 0.0 | 0.1 | 0.0 | 54.6 | 78.3 | 88.9 |
| 5 % | 11.6 | 0.4 | 0.0 | 52.4 | 20.7 | 13.0 | 27.9 | 3.6 | 0.7 | 4.1 | 0.5 | 90.0 | 96.0 | 98.0 |
| 10 % | 21.6 | 1.8 | 0.1 | 72.2 | 41.9 | 27.3 | 46.6 | 12.1 | 3.5 | 13.1 | 3.1 | 95.1 | 98.0 | 99.0 |
| 20 % | 38.3 | 6.4 | 0.7 | 85.8 | 66.7 | 52.1 | 67.6 | 32.1 | 14.4 | 33.1 | 14.4 | 97.6 | 99.0 | 99.5 |
| 50 % | 67.1 | 28.7 | 8.7 | 94.3 | 86.5 | 79.9 | 86.5 | 68.0 | 52.3 | 68.0 | 52.3 | 99.0 | 99.6 | 99.8 |
| 100 % | 83.3 | 60.0 | 39.9 | 97.2 | 93.3 | 89.9 | 93.3 | 84.0 | 76.0 | 84.0 | 76.0 | 99.5 | 99.8 | 99.9 |

These agree with the paper's error chart in shape and in the end points:
- `[5:2)` is best and `[36:1)` worst at every density.
- H, I, K and L beat the one-level `[6:1)` at low density.
- I and L stay near B and C below 10 %.
- The 100 % values match the chart's end points to within a point.

The largest difference is `[36:1)` at 1 % density: 14 % here, "about 12 %" in
the paper. The paper does not define its random vectors precisely; this design
draws each bit independently.

The deep compressors lose most spikes in these dense tests. They are meant for
inputs with only a handful of ones, where a lost spike acts as a synaptic
failure.

The paper also lists, for each configuration, the share of all input patterns
that are counted exactly. This design reproduces that figure for A, B, C, D, G
and J (7/64, 16/32, 26/32, 37/2^36, 16/2^15). The values for E, F, H, I, K and L
do not follow from any cell behaviour tried here. For example, E and F correspond
to 41 and 51 patterns out of 2^30, far fewer than the patterns these compressors
actually count exactly. They look like a different way of counting and are not
used as a check.

## Choices made here that the paper leaves open

- What a cell reports above its limit: saturation at its maximum (OR for `[6:1)`).
- The `[5:2◇)` code for one spike: 01.
- The weighted reading of binary `[5:2)` digits by a second-level LUT5 pair
  (taken from the error chart, see above).
- Which bit of the shared cell in shape C goes to which second-level cell.
- The `[15:1)` inside `[540:1)` is J (`[5:2)` first level); G gives the same
  result.
- The structure of `[1024:1)`.
- The assignment of input bits to units (consecutive bits) and zero padding of
  the last unit.
- Making the AND of SV and CV part of the unit.
- A purely combinational unit. The paper reports a critical-path delay and no
  pipeline.
- Default configuration C.

## What is not here

- The spiking network the paper uses to show that approximate counting keeps
  the network chaotic and trainable. It is a 1024-neuron Izhikevich network
  with FORCE learning, evaluated in software. Only the per-neuron spike count
  it relies on is hardware; that count is `approx_hw_top`.
- FPGA primitives. The cells are written as behaviour, not as LUT6/LUT5
  primitive instances. Every cell instance carries a `dont_touch` attribute,
  as in the paper's FPGA flow, so that a tool that honours it keeps each cell
  as one LUT. To pin the exact LUT mapping, instantiate vendor primitives
  inside `cmp6_1`, `cmp5_2`, `cmp5_2d` and `cmp5_2w`.
- The exact 1024-input counter the paper compares against. `linear_adder`
  with 1024 one-bit operands serves as one.

## Files

`rtl/`:
- `ahw_pkg.sv`: cell and configuration types, with the sizing functions.
- `cmp6_1.sv`, `cmp5_2.sv`, `cmp5_2d.sv`: the three cells.
- `cmp5_2w.sv`: the weighted second-level cell.
- `lut_cell.sv`: the cell picked by a parameter.
- `two_level_cmp.sv`: the two-level compressors.
- `lut6_tree.sv`, `deep_cmp.sv`: the deep compressors.
- `cmp_unit.sv`: one unit of any configuration.
- `approx_compressor.sv`: the array of units.
- `linear_adder.sv`: the exact adder.
- `approx_hw_top.sv`: the whole unit.

`tb/`: self-checking testbenches. The helper modules (`cmp5_2w`, `lut_cell`,
`lut6_tree`, `cmp_unit`) are covered by the testbenches of the modules that
use them.
- `tb_cmp6_1`, `tb_cmp5_2` and `tb_cmp5_2d` are exhaustive.
- `tb_two_level_cmp`, `tb_deep_cmp`, `tb_approx_compressor` and
  `tb_linear_adder` check against a reference model, `tb_ref_pkg.sv`, which is
  written from the cell definitions and not from the RTL.
- `tb_approx_hw_top` runs all fifteen configurations end to end. It checks
  results against the paper's accuracy statements and that each mechanism
  (masking by CV, a spike in a padded unit, exact and lossy counts) occurs.
- `tb_approx_hw_full` runs the unit at its default parameters.
- `tb_accuracy_sweep` repeats the full accuracy study and prints the table above.

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and has a cycle
watchdog.

To simulate with Verilator 5, for example:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/ahw_pkg.sv tb/tb_ref_pkg.sv tb/tb_accuracy_sweep.sv \
    --top-module tb_accuracy_sweep -o sim
./obj_dir/sim
```

Replace the testbench file and top module name to run the others; every
testbench finishes in seconds. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/ahw_pkg.sv rtl/<module>.sv`.

To change the configuration, set `CFG` on `approx_hw_top` (or on
`approx_compressor`). To change the vector length, set `N`. To add a cell type,
extend `lut_e` and the functions in `ahw_pkg` and add a branch in `lut_cell`.
