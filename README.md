# Deep boosted-decision-tree regression engine with parallel decision paths

This is synthesizable SystemVerilog for a boosted-decision-tree (BDT) regression engine
built for first-level trigger systems: it turns a handful of integer input variables
(for a missing-transverse-energy estimate, eight: four flavours of missing ET, one scalar
sum and three energy densities) into one integer estimate, at one event per clock and a
latency of a few clock cycles, using only comparators, gates and adders.

The key idea is that a decision tree does not have to be walked. Every terminal bin
(leaf) of a tree is reached through a fixed set of comparisons, and the AND of that set
is a Boolean function of the input that is true for exactly one bin. Evaluating that
function for all bins at once, a "parallel decision path" per bin, gives a one-hot vector
that selects the bin's score. Depth costs bins (at most 2^depth per tree), not
sequential steps, and the number of input variables adds comparators but not bins.
Summing the selected scores of all trees gives the forest's estimate.

The design follows the deep decision tree engine of the fwXmachina framework as
published for this regression problem (Carlson, Bayer, Hong, Roche, "Nanosecond machine
learning regression with deep boosted decision trees in FPGA for high energy physics").
The structure (decision paths, one-hot lookup, per-variable bit widths, score processor)
is theirs; register placement, the bound encoding, the packing of the input bus and the
saturating output are choices made here, and are marked as such below and in each file.

## From a tree to decision paths

Take a tree on two variables with three cuts:

```
                 x_a > 55 ?
               no /      \ yes
        x_b > 23 ?        b2
       no /    \ yes
        b0    x_a > 40 ?
             no /    \ yes
              b10     b11
```

Each leaf becomes one path, the AND of the comparisons on its way from the root:

| bin | path                                           | as intervals              |
|-----|------------------------------------------------|---------------------------|
| b0  | not(x_a > 55) and not(x_b > 23)                | x_a < 56, x_b < 24        |
| b2  | x_a > 55                                       | x_a > 55                  |
| b10 | not(x_a > 55) and x_b > 23 and not(x_a > 40)   | x_a < 41, x_b > 23        |
| b11 | not(x_a > 55) and x_b > 23 and x_a > 40        | 40 < x_a < 56, x_b > 23   |

Collecting a path's comparisons per variable always leaves one open interval per
variable, so every path has the same shape: for each variable v, `lo_v < x_v < hi_v`.
That is what one `fwx_ohdp` computes: 2V strict comparisons and one AND.

Bounds are 18-bit signed integers (two bits wider than the widest, 16-bit, variable):

* a comparison `x > c` on the path sets `lo = c`; a comparison `not(x > c)` sets
  `hi = c + 1`; several comparisons on one variable keep the tightest;
* a variable the path never tests gets `lo = -1`, `hi = 2^W` (W its width), which every
  value passes;
* a bin slot that the tree does not use (trees are rarely fully populated) gets an empty
  interval, for example `lo = 2^W`, `hi = 0`, and score 0.

When the bounds are constants, synthesis removes every comparison against an open bound,
so a path costs only the comparisons its leaf actually makes (at most depth-many
distinct cuts, at most two per variable).

Because the leaves of a tree partition the input space, exactly one path of each tree is
true for any input. `fwx_ddte` asserts this in simulation, which catches a badly
flattened configuration.

## Data path and timing

```
x_i ──► fwx_bus_tap ──► fwx_ddte (tree 0)  ──┐
        register,       fwx_ddte (tree 1)  ──┤
        split into      ...                  ├─► fwx_tree_sum ──► fwx_score_processor ──► score_o
        variables       fwx_ddte (tree T-1)──┘   adder tree        AdaBoost: sum
                        N_BIN x fwx_ohdp                           GradBoost: sum + constant
                        + fwx_bin_lut                              limit to range, sat_o
```

| stage | block                 | what is registered                                  | cycles |
|-------|-----------------------|-----------------------------------------------------|--------|
| 1     | `fwx_bus_tap`         | the input vector, split into variables              | 1      |
| 2     | `fwx_ddte`            | the one-hot bin vector of every tree                | 1      |
| 3     | `fwx_ddte`            | every tree's score (one-hot to score lookup)        | 1      |
| 4..   | `fwx_tree_sum`        | the partial sums, every `LEVELS_PER_STAGE` levels   | ceil(ceil(log2 N_TREE) / 3) |
| last  | `fwx_score_processor` | the output and its saturation flag                  | 1      |

Latency is `LATENCY = 4 + ceil(ceil(log2 N_TREE) / LEVELS_PER_STAGE)` cycles (a
localparam of `fwx_bdt_top`): 6 for the benchmark of 40 trees, which is the published
figure at 320 MHz (18.75 ns). A new vector is accepted every cycle. There is no
back-pressure and no handshake beyond a valid bit that travels with the data; only the
valid bits are reset (asynchronous, active low).

The published numbers come from a high-level-synthesis build that re-times for each
clock and configuration (6, 4 and 2 cycles at 320, 200 and 100 MHz; 9, 15 and 21 cycles
for deeper trees; fewer cycles at low input precision). This RTL has one fixed register
placement and therefore the same 6 cycles for all of those. For a slower clock or a
shallower design, registers can be dropped by raising `LEVELS_PER_STAGE`; for a faster
one the only deep combinational path is the comparator-AND of stage 2 and the one-hot
OR of stage 3.

## Per-variable precision

Inputs are unsigned integers. Each variable has its own width, `VAR_BITS[v]` (1 to 16),
and the input bus `x_i` is the concatenation of the variables with variable 0 in the
least significant bits, so its width is the sum of the widths (128 bits for eight 16-bit
variables, 75 for the bit-optimised 5 x 12 + 3 x 5). The bus tap zero-extends every
variable to 16 bits, and each decision path compares only a variable's own bits, so a
narrow variable costs narrow comparators after synthesis. The published study found
that 12 bits for the missing-ET and sum variables and 5 bits for the energy densities
lose nothing in physics performance and cut logic by about four.

`VAR_BITS` is a packed parameter, `logic [N_VAR-1:0][7:0]`, element v holding the width
of variable v; `{8'd5, 8'd5, 8'd5, 8'd12, 8'd12, 8'd12, 8'd12, 8'd12}` gives variables 0
to 4 twelve bits and 5 to 7 five bits.

## Scores and the output

Bin scores are signed integers with `OUT_BITS` magnitude bits plus sign (17 bits for the
16-bit output). The boost weight of each tree is folded into its bin scores before
they are loaded, and the float-to-integer mapping of the target must respect addition,
f(a + b) = f(a) + f(b), so that the forest output is simply the sum of the selected
scores. Suitable mappings are a plain scale: a quantity in [0, E_max] to
[0, 2^OUT_BITS - 1], or a symmetric one in [-p_max, p_max] to
[-(2^OUT_BITS - 1), 2^OUT_BITS - 1], with the range widened to the symmetric or
zero-based one when the target is neither.

`fwx_tree_sum` adds the tree scores in a balanced adder tree with enough guard bits
(`17 + ceil(log2 N_TREE)`) that it never overflows. `fwx_score_processor` then applies
the boosting mode:

* `BOOST_ADA` (AdaBoost, the default and the benchmark): the sum is the output;
* `BOOST_GRAD` (gradient boosting): the constant `GRAD_CONST` (the initial estimate of
  the boosting; 0 unless given) is added.

Finally the result is limited to `±(2^OUT_BITS - 1)`, and `sat_o` is raised for a vector
whose value had to be limited. With a properly scaled target this never happens; the
limit is this design's addition so that the output width is guaranteed.

## Configuring a forest

The forest enters `fwx_bdt_top` through two input arrays:

* `cfg_bounds_i[t][b][v]` (type `fwx_pkg::bounds_t`, fields `lo`, `hi`): the interval of
  variable v on the path of bin slot b of tree t;
* `cfg_value_i[t][b]`: the integer score of that bin.

For a trained forest these are constants: tie them to constant expressions (for
example a localparam array generated from the trained model) and synthesis folds them
into the comparators, which is how the published engine is built. Keeping them as ports
lets one netlist carry any forest, and lets the testbenches load many random forests;
they must not change while a vector is in flight. Bin slots can be in any order.

To produce the configuration from a trained tree: walk from the root to each leaf,
starting from `lo = -1`, `hi = 2^W` for every variable; at each node testing `x_v > c`,
on the "yes" branch set `lo_v = max(lo_v, c)`, on the "no" branch `hi_v = min(hi_v, c + 1)`;
at the leaf, store the bounds and the leaf's integer score (weight included) in a free
slot; fill the remaining slots with empty intervals and score 0. Cuts must already be
integers in the variable's scale. `tb/tb_fwx_forest_pkg.sv` contains exactly this
procedure for its random trees.

## Parameters of `fwx_bdt_top`

| parameter          | default        | meaning                                                       |
|--------------------|----------------|---------------------------------------------------------------|
| `N_VAR`            | 8              | input variables                                               |
| `VAR_BITS`         | 16 for each    | width of each variable, 1..16                                 |
| `OUT_BITS`         | 16             | magnitude bits of scores and output (plus a sign bit)          |
| `N_TREE`           | 40             | trees                                                         |
| `MAX_DEPTH`        | 5              | maximum tree depth                                            |
| `N_BIN`            | 2^MAX_DEPTH    | bin slots (decision paths) per tree; may be set lower          |
| `BOOST`            | `BOOST_ADA`    | `BOOST_ADA` or `BOOST_GRAD`                                   |
| `GRAD_CONST`       | 0              | constant added in GradBoost mode                              |
| `LEVELS_PER_STAGE` | 3              | adder-tree levels between registers                           |

The defaults are the published benchmark: 40 trees of depth at most 5 on 8 variables of
16 bits, AdaBoost, 16-bit output. At these defaults the engine has 1280 decision paths
and 20480 comparators. The other published points need more bin slots per tree:
40 trees of depth 6 need up to 64, 20 of depth 7 up to 128, 10 of depth 8 up to 256
(trained trees typically fill 10 to 60 % of that); set `MAX_DEPTH` (or `N_BIN`)
accordingly. Resources grow linearly with `N_TREE x N_BIN x N_VAR`.

## Files

| file                           | content                                                   |
|--------------------------------|-----------------------------------------------------------|
| `rtl/fwx_pkg.sv`               | defaults, bound and variable types, boosting-mode enum    |
| `rtl/fwx_bus_tap.sv`           | input register and per-variable demultiplexer             |
| `rtl/fwx_ohdp.sv`              | one decision path: 2V comparisons and an AND              |
| `rtl/fwx_bin_lut.sv`           | one-hot bin vector to tree score                          |
| `rtl/fwx_ddte.sv`              | one tree: N_BIN decision paths and the lookup, 2 stages   |
| `rtl/fwx_tree_sum.sv`          | pipelined adder tree over the tree scores                 |
| `rtl/fwx_score_processor.sv`   | AdaBoost / GradBoost output stage with saturation         |
| `rtl/fwx_bdt_top.sv`           | the engine                                                |
| `tb/tb_fwx_forest_pkg.sv`      | reference model: random trees, flattening, tree walk      |
| `tb/tb_fwx_*.sv`               | testbenches (below)                                       |

## Verification

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`. Expected
values are computed independently of the RTL: the forest testbenches walk real binary
trees node by node, while the hardware is fed only the flattened intervals, so the
flattening, the strict comparisons and the bin selection are all checked against the
ordinary meaning of a decision tree. Input vectors are random, with a large share placed
exactly on a cut value or one above it, where an off-by-one in a bound would show.

| testbench                  | what it checks                                                                |
|----------------------------|-------------------------------------------------------------------------------|
| `tb_fwx_bus_tap`           | unpacking of a 75-bit mixed-width bus, 1-cycle delay, valid and reset          |
| `tb_fwx_ohdp`              | hit bit against integer interval tests; open and empty bounds; bounds ± 1; junk above a variable's width |
| `tb_fwx_bin_lut`           | every single-hot input selects its score, none gives 0                         |
| `tb_fwx_ddte`              | 20 random trees (shallow and full) against a tree walk, 2-cycle latency         |
| `tb_fwx_tree_sum`          | sums for 40, 10 and 1 trees including extreme values, stage count, gaps        |
| `tb_fwx_score_processor`   | both modes, saturation at both ends, flag                                      |
| `tb_fwx_bdt_top`           | end to end: the default engine and a bit-optimised GradBoost engine, streaming, gaps, unused slots, saturation; fails if any of these never occurred |
| `tb_fwx_bdt_full`          | the engine at its exact defaults, 2000 vectors, 6-cycle latency, interval 1    |
| `tb_fwx_bdt_workloads`     | 40 trees depth 6, 20 depth 7, 10 depth 8, the bit-optimised widths and 2-bit inputs |

To run one with Verilator 5 (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/fwx_pkg.sv tb/tb_fwx_forest_pkg.sv tb/tb_fwx_bdt_full.sv --top-module tb_fwx_bdt_full
./obj_dir/Vtb_fwx_bdt_full
```

The larger testbenches spend most of their time in the C++ compile (about a minute for
the default engine, several for the workload set); simulation itself takes seconds.

## Where this differs from the published engine

* Latency is fixed by the RTL's register placement: 6 cycles for every configuration
  with 9 to 64 trees, whereas the published HLS builds vary with clock speed (2 to 6
  cycles), depth (up to 21 cycles at depth 8) and input precision.
* The published deeper configurations use a few block RAMs; this RTL uses no memory.
* The forest is supplied through input ports rather than compiled in; tie them to
  constants to get the published, constant-folded form.
* The output saturation and `sat_o` are additions.
* The published block diagram draws an input tap inside every tree engine and a
  demultiplexer inside every decision path; here one input register and one split are
  shared by all trees and paths, which computes the same thing with fewer registers.
* The bus packing, the bound encoding (`-1` and `2^W` for open, `lo >= hi` for empty) and
  the reset of valid bits only are choices of this design; the publication does not
  describe them.
* The offline steps that prepare a forest (tree flattening, merging, score
  normalisation, tree and cut pruning) are software and are not part of this RTL.
