# RF-EW: a random-forest classifier that weighs its trees by their timing-error rate

Near-threshold supply voltages (about 0.3 V to 0.7 V) save a lot of energy, but they make
gate delays vary widely from die to die. A logic path that misses the clock edge gives a
*timing error*: a flip-flop captures a wrong bit. A single large classifier, such as a
support vector machine built from multiply-accumulate units, loses accuracy quickly once
its long arithmetic paths begin to fail. A random forest instead splits the decision over
many small decision trees, and each tree is only a few comparators and a small look-up
table. The trees' errors are partly independent, so a vote over them averages much of the
damage away.

This design goes one step further. It is a binary random-forest classifier with
**error weighted voting** (RF-EW). Each tree's vote counts with a weight that reflects:

* how accurate the tree is; and
* how often its own hardware is expected to fail.

To make the failures of different trees less alike, each tree also runs at its own
precision, between 4 and 8 bits (**precision diversity**). Its critical path, and so its
error rate, then differs from the other trees'.

The SystemVerilog here implements the classifier datapath. Training is not in it: that
covers building the trees, choosing thresholds and computing the weights. Those results
enter the hardware as configuration inputs.

## Block structure

```
 x (30 features x 8 b) ──┬──────────────┬─────────── ... ──┐
                         ▼              ▼                  ▼
                   decision_tree 0  decision_tree 1 ... decision_tree 9     (rf_ew_classifier)
                   ┌────────────────────────────┐
                   │ comparator_array (Stage 1) │  7 comparators: x[sel_i] > T_i at PREC_l bits
                   │ dt_lut           (Stage 2) │  128-entry truth table -> 1-bit label
                   │ register D                 │  y_l
                   └────────────────────────────┘
                         │ y_0 ... y_9
                         ▼
                   weighted_voter: per tree, mux(y_l ? p'_l : 0) -> adder tree -> slicer (> 1/2)
                         │
                         ▼ y_hat
```

| file | role |
|---|---|
| `rtl/rf_pkg.sv` | shared widths; `dt_precision()`, the fixed draw of each tree's precision |
| `rtl/comparator_array.sv` | Stage 1 of a tree: feature select, truncation to the tree's precision, `>` compare |
| `rtl/dt_lut.sv` | Stage 2 of a tree: truth table addressed by the comparator bits |
| `rtl/decision_tree.sv` | Stage 1 + Stage 2 + output register, with a valid bit |
| `rtl/weighted_voter.sv` | multiplexers, balanced adder tree and slicer |
| `rtl/rf_ew_classifier.sv` | top: L trees and the voter |

## The decision rule and where the weights come from

The weights are the least obvious part of the design, and they are all computed offline.
This section explains what a user must load into `cfg_weight`.

Let `y_l` be the vote of tree `l` as it leaves the tree's register, timing errors
included. The classifier estimates the posterior of class `c` as the sum of `p_l` over
the trees that voted `c`. Here `p_l` is the probability that tree `l` decides correctly.
For two classes, this turns into a threshold test on the normalized weights
`p'_l = p_l / Σ p_k`:

```
y_hat = 1   if   Σ_{l : y_l = 1} p'_l  >  1/2,   else 0
```

A tree is correct when its data error `e_l` and its timing error `η_l` cancel. Assume the
two are independent, and let `A_l = P(correct | no timing error)`. That value is the
tree's out-of-bag accuracy, measured during training. Let `e_l = P(η_l = 1)` be the tree's
timing-error rate at the operating voltage. Then:

```
p_l = A_l (1 - e_l) + (1 - A_l) e_l
```

As `e_l` grows, `p_l` moves from `A_l` toward 1/2. A tree that fails often therefore
counts for less. Two special cases use the same hardware:

| setting | weights | behaviour |
|---|---|---|
| conventional weighted voting | `e_l = 0`, so `p_l = A_l` | weights reflect accuracy only |
| majority voting | all `p'_l` equal | strict majority |

For a strict majority of 10 trees, use weight 25/256 for every tree. Five votes then give
125, which is not above 128, and six give 150, which is.

**Number format.** Each `cfg_weight[l]` is an unsigned 8-bit fraction: the weight is the
value divided by 256, so 1/2 is 128. The voter adds the selected weights at full width
(`SUM_W` = 12 bits for 10 trees), so the sum never overflows. It outputs 1 only when the
sum is strictly above 128.

Round the normalized weights to 8 bits when computing them. The rounded weights need not
add up to exactly 256. Only the comparison with 128 matters.

## Decision trees: comparators, truth table, precision

Each tree has `NODES` = 7 internal nodes, which is enough for a full tree of depth 3.
Node `i` compares feature `x[cfg_sel[l][i]]` with threshold `cfg_thr[l][i]`. It outputs
`gt_i = 1` when the feature is strictly greater.

The seven `gt` bits form the address into a 128-entry truth table `cfg_lut[l]`, with bit
`a` holding the label for address `a`. To program a trained tree:

1. Number its internal nodes 0 to 6 in any fixed way.
2. For every address `a`, start at the root.
3. At each node `i`, go to the "greater" child if bit `i` of `a` is 1, and to the other
   child otherwise.
4. Write the label of the leaf you reach into bit `a`.

Bits of nodes that are not on the path to that leaf do not matter. The testbenches use
heap order: node `i` has children `2i+1` (not greater) and `2i+2` (greater).

A trained tree with fewer than 7 internal nodes fits directly. A deeper tree needs a larger
`NODES`. The table grows as `2^NODES`.

**Precision diversity.** Tree `l` works at `PREC_l` bits. The comparator keeps only the top
`PREC_l` bits of the 8-bit feature and of the 8-bit threshold, then compares. Thresholds
should be trained at the same precision.

`rf_pkg::dt_precision(l, PREC_SEED, 4, 8, DIVERSE)` chooses `PREC_l`:

* It is a fixed xorshift hash of the tree index, so a given seed always builds the same
  forest.
* The default seed 11 gives the trees the precisions 6, 5, 6, 8, 7, 7, 8, 5, 4, 4. Each
  value from 4 to 8 occurs twice.
* With `DIVERSE = 0`, every tree gets 8 bits. This matches the uniform-precision forests
  used for plain majority or weighted voting.

Precision is fixed at elaboration time, because it sets the width of the comparators in
hardware.

## Interface and timing of `rf_ew_classifier`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `in_valid` | in | 1 | `x` holds a vector to classify this cycle |
| `x` | in | M×8 | test vector, packed `[M-1:0][7:0]` |
| `cfg_sel` | in | L×NODES×5 | feature index per comparator |
| `cfg_thr` | in | L×NODES×8 | thresholds (full 8-bit scale) |
| `cfg_lut` | in | L×2^NODES | truth tables |
| `cfg_weight` | in | L×8 | normalized weights `p'_l` |
| `out_valid` | out | 1 | the outputs below belong to a new vector |
| `y_hat` | out | 1 | decision |
| `vote_sum` | out | SUM_W | weighted vote for class 1 |
| `votes` | out | L | each tree's registered vote |

**Timing:**

* One vector is accepted on every clock edge where `in_valid` is high.
* The results appear one clock later, with `out_valid` high.
* The tree registers are the only pipeline stage. The comparators and tables come before
  them in the same cycle, and the voter is combinational after them.
* While `in_valid` is low, the tree registers hold their value and `out_valid` is low.
* Reset clears the votes and `out_valid`.
* Two assertions enforce the configuration rules below.
* The `cfg_*` inputs are treated as static. Change them only while no vectors are in
  flight:
  * The tree configuration must not change between two accepted vectors.
  * The weights must not change while `out_valid` is high.

**Default parameters:**

| parameter | default |
|---|---|
| `L` | 10 |
| `M` | 30 |
| `NODES` | 7 |
| `FEAT_W` | 8 |
| `WEIGHT_W` | 8 |
| `PREC_MIN` / `PREC_MAX` | 4 / 8 |
| `PREC_SEED` | 11 |
| `DIVERSE` | 1 |

At these defaults, synthesis gives about 760 word-level cells and 11 flip-flops.

## What follows the source design and what does not

**Taken from the source:**

* The two-stage tree of comparators and a look-up table, followed by a register.
* The voter, built from a multiplexer per tree (0 or `p'_l`), an adder tree and a slicer
  at 1/2.
* The weight formula.
* 10 trees.
* 8-bit features and thresholds, with each tree's precision drawn uniformly from 4 to
  8 bits.

**Choices of this design:**

* **Feature count.** 30 features, the size of the breast-cancer data set the
  classifier targets.
* **Tree size.** 7 comparators per tree. The source grows unrestricted trees and gives
  no size.
* **Programmable model.** Feature selects, thresholds, tables and weights are inputs.
  The source instead folds each trained table into fixed logic when it generates the
  architecture. Fixed contents would save area but need a new netlist per trained model.
  The source puts a ten-tree forest at roughly 1.5 thousand two-input NAND equivalents,
  with the model hard-wired. This programmable version is larger: each tree carries a
  128-to-1 table multiplexer and 7 feature multiplexers. Its area should not be compared
  with that figure.
* **Truncation.** Reducing a value to the tree's precision by dropping low bits.
* **Weights.** The 8-bit weight format and the exact precision draw.
* **Control.** The valid signals, the hold behaviour and the reset.

Not included:

* **Training.** This covers bagging, split selection by Gini index and the out-of-bag
  accuracy `A_l`.
* **Error-rate measurement.** Estimating `e_l` at a given voltage requires gate-level
  timing simulation of the real cells.
* **Baselines.** The centralized SVM is not built, and neither is a separate majority
  voter. As shown above, majority voting is a weight setting of this voter.

## Verification

Each testbench checks its unit against a reference computed in the testbench itself. Each
prints `TB_RESULT checks=N failures=F`.

* `tb_comparator_array` checks random and boundary vectors at 5-bit and 8-bit precision.
  The boundary cases are equal after truncation, and one step apart.
* `tb_dt_lut` checks every address of random tables, and of tables built from random
  trees, against a walk of the tree.
* `tb_decision_tree` streams vectors through a programmed random tree with gaps in
  `in_valid`. It checks the one-cycle latency and the hold behaviour.
* `tb_weighted_voter` checks random sums for 10 trees and for 3 trees (adder-tree padding).
  It also covers sums exactly at 1/2 and one LSB above, and a case where reliable trees
  outvote an error-prone majority.
* `tb_rf_ew_classifier` runs the whole classifier at its default size. It uses eight
  random forests, with weights from the formula above, and streams vectors with gaps. It
  also counts that each of these events occurred:
  * the weighted decision differs from a plain majority;
  * a tree's reduced precision changes a comparison;
  * the outputs hold during a gap;
  * the trees run at different precisions.
* `tb_rf_ntv_workload` runs the classifier on a synthetic stand-in for the breast-cancer
  data: 30 noisy 8-bit features per vector, two classes. It measures each tree's accuracy
  on error-free vectors, then computes the weights. It then injects timing errors into the
  tree outputs, using `tb/ntv_error_source.sv` (a simulation-only model, described below).
  The same erroneous votes feed four voters: error weighted, accuracy weighted, majority,
  and a single 8-bit tree.

**The error model.** For each tree, it draws a Gaussian `u` with mean `μ_l` and flips the
vote when `u >= 0`. The error rate is therefore `Φ(μ_l)`. The per-tree error rates rise
with precision: 0.5, 3, 10, 25 and 40 % for 4 to 8 bits. These rates are illustrative,
not measured.

**Workload result.** The test runs at three error levels: the rates above scaled by 0.1,
0.5 and 1, standing in for falling supply voltage. At each level, the testbench recomputes
the error weights from that level's rates. The detection rates were:

| error level | error-free forest | error weighted | accuracy weighted | majority | single 8-bit tree |
|---|---|---|---|---|---|
| ×0.1 | 0.89 | 0.88 | 0.88 | 0.87 | 0.73 |
| ×0.5 | 0.87 | 0.86 | 0.86 | 0.83 | 0.64 |
| ×1.0 | 0.87 | 0.82 | 0.80 | 0.78 | 0.55 |

The testbench requires:

* at every level, error weighting scores within 0.01 of both other voters or better;
* at the highest level, error weighting strictly beats majority voting;
* at the highest level, the 10-tree majority beats the single tree.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/rf_pkg.sv tb/tb_rf_ew_classifier.sv --top-module tb_rf_ew_classifier
./obj_dir/Vtb_rf_ew_classifier
```

Replace the testbench name to run any other one. All of them finish in well under a second.

## Changing the design

* **Ensemble size.** Set `L`. The adder tree pads to the next power of two, so any `L`
  works.
* **Deeper trees.** Raise `NODES`. The truth table grows as `2^NODES` bits per tree.
* **Feature count.** Set `M`. The feature-select width follows.
* **Uniform precision.** Set `DIVERSE = 0`. A different `PREC_SEED` gives another
  precision draw.
* **Weight resolution.** Set `WEIGHT_W`. The slicer threshold is always `2^(WEIGHT_W-1)`.
