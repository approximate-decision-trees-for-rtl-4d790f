# Approximate bespoke decision trees for printed circuits

Printed electronics trade density for cost. Circuits inkjet-printed on foil
or paper cost almost nothing to make, but their transistors are micrometres in
size. A classifier that silicon would build in a few square micrometres
can cover hundreds of square millimetres and draw more power than a printed
battery supplies. Two ideas make a machine-learning classifier small enough
to print:

* **Bespoke hardware.** Printing has almost no set-up cost, so each trained
  model can get its own circuit. A decision tree then has no threshold
  registers and no general comparators. Each node compares one input feature
  with a constant, and logic synthesis reduces that comparator to the few gates
  its particular constant needs.
* **Approximation per comparator.** How small a constant comparator gets
  depends strongly, and irregularly, on the constant. For example, a 6-bit
  `x > 31` is just the top bit of `x`, and `x > 63` is always false. Each
  comparator therefore has two knobs:
  * its **precision** `B` (2 to 8 bits, used for both the feature and the
    threshold);
  * a **margin** `m` (at most ±5 steps of the `B`-bit grid), which moves the
    threshold onto a nearby constant that is cheaper to build.

A design-space search chooses the two knobs of every comparator offline,
weighing test-set accuracy against an area estimate. Its result is just a
table of constants. This RTL is the hardware that the table turns into: a
fully parallel decision tree whose comparators carry their own precision and
approximate threshold. The search, the area table and the accuracy evaluation
are software and are not part of this RTL.

## The circuit in one picture

```
 features[0..N_FEAT-1] (8-bit fractions of [0,1))
        │
        ├──► node 0: threshold_conv(C0,B0,m0) ─► dt_comparator(B0): f[k0][7 -: B0] > T0 ─► gt0
        ├──► node 1: ...                                                                 ─► gt1
        │     ...    (all N_COMP comparators evaluate at the same time)
        │
        ▼
   reach(root)=1, reach(child) = reach(parent) & (gt_parent or !gt_parent)
   leaf_hit[l] = reach(parent of l) & (gt or !gt)        (exactly one leaf is hit)
   class = OR over leaves of (leaf_hit[l] ? LEAF_CLASS[l] : 0)
        │
        ▼
   output register (approx_dt_top): class_idx, class_onehot, out_valid
```

| file | what it is |
|---|---|
| `rtl/dt_pkg.sv` | constants (8-bit inputs, precision 2..8, margin ±5), the node record `node_t`, the default tree |
| `rtl/threshold_conv.sv` | approximate threshold from original threshold, precision and margin |
| `rtl/dt_comparator.sv` | one comparator at precision `B` |
| `rtl/approx_dt.sv` | the combinational, fully parallel tree |
| `rtl/approx_dt_top.sv` | clocked top: tree plus output register |

## Describing a tree

A tree is a parameter, not hardware that can be loaded. `approx_dt` and
`approx_dt_top` take:

* `N_COMP`, `N_FEAT` and `N_CLASS`: the number of comparators (internal
  nodes), features and classes. A binary tree with `N_COMP` comparators has
  `N_COMP+1` leaves.
* `NODES`: one `node_t` per comparator, in pre-order. The root is node 0, and
  each child has a larger index than its parent, which is the order in which
  common training libraries number their nodes. Its fields are:
  * `feat`: the feature index;
  * `c_q16`: the trained threshold as an unsigned 16-bit fraction
    (`round(C * 65536)`);
  * `prec`: the precision gene `B`;
  * `margin`: the margin gene `m`;
  * `left` and `right`: the two children. A value `>= 0` is a node index, and
    a value `-1-k` means leaf `k`. `left` is taken when the feature is not
    greater than the threshold, `right` when it is.
* `LEAF_CLASS`: the class label of each leaf.

`dt_pkg::node(feat, c_q16, prec, margin, left, right)` builds one entry.
`NODES` is a packed array indexed `[0:N_COMP-1]`, so the first entry of a
`'{...}` list is the root. At elaboration the tree checks its table. Each of
the following stops elaboration with an `$error`:

* a feature index out of range;
* a precision outside 2..8;
* a margin outside ±5;
* a child that does not follow its parent;
* a node or leaf that is not referenced exactly once;
* a leaf label out of range.

The default table (`dt_pkg::DEF_NODES`) has the size of the smallest tree the
approach was evaluated on (Seeds: 10 comparators, 7 features, 3 classes).
Its thresholds and genes are illustrative values, not a trained model:

| node | feature | C | B | m | approximate threshold T (B-bit) | T / 2^B | exact 8-bit threshold |
|---|---|---|---|---|---|---|---|
| 0 | 0 | 0.42 | 6 | +1 | 28 | 0.438 | 108 |
| 1 | 2 | 0.30 | 4 | 0 | 5 | 0.313 | 77 |
| 2 | 4 | 0.55 | 3 | −1 | 3 | 0.375 | 141 |
| 3 | 1 | 0.61 | 5 | +2 | 22 | 0.688 | 156 |
| 4 | 6 | 0.18 | 2 | 0 | 1 | 0.250 | 46 |
| 5 | 3 | 0.73 | 8 | −3 | 184 | 0.719 | 187 |
| 6 | 5 | 0.25 | 5 | +5 | 13 | 0.406 | 64 |
| 7 | 0 | 0.66 | 7 | −2 | 82 | 0.641 | 169 |
| 8 | 2 | 0.84 | 3 | −1 | 6 | 0.750 | 215 |
| 9 | 6 | 0.47 | 6 | −5 | 25 | 0.391 | 120 |

## Threshold conversion: how C, B and m become a constant

`threshold_conv` computes, for original threshold `C` in [0,1):

```
fixed  = round( C + m · 2^-B )   to B fractional bits   (halves round up)
T      = fixed · 2^B              clamped to 0 .. 2^B − 1
```

It has two outputs. `thr_fixed` is the fixed-point value as a 16-bit fraction,
which is what an accuracy evaluation in software would use. `thr_int` is the
`B`-bit integer `T` that the comparator is wired with. Because `m` counts whole
steps of the `B`-bit grid, it makes no difference whether `m` is added before
the rounding or to the rounded integer afterwards.

Clamping matters: a margin that pushes `T` to `2^B − 1` makes the comparator
constant-false. Its right subtree then becomes unreachable, and synthesis
removes it. This is a legitimate, very cheap outcome of the search, but it
also hides part of the tree. In the default table, `m = +1` at node 8 would
give `T = 8`, clamped to 7, and leaves 9 and 10 could never be reached; the
table uses `m = −1` there so that every leaf stays reachable.

Inside `approx_dt` every input of `threshold_conv` is a constant. The block
therefore costs nothing after synthesis; it is there so that the tree is
described by the same numbers as the search uses (`C`, `B`, `m`), not by
pre-computed integers.

## The bespoke comparator

`dt_comparator #(PREC=B)` outputs `feature[7 -: B] > threshold`. The feature
is reduced to `B` bits by dropping its low bits, which needs no logic. In
8-bit terms, the node is true when `feature ≥ (T+1) · 2^(8−B)`. The threshold
arrives on a port, but the tree always drives it with a constant, and the
synthesized result is the bespoke comparator. With the default tree,
synthesis leaves comparators of 2 to 8 bits, one per node.

## The parallel tree and the class output

No node waits for another. Every comparator sees its feature directly, and
the tree structure only decides how the outputs are combined. Each node has a
`reach` term:

* the root's `reach` is 1;
* a child's `reach` is its parent's `reach` ANDed with the parent's outcome,
  inverted for a left child.

A leaf is hit under the same rule, so each leaf is the AND of the outcomes
along its root path. Exactly one leaf is hit for any input, because the leaves
of a binary tree partition the input space. `approx_dt_top` asserts this on
every valid clock. The class is the OR of the hit leaf's label bits
(`class_idx`), and the one-hot class is the OR of hit leaves per label
(`class_onehot`). All of this is combinational. Its delay is that of one
comparator plus the AND-OR network, which depends on the tree's depth before
synthesis flattens it.

## Timing of the top

`approx_dt_top` registers the result:

* **clock:** one classification per clock (the printed designs were
  synthesized against a 50 ms clock, so the tree's combinational delay of
  tens of milliseconds fits in one period);
* **handshake:** present `features` with `in_valid`. At the next rising edge,
  `class_idx` and `class_onehot` are loaded, and one clock after `in_valid`,
  `out_valid` is high for that result;
* **idle clocks:** on clocks without `in_valid`, the class outputs hold their
  value;
* **reset:** `rst_n` is active low and synchronous, and clears all three
  outputs.

The output register, the valid flag and the reset are this design's own
choices.

## Sizes of the evaluated trees

The approach was evaluated on ten public datasets. The comparator counts below
are those of the exact (non-approximate) trees. The feature and class counts
are those of the public datasets. A bespoke tree holds only its own model, so
each row needs its own build of `approx_dt_top` with its trained table. The
default build corresponds to the Seeds row.

| dataset | comparators | features | classes |
|---|---|---|---|
| Arrhythmia | 54 | 279 | 16 |
| Balance | 102 | 4 | 3 |
| Cardiotocography | 79 | 21 | 3 |
| HAR | 178 | 561 | 6 |
| Mammographic | 150 | 5 | 2 |
| PenDigits | 243 | 16 | 10 |
| RedWine | 259 | 11 | 6 |
| Seeds | 10 | 7 | 3 |
| Vertebral | 27 | 6 | 3 |
| WhiteWine | 280 | 11 | 7 |

`tb/tb_dt_workloads.sv` elaborates `approx_dt` at every one of these sizes
with a random, reproducibly generated tree, and checks it against a reference
model. This shows that the RTL handles trees of these sizes. Accuracy cannot be
checked, because the trained trees and the test data are not part of this
release.

## Where this RTL departs from, or fills in, the approach

The following choices are not specified by the approach:

* Which child the "greater" outcome selects is this design's choice. It
  follows the common convention: right for `feature > threshold`.
* The feature is reduced to `B` bits by truncation. Rounding the feature
  would need an adder per comparator.
* Original thresholds are 16-bit fractions, not floating point.
* Rounding is to nearest with halves rounded up. A result outside the range is
  clamped, and a precision gene outside 2..8 is clamped too (only in
  `threshold_conv` used on its own; in the tree an illegal gene is an
  elaboration error).
* The leaf and class logic (AND per leaf, OR per class) is the simplest
  logic that does the job.
* The output register, valid flag and reset are this design's own.
* The default tree is illustrative.

Lint reports a few unused signals, all intended:

* the low bits of a feature that a comparator below 8 bits drops;
* the top bits of `thr_int` above `B`;
* `thr_fixed`, which exists for software accuracy evaluation;
* the comparator outputs inside the top.

## Simulation

The testbenches print one line, `TB_RESULT checks=N failures=M`, and end with
`$finish`. Each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_approx_dt_top \
  rtl/dt_pkg.sv tb/tb_dt_ref_pkg.sv rtl/threshold_conv.sv rtl/dt_comparator.sv \
  rtl/approx_dt.sv rtl/approx_dt_top.sv tb/tb_approx_dt_top.sv
./obj_dir/Vtb_approx_dt_top
```

(For `tb_dt_workloads`, add `tb/tb_dt_workload_check.sv`.)

| testbench | what it checks |
|---|---|
| `tb_dt_comparator` | every 8-bit feature against every threshold, at precisions 2, 5 and 8 |
| `tb_threshold_conv` | all precision genes 0..15 and margins −8..7, with directed (0, top, exact halves) and random thresholds, against real arithmetic |
| `tb_approx_dt` | 20 000 vectors on the default tree: each comparator, the hit leaf and the class, against a root-to-leaf walk; every leaf reached |
| `tb_approx_dt_top` | the clocked top at its defaults: one-clock latency, holding on idle clocks, reset in mid-stream, class against the reference; counts leaves and classes reached, comparisons and classes changed by the approximation (against an exact 8-bit tree), idle clocks and resets, and fails if any count is zero |
| `tb_dt_workloads` | random trees of all ten evaluated sizes (10 to 280 comparators, up to 561 features) against a root-to-leaf walk |

The reference model (`tb/tb_dt_ref_pkg.sv`) is written independently of the
RTL. It computes thresholds in real arithmetic, scales features by integer
division and walks the tree node by node.

In the end-to-end test, about one valid vector in five gets a different class
from the approximate tree than from the exact 8-bit tree. That shows the
approximation acting on the hardware. It says nothing about accuracy, since
the tree and the inputs are random.
