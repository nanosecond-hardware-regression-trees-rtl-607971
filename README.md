# Deep Decision Tree Engine: a boosted regression forest in a few clock ticks

This is synthesizable SystemVerilog for a boosted-decision-tree (BDT)
regression engine meant for trigger firmware. The engine takes a vector of
integer inputs every clock tick and returns the forest's regression score a
fixed, small number of ticks later. It evaluates every tree without walking
any of them. It uses no multiplier, no RAM and no division.

The architecture follows *Nanosecond hardware regression trees in FPGA at the
LHC* (Serhiayenka, Roche, Carlson, Hong). In that paper it estimates the
missing transverse momentum at the LHC, and in a second study the momentum of
muons in the ATLAS RPC detector. The paper's firmware is VHDL produced by a
code generator from a trained model. This RTL is a fresh SystemVerilog
rendering of the structure the paper describes. The trained cut values were
not published, so the RTL computes a seeded stand-in forest of the published
sizes (see *The forest model*).

## The idea: a tree is a set of boxes

A decision tree over `NVAR` variables cuts the input space into terminal
bins. Each bin is an axis-aligned box: along every variable, the inputs that
reach the bin lie between a lower and an upper bound. The bins of one tree
do not overlap and together cover every possible input. So for any input,
exactly one bin of each tree contains it.

Software finds that bin by walking from the root, one comparison per level.
This engine instead gives every bin its own comparator block, and all of them
decide at once:

* **One Hot Decision Path (`ohdp`)**, one per bin. It outputs 1 when
  `x_min[v] < x[v] < x_max[v]` holds for every variable `v`. With 8 variables
  that is 16 comparisons against constants. An open side of a box, such as a
  bin with no upper bound on some variable, becomes a bound outside the input
  range. That compare is always true, and synthesis removes it.
* Because the bins of a tree partition the space, the `ohdp` outputs of one
  tree form a **one-hot vector**.
* **Look-up (`hte_lut`)**. It turns the one-hot vector into the fired bin's
  score. It is an AND-OR selector: each bin's constant score is gated by that
  bin's hit, and the gated values are ORed together.
* **HDL Tree Engine (`hte`)**. It is one tree: a fan-out of `x` to all its
  `ohdp`s, followed by the look-up.

The time through a tree no longer depends on its depth. Only the number of
comparators grows with the number of bins. The paper's main forest has 20
trees, 2.9k bins and 8 variables. That is about 46k comparisons against
constants, all evaluated in parallel.

## Summing the forest

A boosted regression forest averages its trees' outputs. The engine never
divides. Each bin's score is stored already divided by the number of trees,
so the plain sum of the subscores is the average. The **Tree Manager**
(`tree_manager`) has two jobs: it hands `x` to every tree engine, and it adds
the `NTREE` subscores. It offers two adders, selected at elaboration with
`SUM_MODE`. Both are the same binary tree of adders. Each level adds
neighbouring operands in pairs (0+1, 2+3, …). When a level has an odd
operand count, the last operand moves on to the next level unchanged. For
five trees that gives `((O0+O1) + (O2+O3)) + O4`.

* **`sum_comb`** (`SUM_COMB`) is the adder tree with no registers. It is the
  fastest, but the whole tree must settle within one clock period, so it only
  suits small forests or slow clocks.
* **`sum_pipeline`** (`SUM_PIPELINE`) puts a rank of flip-flops in front of
  every adder level. An operand carried past a level is registered too, so
  all operands of a level are aligned in time. Each tick therefore holds only
  one adder delay. For `N` subscores there are `ceil(log2 N)` levels and as
  many ticks. The output of the last adder is not registered.

Each adder level adds one guard bit, so the sum can never overflow. The score
is `SCORE_W + ceil(log2 NTREE)` bits wide, which is 21 bits for the default.

## Timing

There are two clocked steps before the adder. First the `ohdp` hit flags are
registered. Then the look-up output is registered. The algorithm latency, in
rising clock edges from `x` to `score`, is therefore:

| Adder | Latency (ticks) | Default forest (20 trees) | 40 trees | 100 trees |
|---|---|---|---|---|
| `SUM_COMB` | 2 | 2 | 2 | 2 |
| `SUM_PIPELINE` | 2 + ceil(log2 NTREE) | 7 | 8 | 9 |

The initiation interval is one tick. A new `x` can be applied on every
clock, and `score` then shows a new result on every clock.

```
edge:       0        1            2             2+L_sum
x:          X0 ----> ohdp regs -> lut regs ---> score(X0)   (L_sum = 0 or ceil(log2 T))
```

The design has no reset and no valid flag. Every register is overwritten on
every tick, so the output is meaningless only for the first `LATENCY` ticks
after start-up. The top module's `LATENCY` localparam gives the count, so a
user can delay a valid bit to match it.

## The forest model

The actual cuts and scores of a trained forest belong in `ddte_pkg`. Two
functions define the whole model:

* `node_split(seed, tree, level, path, n, r, box, nvar)` gives the decision
  of one internal node. It returns how many of the node's `n` bins go to the
  left subtree, which variable is compared, and the cut `c`. `x[v] < c` goes
  left. A split at `c` of a box `(lo, hi)` gives a left child `(lo, c)` and a
  right child `(c-1, hi)`, because all bounds are strict.
* `leaf_score(seed, tree, bin, ntree, score_w)` gives a bin's subscore,
  already divided by `ntree`.

From these, `bin_box()` works out any bin's box in O(depth) steps. Each
`ohdp` calls it at elaboration time for its own bin, and each `hte_lut`
calls `leaf_score` for its own bins. Bins are numbered from left to right.

Each `ohdp` and `hte_lut` is therefore told only small integers: the seed,
the tree, the bin and the sizes. It computes its constants itself. An
earlier form passed every bin's whole box, about 1000 bits, down as one
parameter. With that form, Verilator 5 gave wrong results for one tree when
two different forests were built into the same simulation. The likely cause
is that it merged parameter sets which differ. If you change how the
constants reach the blocks, keep the parameters small or unique.

The stand-in model replaces every decision with a hash of the seed, the tree
and the node's position:

* The bin count of a node is split at random between its subtrees, with each
  side kept small enough to fit the remaining depth.
* The compared variable is random. If that variable is nearly used up, the
  widest variable is taken instead.
* The cut falls in the middle half of the node's box.
* The scores are random `SCORE_W`-bit values divided by `NTREE`.

Every tree therefore has exactly `NBIN` bins and never exceeds depth `DEPTH`.
The forest is deterministic for a given `SEED`.

**To load a trained model**, replace `node_split` and `leaf_score` with
functions that return the trained decisions. They can use a `case` on the
tree, level and path, or a generated table. If trees differ in bin count,
also give `hte` a per-tree `NBIN`. Nothing else has to change.

## Parameters

`ddte` (top) and its blocks share these parameters. The defaults are the
paper's headline configuration:

| Parameter | Default | Meaning |
|---|---|---|
| `NTREE` | 20 | trees in the forest |
| `NVAR` | 8 | input variables (at most 8, `MAX_VAR`) |
| `NBIT` | 16 | bits per variable, signed (at most 62) |
| `NBIN` | 145 | terminal bins per tree (2.9k / 20) (at most 1024, `MAX_BIN`) |
| `DEPTH` | 10 | maximum tree depth (`NBIN <= 2**DEPTH`) |
| `SCORE_W` | 16 | subscore width, signed |
| `SUM_MODE` | `SUM_COMB` | adder: `SUM_COMB` or `SUM_PIPELINE` |
| `SEED` | `32'h5eed_2024` | seed of the stand-in forest |

The configurations evaluated in the paper map onto these parameters as
follows. Bins per tree come from the published bin totals.

| Configuration | NTREE | DEPTH | NBIN | NVAR | SUM_MODE | Latency |
|---|---|---|---|---|---|---|
| (1) benchmark, 1.7k bins | 40 | 6 | 43 | 8 | pipeline | 8 |
| (2) 1.4k bins | 10 | 8 | 140 | 8 | pipeline | 6 |
| (3) default, 2.9k bins | 20 | 10 | 145 | 8 | comb. | 2 |
| (4) 15.7k bins | 100 | 12 | 157 | 8 | pipeline | 9 |
| muon p_T (RPC) | 30 | 7 | not published | 3 | pipeline | 7 |

## Where this RTL departs from, or adds to, the paper

* **Model values.** The cuts and scores are a stand-in, as described above.
  The paper's structure and sizes are kept.
* **Bins per tree.** All trees have the same bin count. The paper gives only
  totals. Real trees differ in bin count.
* **Number format.** Inputs are signed two's complement. The paper says
  16-bit integers but not their signedness. Bounds are one bit wider than
  the inputs, so an open side of a box can be expressed.
* **Look-up.** The look-up selects the score directly with the one-hot
  vector. The paper draws it as mapping the fired bin to an output, but does
  not show its insides.
* **Widths.** The subscore width (16) and the growing sum width are this
  design's choice.
* **Adder for two trees.** The latency formula `2 + ceil(log2 N)` gives 3
  ticks for 2 trees. The paper's latency-scaling plot shows 2 ticks at both 1
  and 2 trees. This RTL follows the formula, which matches every other point
  of that plot (5, 10, 20, 40, 60, 80, 100 and 150 trees).
* **Figure labels.** In the paper's appendix, the text calls the left adder
  drawing combinational, while the caption and the drawing's own title call
  it pipelined. The drawings' titles were followed. They agree with the
  latencies.
* **Purely combinational option.** The paper suggests that the registers of
  the tree engines could be removed for small designs on slow clocks. This
  RTL always registers them.
* **Not included.** The training, the code generator and the FPGA
  implementation results are outside this RTL. This includes clock speeds
  and LUT/FF counts.

## Files

| File | Contents |
|---|---|
| `rtl/ddte_pkg.sv` | sizes, types, `sum_mode_e`, stand-in forest model, latency formula |
| `rtl/ohdp.sv` | one bin's box test, registered |
| `rtl/hte_lut.sv` | one-hot to subscore look-up, registered |
| `rtl/hte.sv` | one tree: `NBIN` × `ohdp` + `hte_lut` |
| `rtl/sum_comb.sv` | combinational adder tree |
| `rtl/sum_pipeline.sv` | pipelined adder tree |
| `rtl/tree_manager.sv` | input fan-out + adder selection |
| `rtl/ddte.sv` | top: manager + `NTREE` × `hte` |
| `tb/ddte_ref_pkg.sv` | reference: walks each tree node by node |
| `tb/ddte_harness.sv` | drives one `ddte` with streaming vectors and checks it |
| `tb/tb_*.sv` | self-checking testbenches (below) |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. The
packages go first on the command line. For example, the full-size engine:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/ddte_pkg.sv tb/ddte_ref_pkg.sv rtl/ohdp.sv rtl/hte_lut.sv rtl/hte.sv \
  rtl/sum_comb.sv rtl/sum_pipeline.sv rtl/tree_manager.sv rtl/ddte.sv \
  tb/tb_ddte_full.sv --top-module tb_ddte_full -j 8
./obj_dir/Vtb_ddte_full
```

For `tb_ddte` and `tb_ddte_workloads`, add `tb/ddte_harness.sv`. Every
`ohdp` instance has its own bound constants, so Verilator creates one class
per bin. Build time therefore grows with the total bin count. The 2.9k-bin
default builds in under a minute on 8 cores. A 15.7k-bin forest takes well
over ten minutes.

## Verification

The reference model (`ddte_ref_pkg`) does not use boxes. It walks each tree
from the root with the same node decisions, then adds the leaf scores as
plain integers. Agreement with the RTL therefore checks four things: the box
derivation, the strict comparisons, the one-hot look-up and the adder tree.
Inputs are driven back to back, one per tick. Each result is compared
exactly at the paper's latency, so a latency that is off by one fails every
check.

| Testbench | What it covers |
|---|---|
| `tb_ohdp` | bins of two model sizes; values on, just inside and outside each bound; 1-tick latency |
| `tb_hte_lut` | every bin selected alone and no bin; 1-tick latency |
| `tb_hte` | one 30-bin tree against the tree walk; every bin reached; 2-tick latency |
| `tb_sum_comb` | 5 and 20 subscores, random values and extremes; no clock |
| `tb_sum_pipeline` | 1, 2, 5 and 40 subscores; latency 0, 1, 3 and 6 ticks |
| `tb_tree_manager` | fan-out and both adders, 5 trees |
| `tb_ddte` | end to end: 5-tree pipelined (odd operand carried), 4-tree combinational, 40-tree benchmark shape, 35-bit inputs |
| `tb_ddte_full` | the default forest at full size: 2900 bins, every one fired, 2-tick latency |
| `tb_ddte_workloads` | configuration (2) at full size, muon forest (30 trees, depth 7, 3 variables, 128 bins per tree), configuration (4) with 100 trees and depth 12 but 16 bins per tree |

The end-to-end benches draw their inputs from four kinds of vector:

* uniform random points;
* a random point inside each bin in turn;
* a point on the inner edge of a bin;
* a point exactly on a bound, which the strict comparison must send to the
  neighbouring bin.

Each kind must occur, and every bin of every forest must fire. Otherwise the
testbench counts a failure.

Configuration (4) was not simulated with its full 157 bins per tree, because
of the build time. Its 100-tree adder and depth-12 trees were simulated with
16 bins per tree. At its full size (15.7k bins) the top passes `verilator
--lint-only`; that takes about two minutes and 2 GB of memory.
