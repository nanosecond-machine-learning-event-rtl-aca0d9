# Boosted decision trees evaluated in a few clock cycles

A trigger system at a particle collider must classify events in tens of
nanoseconds. This design evaluates a whole boosted-decision-tree (BDT) forest
in a fixed, short pipeline. It accepts one event per clock and returns its
score three or four clocks later. It does not walk the trees. Each tree is
first turned into a lookup problem that can be solved in parallel:

1. **Flattening.** Every cut in a tree, on some variable, is extended through
   the whole input space. The tree then becomes a grid. Along each variable
   the cut values split the range into bins, and every grid cell has one
   score. Evaluating the tree means finding one bin index per variable and
   reading one word from a table.
2. **Merging and quantising** (done offline). Inputs, cut values and scores
   become unsigned or signed integers. Each tree's boost weight is folded into
   its scores, so the hardware only adds.

The RTL here is the hardware side: the engines that find bins, the score
tables, the adder and the output transform. The offline steps that build a
forest from a trained model are not part of it. Trained forests are not
included either. A deterministic synthetic forest stands in for one (see
*The synthetic forest*).

## Datapath

```
 x[0..V-1] ──fan-out──┬─ Bin Engine (t=0,v=0) ─┐
   (N bits each)      ├─ Bin Engine (t=0,v=1) ─┼─ tree_lut 0 ─┐
                      │   ...                  ┘              │
                      ├─ Bin Engine (t=1,v=0) ─┐              ├─ score_processor ─ score
                      │   ...                  ┼─ tree_lut 1 ─┤   (sum, then
                      │                        ┘   ...        │    passthrough or tanh)
                      └─ ...                                  ┘
```

`evaluation_processor` builds `N_TREE × N_VAR` bin engines. There is one per
(tree, variable) pair, because each tree has its own bin edges for each
variable. It builds one `tree_lut` per tree and one `score_processor`. Nothing
is shared in time, so nothing stalls. `in_valid` may be high on every clock,
and `out_valid` is `in_valid` delayed by the latency.

| stage | BSBE engine | LUBE engine |
|---|---|---|
| threshold memory read, input register | – | clock 1 |
| shift or compare, one-hot, encode, bin register | clock 1 | clock 2 |
| score memory read (`tree_lut`) | clock 2 | clock 3 |
| sum, transform, output register | clock 3 | clock 4 |
| **latency / interval** | **3 / 1** | **4 / 1** |

The tree address folds the bin indices in mixed radix:
`addr = (…(b_0·NB_1 + b_1)·NB_2 + …)·NB_{V-1} + b_{V-1}`.
Here `NB_v` is that tree's bin count for variable v. The table holds exactly
`∏ NB_v` words and has no unused entries.

## The two bin engines

The bin engine is where most of the logic goes. There are two kinds, and the
choice between them is the main trade-off of the design.

### Bit-shift binning (`bsbe`)

This engine applies when every bin edge of a variable lies on a binary grid.
That is, the bins come from splitting the range in halves, then halving
selected halves, and so on, up to `L` layers. A bin at depth `d` is the
interval `[lo, lo + 2^(N-d))`. It is identified fully by the top `d` bits of
any value inside it.

The engine computes `x >> (N-1-l)` for the layers `l = 0 … L-1`. For each bin
it compares those shifted values with the bin's constant, but only for the
layers `l < d` that define the bin. The comparisons for the other layers are
simply not built. One AND per bin combines its comparators. Exactly one AND is
true, and `active_array_lut` encodes that one-hot vector into an index. All
constants are parameters, so the engine reads no memory and its bin index is
ready after one clock.

Worked example (the module's defaults): N=4, bins [0,8) [8,12) [12,14) [14,16).
For x=13 the cells in the three layers are 1, 3, 6, so the bin is 2.

### Look-up binning (`lube`)

This engine takes arbitrary sorted edges `e_0 < … < e_{NB-2}`, which are read
from a small memory on every clock. Each edge has one `<` comparator,
`c_i = x < e_i`. Because the edges are sorted, the vector `c` is a run of zeros
followed by ones. The edge where it switches marks the bin:
`in_0 = c_0`, `in_i = c_i XOR c_{i-1}`, and the last bin is the NOR of all the
others. `active_array_lut` then encodes the index.

The trade-off between the two engines: the bit-shift engine reads no memory
and is the faster one, but its bin edges must lie on the binary grid. The
look-up engine takes any sorted edges at the price of a memory read, which here
is one more clock of latency. Both need one comparator per bin or edge (the
bit-shift engine one per defining layer of each bin), so their size grows with
the number of bins.

### The one-hot encoder (`active_array_lut`)

This block takes a one-hot vector of NB inputs and gives the index of the
active input. It is written as the OR of the indices of all set inputs. That
is exact for one-hot input and needs no priority chain. Both engines assert
that their vector is one-hot.

## Score processor and the tanh

`score_processor` adds the `N_TREE` signed scores in a sum `clog2(N_TREE)` bits
wider than one score, so the sum cannot overflow. For AdaBoost forests
(`XFORM_PASS`) the sum is the result. Gradient-boosted forests
(`XFORM_TANH`) need `tanh(sum)`. `tanh_pwl` approximates it with seven
straight pieces. The breakpoints are at `±16, ±32, ±64` (times
`2^TANH_SHIFT`), and the output saturates beyond ±64. Because the breakpoints
are powers of two, the piece is found from `|s| >> (4+TANH_SHIFT)`, and each
line needs one constant multiply and one shift. The knots are
`0, tanh(0.5), tanh(1), 1` at `|s| = 0, 16, 32, 64`, scaled to `2^(SCORE_W-1)-1`.
Against the real tanh the error is at most about 4.6 LSB on a 127 full scale.

## The synthetic forest

`bdt_pkg` computes every constant of the forest at elaboration from `SEED`,
using integer hash functions:

* `bin_target`: bins per (tree, variable), uniform in `NB_MIN..NB_MAX`.
* `bsbe_grid`: a binary grid. It starts from the two halves of the range and
  halves pseudo-randomly chosen bins, never below depth `N_LAYER`.
* `lube_thr`: `edge_i = (i+1)·2^N / NB + (hash mod ⌊2^N / (2·NB)⌋)`. These
  edges are sorted and distinct.
* `score_value`: a signed word in `±(2^(SCORE_W-1)-1)`, a hash of (tree,
  address).

`tree_lut` fills its memory with `score_value` in an `initial` loop. To load a
real forest, replace the bodies of these functions (or the `BIN_LO`,
`BIN_DEPTH`, `EDGES` and memory contents they feed) with the trained values.
The interfaces do not change. Note that the bin edges are parameters of the
engines. A bit-shift engine's constants become comparator inputs, and a
look-up engine's become the contents of its threshold memory.

## Parameters of `evaluation_processor`

| parameter | default | meaning |
|---|---|---|
| `N_VAR` | 4 | input variables |
| `N_BIT` | 8 | bits per input and per cut value |
| `N_TREE` | 10 | trees in the forest |
| `SCORE_W` | 8 | bits per stored score; the output has `SCORE_W+clog2(N_TREE)` |
| `N_LAYER` | `N_BIT` | deepest grid layer for bit-shift binning |
| `ENGINE` | `ENG_BSBE` | `ENG_BSBE` or `ENG_LUBE` |
| `XFORM` | `XFORM_PASS` | `XFORM_PASS` (AdaBoost) or `XFORM_TANH` (gradient boost) |
| `TANH_SHIFT` | 0 | scales the tanh breakpoints by `2^TANH_SHIFT` |
| `SEED`, `NB_MIN`, `NB_MAX` | 1, 5, 9 | synthetic forest: seed and bins per variable |

The package limits are 256 bins per variable (`B_MAX`), 16-bit inputs
(`N_MAX`) and 8 variables (`V_MAX`). The defaults match the sizes of the published
electron/photon benchmark: 4 variables × 8 bits, 10 trees, 8-bit scores,
bit-shift binning, AdaBoost, latency 3, interval 1. The synthetic forest at the
defaults has 27 730 score words, against 26 132 bins in the trained one.

Reset is asynchronous and active low. It clears the valid pipeline and the bin
registers. The score memories are constants and are not reset.

## Where this RTL departs from the published design

* **Look-up engine interval.** The published high-level-synthesis build of the
  look-up engine reports an interval of 2 clocks. Here the threshold read is a
  register stage, so the interval stays 1 and the latency is 4. For the
  optimized VBF classifier, 5 clocks of latency were published.
* **Latency of the larger classifiers.** The published latency grows with
  size (6 clocks for the 12-bit, 50-tree classifier). This RTL keeps 3 or 4 at
  every size, because each stage is a single register. A real device at these
  sizes may need more pipeline registers in the adder and memory paths.
* **NOR, not NAND.** The published diagram of the look-up engine labels the
  last-bin gate NAND. The values it prints (0 out for 0,0,1 in) are those of a
  NOR, and a NOR is what the bin logic needs, so NOR is used here.
* **Threshold memory example.** In the published look-up example the first
  memory word is printed as 0100 (4). The bins drawn in the same example put
  that edge at 8. The other two words, 1100 (12) and 1110 (14), agree with the
  bins. The edges 8, 12, 14 are used here. For x=13 both readings give bin 2.
* **tanh knots.** The published curve gives the breakpoints and the saturation
  but no values at the knots. The knot values above are this design's own.
* **Forest contents.** These are synthetic, as described above. Bin counts,
  score tables and the physics performance of the trained classifiers
  therefore cannot be reproduced. Only the structure, sizes and timing can.
* **Not built.** The offline optimisation (flattening, merging, cut erasing,
  tree removing) is software. The bus fan-out is plain wiring, and the VBF
  study's "best of J jet pairs" maximum is described only as an assumption.

## Testbenches

Every testbench computes the expected values on its own, from `bdt_ref_pkg`
(last grid edge ≤ x, count of edges ≤ x, a real-valued `$tanh`). Each prints
`TB_RESULT checks=… failures=…` and has a watchdog.

| testbench | what it runs |
|---|---|
| `tb_active_array_lut` | every one-hot input at 4 and 13 bins |
| `tb_bsbe` | the worked example exhaustively, and an 8-bit, 8-layer grid of 30..60 bins, all 256 inputs, one clock of latency |
| `tb_lube` | the worked example, and an 8-bit edge set of 30..60 bins, all 256 inputs, two clocks of latency |
| `tb_tree_lut` | every bin combination of a 5 × 7 × 4 table, address fold and one clock of read latency |
| `tb_tanh_pwl` | every 12-bit input at two breakpoint scales, against a real-valued evaluation of the seven pieces and within 6 % of `tanh(s/32)` |
| `tb_score_processor` | sums and transforms against the reference, valid timing |
| `tb_evaluation_processor` | four configurations end to end: both engines, both transforms, 2 to 5 variables, 6 to 12 bits, a grid shallower than the input. Each must see back-to-back events and gaps, and every tanh piece must be used |
| `tb_evaluation_processor_full` | the top at its defaults, 5 000 events |
| `tb_workload_scan` | the ends of the one-parameter scans around the benchmark: 2- and 16-bit inputs and scores, 5 and 20 trees, 1 and 8 variables, 10..14 bins per variable (deeper trees), both engines where the scans compare them |
| `tb_workload_vbf` | the two VBF classifier sizes: look-up, 5 × 8 bits, 100 trees, 16-bit scores; bit-shift, 7 × 12 bits, 50 trees, 16-bit scores (about 0.67 M score words) |

`ep_harness` is the shared end-to-end driver. It sends a random stream with
about 3 in 4 clocks valid. One event in eight puts each variable on a bin edge
or just below one. For every event it checks the score and the exact latency.

To simulate with Verilator, for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/bdt_pkg.sv tb/bdt_ref_pkg.sv rtl/active_array_lut.sv rtl/bsbe.sv \
  rtl/lube.sv rtl/tree_lut.sv rtl/tanh_pwl.sv rtl/score_processor.sv \
  rtl/evaluation_processor.sv tb/ep_harness.sv tb/tb_evaluation_processor.sv \
  --top-module tb_evaluation_processor
./obj_dir/Vtb_evaluation_processor
```

A block test needs only the package, its module and its dependencies. For
example, `rtl/bdt_pkg.sv rtl/active_array_lut.sv rtl/bsbe.sv tb/bdt_ref_pkg.sv
tb/tb_bsbe.sv`. The VBF test takes about a minute to compile and under a
second to run.
