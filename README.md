# TreeLUT: a gradient-boosted decision-tree classifier as a LUT-only circuit

A gradient-boosted decision-tree (GBDT) model classifies an input vector by
running it through hundreds of small decision trees and adding up the scores
they return. Each tree is a handful of "is feature *f* at most *t*?" questions,
and the sum is a few dozen small integers once the model has been quantized.
Both map well onto FPGA lookup tables without DSP blocks or memories. TreeLUT
is a way of turning such a model into a fully unrolled, pipelined circuit with
an initiation interval of one clock: a new input enters on every clock.

This RTL implements the TreeLUT inference architecture as parameterized,
synthesizable SystemVerilog. A trained model is given to it as parameters.
With those the circuit is elaborated: comparators for the questions,
multiplexer networks for the trees and adder trees for the sums.

```
 x[0..d-1] ──► key generator ──[p0]──► N×M decision trees ──[p1]──► N adder trees (p2 inside) ──► scores / class
 (w_feature    one comparator          one mux cascade each          one per class, + bias
  bits each)   per unique question     picks the tree's leaf value    binary: compare with -qb
```

## 1. What the quantized model looks like

The circuit never sees floating-point numbers. Two steps outside the circuit
make the model integer-only:

* **Features.** Each input feature is min-max scaled to [0, 1] and rounded to
  `w_feature` bits *before training*. The trees are trained on these integers,
  so every split threshold is already a `w_feature`-bit integer and there is
  nothing to approximate.
* **Leaves.** After training, each tree's leaves are shifted so that the
  tree's smallest leaf becomes 0. The shifts of all trees (and the model's
  initial score) are collected into one bias `b`. Then every leaf and `b` are
  multiplied by one common positive factor, `(2^w_tree − 1) / (largest leaf of
  all trees)`, and rounded. Each tree then returns an integer in
  `0 … 2^w_tree − 1`, and the model computes

  * binary: `QF = qb + Σ qf_m`, class 1 when `QF ≥ 0`;
  * N classes: `QF_n = qb_n + Σ qf_{n,m}`, class = argmax over n.

  Because the scale is global and the shift is per tree, many trees use only
  half or a quarter of the range, so their outputs are one or two bits
  narrower. In this RTL that shows up as constant-zero upper bits, and
  synthesis removes them. In multiclass models a common constant can be added
  to all `qb_n` without changing the argmax, so the biases are taken as
  non-negative.

Worked example (the small model used in the tests; package
`treelut_example_pkg`). Five 4-bit features, two depth-2 trees, `w_tree = 3`:

| | bias | tree 1 leaves | tree 2 leaves |
|---|---|---|---|
| float | 0.0 | 2.0, −0.1, 0.5, −0.7 | −0.4, 0.8, −1.4, 0.0 |
| shifted | −2.1 | 2.7, 0.6, 1.2, 0.0 | 1.0, 2.2, 0.0, 1.4 |
| ×7/2.7, rounded | **−5** | **7, 2, 3, 0** | **3, 6, 0, 4** |

Tree 1 is `x2≤3 ? (x3≤8 ? 7 : 2) : (x4≤0 ? 3 : 0)`. Tree 2 is
`x0≤7 ? (x0≤2 ? 3 : 6) : (x1≤4 ? 0 : 4)`. For `x = [2,15,4,1,5]` the trees
give 0 and 3, so `QF = 3 − 5 = −2` and the class is 0.

## 2. Layer 1 — key generator (`treelut_keygen`)

Each distinct pair (feature, threshold) that appears anywhere in the
ensemble becomes one *key*, computed once by one comparator:
`k[i] = (x[KEYS[i].feature] <= KEYS[i].threshold)`. A feature can feed many
keys, and an unused feature feeds none. The example model has six keys:
x0≤2, x0≤7, x1≤4, x2≤3, x3≤8, x4≤0. The layer is purely combinational.

## 3. Layer 2 — a decision tree as a multiplexer cascade (`treelut_tree`)

This is the part that differs most from a textbook tree. A tree is not built
as a walk from node to node. It is built as a *selector* over the tree's
distinct leaf values:

1. **Path terms.** For each node, `path[j]` is the AND of the key literals
   from the root down to it. The literal is `k` on a True (left) branch and
   `~k` on a False (right) branch.
2. **One select line per value.** For each distinct leaf value `v`,
   `sel[v]` is the OR of the path terms of all leaves that hold `v`. Only one
   leaf is reached, so at most one select line is 1.
3. **Cascade.** The largest value is the default. Each smaller value, in
   descending order, has a 2:1 multiplexer that replaces the running result
   when its select line is 1. The multiplexer of value 0 sits next to the
   output.

Example: root `k5`, True child `k12`, False child `k24`, leaves 0, 1, 1, 3:

```
   sel[1] = (k5 & ~k12) | (~k5 & k24)          sel[0] = k5 & k12
   3 ─┐                                          
      ├─mux(sel[1])── t ─┐                     
   1 ─┘                  ├─mux(sel[0])── qf
   0 ────────────────────┘
```

A tree with many leaves but few distinct values (common after 2–3-bit
quantization) needs only a few multiplexers. The select functions are plain
boolean expressions, which the FPGA tools pack into LUTs. There are
deliberately no registers inside a tree, so the tools can optimise the
whole tree as one piece of logic.

In this RTL the path terms, masks and cascade are derived at elaboration time
from the `TREE` parameter (section 6). No generator script is needed.

## 4. Layer 3 — adder trees and the bias (`treelut_adder_tree`, `treelut_binary_decision`)

Each class has one adder tree. It is a pairwise reduction: level `l` holds
`ceil(N/2^l)` partial sums, an odd operand is passed up unchanged, and the
total is at level `D = clog2(N)`.

* **Multiclass:** the class bias `qb_n` is simply one more operand
  (`N = N_TREES + 1`). The output is the class score `QF_n`, `W_SUM` bits
  unsigned. No argmax is built. The class is the index of the largest
  score, left to whatever consumes the scores.
* **Binary:** adding a constant and then comparing with zero is the same as
  comparing the bias-free sum with `−qb`. So the adder tree has no bias
  operand, and `treelut_binary_decision` outputs `y_hat = (sum >= −qb)`.
  The `score[0]` port carries the bias-free sum in this mode.

The score width is exact: `W_SUM = clog2(N_TREES·(2^W_TREE − 1) + (2^W_BIAS − 1) + 1)`
for multiclass models, and the same without the bias term for binary ones.
That is 9 bits for the default model. All levels of an adder tree use this
width, and synthesis removes the upper bits that a level cannot reach.

## 5. Pipelining and timing

Registers go only at three places, set by `[p0, p1, p2]`:

| parameter | where | note |
|---|---|---|
| `P0` | after the key generator | registers all keys |
| `P1` | after the decision trees | registers every tree output |
| `P2` | inside each adder tree | spread evenly, not one per level |

Stage `s` (1…P2) of an adder tree of depth `D` sits after level
`ceil(s·D/(P2+1))`. With D = 6 and P2 = 1 that is one cut after level 3. With
more stages than levels, several stages stack at the same level. With a single
operand (D = 0) they sit on the operand.

* **Latency:** exactly `P0 + P1 + P2` clocks from `x` to `score`/`y_hat`
  (0 means fully combinational).
* **Throughput:** one vector per clock. There is no stall and no back-pressure.
* **Valid:** `in_valid` is carried along a resettable shift register of the
  same length and comes out as `out_valid`. It only marks results and does not
  gate the datapath. `rst_n` (active low, asynchronous) clears only this flag.

The published designs use `[0,1,1]`, `[0,1,0]` and `[0,0,1]`. Their reported
latencies match one clock period per stage.

### Without the key generator (`treelut_engine`)

`treelut_top` is only the key generator followed by `treelut_engine`, which
holds everything else: the trees, the adder trees, all three kinds of
registers and the binary decision. The engine takes the key vector `k` in
place of `x`. Used on its own, it is TreeLUT with the key generator bypassed.
This is how TreeLUT is compared with networks whose inputs are already
threshold-encoded (a thermometer code) before they reach the circuit: each
key is then one bit of that code. Nothing else changes. `P0` still
registers the keys, now as they arrive. The latency stays `P0 + P1 + P2`.

## 6. Describing a model (`treelut_pkg`)

`treelut_top` takes a model as three packed-array parameters:

* `KEYS` — `key_t [0:N_KEYS-1]`, each `{feature, threshold}` (16 + 16 bits).
* `NODES` — `node_t [0:N_CLASSES*N_TREES-1][0:2^(MAX_DEPTH+1)-2]`. Tree
  `n*N_TREES + m` is tree `m` of class `n`. A tree is stored in heap order:
  the root is entry 0, and the True/False children of entry `j` are
  `2j+1` / `2j+2`. Each entry is `{is_leaf, key, value}`: a decision node
  names its key index, a leaf holds its quantized value. Entries below a leaf
  are never reached and are ignored. Every path ends at `MAX_DEPTH` whatever
  the flag says. Shallower trees fit the same format.
* `QB` — `logic [0:N_CLASSES-1][31:0]`, the quantized biases in two's
  complement. The binary bias may be negative. Multiclass biases must be
  non-negative and below `2^W_BIAS`, and elaboration stops with an error
  otherwise.

The field widths allow up to 65 536 features and keys, `w_feature ≤ 16`,
`w_tree ≤ 8` and `MAX_DEPTH ≤ 7`. The modules check these limits when they
elaborate.

The modules read only parameters. To use a trained model, write its keys,
trees and biases into a package shaped like `treelut_model_pkg`, or pass them
as parameter overrides.

### Default configuration

The defaults of `treelut_top` have the shape of the largest evaluated design,
the MNIST classifier "TreeLUT (I)": 784 features × 4 bits, 10 classes × 30
trees, depth 5, 3-bit leaves, `[p0,p1,p2] = [0,1,1]` (latency 2). The
trained trees of that design are not published, so `treelut_model_pkg` fills
the shape with a **synthetic** model. It is generated at elaboration by
`treelut_pkg::synth_key` / `synth_tree` from a fixed seed, with these
properties:

* key `i` compares feature `i mod d` with threshold
  `(2·(i div d) + 3·(i mod d)) mod (2^w_feature − 1)`, so all keys are
  distinct;
* split keys are drawn uniformly by a 32-bit LCG
  (`s ← s·1103515245 + 12345`);
* about one node in eight below level 2 ends early as a leaf;
* trees have leaf ranges of `w_tree`, `w_tree−1` or `w_tree−2` bits in turn,
  and each tree's smallest leaf is 0.

`N_KEYS = 2048` and `W_BIAS = 8` are choices for this stand-in, not
published figures. The synthetic default therefore says nothing about
accuracy. It exercises exactly the logic structure and sizes of the real
design. At this size the default elaborates to about 23 000 word-level cells
and 868 flip-flops before technology mapping.

### The other evaluated shapes

| design | features | classes × trees | depth | w_feature | w_tree | [p0,p1,p2] |
|---|---|---|---|---|---|---|
| MNIST (I) — default | 784 | 10 × 30 | 5 | 4 | 3 | [0,1,1] |
| MNIST (II) | 784 | 10 × 30 | 4 | 4 | 3 | [0,1,1] |
| JSC (I) | 16 | 5 × 13 | 5 | 8 | 4 | [0,1,1] |
| JSC (II) | 16 | 5 × 10 | 5 | 8 | 2 | [0,1,0] |
| NID (I) | 593 | binary, 40 | 3 | 1 | 5 | [0,0,1] |
| NID (II) | 593 | binary, 10 | 3 | 1 | 5 | [0,0,1] |

The MNIST (II) model fits the default parameters as is. The JSC and NID
shapes need parameter overrides (wider features or leaves, binary mode).
`tb_treelut_workloads` runs all five with synthetic models.

## 7. Where this RTL is its own

These points are choices of this implementation, not taken from the
published description:

* the comparison sense `x ≤ t`, with True as the left branch (taken from the
  example trees);
* the heap-ordered parameter format, and deriving the select functions in
  SystemVerilog rather than in a software generator;
* the descending-value order of the multiplexer cascade, generalised from the
  one published example;
* the `ceil` rounding of adder-stage positions (only the depth-6 example is
  given);
* the valid flag, the reset and the port layout;
* where `P0` sits when the key generator is bypassed. It then registers the
  incoming keys. The published bypassed designs have `p0 = 0`, so this does
  not arise there;
* full-width arithmetic in every adder level, with narrowing left to
  synthesis;
* the binary mode, which does not output `QF = sum + qb`. The block diagram of
  the binary design draws `qb` as an adder input, but the text moves it into
  the threshold, and this RTL follows the text;
* the synthetic default model;
* the reading of one sentence in the description of the trees. It says the
  tree maxima fit into fewer bits than "`w_feature`". Leaf values are
  quantized to `w_tree` bits, so this RTL sizes tree outputs by `W_TREE`;
* unsigned scores. The binary sum `Σ qf_m` has no bias and the multiclass
  biases are non-negative, so no score can be negative.

Not included:

* the floating-point preprocessing (min-max scaling and rounding of the
  features), which is done before the circuit;
* training and quantization of the model;
* an argmax stage, which TreeLUT does not have.

## 8. Verification

Each testbench checks its block against values worked out independently, and
prints `TB_RESULT checks=N failures=M`. Each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_treelut_keygen` | example keys written out by hand (the example input gives `k = 010011`); a 100-key, 40-feature instance against direct comparison |
| `tb_treelut_tree` | the k5/k12/k24 tree over all 8 key combinations; both example trees over all 64 key vectors; a synthetic depth-5 tree with early leaves against a root-to-leaf walk |
| `tb_treelut_adder_tree` | 30+bias/P2=1, 7/P2=0, 13+bias/P2=3, 1/P2=2; exact sums and exact latency, new operands every clock |
| `tb_treelut_pipe_reg` | 0, 1 and 3 stages; reset behaviour of the valid-style register |
| `tb_treelut_binary_decision` | every sum around the threshold; always-1 and always-0 biases |
| `tb_treelut_top` | four complete engines: the example model with [1,1,1] (the example vector must give sum 3, class 0), a 3-class model with [0,1,2], a fully combinational binary model, and a 2-class model with [2,0,3]. It also counts back-to-back inputs, idle cycles, early leaves, both binary classes and each register place, and fails if any never occurred |
| `tb_treelut_engine` | the engine without key generator: the example model fed the example key vector, a JSC (I)-shaped 5-class model with 600 keys, and a binary model with [1,0,2], all with random key vectors |
| `tb_treelut_full` | the default engine, unmodified (300 trees, 784 features), 120 cycles of random traffic against a tree walk; about one minute to build and run |
| `tb_treelut_workloads` | the MNIST (II), JSC (I/II) and NID (I/II) shapes with synthetic models; about three minutes to build |

`treelut_harness` (in `tb/`) is the reusable checker behind `tb_treelut_top`,
`tb_treelut_engine` and `tb_treelut_workloads`. It builds a model of any shape, drives random
vectors with random gaps, walks the trees to compute the expected scores, and
checks every result and its latency.

Limits of this verification:

* No trained model was available, so classification accuracy is not checked.
  The tests show that the circuit computes the quantized model exactly, for
  the example model and for synthetic models.
* Timing and area on an FPGA have not been measured.

## 9. Simulating

All files are SystemVerilog-2017. The packages must be read first:

```
verilator --binary --timing -Irtl -Itb \
  rtl/treelut_pkg.sv rtl/treelut_model_pkg.sv rtl/treelut_example_pkg.sv \
  tb/tb_treelut_top.sv --top-module tb_treelut_top
./obj_dir/Vtb_treelut_top
```

Replace the testbench name to run another test; the remaining modules are
found through `-Irtl -Itb`. The synthetic default model takes about ten
seconds to elaborate, because its 300 trees are generated by constant
functions. Verilator warns about the ascending packed ranges (`[0:N-1]`);
these are used on purpose so that array literals list entries in index order.

Files:

* `rtl/treelut_pkg.sv` — record types, stage-placement functions, synthetic
  model generator
* `rtl/treelut_keygen.sv`, `rtl/treelut_tree.sv`, `rtl/treelut_adder_tree.sv`,
  `rtl/treelut_binary_decision.sv`, `rtl/treelut_pipe_reg.sv` — the layers
* `rtl/treelut_engine.sv` — trees, adder trees and registers, fed with keys
* `rtl/treelut_top.sv` — key generator plus engine: the complete classifier
* `rtl/treelut_model_pkg.sv` — default (MNIST-shaped, synthetic) model
* `rtl/treelut_example_pkg.sv` — the worked-example model
* `tb/` — the testbenches above and `treelut_harness`
