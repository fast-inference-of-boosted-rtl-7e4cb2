# Fully unrolled Boosted Decision Tree inference for FPGA triggers

A hardware trigger at a hadron collider must classify every event within a
fixed budget of a few microseconds. It has no time to fetch model
parameters from memory or to walk a tree node by node. This design turns a
trained Boosted Decision Tree (BDT) ensemble directly into logic:

* every decision node becomes a comparator against a constant threshold;
* all nodes of all trees compare the same feature vector in the same clock
  cycle;
* the path through each tree is found by AND gates rather than by
  traversal, and picks that tree's leaf score from a small constant table;
* one pipelined, balanced adder tree per class sums the tree scores.

Nothing is stored in RAM and nothing is shared, so the pipeline takes a new
feature vector every clock cycle and never stalls. The latency grows by one
cycle per level of tree depth, and by one cycle per doubling of the number
of trees.

The default configuration is a jet-substructure classifier, as published
for the hls4ml BDT back end ("Fast inference of Boosted Decision Trees in
FPGAs for particle physics"). It has 16 input features, 5 classes (gluon,
light quark, W, Z, top) and 100 boosting stages of depth-4 trees. That is
500 trees with 7,500 thresholds and 8,000 leaf scores, all in 18-bit fixed
point. The pipeline has a latency of **12 clock cycles**, or 60 ns at
200 MHz.

## How one tree becomes logic

Take a tree of depth 2. Nodes are numbered in heap order: node 0 is the
root, and node n has left child 2n+1 and right child 2n+2. Each node n
compares one feature with its threshold, `c[n] = x[f[n]] <= t[n]`. When
`c[n]` is true the decision goes left.

```
        x ────────────┬──────────────┬──────────────┐
                 node 0: c0     node 1: c1      node 2: c2
                 (x[f0]<=t0)    (x[f1]<=t1)     (x[f2]<=t2)

   leaf 0 =  c0 &  c1       ┐
   leaf 1 =  c0 & ~c1       │ concatenated:  exactly one bit set
   leaf 2 = ~c0 &  c2       │ ──► index of that bit ──► score table s0..s3
   leaf 3 = ~c0 & ~c2       ┘                          ──► tree score
```

All three comparisons are evaluated at once, including those of nodes the
input will never reach. A leaf is *active* when every comparison on its path
went its way. Exactly one leaf is therefore active, and the one-hot vector
of leaf activations addresses a 4-entry table of leaf scores. At depth D
there are 2^D − 1 comparators, 2^D leaf activations (each the AND of D
terms) and a 2^D-entry table. The feature index, threshold and score are
elaboration-time constants, so synthesis reduces each node to one
constant-compare on one input word. Every table is a fixed multiplexer.

Leaves are numbered left to right: leaf 0 is reached when every comparison
on its path is true, and leaf 2^D − 1 when every one is false.

## Pipeline and latency

`bdt_tree` spreads the activation logic over D register stages, and a
further stage reads the score table:

| stage (clock edge after input) | registered                                               |
|--------------------------------|----------------------------------------------------------|
| 1                              | all 2^D − 1 comparisons; the 2 activations of level 1    |
| 2 … D                          | the 2^s activations of level s, from level s − 1 and the comparisons carried along |
| D + 1                          | the score of the active leaf                             |

The comparisons of the deeper levels are carried in registers until their
level is formed, so every stage uses data from a single feature vector.

`bdt_adder_tree` adds neighbouring pairs and registers each level. An odd
operand at the end of a level passes on unchanged. N inputs take
ceil(log2 N) stages. The ensemble latency is therefore

    LATENCY = DEPTH + 1 + ceil(log2 N_ESTIMATORS)   (4 + 1 + 7 = 12 for the benchmark)

This agrees with what was measured for the reference VHDL implementation.
That implementation had 12 cycles for the benchmark, gained one cycle per
extra level of depth, and grew logarithmically with the number of
estimators. The split of cycles between comparison, path and table is this
design's own.

A `valid` bit travels alongside the data through every stage. There is no
back-pressure: the consumer must accept one result per cycle. Only the
`valid` bits are reset (synchronous, active-high `rst`). Data registers are
left free-running, since their contents are ignored while `valid` is low.
Asserting `rst` drops every vector in flight.

## Number format

Features, thresholds and leaf scores are signed two's complement with
`DATA_W` = 18 bits, of which 4 are integer bits (sign included), leaving
14 fraction bits. Threshold and feature share the radix point, so a node's
comparison is an ordinary signed integer compare. The published accuracy
study found 18 bits enough to reproduce the floating-point classifier
exactly. It also found that from 11 bits up, every class tagger kept at
least 99% of its floating-point area under the ROC curve.

A class score is the sum of `N_ESTIMATORS` leaf scores. The adder trees
keep full precision: `SUM_W = DATA_W + ceil(log2 N_ESTIMATORS)` = 25 bits
for the benchmark, with the same 14 fraction bits. The sum therefore never
overflows. A narrower output is a matter of truncating `score` outside the
block. No prior or bias term is added and no soft-max is applied: the
outputs are the raw per-class sums, and the largest one names the class.

## The model: constants in the logic

Tree t of the ensemble belongs to estimator e = t / N_CLASSES and class
c = t mod N_CLASSES. Its constants come from three functions in `bdt_pkg`:

| function                                      | returns                                        |
|-----------------------------------------------|------------------------------------------------|
| `model_feature(seed, tree, node, n_features)` | feature index compared by a node               |
| `model_threshold(seed, tree, node, data_w)`   | threshold of a node (sign-extended)            |
| `model_score(seed, tree, leaf, data_w)`       | score of a leaf (sign-extended)                |

The trained jet-tagging model is not part of this release. The functions
therefore produce a deterministic pseudo-random model from a 32-bit hash
(the MurmurHash3 finaliser) of (seed, kind, tree, node):

* the feature index is the hash modulo the number of features;
* the threshold is the hash's top `data_w` bits, taken as a signed number;
* the score is the top `data_w` − 2 bits of its own hash, taken as a
  signed number, so |score| ≤ 2^(data_w − 3).

`bdt_ensemble` selects the model with `MODEL_SEED`. To build a trained model
into the hardware, replace the three function bodies with look-ups of its
values, using the numbering above. A model exported from scikit-learn,
xgboost or TMVA has to be brought into the form of complete trees first. A
branch that stops early is padded: its final leaf score is repeated in
every leaf below it, and the padding nodes are given any feature and
threshold. A model with fewer estimators than the hardware provides gets
all-zero scores in the unused trees.

## Modules

| file                 | role                                                                          |
|----------------------|-------------------------------------------------------------------------------|
| `rtl/bdt_pkg.sv`     | sizes of the benchmark, number format, model functions                        |
| `rtl/bdt_node.sv`    | one decision node: `x[FEATURE] <= THRESHOLD`, combinational                   |
| `rtl/bdt_leaf_lut.sv`| one-hot leaf vector → leaf index → constant score, combinational              |
| `rtl/bdt_tree.sv`    | one unrolled tree: nodes, activation pipeline, score table; DEPTH+1 cycles    |
| `rtl/bdt_adder_tree.sv` | balanced pipelined sum of N signed inputs; ceil(log2 N) cycles             |
| `rtl/bdt_ensemble.sv`| top level: N_ESTIMATORS × N_CLASSES trees and N_CLASSES adder trees           |

Top-level ports of `bdt_ensemble`:

| port        | dir | width                        | meaning                                   |
|-------------|-----|------------------------------|-------------------------------------------|
| `clk`       | in  | 1                            | clock                                     |
| `rst`       | in  | 1                            | synchronous, active-high; clears `valid`  |
| `in_valid`  | in  | 1                            | `x` carries a feature vector this cycle   |
| `x`         | in  | `[N_FEATURES-1:0][DATA_W-1:0]` | feature vector, signed fixed point      |
| `out_valid` | out | 1                            | `score` is valid                          |
| `score`     | out | `[N_CLASSES-1:0][SUM_W-1:0]` | per-class sums, signed, 14 fraction bits  |

Parameters (defaults are the benchmark): `N_FEATURES` = 16, `N_CLASSES` = 5,
`N_ESTIMATORS` = 100, `DEPTH` = 4, `DATA_W` = 18, `MODEL_SEED` = 1 and
`SUM_W`. For a binary classifier set `N_CLASSES` = 1, which needs one tree
per estimator instead of five.

Assertions check that exactly one leaf of each tree is active whenever its
data are valid, and that all trees and all adder trees stay in step.

## Cost

Logic grows linearly with the number of estimators and exponentially with
depth. A fit to synthesis results of the reference VHDL implementation
(18-bit data, 5 classes) gave about 22·n_e + 53·n_e·2^d LUTs: the first
term is the adder trees, the second the trees. The benchmark was reported
at 96,148 LUTs and 42,802 flip-flops on a Xilinx VU9P, with no DSPs or
block RAM. This RTL has not been put through an FPGA vendor flow, so those
figures are the reference implementation's, not measurements of this code.

## Simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed time.

| testbench             | what it checks                                                                 |
|-----------------------|--------------------------------------------------------------------------------|
| `tb_bdt_node`         | four nodes, random inputs, and inputs at and next to each threshold            |
| `tb_bdt_leaf_lut`     | every one-hot input of a 16-leaf and a 4-leaf table                            |
| `tb_bdt_tree`         | depth-2 and depth-4 trees against a node-by-node walk; exact DEPTH+1 latency, bursts and gaps, ties |
| `tb_bdt_adder_tree`   | 100, 7 and 5 inputs against integer sums, extreme values, exact latency        |
| `tb_bdt_ensemble`     | the full 500-tree benchmark configuration, unchanged parameters: 400 vectors against a reference that walks all 500 trees; 12-cycle latency; back-to-back inputs, bubbles, threshold ties and a reset that drops vectors in flight must each occur |
| `tb_bdt_scan`         | six smaller ensembles at the sizes of the published scans (10 estimators at depth 2, 3, 5, 6; 50 and 150 estimators at depth 3), each against the tree-walking reference, with latency DEPTH + 1 + ceil(log2 N_ESTIMATORS) |

With Verilator 5, from the top of the tree:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/bdt_pkg.sv tb/tb_bdt_ensemble.sv --top-module tb_bdt_ensemble -j 4
./obj_dir/Vtb_bdt_ensemble
```

Replace the testbench name to run any other. The full ensemble takes about
a minute to build and well under a second to simulate; `tb_bdt_scan` takes
a few minutes to build.

At the default sizes the ensemble runs the benchmark classifier as it
stands. It also holds any model with at most 100 estimators and depth 4
(shallower trees padded as described above) at up to 18 bits. Larger
models from the published scans (up to 1000 estimators, depth 10, 30 bits)
need the corresponding parameters raised.

## What follows the published design and what does not

Taken from the published design: unrolled trees whose nodes compare one
feature with a constant and go left on "<="; leaf activations formed by
ANDing a node's decision or its negation along the path; the concatenated
one-hot leaf vector addressing a small score table; a class score formed
as the sum of its trees by a balanced adder tree; all trees evaluated in
parallel; a fully pipelined datapath with an initiation interval of one;
the benchmark sizes (16 features, 5 classes, 100 estimators, depth 4, 18-bit
data with 4 integer bits); and 12 cycles of latency.

Choices of this design:

* the register placement inside the tree and adder tree (the published
  figures give only the total latency and how it scales);
* the `valid` bit, the synchronous reset and the absence of back-pressure;
* full-precision class sums, where the published work keeps everything at
  18 bits;
* left-to-right leaf numbering and the tree-to-class order;
* the synthetic model in place of the trained one.

Not included: the conversion software that reads trained models; the
alternative high-level-synthesis implementation, whose pipeline depth
depends on the target clock; and any I/O around the block (feature
pre-processing, links to the rest of a trigger).
