# A Hoeffding tree kernel for learning at run time

A decision tree normally has to see its whole training set before it can
choose its splits. A Hoeffding tree learns from a stream instead: every leaf
keeps a few statistics about the samples that reached it, and a leaf turns
into an inner node as soon as those statistics prove, with a chosen
confidence, that the best split seen so far really is the best one. Samples
are never stored, so the memory needed depends on the size of the tree and
not on the length of the stream. That is what makes the algorithm a good fit
for a small FPGA that keeps learning while it classifies.

This RTL is a kernel that runs such a tree. It is modelled on an HLS
(high-level synthesis) design: a C++ tree template compiled with Xilinx Vitis
into one kernel, `krnl_Tree`. That kernel runs at 103.6 MHz on a Zynq
UltraScale+ ZCU102 and is shared by several tree objects. The main
configuration is 3 features (D), 5 classes (K) and at most 100 nodes per tree
(Nd). Leaf statistics use quantile estimates, updated with asymmetric signum
steps, in place of stored samples or Gaussian fits. The RTL follows the
algorithm and the kernel's calling model. Its arithmetic and memory layout
are its own, and the sections below say where.

## What one kernel call does

A call names one tree object (`tree_id`) and a number of samples
(`n_samples`). It can also reset the tree to a single empty leaf first
(`init_tree`). The kernel then goes through the sample array in order. Each
entry holds the features, the label and a *train* flag. For each sample it
does two things:

1. **Infer.** It sorts the sample from the root down to a leaf and writes the
   leaf's majority class to the result array.
2. **Train**, only if the sample's train flag is set. It updates the leaf's
   statistics with the sample. Every `NMIN` (200) training samples seen by a
   leaf, it runs a **split check** on that leaf. If the check says split, the
   leaf becomes an inner node and gets two new, empty leaves, as long as the
   tree has two free node slots. Otherwise the check is only counted as
   *refused* (`st_full`).

Each sample is classified before the tree learns from it. Samples must
therefore be handled one at a time: each training step can change the tree
that the next sample is sorted through. Nothing is pipelined across samples.

Tree objects stay in the kernel between calls. A tree can go on learning over
many calls, and several trees (`NT`, default 2) can take turns on one kernel.
A call touches only the tree it names.

## Statistics kept per leaf

The split candidates come from the data itself. For each feature `d`, a leaf
keeps `NQ` = 16 running quantile estimates `q_j`, with target levels
`p_j = (j+1)/17`. A new value `x` moves an estimate one step:

    q_j += lambda * p_j        if x >  q_j
    q_j -= lambda * (1 - p_j)  if x <= q_j

with `lambda` = 0.01. In steady state a fraction `p_j` of the values lie
below `q_j`. The steps are computed in `quantile_update`.

Each estimate is also a candidate split `x[d] <= q_j`. For each candidate,
the leaf counts the training samples of each class that fell on the true side
(`x[d] <= q_j` at the moment of the update). These counts are the *below
counts*. Together with the leaf's per-class totals, they give the class
counts on both sides of every candidate. The memory per leaf is
`D*NQ*(16 + K*20) + K*20` bits.

The estimates keep moving, so a below count mixes samples counted against
slightly different thresholds. This approximation is part of the method: it
trades exact histograms for a fixed, small amount of state.

## The split check (`split_evaluator`)

This is the least obvious part of the design.

Take a leaf with per-class counts `c_k` and `n` samples. For a candidate,
let `c_k^L` be the below count and `c_k^R = c_k - c_k^L`. Then `n` times the
Gini gain of the candidate is

    S - S0,   S  = sum_k (c_k^L)^2 / n_L + sum_k (c_k^R)^2 / n_R
              S0 = sum_k c_k^2 / n

`S0` is the same for every candidate of the leaf, so candidates are ranked
by `S` alone. The evaluator works in the following steps:

- It keeps the best candidate of each feature.
- X is the best feature.
- Y is the runner-up: the second-best feature, or "no split" (score `S0`) if
  that scores higher. With a single feature, Y is always "no split".
- The Hoeffding bound for `n` samples, range `R` and confidence `1 - delta`
  is `eps = sqrt(R^2 ln(1/delta) / (2n))`.
- The leaf splits on X when `G(X) - G(Y) > eps`, or when `eps < tau`. The
  second case is the tie rule: two candidates are about equally good and
  enough samples have been seen.
- X must also beat "no split".

With `dG = (S_X - S_Y)/n`, both tests can be rearranged so that no square
root is needed:

    split  if  2 (S_X - S_Y)^2 > R^2 ln(1/delta) * n
           or  R^2 ln(1/delta) < 2 n tau^2

`R^2 ln(1/delta)` and `tau^2` are constants. `ht_pkg` computes them when the
design is elaborated from `DELTA` = 0.001, `TAU` = 0.05 and `RANGE` = 1. `R`
is 1 because the Gini gain lies in [0,1], and so do the features.

The divisions in `S` are done by one shared restoring divider
(`seq_divider`), with 8 fraction bits. This makes the check slow but small.
Each candidate needs two divisions of about 52 cycles, so a check takes about
`D*NQ*(2*DVW+5)` cycles, about 5,400 at the default size. It runs at most
once every 200 training samples per leaf. The two new leaves start with zero
counts. Each is labelled with the majority class of its side of the split
until it has counted samples of its own.

## Sorting a sample (`tree_sorter`)

The walk takes one tree level per clock. The node table is read
combinationally. An inner node sends the sample to child `left` when
`x[feat] <= thr` and to `left + 1` otherwise. At a leaf, the class counts are
read and the class with the largest count is taken. On a tie, the lowest
class index wins. A leaf with no counts yet uses its stored class. From the
edge that samples `start` to the edge that raises `done` is `depth + 3`
cycles. In the reference kernel this walk is the critical path: it sets the
clock and stops the kernel from being pipelined.

## Blocks

| module | role |
|---|---|
| `krnl_tree` | top: call handshake, the infer-then-train controller, node allocation, host ports, per-call statistics |
| `tree_memory` | the `NT` tree objects: node table, leaf class counts, quantile estimates, below counts |
| `tree_sorter` | root-to-leaf walk and majority-class prediction |
| `leaf_trainer` | training update of a leaf (`OP_TRAIN`), clearing of a new leaf (`OP_CLEAR`) |
| `quantile_update` | one asymmetric signum step of one estimate |
| `split_evaluator` | candidate scoring and the Hoeffding test |
| `seq_divider` | unsigned restoring divider used by the evaluator |
| `sample_buffer`, `result_buffer` | the sample array and the classification array |
| `ht_pkg` | sizes, constants, number formats, the node record `node_t` |

A node record (`node_t`, 65 bits) holds the following fields:

- `is_leaf`
- `feat` and `thr`: the split test
- `left`: index of the true-side child, counted from the tree's root; the
  false-side child is `left + 1`
- `cls`: the class used by an empty leaf
- `n_since`: training samples since the leaf's last split check

Node `n` of tree `t` lives at flat index `t*ND + n`. The statistics of a node
`(n, d, j)` live at `(n*D + d)*NQ + j`. Since child links are relative to
the root, a tree is a self-contained object: its words can be copied into any
tree slot and it works there unchanged.

### Interface of `krnl_tree`

- **Call.** The arguments are sampled while `ap_idle` is high and
  `ap_start` is seen. `ap_done` pulses for one cycle at the end of the call.
  Do not start a new call before then.
- **Samples** (`hs_*`). Write features as Q0.16 fractions in [0,1). Also
  write the label (0..K-1) and the train flag. Write them before the call.
- **Results** (`hr_*`). Give an address with `hr_en`. The predicted class
  and the trained flag come one cycle later.
- **Tree objects** (`hx_*`). While the kernel is idle, the host can read and
  write every word of a tree. `hx_tree` picks the tree and `hx_part` the part:
  node records (`TP_NODE`), leaf class totals (`TP_CCNT`), quantile estimates
  (`TP_QEST`) or below counts (`TP_BCNT`). `hx_addr` is the word index
  inside that part. `hx_rdata` is combinational; `hx_we` writes `hx_wdata`
  at the next edge. `hx_count` is the number of nodes the tree uses and is
  written with `hx_count_we`. This is how a tree is saved, loaded from an
  earlier run, or moved to another slot. Writes are ignored during a call.
- **Statistics** (`st_*`) cover the last call: cycles, samples inferred,
  samples trained, split checks, splits, and refused splits.

### Timing at the default size

| step | cycles |
|---|---|
| inference-only sample | `depth + 7` |
| training update | adds `D*NQ + 3` (51) |
| split check | about 5,400 |
| split | about 110 |

The 40000-sample test stream comes to 87 cycles per sample on average, about
0.85 µs per sample at the reference clock of 103.6 MHz.

### The benchmark streams

The table gives the kernel's cycles on the synthetic clustering benchmarks
(K = 5 well-separated clusters). Each benchmark was run once for training
and once for inference on fresh samples. Times assume 103.6 MHz. The
reference HLS kernel's measured times are shown for scale. They include
host transfers and a much longer schedule per sample, so they are not a
like-for-like comparison.

| benchmark | training cycles | time | reference | inference cycles | time | reference |
|---|---|---|---|---|---|---|
| D = 3, N = 40000 | 3.49 M | 34 ms | 1,990 ms | 0.39 M | 4 ms | 462 ms |
| D = 3, N = 500000 (13 calls) | 43.9 M | 424 ms | 30,933 ms | 4.7 M | 45 ms | 11,442 ms |
| D = 100, N = 40000 | 98.6 M | 951 ms | 51,648 ms | 0.41 M | 4 ms | 469 ms |

Training is dominated by the leaf update (`D*NQ` cycles) and, at D = 100, by
the split check, whose length grows with `D*NQ`. Inference costs only the
depth of the tree plus a few cycles, whatever `D` is.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `D` | 3 | features per sample |
| `K` | 5 | classes |
| `ND` | 100 | node slots per tree (the largest tree has ND or ND-1 nodes) |
| `NQ` | 16 | quantile estimates per feature |
| `NMIN` | 200 | training samples between split checks of a leaf |
| `NT` | 2 | tree objects held by the kernel |
| `NS` | 40000 | entries of the sample and result arrays |
| `DELTA`, `TAU`, `LAMBDA` (package) | 0.001, 0.05, 0.01 | confidence, tie threshold, quantile step |
| `FW`, `CW`, `FRAC` (package) | 16, 20, 8 | feature bits, counter bits, score fraction bits |

At the default size one tree takes about 573 kbit: 480 kbit of below counts,
77 kbit of estimates and 16 kbit of node table and totals. The below counts
scale with `ND*D*NQ*K`.

### Configurations

| configuration | fits at the default size? |
|---|---|
| D = 3, K = 5, 100 nodes, 40000 samples | yes |
| 500000 samples | yes, as 13 calls on one tree, since the tree persists between calls |
| D = 100 | no; set `D` = 100: one tree then needs about 18.6 Mbit |
| K = 10 | no; set `K` = 10 |
| 1000 nodes | no; set `ND` = 1000 |
| Bank, Covertype (54 features, 7 classes, 2047 nodes) | no; need matching parameters and far larger memories |

## Where this RTL departs from the reference design

- **Fixed point instead of 32-bit floats.** Features and thresholds are 16-bit
  fractions, class counters 20 bits and saturating, split scores 8 fraction
  bits. Data must be scaled to [0,1) before it is written.
- **On-chip trees and arrays.** The reference keeps trees, samples and
  results in DDR buffers that the host hands to the kernel. Here they are
  on-chip memories with simple host ports. A tree is created by `init_tree`
  or written word by word through the `hx_*` port.
- **Choices the algorithm leaves open**, made here:
  - the Gini gain
  - `R = 1`
  - evenly spaced quantile levels and uniform initial estimates
  - the below-count statistics
  - the tie rule, and the rule that a split must beat "no split"
  - splits refused when the tree is full
  - labels for empty leaves
- **Left out.** A tree parameter called `n_pt` (10 in the reference runs)
  has no documented role and is not implemented.
- **Not part of the RTL.** The host processor, the software build, the OpenCL
  data transfers and the clock generation.

## Simulating

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/ht_pkg.sv rtl/*.sv \
        tb/tb_krnl_tree.sv --top-module tb_krnl_tree -Mdir obj && obj/Vtb_krnl_tree

| testbench | what it covers |
|---|---|
| `tb_quantile_update`, `tb_leaf_trainer`, `tb_split_evaluator` | results against reference models computed in the testbench |
| `tb_tree_sorter` | leaf, class and latency on a tree shaped like a small Covertype model |
| `tb_tree_memory`, `tb_sample_buffer`, `tb_result_buffer` | the memories |
| `tb_krnl_tree` | the whole kernel at reduced size |
| `tb_krnl_tree_full` | one 40000-sample call at the default parameters; about 3.5 M cycles and a few seconds |
| `tb_krnl_tree_workloads` | the benchmark streams above, training then inference, with exact cycle counts for inference; run by the helper `tb_wl_run`; about 3 minutes |
| `tb_krnl_tree_configs` | the other configurations on shorter streams: D = 100 (4000 samples), K = 10 (8000), 1000 nodes (8000); each is run by the helper `tb_cfg_run` |

`tb_krnl_tree` trains one tree, checks its accuracy and its cycle count with
inference only, copies it to the second slot through the host port, and then
grows a second tree until splits are refused. It counts each mechanism:
inference, training, split checks, splits, refused splits, tree reset,
persistence across calls, two trees sharing the kernel, and a tree loaded by
the host.
