# Hard-ODT in SystemVerilog: a one-sample-per-cycle online decision tree learner

This RTL learns a decision tree from a stream of labelled samples while it
predicts. Each sample is predicted and then learned from once, at one sample
per clock, and is never stored. The tree is a Hoeffding tree. Each leaf
collects statistics on the samples that reach it. After every `n_min` new
samples the leaf runs a *split trial*, and it splits once a statistical
bound (Hoeffding's inequality) shows that the best attribute really beats
the second best.

What makes this practical in hardware is how numeric attributes are
summarised. Each (leaf, class, attribute) keeps only `Q` running quantile
estimates, not a histogram of bins or a Gaussian fit. A quantile estimate is
updated with one comparison and one subtraction per sample. At split time,
the quantiles alone are enough to estimate how many samples of each class
fall left or right of a candidate split point.

The design follows "Hard-ODT: Hardware-Friendly Online Decision Tree
Learning Algorithm and System" (Lin et al.). Where that description is
silent, the design makes its own choices; they are listed in
[Departures and own choices](#departures-and-own-choices).

## Data flow

```
 samples ─► sample_fifo ─► tree_pipeline ─► sample_fifo ─┬─► inference_engine ─► predictions
 (valid/ready)  (input)     3 stages/level   (internal)  │
                               ▲                         └─► training_engine
                               │ node writes                  │  quantile_learner  x N_NUM
                               │                              │  histogram_learner x N_CAT
                          split_controller ◄── split request ─┤  numeric/categorical_split_eval
                               └── new leaf/element pairs ──► │  hoeffding_judge
```

- `hard_odt_top` wires everything together.
- A sample passes through the tree and comes out with its **element**: the
  physical statistics slot bound to its current leaf.
- The inference engine predicts the majority class of that element. It
  predicts before the training engine learns from the same sample.
- When a trial decides to split, the split controller does two things:
  - it rewrites the tree (the leaf becomes an internal node, and two new
    leaves are added one level down);
  - it hands the training engine the two new (leaf, element) pairs, which
    are then cleared.

## Quantile learning (the numeric attribute path)

Each numeric attribute has one `quantile_learner`. For every (element,
class) pair it keeps `Q` estimates `q_0..q_{Q-1}`. Estimate `k` tracks the
quantile at probability `alpha_k = (k+1)/(Q+1)`. For a sample `x`, each
estimate moves by

```
q  <-  q - lambda * (1 - alpha)   if q >= x
q  <-  q + lambda * alpha         if q <  x
```

so, on balance, the fraction `alpha` of samples lies below `q`.

- `lambda = 0.01`.
- Both step constants are precomputed in `hodt_pkg`.
- `quantile_unit` is therefore a comparator, a multiplexer and a
  subtractor.
- Values are signed Q2.30. Attributes should be normalised to [-1, 1).

**Sharing.** Only one (element, class) pair per attribute is touched per
sample. So a single set of `Q` quantile units serves every leaf and class.
All quantile sets live in one memory with `Q*32`-bit words, addressed by
`{element, class}`.

**Pipeline and forwarding.** The learner is a five-stage pipeline:

| Stage | Action |
|---|---|
| F | fetch |
| B | decode: train, element init, or read-out |
| R | memory read |
| C | compute |
| W | write back |

Two consecutive samples that hit the same leaf and class would read stale
data. So stage C takes its operand from whichever source is newest:

1. the result now in W (the previous operation), if its address matches;
2. otherwise the result one cycle older, if its address matches;
3. otherwise the memory.

With this, one sample per cycle is learned in exact order.
`tb_quantile_learner` compares against a sequential model over long runs of
same-address operations.

**Split trial for a numeric attribute** (`numeric_split_eval`). The learner
also keeps each element's minimum and maximum value. The evaluator sweeps
`N_PT` split points, one per cycle:

```
pt_p = min + (max - min) * p / (N_PT + 1),      p = 1..N_PT
```

`split_point_gen` computes this with a 40-bit reciprocal instead of a
divider. For each point, `partition_deduction` counts `k_j`, the class-`j`
quantiles lying below `pt`. It then estimates the left count as
`left_j = floor(k_j * n_j / Q)`, and `right_j = n_j - left_j`.

## Split quality and the Hoeffding decision

The measure is the Gini gain. For a partition into L and R, the gain equals
a constant plus `SQ/n`, where

```
SQ = sum_j L_j^2 / |L|  +  sum_j R_j^2 / |R|
```

`split_quality` computes this in two pipeline stages:

1. a multiplier-adder tree forms the square sums and the sizes;
2. the square sums are multiplied by reciprocals.

The reciprocal comes from a 1024-entry table `floor(2^32 / i)` (33 bits, so
`1/1` is exact), with a normalising shift for larger counts. The result
keeps 12 fraction bits, and its relative error is below 2^-8.

`hoeffding_judge` then takes the best SQ of every attribute:

- **Candidates.** The "no split" value `SQ_0 = sum n_j^2 / n` seeds both the
  best and the second best. So a leaf splits only on an attribute that is
  better than not splitting at all.
- **Bound test.** With `D = SQ_best - SQ_2nd`, the gain difference is
  `D/n`. The test `D/n > sqrt(K/n)`, with `K = R^2 ln(1/delta)/2`, is
  evaluated without a division or square root as **`D^2 > K*n`**.
- **Tie rule.** The tie rule `sqrt(K/n) < tau` becomes **`K < tau^2 * n`**.
- **Constants.** `delta = 1e-3`, `tau = 0.05` and `R = 1` give `K` and
  `tau^2` as Q8.24 constants. The tie rule therefore fires once a leaf holds
  more than `K/tau^2 ≈ 1382` samples.

Categorical attributes (`categorical_split_eval`) try each value `v` as a
one-versus-rest split: samples with value `v` go left, all others go right.

## Tree storage, node–element pairs and splitting

Each tree level has its own memory: level `k` holds `2^(k-1)` node words,
and level 1 is a register. Each level is a three-stage pipeline
(`tree_level`):

| Stage | Action |
|---|---|
| R | read the node |
| A | select the attribute |
| B | branch |

So the tree accepts one sample per cycle, with a latency of `3*D_TREE`.

The node word is `{type, level, node ID, attribute index, split value}`.

- A leaf keeps its element ID in the low bits.
- Node `i` has children `2i` (left) and `2i+1` (right) at the next level.
- A numeric attribute goes left when `attr <= value` (signed comparison).
- A categorical attribute goes left when `attr == value`.

Statistics belong to *elements*, not to tree positions. Only leaves need
statistics, and there are at most `N_ELEM` leaves, while a depth-15 tree has
32767 node positions. The training engine keeps a table from each element
to its leaf's level and node ID.

A split (`split_controller`) takes three write cycles:

1. **S**: the parent becomes an internal node.
2. **N**: the left child is written as a leaf that keeps the parent's
   element.
3. **N**: the right child is written as a leaf bound to a freshly allocated
   element.

A split is refused when the leaf is at the maximum depth or no element is
free. Elements are allocated in increasing order and never freed. This is
enough because leaves are never merged.

## Categorical attributes: histograms with a status table

Each categorical attribute has one `histogram_learner`. It keeps one count
per (value, class) for every element.

- The counts are spread over RAMs holding two attribute values each, so
  all values can be read in parallel during a trial.
- A new leaf must start with an empty histogram. Clearing every count would
  take many cycles. Instead, each element has a **status word** with one
  bit per (value, class). Clearing an element clears only that word.
- When a sample arrives and its status bit is 0, the count is written as 1
  (not incremented) and the bit is set.
- Reads return 0 wherever the bit is 0.

## Timing and throughput

- **Throughput.** One sample per cycle is accepted while no split trial
  runs.
- **Stall.** During a trial the training engine stops taking samples. This
  covers reading out quantiles and histograms, `N_PT+3` evaluation cycles,
  the judgement, the split and the element clears. Samples then collect in
  the internal buffer, and then in the input buffer (`in_ready` falls).
  Since a trial happens once per `n_min` samples per leaf, the average cost
  stays close to one cycle per sample.
- **Credit flow control.** A sample leaves the input buffer only when the
  internal buffer has room for every sample already in the tree. The tree
  pipeline itself therefore never stalls.
- **Latency.** In an idle system, a sample's prediction appears
  `3*D_TREE + 3` cycles after it is accepted (48 cycles at depth 15):
  - 1 cycle in each buffer;
  - 3 cycles per tree level;
  - 1 cycle in the inference engine's read stage.
- **Inference engine.** It predicts in its second stage and updates the
  element's class counts and majority label in its third. The update is
  forwarded to the second stage when the next sample hits the same element.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `N_NUM`, `N_CAT`, `N_VAL`, `N_LABEL` | 7, 1, 7, 2 | numeric / categorical attributes, values per categorical attribute, classes |
| `N_QUANT` | 8 | quantiles per (element, class, attribute) |
| `N_PT` | 10 | split points tried per numeric attribute |
| `N_MIN` | 200 | samples per leaf between split trials |
| `D_TREE` | 15 | maximum depth |
| `N_ELEM` | 1024 | maximum number of leaves (statistics elements) |

`N_QUANT`, `N_PT`, `N_MIN`, `D_TREE` and `N_ELEM` are the reference
configuration's values. The attribute mix matches the Electricity data set
(7 numeric attributes, day of week as a categorical one, 2 classes). Every
other data set needs its own `N_NUM`, `N_CAT`, `N_VAL` and `N_LABEL`, as
the reference implementation also builds one design per data set.

- Sample counts are 16 bits wide and saturate.
- Numeric inputs are Q2.30.
- Categorical inputs are value indices, zero-extended to 32 bits.

## Departures and own choices

- **Buffers.** The buffers are simple 1-cycle fall-through FIFOs. The
  reference latency model counts 4 cycles per buffer, from a vendor FIFO.
  The idle latency is therefore `3D+3` here, not `8 + 3D + prediction`.
- **Hoeffding test.** It is evaluated in the squared form `D^2 > K n`, with
  no reciprocal of `n` or square root. `R = 1` is assumed for the range of
  the Gini measure.
- **Quantile probabilities.** They are evenly spaced,
  `alpha_k = (k+1)/(Q+1)`. Quantiles start at 0.0 when an element is
  cleared.
- **Partition deduction** divides by the quantile count `Q` (quantiles
  below the point, as a share of `Q`).
- **Categorical splits** are one value against the rest.
- **Stalls.** The training engine stalls the input during a split trial.
  The reference text speaks of a fully pipelined design but does not say
  how trials overlap the stream.
- **Forwarding in the inference engine, credit flow control, the
  never-freed element allocator, and predict-before-learn ordering** are
  choices of this design.
- **Not included.** The host side (PCIe, DDR memory, software driver) and
  the activity counters used in the power-monitoring case study are not
  included. The top exposes a valid/ready sample stream and a prediction
  stream instead.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`).
Each one compares against an independent model, checks the cycle timing
where it is specified, and ends with a `TB_RESULT checks=… failures=…`
line.

| Testbench | Main checks |
|---|---|
| `tb_quantile_unit`, `tb_quantile_learner` | exact fixed-point update; forwarding from both previous results; init; read-out 4 cycles after issue |
| `tb_histogram_learner` | counts against a model across status-word clears |
| `tb_split_point_gen`, `tb_partition_deduction`, `tb_split_quality` | arithmetic against exact/real-number models |
| `tb_numeric_split_eval`, `tb_categorical_split_eval` | best candidate; done latency `N+3` |
| `tb_hoeffding_judge` | bound and tie rule against a real-number model, 3-cycle latency |
| `tb_tree_level`, `tb_tree_pipeline` | traversal against a model tree, latency 3 per level |
| `tb_split_controller` | S/N/N write sequence, element allocation, refusals |
| `tb_inference_engine` | majority vote, forwarding |
| `tb_training_engine` | trial every `n_min`, numeric and categorical splits, refusal, stall |
| `tb_hard_odt_top` | small system (depth 3, 3 leaves), end to end; see below |
| `tb_hard_odt_full` | default parameters; 4000 samples of a separable concept; latency 48; splits; accuracy of the last 1000 predictions above 90 % |
| `tb_hard_odt_workloads` | full depth and leaf count with the attribute mixes of four other data sets (see below), on synthetic data |

`tb_hard_odt_top` runs two phases:

1. Random labels, so the root splits only by the tie rule.
2. Separable data.

It checks order, the latency, and accuracy above 90 % at the end. It also
counts each mechanism and requires it to occur: split trials, splits,
refusals, tie decisions, both forwarding paths, histogram clears and input
stalls.

`tb_hard_odt_workloads` runs four systems side by side, each at full depth
and leaf count, with synthetic data whose class is attribute 0 cut into
`N_LABEL` bands:

| Attribute mix | Numeric | Categorical | Classes | Samples |
|---|---|---|---|---|
| Bank | 7 | 9 (12 values) | 2 | 4000 |
| Telescope | 10 | 0 | 2 | 4000 |
| Covertype | 10 | 44 (binary) | 7 | 8000 |
| Person | 3 | 2 | 11 | 8000 |

These attribute mixes are estimates, not published figures. The real data
sets are not part of the test.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/hodt_pkg.sv tb/tb_hard_odt_top.sv \
          --top-module tb_hard_odt_top -Mdir obj && obj/Vtb_hard_odt_top
```

The full-size testbench runs in about 15 seconds and the workload testbench in about a minute.
