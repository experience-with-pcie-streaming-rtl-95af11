# Streaming gradient-boosted-tree inference engine

This is RTL for a card-side engine that scores an XGBoost model at one
inference per clock. It follows the design in "Experience with PCIe
streaming on FPGA for high throughput ML inferencing" (Manavar et al.,
TCS Research). The model is a gradient-boosted ensemble of 100 decision
trees, each at most 3 levels deep, over 112 input features. The host sends
one 512-bit word per inference over a PCIe DMA engine in streaming mode. No
card memory is involved: the word goes straight into the engine, and the
score goes straight back out through a small FIFO.

The core idea is to unroll the whole ensemble. Every tree is its own piece of
combinational logic, and all 100 trees are evaluated at once. Their 100 leaf
values are then summed by a pipelined binary adder. Nothing in the datapath is
shared or iterated. A new word can therefore enter on every clock. Throughput
equals the clock rate: 250 million inferences per second at the 250 MHz the
paper reports. Latency is fixed at 9 clocks in the engine, plus 1 in the
output FIFO.

```
 DMA engine                                                      DMA engine
 (host-to-card)                                                  (card-to-host)
   stream ──► [A] input  ──► 100 tree  ──► [B] tree   ──► 7-stage  ──► 16-word ──► stream
   512 bit        register    processing     value         adder tree   FIFO        512 bit
                  (448 bits)  units          register      [C]..[I]
                                ▲
                          model registers  ◄── model write port
```

## Turning a tree into logic

A depth-3 tree has 7 internal nodes and 8 leaves. A software walk makes three
compares in sequence. In hardware, all seven compares are made at once, and
the three that lie on the taken path are picked out afterwards. A *tree
processing unit* (`tree_processing_unit`) has three parts:

* **Seven comparators** (`tree_comparator`). Node *n* compares its feature
  with its 4-bit threshold. The result is 1 when `feature >= threshold`, which
  means "take the right branch".
* **A 7-to-3 encoder** (`tree_encoder`). It follows the path through the tree.
  Nodes are numbered breadth first: node 0 is the root, nodes 1–2 form the
  second level and nodes 3–6 the third. The children of node *n* are 2n+1
  (left) and 2n+2 (right).

  | leaf index bit | value                                   |
  |----------------|-----------------------------------------|
  | s2 (MSB)       | `c[0]`                                  |
  | s1             | `s2 ? c[2] : c[1]`                      |
  | s0 (LSB)       | `c[3 + 2*s2 + s1]`                      |

  The leaf index is `{s2, s1, s0}`: the three branch decisions, root first.
  Leaves are numbered left to right.
* **An 8:1 multiplexer** (`leaf_mux`). The leaf index selects one of the
  tree's eight leaf values. The selected value is the *tree value*.

Some trees in a trained model are shallower than 3 levels on some paths. Such
a tree still fits: repeat the leaf value across the leaf slots below the
missing nodes, and set the unused thresholds to anything. The one encoder
design then serves every tree.

Every node compares one of the 112 input features, and which feature is fixed
per node. The engine builds that selection as wiring, the way HDL generated
from a trained model would hard-code it. The thresholds and leaf values are
held in registers (`model_regs`) and can be rewritten.

## Pipeline and timing

`xgboost_core` has nine register stages. All of them advance together.

| stage | register holds                                   | paper's name          |
|-------|--------------------------------------------------|-----------------------|
| A     | the 448 feature bits of the accepted word        | input / features      |
| B     | the 100 tree values                              | tree processing       |
| C–I   | partial sums: 50, 25, 13, 7, 4, 2, 1 adders      | 7-stage addition      |

Take a word that is accepted (`tvalid && tready`) in clock *n*. If nothing
stalls, its score is on the engine's output in clock *n + 9*, and on the top's
output in clock *n + 10*. A batch of *B* back-to-back words takes *B + 10*
clocks at the top, counted from the first accepted word to the last result
taken.

The adder tree is built from *Reg-Add units* (`reg_add`). Each unit is an
adder whose sum is registered. A stage that receives an odd number of values
(25 and 7 in the default) gives its last unit a single value plus zero. That
is why the unit counts are 50, 25, 13, 7, 4, 2, 1. The adder count is
generic: for *N* trees there are ceil(log2 N) stages. Every value is
sign-extended at the input to the final width, 16 + 7 = 23 bits, so no stage
can overflow.

## Stream interfaces and flow control

All three stream links are AXI4-Stream channels (`axis_if`) with `tdata`,
`tvalid`, `tready` and `tlast`. The interface asserts the stream rule: once
`tvalid` is raised, it and the payload stay unchanged until `tready`. `tkeep`
is not carried, because every beat is a full word. If the DMA engine needs
`tkeep`, tie it to all ones outside.

**Input word.** Feature *i* (0…111) sits at `tdata[4i+3:4i]`. Bits 511:448
are ignored.

**Output word.** The score is a signed 23-bit sum of tree values,
sign-extended over all 512 bits. It is the raw margin. No logistic function
is applied: turning the margin into a probability is left to the host.

**tlast.** tlast travels with its word through the pipeline and the FIFO. The
score of a word sent with `tlast` therefore leaves with `tlast`. A host
transfer of *B* inputs comes back as one transfer of *B* results.

**Back-pressure.** The engine advances when its output register is empty or
is being taken:

```
adv = !m_axis.tvalid || m_axis.tready      s_axis.tready = adv
```

Bubbles (clocks without an input word) travel through as empty slots. Suppose
the host stops reading results. The 16-word FIFO fills first. Then the
engine's output stalls, the whole pipeline freezes and the input `tready`
falls. No result is lost, and no result is repeated. Once reading resumes, one
word per clock flows again at once. When the host keeps up, the FIFO holds at
most one word, and neither it nor the stall logic slows anything down.

## The model

The trained model is not published, so the design has a built-in *synthetic*
model instead. It is defined by functions in `xgb_pkg`:

* `default_tree_fidx(seed, t)` gives the feature index for each node of tree
  `t`. These are fixed wiring in `xgboost_core`.
* `default_tree_params(seed, t)` gives the 7 thresholds and 8 leaf values of
  tree `t`. These are the reset contents of `model_regs`.

Both functions hash `(seed, tree, node)` with a 32-bit integer mixer. Leaves
lie in [-2048, 2047]. The parameter `MODEL_SEED` picks a different synthetic
model.

To use a real model:

1. Replace the body of `default_tree_fidx` with a table of the model's split
   features. This sets the wiring.
2. Replace `default_tree_params` with its thresholds and leaves. Leaves are
   16-bit signed fixed point at a scale of your choosing. The score has the
   same scale.

The thresholds and leaves can also be changed at run time through the top's
write port. With `mdl_wr_en` high on a clock, tree `mdl_wr_tree` takes
`mdl_wr_params` from the next clock on. `tree_params_t` packs the 7 thresholds
(`thr[6:0]`, 4 bits each) above the 8 leaves (`leaf[7:0]`, 16 bits each).
Words already inside the pipeline are not held back. For a clean switch, write
while the pipeline is idle. The feature wiring cannot be changed at run time.

Thresholds compare against 4-bit features. Quantising each feature to 4 bits,
and the splits to match, is done on the host.

## Sizes

| parameter | default | meaning |
|-----------|---------|---------|
| `NUM_TREES` / `N_TREES` | 100 | trees, one processing unit each |
| `TREE_DEPTH` | 3 | 7 nodes, 8 leaves per tree |
| `NUM_FEATURES`, `FEAT_W` | 112, 4 | features per input word and bits per feature |
| `AXIS_W` | 512 | stream width |
| `LEAF_W` | 16 | leaf value width (this design's choice) |
| `SUM_W` | 23 | score width = `LEAF_W` + adder stages |
| `FIFO_DEPTH` / `FIFO_DEP` | 16 | output FIFO words |

Coarse synthesis of the top at the defaults gives about 20,000 flip-flops:

* 100 × 156 model register bits;
* 448 feature bits;
* 1,600 tree-value bits;
* about 2,300 adder-tree bits.

It also gives 8 kbit of FIFO memory and about 7,600 word-level cells.

## How this relates to the paper

The following come from the paper:

* 100 tree units, each made of 7 comparators, a 7-to-3 encoder and an 8:1 mux;
* the 7-stage registered adder with 50/25/13/7/4/2/1 units;
* one inference per clock and a 9-clock engine latency;
* 112 features of 4 bits in a 512-bit word;
* the arrangement DMA → engine → AXI FIFO → DMA;
* the FIFO depth of 16.

The following are this design's choices, because the paper does not give
them:

* the compare direction;
* the node numbering and leaf index order;
* the leaf and score widths and number format;
* the feature bit order in the word;
* the stall rule and tlast handling;
* the output word layout;
* synchronous active-low reset;
* the model write port;
* the FIFO's internal structure;
* the synthetic model.

The paper's figures disagree on one point: whether the tree values are
registered. Its RTL diagram feeds the tree units straight into the first adder
stage. Its pipeline diagram, and its counts of 8 engine stages and 9 clocks of
latency, show tree processing as a stage of its own. This design registers
the tree values (stage B) and so matches the 9-clock latency.

The following are not part of the RTL:

* the PCIe DMA engine (a vendor IP in streaming mode, 512-bit AXI4-Stream on
  both sides);
* the PCIe link;
* the host sender and receiver processes.

The engine's top-level ports connect directly to the DMA engine's
host-to-card master and card-to-host slave stream ports. The 250 MHz clock is
the paper's build target. This RTL is written for it (one compare, one 8:1
mux and one adder per stage), but timing has not been closed here.

## Files

| file | contents |
|------|----------|
| `rtl/xgb_pkg.sv` | constants, types, synthetic default model |
| `rtl/axis_if.sv` | AXI4-Stream interface with hold-until-ready assertion |
| `rtl/tree_comparator.sv` | node compare |
| `rtl/tree_encoder.sv` | 7-to-3 path encoder |
| `rtl/leaf_mux.sv` | 8:1 leaf multiplexer |
| `rtl/tree_processing_unit.sv` | one tree: 7 compares, encoder, mux |
| `rtl/model_regs.sv` | threshold and leaf registers with write port |
| `rtl/reg_add.sv` | registered adder |
| `rtl/adder_tree.sv` | pipelined adder tree |
| `rtl/xgboost_core.sv` | the 9-stage streaming engine |
| `rtl/axis_fifo.sv` | output stream FIFO |
| `rtl/xgb_stream_top.sv` | top: model registers + engine + FIFO |
| `tb/xgb_ref_pkg.sv` | reference tree walk used by the engine tests |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_batch_workload` |

## Simulating

Every testbench checks itself. It ends by printing
`TB_RESULT checks=N failures=M`, and it has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_xgb_stream_top \
    -y rtl -y tb +libext+.sv rtl/xgb_pkg.sv tb/xgb_ref_pkg.sv tb/tb_xgb_stream_top.sv
./obj_dir/Vtb_xgb_stream_top
```

To run another test, substitute its name. Testbenches that do not use the
reference package do not need `tb/xgb_ref_pkg.sv`, but listing it does no
harm.

What the tests establish:

* **Comparator, encoder, multiplexer.** Exhaustive or random checks against an
  independent root-to-leaf walk. The tree processing unit test also requires
  every leaf to be reached.
* **`tb_adder_tree`.** Runs the full 100-input tree against a shadow pipeline
  of integer sums, with random enable and extreme values. It checks the
  7-clock latency.
* **`tb_model_regs`.** Checks the reset contents, that random writes reach the
  right tree, and that out-of-range tree numbers are ignored.
* **`tb_axis_fifo`.** Checks order, tlast, count, ready exactly when not full,
  and a one-clock write-to-read time. Both full and empty must occur.
* **`tb_xgboost_core`.** Full size. Checks the 9-clock latency, one word per
  clock for 300 words, and random bubbles and stalls. Input ready must follow
  the stall rule exactly.
* **`tb_xgb_stream_top`.** Full size, end to end. Checks the 10-clock latency
  and 400 words back to back. A host that stops reading must fill the FIFO,
  stall the engine and refuse input. 30 trees are rewritten, and random
  traffic continues on the new model. The test counts stalls, FIFO-full
  clocks, bubbles, model writes and tlasts, and fails if any of them never
  happened.
* **`tb_batch_workload`.** Full size. Runs batches of 1, 10, 100, 1,000,
  10,000 and 100,000 words, each one transfer ending in tlast. Each batch must
  take exactly B + 10 clocks, which is 250 M inferences/s at 250 MHz for
  large B.

All scores are checked against `xgb_ref_pkg::ref_score`. It walks each tree
one level at a time in the ordinary software manner and shares no code with
the RTL's all-compares-at-once structure. It does read the same model
functions from `xgb_pkg`, so it checks the engine against the model, not the
model itself.
