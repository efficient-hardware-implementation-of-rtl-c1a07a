# Incremental nearest-anchor classifier with majority votes

This is RTL for a classifier that learns on chip from one labelled example at a
time. It never stores the training set, and it can take new classes without
retraining. It works on feature vectors that an external pre-trained CNN has
already produced (Inception V3, 2048 values per image). The RTL implements the
incremental classifier that sits after that CNN.

The method is "transfer incremental learning with data augmentation" (TILDA).
The feature vector is cut into `P` equal pieces (subspaces). In every subspace
each class owns `K` anchor vectors, each with a counter of how many examples it
has absorbed. The rules are:

* **Learning** an example of class `c`: in each subspace, find the anchor of
  class `c` that minimises *distance × counter*. Then move that anchor to the
  weighted mean of its old value (weight = counter) and the example (weight 1),
  and increment its counter. An unused anchor has counter 0, so it scores 0 and
  is always taken first. A class's anchors therefore fill with its first `K`
  examples, and after that they become running means.
* **Classifying**: in each subspace, find the nearest trained anchor of any
  class. The subspace votes for that anchor's class. A majority vote over the
  `P` subspaces gives the class of the vector. When one input signal is
  presented as `R` augmented versions (shifted, flipped, ...), a second majority
  vote over the `R` results gives the class of the signal.

The default configuration is CIFAR-10 on Inception V3 features: `T = 2048`,
`P = 16` (128 values per subspace), `K = 30`, `C = 10`, all values on 18 bits.
At these defaults one learning step takes 33 cycles. Classifying one vector
takes 300 cycles, and `300·R` cycles for `R` augmented versions. At 208 MHz
these are 159 ns and 1442 ns.

## Block structure

```
 feature[T] ──► input_register ──► P slices of D=T/P ──► processing_block ×P ──► class one-hot ×P
 in_class ─┐                                                  ▲                          │
 lp ───────┴─► counter_lp (count + in_class·K) ── address ───┘              parallel_majority_vote
                                                                                         │ class/vector
                                                                            sequential_majority_vote
                                                                                         │ class/signal
```

All `P` processing blocks receive the same address each cycle and run in lock
step. Each processing block contains the following, wired as the published
block diagram shows:

```
 x ──► compute_distance ──distance──► compare_distance ──index──► distance_register ──► class, index, val
 ▲            ▲                             ▲  (r_p: best score)                         │
 │     anchor_memory ──anchor, counter──────┘                                            │
 │       ▲ addr ◄── MUX(counter address | winning index) ◄── val AND L-P ◄───────────────┘
 └───────┘ x (update)               write request ◄───────────┘
```

| module | role |
|---|---|
| `tilda_pkg` | word width, fixed-point formats, saturation helpers |
| `counter_lp` | address counter with modulus `K` (learn) or `C·K` (classify), plus the class-offset adder |
| `input_register` | holds the feature vector while it is processed |
| `compute_distance` | Euclidean distance, `D` squarers, adder tree, integer square root |
| `compare_distance` | running minimum of distance×counter (learn) or distance (classify) |
| `distance_register` | captures the winning index, outputs the one-hot class and `val` |
| `anchor_memory` | anchor and counter memories, plus the 3-cycle update arithmetic |
| `inverse_lut` | table of 1/n used for the division in the update |
| `processing_block` | one subspace: the five blocks above plus the multiplexer and the AND |
| `parallel_majority_vote` | bitwise sum of `P` one-hot votes, then `C` sequential comparisons |
| `sequential_majority_vote` | accumulates `R` class vectors, then an argmax |
| `tilda_top` | the whole classifier |

## Number formats

Every signal is 18 bits wide. Only the position of the binary point changes,
and the `m` integer bits of each step are fixed by design:

| quantity | format | notes |
|---|---|---|
| feature, anchor element | signed Q5.13 | range ±16 |
| distance | unsigned Q10.8 | `floor(sqrt(floor(Σ(x−y)² / 2¹⁰)))`. The sum is exact (64 bits) and the root is exact floor |
| address, counter | unsigned integer | |
| distance × counter | unsigned Q16.2 | saturates at 2¹⁸−1 |
| anchor × counter | signed Q10.8 | saturates |
| anchor × counter + feature | signed Q10.8 | the feature loses its 5 lowest bits |
| 1/n (inverse table) | unsigned Q1.17 | `round(2¹⁷/n)`, so 1/1 is exact |

Every narrowing step truncates toward −∞ (an arithmetic shift) and saturates.
The formats and their integer-bit counts are those of the original design. The
choices of rounding, saturation and which values are signed are made here.

With 128 elements of at most ±16, the largest distance is √(128·32²) ≈ 362. That
fits Q10.8 without saturating. With the default sizes, saturation can only
happen in the anchor × counter step, and only for counters above about 31 with
anchors near ±16. Real CNN features are far smaller than that.

## Timing of a learning step (K + 3 cycles)

| cycle | what happens |
|---|---|
| 1 … K | the counter presents the `K` anchors of `in_class`. Each cycle one anchor is read, its distance and score computed, and the score compared against `r_p` |
| K+1 | `val` = 1. `val AND L-P` switches the memory address to the winning index and starts the update: y·n is registered |
| K+2 | y·n + x is registered, and the counter n+1 is written |
| K+3 | (y·n + x) · 1/(n+1) is written back as the new anchor. `learn_done` pulses, and a new vector may be accepted |

The distance, score and comparison of one anchor all happen in the same cycle.
This is needed for the `K`-cycle sweep. It also means the path from memory read
through 128 squarers, the adder tree, the square root and the comparator is a
single combinational path. A real FPGA at 200 MHz would need pipeline stages
here. Each stage adds one cycle of latency per sweep, but not to the throughput
of the sweep itself. The memories are read combinationally for the same reason.
The UltraRAM of the original FPGA target has a registered read, which would add
another cycle.

## Timing of classification (C·K cycles per vector)

A classification sweep visits all `C·K` anchors. Anchors whose counter is still
0 are skipped, so that untrained all-zero anchors cannot win. In the cycle where
the sweep ends, the next vector may already be accepted, so classification
vectors follow each other with no gap. The result of vector *i* (`val`) is
available in the first cycle of vector *i+1*'s sweep. That is why the memory
address multiplexer is switched by **val AND L-P of the finished sweep**, not by
`val` alone: with `val` alone, the winning index of a classification would take
the first address of the next sweep. The parallel vote then needs `C+1` cycles,
and the sequential vote one more cycle after the `R`-th parallel result.
Because `C+1 < C·K`, the votes never fall behind.

`r_count` (R) is taken at the handshake together with each vector, and it
travels with the vector to the sequential vote. The sequential vote uses the R
of the first vector of each group. `R = 0` is treated as 1.

## Top-level interface (`tilda_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock. Synchronous active-low reset, which clears all counters (every anchor becomes unused) |
| `in_valid` / `in_ready` | in / out | 1 | valid/ready handshake. A vector is taken on a rising edge where both are 1 |
| `lp` | in | 1 | 1 = learn this vector, 0 = classify it |
| `in_class` | in | 18 | class of a vector being learned (0 … C−1) |
| `feature` | in | T × 18 | the feature vector, signed Q5.13. Element `p·D + j` goes to subspace `p` |
| `r_count` | in | R_W | number of augmented versions in this vector's group |
| `pmv_valid`, `pmv_class` | out | 1, C | class of each classified vector, one-hot |
| `smv_valid`, `smv_class` | out | 1, C | class of each group of R vectors, one-hot |
| `learn_done` | out | 1 | last cycle of a learning step |

Parameters: `T` (2048), `P` (16), `K` (30), `C` (10), `INV_DEPTH` (1024) and
`R_W` (8). `T` must be a multiple of `P`, and `C·K > C+1`.

## Where this RTL departs from the original design, or fills in gaps

* **Square root.** The distance is the true Euclidean norm, because the learning
  rule multiplies it by the counter. The original description gives the norm but
  no circuit for the root. This RTL uses an exact digit-by-digit integer square
  root.
* **No pipeline between distance and comparison**, and memories with a
  combinational read. Both keep the published cycle counts of `K+3` and `C·K`.
  See the learning-step section for the cost.
* **Inverse table depth.** The table has 1024 entries. The counter keeps its
  18-bit width, but it stops at 1023. After that point, the update of a full
  anchor becomes `(y·1022 + x)/1023`, a mean over a sliding window. For CIFAR-10
  (5,000 images per class over 30 anchors) the average count is about 170.
* **Class of an anchor** = address / K, because anchors are stored class by
  class. The learning address is `in_class·K + count`. The adder of the block
  diagram is fed `in_class·K`.
* **Untrained anchors do not vote** when classifying. A subspace with no trained
  anchor gives an all-zero class vector. A parallel vote that receives no votes
  at all returns class 0.
* **Ties** go to the earlier anchor and to the lower class, in both votes.
* **Multipliers in the update.** Every element of the updated anchor gets its
  own multiplier, in both the y·n stage and the 1/(n+1) stage. That is 2·D per
  subspace. This is what one-cycle multiply and divide steps require. The
  original resource count (2048 + 16 DSP blocks) instead implies a single
  multiplier per subspace for the update, which would need about D cycles per
  step. The two statements conflict, and this RTL follows the cycle count.
* **Memory bits.** The anchors take `C·K·T·18` = 11,059,200 bits. The counters
  (`C·K·18` per subspace) and the inverse tables add to that.
* **Stored anchors are already means.** The update divides by the new counter
  every time, so classification compares against the stored anchor directly
  and does not divide it by its counter again.
* **Handshake, reset values, and `r_count` handling** are this design's own
  choices.
* Not included: the CNN feature extractor, which runs on a host processor. Its
  output is the `feature` port.

## Verification

Each module has a self-checking testbench in `tb/`. The checks are computed by
`tb_ref_pkg`, which writes the same fixed-point arithmetic independently, using
plain integers with floor division:

* `tb_compute_distance`: random, extreme, identical and unit-distance vectors
  against the reference square root.
* `tb_compare_distance`: random sweeps in both modes, including many ties and
  sweeps with no trained anchor.
* `tb_anchor_memory`: random updates checked element by element, the busy/done
  timing, and a small table whose counter ceiling is reached.
* `tb_processing_block`: learning and back-to-back classification checked
  against a model of all anchors, and the `K+3` step length.
* `tb_counter_lp`, `tb_input_register`, `tb_distance_register`,
  `tb_inverse_lut`, `tb_parallel_majority_vote` (latency `C+1`) and
  `tb_sequential_majority_vote` (variable R).
* `tb_tilda_top` (T=16, P=4, K=3, C=4, 8-entry table): a mixed stream of
  learning and classification. Every parallel and sequential vote is checked
  against a model of all subspaces, along with the `K+3` and `C·K` spacing. The
  test counts, and requires at least once: empty-anchor fill, averaging, the
  counter ceiling, an empty vote, back-to-back classification, both mode
  switches, and R = 1 and R > 1.
* `tb_tilda_top_full`: the same test at the default size. It runs 361 learning
  steps, which fill all 300 anchors of every subspace and then average into
  them, and 12 classifications. The counter ceiling is not reached at this
  length.

To run one test with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/tilda_pkg.sv tb/tb_ref_pkg.sv tb/tb_tilda_top.sv --top-module tb_tilda_top
./obj_dir/Vtb_tilda_top
```

Each test ends with `TB_RESULT checks=N failures=M`. The full-size test builds
and runs in well under a minute.

The tests check that the RTL matches its own fixed-point rules. They do not
measure accuracy on real CNN features. No image data set is involved, and the
testbench features are synthetic clusters.
