# Reduced softmax unit: predicting the class without computing softmax

A classifier network ends in a softmax layer. Softmax turns the k output-layer scores
x_1 … x_k into probabilities:

    s(x_j) = exp(x_j) / (exp(x_1) + exp(x_2) + … + exp(x_k))

The prediction is the class with the largest s(x_j). An inference accelerator needs only
that class, not the probabilities, because nothing is trained on the chip. For that
purpose the whole softmax computation is unnecessary:

* The denominator is the same positive number for every class. Dividing by it scales all
  the s(x_j) alike and does not change which one is largest.
* exp is strictly increasing: x > y implies exp(x) > exp(y).

So the class with the largest softmax output is always the class with the largest raw
score. This is an exact equality, not an approximation. The hardware needs no exponential,
no lookup table, no adder for the sum and no divider. What is left is a maximum search
(argmax) over the k scores, done with comparators. This RTL implements that reduced layer.

The usual arrangement is a SOFTMAX COMPUTATION block that feeds a MAXIMUM block. The
reduced layer drops the first and keeps only the second, applied directly to x_1 … x_k.

## Blocks

| Module | File | Role |
|---|---|---|
| `reduced_softmax` | `rtl/reduced_softmax.sv` | Top. Valid in, registered class index out. |
| `argmax_tree` | `rtl/argmax_tree.sv` | The MAXIMUM block: a combinational compare-select tree. |
| `rs_pkg` | `rtl/rs_pkg.sv` | Default sizes (`K_DEFAULT`, `W_DEFAULT`) and the index-width function. |

The layers that produce the scores are not part of this RTL. Their outputs arrive on the
top's `x` port.

## The comparator tree (`argmax_tree`)

The tree compares K scores in ceil(log2 K) levels of compare-select nodes:

* The K inputs are padded up to the next power of two, N.
* Each leaf is a candidate: a valid bit, the score and the class index. Padding leaves are
  not valid.
* Each node takes two candidates from the level below. The left one always covers lower
  class indices than the right one.
* The node passes on the right candidate only if it is valid and its score is strictly
  greater than the left one's (or the left one is padding). Otherwise it passes on the
  left candidate.
* The root gives `idx` and `max_val`.

For K classes the tree uses K−1 useful comparators, each one a W-bit signed magnitude
compare followed by a mux. For K = 10 that means 9 comparators in 4 levels. For K = 1000
it means 999 comparators in 10 levels. With K = 1 the tree has no nodes and always answers
class 0.

Two consequences of the node rule are worth knowing:

* **Ties.** When scores are equal, the lowest class index wins. The node keeps the left
  candidate unless the right one is strictly greater, and along any path the left
  candidate covers the lower indices. This matches a software argmax that returns the
  first maximum. It also matches the softmax, which gives equal scores equal
  probabilities, so any of them is a correct maximum.
* **Padding.** A padding leaf can never win, even against a real score at the most
  negative code. The node tests the valid bit, not a sentinel value.

Each tree level is a separate signal in its own generate scope. Lint therefore sees a
plain feed-forward structure rather than one self-referencing array.

## Number format

Scores are W-bit signed two's complement numbers (W = 16 by default), compared as signed
integers. Any signed fixed-point format with a common binary point orders its values the
same way its integers are ordered. The unit therefore works unchanged whatever the binary
point of the preceding layer. The testbenches read scores as 8.8 fixed point, with range
[−128, 128) and resolution 1/256. That range covers the example sets below. Only W
matters to the hardware.

To use another width, set `W`. Scores of unequal scale (different binary points per
class) would need aligning before this unit. The design does not do that.

## Interface and timing (`reduced_softmax`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk` | in | 1 | Clock; everything is on the rising edge. |
| `rst_n` | in | 1 | Active-low synchronous reset. |
| `in_valid` | in | 1 | `x` holds a vector to classify this cycle. |
| `x` | in | K × W, unpacked array | Scores; `x[0]` is class 1 of the network. |
| `out_valid` | out | 1 | The outputs hold the result of the vector accepted one cycle earlier. |
| `class_idx` | out | max(1, ceil(log2 K)) | Predicted class, counted from 0. |
| `max_val` | out | W | Score of the predicted class. |

* **Latency and rate.** The tree is combinational and its result is registered. A vector
  presented with `in_valid` at edge n gives `out_valid` and its result after edge n.
  It is readable in cycle n+1.
* **Throughput.** The unit takes a new vector every cycle and never stalls, so there is no
  ready signal.
* **Idle cycles.** When `in_valid` is low, `out_valid` is low in the next cycle.
  `class_idx` and `max_val` keep their last result.
* **Reset.** Reset clears all three outputs.
* **Assertion.** An assertion in the top checks that a valid `class_idx` is always below K.

The critical path is the tree: ceil(log2 K) compare-and-mux stages. For very large K at a
high clock rate, pipeline registers between tree levels would be the natural change. This
design does not add them.

## What follows the method and what is this design's own

**From the method:**

* The layer is a maximum search over the raw scores, with no softmax arithmetic.
* Its output is the predicted class.
* The example sizes: 10 classes, scores in [−100, 0], [0, 100] and [−1, 1], and a
  1000-class output layer as the case where the saving is largest.

**Choices made here, where the method says nothing:**

* The binary tree structure of the comparators.
* The signed W-bit format.
* Lowest index wins on ties.
* Class numbering from 0.
* The valid signalling.
* A single output register: one cycle of latency, one vector per cycle.
* The synchronous reset.
* The extra `max_val` output.

**Default sizes.**

* `K = 10` is the size of the illustrative examples.
* A 1000-class layer is built by setting `K = 1000`. Nothing else changes: the index width
  follows from K.

## Verification

Each testbench is self-checking. It ends by printing `TB_RESULT checks=N failures=M`.
None of them takes its reference from the design's own structure. The expected class is
either known by hand or is the class with the largest real-valued softmax,
exp(x_i)/Σ exp(x_j), computed in double precision with `$exp`. Every random vector
therefore checks the claim itself: the comparator picks the same class as the full
softmax.

* `tb/tb_argmax_tree.sv` tests the tree alone, with K = 10, 7 (padded) and 1, using:
  * three 10-score example sets with known winners:

    | Set | Winner (counting from 0) | Winning score |
    |---|---|---|
    | All negative | class 5 | −10.83 |
    | All positive | class 9 | 95.52 |
    | Mixed | class 7 | 0.91 |

  * all-equal vectors;
  * a winner in every position, at both extreme codes;
  * 6000 random vectors, full range, [−1, 1], and narrow bands full of ties.
* `tb/tb_reduced_softmax.sv` is the end-to-end test at the default size, with no
  parameter changed. It runs 3000 random cycles, about 2200 of them carrying a vector,
  with random idle cycles, back-to-back runs and a reset in mid-stream. Every cycle it checks:
  * `out_valid`, `class_idx` and `max_val`;
  * the one-cycle latency;
  * holding through idle cycles;
  * clearing on reset.

  It counts how often ties, idle holds, back-to-back vectors, resets, example sets and
  extreme-code winners occurred. It fails if any of them never did.
* `tb/tb_reduced_softmax_k1000.sv` builds the unit for 1000 classes. It streams 400
  back-to-back vectors of four kinds: full range, [−10, 10], a narrow band with many ties,
  and a planted winner. It checks each result against the softmax argmax, and checks that
  400 vectors give 400 results in 400 consecutive cycles.

Each module's testbench was shown to fail on a deliberately broken copy of that module:

* a tree that compares scores as unsigned numbers;
* a top whose outputs do not hold through idle cycles.

### Running

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl \
        --top-module tb_reduced_softmax rtl/rs_pkg.sv tb/tb_reduced_softmax.sv -o sim
    ./obj_dir/sim

Replace `tb_reduced_softmax` by `tb_argmax_tree` or `tb_reduced_softmax_k1000` to run the
others. Each run takes seconds. The 1000-class build takes about half a minute to compile.

## Limits

* The unit gives the predicted class only. It cannot produce probabilities or
  confidences, and it cannot support training. The method deliberately targets inference
  without on-chip learning.
* Scores must share one fixed-point format. Saturation or overflow in the layer before is
  that layer's concern. A saturated score still compares correctly against others, but
  ties at the saturation code resolve to the lowest index.
* The tree is not pipelined internally, so a very large K lengthens the critical path by
  one comparator per doubling.
