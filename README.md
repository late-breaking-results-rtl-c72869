# Sequential one-vs-rest SVM classifier for printed electronics

Printed (additive, large-feature-size) electronics can be made cheaply enough for
one-off, fully custom circuits, but their transistors are large and slow. A
classifier that evaluates all its dot products in parallel is big and draws more
power than a printed battery delivers. This design trades time for hardware: a
linear support vector machine (SVM) with `n` classes, built as one-vs-rest, has
exactly `n` classifiers, one per class. The circuit evaluates **one classifier per
clock cycle** on a single shared multiply-add engine, keeps a running maximum,
and after `n` cycles reports the class whose classifier scored highest.

Three ideas keep it small:

* **One-vs-rest instead of one-vs-one.** One-vs-one needs `n(n-1)/2` classifiers;
  one-vs-rest needs `n`. Fewer support vectors to store, and the sequencing is
  a plain counter.
* **Bespoke storage.** There is no memory. The coefficients of each support
  vector are hardwired constants on the inputs of a multiplexer, selected by the
  class counter. Synthesis folds the constants into the logic.
* **Sequential argmax.** The voter is one comparator and two registers (best
  score, best class id), updated once per cycle.

In each cycle, `score_k = b_k + sum_i w_k,i * x_i` for class `k`, and the
prediction is `argmax_k score_k`.

## Block diagram

```
                 +-------------- svm_control ---------------+
   start ------->| ceil(log2 n)-bit counter  sel = 0..n-1   |---> busy, done
                 +-------+------------------------+---------+
                         | sel (SV select)        | sel (class select), first
                         v                        |
              +--- svm_storage ---+               |
              | MUX, hardwired    |               |
              | weights + bias    |               |
              +----+---------+----+               |
           weights |         | bias               |
                   v         v                    v
 features --> svm_input_features --> svm_compute_engine --score--> svm_voter --> predicted_class
   (load)     (held for n cycles)    m multipliers + adder          argmax regs
```

`seq_svm` (the top) wires these five blocks and nothing else.

## One classification, cycle by cycle

With the default three classes:

| clock edge | what happens on that edge                                 | during the next cycle        |
|------------|-----------------------------------------------------------|------------------------------|
| E0         | `start` seen while idle: features captured, `busy` rises  | `sel=0`, `first=1`           |
| E1         | voter loads score and id of class 0 unconditionally       | `sel=1`                      |
| E2         | voter compares score 1 with the stored one                | `sel=2` (last)               |
| E3         | voter compares score 2; `busy` falls, `done` rises        | `done=1`, result valid       |

So `done` pulses `n` clock edges after the edge that accepted `start`, and `busy`
is high for exactly `n` cycles. `predicted_class` stays valid until the next
classification starts. `start` is ignored while busy. A new `start` may be given
in the `done` cycle, so back-to-back classifications take `n` cycles each with no
idle cycle between them.

The published latencies of the five evaluated models agree with this:
latency times clock frequency is 2.96, 5.93, 9.8, 6.05 and 6.90 cycles, which
are the class counts 3, 6, 10, 6 and 7 of those data sets.

## The blocks

### Control (`svm_control`)

A counter of `ceil(log2(n))` bits (at least one). The counter is the whole
controller. Its value goes two ways: to the storage multiplexer as the
support-vector select, and to the voter as the class id of the score now
being computed. When the counter reaches `n-1` it resets to 0, clears `busy`
and pulses `done`. That ends the classification. `load` (= `start && !busy`) and
`first` (= `busy && sel == 0`) are combinational. Two assertions check that `sel`
never leaves `0..n-1` while busy and that `done` lasts one cycle.

### Coefficient storage (`svm_storage`)

This is a combinational multiplexer. Support vector `k` is driven onto `weight[]` and
`bias` when `sel == k`. The constants come from two flat parameters:

```
weight i of class k : WEIGHTS[(k*N_FEATURES + i)*W_BITS +: W_BITS]   two's complement
bias of class k     : BIASES [k*B_BITS +: B_BITS]                     two's complement
```

Select values `n` and above never occur. They give all-zero coefficients.

### Input features (`svm_input_features`)

This is a load-enabled register, one `X_BITS` field per feature. It captures
the sample on the accepting edge and holds it for the `n` cycles, so the
`features` port may change while the classifier runs.

### Compute engine (`svm_compute_engine`)

It has `N_FEATURES` multipliers and one multi-operand adder that also adds the bias.
The block is purely combinational. Its result is registered only in the voter,
so one classifier's whole dot product fits in one clock cycle. At the tens-of-hertz
clocks used for printed circuits, this is not a constraint. Each feature is
zero-extended before it is multiplied by its signed weight. The sum is carried
exactly in

```
ACC_BITS = max(W_BITS + X_BITS + ceil(log2(N_FEATURES)), B_BITS) + 1
```

bits (18 at the defaults), so nothing is rounded or saturated.

### Voter (`svm_voter`)

This is the running argmax. The score register (`best_score`) and the id register
(`best_class`) each sit behind a 2:1 multiplexer. One comparator tests
`A > B`, where A is the incoming score and B the stored one. When it is true, both
multiplexers pass the new score and the current counter value. Otherwise they
recirculate the stored values. Two details decide results:

* **First cycle.** While `first` is high, both multiplexers are forced to take
  the new values. Class 0 is therefore always the starting candidate, and
  nothing from the previous sample leaks in. No reset or "minus infinity"
  initial score is needed.
* **Ties.** The comparison is strict, so on equal scores the lower-numbered
  class wins. A reference model must use the same rule (the testbenches do).

## Number formats

| quantity | default | format                                                         |
|----------|---------|----------------------------------------------------------------|
| feature  | 4 bits  | unsigned; the [0,1]-normalised input scaled to 0..15            |
| weight   | 8 bits  | two's complement                                                |
| bias     | 12 bits | two's complement, in the same units as `weight * feature`       |
| score    | 18 bits | two's complement, exact                                         |
| class id | 2 bits  | `ceil(log2 n)`                                                  |

The widths are parameters (`X_BITS`, `W_BITS`, `B_BITS`). The SVMs are trained on
low-precision inputs, and the coefficients are quantized as far as accuracy
allows. The exact precision of each published model is not known, so the
defaults above are this design's own choice.

## Loading a trained model

The RTL is *bespoke*: each trained model is its own build. Quantize the
one-vs-rest SVM's weights to `W_BITS` and its biases to `B_BITS` on the same
scale as `weight * feature`. Pack them as shown above and pass them as
parameters:

```systemverilog
seq_svm #(
  .N_CLASSES (6), .N_FEATURES (34),
  .WEIGHTS   (MY_WEIGHTS),   // 6*34*8 bits
  .BIASES    (MY_BIASES)     // 6*12 bits
) u_svm ( ... );
```

Without these overrides, the coefficients are placeholders.
`svm_pkg::gen_coef(seed, idx, bits)` is an integer hash that spreads over the
whole signed `bits`-bit range. It makes a deterministic but meaningless model.
Coefficient `idx` is `k*N_FEATURES + i` for weight `i` of class `k`, and
`N_CLASSES*N_FEATURES + k` for the bias of class `k`. The trained models behind
the published accuracy figures are not available.

## Configurations of the five evaluated data sets

The feature and class counts come from the UCI data sets themselves, not from
the published results. The class counts agree with the published latencies.

| data set    | features | classes | cycles | published clock | latency at that clock |
|-------------|---------:|--------:|-------:|----------------:|----------------------:|
| Cardio      | 21       | 3       | 3      | 38 Hz           | 79 ms                 |
| Dermatology | 34       | 6       | 6      | 38 Hz           | 158 ms                |
| PenDigits   | 16       | 10      | 10     | 35 Hz           | 286 ms                |
| RedWine     | 11       | 6       | 6      | 42 Hz           | 143 ms                |
| WhiteWine   | 11       | 7       | 7      | 34 Hz           | 206 ms                |

The default parameters build the Cardio configuration. The other four come from
`N_CLASSES` and `N_FEATURES` overrides, and `tb_seq_svm_workloads` simulates all
five.

## What follows the published design and what is added

These follow the published description:

* the four-part structure: control, storage, compute engine and voter
* the `log2(n)`-bit counter that drives both the storage select and the class id,
  and ends the run after `n` classifiers
* storage as a multiplexer with hardwired coefficients
* `m` multipliers feeding one multi-operand adder
* a voter of two registers and one comparator
* `n` cycles per classification

These are this design's own choices:

* the `start`/`busy`/`done` handshake and the `load` and `first` signals
* the input feature register
* asynchronous active-low reset of every register
* the forced load in the voter's first cycle: one OR gate beside the comparator
* the strict `>` tie rule
* all bit widths and the exact, non-saturating sum
* the placeholder coefficients

The published work also measures area, power and energy after synthesis in a
printed-transistor process. This RTL only reproduces the logic. It contains no
technology-specific cells, and those figures are not reproduced.

## Files

```
rtl/svm_pkg.sv             default sizes, width functions, placeholder coefficient hash
rtl/svm_control.sv         class counter and handshake
rtl/svm_storage.sv         hardwired coefficient multiplexer
rtl/svm_input_features.sv  feature register
rtl/svm_compute_engine.sv  multipliers + multi-operand adder
rtl/svm_voter.sv           sequential argmax
rtl/seq_svm.sv             top
tb/svm_ref_pkg.sv          integer reference model (scores and first-max argmax)
tb/tb_<block>.sv           one self-checking testbench per block
tb/tb_seq_svm.sv           end-to-end test at the default size
tb/tb_seq_svm_workloads.sv the five data-set configurations (uses tb/svm_workload_runner.sv)
```

## Simulation

Every testbench checks itself. It prints `TB_RESULT checks=N failures=F` and
stops; it has a watchdog in case the design hangs. With Verilator 5:

```sh
verilator --binary --timing --assert -y rtl -y tb -Irtl \
    rtl/svm_pkg.sv tb/svm_ref_pkg.sv tb/tb_seq_svm.sv --top-module tb_seq_svm
./obj_dir/Vtb_seq_svm
```

Replace `tb_seq_svm` with any other testbench name. Lint a block with
`verilator --lint-only -Wall -y rtl -Irtl rtl/svm_pkg.sv rtl/seq_svm.sv`.

What the testbenches check:

* `tb_svm_control` (5 classes): the `sel` sequence, `first`, the latency of `done`,
  single-cycle `done`, an ignored mid-run `start` and a back-to-back start.
* `tb_svm_storage`: every select code of a small instance, against independently
  defined coefficients, and every coefficient of the default instance.
* `tb_svm_compute_engine`: extreme operands, each multiplier alone, and 2000
  random vectors, against 32-bit integer sums.
* `tb_svm_voter`: random scores, many ties, all-equal, rising and falling runs,
  and holding while disabled.
* `tb_svm_input_features`: capture and hold.
* `tb_seq_svm`: 402 samples at the default size, checking the class against the
  reference model, the `n`-cycle latency and `n` busy cycles. It also checks that
  the voter both replaced and kept a class, that starts were ignored while busy,
  and that back-to-back starts happened.
* `tb_seq_svm_workloads`: 200 samples for each of the five configurations.

### Limits of what is verified

The classes are checked against a model that uses the same placeholder
coefficients, so the tests show that the circuit computes the argmax of the
linear scores correctly. They say nothing about accuracy on real data.

With the placeholder coefficients of the default build, class 0 wins most
samples; every class still wins some.

Verilator reports that `rst_n` is used both asynchronously and synchronously.
The synchronous use is the `disable iff` of the control block's assertions, not
logic.
