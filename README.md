# Sequential One-vs-One SVM classifier for printed electronics

Printed (EGFET) circuits have huge features. A register costs about six NAND
gates, and a multiplier costs a lot more. A multi-class linear SVM built
fully in parallel needs one hardwired multiplier per weight, which can take
100 cm² for a digit recogniser. This design goes the other way: it runs the
whole prediction through **one multiply-accumulate unit**. The trained model
is wired in as constants behind a multiplexer. A tiny finite-state machine
evaluates the one-vs-one (OvO) classifiers as a decision DAG, so a prediction
needs only N-1 of the N(N-1)/2 pairwise support vectors, and it needs no voter
or score registers.

The architecture follows *"Compact Yet Highly Accurate Printed Classifiers
Using Sequential Support Vector Machine Circuits"* (Sertaridis, Besias,
Afentaki, Balaskas, Zervakis). This RTL is an independent reconstruction from
that description, not the authors' generated code. Where the description says
nothing (handshake, reset, fixed-point details), the choices are this design's
own. They are listed in "Departures and own choices" below.

## The three parts

```
            row index (support vector)                 ready, y = (sum >= 0)
   +---------------------------------+   +------------------------------------+
   v                                 |   |                                    |
svm_param_mux --param--> sv_engine --+---+                          ddag_control --> class
   ^  (bias or weight)     |  counter                                  |
   +------- col index -----+                                          start / done
```

| module | role | state it holds |
|---|---|---|
| `ddag_control` | walks the OvO decision DAG and outputs the row index of the current support vector | state register of clog2(N(N-1)/2) bits, plus a 1-bit busy flag |
| `svm_param_mux` | bespoke storage: the model as constants, selected by row (support vector) and column (parameter) | none (combinational) |
| `sv_engine` | counter over columns; multiplies weight × feature and accumulates; reports ready and the sign | counter of clog2(M+1) bits, accumulator of `ACC_W` bits |
| `seq_svm_top` | wires the three together | — |
| `svm_pkg` | pair numbering, accumulator width, stand-in model generator | — |

## How one support vector is evaluated (M+1 cycles)

A support vector for the class pair (i,j) is a bias `b` and M weights. The
engine computes `y = (b + Σ w_k·x_k ≥ 0)`. Its counter does two jobs. It is
the column index into the storage, and it sequences the engine:

| counter | storage column | accumulator update | outputs |
|---|---|---|---|
| 0 | bias | `acc ← b` | |
| 1 … M-1 | weight k | `acc ← acc + w_k·x_k` | |
| M | weight M | `acc ← acc + w_M·x_M` | `ready=1`, `y = ~sign(acc + w_M·x_M)` |

The result is taken from the adder output in the last cycle, not from the
register one cycle later. A support vector therefore costs exactly M+1
cycles, and the next one starts (with its bias) in the very next cycle. Feature
k is taken from `features_i[k-1]` by a multiplexer on the counter. The
features must stay stable for the whole prediction. `feat_sel_o` gives the
feature in use (0 = bias cycle), so a front end can share one ADC between
sensors and still know which one the engine reads.

## The decision DAG (the control unit)

With N classes, OvO has one binary classifier per pair (i,j), i<j. Instead of
running all of them and voting, the control unit runs a decision-directed
acyclic graph. Each node keeps a range of classes still in the running, from
i to j, and tests i against j:

* `y = 1` (sum ≥ 0): class j wins, class i is out, go to (i+1, j) — "right";
* `y = 0`: class i wins, class j is out, go to (i, j-1) — "left".

The start is (0, N-1). After N-1 tests one class is left. In a node with
j = i+1, the test itself names the prediction: j if `y=1`, otherwise i. The
sign convention is that of a binary classifier trained with class i as
negative and class j as positive.

Every pair is a state, and the state code is the pair's position in
lexicographic order: (0,1)=0, (0,2)=1, …, (0,N-1), (1,2), …. That same number
is the support vector's row in the storage, so "row index per state" needs no
logic at all. The two next states of each state are elaboration-time
constants (from `svm_pkg` functions). The FSM is a state register plus a
two-way multiplexer between them.

Worked example (4 classes, 6 signed features; this is also
`tb_seq_svm_top`, part 1). Input x = (-3,-1,2,0,-1,1), biases 0:

| state (1-based) | row | weights | sum | move |
|---|---|---|---|---|
| (1,4) | 2 | 1, 0, 4, -2, 3, 2 | 4 | right → (2,4) |
| (2,4) | 4 | 4, 2, -1, 3, 0, 1 | -15 | left → (2,3) |
| (2,3) | 3 | -2, -3, 1, 0, 4, -1 | 6 | class 3 |

3 tests × 7 cycles = 21 cycles. The paper's figure prints -13 for the second
sum; the printed vectors give -15. The sign and the path are the same either
way.

## Interface and timing of `seq_svm_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (FSM to root, counter and accumulator to 0) |
| `start_i` | in | 1 | start a prediction; ignored while busy |
| `features_i` | in | M × X_W | features, index 0 = feature 1; hold stable until `done_o` |
| `busy_o` | out | 1 | engine running (high in the start cycle too) |
| `feat_sel_o` | out | clog2(M+1) | column in use: 0 = bias, k = feature k |
| `done_o` | out | 1 | one-cycle pulse; `class_o` valid in this cycle only |
| `class_o` | out | clog2(N) | predicted class, 0-based |

The cycle in which `start_i` is high is already the first bias cycle.
`done_o` rises in cycle (N-1)(M+1), counting the start cycle as 1. That is
162 cycles for the default build. `start_i` may be raised again in the cycle
right after `done_o`. The class is not registered, to save the flip-flops.
Capture it on `done_o` if it is needed longer.

## Storage and number formats

`MODEL` is one flat parameter vector. Parameter (row r, column c) sits at bits
`[(r*(M+1)+c)*W_W +: W_W]`, in two's complement. Column 0 is the bias and
columns 1..M are the weights, in feature order. Rows follow the lexicographic
pair order above. To run a real trained model, generate this vector from the
quantised weights of the N(N-1)/2 pairwise classifiers and pass it as
`MODEL`. Orient each classifier so that a non-negative score means "the
higher-numbered class".

* Features: `X_W` = 4 bits. With `X_SIGNED=0` (default) they are unsigned;
  with `X_SIGNED=1` they are two's complement.
* Weights and bias: `W_W` bits, signed. The bias is added without shifting,
  so quantise it to the scale of a weight × feature product.
* Accumulator: `ACC_W` defaults to `W_W + X_W + 1 + clog2(M+1)`, which cannot
  overflow. The original flow makes it smaller by profiling the partial sums
  of the trained model. A smaller `ACC_W` is allowed and wraps around.

The default `MODEL` is a **stand-in**, not a trained classifier, because the
trained weights are not published with the architecture. Value k is the low
`W_W` bits of `mix32(seed·65536 + k)`, with seed 1 (see `svm_pkg`). It gives
the default build realistic size and activity. Its predictions mean nothing.

## Configurations

The defaults are the paper's Pendigits classifier: 10 classes, 17 features of
4 bits, and 45 support vectors with 18 8-bit parameters each (6480 bits of
constants). The other evaluated datasets are separate bespoke builds, with
other parameter values:

| dataset | classes | features | support vectors | cycles per prediction | in default build? |
|---|---|---|---|---|---|
| Cardio | 3 | 21 | 3 | 44 | no, 21 > 17 features |
| Dermatology | 6 | 33 | 15 | 170 | no, 33 > 17 features |
| Pendigits | 10 | 17 | 45 | 162 | yes (the default) |
| RedWine | 6 | 11 | 15 | 60 | yes, padded, at 162 cycles |
| WhiteWine | 7 | 11 | 21 | 72 | yes, padded, at 162 cycles |

Per-dataset parameter precisions other than Pendigits' 8 bits are not given;
the paper gives 2 to 8 bits as the range. A smaller model can be padded into a
larger build. Give the unused features weight 0. For every pair whose higher
class is unused, set bias -1 and all weights 0. Such pairs always vote for
the lower class, so the DAG drops the unused classes first.
`tb_svm_workloads` checks this with two padded wine-sized models.

## Departures and own choices

What follows the paper:
* one MAC, the bias loaded in the first cycle, and one weight per cycle after it;
* the counter used as the storage's column index;
* ready together with the inverted sign;
* the support vector chosen by the FSM through a row index;
* MUX-based storage with hardwired parameters;
* the OvO DDAG with N(N-1)/2 states and N-1 evaluations of M+1 cycles each;
* the 4-bit inputs, the Pendigits sizes, and the 21-cycle example.

This design's own choices:
* the `start_i` / `busy` / `done_o` handshake and the synchronous reset;
* lexicographic pair numbering, used both as the state code and as the row;
* the bias in column 0;
* taking the sign from the adder output, so that no extra cycle is needed;
* no output register;
* the overflow-free default accumulator width;
* unsigned features by default (the text normalises inputs to [0,1]; the
  worked example uses signed integers, so both are supported);
* the stand-in model.

Not built:
* The printed crossbar ROM that the paper weighs against MUX storage and
  rejects. It is an analog multi-level ROM read through 2-bit ADCs.
* The sensor ADC in front of the classifier. It is analog, and it comes from
  prior work.

## Simulating

All testbenches are self-checking. Each prints
`TB_RESULT checks=… failures=…` and stops itself. To build one with Verilator
5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/svm_pkg.sv tb/tb_seq_svm_top.sv --top-module tb_seq_svm_top -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_svm_param_mux` | every row and column of the default storage against the hash; zero out of range |
| `tb_sv_engine` | 300 random support vectors back to back, signed and unsigned features: column sequence, ready every M+1 cycles, sum and sign |
| `tb_ddag_control` | every sequence of engine results for 4 and 5 classes: rows visited, done timing, class, return to root |
| `tb_seq_svm_top` | the worked example (rows, class 3, 21 cycles); 400 random predictions of a 5-class model. Also requires left and right moves, back-to-back starts, starts ignored while busy, and every class to have occurred |
| `tb_seq_svm_full` | the default build with no parameter changed: 300 predictions at 162 cycles each against an integer reference |
| `tb_svm_workloads` | each dataset's bespoke size, plus the two padded wine models in the default build |

The reference model in `tb/svm_tb_driver.sv` recomputes parameters, pair rows
and the DAG walk in plain integers, independently of the RTL. To change the
design, first change the parameters of `seq_svm_top`. `N_CLASSES` and `M`
reshape all three parts, and `MODEL` must then hold N(N-1)/2 × (M+1) values.
