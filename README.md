# A sequential, register-lean MLP classifier for printed electronics

Printed circuits (here, the EGFET inkjet-printed technology) are cheap,
flexible and non-toxic. But their transistors are enormous and slow: a few Hz
to a few kHz, with a device budget orders of magnitude below silicon. A fully
parallel multilayer perceptron with hundreds of sensor inputs does not fit.
Nor does a conventional sequential one, whose shift registers for weights and
inter-layer data cost more than the arithmetic they save.

This RTL implements the sequential classifier architecture proposed in
*Sequential Printed MLP Circuits for Super-TinyML Multi-Sensory Applications*
(Saglam, Afentaki, Zervakis, Tahoori). It rests on three ideas:

1. **Fold the network in time, one input per cycle.** A single counter steps
   through the sensor inputs. Every hidden neuron consumes the current input
   in the same cycle, so no input is stored, and only one ADC needs to be
   powered at a time.
2. **Hardwire the model, and replace registers by multiplexers.** The model
   is bespoke: each circuit is generated for one trained network. Each
   weight is a power of two, `w = ±2^p`, so a neuron stores no weights. It
   selects its (p, s) pair from constant multiplexer tables indexed by the
   counter, and multiplies with a barrel shifter. The hidden results reach
   the output layer through a multiplexer, again indexed by the counter,
   instead of through a shift chain.
3. **Approximate the neurons that tolerate it.** An offline search picks
   neurons to replace with a *single-cycle neuron*. That neuron adds one
   bit of each of its two most important inputs and places the 2-bit result
   at the column where the neuron's sum is expected to have its leading 1.
   It costs three flip-flops and a 1-bit adder, instead of an accumulator, a
   shifter and two multiplexer tables.

All the flip-flops of the design: the state counter, one accumulator per
exact neuron, three bits per approximate neuron, and the two argmax
registers.

## One inference, cycle by cycle

Everything is scheduled by one value, `state`, which runs 0 … N+P+R and wraps
(N inputs, P hidden neurons, R output neurons/classes). The blocks decode it
themselves; there is no other control.

| state            | what happens |
|------------------|--------------|
| 0                | `rst`: every accumulator is loaded with its bias; the hidden layer also adds the product of input 0 in this cycle |
| 0 … N-1          | `adc_en` = 1, `adc_sel` = state: the environment presents x[state] on `inp`; hidden neurons accumulate ±x·2^p |
| N … N+P-1        | the inter-layer mux forwards qReLU(hidden neuron state-N) to the output layer, which accumulates |
| N+P … N+P+R-1    | the argmax compares output neuron state-N-P with the best so far |
| N+P+R            | `valid` = 1; `class_id` and `score` hold the result |

One inference therefore takes **N+P+R+1 cycles**, and inferences follow each
other without a gap. `class_id` stays stable from the `valid` cycle until
state N+P of the next inference. With the default (Arrhythmia-sized) model,
this is 274+4+16+1 = 295 cycles. At the 100 ms clock used for that model's
printed implementation, that is about 30 s per classification. Printed sensor
applications accept that; what they cannot accept is peak power.

`adc_sel` is a position in the circuit's input order, not a sensor number.
In the publication's flow, the inputs are sorted by relevance and the least
relevant ones are pruned before the circuit is generated. Each pruned
feature saves one cycle. The front end maps position k to the k-th kept
sensor; that mapping is wiring outside this RTL.

The two layer windows are half-open (`state < N`, `N ≤ state < N+P`). The
publication's prose writes them with closed bounds, which would make state N
belong to both layers. Its architecture figure shows the half-open form, and
that is the form used here.

## The exact (multi-cycle) neuron — `mc_neuron`

```
            POW[sel] ─┐                    SGN[sel] ──────────┬─────────┐
inp ──(en? : 0)── << ─┴─ shifted ── s ? ~shifted : shifted ── + ◄─ cin ┘
                                                              ▲
                                  rst ? BIAS : sum ───────────┘
                                   nxt ──► sum register,  out = nxt << PMIN
```

* `sel` is the index of the current input inside the layer. The hidden
  layer uses `state`; the output layer uses `state - N`. `POW` and `SGN` are
  constant arrays. In silicon or print they are multiplexers whose data
  inputs are tied to 0/1.
* A negative weight is subtracted as `~shifted + 1`: the inverter mux and
  the adder's carry-in take the same sign bit.
* `rst` swaps the register value for the bias at the adder input. The first
  product is thus added in the same cycle in which the bias is loaded.
* **Common denominator.** All powers of one neuron share a minimum `PMIN`.
  The tables hold `p - PMIN`, which makes the shifter and the power mux
  narrower. The result is shifted left by `PMIN` only at the output, which
  is free wiring. The bias is stored in the same reduced units.
* `out` is the adder output, as in the original drawing. Outside its window
  the neuron adds 0, so `out` equals the held sum.

## The approximate (single-cycle) neuron — `sc_neuron`

For a neuron n, an offline analysis ranks the inputs by their average
expected absolute product `E[x_i]·|w_{n,i}|` and keeps the two largest. The
neuron then does:

```
en0 (first of the two inputs arrives):   r0 <= inp[BIT0]
en1 (second input arrives):              r1 <= r0 + inp[BIT1]     (1-bit adder, 2-bit result)
out = r1 << LEAD                                                   (rewiring)
```

`LEAD` is the bit column of the expected leading 1 of the dominant product.
Placing the 2-bit result there makes the estimate comparable with the
full-scale sums of the exact neurons in the same layer. The layer decodes
`en0`/`en1` from the state, so the estimate can be ready long before the
layer window closes.

Without dataset statistics, this implementation takes the same mean for
every input. The ranking then reduces to ranking by weight power. Both
sampled bits are the input MSB, and `LEAD = (IN_W-1) + p_max`. With a real
model, `BIT0`, `BIT1` and `LEAD` would come from the training set, as the
publication describes. The estimate carries neither sign nor bias.

## Between the layers and at the end

* **`qrelu`** turns each signed hidden sum into a 4-bit activation:
  negative → 0, then drop `QRELU_SHIFT` LSBs, then saturate at 15. The
  output layer therefore sees inputs as narrow as the sensor inputs and
  reuses the same neuron design.
* **`layer_mux`** picks activation `state - N` in the output window. It is
  the multiplexer that replaces the conventional inter-layer shift
  registers.
* **`seq_argmax`** has a single `>=` comparator. A value mux and a
  class-index mux, both driven by the state, feed it. The winner is loaded
  into `maxVal`/`maxID`. The first class of each inference is loaded
  unconditionally. Equal scores go to the later class.

## The model: hardwired, and here a stand-in

A circuit of this kind is generated for one trained network: its weights
are wiring. The trained networks of the publication are not available, so
`mlp_pkg` defines a deterministic stand-in model. A 32-bit integer hash of
(seed, layer, neuron, input) gives:

* `weight_pow`: p in [pmin, W_BITS-1], where pmin = `neuron_pmin` ∈ {0,1,2}
  per neuron,
* `weight_sgn`: the sign bit,
* `bias_red`: the bias in units of 2^pmin, within ±2^(IN_W+W_BITS-3).

The layers evaluate these functions at elaboration time into the constant
tables of each neuron. To build the circuit for a real model, replace the
bodies of these four functions, for instance with a `case` on the indices
or with tables of constants. Also set `HID_APPROX`/`OUT_APPROX` to the
neurons the search chose. Nothing else changes. The stand-in's classes carry
no meaning. Because of its random signs, each hidden neuron has a strongly
signed mean: many activations are 0 or saturate. The tests therefore also
use input vectors aimed at individual neurons.

## Parameters of `seq_mlp_top`

| parameter     | default | meaning |
|---------------|---------|---------|
| `N`           | 274 | inputs (features) — Arrhythmia |
| `P`           | 4   | hidden neurons (274·4 + 4·16 = 1160 coefficients, the count quoted for this model) |
| `R`           | 16  | output neurons = classes |
| `IN_W`        | 4   | input width, unsigned fixed point |
| `W_BITS`      | 8   | power-of-two weight resolution (14 for HAR) |
| `ACT_W`       | 4   | hidden activation width (own choice) |
| `QRELU_SHIFT` | 9   | LSBs dropped by qReLU (own choice, suited to the default size) |
| `HID_APPROX`  | `4'b0010` | single-cycle hidden neurons (example of the publication's figure: neuron 1) |
| `OUT_APPROX`  | neurons 2, 5, 6 | single-cycle output neurons (same example) |
| `SEED`        | `32'h5EED2025` | stand-in model |

Widths follow from these. An accumulator has `IN_W + W_BITS + clog2(NIN+2)`
bits, which holds the worst-case sum plus bias (21 bits for the default
hidden layer, 15 for the output layer). The state is `clog2(N+P+R+1)` bits.

The publication evaluates seven bespoke models. Each is a separate
elaboration of the same RTL:

| dataset | N | P | R | W_BITS | cycles/inference |
|---------|---|---|---|--------|------------------|
| SPECTF      | 44  | 4*  | 2  | 8  | 51  |
| Gas Sensor  | 128 | 4*  | 6  | 8  | 139 |
| Epileptic   | 178 | 4*  | 5  | 8  | 188 |
| Arrhythmia  | 274 | 4   | 16 | 8  | 295 |
| HAR         | 561 | 15  | 6  | 14 | 583 |
| Parkinsons  | 753 | 4*  | 2  | 8  | 760 |

\* The hidden size is not known; 4 is taken from the "3 to 5 hidden neurons"
typical of these models. HAR's 15 follows from its quoted 8505 coefficients
(561·15 + 15·6). The input and class counts are those of the public
datasets, before the publication's feature pruning (which keeps about 81% of
the inputs). The Activity Recognition model is not built: its size is
unknown.

## Files

| file | contents |
|------|----------|
| `rtl/mlp_pkg.sv`            | default sizes, width rules, stand-in model and approximation choices |
| `rtl/seq_mlp_controller.sv` | state counter, layer enables, per-inference reset, `done` |
| `rtl/mc_neuron.sv`          | exact pow2 sequential neuron |
| `rtl/sc_neuron.sv`          | single-cycle approximate neuron |
| `rtl/mlp_layer.sv`          | a layer of mixed neurons, tables built from `mlp_pkg` |
| `rtl/qrelu.sv`              | quantized ReLU |
| `rtl/layer_mux.sv`          | state-driven inter-layer multiplexer |
| `rtl/seq_argmax.sv`         | single-comparator sequential argmax |
| `rtl/seq_mlp_top.sv`        | the classifier |
| `tb/mlp_ref_pkg.sv`         | integer reference model of the whole network |
| `tb/tb_<module>.sv`         | self-checking test of each module |
| `tb/tb_seq_mlp_top.sv`      | end-to-end test at the default size |
| `tb/tb_workloads.sv`, `tb/wl_runner.sv` | the six dataset sizes above |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. A
watchdog ends it with a failure if it hangs. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/mlp_pkg.sv tb/mlp_ref_pkg.sv tb/tb_seq_mlp_top.sv --top-module tb_seq_mlp_top
./obj_dir/Vtb_seq_mlp_top
```

Replace `tb_seq_mlp_top` by any other testbench name. `-Irtl -Itb` lets
Verilator find the modules by file name. The full-size test runs 12
back-to-back inferences in well under a second. It checks every hidden
activation, every output sum, the class, the score, the `valid` period and
the ADC select sequence against the reference. It also requires each
mechanism to occur: negative-weight subtraction, approximate neurons in both
layers, qReLU clamping and saturation, late argmax winners, and back-to-back
inferences. `tb_workloads` builds and checks the six dataset sizes in one
run.

## How far this follows the publication

Taken from the publication:
* the block structure (controller, hidden layer, mux, output layer, argmax);
* the counter-and-wrap controller with maxST = N+P+R;
* the exact neuron's datapath: power and sign muxes, shifter, inverter mux
  with carry-in, bias mux;
* the single-cycle neuron's register, 1-bit adder and rewiring;
* the single-comparator argmax with its value and index branches;
* the common-denominator trick;
* qReLU;
* the 4-bit inputs and the 8/14-bit pow2 weights.

This design's own choices, where the publication is silent or unreadable:
* all widths beyond inputs and weights: accumulators, activations and the
  qReLU shift;
* the placement of the layer reset in state 0, and the asynchronous
  power-on reset of the counter;
* the `valid`, `score`, `adc_sel` and `adc_en` ports;
* loading the first argmax value without a compare, and the tie rule;
* the bits sampled by the single-cycle neuron and its leading-1 column. The
  publication's example figure for this step is not legible;
* forcing the shifter output to zero outside the window. The original
  drawing has an unexplained input mux with a constant 0;
* the range of powers, 0 … W_BITS-1. The text says 0 … n for n-bit weights.

Not included:
* the offline tool flow that produces a model: quantization-aware
  training, redundant-feature pruning, the NSGA-II search for approximable
  neurons;
* the sensors and ADCs, which sit outside the `inp`/`adc_sel` ports;
* the baselines the publication compares against.

The stand-in weights mean that the classification *results* say nothing
about accuracy. The tests verify that the circuit computes exactly what its
constants specify, cycle by cycle.
