# A ternary neuron engine for reparameterized ternary networks

A reparameterized ternary network (RTN) keeps every weight and every
activation of its inner layers as one of three values, −1, 0 or +1, and puts
the range back with a few full-precision numbers per layer or filter:

* an activation is used as `γ·a + β`, where `a ∈ {−1, 0, +1}` and the scale γ
  and offset β are learned;
* a weight is used as `α·w`, where `w ∈ {−1, 0, +1}` and α is a learned
  per-filter scale.

The expensive part of a layer, the dot product of a weight filter with an
activation window, then only involves ternary vectors. The rest folds into
one multiply and one add per output neuron:

    z = ReLU( α·Σ w_i·(γ·a_i + β) )
      = ReLU( αγ · (w · a)  +  C ),        C = αβ · Σ w_i

`C` depends only on trained values, so it is computed off-line and stored.
This repository gives SystemVerilog for an engine that computes one such
neuron at a time. It uses a popcount circuit for `w · a` and a single MAC
with ReLU for the rest.

## The 2-bit code

Each ternary value is stored in two bits. The first bit says whether the value
is non-zero; the second gives its sign.

| first bit | second bit | value |
|:---------:|:----------:|:-----:|
| 0 | 0 | 0 |
| 0 | 1 | 0 |
| 1 | 0 | −1 |
| 1 | 1 | +1 |

Zero has two encodings, and every consumer treats `01` like `00`. The on-chip
ternarizer always writes `00`; weights loaded from outside may use either
form. In SystemVerilog the code is `rtn_pkg::tcode_t`, a packed struct
`{nz, sign}` with `nz` as bit 1.

## Dot product by counting

For two codes `w` and `a`, the product `w·a` is non-zero exactly when both
first bits are 1. When it is non-zero it is −1 exactly when the sign bits
differ. Over a vector:

    c_i = w_i.nz  AND  a_i.nz               (product non-zero)
    n_i = (w_i.sign XOR a_i.sign)  AND  c_i  (product is −1)

    w · a = #(+1 products) − #(−1 products)
          = popcount(c) − 2·popcount(n)

`ternary_dot` builds this literally. Each cycle one weight code and one
activation code enter; an AND, an XOR and a second AND form `c_i` and `n_i`.
Two 32-bit counters accumulate them. The result is the first counter minus
the second counter shifted left by one bit. No multiplier is involved, and the
per-element logic is three gates and two counter increments. That is the
point of the design. A 2-bit *quaternary* dot product (values 0..3) would need
four partial products with shifts and an adder tree. The RTN authors
report their ternary circuit at about a quarter of the area and under a third
of the power of such a circuit. Neither the quaternary circuit nor a
floating-point one is included here; they were only points of comparison.

The subtraction result is 33 bits, signed (`DOT_W`). This keeps it exact for
any count that fits the 32-bit counters: it lies between −count and +count.

`clear` restarts the counters. If `en` is high in the same cycle, the pair on
the inputs becomes the first one counted. `result` is combinational from the
counters and valid the cycle after the last `en`.

## Ternarizing activations

In an RTN block the order is ternary convolution → ReLU → max pooling →
batch norm → ternarize. The batch norm `k·A + b` is followed by rounding to
+1 above 0.5, to −1 below −0.5 and to 0 in between. For `k > 0` the two steps
collapse into two comparisons of the raw activation:

    A >  thr_hi = (0.5 − b)/k   →  +1
    A <  thr_lo = −(0.5 + b)/k  →  −1
    otherwise                   →   0

`ternary_encoder` does exactly this, with the thresholds supplied from
outside. They are computed off-line per channel from the learned `k` and `b`.
For a negative `k` the caller must swap and negate them. The engine puts the
ternarizer on the activation load path: fixed-point activations go in, codes
are stored. Max pooling is not part of this engine. Activations are expected
already pooled.

Weights are ternarized the same way, with their own affine map
`k_W·W + b_W`. They are fixed after training, so the engine normally takes
them as ready-made 2-bit codes on `w_wcode`. With `w_fp_sel` high, a second
`ternary_encoder` instead ternarizes the fixed-point weight on `w_wdata`
against `w_thr_hi = (0.5 − b_W)/k_W` and `w_thr_lo = −(0.5 + b_W)/k_W`.

## The engine

    a_wdata ──► ternary_encoder ──► activations buffer ──┐
                                                          ├──► ternary_dot ──► reparam_mac ──► z
    w_wdata ──► ternary_encoder ─┐                        │         ▲               ▲
    w_wcode ─────────────────────┴► weights buffer ───────┘         │               │
    (w_fp_sel picks one)                                            │       coef_cache (αγ, C)
    start/len/… ──► rtn_ctrl ── read addresses, clear/en, MAC issue ┘

| module | role |
|---|---|
| `rtn_pkg` | code type, coefficient struct, widths and formats |
| `ternary_encoder` | BN-folded ternarizer (combinational); one for activations, one for full-precision weights |
| `code_buffer` | array of 2-bit codes, one write port, one read port with 1-cycle latency; two instances |
| `coef_cache` | per-filter `{αγ, C}`, one write port, one read port with 1-cycle latency |
| `rtn_ctrl` | job sequencer (FSM IDLE → RUN → FLUSH → MAC) |
| `ternary_dot` | popcount dot product |
| `reparam_mac` | `ReLU(αγ·dot + C)`, registered output |
| `rtn_top` | the engine |

A **job** is `{w_base, a_base, len, filt}`: the weight vector at `w_base`,
the activation vector at `a_base`, both `len` long, and filter `filt`'s
coefficients. For a convolution, a job is one output channel at one output
position, with the activation window laid out in im2col order. `start` is
taken only while `busy` is low; an assertion flags a start while busy.

**Timing.** With `start` sampled at the end of cycle 0:

| cycle | what happens |
|---|---|
| 0 | counters cleared, coefficients of `filt` read |
| 1 … len | buffers read at `base+0 … base+len−1` |
| 2 … len+1 | element pairs counted |
| len+2 | MAC operands stable, MAC issued |
| len+3 | `done` high for one cycle, `z` valid |

So a job of `len` elements takes `len + 3` cycles, empty jobs included. A
new job may start in the cycle after `done`. Writes into the buffers and the
cache may go on during a job, provided they do not touch the job's data.

**Output.** `z` is unsigned and carries 8 fractional bits. `z_relu_zero`
says it was clamped from a negative sum. `dot` shows the raw ternary dot
product of the last job. `z_sat` flags a sum above the 48-bit output range. At
the default widths this cannot happen (|αγ·dot| < 2²⁹, C < 2⁴⁷); the flag
matters only if `ACC_W` is narrowed.

## Number formats

The RTN method treats γ, β, α, k and b as real numbers. The fixed-point
formats are this implementation's own choice, set in `rtn_pkg`:

| quantity | width | fractional bits |
|---|---|---|
| activation `a_wdata`, thresholds | 16 (`ACT_W`) | 8 (`ACT_FRAC`) |
| `αγ` | 16 (`COEF_W`) | 8 (`COEF_FRAC`) |
| `C`, `z` | 48 (`ACC_W`) | 8 |
| counters / dot product | 32 / 33 | 0 |

The MAC keeps every bit until the ReLU, so the only rounding is in `αγ` and
`C` themselves. The error in `z` is at most `(|dot|·0.5 + 1)/256`. The
testbenches check against real arithmetic with this bound.

An equivalent form, `α·max(0, γ·dot + T)` with `T = β·Σw`, gives the same
number (`C = α·T`). It is not built separately: loading `αγ` and `C` covers
it.

## Sizes and the networks they serve

| parameter | default | why |
|---|---|---|
| `DEPTH` (codes per buffer) | 9216 | AlexNet fc6 input 256·6·6, the longest ternary dot product among the networks below |
| `NUM_FILT` (cache entries) | 4096 | AlexNet fc6/fc7 outputs, the widest ternary layer |
| counter width | 32 | as in the RTN circuit |

Longest ternary dot product and widest layer per network (first and last
layers stay full precision, as in RTN, and do not run here):

| network | longest `c·k·k` | most filters | fits |
|---|---|---|---|
| ResNet-18 (ImageNet) | 512·3·3 = 4608 | 512 | yes |
| AlexNet (ImageNet) | 9216 (fc6) | 4096 | yes, exactly |
| MobileNet v1 (ImageNet) | 1024 (pointwise) | 1024 | yes |
| NIN (CIFAR-10) | 96·5·5 = 2400 | 192 | yes |

These layer sizes come from the standard definitions of the networks. The
ablation variants differ only in the coefficients loaded: fixed ternary
activation (γ = 1, β = 0), scale only (β = 0) and offset only (γ = 1).
Networks with ternary weights but full-precision activations cannot use this
engine.

## Where this departs from, or goes beyond, the RTN description

Taken from the method: the 2-bit code, the AND/XOR/AND gating, the two 32-bit
counters with shift-by-one and subtraction, the BN-folded thresholds, the
single MAC `αγ·dot + C` followed by ReLU, and `C` kept pre-stored.

This implementation's own choices:

* the buffers are addressed arrays, stepped one address per cycle, not shift
  registers; their depth, and the cache depth;
* storing `αγ` next to `C` in the cache;
* the controller, the job interface, the load ports and the `len+3` timing;
* all fixed-point formats, the output register of the MAC and saturation;
* `00` as the encoder's zero; strict comparisons at the thresholds;
* asynchronous active-low reset of control and counters; memories are not
  reset.

Not built:

* max pooling, which the RTN block places between ReLU and batch norm. The
  method gives no hardware for it.
* several engines in parallel or a systolic array. The RTN authors mention
  both only as ways the circuit could be deployed.

## Verification

Every testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<m>`. Each has a watchdog.

| testbench | what it checks |
|---|---|
| `ternary_dot_tb` | all 16 code pairs; 300 random vectors (both zero codes, up to 4608 long) against integer sums; both counters; hold; clear |
| `ternary_encoder_tb` | values at, above and below random thresholds; thresholds derived from real `k`, `b` against `round(k·A + b)` |
| `code_buffer_tb`, `coef_cache_tb` | every address, read latency, hold, read-during-write |
| `reparam_mac_tb` | ReLU, pass-through and saturation (with a 40-bit output so that saturation can occur) against 64-bit integer arithmetic |
| `rtn_ctrl_tb` | the cycle-by-cycle timeline of 200 random jobs, `len = 0` included |
| `rtn_top_tb` | end to end at default sizes: 14 jobs up to the full 9216 elements, one with trained ResNet-18 coefficients. It requires, and counts, the `01` zero, +1 and −1 products, all three ternarizer outcomes, weights ternarized on chip, ReLU clamping, an empty job, back-to-back jobs and loading during a job. It checks `len+3` latency and compares `z` with integer and real models. |
| `rtn_layer_tb` | all 19 ternary layers of ResNet-18 with their trained γ, β and mean α and their true dot-product lengths, 8 filters each, at default sizes; prints the fraction of outputs the ReLU sets to zero |

To run one with Verilator, from the repository root:

    verilator --binary --timing --assert -Wall -Wno-fatal \
      --top-module rtn_top_tb -y rtl -y tb +libext+.sv -Irtl \
      rtl/rtn_pkg.sv tb/rtn_top_tb.sv
    ./obj_dir/Vrtn_top_tb

The simulator is two-state. The testbenches therefore raise `rst_n` and then
pull it low, so that reset always sees a falling edge whatever the initial
value. Every test finishes in well under a second.

## Changing it

* Vector length and filter count: `rtn_top #(.DEPTH(…), .NUM_FILT(…))`. The
  address widths follow.
* Number formats: the constants in `rtn_pkg`. `reparam_mac` sizes its
  internal product and sum from its parameters, so it stays exact.
* More throughput: instantiate several `ternary_dot` units that share the
  activation stream and have their own weight buffers. The per-element cost is
  small, so this scales well. It is not done here.
