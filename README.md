# A shift-only fixed-point neural-network receiver

This is the RTL of a small neural network that acts as the receiver of a
digital link. The transmitter sends one of M = 256 messages as N = 4 complex
channel symbols, i.e. a point in an 8-dimensional constellation (a 256-point
subset of the E8 lattice). The network sees the 4 noisy received symbols and
decides which message was sent.

The main idea is to keep the network cheap enough for hardware:

* All arithmetic is fixed point, 14 bits: 1 sign bit, 5 integer bits and
  8 fraction bits. The published study found this is enough to lose nothing in
  block error rate against a 32-bit floating-point network. With 2 or 4
  fraction bits the error rate got clearly worse.
* Every weight is 0 or ±2^q with |q| < K−1 (K = 14, so |q| ≤ 12). The network
  is trained so that its weights take only these values. A multiplication by
  such a weight is a wire shift plus, for a negative weight, a negation.
  No multiplier is needed.
* The weights are fixed once deployed. So each shift is hardwired: there is no
  weight memory and no programmable shifter. What is left is adders.

The network counts 10 496 additions per decision. A brute-force
maximum-likelihood receiver at K = 14 needs the equivalent of 30 464, so the
network costs about a third as much.

## Signal flow

```
 in_re/in_im ──► c2r ──► dense_layer 1 ──► dense_layer 2 ──► dense_layer 3 ──► argmax ──► m_hat
 (1 symbol/clk)  8 reals   64 units,         32 units,         256 units,       index of
                 [Re,Im]   bias, ReLU        bias, ReLU        no bias,          the largest
                                                               no activation
```

| stage | module | what it does |
|---|---|---|
| complex to real | `c2r` | collects the N = 4 symbols of a message; outputs `[Re y0..Re y3, Im y0..Im y3]` |
| hidden layer 1 | `dense_layer` | 8 → 64, bias, ReLU |
| hidden layer 2 | `dense_layer` | 64 → 32, bias, ReLU |
| output layer | `dense_layer` | 32 → 256, no bias; gives the pre-activations |
| decision | `argmax` | index of the largest of the 256 pre-activations |

A trained network of this kind ends in a softmax, which gives message
probabilities. Softmax does not change which output is largest. The hardware
therefore leaves it out and decides on the pre-activations.

Every stage is fully parallel and has one register stage. A message's decision
(`m_hat`) comes out 5 clocks after its last symbol is taken:
1 clock in `c2r`, 3 in the dense layers and 1 in `argmax`. Symbols arrive one
per clock, so the receiver decides one message every N = 4 clocks. The layers
behind `c2r` could accept a new vector every clock. There is no back-pressure.

## Number format and the shift multiplier

This part holds most of the numerical behaviour, so it is worth reading
before changing anything.

A value is a K-bit two's-complement integer `z` that stands for
`z · 2^-KF`. With the defaults (KI = 5, KF = 8) the range is
[−32, 32 − 2^-8] in steps of 1/256. Inputs, activations, biases and products
all use this one format.

`pow2_mul` multiplies an operand `x` by a weight code `{nz, neg, q}`:

1. `nz = 0`: the product is 0.
2. `q < 0`: arithmetic shift right by −q. The bits shifted out are lost, so
   the result is `floor(x · 2^q)`. For example, `01101011 · 2^-3` becomes
   `00001101`. This loss of low bits is the arithmetic error that a shift-only
   network accepts.
3. `q > 0`: shift left by q. A result outside the K-bit range saturates to the
   largest or smallest value.
4. `neg = 1`: the shifted value is negated, so `-floor(x·2^q)`, not
   `floor(-x·2^q)`. The one case that overflows, −(−2^(K−1)), saturates.

`dense_layer` adds a unit's products and its bias exactly, in an accumulator
`K + clog2(IN+1) + 1` bits wide. It then saturates the sum once, to K bits,
and applies ReLU where enabled. Each product is thus rounded on its own, but
the sum loses nothing until the final saturation. One consequence is that
reordering the additions never changes the result.

Any saturation, in a product or in a unit output, sets a flag that travels
with the data. The top outputs it as `overflow` together with the decision.
The reference study picked 5 integer bits as the smallest count that avoids
overflow with its trained weights. The flag shows whether that still holds
for the weights and inputs in use.

## The weights

The weights and biases are elaboration-time constants. `dense_layer`
reads them, one per product, from two functions in `rx_weights_pkg`:

* `weight_code(seed, layer, o, i, k)` gives the code of the weight from input
  `i` to unit `o`;
* `bias_lsb(seed, layer, o, kf)` gives a bias in units of 2^-KF.

**The trained weights are not part of this release.** The functions return a
deterministic placeholder set that follows the same codebooks. It is built
from a 32-bit integer hash `h` of (seed, layer, unit, input):

* a weight is zero when `h[2:0] = 0`, negative when `h[3] = 1`;
* its exponent is `q = QLO + h[9:8]`, clamped to |q| ≤ K−2, with
  QLO = −2, −4, −3 for layers 1, 2, 3;
* a bias is `((h[23:16] mod 129) − 64) · 2^(KF−8)` LSBs, i.e. within ±0.25.

With placeholder weights the decisions are only arbitrary functions of the
input. Every test checks the hardware against a reference model, not against
transmitted messages. To deploy a trained network, replace the two function
bodies with lookups of the trained codes, for example `case` tables. Keep
the weights within the codebook: 0 or ±2^q with |q| ≤ K−2. Keep the biases
within K bits. `SEED` picks another placeholder set.

## Cost

With the shifts hardwired, the adders are the whole datapath.

| layer | adders (products − 1 + bias) |
|---|---|
| 8 → 64, bias | 64 × 8 = 512 |
| 64 → 32, bias | 32 × 64 = 2048 |
| 32 → 256, no bias | 256 × 31 = 7936 |
| total | **10 496** |

This equals the published addition count of the network. On top of that,
`argmax` has 255 compare-select nodes, and negative weights need negations.
The count above includes neither. A zero weight removes one adder after
synthesis, so a trained network with many zeros costs less.

## Top-level interface (`nn_receiver`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of the control flops |
| `in_valid` | in | 1 | a received symbol is on `in_re`/`in_im` this clock |
| `in_sof` | in | 1 | this symbol is the first of a message |
| `in_re`, `in_im` | in | K | received symbol, KI.KF fixed point |
| `out_valid` | out | 1 | one-clock pulse per decided message |
| `m_hat` | out | log2 M | decided message, 0 … M−1 |
| `score` | out | K | the winning pre-activation |
| `overflow` | out | 1 | some product or unit on this message's path saturated |
| `resync` | out | 1 | a message was cut short by an early `in_sof` and dropped |

Symbols without `in_sof` continue the current message. After N symbols the
message goes into the network. If `in_sof` arrives before a message has all N
symbols, the partial message is dropped, `resync` pulses and a new message
starts. Ties in `argmax` go to the lowest index.

Parameters: `N`, `M`, `H1`, `H2` (layer sizes, defaults 4, 256, 64, 32), `KI`,
`KF` (defaults 5, 8) and `SEED`. Any KI + KF + 1 ≤ 33 works, since the
exponent field of a weight code is 6 bits wide.

## Input scaling

The inputs use the same 14-bit format as the rest of the network. In the
reference study, the noise variance was fixed at −80 dB and the SNR was set
through the signal energy. That makes received amplitudes around 10^-4,
which is below the 2^-8 step of the input format. Fed in unscaled, they would
quantise to zero. The study does not say how it scaled them. A front end
(gain control or a fixed gain) must therefore bring the symbols to order-one
amplitudes before `in_re`/`in_im`. The trained weights assume whatever scale
was used in training.

## What follows the reference design and what is this design's own

From the published design: the network shape (C2R, 64 ReLU, 32 ReLU, 256
linear, argmax); biases in the hidden layers only; the weight codebook
{0, ±2^q, |q| < K−1} and the K-bit bias codebook; the 14-bit format with
KI = 5, KF = 8; omitting softmax; hardwired shifts with no weight storage;
and shifts that drop low bits.

Chosen here, since the source does not specify them:
* two's complement;
* floor rounding on right shifts;
* negation after the shift;
* saturation on overflow, and the `overflow` flag;
* exact accumulation, with one saturation per unit;
* serial symbol input with `in_sof` framing;
* the `[Re…, Im…]` input order;
* the pipeline and its 5-clock latency;
* the lowest-index tie rule;
* the placeholder weights.

Not included: the transmitter and the channel, which sit outside the
receiver; the trained weight values; the training procedure; softmax.

## Files

`rtl/`
* `fxp_pkg.sv`: format defaults, weight-code type
* `rx_pkg.sv`: network dimensions
* `rx_weights_pkg.sv`: hardwired weights and biases (placeholder set)
* `pow2_mul.sv`: shift multiplier
* `c2r.sv`: symbol collector, complex to real
* `dense_layer.sv`: fully connected layer
* `argmax.sv`: decision tree
* `nn_receiver.sv`: top

`tb/`
* `rx_ref_pkg.sv`: reference model. It uses real-valued scaling and plain
  integer sums, not shifts.
* `tb_pow2_mul.sv`: every exponent, both signs, edge operands, and the 8-bit
  example above.
* `tb_c2r.sv`: ordering, timing, back-to-back traffic, gaps, resync.
* `tb_dense_layer.sv`: a hidden-layer and an output-layer configuration,
  ReLU and saturation.
* `tb_argmax.sv`: random vectors, ties, all-equal vectors.
* `tb_nn_receiver.sv`: end to end at a reduced size (8 → 16 → 8 → 32). It
  checks every decision, the 5-clock latency and one decision per 4 clocks.
  It counts back-to-back messages, gaps, resyncs, overflows and ReLU
  clipping, and fails if any of them never occurs.
* `tb_nn_receiver_full.sv`: the same test at the default size.
* `tb_nn_receiver_kf.sv` with `rx_kf_check.sv`: receivers with 2, 4, 8
  and 12 fraction bits, each checked against the reference model.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself
through a watchdog.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/fxp_pkg.sv rtl/rx_pkg.sv rtl/rx_weights_pkg.sv tb/rx_ref_pkg.sv \
  rtl/pow2_mul.sv rtl/c2r.sv rtl/dense_layer.sv rtl/argmax.sv rtl/nn_receiver.sv \
  tb/tb_nn_receiver.sv --top-module tb_nn_receiver -Mdir obj
./obj/Vtb_nn_receiver
```

For another testbench, swap the last file and the top module name
(`tb_nn_receiver_kf` also needs `tb/rx_kf_check.sv` before it). The
full-size design holds 10 752 hardwired multipliers. Verilator needs about
3 to 6 minutes and some 14 GB of compiler memory to build it, while the
simulation itself takes under a second. The
reduced-size test builds in about 15 seconds. Synthesis of the full size is
also slow, for the same reason.
