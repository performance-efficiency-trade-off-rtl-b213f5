# Exact multiply-accumulate neurons for 5- to 8-bit posit, float and fixed point

Low-precision DNN inference usually loses accuracy in two places: when
weights and activations are squeezed into a narrow format, and again every
time a partial sum is rounded back to that format. This design removes the
second loss. Each neuron multiplies its narrow operands exactly and adds the
products, exactly, into a wide fixed-point register (a Kulisch accumulator,
called the *quire* for posits). The sum is rounded once, after the last
product.

The same neuron structure is built for three 8-bit-class formats so that they
can be compared at equal bit width:

* **posit** (n bits, es exponent bits): the main configuration, 8-bit with
  es = 1;
* **floating point** (1 sign bit, w_e exponent bits, w_f fraction bits), with
  subnormals and without infinities or NaNs;
* **fixed point** (n-bit two's complement, Q fraction bits).

The top is a fully-connected layer of such neurons (`dp_dense_layer`). Its
defaults are ten 8-bit posit neurons (es = 1), with accumulators sized for
784-term dot products: one MNIST image per neuron.

The architecture, the EMAC data paths and the accumulator-width rule follow
the published "Deep Positron" EMAC designs. The RTL here is an independent
SystemVerilog rendering of them. The sections below mark where it deviates.

---

## 1. Number formats and their ranges

| format | value of a bit pattern | largest magnitude `max` | smallest magnitude `min` |
|---|---|---|---|
| fixed (n, Q) | `int(x) * 2^-Q` | `2^-Q (2^(n-1) - 1)` | `2^-Q` |
| float (w_e, w_f) | `(-1)^s 2^(E-bias) 1.f`; `E = 0`: `2^(1-bias) 0.f` | `2^(expmax-bias) (2 - 2^-w_f)` | `2^(1-bias-w_f)` |
| posit (n, es) | `(-1)^s useed^k 2^e 1.f`, `useed = 2^(2^es)` | `useed^(n-2)` | `useed^-(n-2)` |

For floats, `bias = 2^(w_e-1) - 1` and `expmax = 2^w_e - 2`. An all-ones
exponent field is an ordinary finite number in this design. Results, however,
are clipped at `max`, which uses `expmax`.

A posit has a sign bit and then a *regime*: a run of equal bits ended by the
opposite bit. A run of m ones gives k = m - 1, and a run of m zeros gives
k = -m. Next come up to es exponent bits and then the fraction. Negative
posits are the two's complement of the positive pattern. `0...0` is zero. No
special meaning is given to `10...0` (Not-a-Real): every operand is assumed
to be real.

## 2. Sizing the accumulator

A dot product of k terms needs

    w_a = ceil(log2 k) + 2 * ceil(log2(max/min)) + 2

bits for its fixed-point sum to be exact. `dp_pkg` computes
`ceil(log2(max/min))` in closed form for each format:

| format | ceil(log2(max/min)) | w_a for k = 784, 8 bits | LSB weight |
|---|---|---|---|
| fixed, Q = 5 | n - 1 | 26 | 2^-2Q |
| float, w_e = 4, w_f = 3 | expmax + w_f | 46 | min^2 = 2^-18 |
| posit, es = 1 | 2^es * 2(n-2) | 60 | minpos^2 = 2^-24 |

The accumulator's least significant bit always weighs `min^2`. Every posit is
a whole multiple of minpos, and every float a whole multiple of min, so the
product of any two operands is a whole number of LSBs. Nothing is lost before
the final rounding. `K` is the parameter for k. It only sets `w_a`; a dot
product of any length up to K may be streamed.

## 3. Pipeline, interface and timing

All three EMACs (`fixed_emac`, `float_emac`, `posit_emac`) share one port
list and one timing:

| port | dir | meaning |
|---|---|---|
| `in_ctl.valid` | in | an operand pair is presented this cycle |
| `in_ctl.first` | in | first pair of a dot product; `bias` is sampled with it |
| `in_ctl.last` | in | last pair of a dot product |
| `weight`, `activation`, `bias` | in | n-bit operands in the neuron's format |
| `out_valid` | out | one-cycle pulse: `result` holds a finished dot product |
| `result` | out | rounded `bias + sum(weight*activation)`; held until the next product is accumulated |

`in_ctl` is the packed struct `dp_pkg::emac_ctl_t`. Reset is asynchronous
and active low (`rst_n`). It clears the pipeline registers and the
accumulator.

Stages:

1. **Multiply.** Decode the operands, form the exact product, and register it
   together with the bias and `in_ctl`.
2. **Accumulate.** Shift the product onto the accumulator grid and add it.
   On a `first` pair, the addend is the aligned bias instead of the old
   accumulator contents, so no separate clear cycle is needed.
3. **Round.** This stage is combinational from the accumulator: normalise,
   round to nearest (ties to even), clip to the format's range, and encode.

`dp_neuron` adds a fourth, registered stage: ReLU for hidden-layer neurons, or
a plain register for output neurons.

```
cycle              0     1     2     3     4     5     6     7
in_ctl             F     v     L     F     L     -     -     -
stage-1 register         p0    p1    p2    p3    p4
accumulator                    b+p0  +p1   +p2   b'+p3 +p4
EMAC out_valid                             1           1
neuron out_valid                                 1           1
```
(F = valid and first, v = valid, L = valid and last, p = product,
b and b' = the two biases.)  In cycle 4 the accumulator holds b+p0+p1+p2,
the finished first dot product; in cycle 6 it holds b'+p3+p4.

One operand pair is accepted every cycle. A new dot product may start on the
cycle right after the previous one's `last`; its bias load cannot disturb the
finished result, because that result has already been registered by the
neuron's fourth stage. If the EMAC is used alone, `result` is valid on the
`out_valid` cycle and is overwritten when the next product is accumulated.

## 4. The posit EMAC in detail

This is the main configuration and the most involved data path.

**Decode (`posit_decode`).** This follows the classic extraction sequence:
1. Take the two's complement of a negative input.
2. The first regime bit `rc` tells whether the regime is a run of ones or of
   zeros.
3. Invert the word when `rc = 1`, so the run becomes leading zeros. An LZD
   (`lzd`) counts them as `zc`. `zc` is at least 1, because the inverted top
   bit is always 0.
4. Shift the bits after the first two regime bits left by `zc - 1`. This
   removes the rest of the regime and its terminator.
5. The top es bits are then the exponent. The remaining n-3-es bits are the
   fraction; the hidden bit on top of them is "input is nonzero".
6. The regime is `k = rc ? zc-1 : -zc`. The decoder outputs the combined
   scale factor `sf = k*2^es + e`, `clog2(n)+2+es` bits, signed.

Missing exponent bits, cut off by a long regime, read as zeros.

**Multiply.**
- `frac_w * frac_a` is a 2(n-2-es)-bit product with two integer bits.
- It is negated when the two signs differ, giving 2(n-2-es)+1 bits.
- It is registered with `sf_w + sf_a`.
- The product is not renormalised (see §8).

**Into the quire.**
- The product is worth `fracs * 2^(sf - 2FW)`, where FW = n-3-es.
- It is shifted left by `sf + L` on a grid 2FW bits finer than the quire,
  where `L = 2^es*2(n-2)` and the quire LSB is `2^-L`. The low 2FW bits are
  then dropped. They are always zero, because posit products are multiples
  of minpos². The finer grid only keeps every shift amount non-negative.
- The bias is decoded in stage 2 and placed the same way, with shift
  `sf_b + L + FW`.

**Rounding and encoding (`posit_encode`).**
- The quire is turned into sign and magnitude. An LZD finds the leading one at
  bit p, so the result's scale factor is `sf = p - L`.
- If `sf` is above `(n-2)*2^es`, the result is maxpos. If it is below the
  negative of that, the result is minpos: posits neither overflow nor
  underflow to zero.
- Otherwise `k = floor(sf / 2^es)` and `e = sf mod 2^es`. The whole bit string
  regime|exponent|fraction is made with one shift:
  - start from `10 e f…` and shift right arithmetically by k (k ≥ 0), which
    yields k+1 ones and then a 0;
  - or start from `01 e f…` and shift right logically by -k-1 (k < 0), which
    yields -k zeros and then a 1.
- The top n-1 bits are the body, the next bit is the guard, and everything
  below is sticky.
- The body is rounded to nearest, ties to even. Rounding is done on the bit
  string, which is how posits define rounding. Where exponent bits are cut
  off, the rounding midpoint is therefore not the arithmetic mean of the two
  neighbours.
- A round-up cannot carry into the sign. With the largest regime the guard is
  the regime's terminating 0, and below that the all-ones body is maxpos.
- Negative results are two's complemented.

## 5. The float EMAC in detail

**Subnormals.** An exponent field of 0 means no hidden bit and an effective
exponent of 1.

**Multiply.** The product exponent is

    e_p = e_w + e_a + sub_w + sub_a + 1

It is at least 3 and fits in w_e+1 bits. The (2w_f+2)-bit mantissa product,
the sign and e_p (2w_f+w_e+4 bits in all) are registered.

**Accumulate.** The product is two's complemented and shifted left by
`e_p - 3`. The bias mantissa, padded with w_f zero bits, is shifted by
`e_b + sub_b + bias + 1 - 3`. Both then sit on the `min^2` grid.

**Convert back.**
1. Take the magnitude and find its leading one p with the LZD.
2. The hidden-bit position is `h = max(p, p_min)`, where
   `p_min = bias + 2w_f - 1` is where the smallest normal's hidden bit sits.
   The exponent field is `p - p_min + 1`, or 0 for subnormals.
3. The w_f bits below h are the mantissa, then the guard bit, then the sticky
   bits.
4. `{exponent, mantissa} + round` lets a mantissa overflow carry into the
   exponent. This also turns the largest subnormal into the smallest normal.
5. Anything beyond `max` is clipped to `±max`.

A sum that rounds to zero from below gives the pattern `1 0000 000`
(negative zero).

## 6. The fixed-point EMAC

The 2n-bit product is sign-extended to w_a bits. The bias is shifted left by
Q, so that its Q fraction bits line up with the products' 2Q.

The result is rounded to nearest even at bit Q and then saturated to
`[-2^(n-1), 2^(n-1)-1]`. Saturation is checked after rounding, on the full
accumulator, so no sum can wrap.

## 7. Neuron and layer

`dp_neuron` generates exactly one of the three EMACs from its `FMT`
parameter (`FMT_POSIT`, `FMT_FLOAT`, `FMT_FIXED`).

With `RELU = 1`, the fourth stage clears any result whose sign bit is set. In
all three formats, zero is the all-zeros pattern and the sign is the top bit.

`dp_dense_layer` (the top) puts `M` neurons side by side:
- one activation per cycle is broadcast to all of them;
- each neuron gets its own weight for that activation on `weight[j]`, and its
  bias on `bias[j]` with the first activation;
- the M results come out together three cycles after the last activation;
- an assertion checks that all neurons finish in the same cycle.

A network is a chain of layers: stream one layer's outputs, one per cycle,
into the next layer as activations. A layer wider than M is run as several
passes with new weights. The storage of weights and biases and the sequencing
of layers are outside this RTL. They enter through the top's ports.

Parameters of `dp_neuron` / `dp_dense_layer` (defaults in brackets):

- `FMT` [`FMT_POSIT`]
- `N` [8]
- `ES` [1], posit only
- `WE` [4], float only; w_f is N-1-WE
- `Q` [5], fixed only
- `K` [784]
- `M` [10], layer only
- `RELU` [1]

Size limits of the data paths:
- posit needs N ≥ ES+4;
- float needs at least one fraction bit.

Every configuration at 5 to 8 bits used in the format comparison meets
these: posit es ∈ {0,1,2}, float w_e ∈ {3,4}, fixed Q from 1 to 6.

## 8. Where this RTL departs from the published description

* **Posit product normalisation.** The published algorithm shifts the
  fraction product right by its top bit and adds that bit to the scale
  factor. A one-bit right shift can drop a set low bit, which would make the
  EMAC inexact. The same algorithm also negates the *unshifted* product when
  placing it in the quire. Here the product keeps both integer bits, and the
  shift into the quire accounts for them. The result is exact.
* **Fixed-point overflow test.** The published positive-overflow condition
  inspects `sum[MSB-1 : n+Q]`; the negative one inspects `sum[MSB-1 : n+Q-1]`.
  The positive form misses the result's own sign bit. Here both directions
  use the full range check, applied after rounding.
* **Float conversion back.** The published conversion omits overflow
  handling and assumes a fixed position of the leading one. Here it handles
  any position, subnormal results and clipping at max.
* **Float bias alignment.** The bias mantissa is padded with w_f zero bits
  before its shift, so that it lands on the `min^2` grid. The published block
  diagram's widths do not show this padding.
* **Posit rounding/encoding.** The result is the same round-to-nearest-even
  posit encoding. It is built with one shift of a regime|exponent|fraction
  string rather than the published two-candidate (`tmp1`/`tmp2`) scheme.
* **Stage 3** is combinational from the accumulator, as in the block diagrams.
  The "three pipeline stages" are multiply | accumulate | round, with
  registers after the first two.
* **Own choices:**
  - the valid/first/last handshake;
  - the asynchronous reset;
  - sampling the bias with the first operand pair;
  - round-to-nearest-even in the fixed-point EMAC;
  - the defaults K = 784 and M = 10;
  - the broadcast-activation layer organisation.

## 9. Verification

Every testbench is self-checking. Each builds its expected values from exact
128-bit integer arithmetic (`tb/dp_ref_pkg.sv`), and shares no structure with
the RTL:
- the reference decoders scan patterns bit by bit;
- posit rounding is checked against the (n+1)-bit posit midpoints between
  neighbours;
- float rounding is checked by searching the whole code space.

Each testbench also checks latency and ends with a `TB_RESULT checks=…
failures=…` line.

| testbench | what it covers |
|---|---|
| `tb_lzd` | 60-bit and 8-bit LZD, single-one and random words, exhaustive at 8 bits |
| `tb_posit_decode` | every 8-bit pattern at es = 0, 1, 2 |
| `tb_posit_encode` | at es = 0, 1, 2: every rounding midpoint between adjacent 8-bit posits, exactly and one quire LSB either side, both signs; exact values, zero, beyond maxpos, below minpos |
| `tb_fixed_emac`, `tb_float_emac`, `tb_posit_emac` | 300 random dot products each, back to back and with gaps; directed 784-term max×max (clip), exact cancellation, min×min, negative clip. Clip, round, zero and back-to-back must each occur |
| `tb_dp_neuron` | all three formats plus a posit output neuron in lock step; ReLU clearing and negative pass-through |
| `tb_dp_dense_layer` | three 10-neuron layers (one per format) plus a posit output layer fed by the default layer, i.e. a two-layer network; one full 784-input dot product, then 64 more. Float subnormal results are forced |
| `tb_dp_full` | the top with no parameter changes: three 784-input dot products back to back, and one that drives the quire to its largest magnitude |
| `tb_workload_nets` | two default-size layers chained as a hidden and a class-score layer, with input fan-ins 4, 30, 117 and 784 (28 samples); every hidden value, score and predicted class checked |
| `tb_emac_sweep` | 36 format configurations (posit n 5–8 × es 0–2, float n 5–8 × w_e 3–4, fixed n 5–8 × Q 1–6), 150 dot products each |

To simulate with Verilator, pass the packages first. For example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/dp_pkg.sv tb/dp_ref_pkg.sv tb/dp_fmt_ref_pkg.sv rtl/lzd.sv \
  rtl/posit_decode.sv rtl/posit_encode.sv rtl/fixed_emac.sv rtl/float_emac.sv \
  rtl/posit_emac.sv rtl/dp_neuron.sv rtl/dp_dense_layer.sv \
  tb/tb_dp_dense_layer.sv --top-module tb_dp_dense_layer -o sim
./obj_dir/sim
```

Use the same command for the other testbenches, changing the top module.
`tb_emac_sweep` also needs `tb/emac_cfg_check.sv`. Every run finishes in
well under a minute. The simulator is two-state, so the testbenches reset or
initialise everything they read.

## 10. Evaluated workloads

The format study uses small feed-forward networks (three or four dense
layers) on five classification sets.

| data set | input fan-in (general knowledge) |
|---|---|
| Iris | 4 features |
| Wisconsin breast cancer | 30 features |
| Mushroom | about 117 inputs, one-hot encoded |
| MNIST | 784 pixels |
| Fashion MNIST | 784 pixels |

All of these fan-ins are within K = 784. The accumulators' 10 guard bits
leave room for up to 1024 terms including the bias. The hidden-layer widths
of those networks are not known here; layers wider than ten neurons take
several passes.

`tb_workload_nets` runs networks of these input shapes end to end. A hidden
layer at the default sizes feeds its ten outputs, one per cycle, into a
second layer with ReLU off, which produces the class scores. The weights and
inputs are random posits, because the trained parameters are not published.
So the test shows that the datapath computes the right values for networks
of these sizes. It says nothing about the accuracy those networks reach.

## 11. Files

`rtl/`:
- `dp_pkg.sv`: format enum, control struct, width functions
- `lzd.sv`
- `posit_decode.sv`
- `posit_encode.sv`
- `fixed_emac.sv`
- `float_emac.sv`
- `posit_emac.sv`
- `dp_neuron.sv`
- `dp_dense_layer.sv` (top)

`tb/`:
- `dp_ref_pkg.sv`, `dp_fmt_ref_pkg.sv`: reference arithmetic
- `emac_cfg_check.sv`: sweep helper
- one `tb_*.sv` per block, plus `tb_dp_full.sv`, `tb_workload_nets.sv` and `tb_emac_sweep.sv`
