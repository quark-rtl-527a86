# QUARK nonlinear unit in SystemVerilog

Quantized transformers spend a growing share of their time in the nonlinear
operators — Softmax, GELU and LayerNorm — once the matrix multiplications run
in INT8 or lower. QUARK (Zhao, Li, Liu et al., "QUARK: Quantization-Enabled
Circuit Sharing for Transformer Acceleration by Exploiting Common Patterns in
Nonlinear Operations") observes that all three can be rewritten in terms of
the same few sub-operators:

* `exp` and `ln`, each approximated with shifts, adds and a second-order
  polynomial;
* division, done in the log domain as `a / b = exp(ln a − ln b)`;
* a maximum tree and an adder tree.

GELU becomes a two-element Softmax (`sigmoid(z) = Softmax([0, −z])[0]`).
LayerNorm's mean, variance and normalisation become log-domain divisions.
One Softmax datapath can therefore serve all three operators, one operator at
a time (time-division multiplexing). A group quantizer behind the datapath
turns the results into low-bit codes. Each channel group has its own scale,
and every group scale is a power-of-two multiple of one base scale, so
realigning the groups costs only shifts.

This repository is an RTL rendering of that hardware. Where the published
description is silent (word widths, lane count, handshakes, the controller),
the choices made here are marked as such below and in each file's header.

## 1. The arithmetic

All vector data is 16-bit two's complement Q8.8. An INT8 activation with a
power-of-two scale enters by a shift. Logarithms and polynomial arithmetic
use 12 fractional bits (Q.12). Adder trees accumulate in 40 bits. The shared
constants live in `rtl/quark_pkg.sv`.

**exp** (`appro_exp`). For the exponent `x`:

1. `xs = x + (x>>>1) − (x>>>4)` is `x·log2(e)`, using `log2 e ≈ 1.0111b`.
2. `qI = ceil(xs)` and `qF = xs − qI`, so `qF` lies in (−1, 0].
3. The result is `2^qF · 2^qI`:
   * `2^qF ≈ 0.1713·qF² + 0.6674·qF + 0.998` in Q.12;
   * `2^qI` is a shift.

Positive exponents are allowed (left shift, saturating), because the log
divider needs them.

**ln** (`appro_ln`):

1. A leading-one detector gives `qM`, the integer part of `log2 x`.
2. Shifting `x` by `qM` gives the mantissa `qN ∈ [1, 2)`.
3. `log2 x = qM − 0.3369·qN² + 1.995·qN − 1.65`.
4. `ln x = l − (l>>>2) − (l>>>4)`, using `ln 2 ≈ 0.1011b`.

**division** (`log_divider`). `a / b = exp(ln a − ln b)`.

The two base conversions do not cancel exactly: `1.4375 × 0.6875 = 0.988`.
So a quotient `r` comes out as roughly `r^0.988`, with the polynomial error on
top. The testbenches measure these accuracies:

| function | accuracy checked |
|---|---|
| `exp(x)`, x in [−8, 0] | absolute error ≤ 0.01 |
| `ln(x)`, x in 2^−12 … 2^27 | error ≤ 0.03 + 1 % of \|ln x\| |
| `a/b`, quotient 0.25 … 200 | relative error ≤ 8 % |
| Newton `sqrt` | relative error ≤ 6 % (+0.02) |

## 2. The shared Softmax datapath (`softmax_core`)

The datapath is one combinational pass over N lanes (N = 384 by default).
Its stages follow the published block diagram:

```
x ─► MaxComparatorTree ─► N/2 MUX ─► Parallel-Subtractor ─► Appro-Exp (N) ─► N MUX
      (global max)       (global /     d_i = x_i − m                        (exp / raw x)
                          pair max)                                             │
y ◄─ Appro-Exp (N) ◄─ Parallel-Subtractor ◄─ N/2 MUX ◄─ Appro-LN (N/2) ◄─ AdderTree
                       z_i = d_i − ln S       (root /     on root sum or     (root sum and
                       or ln S − ln n         pair ln)    N/2 pair sums      pair sums)
```

What `mode` changes:

* **Softmax.**
  `y_i = exp((x_i − max) − ln Σ_j exp(x_j − max))` over the lanes that
  `lane_en` enables. Masked lanes output 0. There is no divider and no lookup
  table.
* **GELU.** The lanes work as N/2 independent pairs `(2k, 2k+1)`.
  * The maximum is taken per pair: the first N/2 MUX.
  * The sum is taken per pair, from the adder tree's first level.
  * The logarithm comes from the pair's own Appro-LN unit. That is why there
    are N/2 Appro-LN units: N/2 − 1 serve only GELU, and unit 0 also takes
    the root sum in the other modes.
  * `gelu_pre` fills each pair with `[0, −1.702·x_k]`, so lane 2k returns
    `sigmoid(1.702·x_k)`.
  * `gelu_post` multiplies by `x_k`. Where `|x_k| ≥ 2.4` it substitutes
    `ReLU(x_k)`, since GELU is almost linear there.
  * Up to N/2 = 192 GELU inputs are processed per pass.
* **LN.** The N MUX feeds the raw `x` (not its `exp`) into the adder tree.
  The second subtractor forms `ln|Σx| − ln n`, and the last exp row turns
  that into `|mean|`; the sign is then restored. Every lane carries the mean.

## 3. LayerNorm around the core (`layernorm_unit`, `newton_sqrt`)

LayerNorm needs no second pass over the data:

```
mean    = core in LN mode                            (cycle 1)
E(x²)   = exp(ln Σ x_i² − ln n)                      (per-lane squarers + adder tree)
Var     = E(x²) − mean²                              (clamped at 0)
std     = Newton: s ← (s + Var/s) >> 1, with Var/s by log division,
          s0 = 2^floor(log2(Var)/2); stops when s stops changing, at most 10 steps
y_i     = sign(x_i − mean) · exp(ln|x_i − mean| − ln std)
```

`ln std` is computed once and shared by all lanes.

The single-pass variance has a cost. When the mean is not small next to the
spread, `E(x²)` and `mean²` are close, and their few-percent approximation
errors no longer cancel. For rows with a near-zero mean the outputs are
within about 12 % (+0.06) of exact LayerNorm. For rows with a sizeable mean
the testbenches allow 25 % (+0.1). A larger offset makes it worse.

The affine `γ·y + β` shown in the published diagram's formula is not
applied. It is a per-channel scale and bias that belongs in the next
quantizer or layer.

## 4. Timing and time-division multiplexing (`quark_nonlinear_unit`)

The unit takes one request (`in_valid`/`in_ready`): `mode`, a row `x` and the
number of valid lanes `n`. It runs the request on the single core and pulses
`out_valid`. Latencies are counted in clock edges, from the accepting edge to
the edge that raises `out_valid`, both included:

| operation | latency |
|---|---|
| Softmax (row of ≤ N) | 2 |
| GELU (≤ N/2 inputs) | 2 |
| LayerNorm (row of ≤ N) | 7 + Newton iterations (≤ 17) |

The LayerNorm schedule is:

1. the core computes the mean;
2. the variance is registered;
3. the Newton iterations run, one per clock;
4. `std` is registered;
5. the outputs are registered.

The core is idle while the square root runs. This design does not overlap
requests.

## 5. Group quantization (`group_quant_unit`)

Channels are reordered offline, so each quantization group is simply a set of
lanes, given by `lane_grp`. The unit then works in three stages, one cycle in
total:

1. **Scale allocation.** `S = 2^s`, with
   `s = max(0, ceil(log2(Max − Min)) − bits)`. Group g uses
   `S_g = 2^alpha_g · S`. Max, Min, bits and alpha come from offline
   calibration.
2. **Intra-group quantization.**
   `q_i = clip(round(x_i / S_g), 0, 2^bits − 1)`. The division is a rounding
   right shift by `s + alpha_g`.
3. **Cross-group alignment.** `x_int = S · Σ_i (q_i << alpha_g(i))`: each
   code is brought back to the base scale by a shift before the sum.

`bits` can be 1–8 at run time, which covers the 8-, 6- and 4-bit activation
settings evaluated for QUARK.

## 6. The whole design (`quark_top`)

`quark_top` puts the unit behind a `shared_buffer` (16 words × 384 lanes ×
16 bits, two ports). Port A belongs to the host accelerator's PE array, which
is not part of this design and appears only as ports. A command names:

* the operation;
* the source and destination words;
* the number of valid lanes;
* whether to write back the Q8.8 result or the group-quantized codes
  (zero-extended to 16 bits).

The controller then steps through: read the source word, run the unit, run
the quantizer, write the destination, pulse `done`. A command takes the unit
latency + 5 cycles. The aligned sum `res_x_int` and the scale exponent
`res_s` of the last command are available as outputs. Port A stays usable
throughout. If both ports write the same word in the same cycle, port A wins.

## 7. Sizes

| parameter | default | origin |
|---|---|---|
| N (lanes) | 384 | this design: one ViT-S/DeiT-S hidden row, or a 197-token attention row |
| buffer depth | 16 words | this design |
| groups NG | 4 | this design (QUARK picks the group count per layer offline) |
| code width QW | 8 | the highest activation precision evaluated (8 bits) |
| Newton iterations | ≤ 10 | the published convergence bound |

Softmax and LayerNorm need the whole row in one pass. So, with N = 384:

* **Fit:** DeiT-Tiny (192 channels, 197 tokens) and ViT-S/DeiT-S (384
  channels).
* **Do not fit:** LayerNorm rows of 768 channels (ViT-B, DeiT-B, BERT-Base,
  RoBERTa-Base, the last Swin stages). They would need N = 768 or a
  multi-pass LayerNorm.

GELU is elementwise, so any length is processed in passes of 192. The model
sizes quoted here are those of the published models, not figures from the
QUARK description.

## 8. Where this RTL departs from, or fills in, the published design

* **exp coefficients.** The text and the block diagram disagree: 0.6674/0.998
  in the text, 0.6647/1 in the diagram. The text's values are used.
* **GELU formula.** One equation writes `1.702·x·Softmax(...)`; the definition
  and the diagram give `x·Softmax([0, −1.702x])`. The latter (=
  `x·sigmoid(1.702x)`) is implemented.
* **Softmax algorithm listing.** The listing takes the log of `Σ x'` and
  subtracts it from `exp(x')`. The defining equation, which is followed here,
  takes the log of `Σ exp(x')` and subtracts it from `x'`.
* **Quantizer clip.** The diagram clips codes to `[0, 2^bits − 1]`, while the
  text describes a signed clamp `sign(z)·Qmax` for outliers. The diagram is
  followed, so negative values (LayerNorm outputs, the GELU negative lobe)
  quantize to 0 with these settings.
* **Scale S** is rounded up to a power of two, so that the "Div" of the
  diagram is a shift. The description calls for shift-and-add-only hardware
  but does not say how S is formed.
* **Choices of this design.** The lane count, all word widths, the
  lane-enable masks for short rows, the per-lane squarers for `Σx²`, the
  Newton stop rule, all handshakes, the shared buffer's organisation and the
  command controller.
* **Not built.** The PE array and the offline steps: channel reordering,
  group-size search and calibration. The offline steps are software; their
  results enter as configuration (`cfg_grp`, `cfg_alpha`, `cfg_qmax`,
  `cfg_qmin`, `cfg_qbits`).

## 9. Files

`rtl/` (one module or package per file):

| file | block |
|---|---|
| `quark_pkg.sv` | formats, coefficients, `mode_e` |
| `appro_exp.sv`, `appro_ln.sv`, `log_divider.sv` | shift-add exp, ln, division |
| `max_tree.sv`, `adder_tree.sv` | reduction trees |
| `softmax_core.sv` | shared three-mode datapath |
| `gelu_pre.sv`, `gelu_post.sv` | GELU input pairs; multiply / ReLU select |
| `newton_sqrt.sv`, `layernorm_unit.sv` | LayerNorm back end |
| `quark_nonlinear_unit.sv` | time-multiplexed unit |
| `group_quant_unit.sv` | group quantizer |
| `shared_buffer.sv` | two-port vector buffer |
| `quark_top.sv` | top level |

`tb/` holds one self-checking testbench per block (`tb_<module>.sv`), plus:

* `tb_quark_top_full.sv`, which runs the top at its default size;
* `quark_ref_pkg.sv`, integer reference models of exp/ln used for bit-exact
  checks.

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and has a cycle
watchdog. The tests use small instances (10–16 lanes), except
`tb_quark_top_full`. They check in four ways:

* Arithmetic blocks: bit for bit against the reference models, and against
  real-valued math within the tolerances above.
* Sequential blocks: cycle counts.
* `tb_quark_top`: drives 240 random rows per mode through the buffer. It
  counts every mechanism and fails if any never occurs: the three modes, the
  ReLU branch, masked lanes, early and capped square-root stops, quantized
  write-back, clipping, and PE traffic during a command.
* `tb_quark_top_full`: runs the default 384-lane build on a 197-token
  Softmax, 192 GELU inputs, a 384-channel LayerNorm and a quantized
  write-back.

## 10. Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/quark_pkg.sv tb/quark_ref_pkg.sv tb/tb_softmax_core.sv \
    --top-module tb_softmax_core -Mdir obj_softmax
./obj_softmax/Vtb_softmax_core
```

Replace `softmax_core` with any other block name. The full-size test
(`tb_quark_top_full`) takes about two minutes to compile and under a second
to run. To change the lane count, override `N` on `quark_top`; it must be
even. The number formats are set in `quark_pkg`. `FRAC` and `CF` are used
consistently throughout, but only the defaults have been verified.
