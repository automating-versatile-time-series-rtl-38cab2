# Integer-only Tiny Transformer for time-series windows

This is a small Transformer encoder that does all its arithmetic in integers, sized for embedded FPGAs
of the Spartan-7 XC7S15 class (8,000 LUTs, 20 DSPs, 10 block RAMs). It takes a short window of
sensor samples (for example 24 traffic-flow readings) and returns a short vector. Depending on how
the model was trained, that vector is a one-step forecast, class scores, or a prediction whose
residual is compared with a threshold for anomaly detection. The hardware is the same for all
three tasks. Only the loaded numbers and the sizes differ.

The RTL follows the architecture and quantisation scheme of Ling, Qian, Haßler and Schiele,
"Automating Versatile Time-Series Analysis with Tiny Transformers on Embedded FPGAs". That work
generates VHDL per trained model. This is an independent SystemVerilog version of the same
accelerator, with one netlist per model size. Weights, tables and quantisation constants are
loaded at run time. Where the publication leaves something open, this RTL makes its own choice.
The section "What is this design's own" lists those choices.

## The computation

With `n` time steps, `m` input features, model width `d` (`D_MODEL`) and `k` outputs:

```
X [n,m] --Input Linear--> P [n,d] --(+ positional table)--> E [n,d]
E --One-head self-attention--> At [n,d]
BN1(At + E)                               -> H [n,d]      first residual + BatchNorm
FFN(H) = Linear(4d->d)(ReLU(Linear(d->4d)(H)))  -> F [n,d]
BN2(F + H)                               -> O [n,d]      second residual + BatchNorm
O --mean over time--> G [1,d] --Output Linear--> Y [1,k]
```

Self-attention has a single head, with Q, K and V projections and an output projection:
`At = softmax(Q K^T / sqrt(d)) V Wo + bo`. There is one encoder layer. BatchNorm comes after each
residual sum (post-norm). The FFN hidden width is `4d`.

Every weight matrix in the design carries a bias. Each BatchNorm has a learned scale and shift.
The positional encoding is a fixed table, not a trained one. With these counts, the parameter
totals come out at exactly 3329, 897, 1006, 20126, 1106 and 7465 for the six published
configurations, which confirms this reading of the architecture.

## Numbers: codes, zero points and multiply-and-shift

Every tensor between layers is a `b`-bit signed code (`DATA_W`, 4 to 8 bits). A code `q` stands
for the real value `S*(q-Z)`, where each tensor has its own scale `S` and zero point `Z`
(asymmetric quantisation). Weights are asymmetric codes too, with one zero point per layer.
Biases and the folded BatchNorm constants are symmetric (zero point 0) and are stored at the
scale of the layer's accumulator.

A layer works only on zero-point-corrected values. Take a linear layer as the example:

```
acc   = bias[o] + sum_i (x[i] - Zx) * (w[o][i] - Zw)           (32-bit)
y     = clamp( ((acc * M + 2^(N-1)) >>> N) + Zy , -2^(b-1), 2^(b-1)-1 )
```

The ratio of real scales `Sx*Sw/Sy` is replaced by a 16-bit multiplier `M` and a right shift
`N`. Rounding is half up, and the result saturates to the b-bit range. That multiply-and-shift
is the whole of the requantisation, and every block ends with it (`tt_pkg::requant`).

Real-valued factors fold into `M`:

- the attention scale `1/sqrt(d)`, in the score product;
- `1/n` of the average pooling;
- the BatchNorm variance, in the BatchNorm gain.

Some blocks need more than one multiplier:

- **Residual and positional adds.** The two operands have different scales, so each gets its own
  multiplier and shift before they are summed: `y = clamp(rq_a(a-Za) + rq_b(b-Zb) + Zy)`.
- **ReLU.** A real 0 is the code `Zy`, so the ReLU is `max(y, Zy)` on the code.

The constants (`M`, `N` and the zero points) come from quantisation-aware training. How to compute
`M` and `N` from the scales is up to the tool flow. Choosing `N` as large as possible with `M`
still below 2^15 is the usual rule.

## Integer softmax

The softmax turns a row of b-bit score codes into b-bit probabilities without any real
arithmetic:

1. Find the row maximum `mx`.
2. For each score, `e = LUT[mx - s]`. Both codes are b-bit, so the difference lies in
   `0 .. 2^b-1` and the table has `2^b` entries. `LUT[t] = round((2^16-1) * exp(-t*Ss))` for the
   score scale `Ss`, so it is loaded with the model. Sum the `e` values.
3. Compute `q = floor(2^30 / sum)` once per row, with a shift-subtract divider (31 cycles).
4. Each output is `p = round(e * (2^b-1) * q / 2^30)`, saturated at `2^b-1`, and written as
   `p - 2^(b-1)`.

The output encodes a probability with scale `1/(2^b-1)` and zero point `-2^(b-1)`. This is what the
asymmetric quantiser gives for the range [0, 1], so the next layer (A·V) uses `Za = -2^(b-1)`.

A row costs `3n + 34` cycles: three passes over the row, the divider, and the pipeline.

## How it executes

The accelerator computes one layer at a time. Each layer block is a single
multiply-accumulate loop:

- Cycle *t* issues the addresses of one operand pair.
- Cycle *t+1* multiplies and accumulates.
- After the last term, the requantised result is written to the next buffer.

Between consecutive layers sits a `tensor_buffer`, a simple dual-port RAM with one write port and
a one-cycle registered read port. A sequencer starts each step when the previous step reports
`done`. There are three sequencers: one in the top, one in the encoder layer and one in the
attention block.

Because only one layer runs at a time, one multiplier per block is enough. The total cycle count
is close to the number of multiply-accumulates in the model. Per block, from `start` to `done`:

| block | cycles |
|---|---|
| linear, rows×in→out | rows·in·out + 1 |
| matmul, rows×inner×cols | rows·inner·cols + 1 |
| add, batchnorm, avg-pool over `len` elements | len + 1 |
| softmax, n×n | n·(3n + 34) |
| FFN | 2·(n·d·4d + 1) + 2 |
| each sequencer step | block + 2 |

With the defaults (n=24, m=1, d=16, k=1), one inference takes **97,462 cycles**, or 0.975 ms at
100 MHz. The same formula, checked in simulation, gives the following for the published
configurations:

| workload | b | n | m | d | k | cycles | ms @100 MHz | published latency, ms |
|---|---|---|---|---|---|---|---|---|
| PeMS forecast (default) | 6 | 24 | 1 | 16 | 1 | 97,462 | 0.975 | 1.203 |
| AirU forecast | 8 | 24 | 1 | 8 | 1 | 31,598 | 0.316 | 0.570 |
| UCIHAR classes | 8 | 32 | 9 | 8 | 6 | 49,062 | 0.491 | 1.034 |
| WISDM classes | 6 | 50 | 3 | 40 | 6 | 1,187,494 | 11.875 | 12.04 |
| ALFA anomaly | 4 | 24* | 17 | 8 | 10 | 34,742 | 0.347 | 0.527 |
| SKAB anomaly | 6 | 24* | 8 | 24 | 1 | 204,222 | 2.042 | 2.261 |

\* The window length is not stated for these datasets, so 24 is assumed.

For AirU, `m` = 1 is inferred from the parameter count. The published text says seven features,
which would give 945 parameters rather than 897.

The large models agree within about 2 to 10%, which suggests that the original accelerator is
also a sequential one-MAC-per-layer design. The small models take relatively longer in the
original, consistent with a fixed per-layer overhead that this RTL does not have.

## Loading a model and running a window

All ports of `tiny_transformer` are plain signals.

- **Parameter port** (`cfg_we`, `cfg_sel[7:0]`, `cfg_addr[15:0]`, `cfg_data[31:0]`). Write one
  32-bit word per cycle. `cfg_sel` picks the target, and the low bits of `cfg_data` are used.
- **Input window** (`x_we`, `x_addr`, `x_data`). Write code `x[t][f]` at address `t*N_FEAT + f`.
- **Run.** Pulse `start` for one cycle while `busy` is low. `busy` stays high until `done` pulses
  for one cycle. The input buffer may be rewritten as soon as `done` has been seen. An assertion
  flags a `start` while `busy`.
- **Result.** Set `y_addr`. `y_data` follows one clock later and holds the output code `y[k]`.

Targets of `cfg_sel` (constants in `tt_pkg`):

| sel | target | sel | target |
|---|---|---|---|
| 0 | input linear | 16+0..6 | attention: Q, K, V linear, scores, softmax table, A·V, output linear |
| 1 | positional add | 16+8 / 16+9 | first residual add / first BatchNorm |
| 2 | positional table (`t*d + i`) | 16+10 / 16+11 | FFN layer 1 (ReLU) / layer 2 |
| 32 | average pooling | 16+12 / 16+13 | second residual add / second BatchNorm |
| 33 | output linear | | |

The word layout inside a target:

- **linear (in→out).** Weights `w[o][i]` at `o*in + i`; biases at `out*in + o`; then
  `Zx, Zw, M, N, Zy` at `out*in + out + 0..4`.
- **matmul.** `Za, Zb, M, N, Zy` at words 0 to 4. In the scores, `M` includes `1/sqrt(d)`.
- **add.** `Za, Zb, Ma, Na, Zy, Mb, Nb` at words 0 to 6.
- **BatchNorm (d features).** Gains at `0..d-1` (b-bit, symmetric); biases at `d..2d-1` (32-bit);
  then `Zx, -, M, N, Zy` at `2d + 0..4`.
- **average pooling.** `Zx, -, M, N, Zy` at words 0 to 4. `M` includes `1/n`.
- **softmax.** Table entries `LUT[0 .. 2^b-1]`, 16 bits each.

Reset is synchronous and active low. It clears the quantisation constants and the control state.
Memories (weights, tables, activation buffers) are not reset, and a model must be loaded after
power-up.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `DATA_W` | 6 | bits per code (`b`); the published search used 4, 6 and 8 |
| `N_STEPS` | 24 | window length `n` |
| `N_FEAT` | 1 | input features `m` |
| `D_MODEL` | 16 | model width `d`; the FFN is `4d` wide |
| `N_OUT` | 1 | outputs `k` |

The defaults are the PeMS forecasting configuration. The softmax has its own `EXP_W` (16) and
`RECIP_FRAC` (30). The accumulator is 32 bits and the multiplier 16 bits (`tt_pkg`).

At the defaults, coarse synthesis of the top gives:

- about 1,800 word-level cells;
- 3,500 flip-flop bits;
- 72 kbit of memory (weights, biases and the activation buffers).

Of those 72 kbit, the 32-bit biases account for a good part.

Each layer block has its own multiply-accumulate unit and its own requantisation multiplier.
That is about 35 multipliers in all, though most are only 6×6 bits. The published XC7S15 builds
use 13 to 20 DSP slices. Fitting that budget means placing the narrow products in LUTs, or
sharing one MAC among the layers, which run one at a time anyway. Timing closure at 100 MHz has
not been attempted. The requantisation multiply-shift-clamp sits in the same cycle as the last
accumulate and would be the first place to add a pipeline register.

## What is this design's own

The original work names the blocks and the quantisation rules. It does not describe their
implementation. The following are choices of this RTL:

- **Schedule.** There is one multiply-accumulate per layer, layers run one after another, and Q,
  K and V are computed one after another.
- **Requantisation.** It is the 16-bit multiplier and shift described above, with half-up
  rounding and saturation. Each add has two multipliers.
- **Softmax.** The scheme (table, per-row reciprocal) is this design's own. The original work does
  not describe its softmax.
- **FFN activation.** ReLU. None is stated in the original work.
- **BatchNorm.** It is folded into a gain and a bias per feature.
- **Positional encoding.** A fixed table, loaded like a weight, rather than hard-wired.
- **Constants.** Everything is loadable at run time, where the original generator bakes constants
  into the generated HDL.
- **Host interface.** A plain parallel port. On the original boards, an RP2040 microcontroller
  talks to the FPGA over a link that is not described, and that link is not part of this RTL.
- **Task-specific parts.** Thresholding for anomaly detection and the arg-max for classification
  happen outside the accelerator, as in the original work.

Nothing here reproduces the published accuracy figures. The testbenches use random weights,
because the trained models are not available.

## Verification

Every block has a self-checking testbench in `tb/`, named after the module with the suffix `_tb`.
The testbenches compare every word the hardware writes with an independent 64-bit reference model
of the same integer arithmetic, in `tb/tt_ref_pkg.sv`. They also check the exact cycle count
from `start` to `done`.

- `tiny_transformer_tb` runs the default-size top end to end:
  - two random models, with a full reload between them;
  - two windows per model;
  - a check of the encoder output buffer and of the final output.

  It also requires that output saturation, ReLU clipping, back-to-back inferences and model
  reloads all occur.
- `tt_workload_tb` builds the top at the sizes of the other five workloads (table above) and
  checks them in parallel.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tiny_transformer_tb \
  -y rtl -y tb +libext+.sv rtl/tt_pkg.sv tb/tt_ref_pkg.sv tb/tiny_transformer_tb.sv
./obj_dir/Vtiny_transformer_tb
```

Each testbench ends with `TB_RESULT checks=<n> failures=<n>`. The default-size run takes a few
seconds. The workload run takes under a minute, mostly for WISDM's 1.2 million cycles.

## Files

| file | contents |
|---|---|
| `rtl/tt_pkg.sv` | shared widths, `rq_t`, parameter-port numbering, `requant` |
| `rtl/tensor_buffer.sv` | activation buffer (dual-port RAM) |
| `rtl/qlinear.sv`, `qmatmul.sv`, `qsoftmax.sv`, `qadd.sv`, `qbatchnorm.sv`, `qgap.sv` | layer blocks |
| `rtl/ohsa.sv`, `ffn.sv`, `encoder_layer.sv` | composite blocks with their own buffers |
| `rtl/tiny_transformer.sv` | top: input projection, encoder, pooling, output projection, sequencer |
| `tb/tt_ref_pkg.sv` | reference arithmetic, random model generator, latency formulas |
| `tb/*_tb.sv`, `tb/tt_infer_check.sv` | testbenches |
