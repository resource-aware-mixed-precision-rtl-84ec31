# Mixed-precision integer Transformer for time-series forecasting

This is a small Transformer encoder, built as integer-only hardware, that
forecasts the next value of a multivariate time series from a window of the
last `N` samples. It is meant for small FPGAs, such as a Spartan-7 XC7S15,
where LUTs, LUT RAM, block RAM and DSP slices all run short at once.

The design rests on one idea: **every component of the network has its own
quantisation bitwidth (4, 6 or 8 bits)**. There are ten components:

- the input projection;
- the positional-encoding addition;
- self-attention;
- two residual additions;
- two batch norms;
- the feed-forward block;
- global average pooling;
- the output projection.

Choosing the ten bitwidths is the lever that trades accuracy against area.
The choice is made offline from a table of per-component resource costs, so
the RTL only has to accept any combination. It does this without inserting
rescaling stages between components, because a component always consumes
data at the bitwidth its producer wrote.

The default build is the configuration reported as the best deployable
accelerator for a 12-sample window with `d_model = 64`:

| component | L_input | Add_PE | MHA | Add_MHA | BN_MHA | FFN | Add_FFN | BN_FFN | GAP | L_output |
|-----------|---------|--------|-----|---------|--------|-----|---------|--------|-----|----------|
| bits      | 8       | 8      | 6   | 8       | 6      | 4   | 8       | 8      | 8   | 8        |

## Network

```
X (N x M) ─ L_input (M→D) ─┐
                     PE ───┴ Add_PE ─ X_embed ─┬─ MHA ─ Add_MHA ─ BN_MHA ─┬─ FFN ─ Add_FFN ─ BN_FFN ─ GAP ─ L_output (D→OUT) ─ Y
                                               └──────────┘               └──────────┘
```

- The model has one encoder layer and one attention head. Query, key, value
  and output all have width `D = d_model = 64`.
- The FFN hidden width is `4·D = 256`, with a ReLU between its two linear
  layers.
- GAP averages each of the `D` channels over the `N` time steps.
  `L_output` then maps the `D` averages to `OUT_DIM` forecasts.
- The number of input features `M = 3` and of outputs `OUT_DIM = 1` are
  this implementation's own defaults. The source design does not fix them.

## Integer arithmetic

All tensors use asymmetric quantisation, `real = scale · (q − zp)`. `q` is
a signed `b`-bit integer and `zp` an 8-bit signed zero point. The scales
exist only offline. In hardware each scale ratio becomes a 16-bit unsigned
multiplier `m` and a 6-bit shift `s`.

**Linear layers and matrix products** (`qmatmul`, `qlinear`):

```
acc    = bias[j] + Σ_k (A[r][k] − za)·(W[j][k] − zb)        (32-bit accumulator)
Y[r][j] = sat_b( zy + ((acc·m + 2^(s−1)) >> s) )           (round half up, saturate)
```

Biases are quantised symmetrically, with scale `s_A·s_W`. This is why they
are added straight into the accumulator. A layer with `X`-bit inputs and
`W`-bit weights stores its bias at `X + W + 2` bits:

| X×W | bias width |
|-----|------------|
| 8×8 | 18         |
| 6×8 | 16         |
| 4×8 | 14         |

Inside a component, weights and outputs use the component's bitwidth `B`.
Only the input width comes from the producer.

**Mixed precision inside a module.** Only the first linear layer of a
module sees the mixed input width:

- in the FFN, linear 1;
- in the attention block, the fused Q/K/V projection.

Every later stage of the module runs at the module's own width.

**Additions** (`qadd`) rescale both operands to the output scale with two
multipliers and one shared shift:
`Y = sat(zy + ((X1−z1)·m1 + (X2−z2)·m2 + 2^(s−1)) >> s)`. The two inputs
may differ in bitwidth. The positional encoding is a stored table at
Add_PE's bitwidth.

**Batch norm** (`qbatchnorm`) is folded at inference time to a per-channel
affine step, `Y = sat(zy + ((X−zx)·g[c] + β[c] + 2^(s−1)) >> s)`. Here `g`
is a 16-bit signed value and `β` a 32-bit signed value, and the channel is
the `d_model` index.

**GAP** (`gap`) sums `X − za` over the `N` rows and requantises. The `1/N`
is folded into `m`.

**ReLU** is applied in the output stage of FFN linear 1 as `max(Y, zy)`.
This is exactly the quantised ReLU, because the real value 0 maps to `zy`.

### Softmax

The attention softmax (`qsoftmax`) is this design's own integer method:

1. For each score row, find the maximum.
2. Look up `e_j = EXP[max − s_j]` in a table with `2^B_MHA` entries of 16
   bits, and sum the `e_j`.
3. Output `A_j = min(round(e_j · 2^(B−1) / Σe), 2^(B−1) − 1)`.

The probabilities therefore have scale `2^−(B−1)` and zero point 0, and the
attention·V product uses `za = 0` whatever `cfg.ctx.za` holds.

The table holds `round(65535 · exp(−d · s_score))`. It depends on the
trained score scale, so it is loaded with the other parameters. The
`1/√d_model` factor is folded into the score multiplier.

## Memories and the resource choice

Each intermediate result sits in a `qbuffer` of depth `N·D` (768 at the
defaults) and the producer's width:

- the input window;
- L_input;
- X_embed;
- Q, K, V, scores, probabilities and context inside attention;
- the MHA output;
- Add_MHA, BN_MHA;
- the FFN hidden layer and the FFN output;
- Add_FFN, BN_FFN;
- GAP.

The top-level parameter `STYLE` selects their resource type through the
`ram_style` attribute:

| `STYLE`    | attribute   | meaning                                  |
|------------|-------------|------------------------------------------|
| `RAM_BRAM` | block       | block RAM                                |
| `RAM_DRAM` | distributed | LUT RAM                                  |
| `RAM_AUTO` | none        | the synthesis tool decides (the default) |

Putting intermediate results in LUT RAM was found to exhaust LUTs while
block RAM stayed idle. Leaving the choice to the tool moved two uniform
models (`n=24, d=32, 8 bit` and `n=24, d=64, 4 bit`) from infeasible to
deployable. Weights, biases and the positional encoding always use block
RAM.

`STYLE` applies to every intermediate buffer. On top of it, a second
parameter `BRAM_MIN_BITS` steers the larger results into block RAM by
hand: when it is non-zero, every intermediate buffer of at least that many
bits (`width × depth`) is built as block RAM, whatever `STYLE` says. For
example, `BRAM_MIN_BITS = 3072` at the default size puts all `N × D`
activation buffers in block RAM. The small ones stay under `STYLE`: the
input window, the GAP result and, in attention, the `N × N` scores and
probabilities. The default of 0 leaves everything to `STYLE`.

## Schedule and timing

The components run strictly one after another under a phase sequencer in
`tf_top`:

```
L_IN → ADD_PE → MHA(QKV → SCORE → SOFTMAX → CTX → OPROJ) → ADD_MHA → BN_MHA
     → FFN(LIN1 → LIN2) → ADD_FFN → BN_FFN → GAP → L_OUT
```

Each stage is a single engine with one multiplier. It does one
multiply-accumulate (or one element-wise operation) per clock cycle and
writes one result every `K` cycles.

**Engine latencies** (from `start` to `done`):

| engine              | cycles                      |
|---------------------|-----------------------------|
| matrix product      | `R·C·K + 2`                 |
| element-wise stages | `length + 2`                |
| GAP                 | `D·N + 2`                   |
| softmax             | `N·(3N+2) + 2`              |
| FFN                 | two products plus one cycle |

The attention block adds one cycle per internal hand-over. The sequencer
adds one cycle per phase.

The cycle count is therefore exact and depends only on the sizes:

| configuration (`N`, bitwidths)                  | cycles per inference | at 100 MHz | measured on hardware by the source |
|-------------------------------------------------|----------------------|------------|------------------------------------|
| 12, (8,8,6,8,6,4,8,8,8,8), default              | 615,734              | 6.16 ms    | 5.78 ms                            |
| 18, (8,6,4,4,6,4,4,4,8,8)                       | 937,694              | 9.38 ms    | 8.79 ms                            |
| 24, (6,8,4,4,4,4,4,4,8,8)                       | 1,269,086            | 12.69 ms   | 11.92 ms                           |

The reported hardware times are 6.5–6.7% shorter than these counts, and
they scale with `N` in the same way. The source does not describe its
schedule. The close agreement suggests an organisation of the same kind,
about one multiply-accumulate per cycle, but the exact stage overlap is
unknown. The 100 MHz clock is the frequency reported for the default
configuration; 8-bit components limited it.

## Interface (`tf_top`)

| port | dir | width | use |
|------|-----|-------|-----|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of control state (memories are not reset) |
| `prm` | in | `prm_wr_t` | parameter write: `en`, `sel` (which memory), `addr`, `data` (truncated to the memory's width). Use only while idle. |
| `cfg` | in | `tf_cfg_t` | every zero point, multiplier and shift, one field per operation. Hold stable during an inference. |
| `x_we`, `x_addr`, `x_data` | in | 1, ⌈log2(N·M)⌉, `X_BITS` | write the input window, row-major `[t][feature]`, while idle |
| `start` | in | 1 | one-cycle pulse starts an inference |
| `busy` | out | 1 | high from start until done |
| `done` | out | 1 | one-cycle pulse; `y` now holds the new forecast |
| `y` | out | `OUT_DIM × B_LOUT` | forecast (quantised at L_output's scale) |

Assertions in `tf_top` report a `start`, parameter write or input write
while `busy`. A `start` or input write during an inference is ignored. A
parameter write during one would corrupt the model.

Parameter memories selected by `prm.sel`:

| `sel` | contents |
|-------|----------|
| `PRM_W_IN` | `W[j][i]` at address `j·M + i` (row-major `[out][in]`) |
| `PRM_W_QKV`, `PRM_W_O`, `PRM_W_1`, `PRM_W_2`, `PRM_W_OUT` | the other weight matrices, same layout. In `W_QKV`, rows 0..D−1 are Q, rows D..2D−1 are K and rows 2D..3D−1 are V. |
| `PRM_B_*` | biases, one per output |
| `PRM_PE` | positional encoding, `[t][j]` |
| `PRM_EXP` | softmax exponent table |
| `PRM_BN_MHA`, `PRM_BN_FFN` | `g[c]` at addresses `0..D−1`, `β[c]` at `D..2D−1` |

The source design generates its hardware with the trained parameters built
in. Here they are loaded at run time instead, so one netlist serves any
trained model of the same shape. A design that bakes the values in would
turn these memories into ROMs with the same contents.

Top-level parameters:

- `N`, `M`, `D`, `OUT_DIM`;
- `X_BITS`, the width of the raw input samples;
- the ten component widths `B_LIN_IN … B_LOUT`;
- `STYLE` and `BRAM_MIN_BITS`.

Any of the bitwidth combinations the selection flow produces is a
parameter change.

## Files

| file | contents |
|------|----------|
| `rtl/tf_pkg.sv` | shared types (`rq_cfg_t`, `add_cfg_t`, `bn_cfg_t`, `tf_cfg_t`, `prm_wr_t`), the resource enum, the rounding shift and saturation functions, and the bias-width rule |
| `rtl/qbuffer.sv` | 1-write / 1-read synchronous RAM with selectable resource type |
| `rtl/qmatmul.sv` | sequential matrix product with requantisation (all linear work) |
| `rtl/qlinear.sv` | `qmatmul` plus its weight and bias memories |
| `rtl/qadd.sv`, `rtl/qbatchnorm.sv`, `rtl/gap.sv`, `rtl/qsoftmax.sv` | element-wise, per-channel, pooling and softmax engines |
| `rtl/mha.sv`, `rtl/ffn.sv` | attention and feed-forward blocks, each with its internal buffers and a local sequencer |
| `rtl/tf_top.sv` | the whole accelerator |
| `tb/tf_ref_pkg.sv` | reference arithmetic for the testbenches (floating-point rescale, random helpers) |
| `tb/tb_*.sv` | one self-checking testbench per block |
| `tb/tf_e2e_run.sv` | parameterised end-to-end checker used by `tb_tf_workloads` |

## Verification

Every testbench compares the RTL with a behavioural model written in plain
SystemVerilog. That model rescales in double precision with `$floor`, not
with the RTL's shift arithmetic. Each testbench checks cycle counts and ends
with a `TB_RESULT checks=… failures=…` line.

- **`tb_tf_top`** runs the default-size accelerator three times on a random
  model. It compares X_embed, the MHA output, the FFN output and the BN_FFN
  output element by element, then the forecast. It also checks that every
  sequencer phase, saturation, the ReLU clamp and both residual-buffer
  hand-overs actually happened. The run takes about 1.9 M cycles and a few
  seconds.
- **`tb_tf_workloads`** runs the other evaluated configurations end to end,
  one inference each:
  - `N=18` and `N=24` with their reported bitwidths;
  - the uniform `n=24, d=32, 8-bit` model;
  - the uniform `n=24, d=64, 4-bit` model;
  - the default configuration with `BRAM_MIN_BITS = 3072`;
  - two small uniform-precision points, `(n, d, b) = (6, 8, 6)` and
    `(12, 16, 4)`.
- The block testbenches use small sizes. They cover ReLU clamps,
  saturation, a write to the wrong parameter memory,
  exact latencies, and all three `STYLE` settings.

The random models are scaled so that activations use their range without
saturating everywhere. They are not trained networks. Accuracy on real data
therefore depends on the trained parameters and constants loaded into the
design, and has not been measured here.

To run one testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_tf_top \
    -Irtl -Itb -y rtl -y tb +libext+.sv rtl/tf_pkg.sv tb/tf_ref_pkg.sv tb/tb_tf_top.sv
./obj_dir/Vtb_tf_top
```

## Departures and open points

- **Softmax, batch-norm folding, requantisation format.** The source design
  does not specify these. The choices above are the simplest integer forms.
  For the softmax, a trained model must supply the exponent table matching
  its score scale.
- **Schedule.** About 6.5% slower than the reported hardware. The ordering
  and the single multiplier per engine are assumptions.
- **Parameters are loaded at run time**, not generated into the netlist.
- **`M`, `OUT_DIM`, `X_BITS`** (3, 1, 8) are assumed values.
- **Manual buffer placement** is a single size threshold
  (`BRAM_MIN_BITS`), not a free choice for each buffer.
- **Out of scope.** The offline resource estimator and the bitwidth filter
  that chooses the ten bitwidths (a per-component table of LUT, LUT-RAM,
  BRAM and DSP costs, thresholds, and a score sort) are software. They are
  not part of this RTL.
