# eMamba in SystemVerilog: a token-pipelined Mamba accelerator for small edge models

This RTL runs a small Mamba network in hardware. Mamba is a state-space sequence model, the
alternative to a transformer in which each token updates a hidden state instead of attending to
every other token. The target is a model of a few thousand INT8 parameters that turns one radar
frame into a 3-D human pose: 19 joints × 3 coordinates = 57 numbers.

Three ideas carry the design:

* **Every expensive operation is replaced by cheap arithmetic.**
  * Layer normalisation needs a variance and a square root. It becomes *range normalisation*: `(x − mean) / (max − min)`.
  * SiLU and exp become piecewise-linear tables.
  * Softplus becomes ReLU.
  * Every quantisation scale is a power of two, so rescaling is a shift.
* **All weights live in flip-flops and are written at run time.** One build serves every model of
  the same shape. No block RAM is used.
* **The layers form a pipeline on whole tokens.** Each layer starts on token *t + 1* as soon as it
  has handed token *t* downstream. The layers are linked by ready/valid handshakes, so a stage that
  finishes early simply waits.

The default configuration (the package `emamba_pkg`) is the pose model:

| symbol | meaning | default |
|---|---|---|
| D | model width (token size) | 20 |
| E, ED | expansion factor, inner width | 2, 40 |
| N | state size per inner channel | 8 |
| P | patch edge | 2 |
| M | Mamba blocks | 2 |
| L | tokens per frame | 16 |
| NOUT | outputs per frame | 57 |
| frame | rows × columns × features, INT8 | 8 × 8 × 5 = 320 values |
| R, K | rank of the Δ projection, convolution taps | 2, 4 |

## Dataflow of one frame

```
frame (320 x INT8)
  -> patch_embedding   16 patches of 2x2x5, each projected 20 -> 20
  -> mamba_block 0 ─┐  per token, D = 20
  -> mamba_block 1 ─┘
  -> output_head       mean over the 16 tokens, projection 20 -> 57
  -> result (57 x INT8)
```

Inside each `mamba_block` (all streams are INT8 tokens with ready/valid):

```
 in ──fork──────────────────────────────(residual FIFO)──────────────┐
       └─ range_norm ─fork─ in_x: linear 20->40 ─ conv1d ─ ssm_block ─┤
                          └─ in_z: linear 20->40 ─(gate FIFO)─────────┤
                                   gate_mul: y * SiLU(z) ─ linear 40->20 ─ residual_add ─ out
```

* `stream_fork` hands a token to two consumers and lets each take it in its own cycle.
* The two 8-deep `stream_fifo`s hold the residual and gate tokens while the long branch works.
  Without them the fork/join of the block could deadlock.
* The joins, `gate_mul` and `residual_add`, take both operands in the same cycle.

## Linear layers: one output neuron per cycle

`linear_layer` is used ten times per block plus twice outside the blocks. For a token it computes

    y[j] = sat8( ((Σ_i W[j][i]·x[i]) >>> SHIFT) + b[j] ),   optionally ReLU

All IN products of one output neuron are formed in parallel and summed in a single cycle, so a
token costs OUT cycles:

* 40 cycles for the 20 → 40 input projections;
* 57 cycles, plus one for the hand-over, for the head.

Those per-token costs (about 40 cycles for most stages, 58 for the head) are the ones the
design's frame timing rests on.

The output is held until it is taken, and a new token is taken only when the output register is
empty. The shifts are:

* 6 for projections with a 20- or 40-element input;
* 4 for the 2 → 40 Δ projection.

Weights are stored as one flat array. A parameter-bus write at offset `o` from the layer's base
address writes `W[o / IN][o % IN]` for `o < OUT·IN`, and otherwise writes `b[o − OUT·IN]`.

## Range normalisation and its compute units

Range normalisation replaces layer normalisation:

    y_i = sat8( ((γ_i · q_i) >>> 13) + β_i ),   q_i = ((x_i − μ) << 12) / (max(x) − min(x))

The range of `x − μ` equals the range of `x`, so no subtraction is needed before the max/min
search.

`range_norm` works through a token in three phases:

1. One cycle registers the mean. It is computed as `μ = (Σx · round(2^16/D)) >>> 16`, with no
   divider.
2. One cycle forms max − min.
3. NU parallel `rn_compute_unit`s process the elements.

Each unit is a 20-step restoring divider (8-bit magnitude shifted left by 12), one multiply
cycle, one shift-and-add cycle and one saturation cycle: 23 cycles per element. A unit announces
its last cycle (`finishing`) so that the next batch loads on the same edge. A token therefore
costs

    2 + 23 · ceil(D / NU) cycles

That is 25 with the default NU = 20, 48 with NU = 10, and 462 with NU = 1. The testbench checks
all three points. A token whose elements are all equal has a range of 0, and the quotient is then
defined as 0, so the output is β.

## Piecewise-linear SiLU and exp

Both functions are chords of the true function between fixed breakpoints. Coefficients are in Q12
(value × 4096):

    slope_k = round( (f(b_{k+1}) − f(b_k)) / (b_{k+1} − b_k) · 4096 )
    icpt_k  = round( (f(b_k) − slope_k/4096 · b_k) · 4096 )
    y       = sat8( ((slope_k · x) >>> IN_FRAC) + icpt_k  rounded to OUT_FRAC )

* **SiLU** (`silu_pwl`): 17 segments on [−7, 7] with breakpoints −7, −5, −4, −3, −2.5, −2, −1.5,
  −1, −0.5, 0, 0.5, 1, 1.5, 2, 3, 4, 5, 7.
  * Below −7 the output is 0; above 7 it equals the input.
  * Input and output are INT8 with 4 fractional bits, i.e. the range ±8.
  * The largest chord error is about 0.015.
* **exp** (`exp_pwl`): 11 segments on [−4, 1] with breakpoints −4, −3, −2.5, −2, −1.5, −1, −0.75,
  −0.5, −0.25, 0, 0.5, 1.
  * Below −4 the output is 0; at 1 and above it is the constant e.
  * The input has 4 fractional bits. The output is Ā, stored as INT8 with a fixed scale of 2⁻⁷.

**Warning: the exp output saturates below 1.0.** With a scale of 2⁻⁷ the largest
INT8 value is 127/128, so every exp result ≥ 1 (any x ≥ 0) reads 127. In practice Δ·A is negative
for a stable model, so Ā < 1 and the saturation only bites for unusual parameters. The upper
segments and the e constant are kept so the function matches its description, and the saturation
to the INT8 scale wins.

The tables live in `emamba_pkg`. The testbench `tb_pwl_units` rebuilds them from `$exp` with the
formulas above and compares all 256 input codes.

## The selective SSM

`ssm_block` takes a 40-element token x_t and works in four steps:

1. Three projections run at the same time:
   * dt = ReLU(linear 40 → 2). ReLU stands in for softplus.
   * B_t = linear 40 → 8.
   * C_t = linear 40 → 8.
2. Δ = linear 2 → 40 of dt.
3. `ssm_core` updates the 40 × 8 state in one step, with all 320 lanes in parallel:

       da    = sat8((Δ_e · A_en) >>> 4)
       Ā     = exp_pwl(da)                              INT8, scale 2^-7
       B̄     = sat8((Δ_e · B_n) >>> 4)
       h_t   = sat24(Ā · h_{t-1} + ((B̄ · x_e) <<< 7))   INT24
       y_e   = sat8( ((Σ_n C_n · h_t[e][n]) >>> 15) + ((D_e · x_e) >>> 4) )
       h_{t-1} for the next token = h_t >>> 7             INT17

4. The 24-bit h_t feeds the output. The stored state is shifted back by 7 bits, which removes the
   2⁻⁷ scale that Ā brought in, so the state does not widen along the sequence.

The state, like the convolution history, is cleared after 16 tokens. Every frame therefore starts
from zero.

A and D are per-channel parameters (A: 40 × 8, D: 40). For stable dynamics A should be negative.

Timing: the block takes a token and, 52 cycles later, raises out_valid. That is max(R, N) = 8 for
the three projections, 1 to hand them on, 40 for Δ, 1 to start the core, 1 for the core, and 1
for the output register. It takes the next token once its output has left, so inside a
`mamba_block` the SSM is the slowest stage: one token every 54 cycles in steady state.

## Convolution, gate and residual

* **`conv1d`**
  * A causal, depthwise, 4-tap convolution along the tokens:
    `y_t[c] = sat8(((Σ_k w[c][k]·x_{t−3+k}[c]) >>> 4) + b[c])`, with tokens before the frame
    start counted as zero.
  * It produces one token per cycle; the result is registered on the edge that takes the input.
  * No activation follows it.
* **`gate_mul`**
  * Computes `sat8((y · SiLU(z)) >>> 4)` per element, with SiLU evaluated on the buffered gate
    token.
* **`residual_add`**
  * Computes `sat8(a + r)`.

## Patch embedding and output head

* **`patch_embedding`**
  * Input layout: it stores a frame in which element (row, column, feature) sits at index
    `(row·8 + column)·5 + feature`.
  * Patches: it cuts the frame into 16 patches of 2 × 2 in raster order. A patch is ordered
    `(dr·2 + dc)·5 + feature`.
  * Projection and timing: each patch goes through a 20 → 20 projection, and tokens leave every
    22 cycles when the consumer is always ready.
  * Next frame: it takes the next frame once the last patch of the current one has entered the
    projection, while the last tokens are still leaving.
* **`output_head`**
  * Sums the 16 tokens of a frame element-wise.
  * Divides by 16 with a shift and saturates.
  * Projects the mean to the 57 outputs.
  * Timing: `res_valid` rises 58 cycles after the frame's last token is taken.
  * Tokens of the next frame are accumulated meanwhile.

## Parameter bus and address map

All parameters are INT8 and are written one per cycle:

* `cfg_we`: write strobe.
* `cfg_addr`: 16-bit global address.
* `cfg_wdata`: the value.

Each layer decodes its own address range. Writing is allowed at any time, but a write during a
frame changes that frame's arithmetic. The testbench rewrites the whole image between frames.

The map at the default sizes is 9 533 words:

| base | words | contents |
|---|---|---|
| 0 | 420 | patch projection 20 → 20 (W row-major, then b) |
| 420 | 3 958 | Mamba block 0 |
| 4 378 | 3 958 | Mamba block 1 |
| 8 336 | 1 197 | head projection 20 → 57 |

Within a block, relative to its base:

| offset | words | contents |
|---|---|---|
| 0 | 40 | range norm γ[20], β[20] |
| 40 | 840 | in_x projection 20 → 40 |
| 880 | 840 | in_z (gate) projection 20 → 40 |
| 1 720 | 200 | conv weights w[c][k] at c·4 + k, then 40 biases |
| 1 920 | 82 | dt projection 40 → 2 |
| 2 002 | 328 | B projection 40 → 8 |
| 2 330 | 328 | C projection 40 → 8 |
| 2 658 | 120 | Δ projection 2 → 40 |
| 2 778 | 320 | A[e][n] at e·8 + n |
| 3 098 | 40 | D[e] |
| 3 138 | 820 | out projection 40 → 20 |

The size functions in `emamba_pkg` (`lin_size`, `mamba_block_size`, …) compute the same map for
other parameter values. The top refuses to elaborate if the image does not fit the 16-bit
address.

## Top-level interface and timing

`emamba_top` has no parameters other than M, and its ports are plain arrays:

* `frame_valid`, `frame_ready`, `frame[320]`: one whole frame per handshake.
* `res_valid`, `res_ready`, `res_data[57]`: one result per frame, held until taken.
* `cfg_we`, `cfg_addr`, `cfg_wdata`: the parameter bus.
* `clk`, `rst_n`: the reset is synchronous and active low.

Measured at the default sizes with all parameters random:

* **Frame latency:** 1 178 cycles from a frame being taken by an idle pipeline to its result being
  valid. At 100 MHz that is 11.8 µs.
* **Steady-state interval:** about 970 cycles per frame with frames back to back.
* **Input rate:** at 100 MHz a 2 560-bit frame (320 bytes) every 969 cycles is 264 Mb/s of
  input. The published design reports almost 263 Mb/s, which corresponds to an interval of about
  973 cycles for a frame of this size. The steady-state rate of this RTL therefore agrees with
  the published design, even though its latency does not.

The frames overlap. The next frame enters patch embedding while the previous one is still in the
blocks.

## Where this RTL departs from the published design, and what is assumed

* **Frame latency.** The published design reports 1 643 cycles per frame; this RTL measures
  1 178. The published figure is counted from the receipt of the raw point cloud. It may include
  input formatting and a slower hand-over between layers that are not modelled here. The
  per-layer costs that are given (25 cycles for range norm, about 40 per linear layer, 58 for
  the head) are matched.
* **Parameter count.** The published INT8 model size is 16.8 KB. The map above has 9 533
  parameters. The difference is not explained by the layers as described. A larger Δ rank, a
  wider convolution, or extra embedding or head layers would all add parameters, but none is
  described.
* **Own choices, not given by the published design:**
  * the 8 × 8 × 5 input frame;
  * the patch ordering and the plain linear patch projection, with no positional embedding;
  * mean pooling in the head;
  * Δ rank 2 and 4 convolution taps;
  * the SiLU and exp breakpoints (only the segment counts and ranges are given);
  * all shift amounts except the 7-bit state shift;
  * the 24-bit saturation and the `<<< 7` alignment of B̄·x;
  * the mean by reciprocal multiply;
  * clearing state at frame boundaries;
  * the FIFOs and fork in the block;
  * the parameter bus and its map.
* **Ā saturation.** Ā saturates at 127/128 (see the warning under the exp section).
* **Not built:**
  * the host that loads weights and streams frames (it is outside the accelerator; the bus and
    handshakes are the ports for it);
  * the ASIC layout;
  * the fixed-weight variant, which has the weights as constants instead of flip-flops. It needs
    the trained weights, which are not available. The same effect is had here by loading the
    weights once after reset.

## Verification

Each block has a self-checking testbench in `tb/` that compares against integer reference models
written separately from the RTL:

* `emamba_ref_pkg`: saturation, floor shifts, the PWL functions rebuilt from `$exp`, and one
  range-norm element.
* `emamba_model_pkg`: a class that runs whole layers, blocks and frames from the same parameter
  image the hardware is loaded with.

The testbenches apply random data and random back-pressure, and check cycle counts:

* 23 cycles per range-norm element;
* 25, 48 and 462 cycles per token for 20, 10 and 1 units;
* OUT cycles per linear-layer token;
* 52 cycles of SSM latency;
* a 54-cycle token interval in a block;
* 58 cycles for the head.

`tb_emamba_top` runs the full-size design:

* one frame into an idle pipeline (latency);
* three frames back to back with random result stalls;
* a complete parameter rewrite;
* two more frames.

Every result is compared bit for bit. It also counts, and requires at least once, each of the
following: result back-pressure, a layer holding a finished token, layers overlapping on
different tokens, a frame entering while another is in flight, both exp clamps, both SiLU clamps,
and the reconfiguration.

`tb_workload_blocks` runs one Mamba block at the sizes the paper gives for its other vision
workloads. Each run covers two frames with random gaps and stalls, checked bit for bit:

* Fashion-MNIST: D = 24, ED = 48, N = 16, 196 tokens per frame;
* CIFAR-10: D = 64, ED = 128, N = 32, 64 tokens per frame.

The front ends, the other blocks and the classifier heads of those models are not built.

To run one testbench with Verilator 5 (the full-size top takes a few minutes to compile and about
a minute to run):

    verilator --binary --timing --assert -y rtl -y tb \
        rtl/emamba_pkg.sv tb/emamba_ref_pkg.sv tb/emamba_model_pkg.sv \
        tb/tb_emamba_top.sv --top-module tb_emamba_top -o sim
    ./obj_dir/sim

Each testbench ends by printing `TB_RESULT checks=<n> failures=<n>`.

## Changing the design

* **Model sizes** are the constants in `emamba_pkg`. Every module takes its sizes as parameters,
  and the address map follows from the size functions.
* **The number of range-norm units** is the `NU` parameter of `mamba_block`. It trades divider
  area against the 2 + 23·ceil(D/NU) cycles per token.
* **Shift amounts** are parameters of each layer. Any change must be mirrored in the reference
  model `emamba_model_pkg`.
* **SEQ must be a power of two** for the head's pooling shift.
