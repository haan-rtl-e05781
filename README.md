# A normalization accelerator for LLMs with subsampled statistics and ISD prediction

LayerNorm and RMSNorm take a surprisingly large share of LLM inference time
once matrix products and softmax have been optimised. Their cost is almost
all in the statistics. Computing the mean and the inverse standard deviation
(ISD, 1/σ) needs a full pass over a vector of thousands of elements, a square
root and a division, and the output cannot start until that pass is done.

This RTL implements the normalization accelerator described in the HAAN paper
(Peng, Qin, Xia, Zhang, "HAAN: A Holistic Approach for Accelerating
Normalization Operations in Large Language Models"). It attacks that cost in
three ways, each switchable per layer:

* **Subsampled statistics.** Mean and variance are estimated from the first
  `N_sub` elements of the vector only, for example 256 of LLaMA-7B's 4096.
  All `N` elements are still normalized.
* **ISD skipping.** In the later layers of an LLM, log(ISD) falls almost
  linearly with the layer index. Over a layer range `(i, j]` chosen offline,
  a token's ISD is not computed. It is predicted from the ISD the same token
  had at layer `i`: `log2 ISD_k = log2 ISD_i + e·(k − i)`.
* **Cheap arithmetic.** Inputs may be FP32, FP16 or INT8. Everything inside
  is fixed point. The inverse square root uses the bit-pattern trick
  (`0x5F3759DF − x/2`) followed by one Newton step.

Everything here is synthesizable SystemVerilog (IEEE 1800-2017). Every block
has a self-checking testbench.

## Datapath

```
                  input buffer (P_N elements per entry, one token per slot)
                   | port A                                   | port B
                   v                                          v
   +------------------------------+                 P_N x FP2FX
   | input statistics calculator  |                      |
   |  P_D lanes: FP2FX, z^2, /D   |   (mean, ISD)        v
   |  two adder trees, 2 buffers  |--> queue (2) --> P_N normalization units
   +------------------------------+        ^          (z-mean)*ISD*alpha+beta
        | variance      | mean             |          mux, FX2FP / fixed out
        v               |                  |                 |
   square root inverter-+--> ISD ----------+                 v
        |                                  |            result stream
        +-- ISD (FP32) --> ISD predictor --+  (skipped layers)
```

There are two engines, and they work on consecutive tokens at the same time:

* The **statistics side** reads token *t* in passes of `P_D` elements. It
  then produces the mean and the ISD, and pushes them into a two-entry queue.
* The **normalization side** pops the (mean, ISD) of token *t − 1*. It reads
  that token again, `P_N` elements per cycle, and streams out the normalized
  values.

At the default size (`P_D = P_N = 128`, `N = 4096`) a full-statistics token
costs the statistics side 32 passes plus about 10 cycles. It costs the
normalization side 32 cycles. The statistics side is therefore the slower
one, and subsampling is what brings it below the normalization side. With
`N_sub = 256` the statistics take about 12 cycles per token, and throughput
becomes one entry per cycle.

## Number formats

All intermediate values are two's-complement fixed point (`rtl/haan_pkg.sv`):

| type    | format           | used for |
|---------|------------------|----------|
| `fx_t`  | Q24.23, 48 bits  | elements after FP2FX, mean, ISD, normalized values |
| `sq_t`  | Q33.46, 80 bits  | z²/D terms, E(z²), eps, variance |
| `inv_t` | Q1.32, unsigned  | the constant 1/D |
| `prm_t` | Q8.23, 32 bits   | alpha, beta, and the fixed-point output |

The 23 fraction bits come from the source design. Its Newton step uses 1.5 =
`0x00C00000`, which is Q.23. The other widths are this implementation's
choice.

The squared terms carry 46 fraction bits because each lane multiplies z²
by 1/D *before* the adder tree. With D in the thousands and |z| around 0.01,
z²/D is about 10⁻⁸, below the Q.23 resolution.

Inputs are saturated at |z| < 2¹⁶ before squaring, so E(z²) cannot
overflow. FP16 inputs never reach that limit.

Elements travel in 32-bit containers: FP32 uses all 32 bits, FP16 bits
[15:0] and INT8 bits [7:0]. An INT8 input is taken as a plain integer. Any
quantisation scale is left to the caller; the output scales with the
input's scale anyway, up to the affine step.

## Input statistics calculator (`haan_input_stats`)

The variance is computed as E(z²) − E(z)², so that both sums need only one
read of the data. The datapath has two pipeline stages, which match the two
cycles drawn in the source design:

1. **Stage 1.** Each lane converts its element to fixed point. FP2FX is a
   pure sign extension for INT8. The lane then squares the element and
   multiplies the square by 1/D. An adder tree sums the lanes' z.
2. **Stage 2.** A second adder tree sums the z²/D terms. Both partial sums
   are added into the E(X²) and E(X) buffers.

After the last pass the outputs are formed directly from the buffers:

* `mean = ΣE(X) · 1/D`
* `variance = E(X²) + eps − mean²`, clamped at 0

In RMSNorm mode the mean is forced to 0, so the "variance" becomes the mean
square plus eps.

`in_mask` zeroes the lanes beyond `N_sub`. This is how subsampling truncates
the vector, and how a partial last pass is handled.

The result is valid two cycles after the last pass and is held until the
next `start`.

1/D is an input rather than a divider. The caller supplies
`floor(2³² / N_sub)`, which is exact to 2⁻³².

## Square root inverter (`haan_isqrt`)

If you read an FP32 bit pattern as an integer, it is approximately
`2²³ · (log2 x + 127 − σ)`, with σ ≈ 0.045. Halving log2 x and negating it
(to get `1/sqrt(x)`) therefore becomes integer arithmetic on the pattern:
`bits(y0) = 0x5F3759DF − bits(x)/2`. The unit runs three register stages:

| stage | operation |
|-------|-----------|
| 1 | variance → FP32 (FX2FP); `y0 = 0x5F3759DF − (bits >> 1)`; y0 → Q.23 (FP2FX) |
| 2 | `t = (x/2) · y0 · y0` |
| 3 | `y1 = y0 · (1.5 − t)`, saturated |

Stage 3 is one Newton–Raphson step on f(y) = 1/y² − x. The initial guess is
within 3.4 %, and one step brings the error below 0.18 %. The testbench
measures a worst case of under 0.2 % over variances from 10⁻⁶ to 10⁴. The
unit accepts a new operand every cycle, and its latency is three cycles.

Two details differ from a literal reading of the source:

* Its drawing labels both shifts `<<1`. Its equation, and the arithmetic,
  need a halving, so both are right shifts here.
* Its Newton formula is printed as `y0(1.5 − x·y0²)`. The correct step (and
  its drawing, which halves x first) is `y0(1.5 − x/2·y0²)`, which is what is
  built.

## ISD prediction (`haan_isd_predictor`)

For a skip range `(i, j]` and slope `e`, found offline on calibration data,
the controller does the following for each token:

* **layer i** (the anchor layer): the ISD is computed normally, converted to
  FP32 and stored in an anchor table at the token's sequence position
  (`cfg_token_base + slot`). The table has 2048 entries.
* **layers i < k ≤ j**: the ISD is not computed. It is predicted as
  `bits_k = bits_i + e·(k − i)·2²³`.

Because an FP32 bit pattern is a scaled log2, that addition *is* the
log-linear prediction. `e` is given in log2 units per layer as signed Q8.23,
so `e·(k − i)` is already in bit-pattern units. When `e·(k − i)` is an
integer the result is exact. Otherwise the piecewise-linear log adds up to
about 6 % error. The source design does this arithmetic in a vendor
floating-point core; this implementation reuses the log trick of the square
root inverter instead.

Layer `i` itself is always computed, because it provides the anchor. This
matches the reported counts: the range (50, 60) gives 10 skipped layers,
and (55, 62) gives 7.

What a skipped layer costs depends on the normalization type:

* A **skipped RMSNorm layer** needs no statistics at all. The statistics side
  only reads the anchor table (two cycles per token), and the normalization
  side sets the pace.
* A **skipped LayerNorm layer** still needs its mean. The statistics pass
  runs (subsampled if configured), but the square root inverter is bypassed.

## Normalization units (`haan_norm_unit`)

There are `P_N` identical lanes. Each computes
`(z − mean) · ISD`, then `· alpha + beta`. A multiplexer (`cfg_affine`)
chooses between the affine and the plain result. FX2FP then converts the
result to FP32 or FP16. If the output format is `FMT_INT8`, the conversion
is skipped and the lane outputs saturated Q8.23.

Each product is truncated back to Q.23 and saturated. Each lane has one
register stage.

## Memory layout and scheduling (`haan_buffer`, `haan_top`)

A token is flattened and cut into entries of `P_N` elements, stored at
consecutive addresses. Token slot *t* starts at `t · N_MAX/P_N`, so there are
32 entries per slot at the defaults. There are 16 slots.

The statistics side reads an entry once per pass, and consumes it in
`P_N/P_D` passes. `P_N` must therefore be a multiple of `P_D`. All (p_d, p_n)
pairs reported for the source design satisfy this: (128,128), (80,160),
(64,128), (32,128), (256,256) and (32,512).

The alpha and beta vectors live in a second buffer, one entry per `P_N`
elements.

The statistics-side controller has these states:

| state | action |
|-------|--------|
| `SA_FEED` | issue reads, one pass per cycle |
| `SA_WAIT` | wait for the statistics |
| `SA_ISQ` | wait for the square root inverter |
| `SA_PRED` | read the anchor table |
| `SA_PUSH` | push into the queue; stall while the queue is full |

The normalization side pops the queue as soon as it is idle. It issues one
read per cycle for all `ceil(N/P_N)` entries of the token. Results leave two
cycles after each read: one cycle for the buffer and one for the lane
register. The mean and ISD travel down the pipeline with the data, so the
next token can be popped right behind the last entry of the previous one.

There is no back-pressure on the output stream. Lanes past `N` in the last
entry carry don't-care values.

Assertions in `haan_top` check three rules: the queue never overflows, `start`
only comes while idle, and the configuration fits the buffer.

## Running a layer

1. Write each token's entries with `in_we/in_waddr/in_wdata`, and alpha/beta
   with `prm_we/prm_waddr/prm_alpha/prm_beta` (Q8.23).
2. Set the configuration and hold it while `busy` is high:

   | input | value |
   |-------|-------|
   | `cfg_in_fmt`, `cfg_out_fmt` | `FMT_FP32`, `FMT_FP16`, `FMT_INT8` (fixed output) |
   | `cfg_rms`, `cfg_affine` | RMSNorm; apply alpha/beta |
   | `cfg_n_dim`, `cfg_n_sub` | N and N_sub (N_sub = N without subsampling) |
   | `cfg_inv_d` | `floor(2^32 / N_sub)` |
   | `cfg_eps` | `round(eps · 2^46)` |
   | `cfg_layer`, `cfg_skip_en`, `cfg_skip_i`, `cfg_skip_j` | layer index and skip range |
   | `cfg_decay` | `round(e · 2^23)`, e in log2 per layer |
   | `cfg_num_tokens`, `cfg_token_base` | tokens in the batch, sequence position of slot 0 |
3. Pulse `start`. Results arrive as `out_valid`, `out_token`, `out_entry`,
   `out_last` and `out_data[P_N]`. `done` pulses after the last entry of the
   last token.

To use skipping, run layer `i` for every token of the sequence with the same
`cfg_token_base` numbering before running layers `i+1..j`.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `P_D` | 128 | statistics lanes (p_d of the main configuration) |
| `P_N` | 128 | normalization lanes (p_n) |
| `N_MAX` | 4096 | longest vector (LLaMA-7B hidden size) |
| `BUF_TOKENS` | 16 | token slots in the input buffer |
| `MAX_SEQ` | 2048 | anchor-table entries (sequence positions) |
| `LAYER_W` | 8 | layer-index width |

## Where this RTL departs from, or adds to, the source design

* The two `<<1` shifts of the inverse-square-root drawing are implemented as
  halvings, and the Newton step includes the factor ½ (see above).
* ISD prediction uses the FP32 bit-pattern logarithm instead of a
  floating-point IP core.
* 1/D is a configuration input, always applied with a multiplier. The source
  mentions a shift when N is a power of two, and storing 1/N in memory.
* All bit widths, the rounding (truncation everywhere), the saturation rules,
  the INT8 interpretation and the Q8.23 fixed-point output are this
  implementation's choices.
* The controller, the two-entry queue, the two-read-port buffer, the token
  slots, the anchor table indexed by sequence position, and every latency
  are this implementation's own. The source only states that the three
  units are pipelined across samples.
* How data reach the buffer from the host, and the FPGA shell, are not
  modelled. The top exposes plain write ports and a result stream instead.

## Files

| file | contents |
|------|----------|
| `rtl/haan_pkg.sv` | formats, enum `fmt_e`, constants |
| `rtl/haan_fp2fx.sv`, `rtl/haan_fx2fp.sv` | format converters |
| `rtl/haan_adder_tree.sv` | balanced adder tree, one generate scope per level |
| `rtl/haan_input_stats.sv` | input statistics calculator |
| `rtl/haan_isqrt.sv` | square root inverter |
| `rtl/haan_isd_predictor.sv` | skip-range logic and log-linear ISD predictor |
| `rtl/haan_norm_unit.sv` | one normalization lane |
| `rtl/haan_buffer.sv` | 1-write, 2-read buffer |
| `rtl/haan_top.sv` | the accelerator |
| `tb/tb_haan_util.sv` | reference conversions (real ↔ FP32/FP16/fixed) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus those below |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For
example:

```
verilator --binary --timing --assert -Wno-fatal -Mdir obj -y rtl -y tb \
    rtl/haan_pkg.sv tb/tb_haan_util.sv tb/tb_haan_top.sv --top-module tb_haan_top
./obj/Vtb_haan_top
```

Replace `tb_haan_top` with any other testbench name. The ones worth knowing:

* `tb_haan_top` runs five layer types at a reduced size (`P_D=4`, `P_N=8`).
  Every output is checked against a real-number model. It also counts the
  design's mechanisms and fails if one never occurs: overlap of the two
  sides, a full queue, skipped layers with and without statistics, anchor
  writes, subsample masking, multi-pass entries, every format, and the
  affine step off.
* `tb_haan_top_full` runs two layers at the default size: a
  full-statistics FP16 LayerNorm and a subsampled INT8 RMSNorm, with N =
  4096. It also checks the layer's cycle count against the schedule above.
* `tb_haan_workloads` runs, at the default size, an anchor layer and a
  skipped layer for each of the LLaMA-7B, OPT-2.7B and GPT2-1.5B settings.
* `tb_haan_configs` builds five other `(P_D, P_N)` configurations side by
  side: (80, 160), (64, 128), (32, 128), (256, 256) and (32, 512). Each one
  runs the OPT-2.7B setting through an anchor layer and a predicted layer.
  The per-configuration driver is `tb/tb_haan_cfg_runner.sv`. This one
  takes about a minute to build.

The others build in well under a minute, and all of them run in seconds.

## How far to trust it

Every module's testbench compares against independently computed real
arithmetic, not against a copy of the RTL's formulas. For each module, a
deliberately broken copy (for instance the Newton step removed, or beta not
added) makes its testbench fail.

The end-to-end tests check every output element, with tolerances of about
0.5 % relative plus 0.002 absolute (plus FP16 rounding). That is the
accuracy the one-step inverse square root allows.

Not verified:

* Timing closure or resource use on any FPGA or process.
* Behaviour with inputs beyond ±2¹⁶.
* The accuracy of the skipping algorithm itself. That depends on the offline
  choice of `(i, j)` and `e`, which this RTL takes as inputs.
