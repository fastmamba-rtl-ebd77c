# A fixed-point Mamba2 datapath: Hadamard-quantized linear layers, convolution and SSM scan

Mamba2 replaces attention with a selective state-space model (SSM). Each layer
of the model has the same parts:

- an input projection, which is a large linear layer;
- a short causal depthwise convolution;
- SiLU;
- the SSM recurrence, which updates a per-head hidden state of `headdim x d_state` values for every token;
- a gated RMS normalization;
- an output projection.

This RTL holds the three fixed-point engines that do nearly all of that
arithmetic:

| Engine | Module | What it does |
|---|---|---|
| Linear engine | `hadamard_linear` | Runs the projections in 8-bit × 8-bit arithmetic. It applies a Hadamard rotation to the activations just before they are quantized. |
| Convolution engine | `conv_module` | 32 channels with a kernel of 4, using power-of-two (PoT) rescaling. |
| SSM engine | `ssm_module` | Steps through the recurrence token by token. It keeps the full hidden state of a layer on chip and updates 256 state elements per cycle. It contains a small exp/SoftPlus approximation unit, so `exp` and `SoftPlus` need no floating point. |

The design has three main ideas:

- **Rotate before quantizing.** An orthogonal Hadamard rotation spreads activation outliers over many channels, so 8-bit quantization loses little. The rotation only needs additions and subtractions, so it is almost free.
- **Rescale by powers of two.** Everywhere else, scaling is a right shift by a power of two.
- **Use the exponent's structure.** The two transcendental functions of the SSM are computed as `2^u * 2^v`, with an eight-piece linear table for `2^v`.

The floating-point parts are not in this RTL:

- RMS normalization;
- SiLU;
- the scheduler that moves data between the engines and a buffer;
- the buffer;
- the DRAM interface.

For that reason, the top level `fastmamba_top` places the three engines side by side and exposes each engine's interface as ports. Whatever drives the top plays the role of the scheduler. The file list is at the end.

## Number formats

| Quantity | Format |
|---|---|
| Linear-engine activations into the Hadamard stage | signed 21-bit |
| Hadamard entries | 4-bit, ±1 (only the sign bit is used) |
| Quantized activations and weights | signed 8-bit |
| Linear-engine outputs | 20-bit per step, 32-bit accumulated |
| Convolution samples, weights and outputs | signed 16-bit |
| SSM Δ, Δ̃ (after SoftPlus), A, Ā = exp(Δ̃A), D | Q3.12: 16-bit, 12 fraction bits, range [-8, 8) |
| SSM B, C, X | 16-bit, with scale set by the caller |
| Hidden state H and B̄ | 32-bit |
| Per-block C·H inner product h̄ | 30-bit |
| SSM output Y | 23-bit |

Every multiply that narrows its result is followed by an arithmetic right shift and saturation. The shift is a runtime input. In the SSM it is one field of the `ssm_shift_t` struct in `fm_pkg`:

| Field | Used after |
|---|---|
| `sh_da` | Δ̃·A |
| `sh_q` | Δ̃·X |
| `sh_qb` | Q·B |
| `sh_ch` | C·H |
| `sh_dx` | D·X |

The product Ā·H is always shifted by the 12 fraction bits of Ā. The software that quantizes the model picks the other shift amounts.

## Vector processing units

All arithmetic is built from five combinational vector units. Each one ends with a PoT shift and saturation to its output width:

| Unit | Function | Used in |
|---|---|---|
| `vpu_pau` | `p[i] = sat((a[i]+b[i]) >>> s)` | SSM Step 1 (Δ+β) |
| `vpu_pmu` | `p[i] = sat((a[i]*b[i]) >>> s)` | Δ̃·A, Δ̃·X, Q·B |
| `vpu_pma` | `p[i] = sat(((a[i]*b[i]) >>> s) + c[i])` | Ā·H + B̄, D·X + h̄ |
| `vpu_hat` | `p = Σ ±a[i]`, sign from a Hadamard column | Hadamard transform |
| `vpu_mat` | `p = sat((Σ a[i]*b[i]) >>> s)` | Dot products: linear, convolution, C·H |

Each unit works at full precision inside. Its internal width is the larger of the natural product or sum width and the output width plus one, so the saturation test is always exact.

## Linear engine (`hadamard_linear`, `lin_group`, `lin_quantize`)

A linear layer `Y = X W` is computed as `(X H)(Hᵀ W)`, with `H` a normalized Hadamard matrix of order 4. `Hᵀ W` is prepared offline and stored as 8-bit values.

One step of the engine takes 24 input features, in six groups of four. Each group (`lin_group`) goes through five stages:

1. **Hadamard transform.** Four `vpu_hat` adder trees each take one column of H and form one element of `x H`. A Hadamard matrix holds only ±1, so only the sign bit of each 4-bit entry is used.
2. **Quantization (`lin_quantize`).** Each result is multiplied by `s_coe`, a signed 21-bit scale with 20 fraction bits. It is then shifted right by `s_shift` and saturated to −128..127. All six groups share the scale, because the scale belongs to the whole activation vector.
3. **Buffer.** A register holds the quantized vector, together with the weights presented with it.
4. **Matrix product.** 64 `vpu_mat` units each form one 4-term 8×8-bit dot product against one output column.
5. **Group reduction.** The six groups' 64-element partial-sum vectors are added and saturated to 20 bits (`y_sum`).

A 32-bit accumulator then adds successive steps, to cover the whole input dimension. `acc_first` restarts it, and `y_acc` is the running sum.

Timing: one step per cycle, and `out_valid` follows `in_valid` by 3 cycles.

Example: a 768-input, 64-output tile takes 32 consecutive steps. The first step is marked `acc_first`, and the result is `y_acc` of the last step. De-quantization happens outside the engine: it multiplies by the activation scale, the weight scale and the Hadamard normalization.

## Convolution engine (`conv_module`)

The engine handles 32 channels, each with a `vpu_mat` of length 4. Each channel keeps its last three samples.

One time step is accepted per cycle. For each channel it computes:

`y[t] = sat16((w[3]·x[t] + w[2]·x[t-1] + w[1]·x[t-2] + w[0]·x[t-3]) >>> shift)`

- The result is registered, so the latency is 1 cycle.
- `seq_start` treats the history as zero for that step, which gives left zero padding at the start of a sequence.
- There is no bias.

The history covers only the 32 channels in flight. To run more channels, run one group of 32 channels over the whole sequence, then the next group.

## The exp/SoftPlus unit (`nonlinear_approx_unit`)

The SSM needs two functions: `SoftPlus(Δ+β)` to form the step size Δ̃, and `exp(Δ̃·A)` to form the decay Ā. Both are computed by a single 24-lane, 16-bit unit. It is pipelined to take one vector per cycle, with a latency of 3 cycles.

**exp.** The unit uses `e^x = 2^(x·log2 e)`. Here `log2 e` is the 5-bit constant `1.0111b = 23/16`, so the multiply is a shift and an add: `t = x·23`, read with 4 extra fraction bits. `t ≤ 0` is split into two parts, both ≤ 0:

- an integer part `u`;
- a fraction `v` in (−1, 0].

The split truncates toward zero. Then `2^t = 2^v >> |u|`.

`2^v` is approximated by eight straight-line pieces, indexed by the three most significant fraction bits of `|v|`:

`2^v ≈ B[s] + K[s]·v`

The table values are chords of `2^-f` on each interval `[s/8, (s+1)/8)`:

`K[s] = 8·(2^(-s/8) − 2^(-(s+1)/8))`, `B[s] = 2^(-s/8) + K[s]·s/8`

Both are stored in Q1.15 in `fm_pkg`. The result is shifted right by `|u|` and rounded back to Q3.12.

Error sources:

- The chord error is below about 1e−3 relative.
- The 23/16 constant is 0.36 % low. The relative error that this causes grows with |x|, to about 1.5 % at x = −4.
- Outputs below 2^-12 round to zero.

The testbenches accept 3–4 LSB plus about 4 % of the value.

**SoftPlus.** The unit uses `ln(1+e^x) ≈ e^x` for x ≤ 0 and `≈ e^-x + x` for x > 0. It gets both forms from the same datapath:

- A reverse-process stage negates positive inputs, so the exp core only sees non-positive arguments.
- A delay register carries x alongside the pipeline.
- A final adder and multiplexer add x back for positive lanes.

The mode is chosen per lane, from the vector-wide `func` input and the sign of the lane's x.

This approximation is crude near 0 (SoftPlus(0) = ln 2, but it gives 1), and the tests measure against the approximation itself. In EXP mode a positive input is clamped to 0, which gives 1.0: the SSM only ever asks for exp of Δ̃·A ≤ 0.

## SSM engine (`ssm_module`)

This is the most involved block. For each token it updates, for every head `h`, channel `p` and state `n`:

```
Δ̃[h]      = SoftPlus(Δ[h] + β[h])                       step 1: PAU(24), NAU
Ā[h]      = exp(Δ̃[h]·A[h])                              step 2: PMU(24), NAU
Q[h][p]   = Δ̃[h]·X[h][p]                                step 2: PMU(64)
H[h][p][n] = Ā[h]·H[h][p][n] + Q[h][p]·B[n]             step 3: PMU(8)x32, PMA(8)x32
Y[h][p]   = Σn C[n]·H[h][p][n] + D[h]·X[h][p]           step 3: MAT(8)x32, PMA(32)
```

Default sizes are those of Mamba2-130M: 24 heads × 64 channels × 128 states.

**Token protocol.**

1. A token is accepted with `tok_valid`/`tok_ready` (ready only while idle). It brings Δ (24 values), B and C (128 each), and `tok_first`.
2. The sequencer sends the 24 values of Δ+β through the exp/SoftPlus unit in SoftPlus mode and stores Δ̃.
3. It sends Δ̃·A through the same unit in exp mode and stores Ā.
4. It then accepts X one head per beat (`x_valid`/`x_ready`, 24 beats of 64 values). Each beat forms that head's Q with a 64-lane multiplier, and both Q and X are stored.
5. β, A, D and the shift amounts are configuration inputs that stay fixed.

**State scan.** The hidden state is 24 × 64 × 128 × 32 bit = 6.29 Mbit. It lives in `hmem`: 768 words, each holding a 32-channel × 8-state tile (8192 bits). Words are ordered head, then channel block (2 per head), then state block (16 per channel block).

Each scan cycle does three things:

1. It reads one word.
2. One cycle later it computes, for all 256 elements at once, `B̄ = Q·B`, `H' = Ā·H + B̄` and the 32 eight-term inner products `C·H'`.
3. It writes H' back to the same address.

This gives 256 state updates per cycle, with no read-after-write hazard, because consecutive cycles touch different words. `tok_first` makes the read value count as zero, which starts a new sequence from H = 0 without a clearing pass.

**Output.** The 16 partial inner products of one channel block are summed in an accumulator. After the 16th, `D·X` is added, the result is saturated to 23 bits, and it leaves as one `y_valid` beat. Each beat carries 32 values of Y, tagged with `y_head` and `y_cb`. There are 48 beats per token. There is no back-pressure on Y. `tok_done` pulses when the last beat has left.

**Timing per token.**

| Phase | Cycles |
|---|---|
| Token accept | 1 |
| SoftPlus and exp through the 3-stage unit | about 10 |
| X beats | 24, one per cycle if X is ready |
| State scan | exactly 768 |
| Pipeline drain | about 3 |

That is roughly 805 cycles (804 measured), or 3.2 µs at 250 MHz. The whole 24-layer 130M model then needs about 77 µs of SSM time per token. The testbenches check that the scan takes exactly `NH·(HD/32)·(DS/8)` cycles.

**Larger models.** A model with more heads, such as the 80 heads of Mamba2-2.7B, does not fit the state store at the default size. It would need the state swapped through external memory in groups of 24 heads, and that is not built. Raising `NH` (the `SSM_NH` parameter of the top) grows the store instead.

## Top level (`fastmamba_top`)

The top instantiates the three engines with the default sizes and exposes their ports, prefixed `lin_`, `conv_` and `ssm_`. The engines are independent and can run at the same time.

In a complete system the following would sit around them:

- a buffer and a data-flow controller;
- floating-point SiLU, between the convolution and the SSM;
- a floating-point gated RMS normalization, between the SSM and the output projection.

## Where this RTL departs from, or goes beyond, the described design

Some choices fill gaps; others are departures.

**Formats and widths.**
- Fixed-point formats are not given and are this design's own: Q3.12 for Δ/Δ̃/A/Ā, 16-bit X/B/C/D, and a 21-bit scale with 20 fraction bits.
- Some printed widths of SSM Step 3 operands disagree with the 16-bit outputs of Steps 1–2. The printed widths are Q 30-bit, Ā 28-bit, C 23-bit and Δ̃/X 26–27-bit. The 16-bit widths were used throughout.

**Hardware structure.**
- One exp/SoftPlus unit is shared by Steps 1 and 2, rather than one unit per step.
- The group-reduction saturation, the 32-bit step accumulator of the linear engine, and the summing of h̄ over the 16 state blocks before D·X is added are this design's own.
- Pipeline depths, handshakes, reset behaviour, `seq_start`/`tok_first` and the SSM sequencer are this design's own. These cover the SSM "data-flow handler".
- The NAU segment index (three MSBs of |v|), chord coefficients and rounding are this design's own, as is the clamp of positive inputs in exp mode.
- The convolution has no bias, and it is given no SiLU.

**Not built.** RMS normalization, SiLU (floating point), the global data-flow controller, the on-chip buffer, the memory controller and DRAM.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M` and has a cycle watchdog.

| Testbench | What it checks |
|---|---|
| `tb_vpu_*` | Random vectors, including overflow cases, against integer models. |
| `tb_nonlinear_approx_unit` | Both modes against real `exp` and `SoftPlus` with the tolerance above, and the 3-cycle latency. |
| `tb_lin_quantize` | Exact rounding and saturation against an integer model. |
| `tb_hadamard_linear` | The full 6-group engine against a reference of transform, quantization, dot products, reduction and accumulation, including saturation and restart. Also checks the latency. |
| `tb_conv_module` | Two sequences against a direct convolution, with saturation. |
| `tb_ssm_module` | A reduced size (4 heads × 8 × 16 states, 4×4 per cycle). Δ̃ and Ā are checked against real targets. Every Y value must match exactly an integer model of the rest, which starts from the unit's own Δ̃ and Ā. Also checks the scan cycle count. |
| `tb_ssm_prefill` | Prompt-prefill workload: the SSM engine at full default size runs prompts of 64, 96, 116, 128 and 168 tokens back to back (572 tokens, each prompt starting from H = 0). Every Y value of every token is checked against the integer model, which carries its own copy of the state. It measures 804 cycles per token. |
| `tb_fastmamba_top` | The whole top at default size (24 × 64 × 128 SSM, full linear and convolution engines), driving all three engines at once. It counts every mechanism (quantizer saturation, accumulator restart/continue, convolution restart and saturation, both SoftPlus branches, exp mode, state reset and state carry-over between tokens, concurrent engine activity) and fails if any never occurred. |

To run one with plain Verilator (5.x):

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/fm_pkg.sv tb/tb_ssm_module.sv --top-module tb_ssm_module
./obj_dir/Vtb_ssm_module
```

`tb_fastmamba_top` and `tb_ssm_prefill` each take 3–5 minutes to compile, because the SSM state-update array is 256 lanes wide. They then simulate in under a second and in about 20 seconds, respectively.

## Files

| File | Contents |
|---|---|
| `rtl/fm_pkg.sv` | Shared types: the NAU mode enum, the 2^v table and the SSM shift struct. |
| `rtl/vpu_pau.sv`, `vpu_pmu.sv`, `vpu_pma.sv`, `vpu_hat.sv`, `vpu_mat.sv` | The vector units. |
| `rtl/nonlinear_approx_unit.sv` | The exp/SoftPlus unit. |
| `rtl/lin_quantize.sv`, `rtl/lin_group.sv`, `rtl/hadamard_linear.sv` | The linear engine. |
| `rtl/conv_module.sv` | The convolution engine. |
| `rtl/ssm_module.sv` | The SSM engine. |
| `rtl/fastmamba_top.sv` | The top. |
| `tb/tb_<module>.sv` | One testbench per module. |
