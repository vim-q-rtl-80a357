# A W4A8 Vision Mamba accelerator with LUT-based APoT linear layers

Vision Mamba (ViM) replaces the attention of a vision transformer with a
bidirectional selective state space model (SSM). Nearly all of its
arithmetic sits in linear projections, with the SSM scan second. This RTL
builds an accelerator for it that keeps two ideas of the ViM-Q co-design:

* **Linear layers need no multipliers.** Weights are 4-bit additive
  powers-of-two (APoT): a sign and one of eight magnitudes, each a sum of at
  most two powers of two. Activations are INT8, quantized per token at run
  time. The eight possible products of an activation are computed once per
  input tile and kept in a small look-up table. The T×T processing array then
  only selects, negates and adds.
* **Every engine streams 1×T tiles and is sized at run time.** One bitstream
  serves ViM-tiny, -small and -base at any resolution up to its buffer
  capacities. The engines pass tiles to each other through FIFOs.

The design is synthesizable SystemVerilog (IEEE 1800-2017). It is written as
one module per file in `rtl/`, with self-checking testbenches in `tb/`. The
host processor, the DRAM and the AXI DMA that feed it are outside the RTL.
They appear as stream and parameter-load ports on `vimq_top`.

## 1. Arithmetic

All constants are in `vimq_pkg`.

| quantity | format |
|---|---|
| tile width `T` (activation lanes, PE lanes) | 16 |
| activation between engines | signed 16 bit, 8 fractional bits (Q8.8) |
| quantized activation | INT8, symmetric, ±127, scale = token absmax / 127 |
| weight | 4 bit: bit 3 sign, bits 2:0 magnitude index |
| weight scale | one per 32 inputs (B = 32) per output channel, unsigned Q4.12 |
| smoothing factor, conv channel scale | unsigned Q4.12 |
| bias, norm gain, conv bias, position and class embeddings | Q8.8 |
| SSM internals (state, y) | signed 32 bit, Q16.16 |

**APoT levels.** The magnitude is the sum of a coarse term from
{0, 2⁻¹, 2⁻², 2⁻⁴} and a fine term from {0, 2⁻³}. Only eight of those sums are
used. The 3-bit index selects:

| index | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| level | 0 | 1/2 | 1/4 | 1/16 | 1/8 | 1/2+1/8 | 1/4+1/8 | 1/16+1/8 |

An offline quantizer divides each block of 32 weights by a block scale, maps
each magnitude to the nearest level, and stores the sign and the index. The
hardware only multiplies by whatever block scale it is given. How that scale
is chosen (for example max|w| or a fitted value) is up to the offline step.

**Pre-shift.** A level of 2⁻ᵏ applied to an integer would lose k fractional
bits. The LUT therefore holds `x << (F−k)` with F = 8 (`PRESHIFT`). All sums
in the PE array are exact integers in units of 2⁻⁸. The final dequantization
shift removes F again.

## 2. The linear engine (`linear_engine`)

It computes `Y = act(dequant(Xq · W) + bias)` for one K×N layer, with
`K = cfg_ktiles·16` and `N = cfg_ntiles·16`. A token passes through this chain:

```
tiles in ─► act_quantizer ─► lut_precompute ─► LUT FIFO ─► S0 (weight tile read)
              │  absmax                          (4 deep)      │ 1024-bit word
              └──► scale FIFO ──────────────┐                  ▼
                                            │        16 × lut_pe_lane
                                            │                  ▼
                                            │        weight_scale_accum
                                            └──────► dequant_postproc ─► tiles out
```

### 2.1 Dynamic quantization (`act_quantizer`)

* The tiles of one token are collected in a buffer while a tree of
  comparators tracks the absolute maximum.
* One cycle then forms the reciprocal `inv = round(127·2¹⁶ / absmax)`.
* The tiles are sent out again as `q = clamp(round(x·inv / 2¹⁶), ±127)`, one
  tile per cycle.
* absmax (Q8.8) goes into a scale FIFO, and the dequantizer takes it back at
  the end of the token.

Buffering the whole token is unavoidable: its first element cannot be
quantized before its last has been seen.

### 2.2 LUT pre-computation and replay (`lut_precompute`)

This is the core of the design.

For each INT8 element x of an incoming tile the unit forms eight unsigned
partial results, using shifts and adds only:

| LUT entry | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| value | 0 | x≪7 | x≪6 | x≪4 | x≪5 | LUT1+LUT4 | LUT2+LUT4 | LUT3+LUT4 |

The 16×8 entries of a tile (18 bits each) form one LUT set.

The sets of a whole token are stored. They are then replayed once for every
output group:

```
for n in 0 .. ntiles-1:          # output tile (16 output channels)
  for k in 0 .. ktiles-1:        # input tile
    emit LUT set k + control packet
```

The control packet travels with each set and carries:

* `in_grp = k` and `out_grp = n`;
* `reset`, set on the first tile of a 32-input weight block (k even);
* `flush`, set on its last tile (k odd, or the last k);
* `row_end`, set when k is the last input tile;
* `tok_last`, set on the last packet of the token.

The PE lanes hold no counters: they act on these bits alone. The n-outer,
k-inner order means weight tiles are used in a fixed sequential order, so the
weight buffer is read at an address that only counts up and restarts at the
token end (`wptr`). No address arithmetic is needed.

While a token is being replayed, the pre-computation unit accepts no new
token. Its store phase (ktiles cycles) therefore adds to the replay (the
`stat_replay_stall` output shows this). A token costs about
`ktiles·(ntiles+1)` cycles. For the paper's single-layer benchmark (192→384,
197 tokens) that gives 197·12·25 = 59,100 cycles, against 58,780 reported.
This match is the reason `T = 16` was chosen. The full-size testbench
measures exactly this figure.

### 2.3 PE lanes (`lut_pe_lane`) and scaling (`weight_scale_accum`)

Lane j computes output channel `n·16+j`. For each of the 16 inputs of the
current tile:

1. the 3-bit weight index selects one of that input's eight LUT entries;
2. the weight's sign negates the entry;
3. a 16-input adder tree sums the results;
4. an accumulator sums over the two tiles of a weight block, following
   `reset` and `flush`.

The 16 lanes share the 1024-bit weight word of the tile.

Each block sum is multiplied by its 16-bit block scale and added into a row
accumulator (48 bits). On `row_end` the row is passed on. The scale memory
(`sbuf`) is also read at a sequentially counting address.

### 2.4 Dequantization and activation functions (`dequant_postproc`)

The row sum is in units of 2⁻²⁰ (pre-shift and scale fraction). It is turned
into Q8.8 as

`y = (acc · absmax · 132104) >>> 44`, where 132104 = round(2²⁴/127).

Then the optional bias is added, followed by one of: none, ReLU, SiLU or
SoftPlus.

SiLU and SoftPlus are formed as ReLU plus an even correction term:

* SiLU(x) = ReLU(x) − g(|x|), with g(a) = a/(1+eᵃ);
* SoftPlus(x) = ReLU(x) + h(|x|), with h(a) = ln(1+e⁻ᵃ).

Because the correction depends on |x| only, one half-table per function is
enough. Each table has 256 entries at a = i/32 (i = 0..255), stored as
round(256·g(a)) or round(256·h(a)). The tables are `rtl/silu_lut.hex` and
`rtl/softplus_lut.hex`. For |x| ≥ 8 the correction is taken as 0. The error
is below 5/256 in the testbench.

### 2.5 Loading weights (`weight_burst_loader`, scale and bias ports)

Offline, the weights are re-ordered so that each 16×16 tile is one 1024-bit
word. Nibble `(j·16+i)` holds the weight from input `k·16+i` to output
`n·16+j`. Tiles are stored in the replay order (n-major, then k). The loader
packs four 256-bit bursts into each word and writes words at consecutive
addresses from `wload_start`.

Block scales are written per 16 output lanes, at word address
`n·⌈ktiles/2⌉ + block`. Biases are written at address n.

### 2.6 Back-pressure

Every stage after the LUT FIFO advances on one enable,
`en = !out_valid || out_ready`. A waiting output freezes the PE array and
the scaler. The LUT FIFO then fills (`stat_fifo_full`), and the
pre-computation stalls.

## 3. The SSM engine (`ssm_engine`)

For every token t and inner channel d:

```
h[d][n]  = exp(Δ[d]·A[d][n]) · h[d][n] + Δ[d]·u[d]·B[n]      n = 0..N-1
Out[d]   = (Σn h[d][n]·C[n] + u[d]·D[d]) · z[d]
```

The work is split along the state dimension into blocks of `NB = 16` lanes.
ViM uses N = 16, so there is one block per channel. The engine issues one
(channel, block) slot per cycle to three pipelined stages:

1. **`ssm_update`** reads A[d][block] from its buffer and forms
   Ā = exp(Δ·A) in each lane (`exp_approx`). It also forms Δ·u·B and updates
   the state held in a memory addressed by `d·nblk + block`. The first token of
   a sequence (`bc_seq_first`) reads the old state as zero. The read-modify-write
   is spread over the 3-cycle pipeline. A state word is reused only
   `cfg_d·cfg_nblk` slots later, which must be at least 2.
2. **`ssm_projection`** multiplies the 16 new states by the matching slice of
   C in an adder tree and sums the partials of a channel's blocks.
3. **`ssm_output`** adds u·D and multiplies by z, which is assumed to be
   SiLU(z) already (the linear engine's SiLU mode produces it).

**Exponential.** Ā = exp(x) for x ≤ 0 is computed as 2^(x·log₂e). The integer
part becomes a right shift. The fraction f uses the quadratic
2^f ≈ 1 + f·(0.6565 + 0.3435·f), which is exact at f = 0 and f = 1. The
absolute error is below 0.004 (checked over x ∈ [−20, 0]). The result is Q1.16.

**Streams.** B and C arrive as one packet per token (`bc_*`). They are held
while the token's `cfg_d` channels arrive as (Δ, u, z) triples (`in_*`).
Outputs come one channel per cycle with `out_last` on the token's last
channel. The throughput is one channel per cycle when nblk = 1, plus a short
bubble per token.

## 4. Auxiliary engines

* **`causal_conv1d`** is the depthwise, kernel-4 causal convolution ahead of
  the SSM.
  * The token is quantized to INT8 like a linear layer input.
  * The last three quantized tokens and their scales are kept in a history.
  * Each tap weight is a 4-bit APoT code, applied by shift-add, times a
    per-channel Q4.12 scale.
  * Bias and SiLU reuse `dequant_postproc`.
  * `in_seq_first` on a token's first tile clears the history.
* **`norm_residual`** adds the residual input `in_r` when `cfg_res_en` is set.
  The sum is passed out as `out_res` for the next block. The engine then
  applies RMSNorm: `x / sqrt(mean(x²) + 2⁻¹⁶) · γ`.
  * The mean square is accumulated over the token.
  * The square root uses a 32-step bit-serial method.
  * One reciprocal is formed per token.
* **`layer_smoothing`** multiplies each channel by its factor. It is the
  explicit smoothing layer needed where a nonlinearity sits between two linear
  layers, so the factor cannot be folded into the weights.
* **`patch_ops`** has three modes:
  * `PASS` forwards the stream;
  * `FLIP` stores a sequence and sends it out in reverse token order, for the
    backward scan of the bidirectional block;
  * `CLS` forwards only the token at `cfg_cls_pos`, to the classifier head.
* **`patch_embed`** assembles the token sequence. It adds the position
  embedding to each projected patch and inserts the learned class token at
  `cfg_cls_pos`, giving cfg_len + 1 tokens. The patch projection itself (a
  16×16×3 → D linear layer) runs on the linear engine. Cutting the image into
  patches is left to the DMA.

## 5. Chaining engines (`stream_switch`, `vimq_top`)

Each engine input (sink) selects its source with `cfg_route[sink]`; the value
7 means none. Each source has a 2-deep FIFO.

| source | 0 ext_in | 1 linear | 2 conv | 3 norm | 4 smoothing | 5 patch_ops | 6 patch_embed |
|---|---|---|---|---|---|---|---|

| sink | 0 linear | 1 conv | 2 norm | 3 smoothing | 4 patch_ops | 5 patch_embed | 6 ext_out |
|---|---|---|---|---|---|---|---|

A source may feed only one sink at a time. An assertion flags two sinks on
the same source. Routes are changed between layers, when the engines are
idle.

A Vision Mamba encoder block maps onto the engines as follows (D = hidden
width, E = 2D):

1. norm (with residual) → smoothing → linear `in_proj` (D → 2E) → ext
2. ext (x half) → conv → ext, once directly and once through `patch_ops FLIP`
   for the backward direction
3. linear `x_proj` / `dt_proj` (SoftPlus for Δ) → ext
4. SSM engine on its own ports for each direction
5. linear `out_proj` (E → D), with the next block's norm adding the residual

The host sequences these steps.

## 6. Capacities

Defaults of `vimq_top` cover ViM-base. The paper gives no buffer sizes, so
these are this design's choices.

| buffer | default | needed by |
|---|---|---|
| linear weights | 9216 tiles × 1024 bit (9.4 Mbit) | ViM-b in_proj 768→3072 = 48·192 tiles |
| linear K / N | 1536 / 3072 | ViM-b out_proj K, in_proj N |
| SSM channels | 1536, N = 16 | ViM-b inner width |
| conv channels | 1536 | ViM-b inner width |
| norm width | 768 | ViM-b hidden width |
| sequence | 257 tokens | 256×256 input, 16×16 patches + class token |
| patch_ops width | 768 | hidden width |

ViM-t, -s and -b at 224×224 (197 tokens) fit, and so do resolutions up to
256×256. One limit applies: `patch_ops` holds 257 × 768 channels, so the
1536-wide inner stream of ViM-b cannot be flipped in one pass. It has to be
flipped in two 768-channel halves, or at the hidden width before `in_proj`.
The weights of one layer at a time are held on chip. They are loaded again
per layer.

## 7. Where this design departs from the paper, and what it chooses

* **Tile width.** T = 16 is inferred from the single-layer latency; the
  paper does not state it.
* **LUT order.** The LUT order follows the LUT[i] labels of the paper's
  linear-engine figure. That figure's small index table lists a different
  order for the first two codes. The weight encoding above is
  self-consistent either way.
* **Exponential.** The paper names an "optimised" exponential
  approximation without details. The quadratic in base 2 used here is this
  design's.
* **SSM state storage.** The paper keeps the hidden state in distributed
  registers. Here it is a memory (one word per channel and block) that is
  read and written in a 3-cycle pipeline, at one update per cycle.
* **Number formats.** All widths, and the 256-entry activation tables, are
  this design's. The paper's engines are high-level-synthesis code and
  publish no formats.
* **Smaller engines.** Norm (RMSNorm), convolution (APoT taps with dynamic
  quantization), smoothing, patch operations and patch embedding are named
  in the paper but not described. Their datapaths here are plausible
  choices, not reproductions.
* **Top level.** The top-level switch, the FIFO depths (LUT FIFO 4, stream 2)
  and all port sets are this design's.
* **Not built.** The patch projection is left to the linear engine, and cutting
  the image into patches is left to the DMA. The host processor and the
  AXI/DRAM side are not part of the RTL.
* **Not checked.** Clock rate and FPGA resources were not targeted or
  measured here.

## 8. Verification

Each testbench is self-checking against a real-valued reference model. Each
prints `TB_RESULT checks=<n> failures=<n>` and stops at a watchdog if the
design hangs.

| testbench | what it checks |
|---|---|
| `tb_act_quantizer` | absmax, INT8 values (±1 LSB of the exact division), first/last flags, latency |
| `tb_lut_precompute` | all 8 LUT entries against the APoT levels, control packets in replay order |
| `tb_lut_pe_lane` | block sums with reset/flush |
| `tb_dequant_postproc` | scaling, bias, ReLU/SiLU/SoftPlus against exact functions |
| `tb_linear_engine` | 96→64 layer, 4 tokens, all four activation modes, random back-pressure, replay stall, cycle count against `tokens·(ntiles·ktiles + ktiles + 2)` |
| `tb_exp_approx` | 4000-point sweep, error < 0.004 |
| `tb_ssm_engine` | two state blocks, two sequences (state reset), against a double-precision scan, cycle count of one channel-block per cycle |
| `tb_causal_conv1d` | two sequences, history reset, back-pressure |
| `tb_norm_residual` | residual sum exactly, RMSNorm to 0.5 % |
| `tb_layer_smoothing` | exact rounding |
| `tb_patch_ops`, `tb_patch_embed` | token order, class token, last flags |
| `tb_sync_fifo` | against a counting model |
| `tb_vimq_top` | end to end at reduced buffer sizes and small run-time sizes, random back-pressure |
| `tb_vimq_top_full` | the same scenario with the top at its default capacities and ViM-tiny sizes |

**The end-to-end test** (`tb_vimq_top_body.svh`) runs these chains:

* patch embedding → norm with residual → smoothing → linear (SiLU), with an
  SSM scan running on the side. The norm and smoothing output is checked where
  it enters the linear engine. The linear output is checked against a
  reference computed from the tiles the engine actually received. Upstream
  rounding can move an INT8 code by one step, and with 192 inputs those steps
  add up to more than the linear layer's own error;
* flip → causal convolution;
* class-token extraction.

It counts how often each mechanism occurred and fails if any never did:

* LUT replay stall;
* LUT FIFO full;
* output back-pressure;
* class-token insertion;
* residual add;
* flip;
* class-token extraction;
* conv history reset;
* SSM state reset;
* route change;
* SiLU.

The full-size test (`tb_vimq_top_full`) builds every buffer at its default
size. It runs ViM-tiny sizes:

* hidden width 192;
* 196 patches plus the class token (a 224×224 input);
* a 192→384 linear layer, the paper's single-layer benchmark.

After an initial stall it checks the linear layer's steady-state rate. It
measures 300 cycles per token, 59,100 for 197 tokens (58,780 in the paper).
It runs in well under a minute. The small test uses 32 channels, 4 patches and
a 32→128 layer.

To run one test with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_linear_engine \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/vimq_pkg.sv tb/tb_linear_engine.sv
./obj_dir/Vtb_linear_engine
```

Run it from the directory holding `rtl/` and `tb/`, because the activation
tables are read by the relative path `rtl/*.hex`.
