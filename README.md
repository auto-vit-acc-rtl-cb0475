# Mixed-scheme quantised Vision Transformer accelerator

This is RTL for an FPGA-style accelerator that runs the matrix layers of a
Vision Transformer (DeiT-class models). Its defining idea is
*mixed-scheme quantisation inside one weight matrix*. Some output rows of
every layer use ordinary b-bit fixed-point weights ("Fixed" rows). Their
multiplications go to DSP slices, and several low-precision products are
packed into one DSP. The other rows use b'-bit power-of-two weights ("PoT"
rows). Each PoT weight is ±2^e or 0, so a PoT row multiplies with a shift and a
conditional negate in plain logic. A fixed split of the output rows between the
two schemes lets one design use both resource pools at once:
T_m^Fix = 24 Fixed rows and T_m^PoT = 16 PoT rows per tile, so 40 % of rows are
PoT.

The default build is the DeiT-base, W4A4 + W3A4 configuration:

- 4-bit Fixed weights.
- 3-bit PoT weights.
- 4-bit activations.
- 128-bit data ports.
- 12 attention heads, processed 4 at a time.
- Up to 197 tokens.

The PoT width follows the rule b' = floor(log2 b) + 1. A b-bit activation
shifted by the largest PoT exponent then fits the same 2b-bit product as a
Fixed multiply. Both row types therefore feed one accumulator format.

What is built: every layer of the form `Y = W · X` (the Q/K/V projections, the
attention output projection, both MLP layers), with optional residual add. A
separate LayerNorm unit turns 16-bit tokens into 4-bit activations. Softmax, GELU
and the scaling between layers are left to a host processor. The design
exposes plain valid/ready word streams where external memory would connect.

## Data layout and tiling

A layer has M output channels, N input channels and F tokens. The activation
matrix X (N × F) is cut by input channel into *groups*. One group is what the
four head lanes consume together: P_h = 4 head lanes × T_n = 32 channels.
T_n equals the number of 4-bit values in one 128-bit word (D = 128 / b), so one
word carries one token's slice for one lane.

```
G   = N / (P_h · T_n)            input-channel groups per output tile
cph = N / (N_h · T_n)            chunks of T_n channels per head
group g  ->  head block hb = g / cph,   chunk c = g % cph
lane p of group g reads channels  (hb·P_h + p)·(N/N_h) + c·T_n  ... + T_n - 1
```

The output is cut into tiles of T_m = 40 rows: rows 0..23 of the tile are
Fixed and rows 24..39 are PoT. The host orders the weight matrix so.

There are two layer modes, chosen per layer in `cfg.mode`:

- **FC mode**: every channel contributes to every output. The four lane results
  are added together, and the output buffer has one slot per tile.
- **MSA mode**: head h only sees its own N/N_h channels, so each lane's result
  stays separate. The output buffer has N_h/P_h = 3 slots per lane, one per head
  block. That gives N_h head slices of T_m rows per tile, which is where the N_h
  factor in the output-buffer size comes from.

In both modes an output word carries 32 four-bit results of one token. Stored
tiles therefore leave as ceil(T_m/32) = 2 word columns × ceil(F/2) token pairs,
per head slice.

## Head lane and DSP packing

`head_lane` is the MAC array of one head. Every cycle it takes two tokens
(2k, 2k+1) of T_n activations. It forms the dot products of both tokens with all
40 weight rows:

- **Fixed rows** go through `dsp_pack_mul`, a bit-exact model of a DSP48E2
  computing P = (A + D) × B with 27/27/18-bit inputs and a 45-bit output. For
  b ≤ 4 the operands are packed as
  `A = w0`, `D = w1 << 22`, `B = a0 + (a1 << 11)`. The four products w0·a0,
  w0·a1, w1·a0 and w1·a1 then sit at bit offsets 0, 11, 22 and 33 of P. Each
  field is read and corrected for the borrow that a negative field below it
  leaves (add the sign bit of the lower field). That is four 4×4 products per
  DSP (0.25 DSP per multiply). One lane uses 12 × 32 DSPs, and the four lanes
  use 1536. For 5..8-bit operands the module packs two products instead:
  `B = w`, `A = a0`, `D = a1 << 18`.
- **PoT rows** go through `pot_shift_mul`. The weight code is
  `{sign, e[b'-2:0]}`:
  - e = 0 means zero.
  - Otherwise the magnitude is 2^(e-1), so a 3-bit code gives {0, ±1, ±2, ±4}.

  The product is the activation shifted left by e-1 and negated if the sign bit
  is set.

Both row kinds are summed over the 32 channels with combinational adder trees.
`mha_compute_engine` holds the P_h lanes and registers their results. In FC mode
it also adds the lanes together.

## Double-buffered tile schedule (`tile_controller`)

This is the part that needs the most care. Each output tile is computed in
phases k = 0 … G:

- **Phase k loads group k** into input and weight bank k mod 2. Loading uses
  8 input words and 4 weight words per cycle.
- **At the same time it computes group k-1** from the other bank. It issues one
  token pair per cycle.
- **A phase ends when both halves are done.** Each loader and the issuer raises
  a look-ahead "finishes this cycle" signal. A phase therefore lasts exactly
  max(L_in, L_wgt, L_cmpt) cycles with no idle cycle between phases:

  ```
  L_in   = P_h · ceil(F / A_in)
  L_wgt  = P_h · (ceil(T_m^Fix / A_wgt) + ceil(T_m^PoT / A_wgt))
  L_cmpt = ceil(F / 2)
  ```

  At the defaults with F = 197 these are 100, 40 and 99 cycles. Phase 0 only
  loads, and phase G only computes.
- **Drain.** After phase G the controller waits 3 cycles for the last
  accumulations to land (issue, engine register, read-modify-write). It then
  hands the finished output bank to the store unit.
- **Output banks.** The output buffer is double-buffered too. The next tile
  starts computing into the other bank while the store unit drains this one. If
  the previous store is still running at hand-over, the controller waits.

Each issued token pair carries a tag with the following fields:

- the output bank;
- a "first group of this slot" flag, which makes the output buffer overwrite
  instead of add;
- the slot;
- the pair index.

The tag travels through the engine's pipeline register with the data.

### Against the analytical latency model

The classic model for this kind of schedule is

```
L_1   = max(L_in, L_wgt, L_cmpt)
L_out = (1 + γ) · ceil(T_m / D) · ceil(F / A_out)      γ = N_h - 1 for MSA, else 0
L_2   = max(L_1 · G + L_cmpt, L_out)
L_tot = L_2 · ceil(M / T_m) + L_out
```

Here A_out = 2: the store emits two tokens per beat on two 128-bit words.

The source's own compute formula is L_cmpt = ceil(F/2) · ceil(N_h/P_h). In
this design one group holds P_h · T_n channels, which matches the source's load
formulas and its group count N/(P_h · T_n). Computing a group takes ceil(F/2)
cycles, so the extra factor ceil(N_h/P_h) does not appear here. All model
numbers quoted below leave that factor out. With the factor, the model would
count three times the compute time at the defaults.

The RTL differs from this model in two ways:

- **Extra cycles per tile.** Phase 0 (load only), the G-1 overlapped phases
  and phase G (compute only) add up to exactly L_1 · G + L_cmpt. On top of
  that, each tile spends about 4 cycles in the pipeline drain and the
  hand-over, and a layer spends a few more at start-up. For a DeiT-base FC slice
  (M = 80, N = 768, F = 197) the model gives 1596 cycles and the RTL takes
  1609.
- **A single store-bound tile finishes early.** When a layer has a single tile
  and the store dominates, the model counts the last L_out twice. The RTL then
  finishes well before the model. For example, an MSA layer with M = 40 takes
  3084 cycles against a model value of 4752.

The end-to-end testbenches check every full-rate layer between a lower bound and
the model plus 6 cycles per tile:

- The lower bound is the larger of the total compute time and the total store
  time.
- The controller test checks every phase length exactly.

## Store path and residual add (`store_unit`, `out_quant`)

The store unit reads a finished bank, slice by slice. There is one slice in FC
mode and N_h slices in MSA mode. Within a slice it goes column by column, and
within a column token pair by token pair. It reads through a one-cycle RAM read
and an output register, and it sustains one beat per cycle under `out_ready`
backpressure.

Each accumulator passes through `out_quant`:

- **Normal mode.** `q = sat(round(acc >> rq_shift))` to the symmetric b-bit range
  ±(2^(b-1) - 1), which is ±7 for 4 bits. This produces the next layer's
  activations, 32 per word. Rounding is half-up.
- **Residual mode** (`cfg.res_en`, FC layers).
  `q = sat16(round(acc >> res_shift) + skip)`. The skip value comes in on the
  `skip_*` stream, 8 sixteen-bit values per word, so a tile has ceil(T_m/8)
  columns. Words with the skip values of the same columns and token pairs are
  consumed one pipeline stage ahead of the matching output beat.

`out_tok_ok[t]` is high when token 2k+t is a real token (index < F). It is low
for the padding token of an odd F.

## LayerNorm (`layernorm_unit`)

The unit takes tokens of N channels (N ≤ 768) as 16-bit Q8.8 values, eight per
word, and computes:

```
mean = Σx / N,   var = Σx² / N − mean² + 2⁻¹⁶,   std = √var
y    = (x − mean) · (1/std) · γ + β              (Q8.8)
q    = sat_b(round(y / 2^q_shift))                to b-bit activations, 32 per word
```

It works as follows:

- **Load.** It buffers the token while it accumulates Σx and Σx².
- **Mean and E[x²].** One 48/24-bit restoring divider (`seq_divu`), shared
  between them.
- **Square root.** A bit-serial integer square root.
- **Inverse.** A third division forms 2^24 / std.
- **Output.** One multiply pair per channel.

The γ and β values are written through `ln_par_*`, eight channels per word.
Each token takes N/8 load cycles, three 48-cycle divisions, a 16-step square
root and one cycle per output channel. The unit is sized for small area rather
than speed.

## What follows the source design and what is this implementation's choice

These points follow the source design:

- The Fixed/PoT row split.
- The bit-width alignment b' = floor(log2 b) + 1.
- The DSP formula P = (A + D) × B and 0.25 DSP per 4-bit multiply.
- P_h = 4 with N_h = 12.
- T_n = D = 128/b.
- Two tokens fetched per compute cycle.
- Double-buffered input, weight and output tiles.
- The FC/MSA distinction with the N_h factor on the output buffer.
- 16-bit LayerNorm.
- The latency model above.

These are this implementation's choices, where the source is silent:

- **Tile sizes.** T_m^Fix = 24 and T_m^PoT = 16 make 1536 DSPs and 40 % PoT rows.
- **Port counts.** 8 input ports, 4 weight ports and 2 output ports.
- **PoT code format and DSP bit offsets.**
- **8-bit packing operand placement.** The weight goes in B and the
  activations in A and D, because two 8-bit activations in the 18-bit B port
  cannot give separable products.
- **Accumulator width.** 32-bit accumulators, where the source sizes the output
  buffer in b-bit entries.
- **Power-of-two scaling.** Scaling between layers is a rounding shift.
- **Residual add on the store path.**
- **LayerNorm arithmetic.** The Q8.8 format, and the divider and square-root
  method.
- **Handshakes.** All stream handshakes.
- **Per-tile overhead.** The overhead described above.

The constraint N mod (N_h · T_n) = 0 is checked by an assertion. At the
defaults, N must be a multiple of 384.

The source has one sentence that implies 2 × T_m · P_h · T_n MACs per cycle and
another that implies T_m · P_h · T_n. This design follows the L_cmpt formula,
which fetches two tokens per cycle.

The first layer of a ViT, the patch-embedding convolution, has kernel size
equal to its stride. The host can therefore rearrange its input into tokens and
run it as an FC layer.

Not built:

- the host-side softmax, GELU and scale steps;
- the off-chip memory and AXI interconnect;
- the offline resource model and design-space search;
- quantisation-aware training.

## Which configurations fit

- **DeiT-base W4A4 + W3A4** (width 768, 12 heads, 197 tokens) runs at the
  default parameters. It is simulated at full size.
- **8-bit configurations** need `B_FIX = 8, B_POT = 4`. The multiplier
  supports them, but the default build does not hold them.
- **DeiT-small** (width 384, 6 heads):
  - Its FC layers fit at the defaults.
  - Its MSA layers need `NH = 6` and a `PH` that divides 6.

## Files

| file | role |
|---|---|
| `rtl/vit_pkg.sv` | shared constants, `layer_cfg_t`, `layer_mode_e` |
| `rtl/pot_shift_mul.sv` | PoT multiply by shift |
| `rtl/dsp_pack_mul.sv` | DSP48E2 packing model and unpacking |
| `rtl/head_lane.sv` | one head's Fixed + PoT MAC array |
| `rtl/mha_compute_engine.sv` | P_h lanes, FC lane sum, result register |
| `rtl/input_tile_buf.sv` | double-buffered P_h × F × T_n activations |
| `rtl/weight_tile_buf.sv` | double-buffered weight tiles (registers) |
| `rtl/output_tile_buf.sv` | double-buffered accumulators, head slots |
| `rtl/tile_controller.sv` | loaders, issuer, phase schedule, hand-over |
| `rtl/out_quant.sv` | requantisation and residual add |
| `rtl/store_unit.sv` | output/skip streaming |
| `rtl/seq_divu.sv`, `rtl/layernorm_unit.sv` | LayerNorm |
| `rtl/vit_acc_top.sv` | the accelerator |
| `tb/tb_<block>.sv` | self-checking test of each block |
| `tb/tb_vit_acc_top.sv` | end-to-end at reduced tile sizes, all mechanisms counted |
| `tb/tb_vit_acc_full.sv` | end-to-end at default parameters, DeiT-base shaped layers |

## Simulating

Each testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<n>` and has a cycle watchdog. With Verilator 5:

```
verilator --binary -Irtl -Itb rtl/vit_pkg.sv tb/tb_vit_acc_top.sv -y rtl \
          --top-module tb_vit_acc_top -Mdir obj_top -o sim
./obj_top/sim
```

Substitute any other testbench name in the command.

**`tb_vit_acc_top`** runs these layers:

- ten FC and MSA layers;
- full-rate and randomly stalled streams;
- residual layers;
- LayerNorm tokens.

It uses small tiles: 4 + 2 rows, 2 lanes, 4 heads, 9 tokens. It counts these
events and fails if any of them never happens:

- FC, MSA and residual layers;
- PoT rows;
- output back-pressure and input stalls;
- load-bound and compute-bound phases;
- store wait and store overlap;
- padding tokens;
- LayerNorm tokens;
- cycle checks.

**`tb_vit_acc_full`** instantiates the top with no parameter overrides. It
runs three layers with N = 768 and F = 197:

- an FC layer with M = 80;
- an MSA layer;
- a residual layer under stalls.

It then runs two 768-channel LayerNorm tokens and checks about 126 000 values.
Building it takes a few minutes. The simulation takes about a second.

To change the configuration, override the parameters of `vit_acc_top`:
`B_FIX`, `B_POT`, `TM_FIX`, `TM_POT`, `PH`, `NH`, `F_MAX`, `A_IN`, `A_WGT`
and `LN_N_MAX`. `TM_FIX` must be even for 4-bit packing, and `PH` must divide
`NH`.
