# MX-SAFE accelerator in SystemVerilog

Microscaling (MX) formats store a block of values as small elements that share one 8-bit exponent.
Formats with many mantissa bits (MXINT8, MXFP8 E2M5) are precise for inference, because the values
of a block sit close to the block maximum. They fail in training, where small gradients many
binades below the maximum underflow to zero. Formats with more exponent bits (MXFP8 E4M3) keep
those gradients but lose precision everywhere else.

MX-SAFE (MXSF) resolves this per element. An 8-bit element normally uses E2M5: 2 local exponent
bits and 5 mantissa bits. The E2M5 local exponent `00` would only encode subnormals, so MXSF
reuses it as an escape: an element whose local exponent bits are `00` is an E3M2 element (3
exponent bits with bias 10, 2 mantissa bits). E3M2 covers values 3 to 10 binades below the shared
exponent. Values close to the block maximum keep 5 mantissa bits. Small values keep a usable
exponent range instead of underflowing.

This repository holds RTL for an accelerator built around that format. It contains:

- a converter that turns BF16 blocks into MXSF;
- two 0.5 MB operand buffers;
- a 16×16 systolic tensor array of MXSF-aware multiply-accumulate units (SAFE-MACs);
- a controller that feeds the array with either 1×64 blocks (inference) or 8×8 tiles (training);
- a 0.5 MB result buffer.

The format, the array organisation, the unit formats (E4M5 multiplier, FP12 E4M7 adder tree) and
the buffer sizes follow the MX-SAFE publication (Park, Koo, Hwang, Kung). The publication does not
describe the accumulator, the SRAM organisation, the controller or any handshake. Those parts, and
every rounding detail, are choices made here. They are marked as such below and in each file's
header.

## 1. The MXSF element

Every block has one shared exponent `S`. It is stored as an E8M0 byte with bias 127, the same
field as a BF16 exponent. Each element is one byte:

| bits 7 | 6:5 | 4:0 | meaning | value / 2^(S-127) | distance d = S - e_x |
|---|---|---|---|---|---|
| s | `le` ≠ 00 | m[4:0] | E2M5 | ±2^(le-3) · 1.m | 0 … 2 |
| s | 00 | se[2:0] ≠ 0, m[1:0] | E3M2 | ±2^(se-10) · 1.m | 3 … 9 |
| s | 00 | 000, m[1:0] | E3M2 subnormal | ±2^-10 · 0.m | ≥ 10 |
| s | 00 | 000, 00 | zero | 0 | |

The E2M5 and E3M2 ranges meet without overlap. The smallest E2M5 value is 2^-2 and the largest
E3M2 value is 2^-3 · 1.75. The subnormal row follows the publication's worked example, where a
value 10 binades down is stored as 0.11b · 2^-10. The subnormal therefore *saturates* at
0.75 · 2^-10. Values between 2^-10 and 2^-9 lose accuracy there. The RTL reproduces that behaviour
on purpose.

Worked example (checked in `tb_mxsf_converter`). The block holds BF16 values with exponent fields
129, 120, 128, 126, 0 and 119, so S = 129:

| BF16 | d | MXSF code | stored value |
|---|---|---|---|
| −6.8125 | 0 | `F7` (E2M5, le=3, m=10111) | −6.875 |
| 0.01001 | 9 | `05` (E3M2, se=1, m=01) | 0.00977 |
| 3.71875 | 1 | `5C` (E2M5, le=2, m=11100) | 3.75 |
| 0.62109 | 3 | `1D` (E3M2, se=7, m=01) | 0.625 |
| 0 | – | `00` | 0 |
| 0.00549 | 10 | `03` (subnormal, 0.11) | 0.00293 |

## 2. Conversion (`mxsf_converter`)

One 64-value BF16 block is converted in one cycle. The following cycles write it into an operand
SRAM.

1. `S` is the largest BF16 exponent field in the block. This equals floor(log2 max|x|).
2. Each element goes to E2M5 if `d < 3` and to E3M2 otherwise. Mantissas are rounded to nearest,
   ties away from zero. The publication's example rounds a tie upward, which fixes the tie rule.
3. A rounding carry moves the element one binade up. This is exact across the E3M2→E2M5
   boundary. At d = 0 it saturates to 1.11111b.
4. For d ≥ 10 the element becomes the 2^-10 · 0.mm subnormal, rounded and saturated at 0.11b.
5. BF16 zeros and subnormals become 0. Inf and NaN are not handled.

The converter then writes the block in the layout the controller expects (section 5). A 1×64 block
takes 16 write beats of 4 bytes, one per K-step. An 8×8 tile takes 2 beats of 32 bytes. The shared
exponent is written with the first beat. `in_ready` stays low until the last beat.

## 3. Arithmetic inside a SAFE-MAC (`safe_mac`)

Per cycle a SAFE-MAC takes four input elements, four weight elements and the two shared exponents
`sa`, `sw`. It performs these steps:

- **Decode** (`mxsf_decoder`). A byte whose bits 6:5 are `00` is E3M2. Any other byte is E2M5.
  Both map into one E4M5 operand: `value = 2^(e-15) · 1.m` relative to `S`, with `e = 0` for zero.
  E2M5 gives e = 12+le. E3M2 gives e = 5+se. Subnormals are renormalised to e = 3 or 4. Every MXSF
  value is exact in E4M5, down to 2^-12.
- **Multiply** (`safe_mul`). The 6×6-bit significand product is exact. It is rounded once to
  FP12_E4M7: 1 sign bit, 4 exponent bits, 7 mantissa bits.
- **Adder tree** (`fp12_adder` ×3). The tree computes (p0+p1)+(p2+p3). Each adder aligns its
  operands exactly and rounds once to FP12.
- **Scale and accumulate** (`fp32_adder`). The FP12 partial sum is registered. It is then
  multiplied by 2^(sa+sw-254) by adding to its exponent, and added into an FP32 accumulator. The
  accumulator is output-stationary: it stays in the MAC for a whole output tile. `first` loads it
  and `last` raises `done`.

FP12 uses exponent bias 12, so it covers 2^-11 up to just under 16. A sum of four maximal products
(3.875 each) fits. Anything below 2^-11 is flushed to zero. Two elements that are both far below
their shared exponents can produce such a product, for example two E3M2 elements 6 or more
binades down. This follows from the FP12 choice; it is not a bug. Every rounding step rounds to
nearest with ties away from zero. Overflow saturates. Subnormal results flush to zero.

The FP32 accumulator is needed because partial sums from different blocks carry different
scales. The publication does not say how accumulation is done. FP32 is this design's choice, and
so are the one-register pipeline before the accumulator and the FP32 adder's handling of
specials: no subnormals, no Inf or NaN, saturation at the largest finite value.

Latency: a K-step sampled at clock edge *t* is in `acc` after edge *t+1*.

## 4. The systolic tensor array (`sta_pu`, `mxsafe_core`)

A processing unit (PU) is a 4×4 grid of SAFE-MACs. Inside a PU nothing is registered between
MACs. Input row *r* (4 elements and its exponent) is broadcast to the four MACs of that row.
Weight column *c* is broadcast down its column. Per cycle a PU therefore consumes 16 input and 16
weight elements and performs 64 multiplications. Registers sit only at the PU boundary. This is
the saving a systolic tensor array makes over a MAC-level systolic array.

The core is a 4×4 grid of PUs, which gives a 16×16 output tile. Inputs move one PU to the right
per cycle, together with `valid`/`first`/`last`. Weights move one PU down per cycle. The core
skews its edges so that operands for the same K-step meet:

- PU row *i* receives its inputs *i* cycles late.
- PU column *j* receives its weights *j* cycles late.
- PU (*i*,*j*) computes a K-step *i+j* cycles after it entered.

`done` comes from the bottom-right PU. It rises PR+PC−1 = 7 edges after the edge that sampled the
last K-step, and by then every accumulator is final.

The grid sizes, the four multipliers per MAC and the broadcast inside a PU follow the
publication. The flow directions, skew and control signals are this design's choices.

## 5. 1D blocks and 8×8 tiles (`mode_controller`, `operand_sram`)

Training uses the same operand twice: transposed in the backward pass. With 1×64 blocks along K,
the transposed operand needs its blocks re-formed along the other axis, which means dequantising
and quantising again. With 8×8 tiles a tile stays a valid block after transposition, so the
quantised tensor is reused as is. The array therefore accepts both:

- **1D mode**: every core row (and every core column) has its own 1×64 block. A PU sees four input
  blocks and four weight blocks. Each row's exponent is constant for 16 K-steps.
- **Tile mode**: an 8×8 tile covers 8 rows × 8 K. A PU sees one input tile and one weight tile.
  Rows 0–7 share one exponent and rows 8–15 another. The exponent changes every 2 K-steps, so
  partial sums are rescaled eight times as often as in 1D mode.

**Operand SRAM layout.** Each operand SRAM (input and weight, 8192 words × 64 bytes = 0.5 MB)
holds one K-step of the core per word. Bytes 4r…4r+3 are the four K elements of row *r* (or
column *r* for weights). A *K group* is 16 consecutive words. Each K group has one exponent word
of 16 entries, held in a separate 512 × 16-byte array. Row *r* at K-step *s* of the group takes
its shared exponent from entry:

```
1D mode:    r
tile mode:  2*(s/2 mod 8) + r/8        (tile step, row half)
```

The converter's `slot` input is exactly this entry number. For a 1D block it is the row. For a
tile it is {tile step, row half}, and the tile's element (r,k) is given at index 8r+k.

**Transposed reads.** The backward pass reads a stored tile transposed. The controller does not
do this. Transposing a tile keeps its exponent and only reorders its 64 bytes, and that reordering
is left to whoever loads the SRAMs.

**One output tile.** `mode_controller` runs one tile as follows:

1. After `start` it reads 16·k_groups consecutive words, plus their exponent words, from both
   operand SRAMs.
2. It hands them to the core one cycle later, with the per-row and per-column exponents selected
   as above. `first` and `last` mark the first and last K-steps.
3. It waits for the core's `done`.
4. It writes the 16 accumulator rows to the output SRAM at `out_base … out_base+15`.

From `start` to `done` a tile takes 16·k_groups + 26 cycles. K must be a multiple of 64, and the
operand bases must be 16-word aligned. An assertion checks both.

## 6. Top level (`mxsafe_top`)

The data path runs as follows:

```
 BF16 block ──► mxsf_converter ──► Input SRAM  ─┐
   (ld_*)                      └─► Weight SRAM ─┼─► mxsafe_core (4×4 PU, 16×16 FP32) ─► Output SRAM ─► out_*
                                  mode_controller (start/mode/k_groups/bases, busy/done)
```

- `ld_*` carries one BF16 block per handshake. It also carries the block's layout (`ld_mode`), a
  16-aligned K-group base (`ld_word`), the slot (`ld_slot`) and the destination SRAM (`ld_dst`).
  This is where off-chip memory connects.
- `start` computes one 16×16 tile: A·Wᵀ over K = 64·k_groups.
- `out_re`/`out_raddr` read one result row (16 FP32) per request. The data arrives on the next
  cycle. The peripheral units (activation, softmax, normalisation) and off-chip memory would
  connect here. They are not part of this RTL, because the publication gives only their names
  and costs.

Loading and computing use separate SRAM ports. They may overlap as long as they touch different
words.

Default parameters are the full design: 4×4 PUs of 4×4 MACs with 4 multipliers each, and three
0.5 MB buffers. The operand SRAMs also hold an 8 KB exponent array that is not counted in the
0.5 MB.

## 7. Where this RTL goes beyond the source description

The following are this design's choices, not the publication's:

- All rounding is to nearest, ties away from zero.
- The FP12 bias is 12, with flush-to-zero and saturation.
- The E4M5 encoding has bias 15.
- The adder-tree pairing is (p0+p1)+(p2+p3).
- The accumulator is FP32 and output-stationary, with a two-stage MAC pipeline.
- Inputs flow right and weights flow down, with edge skew.
- The SRAM word organisation and exponent arrays are as described in section 5.
- The converter takes BF16 input; FP32 input is not supported.
- How the mode controller sequences a tile.

The following are not built:

- transposed tile reads;
- Inf/NaN handling;
- the peripheral units;
- off-chip memory;
- any multi-tile scheduler: one `start` computes one 16×16 tile.

## 8. Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`. The reference model in `tb/tb_ref_pkg.sv` is written with `real`
arithmetic from the format definitions, independently of the RTL's bit-level logic.

| testbench | what it checks |
|---|---|
| `tb_mxsf_decoder` | all 256 codes |
| `tb_safe_mul`, `tb_fp12_adder` | random and corner operands against exact arithmetic plus FP12 rounding |
| `tb_safe_mac`, `tb_sta_pu`, `tb_mxsafe_core` | accumulators bit-exact against the model, PU forwarding, `done` latency |
| `tb_mxsf_converter` | the worked example, random blocks in both layouts, beat counts, write masks |
| `tb_mode_controller` | addresses, exponent selection in both modes, first/last, write-back, cycle count |
| `tb_operand_sram`, `tb_output_sram` | masked writes and registered reads at full size |
| `tb_mxsafe_top` | full size, end to end |
| `tb_workload_deit_tiny` | a DeiT-Tiny layer slice at full size (below) |

`tb_mxsafe_top` loads random BF16 matrices through the converter. It computes 16×16×128 tiles in
1D mode, then tile mode, then 1D mode again, and checks all outputs and the latency. It also
counts E2M5 and E3M2 decodes in the core and subnormal elements.

`tb_workload_deit_tiny` runs a slice of a DeiT-Tiny linear layer: 16 tokens × 16 outputs, K = 192
(the model's embedding width).

- The forward pass uses 1D mode. Activations are ~N(0,1) and weights ~N(0,0.02).
- A gradient-like product uses tile mode. Its values are spread over 2^-14 … 2^-30.

Besides the bit-exact check, it reports the normalised RMS error of the whole MXSF pipeline
against the exact BF16 product. Both runs give about 1.7 %.

A testbench builds with plain Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal rtl/mxsf_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv \
          tb/tb_mxsafe_top.sv --top-module tb_mxsafe_top -o sim && obj_dir/sim
```

For one block, list only the files it uses. For example, `tb_safe_mul` needs `rtl/mxsf_pkg.sv`,
`tb/tb_ref_pkg.sv` and `rtl/safe_mul.sv`.

The full-size top builds in a few minutes and runs in under a second.
