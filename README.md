# SemanticDialect FB4 datapath in SystemVerilog

Video diffusion transformers spend most of their time in linear layers. Their
activations vary a lot from block to block, so a single 4-bit number format
fits them poorly. FB4 ("formatbook 4-bit") addresses this with one 4-bit code
per element and a choice of format per block:

- A block of 16 values shares a power-of-two exponent.
- The block also picks one of 32 *dialects*. A dialect is a set of eight
  integer magnitudes between 0 and 15.
- Each element stores a sign and a 3-bit index into its block's dialect.

The SemanticDialect method adds two mechanisms on top of FB4:

- **Activation decomposition.** Some activations are sensitive to
  quantization. For those, the quantization error Δ = A − Q(A) is quantized a
  second time in the same format. The product is then computed as
  (Q(A) + Q(Δ))·W.
- **SeDA (semantic-aware dialect assignment).** Semantically related tokens
  are forced to choose from one shared 8-dialect *sub-formatbook*, with one
  dialect per dynamic range. The sub-formatbook is built by counting which
  dialects "anchor" tokens chose.

This repository holds RTL for the hardware part of that scheme:

- the online quantization unit, which chooses a dialect for each block in one
  cycle using lookup tables;
- the 8-lane FB4 multiply-accumulate unit;
- the residual path that reuses the quantizer for Δ;
- the profiling counters that build the SeDA sub-formatbook;
- a salient-token selector that picks which token of a tile gets decomposed.

It also holds self-checking testbenches for every block.

## The FB4 number

A block of `BLK = 16` FP16 values becomes 16 × 4 bits of elements plus 10
bits of metadata. That is 4.625 bits per value; with 32-element blocks it
would be 4.31.

| field | bits | meaning |
|---|---|---|
| `sign` | 1 | sign of the element |
| `idx` | 3 | index into the dialect's 8 magnitudes |
| `did` | 5 | dialect ID, 0–31 (per block) |
| `exp` | 5 | shared exponent code = E + 16 (per block) |

E = ⌊log2(max |x|)⌋ over the block. An element's value is

    (-1)^sign · FORMATBOOK[did][idx] · 2^(E-3)

The shift by 3 moves the block maximum into [8, 16). As a result, the
magnitudes are plain 4-bit unsigned integers, and the multipliers are 4×4-bit
integer multipliers.

The exponent code covers E from −16 to 15, which is the whole normal FP16
range and part of the subnormal range. A block that is all zero, or whose
maximum is below 2^−16, is flushed: exponent code 0, DID 0 and all elements
0.

## The formatbook

The formatbook is the 32 × 8 table `fb4_pkg::FORMATBOOK`. Its dialects are
grouped by **dynamic range**. A block whose maximum rounds into [8+r, 9+r)
can only use the dialects of range r, and every dialect of range r has 8+r as
its largest magnitude.

Narrow ranges get fewer dialects:

| range r (block max) | 8 | 9 | 10 | 11 | 12 | 13 | 14 | 15 |
|---|---|---|---|---|---|---|---|---|
| dialects | 2 | 2 | 3 | 4 | 5 | 5 | 5 | 6 |
| IDs | 0–1 | 2–3 | 4–6 | 7–10 | 11–15 | 16–20 | 21–25 | 26–31 |

Within a range, the dialects run from dense at small magnitudes (0, 1, 2, 3,
… up to the maximum) to evenly spread (0, 2, 4, …). Every dialect holds 0.
The original method gives its table only as a figure. The magnitude sets here
were therefore written for this design, following the same four rules:

- every range is covered;
- small magnitudes are dense;
- large magnitudes are kept;
- narrow ranges get fewer dialects.

Replacing the table means changing only `FORMATBOOK`, `RANGE_BASE` and
`RANGE_CNT`. The lookup tables below are computed from them at elaboration
time. Every testbench reads the same table, so the tests follow the change
too.

`fb4_formatbook` is one lane's copy of the table. It maps a DID to the
dialect's eight magnitudes, and all 16 multipliers of a lane index into that
one row. Index 0 is always 0, so synthesis removes its column.

## Choosing a dialect in one cycle (`fb4_quant_unit`)

Picking the best of 32 dialects by mean squared error would mean quantizing
the block 32 times. The quantization unit avoids this in three steps. All of
them are combinational, and the result is registered: **latency 1 cycle,
throughput 1 block per cycle**.

1. **Exponent and bins.** The unit finds the largest magnitude in the block
   and takes its leading-one position as E. It then shifts each |x| so that
   the block spans [0, 16) and truncates to half-units. This gives a 5-bit
   *bin* b = ⌊|x|·2^(4−E)⌋, where bin b covers [b/2, (b+1)/2). The shift works
   directly on the FP16 exponent and mantissa. Subnormal inputs are handled.
2. **Range, then dialect.** The bin of the block maximum gives the range:
   r = ⌊b_max/2⌋ − 8. Only the dialects of range r are candidates, at most 6.
   - The block is cut into 8 groups of 2 adjacent elements, and the largest
     bin of each group is kept. This approximates looking only at the block's
     8 largest values without sorting.
   - For every candidate, the unit sums the `Qerror` lookup-table entry of
     the 8 group maxima.
   - `Qerror[d][b]` is the distance from the centre of bin b to the nearest
     magnitude of dialect d, in units of 1/4.
   - The candidate with the smallest sum wins. A tie goes to the lower ID.
3. **SeDA override and element lookup.** If `seda_en` is set, the unit
   ignores the winner and uses `subfb[r]` from the SeDA sub-formatbook. Every
   element then reads its index from `Qvalue[did][b]`.

Because the magnitudes are integers, the decision boundaries fall on
half-integers. A 0.5-wide bin therefore never straddles a boundary, and the
`Qvalue` lookup is the exact round-to-nearest result, with ties going up.

`Qerror` is the approximate part: it uses bin centres, not the true values.
Both tables are 32 × 32 entries and are built from the formatbook by
functions in `fb4_pkg`.

## Multiply-accumulate (`fb4_mac_lane`, `fb4_mac`)

A lane multiplies one 16-element activation block by one 16-element weight
block per cycle:

- Each operand's DID selects a row in its own `fb4_formatbook` instance.
  There are two instances per lane, because activations and weights both
  carry a DID.
- The 16 products are 4×4-bit unsigned multiplies. The sign of each product
  is the XOR of the two element signs.
- The products are summed into a 14-bit signed partial sum.

The block scale is applied by adding exponents only:

- The partial sum is shifted by `expA + expW − 38 + ACC_FRAC`.
- The shifted value is added to a 64-bit two's-complement accumulator with
  `ACC_FRAC = 24` fraction bits.
- Bits shifted out at the bottom are dropped, which rounds toward −∞.
- An overflow saturates at the largest or smallest value.

The lane has two pipeline stages: products and partial sum, then shift and
accumulate. `acc` is valid **2 cycles** after the block enters. `in_clear`
starts a new dot product, and `in_last` produces the `acc_last` pulse.

`fb4_mac` puts `N_LANES = 8` lanes side by side:

- the activation block is broadcast to all lanes;
- each lane gets its own weight block, so the unit computes 8 output
  channels at once;
- the unit performs 128 four-bit MACs per cycle, which is 32 GMAC/s at
  250 MHz.

## Decomposition and the residual pass (`fb4_residual`, `sd_fb4_top`)

`fb4_residual` computes Δ = x − Q(x) for every element of a block:

- |x| is placed on a fixed-point grid of 2^(E−14), eleven bits finer than the
  FB4 step.
- The dequantized magnitude is subtracted on that grid.
- The signed difference is normalised back to FP16, as a normal or a
  subnormal number.

Input bits below the grid are dropped, so Δ is exact whenever |x| ≥ max/16.
Smaller elements lose bits that lie far below the step of the second
quantization.

The top reuses the one quantization unit for Δ instead of adding a second
unit:

    cycle      t          t+1              t+2             t+3          t+4
    input      A accepted in_ready=0       next block
    quantizer  -          Q(A) on output   Q(Δ) on output
    MAC                   Q(A)·W enters    Q(Δ)·W enters   acc += Q(A)W acc += Q(Δ)W

While Q(A) is on the quantizer output, `fb4_residual` forms Δ from the held
FP16 block. The quantizer input is switched to Δ for one cycle, and
`in_ready` drops for that cycle: this is the stall. Both passes use the weight
block held from the A pass and go into the same accumulators. `out_valid`
waits for the Δ pass of the last block.

A decomposed block therefore costs 2 cycles instead of 1. An immediate
assertion checks that the Δ pass always directly follows its A pass.

`decomp_mode` selects which blocks are decomposed:

- `DECOMP_OFF`: no blocks;
- `DECOMP_ALL`: every block, meant for vector-shaped activations such as
  modulation layers;
- `DECOMP_SALIENT`: only blocks whose `in_token` equals the tile's salient
  token, meant for matrix activations, where decomposing every token would
  double the bit width.

## Salient token (`salient_token_selector`)

For a tile of `N_TOK = 16` tokens (4 × 4), the selector receives each token's
pre-softmax attention scores to `N_NB = 16` neighbours, one token per cycle.
It transforms the scores according to `mode`:

| mode | transform | use |
|---|---|---|
| `RAW` | none | — |
| `RELU` | negative scores count as 0 | temporal attention: only positive links count |
| `ABS` | absolute value | spatial / 3D attention: similarity and contrast both count |

The selector sums each token's transformed scores and keeps the running
maximum. Summing instead of averaging changes nothing here, because every
token has the same number of neighbours. The first token wins a tie.

`out_valid` pulses in the cycle after the tile's last token. The top keeps
the result in `salient_token`.

## SeDA profiling (`seda_subfb_builder`)

The builder has one 16-bit saturating counter per dialect:

- Every block the top marks `in_anchor` has its chosen DID counted, on the A
  pass only. Flushed blocks are not counted.
- A `build` pulse takes, for each of the 8 ranges, the most-counted dialect
  of that range. A tie, or a range with no samples, goes to the lowest ID.
- The result is registered as `subfb` and stays in use until the next build.
  After reset `subfb` holds the first dialect of every range.
- `clear` zeroes the counters.

Blocks marked `in_seda` are quantized with the sub-formatbook dialect of
their range. This applies to the A pass and to the Δ pass alike.

## Top level (`sd_fb4_top`)

| group | ports |
|---|---|
| activation input | `in_valid`, `in_ready`, `in_data[16]` (FP16), `in_first`, `in_last`, `in_token`, `in_seda`, `in_anchor` |
| weights | `w_elem[8][16]`, `w_meta[8]`, already in FB4 and sampled with the activation block |
| mode | `decomp_mode` |
| SeDA | `prof_clear`, `prof_build`, `subfb[8]`, `subfb_valid` |
| attention scores | `sc_valid`, `sc_first`, `sc_mode`, `sc_score[16]`, `salient_token`, `salient_sum`, `salient_valid` |
| quantized stream | `q_valid`, `q_elem[16]`, `q_meta`, `q_range`, `q_residual` |
| results | `acc_update`, `out_valid`, `acc[8]` (64-bit) |

Timing:

- Reset is synchronous and active low.
- A block accepted at cycle t appears quantized at t+1, and its product is in
  `acc` at t+3.
- Without decomposition, one block is accepted every cycle.

The per-block flags stand in for the control logic of the surrounding
accelerator:

- `in_first` and `in_last` delimit a dot product.
- `in_token` gives the block's position in its tile.
- `in_anchor` and `in_seda` mark anchor tokens and tokens constrained by
  SeDA. Choosing which tokens these are is done on attention maps outside
  this datapath.

## Where this design departs from the published method

- **Formatbook contents.** The 32 magnitude sets, and their split over the
  ranges, are this design's own (see above).
- **Formatbooks per lane.** The original gives each lane one formatbook. Here
  each lane has two, because both activations and weights are FB4.
- **Δ format.** Δ is carried as truncated FP16. The number format of the
  residual is not specified in the original.
- **Salient score.** The selector uses the sum of the scores instead of their
  mean; the winner is the same.
- **Integer details.** The accumulator width, its saturation, the
  exponent-code bias and the zero-flush rule are this design's choices.
- **Quantizer reuse.** Δ goes through the same quantization unit, at the cost
  of a one-cycle stall, instead of through a second unit.
- **Not included.** The rest of the host accelerator is not part of this RTL:
  buffers, control state machines and other processing units. The same holds
  for choosing anchor and correlated tokens, offline weight quantization and
  the GPU kernel. The top exposes the signals where those parts would
  connect.

At the default parameters only 16-element blocks are supported. Block size 32
would need `N_ELEM = 32` throughout.

## Files

| file | contents |
|---|---|
| `rtl/fb4_pkg.sv` | types, constants, formatbook, lookup-table functions |
| `rtl/fb4_formatbook.sv` | DID → 8 magnitudes |
| `rtl/fb4_quant_unit.sv` | online FP16 → FB4 quantizer |
| `rtl/fb4_residual.sv` | Δ = x − Q(x) in FP16 |
| `rtl/fb4_mac_lane.sv`, `rtl/fb4_mac.sv` | one lane and the 8-lane MAC |
| `rtl/seda_subfb_builder.sv` | dialect counters and sub-formatbook |
| `rtl/salient_token_selector.sv` | salient-token arg-max |
| `rtl/sd_fb4_top.sv` | the datapath with decomposition and SeDA |
| `tb/fb4_ref_pkg.sv` | reference model used by the testbenches |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

The reference model `tb/fb4_ref_pkg.sv` does not share code with the RTL's
bins and lookup tables:

- it computes with `real` arithmetic;
- it finds the nearest value and the best dialect by direct search;
- it forms dot products as exact 128-bit integers.

Only the formatbook table is shared.

Each testbench:

- drives random blocks, including zeros, flushed blocks, subnormals and
  maxima in every range;
- compares every output bit with the reference;
- checks the latencies (1 cycle for the quantizer, 2 for the MAC) and the
  one-block-per-cycle rate;
- ends with a `TB_RESULT checks=… failures=…` line and has a watchdog.

`tb_sd_fb4_top` runs the whole datapath at its default parameters through
six phases:

1. plain FB4;
2. decomposition of every block;
3. salient-token decomposition with ReLU and ABS scoring;
4. SeDA profiling, build and constrained quantization;
5. SeDA together with decomposition;
6. long dot products of the largest values, which saturate the
   accumulators.

It checks the quantized stream, the sub-formatbook, the salient token and
all eight accumulators exactly. It requires exactly one stall per
decomposed block. It also counts stalls, residual passes, salient
selections, profiled blocks, SeDA-constrained blocks, flushed blocks and
saturated accumulations, and fails if any of them never occurred.

To run one testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_sd_fb4_top \
        -y rtl -y tb +libext+.sv rtl/fb4_pkg.sv tb/fb4_ref_pkg.sv tb/tb_sd_fb4_top.sv
    ./obj_dir/Vtb_sd_fb4_top

Swap in any other `tb_*` name to run a different testbench. The top-level
test finishes in well under a second.

All `rtl/` files also pass Verilator lint and Yosys with the slang front end.
Synthesis of the top gives about 7.7 k generic cells and 1.7 k flip-flop
bits. The lookup tables appear as ROMs.
