# VitaLLM-style ternary LLM accelerator in SystemVerilog

BitNet b1.58 models store every linear-layer weight as one of {-1, 0, +1} and
every activation as INT8. Decoding one token is therefore dominated by
ternary x INT8 matrix-vector products, which need no multipliers. A small
number of INT8 x INT8 products remain in attention (QK^T and score x V). A
handful of nonlinear steps (RMSNorm, softmax, per-vector absmax quantization)
need a global statistic of the whole vector before any element can be
finished.

This RTL implements a compact accelerator built around those three facts:

* **TINT cores.** Cheap selector arrays for the ternary work.
* **BoothFlex core.** One radix-4 Booth array for the INT8 attention work. It
  is switched into a single-cycle ternary mode to help the TINT cores during
  the output projection and FFN.
* **Leading-one predictor.** Picks the 32 most relevant past tokens, so only
  their keys and values need to be fetched.
* **Scheduling rules.** Keep the cores busy despite the dependencies between
  heads, between the two cores, and between consecutive vectors.

The organisation, array sizes, buffer sizes and bus widths follow the
published VitaLLM design (TSMC 16 nm, 1 GHz, 130.5 KB of on-chip memory). The
control interface, number formats and every detail the publication leaves
open are choices made here. They are listed below and in the header comment
of each file.

## Block map

```
 packed weights 52x8b ──► weight_unpack (52 LUTs 256x10b) ──► 260 ternary codes
                                                             │
       ┌─────────────── 3 x tint_core (8x8) ◄────────────────┤ codes 0..191
       │                 boothflex_core (8x8) ◄──────────────┘ codes 192..255 (ternary assist)
       │                       ▲ INT8 K/V tiles (attention)
 quantized_buffer 3x1088x64b ──┴─ 1x64b activation broadcast
       ▲ 8x8b                                   │ 32x16b rows
       │                                        ▼
     fp_unit  ◄──── 8x16b tiles ──── intermediate_buffer 1372 x 32 x 16b
                                                │ query tile
                                                ▼
               leading_one_detector → lop_core (ExpAdd 8x8) → topk_selector → indices
```

`vitallm_top` wires these together. Four command engines drive them:

* projection (P);
* attention (A);
* nonlinear (N);
* prediction (L).

`head_scheduler` decides when P and A may start.

## Ternary weights and the unpacking tables

Five trits fit in one byte, because 3^5 = 243 ≤ 256. That is 1.6 bits per
weight. The packing used here is

    byte = sum_{i=0..4} (w_i + 1) * 3^i

A 256-entry table turns a byte into five 2-bit codes:

* +1 = `01`
* 0 = `00`
* -1 = `11`

Trit i goes to bits [2i+1:2i]. Codes 243..255 never occur and decode to
zeros. The table is computed in SystemVerilog (`vitallm_pkg::unpack_byte`)
rather than loaded from a file. `weight_unpack` holds 52 such tables, so one
52-byte beat yields 260 codes per cycle:

* 192 codes feed the three TINT cores (64 each).
* The next 64 feed the BoothFlex core when it assists.
* 4 are spare.

The table read is registered. The activation row is read from the quantized
buffer in the same cycle, so both arrive at the arrays together. An assertion
in the top checks this alignment.

## TINT core

This is an 8x8 output-stationary array:

* Activation element c is broadcast down column c.
* Each processing element (PE) gets its own weight code and outputs +a, 0 or
  -a.
* Each row adds its eight selections to a 16-bit accumulator. The row
  accumulates the dot product of one output neuron over the input tiles.
* A `first` flag makes the chain start from 0 instead of the accumulator. This
  is the multiplexer at the head of each row.

One tile is consumed per cycle, which is 64 operations per cycle per core.
Sums wrap in two's complement, and the intermediate buffer stores 16 bits.

## BoothFlex core: one array, two precisions

Each PE is a radix-4 Booth partial-product generator (`booth_pp`). It reads a
3-bit window of the multiplier and outputs 0, ±y or ±2y.

**INT8 x INT8 (attention).** The 8-bit multiplier is sign-extended to 10 bits
so that ⌈(8+2)/2⌉ = 5 overlapping windows cover it. Windows are scanned from
the most significant one. The first-stage register of each row is shifted
left by 2 and added to the new row sum each iteration. After five iterations
it holds the exact 8-term dot product. A second stage then adds it into the
16-bit output accumulator. An INT8 tile occupies the array for 5 cycles, and
`in_ready` is low during iterations 2 to 5.

**Ternary x INT8 (assist).** The 2-bit code with a 0 appended is itself a
valid Booth window:

| code | window | result |
|------|--------|--------|
| `01` | `010`  | +y     |
| `11` | `110`  | -y     |
| `00` | `000`  | 0      |

So one cycle per tile suffices, the same rate as a TINT core.

The second-stage accumulator has an explicit clear (`acc_clr`). The owner of
the core pulses it at the start of a command and after each result is
written.

## Leading-one prediction

Attention over a long context is limited by fetching the KV cache. The
predictor estimates q·k cheaply and keeps only the best 32 keys.

* **Leading-one code.** Each INT8 value x becomes a 4-bit code:
  {sign, floor(log2|x|)}. Zero is coded like +1, which is a choice made here.
* **ExpAdd array.** `lop_core` replaces each product by ±2^(LOq + LOk). The
  sign is negative when the two signs differ. It sums these over the head
  dimension, 8 dimensions per cycle, for 8 keys in parallel. The query codes
  sit in a small buffer of 16 tiles (up to 128 dimensions) and are reused for
  every key group. `dim_mask` drops lanes beyond the head size; a 100-wide
  head has 4 valid lanes in its 13th tile.
* **Top-K without comparators.** `topk_selector` keeps up to 4096 scores. It
  stores each score with the sign bit inverted, so that plain unsigned bit
  order equals signed order. It then walks the bit planes from the MSB. At
  each plane, let "ones" be the candidates with a 1 in that plane:
  * If they number no more than the places still open, all of them are
    selected.
  * Otherwise only they remain candidates.

  After the last plane, any candidates still left are tied. The lowest
  indices among them fill the remaining places. This takes one cycle per bit
  plane (24), then one index per cycle on a valid/ready stream, lowest
  selected index first. Only a population count and a priority encoder are
  needed. Both are built from 64-entry chunks plus a combine over the chunks,
  so `MAX_SEQ` must be at most 64 or a multiple of 64.

## Nonlinear unit: two stages and a barrier

RMSNorm, softmax and quantization each need a statistic of the whole vector.
`fp_unit` splits the work so that nothing waits for that statistic except a
final pass.

**Stage 1 (per 8-element tile, one per cycle).**

* RMSNorm: y = x·γ (γ in Q2.14) and Σx².
* Softmax: y = exp(logit - 16) and Σy. The logit is formed as x·scale/2^8 in
  Q8.8. The fixed "unified maximum" of 16 replaces the true maximum, so no
  tile has to wait for it. The exponential is 2^(t·log2 e), from a 17-point
  interpolated table, in Q1.14.
* Quantize only: y = x.
* Every mode tracks max|y|.

Stage-1 results go back into the intermediate buffer.

**Finalisation.** A 24-step divider forms R = ⌊127·2^16 / max|y|⌋. It takes
25 cycles.

**Stage 2.** The tiles are re-read and q = sat±127(round(y·R/2^16)).

The deferred factor 1/RMS (or 1/Σ) is never applied to the data. It scales
every y of the vector equally, so absmax quantization divides it out
exactly. The unit instead reports Σ and max|y| (`nl_stat_sum`,
`nl_stat_max`). The dequantization scale of the INT8 result is max|y| /
(127·RMS) or max|y| / (127·Σ).

The published unit is a floating-point unit whose internals are not
described. Here it is fixed point. Its formats, the exp approximation and the
divider are all choices made here, and `fp_unit` is the part of this RTL
least tied to the original.

## Scheduling

`head_scheduler` enforces three rules:

1. **Head-level pipelining.** Projecting head h (TINT cores) may overlap
   attention on head h-1 (BoothFlex). Two head slots exist:
   * A producing projection needs a free slot.
   * The first attention command of a head needs a produced head.
   * The last attention command of a head frees its slot.

   The two stall cases are reported as `events.head_credit_stall` and
   `events.attn_head_wait`.
2. **BoothFlex ownership.** Attention has priority. A projection that asks
   for the ternary assist waits while attention runs or is starting
   (`bf_busy_stall`). Once started it holds the core until it finishes, and
   attention waits for it. Mode switches are reported as `bf_to_ternary` and
   `bf_to_int8`.
3. **Vector barrier.** A projection marked `wait_q` starts only after the
   nonlinear unit has finished a vector since the last such projection
   (`quant_barrier`). Its input is then the fully quantized vector.

Writes into the intermediate buffer are arbitrated N > P > A. A refused
writer keeps its result and retries the next cycle (`wr_conflict`).

## Command interface

Each engine takes one command at a time on a valid/ready pair. Command
structs are in `vitallm_pkg`. Rows are 8 elements wide in the quantized
buffer and 32 lanes wide in the intermediate buffer.

| engine | command | what it does | streams |
|--------|---------|--------------|---------|
| P | `proj_cmd_t` | n_out groups of 24 outputs (32 with `use_bf`), each over n_in 8-element input tiles from one quantized-buffer bank; group g goes to intermediate row dst_row+g | consumes n_in weight beats per group (`w_*`) |
| A | `attn_cmd_t` | INT8 GEMV on BoothFlex, 8 outputs per group into quarter dst_q of row dst_row+g | consumes one 8x8 INT8 tile per input tile (`kv_*`) |
| N | `nl_cmd_t` | n_tiles tiles read from rows starting at src_row, tpr quarters per row from src_q0; INT8 result to rows dst_row.. of dst_bank | gamma tiles (`g_*`) in RMSNorm mode |
| L | `lop_cmd_t` | query of n_dtiles tiles (last one with last_dims lanes) from the intermediate buffer, n_tok keys | consumes n_dtiles code tiles per 8 keys (`klo_*`); returns up to 32 indices (`idx_*`) |

`*_done` pulses when a command completes. The host fills the quantized buffer
through `host_qb_*` while the N engine is idle. Where the streams come from
(DRAM, a DMA) is outside this design.

**Timing.**

* A projection group takes n_in + 3 cycles without contention:
  * n_in cycles, one weight beat per cycle;
  * two drain cycles;
  * one write cycle.
* An INT8 attention tile takes 5 cycles.
* An N command takes about 2·n_tiles + 33 cycles.
* An L command takes:
  * n_dtiles cycles for the query;
  * n_dtiles per group of 8 keys;
  * 24 selection cycles;
  * 32 output cycles.

## Sizes and how far they go

Default parameters are the published sizes:

* quantized buffer 3 x 1088 x 64 b;
* intermediate buffer 1372 x 32 x 16 b;
* 52 LUTs;
* Top-32 over up to 4096 tokens;
* unified maximum 16.

The published figure and text give 73.14 KB for the intermediate buffer,
while its memory table gives 87,748 B. The table's number is used. The figure
prints 3-bit key leading-one codes; the text's 4-bit (sign + LO) form is
used.

With these defaults:

* A BitNet b1.58 3B layer fits: the largest vector (FFN 8640) needs 1080 of
  the 1088 rows.
* A 2B model fits.
* 7B- and 13B-shaped models need `QB_ROWS` of at least 1376 and 1728.
* Contexts up to 4096 tokens are handled by the predictor.

Buffers are register arrays. A real implementation would map them to SRAM
macros. External memory and the SRAM macros themselves are not part of this
RTL. The bit-serial BoothFlex variant, which the publication discusses as an
extension, is not included.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
against a reference computed independently in the testbench:

* base-3 arithmetic;
* integer dot products;
* real-valued exp;
* a sorting Top-K.

Each testbench prints `TB_RESULT checks=N failures=M`. Rates are checked:

* one tile per cycle for TINT and ternary BoothFlex;
* 5 cycles per INT8 tile;
* 24 + 1 cycles to the first Top-K index;
* 25 cycles of finalisation.

`tb_vitallm_top` runs the whole design at its default sizes. It does the
following:

* projections with and without the BoothFlex assist;
* five attention commands over three heads;
* all three nonlinear modes;
* prediction over 300 tokens, and over 4096 tokens with a 100-wide head.

It counts every scheduling mechanism (head wait, slot stall, overlap, both
mode switches, BoothFlex stall, barrier, refused write) and fails if any
never happened.

To simulate one block with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_vitallm_top rtl/vitallm_pkg.sv tb/tb_vitallm_top.sv
./obj_dir/Vtb_vitallm_top
```

The top-level test takes well under a minute to build and run.
