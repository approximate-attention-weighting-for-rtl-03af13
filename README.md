# A BRAM-free softmax attention row with a piecewise-linear natural exponential

Softmax is the awkward part of self-attention on a small FPGA. The dot
products map well onto DSP slices, but each attention weight also needs an
exponential and a division. Those usually end up in CORDIC pipelines or in
block-RAM lookup tables. A cheaper route is to replace `e^x` by `2^x`, but
`2^x = e^(x ln 2)` silently rescales every logit. That changes the softmax
temperature the model was trained with, so the model then has to be
recalibrated.

This RTL keeps the natural exponential and makes it cheap instead. Scores are
first centred on the row maximum, so every exponent `u = s - max s` is `<= 0`.
Below `-8` the contribution is negligible, which leaves `e^u` on `[-8, 0]`.
On that interval it is approximated by 16 straight segments, each 0.5 wide.
The segments are defined by 17 boundary values of 16 bits each: 272 bits of
constants, small enough for distributed LUT storage. So the design needs no
block RAM and needs no per-model temperature correction.

Around that exponential sits a complete attention row for one query of one
head. For a query `q` and `N` key/value pairs `(k_j, v_j)` it computes

    s_j = q . k_j / sqrt(d_k)                       (score)
    w_j = e~(s_j - max_l s_l)                       (PWL weight, Q0.16)
    o_l = sum_j w_j v_j[l]  /  sum_j w_j            (l = 0 .. d_v-1)

The default size is that of a ViT-B/16-style row: `N = 197` tokens (196
image patches plus the class token) and `d_k = d_v = 64`. One row takes
exactly 7,920 clock cycles, which is 79.2 µs at 100 MHz.

This is an independent RTL implementation of the architecture described in
*Approximate Attention Weighting for Sustainable FPGA-Based Vision
Transformer Inference* (Usman, Shafique, Khan, Merhof). Where that
description stops, the choices made here are listed in the section
"Published versus chosen" below.

## Datapath

```
 q ──┐                 s_j               w_j                 N_l
 k_j ┴─► score_mac ─────────► pwl_weight ───┬──► num_accum ──────► vector_divider ─► o_l
     (8 MAC lanes,             (16 segments,│      (64 lanes)  ▲        (serial,
      row maximum)              17-entry    │         ▲        │         restoring)
                                table)      │        v_j       │ Z
                                            └──► denom_accum ──┘
```

| module           | does                                                                              |
|------------------|-----------------------------------------------------------------------------------|
| `score_mac`      | 8 signed 16x16 multipliers. A 64-element dot product takes 8 slices. Also tracks the row maximum. |
| `pwl_weight`     | Forms `u = s - max`, clips it, splits it into segment and offset, reads the table and interpolates. 2-cycle pipeline. |
| `num_accum`      | 64 parallel `w_j * v_j[l]` multiply-accumulate lanes, 41 bits each.                |
| `denom_accum`    | `Z = sum w_j`, 24 bits.                                                            |
| `vector_divider` | One restoring divider shared by all 64 outputs. 16 cycles per quotient.           |
| `attn_row_core`  | The top level: the controller that sequences the passes, plus the token-memory ports. |
| `attn_pkg`       | Sizes, number formats, and the exponential table.                                  |

## Two passes over the tokens

The row maximum must be known before the first weight can be formed. The
core therefore walks the tokens twice.

* **Clear** (1 cycle). This cycle resets the row maximum and both
  accumulators.
* **Pass 1** (`N` slots of `PASS1_CYC = 14` cycles). For each token, the
  core reads `k_j` as 8 slices of 8 elements and computes `s_j`. It then
  updates the running maximum. Nothing else is kept.
* **Pass 2** (`N` slots of `PASS2_CYC = 21` cycles). For each token, the core
  reads `k_j` again and recomputes `s_j`. Recomputing costs 8 cycles per
  token, but it avoids storing 197 scores. The weight `w_j` leaves
  `pwl_weight` two cycles after the score. The value vector `v_j` is read so
  that it arrives in the same cycle as the weight. Both accumulators then add
  that token's contribution in one cycle.
* **Divide** (`64 x 16 = 1024` cycles). The divider runs directly on the
  accumulator registers, so nothing is copied. It streams out `o_0 .. o_63`.

Inside a slot the timing is fixed. Slice reads go out in cycles 0-7. The
memory returns data one cycle later, so the MAC accumulates in cycles 1-8.
The score is registered at the end of cycle 8. In pass 2 the weight appears
in cycle 11, together with `v_j`, which was read in cycle 10. The pipeline
therefore needs only 10 cycles per pass-1 slot and 12 per pass-2 slot. The
remaining cycles are idle padding, chosen so that the row totals match the
published cycle count:

    1 + 197 x 14 + 197 x 21 + 64 x 16 = 1 + 2758 + 4137 + 1024 = 7920 cycles

The published description gives two figures. A "score-plus-weight pass"
takes `197 x 14 + 1024 = 3782` cycles, and the full two-pass row with
division takes 7,920 cycles. Those two do not follow from each other: two
14-cycle passes would give 6,540. The split used here (14-cycle slots in pass
1, 21-cycle slots in pass 2, one clear cycle) is one reading that reproduces
the full-row figure exactly. The slot lengths are parameters. An assertion at
time zero rejects any slot length shorter than the pipeline needs. Setting them
to 10 and 12 gives a row of `1 + 197 x 22 + 1024 = 5359` cycles with
identical results.

Cycles are counted from the clock edge that accepts `start` to the edge that
raises `done`. `done` pulses together with the last output element. `busy`
drops in that same cycle, and a new `start` is accepted there, so rows can
run back to back.

## The exponential: 16 segments on [-8, 0]

Number formats:

* scores `s_j` and `u_j`: signed Q8.8, 16 bits;
* weights `w_j`: unsigned Q0.16;
* table entries: `y_i = round(e^(-8 + 0.5 i) * 65536)` for `i = 0 .. 16`,
  with `y_16 = e^0 = 1.0` saturated to `0xFFFF`.

The table (`attn_pkg::PWL_TABLE`) is

    22 36 60 99 162 268 442 728 1200 1979 3263 5380 8869 14623 24109 39750 65535

`u` is computed with 17 bits, so `s - max` cannot overflow. It is then
clipped to `[-2048, 0]` (that is, `[-8.0, 0]`) and offset by `+2048`. The
result `t` lies in `0 .. 2048` and needs 12 bits. A segment is 0.5 wide,
which is 128 LSBs, so no arithmetic is needed to split `t`:

    segment i = t[11:7]   (0 .. 16)
    alpha     = t[6:0]    (offset inside the segment, in 1/128 steps)
    w = y_i + ((y_{i+1} - y_i) * alpha) >> 7

`t = 2048` (`u = 0`, the maximum token) selects `i = 16` with `alpha = 0`,
which gives the endpoint `0xFFFF`. The only multiplier is a 16x7-bit one.

Measured against the real `e^u` over every Q8.8 input in `[-8, 0]`, the
largest error is 0.02449. It occurs in the last segment, below `u = 0`.
Error falls as `O(S^-2)` with the segment count `S`. Going to 32 segments
would cut it to about 0.006 but roughly double the table.

Two properties worth knowing when you use the result:

* **Clipped tokens still count.** An input below `-8` is clamped to the
  lower boundary, not to zero, so it still contributes `y_0 = 22/65536 ≈ e^-8`.
  In a sharply peaked row, with one dominant token and 196 clipped ones, the
  clipped tokens together carry about `196 x 3.4e-4 ≈ 6.6 %` of the
  denominator. The end-to-end test has such a row. Its output deviates from
  an exact softmax by about 6.5 % of the value range, against about 0.7 % for
  ordinary rows. This behaviour is what the published scheme prescribes. A
  variant that forces `w = 0` for clipped inputs would be a one-line change
  in `pwl_weight`, but it is not the published design.
* **Monotone, but only non-strictly after quantisation.** The exact
  piecewise-linear curve is strictly increasing. In the lowest segments,
  however, neighbouring table entries differ by fewer than 128 LSBs (14 to
  106 in the five lowest segments), which is spread over 128 offset steps. Neighbouring inputs can therefore give
  equal weights after truncation. Ordering is never reversed.

## Scores and their scale

The `1/sqrt(d_k)` factor is folded into a single arithmetic right shift of
the 38-bit dot product, `SCORE_SHIFT = 11`, followed by saturation to 16
bits. With `q` and `k` in Q8.8, the product is Q16.16. Eight bits of the
shift convert that back to Q8.8, and `log2(sqrt(64)) = 3` bits apply the
scaling. For other input formats, change `SCORE_SHIFT`. For example, INT8 `q`
and `k` with their own quantisation scales need a shift that maps
`scale_q * scale_k / 8` onto Q8.8. The shift rounds toward minus infinity.
Scores beyond ±128 saturate. Saturated scores tie at the limit and get
equal weights, so choose `SCORE_SHIFT` to keep the scores of real data
inside ±128.

## Accumulation and division

`num_accum` multiplies the unsigned Q0.16 weight, extended with a zero sign
bit, by each signed value element. It keeps 41-bit sums, which cannot
overflow for 197 full-scale tokens. `denom_accum` keeps a 24-bit `Z`. On
FPGA, the 64 numerator sums naturally live in the DSP accumulator registers
rather than in fabric flip-flops.

`vector_divider` computes `o_l = N_l / Z` on the magnitude `|N_l|`. Each
cycle it trial-subtracts `Z << k` for `k = 15 .. 0`. If the difference is
not negative, it keeps the difference and sets quotient bit `k`. Otherwise it
keeps (restores) the old remainder. After 16 cycles it re-applies the sign
and saturates to 16 bits signed. The quotient is truncated toward zero. Every
weight is at most 1.0 and `Z` is their sum, so `|o_l| <= max |v|`: the output
has the same format as `v`, and 16 quotient bits are always enough. `Z` is
never zero, because the maximum token always contributes `0xFFFF`.

## Token memory interface

The core holds no `q`, `k` or `v` storage. They belong to the surrounding
system, together with the Q/K/V projections and the DMA, and are outside this
RTL.

| port                                | dir | width  | timing                                                   |
|-------------------------------------|-----|--------|----------------------------------------------------------|
| `start`, `busy`, `done`             | in/out/out | 1 | see above                                          |
| `q_vec[64]`                         | in  | 16 each | hold stable from `start` until `done`                    |
| `k_rd_en`, `k_rd_tok`, `k_rd_slice` | out | 1, 8, 3 | read of elements `8*slice .. 8*slice+7` of `k_tok`       |
| `k_rd_data[8]`                      | in  | 16 each | valid the cycle after `k_rd_en`                          |
| `v_rd_en`, `v_rd_tok`               | out | 1, 8    | read of the whole value vector of a token                |
| `v_rd_data[64]`                     | in  | 16 each | valid the cycle after `v_rd_en`                          |
| `o_valid`, `o_idx`, `o_data`        | out | 1, 6, 16 | one output element per valid, in order 0..63, 16 cycles apart |
| `row_max`, `row_denom`              | out | 16, 24  | row maximum (Q8.8) and `Z`, stable after the row          |

Each token's `k_j` is read twice per row, once in each pass, and its `v_j`
is read once. Reset is an active-low asynchronous `rst_n` on all registers.

## Published versus chosen

Taken from the published description:

* the row size (`N = 197`, `d_k = d_v = 64`);
* the five-block structure (Score MAC, PWL weight, numerator and denominator
  accumulators, restoring divider);
* the two-pass max-centred schedule;
* the 16-segment uniform approximation on `[-8, 0]` with a Q8.8 input,
  clipping and a 17 x 16-bit Q0.16 table with a saturated endpoint;
* the segment index and offset taken from bit fields;
* 8 score lanes (the score path is listed with 8 DSP slices);
* 64 parallel numerator lanes;
* a serial 16-bit restoring divider;
* the 7,920-cycle row.

Chosen here, because the description is silent on them:

* accumulator widths;
* the score shift and the input fixed-point format;
* rounding (truncation everywhere, floor for the score shift);
* magnitude/sign handling in the divider;
* the per-slot cycle split;
* the clear cycle;
* recomputing scores in pass 2 instead of buffering them;
* the memory interface and its one-cycle latency;
* reset;
* the back-to-back `start` rule.

Points where the published material disagrees with itself:

* The weight unit is listed both with 2 DSP slices and, in the block
  diagram, with 1. The text also says its interpolation product is built in
  LUT logic. The RTL has one small multiplier and leaves its mapping to
  synthesis.
* The block diagram's caption calls it the "conventional DSP-MAC design", but
  its blocks and resource counts are those of the proposed core, so it was
  followed.
* The cycle figures, as discussed above.

Not reproduced or checked here:

* the FPGA resource counts, timing and power;
* the model-accuracy results. Those come from running ViT/DeiT models on
  image data in a software emulation of the datapath. The bit-accurate
  reference model in `tb_attn_row_core.sv` plays that role for this RTL, but
  no trained model is run.

## Testbenches

Every testbench is self-checking. It ends with a line
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog.

| testbench           | checks                                                                                     |
|---------------------|--------------------------------------------------------------------------------------------|
| `tb_score_mac`      | Scores against `floor(q.k / 2^11)` with saturation; the one-cycle latency; the row maximum with and without tracking. |
| `tb_pwl_weight`     | Every Q8.8 input from -9.0 to 0 against a table rebuilt from real `e^x`; the 2-cycle latency; the clip and endpoint flags; monotonicity; error ≤ 0.0245. |
| `tb_denom_accum`    | Random and full-scale rows; clear alone and clear with data.                               |
| `tb_num_accum`      | All 64 lanes against 64-bit sums, including full-scale extremes.                            |
| `tb_vector_divider` | Quotients truncated toward zero, edge cases, 16 cycles per element, 1024 per vector.       |
| `tb_attn_row_core`  | Four full-size rows, bit-exact against an independent integer model, with exactly 7,920 cycles per row, one token every 14 cycles in pass 1 and every 21 in pass 2, and back-to-back start. It also counts the clip, endpoint, score-saturation and negative-output events, and reports the deviation from an exact floating-point softmax. |
| `tb_vit_head`       | One complete attention head (all 197 query rows against one set of K and V), then a few rows of three more heads, with ViT-like INT16 and INT8 data. Checks the outputs bit-exactly, 7,920 cycles per row, and a cosine similarity of at least 0.99 to exact softmax attention. |

To run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
        rtl/attn_pkg.sv tb/tb_attn_row_core.sv --top-module tb_attn_row_core
    ./obj_dir/Vtb_attn_row_core

The full-size row test simulates in well under a second.

To change the row size, override `N`, `D` or `LANES` on `attn_row_core`.
`D` must be a multiple of `LANES`. The widths of the accumulators and `Z`
follow `N` automatically. The testbench reference model uses the same
formulas, so update the sizes at its top as well.
