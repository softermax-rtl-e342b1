# Softermax in SystemVerilog

In a Transformer, every attention head runs a softmax over each row of its
score matrix, and at long sequence lengths that softmax takes a large share of
the run time. Done the usual way it is expensive in hardware. It needs a
high-precision exponential, a divider, and an extra pass over the row to find
its maximum before anything else can start. Softermax (Stevens et al.,
*Softermax: Hardware/Software Co-Design of an Efficient Softmax for
Transformers*) makes three changes:

1. **Base 2 instead of e.** The network is fine-tuned with `2^x` in place of
   `e^x`, so the exponential is a small piece-wise linear table plus a shift.
2. **Low precision everywhere.** 8-bit inputs and outputs, and 16-bit
   intermediates, for the exponential, the sum and the division.
3. **Online normalisation with an integer max.** The row maximum is found in
   the same pass that accumulates the denominator. When a larger maximum turns
   up, the running sum is rescaled by `2^(old max - new max)`. The maximum is
   always rounded up to an integer, so that factor is an integer power of two,
   and the rescale is a right shift.

This repository holds synthesizable SystemVerilog for the two compute units of
that scheme, and for a tile that uses them the way the paper suggests:

* **Unnormed Softmax unit**, one per processing element (PE). It streams
  over a row slice by slice and keeps a running (max, sum) for each row.
* **Normalization unit**, shared by all PEs. Once a row is complete it
  rescales the stored numerators to the row's final max and multiplies them by
  the reciprocal of the sum.

The algorithm the hardware implements, for a row `x_1..x_V`:

```
m_0 = -inf ; d = 0
for j = 1..V:                                  (Unnormed Softmax unit)
    m_j = max(m_{j-1}, ceil(x_j))              IntMax
    d   = (d >> (m_j - m_{j-1})) + 2^(x_j - m_j)
    y_j = 2^(x_j - m_j)                        stored numerator
for i = 1..V:                                  (Normalization unit)
    y_i = (y_i >> (m_V - m_i)) / d
```

The hardware works on slices of `LANES` elements rather than single elements.
Each slice uses its own integer max (`LocalMax`) for its numerators. The
row's running max and sum live in small per-row buffers.

## Number formats

All formats are unsigned or two's-complement fixed point, written Q(I,F):
I integer bits (sign included) and F fraction bits. The widths are the paper's.
Only the handling of the integer max is this design's own.

| quantity | format | bits | notes |
|---|---|---|---|
| input score `x` | Q(6,2) signed | 8 | range -32 .. 31.75 |
| LocalMax / row max | integer | 7 | the paper lists Q(6,2). After a ceiling the fraction bits are always zero, so only the integer is carried, with one extra bit because ceil(31.75) = 32 |
| UnnormedSoftmax `2^(x-m)` | Q(1,15) | 16 | always in (0, 1]; 1.0 = 0x8000 |
| PowSum (denominator) | Q(10,6) | 16 | up to 1023.98, saturating |
| reciprocal | Q(1,7) | 8 | the *mantissa* of 1/PowSum, see below |
| output probability | Q(1,7) | 8 | 1.0 = 0x80 |

Constants live in `softermax_pkg`.

## The arithmetic, unit by unit

### IntMax (`intmax`)
Each element gets a ceiling, computed as `(x + 3) >>> 2`. A balanced
comparison tree then finds the largest. Taking the maximum of ceilings rather
than the plain maximum is what keeps every later difference between two maxima
an integer.

### Power of two (`pow2_lpw`, one per lane)
The exponent `d = x - m` is never positive. It is split into `floor(d)` and a
fraction `f` in [0,1). The fraction is scaled by 4, one step per segment. Its
top two bits pick one of four segments, and the LPW value is
`c[seg] + m[seg] * pos`, where `pos` is the rest of the fraction. The result
is then shifted right by `-floor(d)`.

With the Q(6,2) input, the fraction has exactly two bits. `pos` is therefore
always zero, and the unit is just a 4-entry table of `2^(k/4)` followed by a
shifter: no multiplier. The slope path is generated only when `IN_FRAC > 2`.

The table holds `c[k] = 2^(k/4)` and chord slopes `m[k] = c[k+1] - c[k]`,
rounded to Q(1,15). For Q(6,2) input the result is within 1.5 LSB of the exact
value. The chord error at finer inputs is below 0.7 %.

### Reduction (`reduction_unit`)
A summation tree adds the slice's numerators; for 32 lanes the sum is Q(6,15).
That sum, or a (max, sum) pair from another PE, is then folded into the row's
running pair:

```
new_max = max(run_max, in_max)
new_sum = run_sum * 2^(run_max - new_max) + in_sum * 2^(in_max - new_max)
```

Exactly one of the two factors can be below 1, so a single right shifter is
enough: a mux feeds it whichever operand has the smaller max. The paper's
figure only shows the running sum being shifted. Shifting the incoming sum when
the running max is the larger one is needed for correctness, and is this
design's addition.

The shift and add are done at Q(10,15). The result is truncated to Q(10,6)
once and saturates at 1023.98. A `first` flag starts a row in place of the
algorithm's `m = -inf, d = 0`, so the buffers need no reset.

### Reciprocal (`lpw_reciprocal`)
The paper names a "linear piece-wise reciprocal" with a Q(1,7) result. A
literal Q(1,7) value of `1/PowSum` would be zero for any sum above 128. This
design therefore normalises instead:

1. A leading-one detector finds `lead`, the top set bit of the sum `s`.
2. The mantissa `s / 2^(lead-6)`, which lies in [1,2), goes through a
   4-segment chord LPW of `1/m`.
3. The LPW result is rounded to Q(1,7), giving `rcp` in [64,128].

So `1/s = rcp/128 * 2^(6-lead)`. The error is below 2.5 %; the worst case is
the chord near m = 1.

### Normalization (`normalization_unit`)
Each numerator of a loaded slice is shifted right by `GlobalMax - LocalMax`,
then multiplied by `rcp`; the product is Q(2,22). A final right shift by
`9 + lead` turns the product into the Q(1,7) output, with rounding to nearest.
Results above 1.0 are clamped to 1.0; only rounding of the sum can cause them.

**Accuracy.** End to end, against the exact base-2 softmax `2^x_i / Σ 2^x_k`
on reals, the test rows give a maximum error of 0.92 output LSB (1/128) and a
mean error of 0.08 LSB; a full 384 x 384 head gives 0.71 and 0.08 LSB. The
one error source that grows with row length is the truncation of PowSum to 6
fraction bits at each merge: at most 1/64 per merge, relative to the true sum.

## Unnormed Softmax unit (`unnormed_softmax_unit`)

It takes one operation per cycle, fully pipelined:

| op | effect |
|---|---|
| `US_SLICE` | `x[LANES]` is a slice of row `addr`; set `first` on the row's first slice |
| `US_CROSS` | fold the (CrossPE-MaxIn, CrossPE-ExpSum-In) pair into row `addr` |
| `US_READ`  | show row `addr`'s (max, sum) on Max-Out / ExpSum-Out, no update |

Pipeline:

* **Stage 0** (combinational): IntMax and the `LANES` power-of-two lanes.
* **Stage 1** registers the slice's LocalMax and numerators, which leave on
  `un_out` / `local_max_out` with `un_valid` **one cycle** after the op.
  These are the values that go to the global buffer.
* **Stage 2** reads the Max Buffer and the PowSum Buffer, runs the
  reduction, and writes back, all in one cycle. Its registered result is
  `max_out` / `sum_out` with `stat_valid`, **two cycles** after the op.

Because the read-modify-write fits in one cycle, slices of the same row can
follow each other back to back without forwarding. At default size
(`LANES = 32`, `ROWS = 128`) that gives 32 scores per cycle per PE, which is
the paper's aim of matching the MAC array's throughput.

`stat_shift_run` / `stat_shift_in` report which operand the reduction
renormalised. They exist for test coverage and debug.

## Normalization unit (`normalization_unit`)

| op | effect |
|---|---|
| `NU_ST` | store `global_max` and `pow_sum` for row `addr` (Max Buffer, Sum Buffer) |
| `NU_LD` | normalise the slice `un[LANES]`, computed with `local_max`, of row `addr` |

A store is visible to a load in the next cycle. A load's `y[LANES]` appears
with `y_valid` one cycle later. The reciprocal is computed at load time from
the Sum Buffer output, as the paper's figure draws it.

## The tile (`softermax_top`)

The paper proposes putting the Unnormed Softmax unit into each PE's
post-processing unit, and one shared Normalization unit between the PE array
and the global buffer. It leaves the connections open. This design makes them
concrete:

* **Slices in.** Each PE has its own `pe_op / pe_first / pe_addr / pe_x`
  ports, which the PE's own control would drive.
* **Numerators out.** The numerators and LocalMax of each slice leave on
  `pe_un*` / `pe_local_max`, for the global buffer. The global buffer itself
  is not part of the RTL.
* **Cross-PE chain.** When a row is spread over several PEs, each holds a
  partial (max, sum) for it. PE `p`'s Max-Out/ExpSum-Out drive PE `p+1`'s
  CrossPE inputs, so a `US_CROSS` on PE `p+1`, issued two cycles after an op
  on PE `p`, merges the two. PE 0's cross inputs are the `chain_*` ports.
* **Store.** Every `US_READ` answer is stored automatically into the
  Normalization unit, at address `{pe, row}`. At most one PE may answer a
  READ per cycle; an assertion checks this.
* **Load and stall.** Slices come back from the global buffer on `ld_*`.
  A store has priority, so `ld_ready` drops for one cycle when a store
  happens, and the load must be held.

The end-to-end test (`tb_softermax_top`) uses the tile like this:

1. Slice `s` of a row goes to PE `s mod 4`.
2. The chain runs PE0 READ, then CROSS on PE1, PE2 and PE3, then PE3 READ.
   That final READ stores the row's statistics at `{3, row}`.
3. Each row's slices are loaded back while later rows are still being
   combined.

## What follows the paper and what does not

The following come from the paper:

* the base-2 exponential;
* the 4-segment LPW with an intercept-only table for Q(6,2) inputs;
* IntMax by ceiling then max;
* online normalisation with shifts;
* the sub-units and their connections as drawn: the per-row max and sum
  buffers addressed by row, the CrossPE inputs and the Max-Out / ExpSum-Out
  outputs;
* in the Normalization unit: subtract, shift, LPW reciprocal and multiply;
* all bit widths of the number-format table, and the 32-lane width of the main
  configuration.

The following are this design's own choices; the paper does not specify them:

* LUT values and their rounding;
* shifting whichever operand has the smaller max, in the reduction;
* carrying the max as a 7-bit integer;
* the reciprocal's leading-one normalisation, its four segments and its chord
  fit;
* output rounding and the clamp at 1.0;
* the pipeline depth, op codes, `first` flag and latencies;
* the buffer depths: 128 rows per PE, and 4 x 128 in the Normalization unit;
* the PE count (4), the linear cross-PE chain, `{pe,row}` addressing and
  store-over-load priority;
* no reset on data registers or buffers. Only valid bits are reset
  (asynchronous, active low).

Two details of the paper's figure are deliberately not copied:

* **Rounding, not ceiling.** The figure labels the IntMax stage "Rounding";
  the text says ceiling, and the RTL uses a ceiling.
* **Shift left, not right.** The figure's Pow2 inset says "Shift Left", but
  the exponent is never positive, so the shift is to the right.

The rest of the accelerator is not in this RTL: vector MAC, weight and input
buffers, accumulation collector, PPU scaling/pooling/ReLU, controllers, global
buffer, DRAM and network routers. The paper takes these from an existing
accelerator and does not describe them. The top's ports are where they would
connect.

## Parameters

| module | parameter | default | meaning |
|---|---|---|---|
| `softermax_top` | `NUM_PE` | 4 | PEs (Unnormed Softmax units) sharing one Normalization unit |
| | `LANES` | 32 | elements per slice; the paper evaluates 16 and 32 |
| | `ROWS` | 128 | rows of statistics per PE |
| `unnormed_softmax_unit` | `LANES`, `ROWS` | 32, 128 | as above |
| `normalization_unit` | `LANES`, `ROWS` | 32, 512 | lanes per load, rows stored |
| `intmax`, `pow2_lpw` | `IN_W`, `IN_FRAC` | 8, 2 | input format; `IN_FRAC > 2` enables the slope multiply |

At the defaults the tile synthesises to about 4300 word-level cells,
2600 flip-flop bits and 23 kbit of buffer memory.

Rows of any length stream through a PE. The limit is the PowSum range: 1023
elements when all scores are equal, and more when they differ. A 384-token
row (SQuAD) takes 12 slices; a 512-token row takes 16. Statistics for up to
`ROWS` rows can be in flight per PE.

## Verification

Each module has a self-checking testbench in `tb/`, which checks it against a
real-number model rather than a copy of the RTL arithmetic:

| testbench | what it checks |
|---|---|
| `tb_intmax` | 3000 slices, including extreme values, against `max(ceil(x/4))` |
| `tb_pow2_lpw` | every Q(6,2) input and a Q(6,4) instance against `2.0**d` |
| `tb_row_buffer` | random read/write against a shadow array |
| `tb_reduction_unit` | 20 000 merges in all cases (first, larger max, smaller max, cross input, saturation) against the real online-normalisation formula |
| `tb_lpw_reciprocal` | all 65 535 sums; exact leading one, within 2.5 % of 1/s |
| `tb_unnormed_softmax_unit` | 3000 back-to-back ops over 8 interleaved rows. Checks numerators at +1 cycle and the running statistics at +2 cycles against a real model |
| `tb_normalization_unit` | ST/LD mixes, including a load right after its store, against `min(1, un·2^(lm-gm)/sum)` |
| `tb_softermax_top` | default tile. Rows of length 128/256/384/512 end to end. Checks the phase-1 rate of one slice per PE per cycle, the exact row max, and every output against the exact base-2 softmax. Counts first slices, both kinds of renormalisation, cross merges, load stalls and numerator shifts, and fails if one never happens |
| `tb_softermax_16wide` | the same on the 16-lane configuration |
| `tb_softermax_squad` | default tile. One whole attention head at the SQuAD length: 384 rows of 384 scores, in three batches of 128 rows, so that every row buffer entry is used |

Each testbench ends by printing `TB_RESULT checks=N failures=M`. Verilator
has only two signal states, so every testbench initialises what it reads. To
run one with plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
    rtl/softermax_pkg.sv tb/tb_softermax_top.sv --top-module tb_softermax_top
./obj_dir/Vtb_softermax_top
```

Every test finishes in well under a second.
