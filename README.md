# BF16 matrix engine with approximate normalization

A floating-point multiply-add normally ends with a normalization step. This step counts
the leading zeros of the sum, or predicts them with a leading-zero anticipator, then
shifts the sum left by that count. In a small Bfloat16 processing element (PE), this
logic is a noticeable part of the area. It is also rarely needed in full. After an
addition the leading one is almost always within one or two places of where it should
be. A large cancellation needs operands of unlike sign with exponents equal or one apart,
and even then it is uncommon.

This design replaces the exact normalizer with an **approximate normalizer**. The normalizer
looks only at the top few bits of the sum and shifts by one of three *fixed* amounts: 0,
`k` or `k+λ`. A result may therefore leave a PE with a few leading zeros. The partial
sums that run down the columns of the systolic array carry a 16-bit significand (twice
the BF16 significand), so this costs little. Each result is rounded exactly once, to
BF16, at the bottom of its column.

The RTL is a complete weight-stationary matrix engine built around that PE. It has a
32×32 array of two-stage fused multiply-add PEs, a weight buffer, an input buffer with
row skew, per-column accumulators, per-column BF16 rounding, an output buffer and a
small controller. By default `k = 1` and `λ = 2`, the most accurate approximate setting
("BF16an-1-2").

## Number formats

| name | fields | value |
|---|---|---|
| BF16 (`bf16_t`) | sign, exp[7:0], man[6:0] | (-1)^s · 1.man · 2^(exp-127); exp = 0 means zero |
| extended (`ext_t`, 25 bits) | sign, exp[7:0], sig[15:0] | (-1)^s · (sig / 2^15) · 2^(exp-127) |

The extended significand has an explicit leading bit. Its binary point sits after bit 15, so
a normalized value has `sig[15] = 1`. The leading bit may be 0: approximate
normalization allows that. The product of two BF16 significands, 1.xxxxxxx × 1.xxxxxxx,
is a 16-bit number in [1, 4). Read with the same binary-point convention, it has exponent
`ea + eb − 126`. Products and partial sums therefore line up without any extra shifting.

Subnormal inputs are treated as zero. A result whose exponent falls to 0 or below is
flushed to zero. A result whose exponent reaches 255 becomes infinity, encoded as exp = 255
with sig = 1.0. NaN and infinity inputs are not treated specially.

## The multiply-add PE (`fma_pe`)

The PE computes `res = A·B + C` with A and B in BF16 and C and `res` in the extended format.
It has two pipeline stages, and one operation can enter every cycle.

**Stage 1.** `sig_multiplier` forms the exact 16-bit product. In parallel, `sign_exp_unit`
forms the product sign and the product exponent, and compares that exponent with C's.
The larger exponent becomes the exponent of the sum. The difference, saturated to 31,
is the right shift for the other operand. A zero product is always the operand that
gets shifted away.

**Stage 2.**
1. `align_unit` shifts the smaller-exponent operand right. Bits that fall off the end are
   dropped: there are no guard or sticky bits. This is why a partial sum left
   un-normalized loses accuracy at the next PE.
2. `sig_adder` adds or subtracts the magnitudes. The result is 17 bits, and bit 16 is the carry.
   With unlike signs, the smaller magnitude is subtracted from the larger. The result then
   takes the sign of the larger.
3. `approx_norm` normalizes the 17-bit sum (next section).
4. `sign_exp_correct` adjusts the exponent by the shift that was applied, and flushes or
   saturates if the result is out of range.

The result is registered. It is valid two cycles after the operands entered, and
`out_valid` marks it.

### Approximate normalization (`approx_norm`)

Let `N = 16` be the index of the sum's top bit, the carry position. Two OR trees look at
two fields of the sum:

```
or_k = |sum[N : N-k]          (the carry bit and the k bits below it)
or_l = |sum[N-k-1 : N-k-λ]    (the next λ bits)

mux1 = or_k          ? sum : sum << k
mux2 = or_k | or_l   ? mux1 : sum << (k+λ)
```

These are two levels of 2-to-1 multiplexers with fixed shift amounts, and no leading-zero
counter. The 17-bit `mux2` is then reduced to the 16-bit significand:

* If `mux2[16]` is set, the adder carried out. This can only happen when no left shift was
  made. The top 16 bits are kept, which is a 1-bit right shift, and the exponent gains 1.
* Otherwise the low 16 bits are kept, and the exponent loses 0, `k` or `k+λ`.

With the default `k = 1`, `λ = 2`, this is what happens for each position of the leading one
of the sum:

| leading one at bit | action | leading one of result | exponent change |
|---|---|---|---|
| 16 (carry) | keep, take [16:1] | 15 | +1 |
| 15 | none | 15 (normalized) | 0 |
| 14, 13 | shift left 1 | 15, 14 | −1 |
| 12 … 0 | shift left 3 | 15 … 3 | −3 |

The common cases are exact: no shift, a carry, or a one-bit cancellation. A one-bit
cancellation is the only kind possible when the exponents differ by two or more. Larger
cancellations leave 1 or more leading zeros. The next PE carries those zeros along, and
the rounding unit removes them at the bottom of the column.

The bit-range notation `sum[N:N-k]` covers `k+1` bits. It is read here as "the carry bit
plus the top `k` bits of the significand". Under that reading, a shift by `k` never
produces a carry, and a shift by `k+λ` never moves the leading one past bit 15.

`K` and `LAMBDA` are parameters throughout: `approx_norm`, `sign_exp_correct`, `fma_pe`,
`ws_pe`, `systolic_array`, `column_accumulator` and `matrix_engine`. The configurations
(1,1) and (2,2) are tested alongside (1,2). The constraint is `K ≥ 1`, `LAMBDA ≥ 1`,
`K + LAMBDA < 16`.

## The systolic array and its timing

`ws_pe` wraps an `fma_pe` with a weight register and a one-cycle east-going activation
register. `systolic_array` tiles `ROWS × COLS` of these cells.

* **Weight pre-load.** While `w_load` is high, each column is a shift register that runs
  downward. The controller pushes weight rows `ROWS−1, …, 1, 0` from the north. After
  `ROWS` cycles, row r holds W[r][·].
* **Streaming.** Activation `A[m][r]` enters row r from the west and moves one column per
  cycle. The partial sum of column c starts as zero at the top and gains
  `A[m][r]·W[r][c]` in each row. It moves down one row every **two** cycles, the PE latency.
* **Skew.** The activation must meet its partial sum, so row r is fed `2r` cycles later than
  row 0. `input_skew` makes this skew with one shift register per row. Each PE checks the
  rule with an assertion: the activation and the partial sum must be valid in the same
  cycle.
* **Output.** Column c delivers the extended-precision result for vector m `2·ROWS + c`
  cycles after row 0 of that vector entered the array. A valid bit travels with every
  activation and partial sum, so no cycle counting is needed downstream.

## A pass, seen from the host (`matrix_engine`)

A *pass* multiplies `n_vec` input vectors (1 ≤ n_vec ≤ DEPTH) by the 32×32 weight tile that
is in the weight buffer.

1. Write the tile word by word through `wb_wr_*` at (row, column). Write the vectors
   through `ib_wr_*` at (vector, element). Neither buffer may be written while `busy` is
   high; an assertion checks this.
2. Pulse `start` with `n_vec` and `acc_en`.
3. `engine_ctrl` reads the weight rows (ROWS cycles), then reads one input vector per
   cycle (n_vec cycles), then waits for the last column's last result. It then pulses
   `done`.
4. Read the BF16 results through `ob_rd_*` at (vector, column). The data arrives one cycle
   after `ob_rd_en`.

From the cycle where `start` is sampled to the cycle where `done` is high takes exactly
**3·ROWS + n_vec + COLS + 3** cycles. For the defaults with n_vec = 128, that is 259 cycles.
While streaming, the engine finishes one vector per cycle, which is ROWS·COLS = 1024
multiply-adds.

**Reductions longer than ROWS.** Below each column, `column_accumulator` keeps one
extended-precision entry per vector of the pass. With `acc_en = 0` a pass overwrites the
entries. With `acc_en = 1` it adds to them, using the same align/add/approximate-normalize
datapath as the PE. A product with an inner dimension of 768, for example, is 24 passes
over successive weight tiles and input slices: the first with `acc_en = 0`, the rest with
`acc_en = 1`, all with the same `n_vec`. Each pass rounds the current sums to BF16 with
`round_bf16` and writes them to the output buffer, so the final pass leaves the finished
result there. Tiling over output columns and over more than DEPTH vectors is left to the
host.

## Rounding (`round_bf16`)

The column result may carry leading zeros, so the rounding unit first normalizes it
exactly, with a leading-zero count and a left shift. It then rounds to 8 significand bits,
to nearest with ties to even, using a guard bit and a sticky bit. There is one instance per
column, which keeps the exact normalizer out of the PEs.

## Where this RTL follows the source paper, and where it departs

These parts follow the paper: the PE's two-stage split and its widths (9-bit sign/exponent
inputs, 8-bit significands, 16-bit product and partial sum, 17-bit sum, 16-bit result);
the approximate normalizer's OR trees, bit ranges and two multiplexer levels; the exponent
update steered by the same selects; the weight-stationary array with weights loaded from
the north and inputs streamed from the west; rounding once at the south end; the sizes
8/16/32; and the (k, λ) settings.

These are this design's own choices:

* The 17→16-bit carry handling after the normalizer's multiplexers. The paper states the
  1-bit right shift on overflow but does not draw it.
* The exponent convention of the product (`ea+eb−126`).
* Zero, underflow and overflow behaviour. No zero detection is done on a PE result, so an
  exact cancellation gives sig = 0 with a non-zero exponent. The next PE still adds
  correctly, but it aligns its product against that exponent.
* Alignment truncates the shifted-out bits.
* Synchronous active-low reset, applied to the valid bits and control state only.
* The weight shift chain with a load enable.
* The input skew of 2 cycles per row, which follows from the two-stage PE.
* Every buffer size and port: a one-tile weight buffer, and 128-vector input and output
  buffers.
* The controller and the host interface.
* The column accumulators, which hold one entry per vector. The paper only draws an adder
  with a feedback register under each column.
* The accumulators reuse the approximate-normalization adder.
* Round to nearest even.

The default size is 32×32, the largest of the three engines the paper reports. The paper
does not single one out.

The exact-normalization baseline (a leading-zero anticipator with a full normalization
shifter) is not included. It is the design the approximate PE is compared against, not
part of it.

## How far it can be trusted

Each module has a self-checking testbench in `tb/`. The reference arithmetic in
`tb/fp_ref_pkg.sv` is written independently of the RTL. It locates the leading one by
scanning, where the RTL uses OR trees and muxes, and it rounds by integer division.
Results are compared bit for bit.

* Arithmetic units: exhaustive or thousands of random cases. This includes every
  leading-one position of the normalizer, for the (1,1), (1,2) and (2,2) settings.
* `fma_pe`: 6000 random operations with gaps. The tests check the 2-cycle latency, and
  that every normalization case (none, k, k+λ, carry) occurs.
* `systolic_array` (4×3): two weight tiles. Every result is checked with its exact arrival
  cycle.
* `tb_matrix_engine`: a 4×3 engine with 16-vector buffers, run for 12 passes in groups of
  three (one fresh tile and two accumulated). It checks every output word and every pass
  latency, and counts each mechanism: weight reload, fresh pass, accumulate pass, the four
  normalization cases and flushing to zero.
* `tb_matrix_engine_an11` and `tb_matrix_engine_an22`: the same checks on an 8×8 engine
  with k = 1, λ = 1 and on a 16×16 engine with k = 2, λ = 2. These are the paper's other two
  settings and two of its other sizes.
* `tb_matrix_engine_full`: the default 32×32, DEPTH-128 engine with no parameter changes.
  It runs a full 128-vector pass and an accumulated second pass, 8192 results in all,
  bit-exact. It takes about 1.5 minutes with verilator.

These tests show that the RTL matches the stated algorithm. They say nothing about
whether the algorithm matches the accuracy the paper reports on BERT. For information,
the testbenches print the mean relative error of the engine's BF16 outputs against exact
real arithmetic. On random data with mixed signs and exponents within ±3 of 1.0, it is
about 0.15 %. The BF16 output rounding alone contributes up to 0.4 %.

## Simulating

All files are plain SystemVerilog. The package `rtl/bf16_an_pkg.sv` must be compiled first,
and testbenches also need `tb/fp_ref_pkg.sv`. For example:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_matrix_engine \
  rtl/bf16_an_pkg.sv tb/fp_ref_pkg.sv rtl/*.sv tb/tb_matrix_engine.sv
./obj_dir/Vtb_matrix_engine
```

Each testbench prints one line `TB_RESULT checks=N failures=M`. Every testbench has a
watchdog that ends the run with a failure if it hangs. The end-to-end benches share
their body through `tb/tb_matrix_engine_decl.svh` and `tb/tb_matrix_engine_body.svh`;
each one only sets the sizes `R`, `C`, `D` and the normalizer setting `KK`, `LL` (used
both for the engine's `K`/`LAMBDA` and for the reference model). To try another size or
setting, copy one of them and change those localparams.

## Files

| file | block |
|---|---|
| `bf16_an_pkg.sv` | formats, widths, `norm_shift_e` |
| `sign_exp_unit.sv`, `sig_multiplier.sv` | PE stage 1 |
| `align_unit.sv`, `sig_adder.sv`, `approx_norm.sv`, `sign_exp_correct.sv` | PE stage 2 |
| `fma_pe.sv` | the two-stage PE |
| `ws_pe.sv`, `systolic_array.sv` | array cell and grid |
| `input_buffer.sv`, `input_skew.sv`, `weight_buffer.sv`, `output_buffer.sv` | storage and skew |
| `column_accumulator.sv`, `round_bf16.sv` | south end of each column |
| `engine_ctrl.sv`, `matrix_engine.sv` | sequencer and top level |
