# A term-serial bfloat16 accelerator for training

Training a neural network spends most of its arithmetic on multiply-accumulates
of bfloat16 values. A conventional bit-parallel multiplier does the same work for
every pair of values. That is true whether the significand of a value is full of
ones or almost empty, and even when the product is so small against the running sum
that rounding will throw it away. This design multiplies term by term instead. Each
significand of one operand (A) is rewritten as a short list of signed powers of two
(terms). A processing element adds one shifted copy of the other operand (B) per
term. Work is then proportional to the number of terms that actually matter:

* **zero terms cost nothing.** Canonical (non-adjacent-form) recoding keeps the number
  of non-zero digits small: at most 5 for an 8-bit significand, and about a third on
  average.
* **terms that cannot affect the result are skipped.** A term whose weight is below
  what the accumulator can keep (more than 12 binary places under the largest
  exponent in play) is dropped before it is computed. Once one term of a lane falls
  out of bounds, all smaller terms of that lane do as well.

The RTL gives the processing element, the column and tile structure around it, the
transposer that rearranges operands, the exponent base-delta codec used towards
off-chip memory, and a top level of 36 tiles.

## Number formats and scales

All values are bfloat16 (`bf16_t` in `fpr_pkg`). An exponent field of 0 is read as
zero. Denormals are flushed, and Inf/NaN are not treated specially.

**Terms.** The 8-bit significand m = 1.fffffff is recoded with the carry trick
h = m>>1, s = m+h, c = h^s. The positive digits are s&c and the negative digits are
h&c. This produces up to 9 digits, from 2^+1 down to 2^-7: canonical recoding can
turn 1.1111111 into 2^1 - 2^-7. A term is `{valid, neg, pos}`, where pos 0 is 2^+1,
pos 1 is the hidden bit and pos 8 is 2^-7. The encoder hands terms out most
significant first.

**Exponents.** Each product A_i·B_i has the exponent PEXP_i = Ae_i + Be_i + 1 (9 bits).
The accumulator keeps its own exponent eacc, on a scale where its hidden bit weighs
2^(eacc-254). For one cycle's work, the offset of lane i's current term below the
accumulator's hidden bit is

    K_i = delta_i + pos_i + (eacc - emax),   delta_i = emax - PEXP_i (saturated to 31)

Here emax is the maximum of eacc (if the accumulator is non-zero) and all PEXP_i of
the set. emax is computed once per set by the exponent block.

**Accumulator.** The accumulator is signed, 17 bits wide: sign, 4 integer bits and 12
fraction bits. Every cycle it is rounded to nearest-even onto 12 fraction bits. The
`res` output converts it to bfloat16 by truncation.

## The processing element (`fpraker_pe`)

A PE takes 8 (A, B) pairs at a time (a *set*) and adds their products to its
accumulator. A set takes as many cycles as its lanes need to get through their
terms, with at least one.

**Which lanes go in a cycle.** Shifting B by any amount per lane would need 8 wide
shifters. Instead, the PE picks base = the smallest K over the lanes that still have
a term. A lane goes only if its own K is within 3 of base. Its contribution is
±(1.B_man << (3 - (K - base))): an 11-bit magnitude, 12 bits signed. The eight
contributions are summed in a 15-bit adder tree. A single shifter moves that sum by
base onto the accumulator. Lanes further away wait: that is a *shift stall* (event
`ev_shift_stall`). When one lane has a term much larger than the rest, the set
therefore takes more cycles.

**Out-of-bounds skipping.** A term with K > ob_thr is skipped without being added
(`ev_ob_skip`). A lane whose processed term reaches K >= ob_thr is marked out of
bounds, and all of its later terms are skipped. ob_thr is 12, the number of fraction
bits, for the full accumulator. A smaller value acts as a narrower accumulator. This
is how per-layer accumulator widths are supported: the threshold is a port, so it
can change from layer to layer.

**Accumulate, normalize, round.** When a set starts (load), the old accumulator is
first aligned to the new emax, keeping a sticky bit. Each cycle, the shifted tree sum
is added exactly, with 30 guard bits. The result is normalized: a right shift raises
eacc, and a left shift lowers it but never below emax, so term offsets stay
non-negative. It is then rounded to nearest-even onto 12 fraction bits. If rounding
overflows, it adds one more right shift (`ev_norm` counts normalizations). Rounding
once per cycle is a choice of this design. The result is not bit-exact with a
fused dot product.

## A column: one encoder and shared exponent blocks (`fpraker_column`)

All 8 PEs of a column (one per row) use the same A set with different B vectors. So
the column has one term encoder (`term_encoder`) that feeds all of them. A lane of
the encoder moves to its next term only when every PE has consumed the current one.
It drops the rest of a lane when every PE reports the lane finished (out of bounds,
or a zero product). The slowest PE of a column sets the pace. The per-PE B buffers
(`b_buffer`, depth 2) let PEs that share a row across columns drift apart.

The exponent blocks (`exponent_block`) are combinational: maximum, deltas, product
signs and zero flags. There is one per pair of PEs, used twice per set. The column
steps through IDLE → E0 → E1 → RUN:

* **E0:** the A set is taken (`a_ready`), the encoder loads it, and the even PEs get
  their exponent results from the A set and their B-buffer heads. They use the results
  at once and latch them. The even B buffers are popped.
* **E1:** the odd PEs are served from the latched A set.
* **E1 or RUN:** the set ends in the first cycle after which no lane has a term left.
  The next set starts straight away if A is offered and every B buffer still has a
  vector after this set's pops. Otherwise the column goes idle.

A set therefore takes at least two cycles. A set with fewer terms is *exponent-bound*
(`ev_exp_bound`). This is the cost of sharing one exponent block between two PEs.

## A tile (`fpraker_tile`)

A tile is 8 rows × 8 columns. A vectors enter per column with their own handshake. B
vectors enter per row and are broadcast to that row's buffer in all 8 columns. A row
can accept only when none of those buffers is full. A row that is held up raises
`ev_row_wait`. PE(r, c) accumulates A set (column c) · B vector (row r), so a tile
computes an 8×8 block of output values, each a dot product over the streamed sets.

## Data supply: transposer and compression

**Transposer** (`transposer`). The forward pass, the backward pass and the weight
update read the same arrays in different orders. The transposer takes 8 blocks of 8
values from the buffer and stores them as the rows of an 8×8 array. It then sends out
8 blocks: column j in transpose mode, or row j in direct mode. Block j is tagged with
j and goes to row j of the tile. It fills and then drains, so a group takes 16 cycles
without stalls. Double buffering was not added.

**Exponent base-delta compression** (`bdc_compress`, `bdc_decompress`). The exponents
of neighbouring values are close. A group of 32 values is stored as:

| bits | field |
|---|---|
| 3 | P: the delta width is DW = P + 1 |
| 8 | base exponent = exponent of value 0 |
| 8 | sign and fraction of value 0 |
| 31 × (DW + 8) | for values 1..31: DW-bit two's-complement delta, then sign+fraction |

The fields are packed least significant bit first. DW is the smallest width that holds
every difference of the group, computed modulo 256, so every group is lossless. A
group is 19 + 31·(DW+8) bits long: from 298 bits (DW = 1) to 515 bits (DW = 8),
against 512 uncompressed. Choosing DW = P+1 rather than P lets the 3-bit header reach
8 bits.

## The top (`fpraker_accel`)

There are 36 tiles, each with its own transposer on the B side. The A side of each
tile comes straight in as ports. Results are read out 32 at a time: `out_tile` and
`out_half` select rows 0–3 or 4–7 of a tile, and the group goes through the
compressor (`out_packed`, `out_nbits`). A decompressor turns a compressed group from
off-chip memory (`dram_packed`) back into 32 values (`gb_vals`). The global buffer
(4 MB × 9 banks), the scratchpads and the LPDDR4 memory are not modelled: their side of
each connection is a port. How tiles are wired to buffer banks is not specified, and
neither is any controller that sequences layers. These are left to the user.

## Where this departs from, or goes beyond, the source design

* The 4-bit term position (pos = t+1) covers the 2^+1 term of canonical recoding.
* The sum is exact inside a cycle, with one rounding per cycle and a limit on left
  normalization. The skipping rule is relative to emax.
* Sequencing of the shared exponent block (E0/E1), the consumed/advance handshake and
  the AND of per-PE finish flags.
* Valid/ready handshakes everywhere. The tile's row-ready rule. B buffers of depth 2.
* Transposer direct mode, single buffering, and only on the B path.
* The compression layout: DW = P+1, the bit order, and no delta for the base value.
* bfloat16 read-out by truncation. No Inf/NaN handling.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The column, tile and top testbenches use a
cycle-accurate reference model of a column, `tb/fpr_ref_pkg.sv`, that predicts the
bfloat16 results bit for bit, and also cycle counts for the column. With Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl rtl/fpr_pkg.sv \
      tb/fpr_ref_pkg.sv tb/tb_fpraker_column.sv --top-module tb_fpraker_column
    ./obj_dir/Vtb_fpraker_column

| testbench | covers |
|---|---|
| tb_fpraker_pe | one PE: a timing example (4 cycles at threshold 7, 5 at 12), 300 random sets bit-exact |
| tb_fpraker_column | column with encoder, exponent blocks and B buffers; cycles per set, results |
| tb_fpraker_tile | 8×8 tile, random pauses, row waits |
| tb_transposer | both modes, back-pressure, 16-cycle groups |
| tb_bdc | compression widths, length, layout, lossless round trip |
| tb_fpraker_accel | whole design with 2 tiles, through transposers and the compression round trip; counts every mechanism |

The encoder, exponent block and B buffer are tested inside the column testbench.
The largest configuration simulated is the top with 2 tiles, each a full 8×8 tile
of 8-lane PEs. At the default of 36 tiles, the top passes Verilator lint and the slang
front end. A Verilator simulation build of it, however, needs far more than ten minutes
of C++ compilation, so no default-size simulation is provided. The tiles are
identical and independent, so the 2-tile run exercises the same logic.
