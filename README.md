# SoftmAP: integer-only Softmax on an associative processor

This design computes the Softmax of an attention-score vector without
floating-point arithmetic and without a datapath of adders or multipliers.
The vector sits in an associative processor (AP). The AP is an SRAM
content-addressable memory that stores one vector element per row. All
arithmetic happens inside the memory: the controller searches every row at
once for a bit pattern in a few columns, then writes a new pattern into the
rows that matched. A sequence of such search/write pairs, taken from a
look-up table, adds, subtracts, multiplies or shifts one bit position of a
field in every row at the same time. The cost of an operation therefore
grows with the word width and not with the vector length. This suits
Softmax well: the vectors are long (up to half the sequence length per AP)
and the words are short (6 bits).

The Softmax itself is the integer-only approximation of I-BERT, tuned to
6-bit inputs. The exponential is split into a power of two and a remainder:
the remainder goes through a second-order polynomial and the power of two
becomes a right shift. The remainder is found by Barrett reduction, which
needs only a multiply, a shift and a subtract. The result is normalised by a
division by the sum of all terms.

## Arithmetic

Take a vector `v` of M-bit two's-complement words (M = 6) with scaling
factor `S`. The host works out these constants offline from `S`:

| constant | formula | width | value for S = 7/63 |
|---|---|---|---|
| `v_ln2` | floor(ln 2 / S) | 4 | 6 |
| `mu` | floor(2^(2M) / v_ln2) | 1.5M+1 = 10 | 682 |
| `v_b` | floor(1.353 / S) | M = 6 | 12 |
| `v_c` | floor(0.344 / (0.3585 S^2)) | 2M = 12 | 77 |

It also supplies `max(v)`. Every row then computes:

```
x        = max(v) - v                      (= -v_stable >= 0, M bits)
q        = floor(x * mu / 2^(2M))          (Barrett quotient, ~ floor(x / v_ln2))
r        = x - q * v_ln2                   (= -v_corr)
t        = v_b - r                         (= v_corr + v_b)
v_approx = (t*t + v_c) >> q                (~ e^(S v_stable) / (0.3585 S^2))
sum      = sum of v_approx over the loaded rows
v_sm     = floor(v_approx * 2^23 / sum)    (24-bit result)
```

`v_sm / 2^23` approximates Softmax(S·v). Over random 6-bit vectors the
largest absolute error against the floating-point Softmax is about 5·10^-3
for 64 elements, and about 1.3·10^-4 for 2048 elements, where each value is
smaller.

Two points are easy to miss:

* **Signs.** The algorithm is usually written with `v_stable = v - max(v) <= 0`
  and a remainder `v_corr` in (-ln 2, 0]. This design keeps every
  intermediate value non-negative instead. It computes `x = -v_stable`,
  `r = -v_corr` and `t = v_b - r`. The polynomial argument is the same.
  `q` is then the shift amount floor(-v_stable / v_ln2), as Barrett
  estimates it.
* **No Barrett correction.** Barrett's quotient can be one too small, so `r`
  can reach `v_ln2` or a little more. As in the original algorithm, no
  correction step follows. With the constants above `t` stays positive, and
  the small error is accepted.

## The associative processor

### CAM array (`ap_cam`)

The array has `ROWS` rows of `COLS` = 169 bits and supports three operations:

* **compare**: every row ANDs the equality of its bits with the key over the
  columns selected by the compare mask. The result is stored in the tag
  register, one bit per row.
* **write**: every tagged row takes the write key in the columns selected by
  the write mask.
* **row-pair (2D) mode**, used only by the reduction. At level `l`, only rows
  `r` with `r mod 2^(l+1) = 0` take part. Row `r` also compares one bit of
  its partner row `r + 2^l`. An addition table can thereby add the partner's
  field into row `r` without moving any data. After `log2(ROWS)` levels,
  row 0 holds the total.

A write can also take its data from row 0 instead of the key. This copies
the sum into every row in a single pass. A row-wide write port and a
registered read port (one cycle of latency) load the words and unload the
results.

### Look-up tables (`ap_pass_gen`)

An operation is a list of *passes*, applied bit by bit. A pass is one
compare cycle followed by one write cycle. The tables work in place: the
destination field is overwritten, and a carry/borrow column travels along
the bits. Here `d` is the destination bit, `s` the source bit and `c` the
carry.

| in-place add `d += s` | compare (d,s,c) | write (d,c) |
|---|---|---|
| pass 1 | 0 0 1 | 1 0 |
| pass 2 | 1 0 1 | 0 1 |
| pass 3 | 1 1 0 | 0 1 |
| pass 4 | 0 1 0 | 1 0 |

| in-place subtract `d -= s` | compare (d,s,b) | write (d,b) |
|---|---|---|
| pass 1 | 1 0 1 | 0 0 |
| pass 2 | 0 0 1 | 1 1 |
| pass 3 | 0 1 0 | 1 1 |
| pass 4 | 1 1 0 | 0 0 |

The other four input combinations leave the row unchanged, so no pass
searches for them. The order of the passes matters. A row that one pass
rewrites must not match a later pass of the same bit: in the add table, pass
2 turns `101` into `001`, which pass 1 has already handled. When the source
field is shorter than the destination, only the two passes with `s = 0` run
on the upper bits.

The generator also holds the out-of-place XOR table, the textbook example
of an AP operation. It runs two passes per bit into a cleared result field:
rows whose bits (b, a) are (0, 1) get 1, then rows with (1, 0) get 1. The
Softmax program does not use XOR. The pass-generator testbench checks it on
a four-row example.

The other operations are built from these tables:

* **Multiply** is shift-and-add. For each multiplier bit `j`, the add table
  runs with the extra compare condition "multiplier bit j = 1". That is 4
  passes per partial-product bit, plus one pass that writes the final carry
  into the next free bit.
* **Copy** takes one pass per bit, into a field cleared beforehand.
* **Per-row right shift by `q`**: for each bit `j` of `q`, rows whose bit
  `j` is 1 move their field down by `2^j` with a conditional copy. Shifting
  by a constant needs no operation at all: `floor(x·mu / 2^(2M))` is just the
  upper bits of the product field.
* **Division** is restoring. Each iteration shifts the remainder left,
  subtracts the sum, copies the borrow into a flag column, adds the sum back
  in the rows where the flag is 1, and writes quotient bit `k` in the rows
  where it is 0.

### Column map (`ap_pkg`)

| field | width | holds |
|---|---|---|
| VAL, CARRY, FLAG | 1 each | row valid, carry/borrow, restore flag |
| V | 6 | v |
| MX | 6 | max(v), then x, then r |
| MU | 10 | mu |
| P1 | 16 | x·mu; its upper 4 bits are q |
| LN2 | 4 | v_ln2 |
| P2 | 8 | q·v_ln2 |
| VB | 6 | v_b, then t |
| T2 | 6 | copy of t |
| SQ | 15 | t², then t²+v_c, then v_approx |
| VC | 12 | v_c |
| SUM | 28 | sum of v_approx (N = 16 extra bits) |
| REM | 29 | remainder of the division |
| QUO | 24 | v_sm (the 2M+12-bit result column) |

### Controller (`ap_ctrl`) and the program

The program is `ap_pkg::softmax_prog`. It follows the 16-step dataflow of
the method:

| step | operation | micro-ops |
|---|---|---|
| 1 | write v (host, row by row) and max(v) | broadcast MX |
| 2 | subtract | MX -= V |
| 3 | write mu | broadcast MU |
| 4 | multiply + shift | P1 = MX·MU |
| 5 | write v_ln2 | broadcast LN2 |
| 6 | multiply | P2 = q·LN2 |
| 7 | subtract | MX -= P2 |
| 8 | write v_b | broadcast VB |
| 9 | add (v_corr + v_b) | VB -= MX |
| 10 | copy | T2 = VB |
| 11 | multiply | SQ = VB·T2 |
| 12 | write v_c | broadcast VC |
| 13 | add + shift | SQ += VC; SQ >>= q |
| 14 | reduction | SUM = SQ where VAL; tree sum into row 0 |
| 15 | copy the sum | every row's SUM = row 0's SUM |
| 16 | divide | 24 iterations of restoring division into QUO |

Finally the controller clears the VAL column, ready for the next vector.

## Interface and timing (`softmap_ap`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset of the controller |
| `ld_en`, `ld_addr`, `ld_data` | in | 1, log2 ROWS, 6 | write `v` into a row and mark the row valid (only while `ready`) |
| `max_v`, `mu`, `vln2`, `vb`, `vc` | in | 6, 10, 4, 6, 12 | max(v) and the offline constants; hold them stable from `start` to `done` |
| `start` | in | 1 | one-cycle pulse while `ready` |
| `ready`, `busy`, `done` | out | 1 | idle; running; one-cycle pulse when the results are ready |
| `rd_addr` | in | log2 ROWS | row to read |
| `rd_sm`, `rd_approx`, `rd_sum` | out | 24, 12, 28 | v_sm, v_approx and the sum for that row, one cycle later |

Assertions check that the host neither loads nor starts while the AP is busy.

How to use it:

1. After reset, wait for `ready`. Three cycles go to clearing the valid column.
2. Load up to `ROWS` words, one per cycle. Rows that are not loaded stay out
   of the sum.
3. Apply the constants and pulse `start`.
4. After `done`, read the rows back.

Every pass takes two cycles. The number of cycles from `start` to `done`
does not depend on the data:

```
cycles = 15367 + 226 * log2(ROWS)
```

The reduction makes up the `226 * log2(ROWS)` term: 28 bits at 8 cycles per
bit plus a carry clear, per level. The division takes 13 831 cycles, most of
the total. With the default 2048 rows a vector takes 17 853 cycles, which
is 17.9 µs at the 1 GHz clock given for the design.

## Configuration

* `ROWS` (in `softmap_ap`, `ap_cam`) is half the sequence length. The default
  is 2048, for sequences of 4096. The row count changes only the reduction.
* `M` and `N` in `ap_pkg` set the word precision and the extra bits of the
  sum. The defaults are 6 and 16, the precision chosen as good enough for
  Llama2 perplexity. The other widths derive from them. A wider M means a
  wider `v_b` and therefore new constants.

## Where this RTL departs from the method as published

* **Column layout.** The published mapping reuses three columns, A (M
  bits), B (M bits) and R (2M+12 bits), for all intermediate values. This
  design gives every value a field of its own (169 columns instead of 36).
  It also adds carry, flag and valid columns, which in-place bit-serial
  tables need. At M = 6 the 28-bit sum and the 12-bit v_approx would not fit
  into 36 columns together anyway.
* **Widths.** Some widths follow the precision table, where the mapping
  figure's formulas (drawn for M = 8) disagree at M = 6: v_ln2 is 4 bits,
  the polynomial 15, v_approx 12 and the sum 28.
* **Latency.** The published cost model puts 8 cycles per bit on addition and
  8 per bit product on multiplication, and this design matches both. Its
  reduction costs 8 cycles per tree level regardless of width. Here a level
  is a full 28-bit addition, so the reduction is about 28 times longer than
  that model. The division's algorithm and the output scaling (`2^23`) are
  not published, and are this design's choices.
* **Sign convention.** The computation works on `-v_stable` (see
  Arithmetic). Step 2 therefore writes its result into the max field rather
  than into v's.
* **Inter-row operations.** The 2D AP's row-pair operation is modelled by the
  partner-bit compare. Step 15 (copy the sum) is a broadcast write from
  row 0.
* **Not included:**
  * the transistor-level SRAM/CAM cell, modelled as one bit of the array;
  * the constants and max(v), which come from the host;
  * replicating the AP per attention head: `softmap_ap` is one head's
    processor.

## Files

* `rtl/ap_pkg.sv`: widths, column map, types, the Softmax program.
* `rtl/ap_pass_gen.sv`: the look-up tables (pass generator).
* `rtl/ap_cam.sv`: the CAM array with tag register and row-pair mode.
* `rtl/ap_ctrl.sv`: the controller.
* `rtl/softmap_ap.sv`: top level, one head's AP.
* `tb/tb_ap_cam.sv`: checks compare, write, row-pair and broadcast against a
  shadow array.
* `tb/tb_ap_pass_gen.sv`: runs every table on a modelled 8-row array and
  checks the integer results.
* `tb/tb_ap_ctrl.sv`: checks the command sequence, the pass order and the
  cycle count.
* `tb/tb_softmap_ap.sv`: end to end with 64 rows and six vectors, including
  a partial vector and a single-element vector.
* `tb/tb_softmap_ap_full.sv`: the same test at the default 2048 rows. It
  runs one vector per sequence length from 128 to 4096 (64 to 2048 loaded
  rows) and takes about 15 s in Verilator.

Each testbench prints `TB_RESULT checks=<n> failures=<m>`. To run one with
Verilator:

```
verilator --binary --timing --assert rtl/ap_pkg.sv rtl/ap_pass_gen.sv \
  rtl/ap_ctrl.sv rtl/ap_cam.sv rtl/softmap_ap.sv tb/tb_softmap_ap.sv \
  --top-module tb_softmap_ap -Mdir obj && obj/Vtb_softmap_ap
```
