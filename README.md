# A posit vector arithmetic unit in SystemVerilog

Posits are a floating-point format whose exponent field has a variable
length. Values near 1 get more fraction bits. Very large and very small values
get fewer, so the dynamic range is wider than that of an IEEE float of the
same width. This RTL implements a **vector** posit unit. Each operation takes
two vectors of `LANES` posit elements (default: four `posit<32,2>` numbers,
128 bits per operand) and computes one of five operations element by element:

| operation | result |
|-----------|--------|
| `vpadd`   | `pv1[i] + pv2[i]` for every lane |
| `vpsub`   | `pv1[i] - pv2[i]` |
| `vpmul`   | `pv1[i] * pv2[i]` |
| `vpdiv`   | `pv1[i] / pv2[i]` (approximate, see below) |
| `vpdot`   | `sum_i pv1[i] * pv2[i]`, one scalar, rounded once |

The unit is controlled by custom RISC-V vector instructions. It is meant to
sit beside a RISC-V core with the vector extension, which decodes the
register fields, reads the vector registers and writes back the result. That
core is not part of this RTL.

The design follows the published description of the PVU ("Posit Vector
Arithmetic Unit"). That description gives the algorithms of the blocks. It
gives no clocking, widths beyond the main format, or interface timing. Every
place where this RTL had to choose is listed in
[Where this RTL departs from or adds to the description](#where-this-rtl-departs-from-or-adds-to-the-description).

## 1. Posit numbers and the internal representation (PIR)

A `posit<N,ES>` word is `sign | regime | exponent (ES bits) | fraction`:

* **sign**: negative posits are stored as the two's complement of the whole
  word. Decoding therefore starts by negating negative words.
* **regime**: a run of identical bits ended by the opposite bit (or by the end
  of the word). A run of `m` ones means `r = m-1`. A run of `m` zeros means
  `r = -m`.
* **exponent**: `ES` bits, `e`. Bits cut off by a long regime count as 0.
* **fraction**: whatever remains, with a hidden leading 1.

The value is `(-1)^s * 1.f * 2^(r*2^ES + e)`. The word `0...0` is zero. The
word `10...0` is NaR (not a real). With `ES = 2`, the largest posit32
(`maxpos`, `0x7FFFFFFF`) is `2^120`, the smallest (`minpos`, `0x00000001`)
is `2^-120`, and at most 27 fraction bits are ever present.

Every operation works on a decoded form, called **PIR** here:

| field | width (posit<32,2>) | meaning |
|-------|--------------------|---------|
| sign  | 1 | sign of the value |
| exp   | `XW = RGM_W + ES` = 10, signed | `r << ES \| e`, the binary scale |
| frac  | `F = N - ES - 2` = 28 | `1.f`, hidden bit included |
| zero, nar | 1 each | special values |

Example, `posit<16,2>` word `0111110111101010`. The regime is `111110`, so
`r = 4`. Then `e = 3` and `f = 1101010`. The result is `exp = 19` and
`frac = 1.828125`. `tb_posit_decode` checks exactly this case.

## 2. Organisation and timing

```
             stage 1          stage 2               stage 3             output
insn ──► pvu_insn_dec ─┐
pv1 ───────────────────┤reg├─► posit_to_pir ─┤reg├─► pvu_addsub ─┐
pv2 ───────────────────┘                            pvu_mul ─┬────┤
                                                    pvu_div ─┼────┤mux├┤reg├─► pir_to_posit ─► posit_rst
                                                             └► pvu_dot ─────┘  (norm + encode,
                                                                                  vector & scalar)
```

* **Stage 1** registers the operands. It also registers the operation,
  destination register and legality decoded from the instruction.
* **Stage 2** decodes every element of both operands to PIR (`2 x LANES`
  decoders) and registers them.
* **Stage 3** runs all four arithmetic units in parallel on the registered
  PIR. It registers the result chosen by the operation. The dot-product unit
  takes the multiplier's exact products, so one set of multipliers serves both
  `vpmul` and `vpdot`.
* **Output**: `pir_to_posit` normalises and encodes the registered result.
  This part is combinational.

`out_valid` follows `in_valid` by exactly **three clock edges**. A new
instruction can be accepted on every clock. Nothing stalls and there is no
back-pressure. Reset (`rst_n`, synchronous, active low) clears only the three
valid bits.

### Ports of `pvu_top`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset |
| `in_valid` | in | 1 | `insn`, `pv1`, `pv2` are valid this cycle |
| `insn` | in | 32 | the instruction word |
| `pv1`, `pv2` | in | `LANES x N` | operand vectors (element `i` = `pv1[i]`) |
| `dec_vs1`, `dec_vs2` | out | 5 | register fields of `insn`, combinational, for the host's register file |
| `out_valid` | out | 1 | result valid |
| `out_illegal` | out | 1 | the word was not a posit instruction; result is zero |
| `out_vd` | out | 5 | destination register of this result |
| `posit_rst` | out | `LANES x N` | result vector; for `vpdot` the scalar is in element 0 and the other elements are 0 |

### Instruction encoding

The instructions use the layout of the RISC-V vector `OPFVV` instructions.
Bits 31:26 hold a custom `funct6` that marks a posit operation, and `funct3`
selects the operation:

| 31:26 `funct6` | 25 `vm` | 24:20 | 19:15 | 14:12 `funct3` | 11:7 | 6:0 opcode | mnemonic |
|---|---|---|---|---|---|---|---|
| 001101 | 1 | vs2 | vs1 | 000 | vd | 1010111 | `vpadd vd, vs1, vs2` |
| 001101 | 1 | vs2 | vs1 | 001 | vd | 1010111 | `vpsub` |
| 001101 | 1 | vs2 | vs1 | 010 | vd | 1010111 | `vpmul` |
| 001101 | 1 | vs2 | vs1 | 011 | vd | 1010111 | `vpdiv` |
| 001101 | 1 | vs2 | vs1 | 100 | vd | 1010111 | `vpdot` |

Any other word, including `funct3` 101 to 111, is rejected (`out_illegal`).
`vm` must be 1. No element masking is done. The operand order is
`pv1` = register `vs1`, `pv2` = register `vs2`, and `vpsub`/`vpdiv` compute
`pv1 - pv2` and `pv1 / pv2`.

## 3. The arithmetic units

All vector units hand the output stage the same unrounded format. It has a
sign, zero and NaR flags, an exponent of `XW+2` bits, a mantissa of
`MW = 2F` bits with **two integer bits**, and a sticky bit. Nothing is rounded
before the final encoder.

### Decode (`posit_decode`, `lzc`, `bsc`)

1. If the word is negative, negate it.
2. Look at the first regime bit. If it is 1, invert the regime part.
3. The leading-zero counter (`lzc`) then gives the run length `m` and the
   regime value `r`.
4. A barrel shifter (`bsc`) moves the word left by `m+1`. This drops the run
   and its terminating bit.
5. The top `ES` bits are now the exponent. The rest is the fraction.

### Add and subtract (`pvu_addsub`, `pir_align`)

1. Find the larger exponent. It becomes the result exponent.
2. Shift the other mantissa right by the exponent difference. The mantissa
   is widened by `G = 4` guard bits first, so the aligned width is
   `F + G = 32` bits.
3. A shift of more than the aligned width clears the mantissa. Every bit
   shifted out is ORed into the LSB ("sticky jamming"). With the guard bits,
   this keeps the final rounding correct.
4. If the signs (after flipping `pv2`'s sign for `vpsub`) are equal, add the
   magnitudes. Otherwise subtract them. A borrow means the second operand
   was larger: negate the difference and give it that operand's sign.

### Multiply (`pvu_mul`, `booth_mul`, `booth_enc`, `gen_prod`, `csa_tree`)

* The product's sign is the XOR of the two signs. Its exponent is the sum of
  the two exponents.
* The exponent sum is saturated at `±((N-2)·2^ES + 2)`. That is already
  beyond maxpos/minpos, so the saturation never changes a result. It only
  bounds the width.

The mantissa product is a **radix-4 Booth multiplier**:

1. The multiplier (`b`) gets a zero below it and zeros above it. It is then
   cut into `WB/2 + 1` overlapping 3-bit groups: 15 groups for 28-bit
   mantissas, 9 for 16-bit ones.
2. Each group's `booth_enc` gives a digit in `{-2,-1,0,1,2}` as four control
   lines: `neg`, `zero`, `one`, `two`.
3. `gen_prod` selects `0`, `a` or `2a` and inverts it for a negative digit.
   Each partial product is sign-extended and shifted by two places per group.
4. One extra row collects the `+1` of every inverted partial product.
5. All rows go into a **carry-save tree** (`csa_tree`). It is written
   recursively. At each level, groups of four rows go to 4:2 compressors, a
   group of three goes to a 3:2 compressor, and leftover rows pass through.
   This repeats until two rows remain: a sum and a carry.
6. One carry-propagate addition of sum and carry gives the exact
   `2F`-bit product.

### Divide (`pvu_div`, `nr_recip`)

The sign is the XOR of the signs and the exponent is the difference of the
exponents. The mantissa quotient `a/b` becomes `a · (1/b)`:

1. `nr_recip` starts from the linear estimate `x0 = 24/17 - 8/17·b`. Its
   error is below 1/17 for `b` in [1,2).
2. It then applies three Newton steps, `x ← x·(2 - b·x)`. Each step is two
   Booth multiplications, truncated back to `RW = F+4 = 32` fraction bits.
   Each step squares the error, so the result is good to about 2^-31.
3. A last Booth multiplication forms `a·x`. The bits dropped from it become
   the sticky bit.

Because `1/b` is approximate, the quotient is sometimes one posit step away
from the correctly rounded result. On random posit32 data, 97.9% of
quotients in `tb_pvu_top` are exact and all are within one step. The PVU
description reports 95.84% on its data. Division by zero gives NaR.

### Dot product (`pvu_dot`)

1. The `LANES` exact products from `pvu_mul` are aligned together to the
   largest product exponent. This uses the same `pir_align` module as
   add/subtract, here with `2F + G` bits and sticky jamming.
2. Each aligned product is turned into two's complement according to its
   sign.
3. All products are summed in one carry-save tree and one final adder. The
   word is `TW = 2F + G + clog2(LANES) + 1 = 63` bits wide.
4. The magnitude of the total goes through the **scalar** normalise/encode
   path. So the whole dot product is rounded only once.

**Limit:** this is not an exact accumulator (quire). A product more than
`2F+G` bits below the largest one only contributes its sticky bit. So a sum
that cancels almost completely can differ from the exactly rounded dot
product. Random data in the testbenches never shows a difference.

### Normalise (`pir_norm`) and encode (`posit_encode`)

`pir_norm` finds the leading one with `lzc`, shifts it to the top with `bsc`
and corrects the exponent. It keeps the hidden bit, `F-1` fraction bits and
one extra bit. It ORs everything below into the sticky bit.

`posit_encode` builds the posit bit string in one step:

1. Split the exponent into the regime value `k = exp >> ES` and the exponent
   bits `e`.
2. Form the word `{rb, ~rb, e, fraction}`, where `rb` is 1 for `k >= 0`.
3. Shift that word right **arithmetically** so that `rb` is repeated `k+1`
   times (for `k >= 0`) or `-k` times (for `k < 0`). This writes the regime,
   its terminating bit, the exponent and the fraction at once.
4. The first `N-1` bits form the body. The next bit is the guard bit. All
   remaining bits, plus the incoming sticky, form the sticky bit.
5. Round to nearest, ties to even, on that bit string. This also rounds
   exponent bits that a long regime pushed out.
6. Scales beyond maxpos or below minpos saturate to maxpos/minpos. A non-zero
   result never becomes 0 or NaR.
7. Negative results are negated (two's complement).

`pir_to_posit` holds `LANES` normalise/encode pairs for vector results and
one more pair for the dot-product scalar.

## 4. Parameters

| parameter (`pvu_top`) | default | meaning |
|---|---|---|
| `N` | 32 | posit width |
| `ES` | 2 | exponent field width |
| `LANES` | 4 | elements per vector |
| `RGM_W` | 8 | regime-value width in PIR; the PIR exponent has `RGM_W+ES` bits and must hold `±(N-1)·2^ES` |
| `G` | 4 | guard bits added to mantissas when aligning (the "alignment width" is `F+G`) |
| `ITER` | 3 | Newton steps of the reciprocal |

The PVU description also shows the same 128/32-bit field budget split into
eight 16-bit or sixteen 8-bit elements. In this RTL those are other
elaborations of the parameters (for example `N=16, LANES=8`), not a mode that
switches at run time. Two such elaborations are run end to end:

* `N=16, LANES=8, RGM_W=6` in `tb_pvu_p16x8`. The description's field budget
  gives each 16-bit element 4 regime bits. That is too few for the full
  posit16 regime range (−15…14), so 6 are used.
* `N=8, LANES=16, RGM_W=4, G=3` in `tb_pvu_p8x16`. The adder needs `F > G`,
  because its `F+G+1`-bit sum must fit the shared `2F`-bit mantissa.
  `F` is only 4 for posit8, so `G` is lowered to 3.

`posit_decode` and `posit_encode` are also checked at `N=16`.

## 5. Where this RTL departs from or adds to the description

* **Pipeline.** The description draws the dataflow with three vertical bars
  and gives no clocking. Here the bars are register stages, which gives a
  latency of 3 and full throughput.
* **NaR.** The description once calls the all-ones word NaR. This RTL uses
  `10...0`, the standard encoding. All-ones is `-minpos`.
* **Rounding happens once.** The description mentions RNE rounding both in
  normalisation and in encoding. Doing both would round twice. Here the
  normaliser keeps the extra bit and a sticky bit, and only the encoder
  rounds.
* **Alignment width.** It is configurable in the description but no value is
  given. Here it is `F+4` for add/subtract and `2F+4` for the dot product.
  Sticky jamming was added so that add/subtract are correctly rounded.
* **Reciprocal start value and fixed-point widths** (`x0 = 24/17 - 8/17·b`,
  32 fraction bits) are this design's choice. The description gives only the
  Newton formula and the three iterations.
* **CSA tree grouping.** The description's figure for nine partial products
  groups rows slightly differently (4:2, 4:2, 3:2, final 4:2). The recursive
  tree here groups rows in order. The sum is the same.
* **Dot-product output.** The scalar is placed in element 0, and the other
  elements are 0.
* **Vector mask.** `vm` is required to be 1 and no masking is done.
* **Extra ports.** The instruction decoder and the register-field ports were
  added so the unit can be driven by an instruction stream. The description
  shows a bare `OP` input.

## 6. Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<m>`. The arithmetic is compared with
`tb/posit_ref_pkg.sv`, a reference model written independently of the RTL:

* It decodes posits bit by bit.
* It computes sums, products and dot products exactly on 1024-bit integers.
* It computes quotients with 200 extra bits and a remainder flag.
* It encodes by writing the regime, exponent and fraction bits one at a time,
  then rounds that bit string to nearest even with saturation.

| testbench | what it checks |
|---|---|
| `tb_pvu_top` | 3000+ random instructions back to back at the default size; every result bit-exact (division within one step, ≥85% exact); latency 3; and that add, sub, mul, div, dot, NaR, zero results, maxpos/minpos saturation, alignment shifts beyond the aligned width, full-length regimes and rejected instructions all occur |
| `tb_pvu_p16x8`, `tb_pvu_p8x16` | the same stream at eight posit16 and sixteen posit8 elements; for posit8 the dot product is counted for exactness (≥95%, about 98% seen) because sixteen narrow products cancel often enough to expose the finite accumulator |
| `tb_pvu_conv` | the testbench acts as a host program and computes a convolution with the unit: 4×4 and 7×7 filters over an image, once with vpmul plus vpadd reduction and once with vpdot plus vpadd, waiting for each result before using it; every pixel must equal the same operation sequence in the reference, and every instruction must take three clocks |
| `tb_pvu_addsub`, `tb_pvu_mul`, `tb_pvu_div`, `tb_pvu_dot` | one unit between the decode and encode stages, against the reference |
| `tb_posit_decode`, `tb_posit_encode` | `posit<32,2>` and `posit<16,2>`, including the worked example and saturation |
| `tb_booth_mul`, `tb_csa_tree`, `tb_nr_recip` | exact products (28×28, 16×16, 28×33), carry-save totals for 3/9/16 rows, reciprocal error bound |
| `tb_lzc`, `tb_bsc`, `tb_pir_align`, `tb_pir_norm`, `tb_posit_to_pir`, `tb_pir_to_posit`, `tb_pvu_insn_dec` | the small blocks against direct models |

To simulate with Verilator (5.x), from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/pvu_pkg.sv tb/posit_ref_pkg.sv tb/tb_pvu_top.sv --top-module tb_pvu_top
./obj_dir/Vtb_pvu_top
```

Replace `tb_pvu_top` with any other testbench name. Verilator finds the RTL
modules through `-Irtl`, because each module is in a file of its own name.
The whole default-size test runs in well under a second.

## 7. Files

`rtl/pvu_pkg.sv` holds the operation codes and instruction constants. Every
other file in `rtl/` holds one module of the same name.

* Top: `pvu_top`.
* Stages: `pvu_insn_dec`, `posit_to_pir`, `pir_to_posit`.
* Arithmetic units: `pvu_addsub`, `pvu_mul`, `pvu_div`, `pvu_dot`.
* Building blocks: `posit_decode`, `posit_encode`, `pir_align`, `pir_norm`,
  `nr_recip`, `booth_mul`, `booth_enc`, `gen_prod`, `csa_tree`, `csa42`,
  `csa32`, `lzc`, `bsc`.

Each file starts with a description of the block, its interface and its
timing.
