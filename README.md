# DHFP-PE: a dual-precision FP8 / FP4 multiply-accumulate processing element

Neural-network inference increasingly runs in 8-bit and 4-bit floating point.
A processing element (PE) that has an FP8 datapath wastes most of it when it
is fed FP4 data. This PE reuses one small datapath for both precisions:

* in the **FP8 modes** (E4M3 or E5M2) it computes `y = ReLU(A*B + C)`;
* in the **dual-FP4 modes** (E2M1 or E1M2) each 8-bit A and B input holds two
  FP4 numbers, and it computes the dot product
  `y = ReLU(A[7:4]*B[7:4] + A[3:0]*B[3:0] + C)`.

A new operation is accepted on every clock and the result comes out six clocks
later. That is 2 floating-point operations per cycle in FP8 and 4 in FP4.
The architecture reports 1.938 GHz in 28 nm, or 3.88 and 7.75 GFLOPS.

The idea that makes one datapath serve both precisions is **bit partitioning**
of a 4-bit significand multiplier. One 4x4 array of partial products is either
used whole, as one 4x4 product for FP8, or split along the middle into two
independent 2x2 products for the two FP4 lanes. Everything downstream of the
multiplier works on three terms in both modes: two lane products (the second
is empty in FP8) and the addend C. So the exponent comparator, the aligner,
the adder and the normaliser are the same hardware in all four modes.

This RTL implements the PE in SystemVerilog-2017. It follows the published
block diagram and stage description. The source leaves out widths, encodings
and numerical details, and this design fills them in. Every such choice is
named below and in the opening comment of the file that makes it.

## Formats and the mode input

| `mode` | format | bits      | bias | smallest normal | largest finite | specials |
|--------|--------|-----------|------|-----------------|----------------|----------|
| `2'b00`| E4M3   | S EEEE MMM| 7    | 2^-6            | 448            | NaN = S.1111.111, no Inf |
| `2'b01`| E5M2   | S EEEEE MM| 15   | 2^-14           | 57344          | exp 11111: Inf (M=0), NaN |
| `2'b10`| E2M1   | S EE M    | 1    | 1               | 6              | none |
| `2'b11`| E1M2   | S E MM    | 0    | 2               | 3.5            | none |

The mode encoding is the published one. The source writes only "bias", so
the biases are the IEEE rule 2^(E-1)-1, which gives the OCP FP8 and MX FP4
values for E4M3, E5M2 and E2M1. The choice of which codes are special also
follows OCP. An exponent field of zero means a subnormal number (no hidden
bit, exponent 1-bias).

In the FP4 modes, lane 0 is the low nibble and lane 1 the high nibble of A and
B. **C carries a single FP4 addend in C[3:0]**, and C[7:4] is ignored. The
result has the format of the mode: a full byte in FP8, or one FP4 code in
`y[3:0]` with `y[7:4] = 0` in FP4. The source does not say how C and the
output are laid out in FP4. This layout is the one that fits its three-input
exponent comparator (two products and one addend). The result's own format
is also the only one its "FP4 or FP8 output" wording allows.

**E1M2 caveat.** An E1M2 significand `e.mm` is three bits wide, but an FP4
lane of the unit multiplier is only 2x2. The decoder therefore drops the last
mantissa bit of E1M2 inputs, so E1M2 operands carry one mantissa bit. E1M2
results still use both mantissa bits. The source claims E1M2 support on the
2x2 lanes without saying how; this truncation is the simplest reading that
keeps its multiplier.

## The bit-partitioned unit multiplier (`unit_multiplier`)

The product is a masked sum of partial products,

    P = sum_{i,j} delta_m(i,j) * a_i * b_j * 2^(i+j)

With `split = 0` every partial product is enabled, and `P` is the unsigned
4x4 product of two significands `1.xxx`. For E5M2, the significand `1.xx` is
zero-padded to `1.xx0`. With `split = 1` the mask removes every partial
product whose two indices lie in different halves (`{1,0}` vs `{3,2}`). The
low four bits then hold `a[1:0]*b[1:0]` and the high four bits
`a[3:2]*b[3:2]`. A 2x2 product is at most 9, so it never carries into the
other half, and no extra separation logic is needed.

## Adding three terms with different exponents

This is the core of the PE and the part that most needs care.

**Term exponents.** Stage S1 forms the exponent of each term: `E0 = Ea0+Eb0`
and `E1 = Ea1+Eb1` for the two lane products, and `Ec` for the addend. All
exponents are unbiased and kept as 8-bit two's complement. A term that is zero
(a zero operand, or lane 1 in FP8) gets the exponent -64, so it never wins
the comparison.

**EC blocks and the LUT** (`exp_compare_s1`, `exp_compare_s2`). Three
subtractors run in parallel and compute `E1-Ec`, `E0-Ec` and `E1-E0`. This
avoids a chain of two-input comparisons. In the next stage, an 8-entry table
indexed by the three sign bits picks the largest exponent (`Max1`). It also
says how each term's distance to it (`Diff_0`, `Diff_1`, `Diff_Ec`) follows
from the stored differences: taken as is, negated, or zero. Two of the eight
sign patterns cannot occur. Ties go to E1, then E0.

**The window** (`truncate_complement`). Every term is written on one
fixed-point grid: an 8-bit magnitude with 6 fraction bits, so
`value = mag * 2^(E-6)`.

* A 4x4 product of two `1.xxx` fills this grid as it is.
* A 2x2 lane product `xx.yy` is shifted up by 4.
* The FP8 addend `1.xxx` is shifted up by 3.
* The FP4 addend `x.y` is shifted up by 5.

`GUARD` = 4 zero bits go below the magnitude. A negative term is then
two's-complemented into a 15-bit signed word (`ACC_W = 8 + GUARD + 3`, wide
enough for the sum of three terms).

**Alignment and truncation** (`exponent_postprocessor`, `alignment_shifter`).
Each term is shifted right arithmetically by its offset. Offsets of 14 or more
are saturated, because everything is shifted out by then. Bits that fall
below the guard bits are dropped. This is the PE's "truncation instead of
rounding" design. The complement comes before the shift, in the order of the
published diagram. So each term is rounded toward minus infinity on the grid
`u = 2^(Emax - 6 - GUARD)`.

**Sum** (`csa_tree`, `csla`). One row of full adders (a 3:2 carry-save
stage) turns the three terms into a sum and a carry vector. A carry-select
adder with 4-bit blocks adds the two vectors.

**Normalisation** (`mantissa_normalization`, `lza`,
`exponent_normalization`). The sum is split into a sign and a 14-bit
magnitude. A leading-zero count gives the shift that puts the leading one at
the top, and the result exponent is `e_r = Emax + 3 - lz`. Below the format's
smallest normal exponent the result becomes subnormal: it is shifted right by
the difference and gets a zero exponent field. Above the largest finite
exponent the result overflows.

**Packing** (`sem_combination`, `relu`). The mantissa bits just below the
leading one are cut to the format's width, so the result is truncated toward
zero. An overflow saturates to the largest finite code. So does an E4M3
result that would land on the NaN code. Finally the ReLU replaces any negative
result by +0.

Put as one formula, the PE returns

    y = ReLU( trunc_to_format( u * sum_t floor(term_t / u) ) ),   u = 2^(Emax-6-GUARD)

This is not the correctly rounded `A*B + C`. A term far below the largest one
loses its low bits (or all of them). A negative small term contributes -1 ulp
of the window rather than 0. With `GUARD = 4` the window keeps 10 bits below
the leading product bit. That is far more than any output format keeps (at most
3 mantissa bits). In the 20 000 random operations of the end-to-end test, no
positive result differed from the truncation of the exact value. A
difference is possible only when terms of very different size nearly cancel.
The reference model in `tb/dhfp_ref_pkg.sv` states this contract with real
numbers, independently of the datapath.

## Special values (FP8 modes)

The S0 decoder flags E4M3 NaN and E5M2 Inf/NaN. The sign unit of S1 then
applies the IEEE rules:

* any NaN, Inf*0, or Inf plus an Inf of the other sign gives NaN, encoded as
  `0x7F`;
* otherwise an infinite term gives an infinity of its sign, `0x7C` or `0xFC`
  in E5M2.

These flags bypass the arithmetic and override the packed result. ReLU turns
-Inf into 0 and lets NaN pass. The FP4 formats have no special codes.

## Six pipeline stages (`dhfp_pe`)

| stage | modules | work |
|-------|---------|------|
| S0 | `sem_extraction` | decode A, B, C by mode: sign, exponent, significand, zero/NaN/Inf |
| S1 | `unit_multiplier`, `exp_compare_s1`, `sign_processing` | significand product(s), term exponents and EC differences, product signs and special outcome |
| S2 | `exp_compare_s2` | LUT: maximum exponent and three offsets |
| S3 | `truncate_complement`, `exponent_postprocessor`, `alignment_shifter` | signed window terms, saturated shifts, alignment |
| S4 | `csa_tree`, `csla` | three-term sum |
| S5 | `mantissa_normalization`, `lza`, `exponent_normalization`, `sem_combination`, `relu` | normalise, pack, activate |

A register bank closes each stage. The mode and a valid bit travel with the
data, so the mode may change on every cycle. Inputs sampled at rising edge
*k* appear on `y` and `out_valid` after edge *k+5*: the latency is six
cycles, and the PE has no stalls.

Ports: `clk`, `rst` (asynchronous, active high, clears only the valid
pipeline), `in_valid`, `mode[1:0]`, `a[7:0]`, `b[7:0]`, `c[7:0]`,
`out_valid`, `y[7:0]`. The one parameter is `GUARD` (default 4). The shared
types and format functions are in `rtl/dhfp_pkg.sv`.

## Where this RTL departs from the published description

* **Stage boundaries.** The published diagram puts the EC subtractors in S1
  and the LUT in S2, truncation/complement and alignment in S3, the CSA and
  CSLA in S4, and normalisation and packing in S5. The text and the
  per-stage area table put alignment in S2, accumulation in S3 and
  normalisation in S4. This RTL follows the diagram, which shows where the
  registers are.
* **The addend goes through the aligner.** The published diagram draws one
  path from the early stages straight into the carry-save tree, next to the
  aligner's output. That reads as if the addend's mantissa skipped alignment.
  Here all three terms are aligned, because the comparator produces an
  alignment offset for the addend (`Diff_Ec`). Without it, an addend with a
  different exponent could not be added correctly.
* **LZA.** The unit is named a leading-zero anticipator but described as
  counting the leading zeros of the result. It is built as an exact counter
  on the adder output, not as a predictor working on the adder inputs.
* **E1M2 inputs** lose their last mantissa bit (see above).
* **C and the result in FP4 modes** are one FP4 value in the low nibble.
* **One unit multiplier.** The text mentions "two multiplier blocks" for one
  4x4 and two 2x2 products. A single bit-partitioned 4x4 array already yields
  both, and that is what is built.
* **Interface additions.** The diagram has no valid signal and no reset
  behaviour; `in_valid`/`out_valid` and the reset of the valid bits are
  additions. ReLU is always on, as described; there is no bypass.
* **Register count.** The published FPGA result uses 69 flip-flops. This RTL
  registers about 290 bits. It keeps the full decoded operands after S0 and
  all three 15-bit aligned terms after S3, so that each stage stays the simple
  unit the diagram shows. The numerical choices (GUARD, grid) were not tuned
  to match the published resource counts.
* **Not included:** the surrounding accelerator (systolic array, weight and
  input buffers, DMA, RISC-V host). The source shows these only as the
  typical setting for such a PE, not as part of its design.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. It compares
the module with values computed in a different way: exhaustively where that
is small (multiplier, leading-zero count, ReLU, decoder), and otherwise with
thousands of random vectors. The end-to-end testbench `tb/tb_dhfp_pe.sv` runs
the PE at its default parameters. It sends directed cases and 20 000 random
operations in all four modes, mostly back to back, with mode changes and
idle cycles. Every result is checked against `dhfp_ref_pkg::pe_ref`, and so
is the six-cycle latency. The testbench also counts how often each mechanism
occurred and fails if one never did: mode switch, FP8, dual FP4, NaN, Inf,
saturation, subnormal result, ReLU clamp, alignment truncation and
back-to-back output. `tb/tb_dhfp_pe_throughput.sv` streams 2000 operations
per mode and measures 2.00 FLOP/cycle in FP8 and 4.00 in FP4.

Two assertions in `dhfp_pe` check the pipeline contract in every
simulation. An accepted operation must produce `out_valid` exactly six
cycles later, and no `out_valid` may appear without an operation accepted
six cycles earlier.

Each testbench ends by printing `TB_RESULT checks=N failures=M`.

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing -Wno-fatal -y rtl -y tb \
        rtl/dhfp_pkg.sv tb/dhfp_ref_pkg.sv tb/tb_dhfp_pe.sv --top-module tb_dhfp_pe
    ./obj_dir/Vtb_dhfp_pe

Replace `tb_dhfp_pe` with any other testbench name. Each finishes in well
under a second.

## Changing it

* `GUARD` sets how many bits below the product's LSB survive alignment. A
  larger value brings the result closer to the truncation of the exact sum.
  It costs adder, shifter and normaliser width, because `ACC_W = 11 + GUARD`
  and every width downstream follows from it. The reference model takes the
  same value as an argument.
* The format table (bias, exponent range, mantissa width) is in the functions
  of `dhfp_pkg`. The decoder in `sem_extraction` and the packing in
  `sem_combination` are the only other places that know the bit layouts.
* The LUT cases in `exp_compare_s2` are written out one sign pattern per line.
