# A floating-point adder that also returns its own rounding error

When two binary floating-point numbers are added and the sum is rounded to
nearest, the part of the exact sum that was rounded away is itself a
floating-point number. Double-double arithmetic, compensated summation, the
compensated dot product and compensated Horner evaluation all need that
number. Without hardware help, software computes it with Knuth's TwoSum: five
more dependent additions after the sum.

This RTL implements the instruction proposed as FPADDRE (floating-point add,
round-off error) in Dukhan, Vuduc and Riedy, *Wanted: Floating-Point Add
Round-off Error instruction*:

    FPADD(a, b)   = round_to_nearest_even(a + b)
    FPADDRE(a, b) = (a + b) - FPADD(a, b)          (exact)

The two instructions do not depend on each other, so an error-free addition
costs two independent operations. Both run on one shared datapath, and they
differ only at its very end. The RTL also implements the multiply counterpart
the same paper suggests, FPMULRE(a, b) = a*b - FPMUL(a, b). Both are packaged
as a small SIMD execution unit for binary64.

The paper gives the instruction's meaning and a one-picture sketch of how an
adder would produce it. It gives no circuit. Everything below the level of
"align, add, round, keep the low bits" is this design's own choice, and is
marked as such.

## The unit at a glance

```
             fpre_simd  (LANES = 4, binary64)
  add port  ──►  fpaddre_lane x4 : fp_align ─► fp_sum ─► fp_round_split ─► FPADD | FPADDRE
  mul port  ──►  fpmulre_lane x4 : 53x53 product ─► fp_round_pack ─► fp_round_pack ─► FPMUL | FPMULRE
```

* Each port takes one vector instruction per cycle. The opcode is shared by
  all lanes, and the operands are `LANES` packed 64-bit values.
* A result appears exactly 4 cycles after its instruction. There is no stall
  and no back-pressure.
* Four lanes and a 4-cycle latency are the double-precision SIMD width and
  the FP add/multiply latency of most of the processors the paper measured:
  4 lanes on three of them and 8 on the fourth; add latency 3 to 5.
  The paper's premise is that FPADDRE costs the same as FPADD, so both
  opcodes share the same pipeline.
* Rounding is always round-to-nearest-even. No other rounding modes or
  exception flags exist.

## How the adder gets the round-off error

### Exact alignment instead of a sticky bit

A conventional adder shifts the smaller significand right and ORs everything
that falls off into a sticky bit. That is enough to round, but FPADDRE must
return those bits, so nothing may be lost. `fp_align` therefore works the
other way round:

1. Order the operands by magnitude, comparing `{exponent, fraction}` as an
   unsigned integer. `big` ≥ `small` in magnitude.
2. Restore the hidden bits. A subnormal counts as exponent 1 with no hidden
   bit.
3. Let `d` = exponent(big) − exponent(small). If `d ≤ 54`, shift the big
   significand **left** by `d` into a 107-bit window, 2·53+1 bits. The unit of
   that window is the LSB of `small`, so both numbers are now integers and
   nothing has been rounded.
4. If `d > 54` (the "far" case), `small` is less than half an ulp of `big`,
   even when `big` is a power of two and the operation is a subtraction. The
   rounded sum is then `big` and the error is `small`, exactly. The window is
   not used.

`fp_sum` adds or subtracts the two window values. The result `S` is the exact
magnitude of `a + b` and is never negative, because of the ordering. A
priority encoder finds its leading one, `lead`.

### Splitting one exact sum into two results

`fp_round_split` places the rounding point `k = lead − 52` bits above the
window LSB, or at 0 when the sum has 53 significant bits or fewer; in that
case it is exact and may be subnormal. Then:

```
kept = S >> k                 high bits, the FPADD significand before rounding
rem  = S mod 2^k              low bits, which FPADD discards
up   = rem > 2^(k-1)  or  (rem == 2^(k-1) and kept is odd)   -- nearest-even

FPADD   = (kept + up) · 2^k              renormalised if kept+up carries out
FPADDRE = rem − up · 2^k                  sign = sign(big) XOR up
```

So FPADD copies the high bits and adds the rounding increment. FPADDRE copies
the low bits and subtracts the same increment. When the sum was rounded up,
the error has the opposite sign to the sum and magnitude `2^k − rem`.

The error is always exactly representable in round-to-nearest addition. Its
magnitude is at most `2^(k−1)` window units, and all its bits lie at or above
the LSB of the smaller operand. Packing it is just a second leading-one search
and a left shift, clamped at the subnormal boundary; in half precision, for
example, the error often comes out subnormal. A zero error is returned as +0.

**Worked example, half precision.** This is the paper's illustration, and the
lane testbench checks it. Take a = +1.1101011011b·2^-3 (0x335B) and
b = +1.1111111101b·2^-8 (0x1FFD).

* In units of b's LSB (2^-18) the exact sum is 62301 = `11110011010 11101`b.
* The five discarded bits `11101` = 29 are more than half of 32, so
  FPADD = `11110011011`b·2^-13 = 0x339B.
* FPADDRE = 29 − 32 = −3·2^-18. That value is a half-precision subnormal,
  0x80C0.

### Special values

| operands / sum                         | FPADD               | FPADDRE        |
|----------------------------------------|---------------------|----------------|
| any NaN, or +∞ plus −∞                 | quiet NaN 0x7FF8…   | quiet NaN      |
| one or two infinities of the same sign | that infinity       | quiet NaN      |
| finite, but the sum overflows          | ±∞                  | quiet NaN      |
| exact cancellation                     | +0 (−0 if both −0)  | +0             |

The NaN error for infinite sums matches what TwoSum returns in software. The
paper says nothing about special values.

## The multiply lane (FPMULRE)

`fpmulre_lane` forms the exact 106-bit product of the significands and the
exponent of its LSB. `fp_round_pack` then rounds that product. It is a
generalised version of the adder's rounding stage and works on any exact
magnitude with a signed LSB exponent. It picks the rounding point as the
larger of two positions: the one that keeps 53 bits, and the one set by the
subnormal grid. It returns the rounded value together with the signed
remainder (`rem − up·2^k`). A second `fp_round_pack` packs that remainder
as the error.

* The multiply error is exact whenever it lies on the subnormal grid.
* Below the grid, the error is rounded to nearest. This gives the same value
  as the usual `FMA(a, b, −FPMUL(a, b))`.
* An overflowing product gives ±∞ and a NaN error. Note that an FMA would
  return −∞ here instead.

The paper proposes FPMULRE only in outline, so this datapath is entirely this
design's own choice.

## Files

| file | contents |
|------|----------|
| `rtl/fp_pkg.sv` | opcode enums (`add_op_e`, `mul_op_e`) and the binary64 widths |
| `rtl/fp_align.sv` | ordering, hidden bits, exact left-shift alignment, far case, special values |
| `rtl/fp_sum.sv` | exact add/subtract and leading-one position |
| `rtl/fp_round_split.sv` | nearest-even rounding; FPADD and FPADDRE results from the same bits |
| `rtl/fpaddre_lane.sv` | 4-stage adder lane: input reg, align, sum, round/select |
| `rtl/fp_round_pack.sv` | general round-and-remainder stage used by the multiply lane |
| `rtl/fpmulre_lane.sv` | 4-stage multiply lane: input reg, product, round, pack error/select |
| `rtl/fpre_simd.sv` | top: `LANES` adder lanes and `LANES` multiply lanes |

Every module takes `EXP_W` and `MAN_W`, which default to 11 and 52. Other IEEE
formats are obtained by overriding them; half precision is exercised in the
tests. All logic is synthesizable. Only the valid bits are reset
(asynchronous, active low); the data registers are not reset.

## Verification

Each testbench is self-checking and ends with a `TB_RESULT checks=… failures=…`
line.

* **Reference model.** The testbenches use the simulator's IEEE double
  arithmetic: a plain `+` and `*` for FPADD and FPMUL, Knuth's six-operation
  TwoSum for FPADDRE, and an exact integer product of the significands for
  FPMULRE, cross-checked against Dekker's TwoProduct.
* **Stimulus.** `tb/fp_ref_pkg.sv` draws operand pairs from classes aimed at
  each path: close and far exponents, heavy cancellation, exact ties,
  rounding that carries out, subnormals, overflow, NaN, infinities and zeros.

| testbench | what it checks |
|-----------|----------------|
| `fp_align_tb` | ordering, flags, far threshold and window contents (20k pairs) |
| `fp_sum_tb` | exact sum/difference and leading one (20k) |
| `fp_round_split_tb` | both results against the reference (40k pairs), plus flags |
| `fpaddre_lane_tb` | 50k pipelined operations with exact 4-cycle latency, plus the half-precision example |
| `fpmulre_lane_tb` | 30k pipelined multiplies. FPMULRE is checked against an exact integer model for every finite product, including products near and below the bottom of the normal range, where the error itself has to be rounded. Where Dekker's method is exact (operand exponents within ±400), it is also checked against Dekker. |
| `fpre_simd_tb` | full-size unit: compensated dot product (Dot2) on 4 lanes with ±2^60 terms that wipe out the naive result, bit-exact against the software algorithm and equal to the exact answer; then 3000 cycles of random dual-port traffic; counts every mechanism (each opcode, back-to-back independent issue, both ports in one cycle, round-up, carry, overflow) |
| `fpre_workloads_tb` | full-size unit: compensated Horner on the expanded (x−1)^15 near x = 1 (15 steps, bit-exact, far more accurate than plain Horner), then 200 double-double additions and 200 double-double multiplications per lane, bit-exact against the same algorithms in software |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/fp_pkg.sv tb/fp_ref_pkg.sv rtl/fp_align.sv rtl/fp_sum.sv \
    rtl/fp_round_split.sv rtl/fpaddre_lane.sv rtl/fp_round_pack.sv \
    rtl/fpmulre_lane.sv rtl/fpre_simd.sv tb/fpre_simd_tb.sv \
    --top-module fpre_simd_tb
./obj_dir/Vfpre_simd_tb
```

Each testbench finishes in well under a second of simulation.

## Where this differs from, or goes beyond, the paper

* **The sketch versus the arithmetic.** The paper's figure labels the
  corrected bit "rounding bit", while its caption speaks of adding or
  subtracting a "sticky bit". Its printed digits are also illustrative: the
  printed sum does not equal the exact sum of the printed operands. This RTL
  follows the definition instead: the error is the exact sum minus the
  rounded sum. The figure's operands are kept only as a worked example, with
  hand-computed results.
* **The datapath is this design's own**: the exact left-shift window, the
  far-case shortcut, the stage split, the special-value rules and the +0
  error. The paper only says that FPADDRE can reuse the adder's circuits.
* **Speed.** The wide window costs area: a 107-bit adder and shifters, where a
  conventional adder has 56 bits. No attempt was made at a dual-path
  (near/far) adder or at timing closure. The 4-cycle latency is nominal.
* **FPMULRE** is included although the paper treats it as a secondary
  suggestion.
* **Not built:** the FPADD3 instruction (a three-input add that the paper
  discusses only as an alternative), the host processor, its register files
  and issue logic, and any instruction encoding. The unit's ports are where
  such a core would connect.
