# FPPU: a pipelined posit arithmetic unit for a small RISC-V core

Posits are a tapered-precision alternative to IEEE floating point. For the
same width they hold more significant bits near 1.0 and fewer far from it.
One pattern is zero and one is NaR ("not a real"). Two posits can be
compared as ordinary signed integers. This matters most for small
formats: 8- and 16-bit posits are good enough for neural-network
inference, where a 16-bit IEEE half-precision number is often not.

The FPPU (full posit processing unit) is a posit<N,ES> arithmetic unit
meant to sit next to the ALU in the execute stage of a 32-bit RISC-V core
that has no floating-point unit. Posits live in the integer register file,
so the core's only change is a few decoder entries. The unit provides:

- add, subtract, multiply, divide, fused multiply-add and reciprocal;
- conversion between posit and IEEE binary32, in both directions;
- a SIMD mode with XLEN/N lanes, so one 32-bit register holds two posit16
  or four posit8 values.

Every operation takes three clock cycles, and a new one can start every
cycle. Division is the interesting part. It uses no iterative divider.
Instead it computes a cheap polynomial estimate of the reciprocal, refines
it with one Newton-Raphson step and multiplies. That keeps division at the
same latency as the other operations, at the price of a small, measured
share of quotients that are off by one unit in the last place.

The defaults throughout are posit<16,2> on a 32-bit core (two lanes). Any
N and ES can be set by parameter, up to 32-bit posits. The testbenches
exercise posit<8,ES> for ES up to 4, posit<16,ES> for ES up to 3, and
posit<32,2>.

## Posits and the intermediate form (FIR)

A posit<N,ES> is a two's-complement integer. After taking the absolute
value, the bits after the sign are:

- **regime**: a run of l equal bits ended by the opposite bit, or by the end
  of the word. A run of ones means k = l-1; a run of zeros means k = -l.
- **exponent**: up to ES bits, e. If the regime leaves fewer than ES bits,
  the missing low bits count as zero.
- **fraction**: whatever bits are left, f.

The value is (-1)^s · 2^(k·2^ES + e) · 1.f. Pattern 0 is zero and pattern
100…0 is NaR.

Every arithmetic block works on the *floating-point intermediate
representation* (FIR). A FIR value is three fields:

- a sign;
- a signed total exponent te = k·2^ES + e;
- a significand 1.f with its hidden bit at the top.

Once decoded, a posit is just a float with a wide exponent and no
subnormals. The adder, multiplier and divider are therefore plain float
datapaths, and all of the posit-specific work sits at the two ends:
`posit_to_fir` on the way in and `fir_to_posit` on the way out.

Widths, computed in `ppu_pkg`:

| quantity | formula | posit<16,2> | posit<8,0> |
|---|---|---|---|
| fraction bits FW | N-3-ES | 11 | 5 |
| significand MW | FW+1 | 12 | 6 |
| te width | max($clog2(N)+ES+3, 10) | 10 | 10 |
| normaliser input MO | max(2·MW, 24)+2 | 26 | 26 |

The te width has a floor of 10 bits so that it can also hold a binary32
exponent.

`posit_to_fir` does the following:

1. It negates a negative input.
2. It counts the regime run with a priority loop.
3. It shifts the remaining bits up past the stop bit. This places the
   exponent bits at a fixed position, and a cut-short exponent fills with
   zeros by itself.

## Pipeline and timing

```
             reg q1                 reg q2                  reg q3
 operands ──► extraction ──┃──► compute 2a ──┃──► compute 2b ──┃──► normalise ──► result
   op, valid  conditioning │   multiply      │   add/sub/FMA    │   FIR→posit + RNE
              3× posit→FIR │   reciprocal +  │   Newton step ×  │   output mux
              raw operand1 │   x·y (divider) │   quotient (div) │
                           │   binary32→FIR  │   result mux     │
                           │   FIR→binary32  │                  │
```

There are four combinational stages and three registers. `valid_o` and
`result_o` appear exactly three cycles after `valid_i`. The result is
combinational from the last register, so it can be written back in the
same cycle that `valid_o` is high.

The operation code and the special-case result move down the pipeline
with the data. The only control is `fppu_ctrl`, a three-bit shift register
of valid bits with a synchronous reset. Back-to-back operations of
different kinds therefore need no stalls: one result every cycle.

The computation stage is split in two because division is the longest
path. The split falls inside the divider, after the products x·y, so each
half of the divider has two or three multipliers in series. Multiply and
add are each given one half. For FMADD this means the exact product from
2a flows straight into the adder in 2b.

## Special operands

`input_conditioning` looks at the raw posit codes during extraction. When
the result does not need arithmetic, it produces the result directly. A
flag then carries that result to the output mux, where it bypasses the
rest of the pipeline. The rules:

- NaR in any operand gives NaR.
- x/0 and 1/0 give NaR.
- For x+0, x-0, 0+y and 0-y, the result is the other operand, negated
  where needed.
- A zero factor in MUL gives 0, and 0/y gives 0.
- In FMADD, a zero factor gives p3 (a·b+c with a·b = 0).

Negating a posit is its two's complement, so no decode is needed for any
of these.

## Adder, subtractor and fused multiply-add

`fppu_addsub` works as follows:

1. It orders the two operands by magnitude.
2. It shifts the smaller significand right by the exponent difference,
   into a window twice the significand width plus two bits. Any bits
   shifted past the window become a sticky bit.
3. It adds or subtracts.
4. It normalises with a leading-zero count.

When the smaller operand falls entirely off the window, one sticky bit is
left. This matters when subtracting: the result then lands just below the
larger operand, not on it, so round-to-nearest-even still sees that
something was subtracted.

An exact zero (x - x) is flagged separately and becomes posit 0.

For FMADD, the adder takes the full 2·MW-bit product from the multiplier
stage, with no rounding, together with operand 3 padded to the same
width. Rounding happens once, at the end. ADD and SUB use the same adder
with both operands padded to 2·MW bits.

`fppu_mul` is an integer multiply of the significands, plus one
normalising shift when the product is 2 or more. The product is exact, so
only the final rounding loses information.

## Division by approximate reciprocal

This is the least obvious part of the unit.

Let the divisor significand be m2 in [1,2), and let x = m2/2, which is in
[0.5,1). The quotient m1/m2 is computed as m1·(1/m2) in three steps.

**1. Polynomial estimate.** The first estimate uses two multiplications:

```
b = k1 - x
c = x · b
d = k2 - c
e = d · b
y = 4 · e          ≈ 1/x          (y = 4(k1-x)(k2 - x(k1-x)))
```

The constants are k1 = 1.4567844114901045 and k2 = 1.0009290026616422.
They were chosen to minimise the worst error of this form on [0.5,1). The
largest relative error of y is 5.8·10⁻³, about 2^-7.4.

**2. One Newton-Raphson step.** The step y1 = y·(2 - x·y) squares the
error: the worst case becomes 3.3·10⁻⁵, about 2^-14.9. Since
1 - x·y1 = (1 - x·y)² ≥ 0, and truncation only makes y1 smaller,
y1 ≤ 1/x always holds. That keeps the quotient
below 2, so normalising it takes at most one left shift.

**3. Quotient.** q = m1·y1/2 lies in (0.5, 2). If it is below 1, it is
shifted up and te1 - te2 is decremented. The top MO bits go to the
rounder, and the rest become the sticky bit.

All of this is unsigned fixed point with RF = 2·MW+2 fractional bits
(26 for posit<16,2>), with every product truncated. The constants are
computed at elaboration time from the real values in `ppu_pkg`, so no
table is needed.

**How exact is it?** The result has about 14.9 good bits. posit<16,2>
needs 12 bits of significand, plus a rounding decision. Quotients whose
exact value lies within about 2^-15 of a rounding boundary can therefore
round the wrong way, and they land on the neighbouring posit code. The
testbenches accept exactly that: the correctly rounded code or one of its
two neighbours, with the real error checked as well. They count how often
it happens.

The share grows with the number of fraction bits near 1.0. posit<16,0>,
with 13 fraction bits, is the worst case. Shares of inexact quotients
measured by `tb_div_accuracy`, with the published figures for the same
method beside them:

| format | here | published |
|---|---|---|
| posit<8,0> | 0.82 % | 1.4 % |
| posit<8,1> | 0.19 % | 1.2 % |
| posit<8,2> | 0.14 % | 2.1 % |
| posit<8,3> | 0.10 % | 4.2 % |
| posit<8,4> | 0.00 % | 7.5 % |
| posit<16,0> | 1.36 % | 1.5 % |
| posit<16,1> | 0.67 % | 0.6 % |
| posit<16,2> | 0.35 % | 0.5 % |
| posit<16,3> | 0.23 % | 0.1 % |

The posit<8,ES> rows are exhaustive (all 65,536 pairs). The posit<16,ES>
rows use random pairs.

The posit16 figures agree closely. The posit8 figures here are lower, and
unlike the published ones they fall as ES grows. Here the quotient carries
about 14 good bits whatever the format: the estimate gives 14.9 bits, and
RF = 14 for posit<8,0>. posit8 keeps only 2 to 6 significand bits. A
quotient goes wrong only when its exact value lies very near a rounding
boundary, or exactly on one, since the estimate always errs low. With
more ES the fraction gets shorter and such cases get rarer. The published
posit8 numbers rise with ES instead. They were presumably measured with a
different datapath width or counted differently; the published text does
not say which.

**32-bit posits.** posit<32,2> has a 28-bit significand, so one
Newton-Raphson step is not enough. The divider runs unchanged at that
size, with RF = 58, and its error stays at the same 2^-14.9. `tb_fppu32`
measures this: about a third of random posit32 quotients come out
correctly rounded, and the rest are within 2^-14.9 of the exact value. A
second Newton-Raphson step (two more multiplies) would bring posit32 to
about 30 bits. It is not included here, since the design uses one step at
every size. The constants are formed through a 64-bit integer, which sets
the limit RF ≤ 62, that is, posits of at most 32 bits.

The reciprocal instruction (PINV) is the same path with the dividend
fixed at 1.0 and operand 1 as the divisor.

## Back to a posit: packing and rounding

`fir_to_posit` turns (sign, te, 1.f, sticky) into the nearest posit:

1. **Split the exponent.** k = te >> ES (arithmetic shift) and
   e = te mod 2^ES.
2. **Clip.** k is limited to [-(N-1), N-2]. Anything beyond that
   saturates to maxpos or minpos. A nonzero real never becomes 0 or NaR.
3. **Pack.** Build the bit string `10` (k ≥ 0) or `01` (k < 0), followed
   by e and f. Shift it arithmetically right by k (or by -k-1). The sign
   fill makes the regime run, and the original leading pair becomes the
   stop bit.
4. **Round to nearest even.** The top N-1 bits are the posit body:
   - its last bit is the guard bit G;
   - the next bit is the round bit R;
   - the OR of everything below, together with the incoming sticky, is S.

   The body is incremented when R·(G + S). If the carry runs into the
   regime, the result is still the correctly rounded posit, because posits
   are monotonic as integers.
5. **Finish.** A nonzero value whose body rounded to 0 is set to minpos.
   A negative result is negated.

Rounding happens only here. Every operation, FMADD included, is therefore
rounded once.

## Conversion to and from binary32

- **PCVT.P.S (binary32 → posit).** `float_to_fir` decodes the raw 32-bit
  operand 1 in stage 2a. It normalises subnormals with a leading-zero
  count. ±0 gives 0, and infinities and NaNs give NaR. The normal
  rounding stage then makes the posit, so values beyond the posit range
  saturate.
- **PCVT.S.P (posit → binary32).** `fir_to_float` packs a decoded operand.
  It is exact when the fraction has at most 23 bits, which covers every
  posit of up to 26 bits; wider significands are rounded to nearest even.
  NaR gives the quiet NaN 0x7FC00000. Exponents beyond binary32 give ±Inf
  or ±0.

The conversion consumes the posit from the operand-2 decoder (rs2).

## SIMD lanes and the instruction set

`ppu_top` holds LANES = XLEN/N copies of `fppu`:

| configuration | lanes |
|---|---|
| posit8 on a 32-bit core | 4 |
| posit16 on a 32-bit core | 2 |
| posit32 on a 32-bit core | 1 |

All lanes share the operation, valid, clock and reset. Lane i reads bits
[i·N +: N] of each source register and writes the same bits of rd. Scalar
code that keeps its value in the low bits sees a one-lane unit. The
conversions involve a 32-bit float, so they use lane 0 only: lane 0 gets
all of rs1 for PCVT.P.S, and rd carries lane 0's word for both
directions.

A simple in-order core issues the next posit instruction in the cycle
the previous result returns, which gives one instruction every three
cycles. At 100 MHz that is 33 million operations per second per lane:
about 66 MOps/s for posit16 and 132 MOps/s for posit8. `tb_kernels`
drives the unit in exactly this way through whole kernels. It measures
66.7 and 131.6 MOps/s; the posit8 figure is a little under 4/3 per cycle
because some lanes sit idle at the edges of the convolution. A core that
issues without waiting for each result gets three times as much, since
the unit accepts a new instruction every cycle.

`ppu_instr_decoder` recognises these R-type words:

| instruction | funct7 | funct3 | opcode | operation |
|---|---|---|---|---|
| PADD rd,rs1,rs2 | 1100000 | 000 | 0001011 | rs1 + rs2 |
| PSUB rd,rs1,rs2 | 1101010 | 001 | 0001011 | rs1 - rs2 |
| PMUL rd,rs1,rs2 | 1100000 | 010 | 0001011 | rs1 · rs2 |
| PDIV rd,rs1,rs2 | 1100000 | 100 | 0001011 | rs1 / rs2 |
| PFMADD rd,rs1,rs2,rs3 | rs3 \| 00 | 000 | 0101011 | rs1 · rs2 + rs3 |
| PINV rd,rs1 | 1100000 | 011 | 0001011 | 1 / rs1 |
| PCVT.S.P rd,rs2 | 1100000 | 101 | 0001011 | posit → binary32 |
| PCVT.P.S rd,rs1 | 1100000 | 110 | 0001011 | binary32 → posit |

The first five rows are the published encodings, in the custom-0 and
custom-1 opcode spaces. The last three were not given and are this
design's own, placed on free funct3 values.

Any other word in those two opcode spaces raises `illegal_o`. Words with
other opcodes are ignored and left to the host decoder. The destination
index goes down a three-deep delay line and comes out as `rd_addr_o`
together with `valid_o`.

## Module interfaces

All modules are parameterised by `N` and `ES` (defaults 16 and 2) unless
stated otherwise. Only `ppu_top`, `fppu`, `fppu_div` and `fppu_ctrl` hold state.

| module | role | ports (besides parameters) |
|---|---|---|
| `ppu_pkg` | op codes (`ppu_op_e`), divider constants, width functions | — |
| `ppu_top` (N, ES, XLEN=32) | decoder + SIMD lanes, the block a core instantiates | `clk, rst, valid_i, instr_i[31:0], rs1/rs2/rs3_data_i[XLEN], rs1/rs2/rs3_addr_o[5], illegal_o, valid_o, rd_addr_o[5], rd_data_o[XLEN]` |
| `ppu_instr_decoder` | instruction table above | `instr_i → is_posit_o, illegal_o, op_o, rs1_o, rs2_o, rs3_o, rd_o` |
| `fppu` (N, ES) | one lane | `clk, rst, valid_i, op_i, operand1_i[max(N,32)], operand2_i[N], operand3_i[N] → valid_o, result_o[max(N,32)]` |
| `fppu_ctrl` (STAGES=3) | valid shift register | `clk, rst, valid_i → stage_valid_o[STAGES], valid_o` |
| `input_conditioning` (N) | special cases | `op_i, p1_i, p2_i, p3_i → special_o, special_res_o` |
| `posit_to_fir` | decoder | `posit_i → sign_o, te_o, mant_o, zero_o, nar_o` |
| `fppu_mul` (MW, TEW) | significand product | two FIRs → FIR with 2·MW-bit significand |
| `fppu_addsub` (MI, TEW, MO) | aligned add/sub | two FIRs, `sub_i`, `zero2_i` → FIR, `sticky_o`, `zero_o` |
| `fppu_div` (MW, TEW, MO, RF) | reciprocal divider, 1 cycle | `clk`, two FIRs → FIR, `sticky_o` |
| `fir_to_posit` (N, ES, MI, TEW) | rounding and packing | FIR, `sticky_i, zero_i, nar_i → posit_o` |
| `float_to_fir` (TEW) | binary32 decode | `float_i[32] → FIR, zero_o, nar_o` |
| `fir_to_float` (MI, TEW) | binary32 encode | FIR, `zero_i, nar_i → float_o[32]` |

Here "FIR" means a sign, a signed te and a significand with its hidden
bit at the MSB. The header comment of each file gives the exact port list
and timing.

## Testbenches and how to run them

Each testbench is self-checking. It ends with a line
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. The reference
model, `tb/posit_ref_pkg.sv`, is written independently of the RTL:

- it decodes a posit by walking its bits into a `real`;
- it rounds a real to a posit by binary search over the positive codes,
  followed by a comparison with the midpoint in an (N+1)-bit posit, with
  ties going to the even code.

`tb/fppu_ref_pkg.sv` builds the expected result of every operation on top
of it.

| testbench | what it covers |
|---|---|
| `tb_posit_to_fir` | every posit<16,2> and posit<8,0> code |
| `tb_fir_to_posit` | random FIR values inside and beyond the range, ties, sticky |
| `tb_float_to_fir`, `tb_fir_to_float` | normals, subnormals, zeros, Inf/NaN, NaR |
| `tb_input_conditioning` | all special-operand rules |
| `tb_fppu_mul`, `tb_fppu_addsub`, `tb_fppu_div` | the datapath blocks against exact real arithmetic |
| `tb_fppu_ctrl` | latency, back-to-back issue, reset of operations in flight |
| `tb_ppu_instr_decoder` | every encoding, malformed and foreign words |
| `tb_fppu` | one lane, all eight operations in a random back-to-back stream (50,002 checks) |
| `tb_fppu32` | one lane built as posit<32,2>: all operations; quotients within 2^-14 |
| `tb_ppu_top` | the whole unit at the defaults, driven by instruction words (35,221 checks) |
| `tb_ppu_top8` | the same, built as posit<8,0> with four lanes (35,216 checks) |
| `tb_div_accuracy` | the division table above |
| `tb_kernels` | 32×32 matrix product, 3×3 convolution and 4×4 average pooling; throughput |

`tb_ppu_top` runs at the default size. It counts each mechanism and
requires every one to occur:

- every instruction type;
- both lanes holding different data;
- the special path;
- saturation;
- back-to-back issue;
- illegal words;
- ignored words.

`tb_kernels` plays the host core. It runs each kernel with PMUL, PADD and
PDIV instructions on posit<16,2> (two lanes) and posit<8,0> (four lanes),
with inputs drawn uniformly from [-1,1). It checks every instruction
against the reference. It also runs the same kernel in double precision
alongside and reports, for each kernel and operation, how far each posit
step is from the matching double step. It gives two measures:

- the mean relative difference;
- the normalised difference, sum|posit - double| / sum|double|.

| kernel, op | p<8,0> normalised | p<16,2> normalised | published p<8,0> / p<16,2> |
|---|---|---|---|
| GEMM mul | 0.021 | 0.00014 | 0.019 / 0.003 |
| GEMM add | 0.034 | 0.00034 | 0.016 / 0.0007 |
| conv mul | 0.023 | 0.00013 | 0.042 / 0.004 |
| conv add | 0.023 | 0.00023 | 0.025 / 0.0004 |
| pool add | 0.033 | 0.00022 | 0.019 / 0.0002 |
| pool div | 0.073 | 0.00028 | 0.002 / 0 |

The published column is the normalised mean error against binary32 on
data that is not specified, so only the magnitudes are comparable. The
posit8 pooling divide is worse here for two reasons. The difference
carries the error of the sixteen posit8 adds before it. And the averages
lie around 0.1, where posit<8,0> has only two or three fraction bits.

The mean relative difference is far larger for posit<8,0> (up to 1.0 for
GEMM multiplies). Random products that fall below minpos (2⁻⁶) are held
at minpos, and those few near-zero steps dominate a relative mean.

To run any testbench with Verilator (5.x), list the package files first:

```
verilator --binary -Wno-fatal --top-module tb_ppu_top \
    rtl/ppu_pkg.sv $(ls rtl/*.sv | grep -v ppu_pkg) \
    tb/posit_ref_pkg.sv tb/fppu_ref_pkg.sv tb/tb_ppu_top.sv
./obj_dir/Vtb_ppu_top
```

`tb_kernels` also needs `tb/kernel_harness.sv`. Block testbenches need
only the package, the block and the reference packages. Every testbench
finishes in seconds.

## Where this design departs from the published one, and why

- **Three registers, four stages.** The published description speaks of
  four pipelined stages and a result after three cycles. Its schematic,
  though, draws only two register bars. This design follows the text:
  three registers, with the computation stage cut inside the divider.
- **Fully pipelined.** Each op code travels with its data, so a new
  operation may enter every cycle. The published figure for the unit
  inside the core, 33 MOps/s at 100 MHz, corresponds to one operation per
  three cycles, the rate of a core that waits for each result. The
  hardware here does not need that wait. A core may still choose to wait.
- **Operand routing.** The published schematic has multiplexers in front
  of the decoders that reuse one posit decoder for the conversions. Here
  the three decoders always see the raw operands:
  - binary32 → posit decodes operand 1 directly;
  - posit → binary32 takes the decoded operand 2.

  The results are the same; only the sharing of logic differs.
- **A third operand port.** This was added so that FMADD can read rs3.
- **Own choices where nothing is published:**
  - the encodings of PINV and the two conversions;
  - the reciprocal acting on operand 1;
  - the divider's fixed-point width RF = 2·MW+2 and its truncating
    products;
  - the floor of 10 bits on te;
  - NaR converting to the quiet NaN 0x7FC00000;
  - how conversions behave in SIMD mode.
- **Not included:** the host core itself, its tracer-based software test
  flow, and any quire (exact accumulator). The unit is a plain
  register-to-register execute-stage block.

## Trusting and changing it

All testbenches pass at the sizes given above. The default configuration
(posit<16,2>, XLEN 32) and the four-lane posit<8,0> build are simulated
end to end, from instruction words to rd. The largest size simulated is a single posit<32,2> lane.

The division is approximate by design, to the extent shown in the table
and, for posit32, in the paragraph above. All other operations are
correctly rounded (round to nearest even) against the reference in every
test. For posit32 products, the reference rounds the 56-bit exact product
to double precision first; that could only matter within 2⁻⁵³ of a
rounding boundary.

To change the format, set `N` and `ES` on `ppu_top` or `fppu`; every
internal width follows from the functions in `ppu_pkg`. To trade division
accuracy for area, lower `RF` in `fppu_div`. `tb_div_accuracy` then shows
the effect directly.
