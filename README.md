# A complex divider with three real multipliers

Dividing one complex number by another, y = a / x, is usually done with the
schoolbook formula

    yr = (ar*xr + ai*xi) / R,    yi = (ai*xr - ar*xi) / R,    R = xr^2 + xi^2

which costs four real multiplications, two squarings, three additions and two
real divisions. In hardware the multipliers dominate area and power. This
design computes the same quotient with **three** multipliers instead of four,
at the price of three more adders. It is the division analogue of Gauss's
three-multiplication trick for complex products, following A. Cariow,
"An algorithm for dividing two complex numbers".

The RTL is a fully pipelined SystemVerilog datapath: one division accepted per
clock, 16-bit two's-complement operand parts, a 33-bit quotient part with 16
fraction bits, 37 cycles of latency.

## The trick

Write the numerators as a matrix acting on the divisor vector X = [xr, xi]:

    [pr]   [ar   ai] [xr]
    [pi] = [ai  -ar] [xi]

This matrix factors as T2x3 * D3 * T3x2 with

    T3x2 = [1 0; 0 1; 1 1]          (the terms xr, xi, xr + xi)
    D3   = diag(d0, d1, d2),  d0 = ar - ai,  d1 = -(ar + ai),  d2 = ai
    T2x3 = [1 0 1; 0 1 1]           (add the third product to each of the others)

so that

    m0 = (ar - ai) * xr
    m1 = -(ar + ai) * xi
    m2 = ai * (xr + xi)
    pr = m0 + m2 = ar*xr + ai*xi
    pi = m1 + m2 = ai*xr - ar*xi

and finally yr = pr / R, yi = pi / R. The coefficients d0, d1, d2 depend only
on the dividend a, which matters when one dividend is divided by many
divisors: they could then be computed once. The count is 3 multiplications,
6 additions (d0, d1, xr + xi, two post-additions, and R), 2 squarings and
2 divisions.

### A sign the published factorisation gets wrong

As published, the factorisation negates xi twice: T3x2 is given as
[1 0; 0 -1; 1 1] (in the data flow diagram a dashed sign-change line carries
xi into the d1 multiplier) *and* d1 is given as -(ar + ai). With both, the
second product becomes (ar + ai)*xi and the imaginary numerator comes out as
ar*xi + ai*xr + 2*ai*xi, which is not ai*xr - ar*xi. Exactly one of the two
negations must go. This design keeps d1 = -(ar + ai), which the published
text and diagram caption both print, and feeds xi to the d1 multiplier
without negation. The real part is unaffected. Putting the second negation back
(t1 = -xi in `cdiv_preadd`) makes the end-to-end test fail on the imaginary
part of every division with ai*xi != 0.

## Datapath and pipeline

```
 ar,ai,xr,xi
     |
 [cdiv_preadd]  d0,d1,d2 ; t0=xr, t1=xi, t2=xr+xi            cycle 1
     |                         \ t0,t1
 [cdiv_mult3]   m0=d0*t0, m1=d1*t1, m2=d2*t2     [cdiv_norm]  cycle 2
     |                                            squares      
 [cdiv_postadd] pr=m0+m2, pi=m1+m2                R=sum       cycle 3
     |                 |                          |
 [cdiv_divider] pr/R   [cdiv_divider] pi/R  <-----+           cycles 4..37
     |                 |
     yr                yi
```

| module | role | latency |
|---|---|---|
| `cdiv_pkg` | default widths and the width functions below | - |
| `cdiv_preadd` | coefficients d0, d1, d2 and terms xr, xi, xr + xi (3 adders) | 1 |
| `cdiv_mult3` | the three multipliers | 1 |
| `cdiv_postadd` | the two post-adders | 1 |
| `cdiv_norm` | R = xr^2 + xi^2 (2 squarers, 1 adder) | 2 |
| `cdiv_divider` | signed / unsigned fixed-point divider, used twice | QW + 2 |
| `cdiv_top` | the complete divider | W + FRAC + 5 |

Coarse synthesis of `cdiv_top` (yosys) finds five multiply cells: the three
multipliers and the two squarers, as the operation count promises.

`cdiv_norm` takes its inputs from the pre-adder's pass-through terms, so its
two stages end in the same cycle as the post-adder and R meets both
numerators without extra delay registers.

Every stage carries a valid bit. There is no back-pressure: a result appears
with `out_valid` exactly W + FRAC + 5 cycles after its operands were presented
with `in_valid`, and gaps in the input stream travel through as gaps. `rst_n`
is an asynchronous, active-low reset of the valid bits only; the data
registers are not reset, since nothing reads them unless their valid bit is
set. All stages clock on the rising edge of `clk`.

## Number format and word widths

The algorithm itself is format-free. This implementation uses integers, and
every internal word is wide enough that nothing is lost before the division.
With W the operand width (default 16):

| word | width | why |
|---|---|---|
| ar, ai, xr, xi | W | two's complement |
| d0, d1, d2 | W + 2 | -(ar + ai) reaches +2^W when ar = ai = -2^(W-1) |
| t0, t1, t2 | W + 1 | xr + xi |
| m0, m1, m2, pr, pi | 2W + 3 | full product of the above |
| R | 2W, unsigned | at most 2^(2W-1) |
| yr, yi | W + FRAC + 1 | sign, W integer bits, FRAC fraction bits |

The result is yr = trunc(real(a/x) * 2^FRAC), rounded toward zero, and
likewise yi. Because |pr| and |pi| never exceed |a|*|x| and R = |x|^2, each
quotient part is at most |a|/|x| < 2^W for any non-zero x, so the quotient
never overflows. Any common fixed-point scaling of a and of x works the same
way: the scale of a carries into y, the scale of x divides out of it.

**Division by zero.** For x = 0, R = 0. `div_by_zero` is raised and both
parts saturate to +/-(2^(W+FRAC) - 1), taking the sign of their numerator
(which is 0, and so positive, whenever x = 0). The published algorithm does
not discuss this case; the behaviour is this design's choice.

## The divider

`cdiv_divider` is the part with the most design freedom, since the algorithm
only says "divide by R". It is a radix-2 restoring divider unrolled into a
pipeline, one quotient bit per stage:

1. Stage 0 takes the magnitude of the numerator, appends FRAC zero bits to
   form the dividend, and splits it: the bits above the lowest QW are the
   first partial remainder. If that remainder is already not below the
   divisor (always so when the divisor is 0) the quotient needs more than QW
   bits, and the `ovf` flag is set to travel with the operation.
2. Each of the next QW stages shifts the next dividend bit into the
   remainder, subtracts the divisor when the remainder is not below it, and
   shifts the resulting quotient bit in. One register holds both the unused
   dividend bits and the quotient bits collected so far.
3. The last stage restores the sign, or puts out the saturated value.

An immediate assertion checks the divider's invariant, that every partial
remainder of a non-overflowing division stays below the divisor. The top
asserts that the two dividers and the R path stay in lock step.

Parameters: `NW` numerator width (signed), `DW` divisor width (unsigned),
`FRAC` fraction bits, `QW` quotient magnitude bits; NW + FRAC must exceed QW.
In the top these are 2W + 3, 2W, FRAC and W + FRAC.

The two dividers are by far the largest part of the design: 32 stages of
33-bit subtractors each at the default size. Replacing them by one reciprocal
of R and two multiplications, or by an iterative divider with a ready
handshake, would be a natural change and would touch only `cdiv_divider` and
the timing of `cdiv_top`.

## Interface of `cdiv_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | asynchronous active-low reset |
| `in_valid` | in | 1 | operands valid this cycle |
| `ar`, `ai` | in | W | dividend a, two's complement |
| `xr`, `xi` | in | W | divisor x, two's complement |
| `out_valid` | out | 1 | result valid |
| `yr`, `yi` | out | W + FRAC + 1 | quotient a/x, FRAC fraction bits |
| `div_by_zero` | out | 1 | x was 0; yr and yi are saturated |

Parameters: `W` (default 16) and `FRAC` (default 16). Neither number comes
from the algorithm, which names no widths.

## What follows the published algorithm and what does not

Follows it: the structure of pre-additions, three multiplications sharing
the product ai*(xr + xi), two post-additions, R as the sum of two squares,
and two divisions by R, with the operation count it claims.

Departs from it: the sign of the xi term into the d1 multiplier (see above).

Added by this design, where the algorithm says nothing: the integer and
fixed-point format, all widths, rounding toward zero, the pipeline and its
valid bits, the reset, the restoring divider, and the divide-by-zero flag
and saturation. No evaluation numbers (area, speed, power) were published to
compare with; the algorithm is justified by its operation count alone.

## Verification

Each module has a self-checking testbench in `tb/` that computes the
expected values on its own, checks the cycle at which results appear, and
ends with a line `TB_RESULT checks=N failures=M`.

- `tb_cdiv_preadd`, `tb_cdiv_mult3`, `tb_cdiv_postadd`, `tb_cdiv_norm`:
  random and extreme operands against integer arithmetic, valid timing.
- `tb_cdiv_divider`: about 2,300 divisions at the widths the top uses,
  checked against 128-bit reference division, including exact divisions,
  quotients that overflow, division by zero and the most negative numerator.
- `tb_cdiv_top`: about 3,200 complex divisions at the default parameters,
  checked bit-exactly against the four-multiplication schoolbook formula,
  against a floating-point quotient to within one unit in the last place,
  and for the 37-cycle latency. It counts division by zero, operand extremes,
  negative results, back-to-back issue and input gaps, and fails if any never
  occurs.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_cdiv_top \
    -y rtl -y tb +libext+.sv rtl/cdiv_pkg.sv tb/tb_cdiv_top.sv -o sim
./obj_dir/sim
```

Substitute any other testbench name. Each runs in well under a second.
