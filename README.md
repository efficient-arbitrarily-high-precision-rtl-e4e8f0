# Dual-base logarithmic arithmetic (FLMA) in SystemVerilog

A logarithmic number system (LNS) stores a number as a sign and a
logarithm. Multiplication and division are then just integer addition and
subtraction. Addition is the hard part. A classic LNS needs large tables or
interpolators for the function log(1 ± 2^x), and those grow out of reach
beyond about 20 bits.

This design avoids such tables. It takes one step back to a linear
floating-point value, adds there, and converts back. This only pays when the
two conversions are cheap and exact enough, which is why the design has two
bases.

A value is written as

    v = ± 2^a · e^b          (or exactly zero)

- `a` is a two's-complement integer of E bits, the base-2 part.
- `b` is an F-bit fixed-point fraction in [0, ln 2), the base-e part.

Because e^b lies in [1, 2), the pair (a, e^b) is already a floating-point
number, with exponent `a` and significand `e^b`. So the log-to-linear
conversion p(·) needs only e^x on a bounded fraction. The linear-to-log
conversion q(·) needs only ln x on a significand in [1, 2). A power-of-two
exponent never has to be multiplied by a logarithm constant.

Both functions are built from a cheap shift-and-add recurrence that stops
early. It is followed by one step of Euler integration, using a
deliberately truncated multiplier (for exp) or divider (for ln). That step
gives near-correctly-rounded results at a fraction of the cost of CORDIC.

The default configuration is "log32":

- E = 8 and F = 23.
- One extra fraction bit on each conversion (α = β = 1).
- A floating-point accumulator with A = F + α = 24 fraction bits.

## Operations and where the cost sits

| operation | how | unit | latency | throughput |
|---|---|---|---|---|
| x·y, x/y | add/subtract a and b, renormalise b | `flma_muldiv` | 1 | 1/clk |
| xⁿ, x^(1/n) | multiply/divide (a, b) by n, renormalise | `flma_powroot` | 1 | 1/clk |
| x ± y | q(p(x) ± p(y)) | `flma_addsub` | 7 | 1/clk |
| Σ xᵢ·yᵢ, N = 128 | q(Σ p(xᵢ·yᵢ)) | `flma_dot` | N + 7 per vector | 1 pair/clk |
| p(·) | e^b through the exp unit, a is passed on | `flma_p2f` | 2 | 1/clk |
| q(·) | ln of the significand through the log unit | `flma_f2q` | 4 (or combinational) | 1/clk |

Addition on its own is expensive: every add needs two exps and one ln. A
sum of products is different. Each product is made in the log domain,
converted once by p(·), and accumulated in linear floating point. Only the
final sum goes through q(·). For linear algebra, where multiplies and adds
come in a 1:1 ratio, that is the main saving. The inner-product unit is
built around it.

## The exp unit (`flma_exp`): e^x for x in [0, ln 2)

**Recurrence.** L starts at x and E starts at 1. For shifts
k = 1 … I−1, if L ≥ ln(1+2^-k), then:

- L −= ln(1+2^-k)
- E += E·2^-k, which is a shift and an add.

The shift k = 0 would subtract ln 2, which x < ln 2 never allows, so it is
left out. After these steps E ≈ e^(x−L) and the leftover L is small, below
about 2^-(I−1).

**Euler step.** Instead of iterating further, one step of
dE/dx = E is taken:

    y = E + L·E = E + Lf + Lf·Ef

Here Lf and Ef are the fraction bits of L and E. The product Lf·Ef is small,
so it needs few bits:

- Lf is known to have I−2 leading zeros. Those are skipped.
- The r lowest bits of Lf are dropped as well.
- The same number of top bits of Ef is used.

This gives a square multiplier of ℓ − (I−2) − r bits. At the defaults that
is 28 − 12 − 2 = 14 bits. Its product is aligned to 2^-p and truncated.

**Widths.**

- L has ℓ bits. Its constants are correctly rounded.
- E has p bits. Bits shifted out below 2^-p are truncated.
- The final sum is rounded to nearest at the output width.

**Constants.** The constants ln(1+2^-k) are not tables in the source. A
package function works them out during elaboration from the series
ln(1+t) = t − t²/2 + t³/3 − …, with 24 guard bits. ln 2 is worked out the
same way.

**Defaults and accuracy.** The defaults are I = 14, ℓ = p = 28 and r = 2,
with a 23-bit input and 24-bit output (F + α).

- With a 23-bit output (the published comparison point), every tested result
  is within 1 ulp. About 7.0 % are not correctly rounded, against a published
  9.9 %. The difference probably comes from details of how the truncated
  product is aligned, which the description leaves open; this unit errs on
  the accurate side.
- Over a grid of I = 14–16, r = 1–2 and ℓ = p = 27–33 (`tb_flma_exp_sweep`),
  every result stays within 1 ulp.
  - At ℓ = p ≥ 30 the share of incorrectly rounded results matches the
    published sweep: about 3 % for I = 14, 0.8 % for I = 15 and 0.2–0.3 % for
    I = 16 at ℓ = p = 33.
  - At ℓ = p = 27 it is lower than published.
- With the 24-bit default output, only 4 guard bits remain. A few results
  near ln 2 reach about 1.07 ulp.

**Pipeline.** The unrolled iterations fill stage 1. The multiplier, sum and
rounding fill stage 2. The latency is 2 clocks, with one result per clock.

## The log unit (`flma_log`): ln x for x in [1, 2)

**Recurrence.** This is the exp recurrence run backwards. E starts at 1 and
L at 0. For each shift k, if E·(1+2^-k) ≤ x, then:

- E is multiplied by (1+2^-k)
- L += ln(1+2^-k)

The candidate E·(1+2^-1) can reach 2 or more. The comparison is therefore
one bit wider than E.

**Euler step.** This is the expensive part:

    y = L + (x − E)/E

It is made cheap by truncating on both sides:

- **Dividend x − E.** It has at least I−3 known zero fraction bits on top,
  which are skipped. Its lowest r bits are dropped.
- **Divisor E.** It is cut to its leading one plus s fraction bits, with
  truncation and no rounding.
- **Quotient.** It is produced by restoring division directly at the bit
  alignment of L (ℓ − (I−3) quotient bits). It is added to L, and the sum is
  rounded to nearest.

**Defaults.** I = 15, ℓ = p = 28, r = 3 and s = 9, with a 24-bit input
(F + β) and a 23-bit output.

**Pipeline.** The latency is 4 clocks:

1. First half of the iterations.
2. Second half of the iterations.
3. The dividend and the upper half of the quotient bits.
4. The lower quotient bits, the add and the rounding.

With `PIPE = 0` the four stage registers become wires, and the unit is one
combinational path (see the inner product below).

**Accuracy, and where it departs from the published claim.** With a 23-bit
input and output:

- 14.7 % of results are not correctly rounded, matching the published
  14.8 %.
- About 0.3 % of results lie above 1 ulp, up to about 1.35 ulp. The published
  claim is ≤ 1 ulp.

The cause is the truncated 10-bit divisor. Its relative error of up to 2^-9,
times a quotient of up to 2^-14, is already one ulp at 23 bits. Rounding the
divisor instead of truncating it brings the worst case to about 1.01 ulp.
That change was not made, because the description says the divisor is
truncated. The testbenches accept 1.5 ulp for the log unit and print how
many results lie above 1 ulp.

With one more divisor bit (s ≥ 10), no result above 1 ulp was found. This was
tested over I = 15–16, s = 10 and 14, and ℓ = p = 28 and 33
(`tb_flma_log_sweep`). At ℓ = p = 33 the incorrectly rounded shares match the
published sweep, for example 4.3 % for I = 16, s = 10 and 0.26 % for s = 14.
The default keeps s = 9 because that is the published log32 setting.

The same effect shows up in addition. Over random x, y in [1, 2):

- With α = β = 1, x + y stays within the expected 2 log ulp.
- With α = 2 and β = 1, the worst case still reaches about 1.5 log ulp, where
  1 log ulp would be expected. This case is in `tb_flma_add_alpha`.
- With β ≥ 2, the log input carries enough extra bits, and the worst case
  falls to about 1 log ulp.

## Conversions and renormalisation

**p(·) (`flma_p2f`).** It maps {zero, sign, a, b} to a float with
exponent a and significand 1.y, where y = exp(b) to F + α bits.

- The exponent is widened by two bits, to E + 2. This lets the accumulator
  grow past the log-domain range without wrapping.
- Sign, zero and exponent travel in registers beside the exp pipeline.

**q(·) (`flma_f2q`).** It works in four steps:

1. It rounds the A-bit significand to the F + β bits of the log unit.
   Rounding adds half, so ties round away from zero. If the rounding carries
   to 2.0, the exponent goes up by one.
2. It takes ln of the significand.
3. It renormalises. ln of a significand in [1, 2) can round to ln 2 or just
   above. Any b ≥ round(ln 2) has round(ln 2) subtracted and the exponent
   incremented. This keeps b in [0, ln 2), so every value has exactly one
   encoding.
4. It saturates or flushes. An exponent above the E-bit range saturates to
   the largest magnitude, (a_max, round(ln 2) − 1). An exponent below the
   range gives zero.

**Multiply and divide (`flma_muldiv`).** The same renormalisation appears
here:

- For a multiply, b + d can reach 2 ln 2. A sum ≥ round(ln 2) loses
  round(ln 2) and adds one to a.
- For a divide, a negative b − d gains round(ln 2) and takes one from a.

Overflow and division by zero saturate. Underflow gives zero. A zero result
is always +0.

**Integer power and root (`flma_powroot`).** In any log system a power
multiplies the logarithm by n, and a root divides it by n. With two bases,
the result has to be renormalised by whole multiples of ln 2.

- **Power.** n·b is formed exactly. k = ⌊n·b / round(ln 2)⌋ is less than n.
  - The result is a' = n·a + k and b' = n·b − k·round(ln 2).
  - The only error is k times the rounding error of ln 2, under 0.25 log ulp
    for n ≤ 15.
- **Root.** a is floor-divided by n, giving a' and a remainder 0 ≤ rem < n.
  - The remainder represents rem·ln 2 of base-e exponent. It is added to b,
    giving b' = (rem·round(ln 2) + b)/n, rounded to nearest.
  - A b' that rounds up to round(ln 2) wraps to 0 with a' + 1.
  - The error stays under 0.52 log ulp.
- **Own choices.**
  - n has 4 bits by default.
  - x⁰ = +1.
  - An even root of a negative value, or a root with n = 0, raises
    `out_invalid` and returns zero.
  - Powers saturate or flush like products.

A square root for QR, for example, is the root with n = 2.

## Add/sub (`flma_addsub`) and cancellation

x ± y is built as two p(·) units feeding one floating-point adder
(`flma_fadd`). The adder works at A = 24 fraction bits and rounds to nearest
even. Its output is registered, then goes through one pipelined q(·).

The extra α bit matters for cancellation. In 1 − (1 − 2^-24), the operand
1 − 2^-24 is the log-domain value nearest to it. The unit returns exactly
2^-23·e^0. This is the value the arithmetic is expected to give, and
`tb_flma_cancel` checks it.

That result is 1.9·10^-9 away from the exact difference in absolute terms.
In relative terms it is about 135 000 log ulp away, because the linear step
cannot see bits that the log encoding only implies.

More conversion bits α shrink this error:

| α | relative error (log ulp) | absolute error |
|---|---|---|
| 1 | about 135 000 | 1.9·10^-9 |
| 8 | about 3 000 | 4·10^-11 |
| 14 | about 140 | 2·10^-12 |

The same testbench runs this sweep.

The adder is a plain floating-point adder:

- It aligns the operands with guard, round and sticky bits.
- It normalises with a leading-zero count.
- Exact cancellation gives +0.
- It has no subnormals and no infinities.

## The inner-product unit (`flma_dot`) and its multicycle path

This is the unit that makes the arithmetic worth having. `flma_mac` forms
x'·y' in the log domain with combinational logic, then converts the product
with p(·) in 2 stages. It adds the result into a floating-point accumulator,
so one operand pair enters per clock with a latency of 3. `in_first` starts a
new sum.

`flma_dot` wraps the accumulator in a small controller:

    S_ACC   N clocks    accept operand pairs (in_ready = 1)
    S_DRAIN 2 clocks    last products leave the mac pipeline
    S_LOAD  1 clock     accumulator -> q(.) input register
    S_MCP   Q_MCP = 4   combinational q(.) settles; result register samples it
    -> out_valid for one clock, back to S_ACC

Only one q(·) is needed per vector. It is therefore not pipelined.

- It is built from `flma_f2q` with `PIPE = 0`, as a purely combinational
  converter.
- Its input register is loaded once per vector. This also keeps the
  converter's logic quiet while the vector accumulates (data gating rather
  than clock gating).
- The result register samples it Q_MCP clocks later.

A vector of N = 128 pairs takes N + 7 = 135 clocks. That is the published
throughput for the log32 inner product.

When synthesising, declare a multicycle path of Q_MCP cycles from the q(·)
input register (`q_in_*`) to the result register (`out_*`). Without it, the
timing tool will time the whole ln evaluation as a single-cycle path.

## The top (`flma_top`)

The top holds four independent pipes that share the number format. Each has
its own ports:

- `dot_*`: the inner product, with a valid/ready operand stream and a result
  strobe.
- `as_*`: add/sub, selected by `as_sub`.
- `md_*`: mul/div, selected by `md_div`.
- `pr_*`: power/root, selected by `pr_root`, with index `pr_n`.

All pipes default to log32. The exp/log internal widths come from α and β
(p = ℓ = 27 + α, I = 13 + α; p = ℓ = 27 + β, I = 14 + β).

The units are described as separate operators, so grouping them under one
top is this design's own packaging. A full linear-algebra engine is not
built here: it would need matrix storage and sequencing.

## Choices not fixed by the description

- **Pipeline cuts.** Only the total latencies are given (exp 2, log 4,
  add/sub 7, mac 3), so the stage boundaries above are this design's own.
- **Reset and handshake.** Valid bits use an active-low asynchronous reset;
  data registers have no reset. Every unit takes one operation per clock
  with no back-pressure, except `flma_dot`, which drops `in_ready` outside
  `S_ACC`.
- **Power and root.** Only their function is given (multiply or divide the
  logarithm by n). The dual-base circuit, the 4-bit n, x⁰ = 1 and the invalid
  flag are this design's own.
- **Saturation and flush.** Out-of-range results saturate to the largest
  magnitude or flush to zero. There are no infinities or NaNs.
- **Rounding.**
  - q(·) input and the exp/log outputs: round to nearest, ties away from
    zero.
  - Floating-point adder: round to nearest, ties to even.
- **log64.** The 64-bit configuration (E = 11, F = 52, p = ℓ = 59, I = 29,
  r = 2/3, s = 9, A = 53) is reached through parameters and runs in
  `tb_flma_dot_log64`.
  - The published 144 clocks per vector is 9 more than for log32. The
    testbench gives them to the wider combinational q(·) by setting
    `Q_MCP = 13`, which yields 144 clocks. Where the extra clocks really go
    is not known.
  - With s = 9, the log unit cannot deliver 52-bit accuracy. Results are good
    to about 2^-40 relative, for the same divisor reason as above. A larger
    `LOG_S` should help, but that has not been tried here.

## Files

- `rtl/flma_pkg.sv`: defaults, constant functions, and operation enums.
- `rtl/flma_exp.sv`, `rtl/flma_log.sv`: the function units.
- `rtl/flma_p2f.sv`, `rtl/flma_f2q.sv`: the conversions.
- `rtl/flma_fadd.sv`: the floating-point adder.
- `rtl/flma_muldiv.sv`, `rtl/flma_powroot.sv`, `rtl/flma_addsub.sv`,
  `rtl/flma_mac.sv`, `rtl/flma_dot.sv`: the operators.
- `rtl/flma_top.sv`: the top.
- `tb/flma_ref_pkg.sv`: real-number reference functions for the testbenches.
- `tb/tb_<module>.sv`: one self-checking testbench per module.
- Extra testbenches:
  - `tb_flma_table3`: exp and log at 23-bit width, with rounding statistics.
  - `tb_flma_cancel`: the cancellation example.
  - `tb_flma_add_alpha`: add accuracy against α and β.
  - `tb_flma_exp_sweep`: exp accuracy over I, r and ℓ = p.
  - `tb_flma_log_sweep`: log accuracy over I, s and ℓ = p.
  - `tb_flma_dot_log64`: the 64-bit inner product.

`tb_flma_top` runs all four pipes at full default size, with N = 128. It
counts each mechanism and fails if one never happened:

- dot stalls and zero sums
- add, subtract and exact cancellation
- mul/div renormalisation
- saturation
- division by zero
- renormalised and saturated powers, roots and invalid roots

Every testbench prints `TB_RESULT checks=… failures=…`.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    RTL="rtl/flma_pkg.sv rtl/flma_exp.sv rtl/flma_log.sv rtl/flma_p2f.sv \
         rtl/flma_f2q.sv rtl/flma_fadd.sv rtl/flma_muldiv.sv rtl/flma_addsub.sv \
         rtl/flma_mac.sv rtl/flma_dot.sv rtl/flma_powroot.sv rtl/flma_top.sv"
    verilator --binary --timing --assert -Wno-fatal -Irtl $RTL \
      tb/flma_ref_pkg.sv tb/tb_flma_top.sv --top-module tb_flma_top
    ./obj_dir/Vtb_flma_top +verilator+rand+reset+2

The package must come first. `-Wno-fatal` keeps width lint warnings in the
testbenches' calls to the real-valued reference functions from stopping the
build.

Substitute any testbench name. The `+verilator+rand+reset+2` option starts
all state at random values, and the testbenches are written to pass under
it. The accuracy testbenches use double-precision `$exp`/`$ln` as the
reference.

To try another configuration, override the parameters of the unit, as
`tb_flma_table3` and `tb_flma_dot_log64` do. The assertions in each unit
reject parameter sets that its width arithmetic does not support.
