# Pipelined radix-2 online multipliers with reduced working precision

Online arithmetic works on numbers most-significant digit first (MSDF). An online
multiplier needs only the first δ digits of its operands (δ is the *online delay*) before
it emits the first digit of the product. After that it takes in one digit of each operand
and gives out one product digit per step. Wires between operators carry one digit at a
time, and a chain of dependent operations overlaps almost completely. This suits arrays
such as inner-product engines, where many multipliers feed adders and interconnect is the
scarce resource.

This RTL implements two such multipliers, each unrolled into a digit-level pipeline.
Each stage is one iteration of the algorithm and holds only the hardware that iteration
needs:

* **Serial-serial (SS)**: both operands arrive as signed-digit streams. The online delay
  is 3, and the residual is added with a [4:2] carry-save adder. The number of bit slices
  in each stage follows a *working-precision profile*: it grows while operand digits
  arrive, then shrinks once low-order bits can no longer affect the result digits. Only
  P = 13 slices plus guard bits are needed for a 16-digit product.
* **Serial-parallel (SP)**: x is a digit stream and Y is an ordinary two's complement
  word, such as a coefficient. The online delay is 2, with a [3:2] carry-save adder and
  full width in every stage.

Both multipliers accept a new operand pair every clock cycle and deliver one N-digit
product per clock once full. The cycle time does not depend on N: the longest path in a
stage is a few full adders plus a 4-bit adder and a small lookup.

## Number formats

**Signed digits.** Every digit is in {−1, 0, 1} and travels as two bits `{p, m}`, with
value p − m:

| code `{p,m}` | digit |
|---|---|
| `10` | +1 |
| `01` | −1 |
| `00` | 0 |
| `11` | never produced; treated as 0 |

The type is `olm_pkg::sd_t`. An N-digit operand is a fraction
x = Σ x_i 2^−i, i = 1..N, so it lies in (−1, 1). On every port, element 0 of a digit
array is x_1, the most significant digit.

**Inside the stages.** Converted operands x[j] and y[j] are two's complement with 2
integer bits and up to N fraction bits. The residuals v, ws and wc have 2 integer bits
and up to N+3 fraction bits. Each word sits MSB-aligned in a fixed-size container. Bits
below the precision a stage keeps are constant zero and are removed by synthesis.

**The SP coefficient** `y_i[N:0]` is N+1-bit two's complement with one integer (sign)
bit: Y = −y_0 + Σ y_i 2^−i, so Y is in [−1, 1 − 2^−N].

## The serial-serial algorithm

The multiplier keeps a scaled residual w[j] in carry-save form (a pair ws, wc) and the
two operands converted so far. For iterations j = −3 … N−1:

```
x[j+1] = CA(x[j], x_{j+4})          on-the-fly conversion ("convert and append")
y[j+1] = CA(y[j], y_{j+4})
v[j]   = 2 w[j] + (x[j]·y_{j+4} + y[j+1]·x_{j+4}) / 8
z_{j+1} = SELM(v̂[j])                only for j >= 0
w[j+1] = v[j] − z_{j+1}
```

The iterations fall into three groups, and each group becomes a different stage type:

| iterations | name | hardware present |
|---|---|---|
| j = −3, −2, −1 | initialization | 2 converters, 2 selectors, [4:2] adder; no digit selected; 2w[j+1] = 2v[j] by re-wiring |
| j = 0 … N−4 | recurrence | as above + selection slice (V, SELM, M) |
| j = N−3 … N−1 | last δ | selection slice only; the input digits are zero, so v[j] = 2w[j] |

**On-the-fly conversion.** The conversion to two's complement needs no carry
propagation. Each converter keeps Q (value so far) and QM = Q − ulp. A digit +1 appends 1
to Q, a digit 0 appends 0 to Q, and a digit −1 appends 1 to QM. The new QM is built the
same way, and two 2-to-1 multiplexers choose between them (`otfc_append`). Q starts at 0
and QM at −1 (integer bits `00` and `11`). y is converted one digit ahead of x: the stage
uses y[j+1] but x[j].

**Multiplication by a digit.** A 4-to-1 multiplexer (`sd_selector`) gives the word, its
bitwise complement, or zero. For a −1 digit the "+1" that completes the negation goes
into the empty LSB of a carry vector of the adder. The y-side carry c_y goes into the
first adder row and the x-side carry c_x into the second (`csa42`). The factor 1/8 is a
3-bit arithmetic right shift, which is just wiring.

**Selection slice** (`sel_slice`):

* **V** is a 4-bit carry-propagate adder over the top 4 bits of ws and wc. It gives the
  estimate v̂ = v_−1 v_0 . v_1 v_2. Carries from below are ignored, so v̂ is at most v
  and less than 1/2 below it.
* **SELM** (`selm`) maps v_−1 v_0 . v_1 to a digit:

  | v̂ | z |
  |---|---|
  | ≥ 1/2 (`01.1 01.0 00.1`) | +1 |
  | 0 or −1/2 (`00.0 11.1`) | 0 |
  | ≤ −1 (`11.0 10.1 10.0`) | −1 |

* **M**: subtracting z only changes the integer part, and v − z lies in [−1, 3/4]. So the
  new sign bit is v_0* = v_0 XOR |z|, and v_−1 is dropped.

* **Re-wiring**: the next 2w is `ws = v_0* v_1 . v_2 vs_3 vs_4 …` and
  `wc = 0 0 . 0 vc_3 vc_4 …`. The three estimate bits move into the sum vector, and the
  top three carry bits become zero.

## Working-precision profile (serial-serial)

This is the least obvious part of the design. The number of fraction bits of v kept in
iteration j is W(j) = `olm_pkg::ss_width(j, N, P)`:

1. **Growth.** W = j + 7 while operand digits arrive. x[j] has j+3 digits and y[j+1]
   has j+4. After the /8 shift the y product reaches fraction bit j+7. This continues
   until W reaches P + 3.
2. **Truncation.** From iteration P − 3 on, only P + 3 − 3·(j − (P − 3)) bits are kept.
   The three lowest slices are dropped in each iteration. Cutting the operands introduces
   an error in the bottom bits, and the error moves up three positions per iteration
   through the carries and the left shift. Slices that hold nothing but error are not
   built.
3. **Last δ.** There is no input, so v = 2w, and each iteration loses one bit to the shift.

For the default N = 16, P = 13:

```
j      -3 -2 -1  0  1  2  3  4  5  6  7  8  9 10 11 12 13 14 15
W(j)    4  5  6  7  8  9 10 11 12 13 14 15 16 16 13 10  9  8  7
```

This matches the slice counts of the 16-digit worked example this design follows. The
operands are cut to fit each width: x[j] keeps W − 4 fraction bits and y[j+1] keeps
W − 3. The incoming residual keeps W − 1. The cut words are rounded down (truncated in
two's complement). A converter digit that falls below the kept precision still steers
the Q/QM multiplexers, but is not stored.

P follows p = ⌈(2n + δ + t)/3⌉ with δ = 3 and t = 2, which gives 13 for n = 16. Use
`olm_pkg::ss_p_default(n)`.

**Limits.** This profile is valid only when the truncation starts after the residual
reaches full width. That holds for roughly 4P ≥ 3N − 1.

* With N = 16, P = 13 every tested product meets |x·y − z| < 2^−16.
* With N = 24, the formula gives P = 18. Random operands then meet the bound, but
  x = y = 1 − 2^−24 misses it by 2^−48, and P = 19 is needed.
* With N = 32, the formula gives P = 23, which is below the validity limit, and the
  errors reach several ulp. P = 25 is needed.

Choose P with this in mind when changing N.

**Worked example.** x = 1 1 0 −1 0 −1 −1 0 1 1 −1 0 −1 1 0 0 and
y = −1 1 −1 1 0 0 −1 1 0 1 −1 1 1 −1 0 −1 (both 16 digits, MSD first) give
z = 0 −1 0 1 −1 0 1 0 0 1 −1 0 1 0 −1 1, that is z = −0.2103424072265625. The testbenches
check these exact digits.

## Pipeline organisation and timing

Stage s (s = 0 … N+2) of `olm_ss_pipelined` is iteration j = s − 3. Every stage registers
everything it passes on:

* the converted operands;
* the residual pair;
* a valid bit;
* its result digit.

**Input staircase** (`staircase_shifter`). The operands enter as parallel digit vectors.
Digit i is delayed i cycles in an i-stage shift register, so digit i of an operation
reaches stage i, which is where iteration i − 3 consumes x_{i+1}. Stage s therefore sees
the digits of the operation it currently holds, while its neighbours work on other
operations.

**Output.** Digit z_{k+1} is produced and latched by stage k+3.

* `z_skew_o[k]` / `z_skew_valid_o[k]` expose these latched digits. They form the MSDF
  stream, where digit k of one operation appears one cycle after digit k−1. An online
  consumer, such as the next operator of an inner-product array, would take them here.
* A reverse staircase delays digit k by N−1−k cycles, so the whole product appears at
  once on `z_o` with `out_valid_o`.

**Latency and throughput.**

| | SS | SP |
|---|---|---|
| clock edges from operands to `z_o` | N+3 (19 at N=16) | N+2 (18) |
| cycle of `z_o`, counting the input cycle as 1 | N+δ+1 = 20 | 19 |
| products per clock | 1 | 1 |
| K = 8 back-to-back products done after | 27 cycles | 26 cycles |

`in_valid_i` low is a bubble. Its digits are forced to zero, and its valid bit travels
with it, so the matching output has `out_valid_o` low. Operations never stall each other,
so no back-pressure exists or is needed.

## Serial-parallel multiplier

`olm_sp_pipelined` computes z = x·Y with x streaming and Y parallel. Iteration
j = −2 … N−1 computes

```
v[j] = 2w[j] + x_{j+2}·Y/4,   z_{j+1} = SELM(v̂[j]),   w[j+1] = v[j] − z_{j+1}
```

It has no converters. Each stage has one selector and one [3:2] carry-save row
(`csa32`), and the recurrence and final stages add the same selection slice. The /4 is a
2-bit arithmetic right shift of Y, which is just wiring. No working-precision reduction is applied: v keeps N+2
fraction bits in every input stage and loses one bit in each of the two last stages.

Y feeds all stages directly. It must therefore stay constant while any operation using
it is in the pipeline: change it only after `out_valid_o` has gone low for N+2 cycles
(drained). This matches the intended use, where Y is a coefficient held for a stream.

## Top level: `olm_top`

`olm_top` (parameters `N = 16`, `P = 13`) places the two multipliers side by side. They
share the clock and the reset (asynchronous, active low).

| port | dir | width | meaning |
|---|---|---|---|
| `ss_in_valid_i` | in | 1 | SS operands valid this cycle |
| `ss_x_i`, `ss_y_i` | in | `sd_t [N]` | SS operands, element 0 = MSD |
| `ss_out_valid_o` | out | 1 | `ss_z_o` holds a product |
| `ss_z_o` | out | `sd_t [N]` | product x·y, N digits |
| `ss_z_skew_o`, `ss_z_skew_valid_o` | out | `sd_t [N]`, `[N]` | MSDF digit stream (digit k from stage k+3) |
| `sp_in_valid_i` | in | 1 | SP operand valid |
| `sp_x_i` | in | `sd_t [N]` | SP serial operand |
| `sp_y_i` | in | N+1 | SP parallel coefficient, two's complement |
| `sp_out_valid_o`, `sp_z_o`, `sp_z_skew_o`, `sp_z_skew_valid_o` | out | | as for SS |

## Module map

| module | role |
|---|---|
| `olm_pkg` | digit type, digit helpers, working-precision profile `ss_width`, default P |
| `staircase_shifter` | skew (digit i delayed i) or de-skew (delayed N−1−i) network |
| `otfc_append` | one on-the-fly conversion step, optional truncation to K bits |
| `sd_selector` | word × signed digit (mux, complement for −1) |
| `csa42`, `csa32` | carry-save adders, negation carries in the free LSBs |
| `selm` | digit selection table |
| `sel_slice` | V adder + SELM + M block + re-wiring of the next residual |
| `olm_ss_stage`, `olm_sp_stage` | one iteration of each multiplier; the stage type is chosen from J by generate |
| `olm_ss_pipelined`, `olm_sp_pipelined` | the unrolled pipelines with staircases |
| `olm_top` | both multipliers |

## Where this RTL departs from the design it follows

* **Generic low-order slices.** In the original design, the lowest three slices of each
  stage and the top three slices are hand-tailored. They use half adders, a plain copy,
  and constant-zero carries. Here every stage instantiates full-width carry-save rows on
  its kept width, with the constant inputs tied off, and synthesis removes the constant
  logic. The arithmetic is identical; the gate count before optimisation is not.
* **Negation carry.** The written formula for the x-side carry c_x is x⁺·¬x⁻, which is
  true for a +1 digit. Negation is needed for −1, and the selector complements for −1.
  The carry is therefore x⁻·¬x⁺ here. The literal formula would give wrong products.
* **Working precision P.** The design quotes p = 13 for n = 16 in one place. It also
  lists 7, 12, 18 and 23 modules for n = 8, 16, 24, 32, which gives 12 for n = 16. The
  default here is 13, which reproduces the worked example. For larger N see the limits
  above.
* **Last bit of some residuals in the worked example.** The result digits of the
  worked example match exactly. In its last rows (iterations 12 to 15), a few printed
  residual values differ from this RTL in the least significant kept bit. This comes
  from where exactly the truncation is applied.
* **SP integer bits.** The SP description says it "requires one integer bit", but its
  selection table and residual format are those of the SS multiplier with two integer
  bits. This RTL uses two integer bits for v in both multipliers. Y itself has one
  integer (sign) bit.
* **Additions of this RTL:**
  * valid bits and bubbles;
  * the asynchronous active-low reset;
  * the de-skewed parallel output `z_o`;
  * the illegal digit code `11` read as zero.
* **Not implemented:**
  * power gating of unused slices in a non-pipelined multiplier (pipelined stages simply
    omit them);
  * the non-pipelined multipliers and the conventional multipliers that the design is
    compared with;
  * any inner-product array around the multipliers.

## Lint notes

Verilator `-Wall` reports unused signals in the stage modules and carry-save adders.
One parameterised module serves every stage type and width, so some instances leave
inputs, or bits below the kept precision, unread. The carry out of each adder's top
position is dropped because the arithmetic is modulo the stage width. Each module's
header comment lists its cases. No other warnings are raised.

## Verification

Each testbench is self-checking. It prints `TB_RESULT checks=<n> failures=<n>` and stops
itself with a watchdog if it hangs.

| testbench | checks |
|---|---|
| `tb_staircase_shifter` | forward and reverse delays per digit, reset contents |
| `tb_otfc_append` | a chain of conversion steps on random digit strings: Q equals the digits' value, QM = Q − ulp, truncated steps round down |
| `tb_sd_selector` | word × {+1, −1, 0, code 11} including the negation carry |
| `tb_csa42`, `tb_csa32` | vs + vc equals the sum of all inputs and carries, mod 2^W |
| `tb_selm` | all 8 estimate codes against the selection rule |
| `tb_sel_slice` | digit from the 4-bit estimate, new residual = 2(v − z) mod 4, zero carry MSBs |
| `tb_olm_ss_pipelined` | worked-example digits, 3000 random products against the exact product (bound 2^−N), latency N+3, one result per clock, MSDF stream = aligned result |
| `tb_olm_sp_pipelined` | 12 streams × 200 products, Y changing between streams and including −1 and 1 − 2^−N, latency N+2, bound 2^−N |
| `tb_olm_top` | both multipliers at the default N = 16, P = 13 running together, with a count of each mechanism (back-to-back results, bubbles, every digit value on both outputs, negative input digits, coefficient changes) that must be non-zero |
| `tb_olm_workloads` (with driver `olm_size_run`) | both multipliers at N = 8, 16, 24, 32 (SS with P = 7, 13, 19, 25): cycles for a stream of 8 products, latency, accuracy bound |

Measured cycle counts from `tb_olm_workloads`:

| N | SS latency | SS, 8 products | SP latency | SP, 8 products |
|---|---|---|---|---|
| 8 | 11 | 19 | 10 | 18 |
| 16 | 19 | 27 | 18 | 26 |
| 24 | 27 | 35 | 26 | 34 |
| 32 | 35 | 43 | 34 | 42 |

These are n + δ edges of latency and (n + δ + 1) + (K − 1) cycles for K products. The
serial-serial runs at N = 24 and 32 use a P above the formula value, for the reasons
given under "Limits".

Running a testbench with plain Verilator (5.x) from the top of the tree:

```
verilator --binary --timing -Irtl rtl/olm_pkg.sv tb/tb_olm_top.sv \
          --top-module tb_olm_top -y rtl -y tb -o sim
./obj_dir/sim
```

Replace `tb_olm_top` with any other testbench name. The package must come first on the
command line; `-y rtl -y tb` lets Verilator find the other modules. To try another size, edit
the `N`/`P` localparams at the top of `tb_olm_ss_pipelined` or `tb_olm_sp_pipelined`.
Widths, stage counts and the precision profile all follow from the parameters. The
worked-example check only makes sense at N = 16.
