# An exact 4x4-bit multiplier in 11 LUTs and two carry chains

Quantised neural-network inference on FPGAs uses thousands of small
multipliers side by side. How many fit, and how fast they run, depends on
the LUT count and the critical path of each one. Synthesising `p = a * b`
for a 4-bit unsigned product on a Xilinx 7-series device, or generating
it with the vendor multiplier IP, takes 13 to 20 LUTs. Earlier hand-mapped designs need 12 or more. This design needs
**11 six-input LUTs and two CARRY4 carry chains**. It is exact for all 256
operand pairs. The published post-route critical path for this structure on
an Artix-7 is about 2.75 ns.

Two ideas make it work:

* **No LUT computes a partial product.** Each LUT reads raw bits of A and B
  and directly produces a column sum, a column carry, or the
  propagate/generate pair of one bit of the final adder. A six-input LUT
  can absorb several partial products and the carry logic between them.
* **The carry logic is simplified algebraically.** Some column carries turn
  out to need fewer inputs than their naive expression suggests. That keeps
  every function within six inputs. The key case is the carry C1 out of
  the partial column sum S1 (see below).

## Arithmetic: columns and what each LUT computes

With `A = a3..a0`, `B = b3..b0` and `AiBj = ai & bj`, the product is the
sum of four shifted rows of partial products:

| column (weight) | 6 | 5 | 4 | 3 | 2 | 1 | 0 |
|---|---|---|---|---|---|---|---|
| row 0 |      |      |      | A3B0 | A2B0 | A1B0 | A0B0 |
| row 1 |      |      | A3B1 | A2B1 | A1B1 | A0B1 |      |
| row 2 |      | A3B2 | A2B2 | A1B2 | A0B2 |      |      |
| row 3 | A3B3 | A2B3 | A1B3 | A0B3 |      |      |      |

The result is `P7..P0`. The low three bits come straight from LUTs. The
high five bits come from a ripple-carry adder built from two CARRY4s.

| LUT | cell | output(s) | function |
|---|---|---|---|
| 1 | dual | P0, P1 | `P0 = A0B0`, `P1 = A1B0 ^ A0B1` |
| 2 | single | P2 | `A2B0 ^ A1B1 ^ A0B2 ^ (A0B1 & A1B0)` |
| 3 | single | C0 | carry from column 2 into column 3: `A1B1&A0B2 \| A2B0&A1B1 \| A2B0&A0B2 \| A0B1&A1B0` |
| 4 | single | S1 | `A1B2 ^ A2B1 ^ (A1B1 & A0B2 & A2B0)` |
| 5 | dual | Prop0, Gen0 | `Prop0 = S1 ^ A3B0 ^ A0B3`, `Gen0 = (S1 ^ A3B0) & A0B3` |
| 6 | single | S3 | `S2 ^ C1`, with `S2 = A3B1 ^ A2B2 ^ A1B3` and `C1 = A1B2 & A2B1` |
| 7 | dual | Prop1, Gen1 | `Prop1 = S3 ^ (S1 & A3B0)`, `Gen1 = S3 & S1 & A3B0` |
| 8 | single | Prop2 | `S4 ^ C3`, with `C2 = maj(A3B1, A2B2, A1B3)`, `C3 = S2 & C1`, `S4 = A3B2 ^ A2B3 ^ C2` |
| 9 | single | Gen2 | `S4 & C3` |
| 10 | single | Prop3 | `A3B3 ^ C4`, with `C4 = maj(A3B2, A2B3, C2)` |
| 11 | single | Gen3 | `A3B3 & C4` |

Notes on the less obvious entries:

* **Column 2 can hold up to 4**, counting the three partial products and
  the carry `A0B1 & A1B0` from column 1. Its overflow is therefore split
  between C0, which enters column 3, and the term `A1B1 & A0B2 & A2B0`
  inside S1. That term is exactly the case that sends an extra unit into
  column 3's sum.
* **C1**, the carry from `A1B2 + A2B1 + (A1B1 & A0B2 & A2B0)`, would
  naively be a three-input majority. But the third term can only be 1 when
  A1, A2, B1 and B2 are all 1. In that case `A1B2 & A2B1` is already 1, so
  `C1 = A1B2 & A2B1`. This removes two inputs. It lets S3 (column 4 with
  the column-3 carry folded in) fit in one LUT with six inputs.
* Columns 3 to 6 are the two-operand adder. Each column is reduced to a
  pair (Prop, Gen): Prop is the XOR of the column's two remaining operands
  and Gen is their AND. Column 3 has operands `S1 ^ A3B0` and `A0B3`. Its
  second carry, `S1 & A3B0`, is pushed into column 4 through LUT 7.

## Carry chains

A CARRY4 is four bits of a ripple adder. Each bit has a mux: with select
`S = 1` it passes the incoming carry, with `S = 0` it passes `DI`. Each bit
also has an XOR, `O = S ^ carry_in`. Bit 0 takes its carry either from the
`CYINIT` pin or from `CI`, which is hard-wired to `CO[3]` of the
neighbouring chain.

**Chain A** produces only P3. Its inputs are set so that the column-2 carry
C0 arrives at bit 3 as the carry-in:

| bit | DI | S | effect |
|---|---|---|---|
| 0 | 0 | 1 | passes CYINIT = 1 |
| 1 | 0 | 1 | passes 1 |
| 2 | 0 | C0 | carry out = C0 |
| 3 | Gen0 | Prop0 | `O[3] = P3`, `CO[3]` = carry into column 4 |

**Chain B** takes `CI = CO_A[3]` and produces P4 to P7:

| bit | DI | S | output |
|---|---|---|---|
| 0 | Gen1 | Prop1 | `O[0] = P4` |
| 1 | Gen2 | Prop2 | `O[1] = P5` |
| 2 | Gen3 | Prop3 | `O[2] = P6`, `CO[2] = P7` |
| 3 | 0 | 1 | unused |

Why two chains for five bits? The 7-series carry output `CO[3]` reaches
the next CARRY4 over a dedicated wire. Any other carry output that must go
somewhere else has to pass through general routing. Giving P3 the top bit
of its own chain lets the column-3 carry use the fast link. With one
CARRY4, the top output would be a slow routed net.

The low bits of Chain A cost no LUT, because their inputs are constants.
The design therefore spends one extra CARRY4 to save LUT delay and area.

## LUT truth tables

A LUT's output is bit `INIT[{I5,I4,I3,I2,I1,I0}]`. A dual-output cell
(LUT6_2) has I5 tied to 1. Its O6 reads the upper half of INIT, and its O5
reads the lower half at `INIT[{I4..I0}]`. The values used are below. In
`rtl/mult4_pkg.sv`, each value is listed next to its input order.

| LUT | I0, I1, I2, I3, I4, I5 | INIT |
|---|---|---|
| 1 | A0, B1, B0, A1, 1, 1 | 78887888A0A0A0A0 |
| 2 | B2, A2, B0, A0, B1, A1 | 653F6AC06AC06AC0 |
| 3 | A2, B0, A0, B1, A1, B2 | F8808080C8000000 |
| 4 | A1, B2, A2, A0, B1, B0 | F878888878788888 |
| 5 | B3, A0, S1, A3, B0, 1 | 8778787808808080 |
| 6 | B3, A1, B1, A3, B2, A2 | 47B7788878887888 |
| 7 | B0, S1, A3, S3, 1, 1 | 7F807F8080008000 |
| 8 | A2, B1, B3, A1, B2, A3 | 37D760A008A0A0A0 |
| 9 | A2, B1, B3, A1, B2, A3 | 8000000000000000 |
| 10 | A2, B1, B2, A1, B3, A3 | 175F8080A0000000 |
| 11 | B2, B1, A3, A1, A2, B3 | E0A0800000000000 |

To derive an INIT value for your own function, evaluate the function for
each index `k = 0..63`. Read bit `j` of `k` as the value of input `Ij`,
and set `INIT[k]` to the result.

### Where this departs from the published table

The original LUT table cannot be used exactly as printed. Each INIT value
was checked against each function, under each listed input order:

* **LUTs 2 and 3.** The INIT printed for LUT 2 computes C0, and the one
  printed for LUT 3 computes P2. Each of these works only with the input
  order given on its own row.
* **LUTs 8 and 9.** These share an input order, and their two INIT values
  are swapped.
* **LUTs 10 and 11.** The input-order/INIT pair printed for LUT 10
  computes Gen3, and the pair printed for LUT 11 computes Prop3. LUT 11's
  last input is truncated in print ("B3 A"); it is A3.
* **LUT 7.** Its input list names B3 where the block diagram shows S3.
  Prop1 needs S3, and with S3 in position I3 the printed INIT is correct.

In every case, the RTL keeps the block diagram's assignment of LUT numbers
to outputs. Each printed INIT value is kept together with the input order
it was made for. The resulting network was checked for all 256 operand
pairs. Using the table literally, for example with LUT 8 and LUT 9 as
printed, gives wrong products.

Two settings are not given and were chosen here:

* **CYINIT of Chain A is 1.** It is the only value for which bit 2 passes
  C0 unchanged.
* **The constant pairs on unused chain bits are DI = 0, S = 1.** This
  follows the printed left-to-right order of DI before S.

## RTL structure

| file | contents |
|---|---|
| `rtl/mult4_pkg.sv` | carry-in selector enum, the eleven INIT constants |
| `rtl/lut5.sv` | 5-input LUT half, `o = INIT[i]` |
| `rtl/lut6.sv` | two `lut5` plus a mux on I5 |
| `rtl/lut6_2.sv` | the same, with the lower half also brought out as `o5` |
| `rtl/carry4.sv` | four mux/XOR carry bits; parameter `CIN_SEL` picks CYINIT or CI |
| `rtl/mult4_11lut.sv` | top: `a[3:0]`, `b[3:0]` in, `p[7:0]` out; 8 `lut6`, 3 `lut6_2`, 2 `carry4` |

The top is purely combinational. It has no clock, no reset and no
parameters, and the product is valid one combinational delay after the
operands.

`lut6`, `lut6_2` and `carry4` are portable RTL models of the 7-series
primitives, so the design simulates and synthesises with any tool. On a
7-series device you can substitute the vendor's `LUT6`, `LUT6_2` and
`CARRY4` primitives one for one:

* Keep the INIT values.
* Keep the input order, with I0 as the last element of each concatenation
  in `mult4_11lut.sv`.
* Express `CIN_SEL` by driving the unused pin of each chain's carry-in
  with 0.

Without such instantiation, or equivalent placement constraints, a
synthesis tool is free to re-map the logic. The LUT count and delay then
no longer hold.

A registered or pipelined version is not included. Register placement and
stage count for such a version are not specified here.

## Verification

Each module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M`.

* `lut6_tb`, `lut6_2_tb`: all 64 input vectors on four truth tables each,
  checking O6 (and O5) against the addressed INIT bit.
* `carry4_tb`: the chain used as an adder (`S = x ^ y`, `DI = x`) for all
  x, y and carry-in values, through both CI and CYINIT. It is checked
  against integer addition, including every intermediate `CO[k]`.
* `mult4_11lut_tb`: all 256 operand pairs.
  - It checks the product.
  - It also checks every internal LUT output against the column equations
    above, written independently from the partial products.
  - It counts how often each carry path is used: C0 passing through
    Chain A, a carry crossing from Chain A to Chain B, generate and
    propagate inside Chain B, P7 from the carry output, and the rare Gen2
    case. A path that is never used counts as a failure.

Running with plain Verilator (5.x):

```
verilator --binary --timing --assert -Irtl rtl/mult4_pkg.sv tb/mult4_11lut_tb.sv \
          --top-module mult4_11lut_tb -Mdir obj && obj/Vmult4_11lut_tb
```

Replace `mult4_11lut_tb` with `lut6_tb`, `lut6_2_tb` or `carry4_tb` to run
the other testbenches. Every run takes well under a second.

Simulation shows only that the logic is correct. The LUT and CARRY4 counts
are true by construction. The timing can only be confirmed by implementing
on the device.
