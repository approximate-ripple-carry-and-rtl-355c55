# Approximate 32-bit ripple carry and carry lookahead adders

Many workloads — signal and image processing, machine learning, graphics —
can tolerate small errors in their arithmetic. These adders use that
tolerance: they give up correctness in the least significant bits of a 32-bit
sum in exchange for a shorter carry chain and fewer gates. The adder is split
at bit `K`:

```
        bit 31 ............................ bit K | bit K-1 ........ bit 0
  a ──┬─────────────────────────────────────────┬──────────────────────────
  b ──┤  accurate part, N-K bits                 │  approximate part, K bits
      │  RCA: FA1..FA(N-K)                       │  OR1..ORK
      │  CLA: CLA1..CLA((N-K)/4)  carry in = 0   │  SUM_i = A_i OR B_i
      └──► cout, sum[N-1:K]                      └──► sum[K-1:0]
```

* The **upper `N-K` bits** are added exactly, by a ripple carry adder (RCA)
  or by a cascade of 4-bit carry lookahead adders (CLA). Their carry input is
  tied to 0.
* The **lower `K` bits** have no carry logic at all. Each sum bit is the
  2-input OR of the two operand bits.

No signal crosses from the lower part to the upper part. The two parts work
in parallel, so the delay is that of an `N-K`-bit accurate adder. The
comparison this design comes from uses `N = 32` and `K = 4, 8, 12, 16, 20`,
with `K = 0` as the accurate reference. It reports lower power, delay and
area as `K` grows. The CLA versions had the better power-delay product. The
RCA versions were the smallest.

## What the approximation costs

The error can be stated exactly. For any two numbers, `a + b = (a | b) + (a & b)`.
The upper part adds exactly, and the lower part returns `a | b` and drops
the rest. So for every input:

```
{cout, sum} = a + b - (a[K-1:0] & b[K-1:0])
```

That gives four properties:

* The result is never larger than the exact sum.
* The result is exact whenever the low `K` bits of `a` and `b` have no 1 in
  common.
* The error is at most `2^K - 1`.
* The carry output is the true carry out of the 33-bit sum, unless a dropped
  low carry would have rippled all the way up.

Per bit, against a full adder with an unknown carry in, the OR output is
right in 4 of 8 input combinations. The XOR `A_i ^ B_i` is also right in 4 of
8. The OR gate is used because it is the smaller cell.

With 1000 uniformly random 32-bit operand pairs, the testbench measured a
mean absolute error of about 3, 67, 1043, 16117 and 280947 for
`K = 4, 8, 12, 16, 20`. That is roughly `2^K / 4`, as the formula predicts.
About 70% (`K = 4`) to over 99% (`K = 20`) of the sums were not exact.

## The accurate parts

### Ripple carry (`rca`, `full_adder`)

`WIDTH` full adders in a chain. FA1 takes the carry input and the least
significant bits. Each carry goes to the next full adder. The last carry is
`cout`. The worst path runs through all `WIDTH` full adders. In the
approximate adder, `WIDTH = 32-K`, so the chain is `K` full adders shorter
than in the accurate adder.

### Carry lookahead (`cla`, `cla4`, `clg4`)

`cla` chains `WIDTH/4` sub-adders, `cla4`. The lookahead carry `C4` of each
one is the carry input of the next. Each `cla4` has three stages:

| stage | equations |
|---|---|
| propagate / generate | `P_i = A_i ^ B_i`, `G_i = A_i & B_i` |
| carry lookahead generator `clg4` | `C1..C4` from `P`, `G`, `C0` |
| sum | `SUM_i = P_i ^ C_i` |

The generator is the part to understand. Each carry is the expanded form of
`C(i+1) = G_i | P_i & C_i`. The expansion is split into a term that does
not depend on `C0` and the product of all propagates with `C0`:

```
C1 =  G0                                        | P0.C0
C2 = (G1 | P1.G0)                               | P1.P0.C0
C3 = (G2 | P2.G1 | P2.P1.G0)                    | P2.P1.P0.C0
C4 = (G3 | P3.G2 | P3.P2.G1 | P3.P2.P1.G0)      | P3.P2.P1.P0.C0
```

The left-hand group terms are computed from the operands alone, while the
carry is still on its way from the previous sub-adder. When `C0` arrives it
passes through one AND-OR stage (an AO21 cell in a standard-cell library) to
reach every output. That includes `C4`, the signal that goes on to the next
nibble. So the carry chain through `cla` costs one AO21 per 4 bits. The RTL
writes these equations as expressions and leaves gate mapping to synthesis.

## Parameters

`approx_adder` (the top):

| parameter | default | meaning |
|---|---|---|
| `N` | 32 | operand width |
| `K` | 4 | approximation size: number of OR-approximated LSBs. 0 gives an accurate adder |
| `ARCH` | `ARCH_CLA` | accurate-part topology, `ARCH_RCA` or `ARCH_CLA` (type `adder_pkg::arch_e`) |

The legal range is `K < N`. With `ARCH_CLA`, `N-K` must also be a multiple
of 4. Breaking either rule stops elaboration with an `$error`. The 32-bit
width and the five approximation sizes come from the original study. The
defaults `K = 4` and `ARCH_CLA` are choices of this RTL: the study evaluates
all five sizes and names none as the main one. It recommends the CLA form.

The twelve configurations compared in the study map to these settings:

| name | `ARCH` | `K` | accurate part |
|---|---|---|---|
| RCA, RCX1..RCX5 | `ARCH_RCA` | 0, 4, 8, 12, 16, 20 | 32..12 full adders |
| CLA, CLX1..CLX5 | `ARCH_CLA` | 0, 4, 8, 12, 16, 20 | 8..3 sub-CLAs |

Ports: `a[N-1:0]`, `b[N-1:0]` in; `sum[N-1:0]`, `cout` out. The adder is
purely combinational. It has no clock, no reset and no carry input.

## Files

| file | contents |
|---|---|
| `rtl/adder_pkg.sv` | width constants and the `arch_e` topology enum |
| `rtl/approx_adder.sv` | top: split, OR part, choice of accurate part |
| `rtl/or_approx.sv` | OR-gate approximate part |
| `rtl/rca.sv`, `rtl/full_adder.sv` | ripple carry adder and its cell |
| `rtl/cla.sv`, `rtl/cla4.sv`, `rtl/clg4.sv` | carry lookahead adder, 4-bit sub-adder, lookahead generator |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_approx_adder.sv` | all twelve configurations side by side, end to end |
| `tb/tb_approx_adder_full.sv` | the top at its default parameters, 1000 random vectors |

## Simulating

Each testbench prints one line, `TB_RESULT checks=<n> failures=<m>`, and
finishes. Each one has a watchdog that counts a failure if the run hangs.
Example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/adder_pkg.sv \
          tb/tb_approx_adder.sv --top-module tb_approx_adder -Mdir obj
./obj/Vtb_approx_adder
```

Swap in any other `tb_*` name. Lint a module with
`verilator --lint-only -Wall -Irtl rtl/adder_pkg.sv rtl/<module>.sv`.

What the testbenches check:

* `full_adder`, `clg4` and `cla4` are checked exhaustively (8, 512 and 512
  input combinations). The `clg4` reference is the serial carry recurrence.
* `rca` and `cla` are checked at 32 and 12 bits, with directed carry chains,
  overflow and 1000 random vectors. The testbench counts full-length carry
  chains, carries between sub-CLAs and overflows. It fails if any of them
  never occurred.
* `or_approx` is checked against the 8-row accurate-versus-approximate truth
  table, including the count of 4 incorrect rows, and against random 20-bit
  vectors.
* `approx_adder` is checked in all twelve configurations against an integer
  model. Vectors are applied every 4 ns, which matches the 250 MHz stimulus
  rate of the original power simulations. Each result is checked 1 ns later.
  On every vector the testbench also checks the error identity above. It
  counts overflows, carries dropped at the split, wrong sums and carries
  running the full accurate part, and it fails if any of them never
  happened.

## How far to trust it, and where it departs from the original design

* **Structure.** The structure follows the original design closely: the
  split at bit `K`, the grounded carry input, the OR cells, the FA and
  sub-CLA chains, and the lookahead equations with their AO21 grouping. The
  only cell whose insides are not specified there is the full adder. It was
  a library cell, and any correct full adder will do.
* **No figures of merit.** The reported power, delay and area come from a
  32/28 nm standard-cell flow with minimum-size cells. This RTL is
  technology-independent and cannot reproduce them. Synthesizing it with a
  different library or flow will give different numbers and possibly a
  different gate structure. In particular, a synthesis tool may restructure
  the ripple chain or the lookahead logic unless told not to.
* **Carry lookahead delay.** The original text calls the CLA delay
  logarithmic in one place. Elsewhere it says the delay is proportional to
  `n/4`. Its block diagram is a plain cascade of 4-bit sub-adders. This RTL
  builds that cascade, which is linear in `n/4`. It has no second level of
  lookahead.
* **No XOR variant.** `SUM_i = A_i ^ B_i` is described as an equally
  accurate alternative but is not used, so it is not built.
* **Combinational only.** There are no input or output registers. Any
  pipelining or timing closure is left to the surrounding design.
