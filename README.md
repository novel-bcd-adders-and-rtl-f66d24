# BCD adders: carry look-ahead, carry skip, and reversible-gate versions

Decimal floating point (the decimal formats of IEEE 754-2008, then called
IEEE 754r) keeps significands as decimal digits: 7, 16 or 34 of them. Adding
two such significands comes down to adding BCD digits. A BCD digit is a 4-bit
value from 0 to 9, and a BCD adder must give a 4-bit digit and a decimal carry.
The classic way is to add in binary and then correct. If the 5-bit binary sum is
above 9, add 6 (0110), which skips the six unused codes 10..15, and raise the
decimal carry.

This RTL builds four one-digit BCD adders that do this in different ways:

| module             | idea                                                              |
|--------------------|-------------------------------------------------------------------|
| `cla_bcd_adder`    | carry look-ahead: every output is written directly as a Boolean equation of the operand bits, with XOR used instead of OR wherever that is safe |
| `cs_bcd_adder`     | carry skip: a binary ripple adder whose carry in can bypass the ripple when all four bits propagate, then a +6 correction row |
| `rev_bcd_adder`    | the conventional adder (add, detect > 9, add 6) built only from reversible gates: TSG and NG |
| `rev_cs_bcd_adder` | the carry-skip adder built only from reversible gates: TSG, Fredkin and TS-3 |

The top, `bcd_adder_top`, chains NDIGITS (34) digits of each kind into a
significand adder. A run-time select chooses which chain drives the outputs.

Everything is combinational. There is no clock, no reset and no state.

## Decimal correction in one digit

Let `z[3:0]` and `k` be the binary sum and carry of `a + b + cin`. The decimal
carry is

    cout = k | z3 z2 | z3 z1          (binary sum >= 10)

and the digit is `z + (cout ? 6 : 0)` modulo 16. Two facts are used again and
again below:

* `k = 1` only when `z <= 3` (the largest sum is 9 + 9 + 1 = 19 = 1_0011).
  So `k` is never 1 together with `z3`, and OR can be replaced by XOR between
  `k` and anything that contains `z3`.
* `z3 z2` and `z3 z1` are **both** 1 for binary sums 14 and 15. Between those
  two terms, XOR is *not* the same as OR.

The correction row adds `{0, cout, cout, 0}` to `z` with carry in 0. Its carry
out is not needed, since `cout` already holds that information.

## Reversible gates

A reversible gate maps its input patterns one-to-one onto its output patterns.
Every output that the circuit does not use further is a *garbage* output.
The cost of a reversible circuit is stated as the number of gates and the
number of garbage outputs.

| gate | module | outputs |
|------|--------|---------|
| TSG (4x4)     | `tsg_gate`     | P = A, Q = A'C' ^ B', R = Q ^ D, S = Q D ^ (A B ^ C) |
| TS-3 (3x3)    | `ts3_gate`     | P = A, Q = B, R = A ^ B ^ C |
| NG (3x3)      | `new_gate`     | P = A, Q = A B ^ C, R = A'C' ^ B' |
| Fredkin (3x3) | `fredkin_gate` | P = A, Q = A'B + A C, R = A'C + A B (swap B and C when A = 1) |

With C = 0, the TSG is a full adder, `tsg_full_adder`. In that case
Q = a ^ b, R = sum and S = carry, and there are two garbage outputs (P and Q)
unless Q is reused. A Fredkin gate with C = 0 is an AND gate, R = A B. With A as
the select it is a 2:1 multiplexer on Q. TS-3 is a 3-input XOR whose other two
inputs pass through, which also gives free fan-out. NG and Fredkin are standard
gates from the reversible-logic literature, and TSG and TS-3 are the gates this
design family is built around.

## The carry look-ahead adder and its equations

`cla_bcd_adder` works from per-bit signals `g = a & b`, `p = a | b` and
`h = a ^ b`, and from the carry out of bit 0, `C1 = g0 | p0 cin`. Two look-ahead
terms do the decimal work:

* `m`: the digit pair produces a decimal carry no matter what `C1` is.
* `n`: the pair produces a decimal carry if `C1 = 1`.

So `cout = m | n C1`. Each sum bit is split into a part for `C1 = 0` and a part
for `C1 = 1`. Such parts can be joined by XOR, because they are never 1
together.

The aim of this form is to use XOR where the older version of these equations
used OR. XOR is cheaper in pass-transistor CMOS: an XOR takes two 2-transistor
multiplexers. It is also cheaper in reversible logic: a 3-input XOR is one
TS-3 gate, while a 3-input OR needs two gates and more garbage. The catch is
that XOR equals OR only for terms that are never 1 together.

The equations as published do not add correctly. Trying all 200 valid inputs
(10 x 10 x 2) shows that the literal equations are wrong in 92 cases. The
module departs from them in four places, and only there:

1. **S[1]**: the published form gates both of its products with C1. The first
   product must be gated with ~C1, like the split in the other sum bits.
2. **m**: `p3 p2` and `p3 p1` are both 1 for, for example, 6 + 8. The module
   uses `m = ((g3 ^ p3 p2) | p3 p1) ^ g2 p1`.
3. **n**: `p3 ^ g2` and `p2 g1` overlap. The module uses `n = (p3 ^ g2) | p2 g1`.
4. **S[2]**: the C1-gated part is joined to the rest by OR. The terms
   `~p2 g1` and `~p3 h2 ~p1` do not depend on C1, so they can meet it.

With S[1] corrected, an exhaustive search over every XOR operator of m, n, S[2]
and S[3] finds exactly one set of three operators that must be OR: the three
above. Every other XOR is kept.

## The carry-skip adders

In `cs_bcd_adder`, four full adders ripple `a + b + cin`. In parallel,
`blk_p = &(a ^ b)` is 1 when every bit would pass its carry on. In that case the
block's carry out equals `cin`. The skip logic `c_skip = c4 | blk_p cin` lets
`cin` reach the decimal-carry OR without waiting for the ripple. Then
`cout = c_skip | z3 z2 | z3 z1`, and a second row of full adders adds the
correction. In RTL the skip is only a structure. Its speed advantage exists in
a gate-level or physical implementation, not in simulation. For valid BCD
digits, `blk_p = 1` happens only for the pairs 6+9, 7+8, 8+7 and 9+6.

`rev_cs_bcd_adder` builds the same adder with 15 reversible gates:

* 4 TSG full adders on top. Their Q outputs (a ^ b) are reused as the bit
  propagates.
* 3 Fredkin gates for the 4-input AND that gives `blk_p`.
* 1 Fredkin gate as the skip multiplexer: `c_skip = blk_p ? cin : c4`. This is
  not the same truth table as the AND-OR, but for real additions it gives the
  same value. It passes `cin` as soon as `blk_p = 1`, without waiting for
  `c4`.
* 2 Fredkin gates and 1 TS-3 gate for `cout = c_skip ^ t1 ^ t2`.
* 4 TSG full adders for the correction row.

**Departure.** The published circuit takes `t1 = z3 z2` and `t2 = z3 z1` and
joins them with the TS-3 XOR. That gives `cout = 0` for binary sums 14 and 15
(7 + 7, 6 + 8, 7 + 8 and so on): 20 of the 200 input cases. This module uses
the disjoint terms `t1 = z3 z2` and `t2 = z3 z2' z1`. Their OR is the same
`z3 (z2 | z1)`, and since they never meet each other or `c_skip`, the XOR is
exact. Both terms come from two Fredkin gates with a constant-0 input:

* `F(z2, z3, 0)` gives `z3 z2` on R and `z3 z2'` on Q.
* `F(z1, 0, z3 z2')` gives `z3 z2' z1` on Q.

The gate count stays at 15. The garbage count becomes 26 instead of 27,
because the first correction gate has both of its data outputs in use.

## The reversible conventional adder

`rev_bcd_adder` uses 4 TSG full adders, then 3 New Gates for the decimal
carry, then 4 TSG full adders for the correction:

* `NG(z3, z2, 0)` gives `x = z3 z2` on its Q output.
* `NG(z3, z1, 0)` gives `y = z3 z1` on its Q output.
* `NG(x, k, y)` gives `R = x'y' ^ k' = (x | y) ^ k` on its R output. This equals
  `k | x | y`, because `k` excludes `x` and `y`.

The total is 11 gates and 22 garbage outputs. The published drawing does not
show which NG pin takes which signal, so this pin use is one that gives the
published counts.

## Cost summary

| adder | gates | garbage outputs |
|-------|-------|-----------------|
| `rev_bcd_adder`    | 8 TSG + 3 NG = 11             | 22 (port `garbage[21:0]`) |
| `rev_cs_bcd_adder` | 8 TSG + 6 Fredkin + 1 TS-3 = 15 | 26 (port `garbage[25:0]`); the published circuit, with its wrong carry, has 27 |

For comparison, an earlier reversible BCD adder from the literature used 23
gates and 22 garbage outputs.

## The significand adder (`bcd_adder_top`)

Ports:

* `a` and `b`: `bcd_digit_t [NDIGITS-1:0]`, with digit 0 least significant.
* `cin`: the carry into digit 0.
* `arch`: selects the chain, an `adder_arch_e` value: `ARCH_CLA`, `ARCH_CS`,
  `ARCH_REV_CONV` or `ARCH_REV_CS`.
* `sum` and `cout`: the result of the selected chain.
* `skip_cs` and `skip_rev_cs`: the per-digit block-propagate bits of the two
  carry-skip chains. A 1 means that digit passes its carry in straight to the
  next digit.

All four chains are always present and always compute. The garbage outputs of
the reversible digits stay inside the top, unused, as garbage should. The types
are in `bcd_pkg`.

What the top is not: a decimal floating-point adder. IEEE 754r operands are
stored with a combination field and densely-packed-decimal significands. The
top takes plain BCD digits, so decoding, exponent alignment, rounding and
encoding are outside it. The choices of 34 digits and of a run-time select are
this design's own. The one-digit adders are meant for chaining, but only the
one-digit circuits come from the published design.

Every input digit must be 0..9. For the codes 10..15 the outputs are not
defined and differ between the architectures.

## Files

* `rtl/bcd_pkg.sv`: the digit type, the architecture enum and the garbage
  widths.
* `rtl/tsg_gate.sv`, `ts3_gate.sv`, `new_gate.sv`, `fredkin_gate.sv`: the
  reversible gates.
* `rtl/tsg_full_adder.sv` and `rtl/full_adder.sv`: a one-gate reversible full
  adder and a plain full adder.
* `rtl/cla_bcd_adder.sv`, `cs_bcd_adder.sv`, `rev_bcd_adder.sv`,
  `rev_cs_bcd_adder.sv`: the one-digit adders.
* `rtl/bcd_adder_top.sv`: the multi-digit top.
* `tb/tb_<module>.sv`: one self-checking testbench per module.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself after a
fixed simulated time (a watchdog).

* Gates: all input patterns against hand-derived truth tables. The tests also
  check that all output patterns differ, which is reversibility. They check the
  uses the adders rely on: the TSG full adder, the Fredkin AND and
  multiplexer, and the NG AND.
* One-digit adders: all 200 valid inputs against `(a + b + cin) mod 10` and
  `>= 10`, plus `blk_p` against `a ^ b == 1111`. For the reversible adders, the
  tests also check that `{s, cout, garbage}` differs for every input, as a
  reversible circuit with fixed constant inputs requires.
* Top, at the default 34 digits: 3004 operand pairs, each run through all four
  architectures, against a digit-by-digit integer model. The pairs include a
  carry through all 34 digits, all-skip operands and digit sums of 14 and 15.
  Then 500 pairs each of 7-digit and 16-digit operands, the decimal32 and
  decimal64 significand lengths, are added in the low digits.
  The test counts each mechanism (every architecture, decimal correction,
  skipped digit, full carry chain, carry out, sum 14/15) and fails if one never
  happens.

Each testbench is known to catch at least one realistic fault. Two examples:
turning the CLA `m` term back to its published all-XOR form gives 16 failing
checks. Using the published `z3 z1` term in the reversible carry-skip adder
gives 40.

To simulate with Verilator, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert rtl/bcd_pkg.sv rtl/*.sv \
        tb/tb_bcd_adder_top.sv --top-module tb_bcd_adder_top
    ./obj_dir/Vtb_bcd_adder_top

To test one module, replace the testbench and the top-module name, for example
`tb/tb_rev_cs_bcd_adder.sv` and `tb_rev_cs_bcd_adder`. To change the number of
digits, override `NDIGITS` on `bcd_adder_top`. The top testbench's
`localparam N` must match it.
