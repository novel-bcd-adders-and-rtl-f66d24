// cla_bcd_adder: one-digit carry look-ahead BCD adder in sum-of-products form.
//
// Adds two BCD digits a, b and a carry cin and gives a BCD digit s and a
// decimal carry cout, without first forming a binary sum and correcting it.
// Every output is a two-level-style function of the per-bit signals
//   g[j] = a[j] & b[j]   (generate)   p[j] = a[j] | b[j]   (propagate)
//   h[j] = a[j] ^ b[j]   (half sum)
// the carry out of bit 0, C1 = g[0] | p[0] cin, and two decimal look-ahead
// terms: m (the digit pair alone produces a decimal carry) and n (a decimal
// carry is produced if C1 = 1). Then cout = m | n C1.
//
// Several OR operators of the classic equations are replaced by XOR, which is
// cheaper in pass-transistor CMOS and in reversible logic. XOR may stand for
// OR only where the joined terms are never 1 together. The equations as
// usually printed for this adder have four faults, found by trying all
// 10 x 10 x 2 operand combinations, and this module departs from them there:
//   * S[1]: the first product is gated by ~C1 (printed: C1, in both products).
//   * m:   p3p2 and p3p1 overlap (a+b = 14 from 6+8), so they are joined by OR:
//          m = ((g3 ^ p3p2) | p3p1) ^ g2p1.
//   * n:   p3 ^ g2 and p2g1 overlap, so n = (p3 ^ g2) | p2g1.
//   * S[2]: the C1-gated term is joined to the rest by OR, not XOR.
// Every other XOR of the equations is kept as XOR; this is the only choice of
// three OR positions that makes the adder correct. Inputs must be BCD (0..9);
// for 10..15 the outputs are unspecified. Combinational.
module cla_bcd_adder
  import bcd_pkg::*;
(
  input  bcd_digit_t a,
  input  bcd_digit_t b,
  input  logic       cin,
  output bcd_digit_t s,
  output logic       cout
);
  logic [3:0] g, p, h;
  logic       m, n, c1;

  always_comb begin
    g  = a & b;
    p  = a | b;
    h  = a ^ b;
    m  = ((g[3] ^ (p[3] & p[2])) | (p[3] & p[1])) ^ (g[2] & p[1]);
    n  = (p[3] ^ g[2]) | (p[2] & g[1]);
    c1 = g[0] | (p[0] & cin);

    s[0] = h[0] ^ cin;
    s[1] = ((h[1] ^ m) & ~c1) | (~(h[1] ^ n) & c1);
    s[2] = ((~p[2] & g[1])
            ^ (~p[3] & h[2] & ~p[1])
            ^ ((g[3] ^ (h[2] & h[1])) & ~c1))
         | (((~p[3] & ~p[2] & p[1]) ^ (g[2] & g[1]) ^ (p[3] & p[2])) & c1);
    s[3] = ((~m & n) & ~c1) ^ (((g[3] & ~h[3]) ^ (~h[3] & h[2] & h[1])) & c1);
    cout = m | (n & c1);
  end
endmodule
