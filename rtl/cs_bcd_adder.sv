// cs_bcd_adder: one-digit carry-skip BCD adder.
//
// First level: four full adders ripple a + b + cin into the binary sum z[3:0]
// and the carry c4. In parallel, the block propagate signal
//   blk_p = &(a ^ b)
// says that every bit would pass its carry on, so the block carry equals cin.
// The skip logic c_skip = c4 | (blk_p & cin) (AND-OR) lets cin reach the
// decimal carry logic without waiting for the ripple when blk_p = 1.
// The decimal carry is then
//   cout = c_skip | z3 z2 | z3 z1   (binary sum above 9),
// and a second row of four full adders adds 0110 (cout in bits 1 and 2) to z;
// its own carry out is dropped. Structure as in the published block diagram;
// this module is combinational, and its timing advantage exists only in a
// gate-level implementation. Inputs must be BCD (0..9).
module cs_bcd_adder
  import bcd_pkg::*;
(
  input  bcd_digit_t a,
  input  bcd_digit_t b,
  input  logic       cin,
  output bcd_digit_t s,
  output logic       cout,
  output logic       blk_p
);
  logic [4:0] c;      // first-level carries, c[0] = cin, c[4] = C4
  logic [3:0] z;      // first-level binary sum
  logic [4:0] k;      // second-level carries (k[4] unused)
  logic [3:0] corr;   // 0110 when a decimal carry occurs
  logic       c_skip;

  assign c[0] = cin;
  for (genvar i = 0; i < 4; i++) begin : g_lvl1
    full_adder u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(z[i]), .cout(c[i+1]));
  end

  always_comb begin
    blk_p  = &(a ^ b);
    c_skip = c[4] | (blk_p & cin);
    cout   = c_skip | (z[3] & z[2]) | (z[3] & z[1]);
    corr   = {1'b0, cout, cout, 1'b0};
  end

  assign k[0] = 1'b0;
  for (genvar i = 0; i < 4; i++) begin : g_lvl2
    full_adder u_fa (.a(z[i]), .b(corr[i]), .cin(k[i]), .sum(s[i]), .cout(k[i+1]));
  end
endmodule
