// rev_bcd_adder: reversible implementation of the conventional one-digit BCD
// adder, built from 8 TSG gates and 3 New Gates (NG), with 22 garbage outputs.
//
// Top row: four TSG full adders ripple a + b + cin into the binary sum z[3:0]
// and the carry k. Decimal carry detection: the binary sum is above 9 when
//   cout = k | z3 z2 | z3 z1.
// NG(a=z3, b=z2, c=0) gives x = z3 z2 on its Q output and NG(a=z3, b=z1, c=0)
// gives y = z3 z1. A third NG(a=x, b=k, c=y) gives R = x'y' ^ k' = (x|y) ^ k,
// which equals the OR of all three because k = 1 only when z <= 3, so k never
// meets x or y. Bottom row: four TSG full adders add 0 cout cout 0 (that is,
// 6 or 0) to z with carry in 0; their final carry is ignored.
//
// The gate count (11) and garbage count (22: the two pass/half-sum outputs of
// each of the 8 TSGs and two outputs of each NG) follow the published
// circuit. Which NG pins carry which signal is this design's choice; the
// drawing only shows three NGs fed by k, z3, z2, z1 and constants 0.
// garbage[2i+1:2i] hold {P, Q} of top-row TSG i, garbage[8+2i+1:8+2i] of
// bottom-row TSG i, garbage[21:16] the NG leftovers. Combinational.
module rev_bcd_adder
  import bcd_pkg::*;
(
  input  bcd_digit_t                    a,
  input  bcd_digit_t                    b,
  input  logic                          cin,
  output bcd_digit_t                    s,
  output logic                          cout,
  output logic [REV_CONV_GARBAGE-1:0]   garbage
);
  logic [4:0] c;      // top-row carries; c[4] is the binary carry k
  logic [3:0] z;      // binary sum
  logic [4:0] e;      // bottom-row carries; e[4] is C4, ignored
  logic [3:0] corr;
  logic       x, y;

  assign c[0] = cin;
  for (genvar i = 0; i < 4; i++) begin : g_top
    tsg_full_adder u_fa (
      .a(a[i]), .b(b[i]), .cin(c[i]),
      .sum(z[i]), .cout(c[i+1]), .prop(garbage[2*i]), .pass_a(garbage[2*i+1])
    );
  end

  // decimal carry detection: three New Gates
  new_gate u_ng_z3z2 (.a(z[3]), .b(z[2]), .c(1'b0), .p(garbage[17]), .q(x), .r(garbage[18]));
  new_gate u_ng_z3z1 (.a(z[3]), .b(z[1]), .c(1'b0), .p(garbage[19]), .q(y), .r(garbage[20]));
  new_gate u_ng_cout (.a(x), .b(c[4]), .c(y), .p(garbage[16]), .q(garbage[21]), .r(cout));

  assign corr = {1'b0, cout, cout, 1'b0};
  assign e[0] = 1'b0;
  for (genvar i = 0; i < 4; i++) begin : g_bot
    tsg_full_adder u_fa (
      .a(z[i]), .b(corr[i]), .cin(e[i]),
      .sum(s[i]), .cout(e[i+1]), .prop(garbage[8+2*i]), .pass_a(garbage[8+2*i+1])
    );
  end
endmodule
