// rev_cs_bcd_adder: reversible implementation of the carry-skip one-digit BCD
// adder, built from 8 TSG gates, 6 Fredkin gates and 1 TS-3 gate (15 gates).
//
// Top row: four TSG full adders ripple a + b + cin into the binary sum z[3:0]
// and the carry c4; the Q output of each TSG (a[i] ^ b[i]) is reused as the
// bit propagate, so each top TSG leaves only one garbage output.
// Block propagate: three Fredkin gates with C = 0 form the AND of the four
// bit propagates, blk_p. Skip: a Fredkin gate with control blk_p selects
//   c_skip = blk_p ? cin : c4
// (a multiplexer, not the AND-OR of the irreversible version: both give the
// true carry, but this one passes cin as soon as blk_p = 1).
// Decimal carry: cout = c_skip ^ t1 ^ t2 in one TS-3 gate, where t1 and t2 must
// be disjoint and cover "binary sum above 9 without carry", that is z3(z2|z1).
// This module uses t1 = z3 z2 and t2 = z3 z2' z1, made by two Fredkin gates:
// F(a=z2, b=z3, c=0) gives z3 z2 on R and z3 z2' on Q, and
// F(a=z1, b=0, c=z3 z2') gives z3 z2' z1 on Q. c_skip = 1 only when z <= 3,
// so it never meets t1 or t2, and the 3-input XOR equals the 3-input OR.
// Departure from the published circuit: there t2 is z3 z1, and then the XOR
// gives cout = 0 for binary sums 14 and 15 (e.g. 7 + 7), which is wrong. The
// fix keeps 15 gates but leaves 26 garbage outputs instead of 27, because
// both data outputs of the first correction Fredkin are used.
// Bottom row: four TSG full adders add 0 cout cout 0 to z; their final carry
// is one more garbage output.
//
// garbage: [3:0] top TSG pass-through P; [9:4] AND4 Fredkins; [11:10] skip
// Fredkin; [12] correction Fredkin 1 P; [14:13] correction Fredkin 2 P and R;
// [16:15] TS-3 pass-throughs; [24:17] bottom TSG {P,Q}; [25] bottom carry.
// Combinational.
module rev_cs_bcd_adder
  import bcd_pkg::*;
(
  input  bcd_digit_t                  a,
  input  bcd_digit_t                  b,
  input  logic                        cin,
  output bcd_digit_t                  s,
  output logic                        cout,
  output logic                        blk_p,
  output logic [REV_CS_GARBAGE-1:0]   garbage
);
  logic [4:0] c;      // top-row carries; c[4] = C4
  logic [3:0] z;      // binary sum
  logic [3:0] pr;     // bit propagates a[i] ^ b[i] from the TSG Q outputs
  logic       p01, p012;
  logic       c_skip;
  logic       t1, z3_nz2, t2;
  logic [4:0] e;      // bottom-row carries
  logic [3:0] corr;

  assign c[0] = cin;
  for (genvar i = 0; i < 4; i++) begin : g_top
    tsg_full_adder u_fa (
      .a(a[i]), .b(b[i]), .cin(c[i]),
      .sum(z[i]), .cout(c[i+1]), .prop(pr[i]), .pass_a(garbage[i])
    );
  end

  // AND4 of the bit propagates: three Fredkin gates, R = A B when C = 0
  fredkin_gate u_f_and01  (.a(pr[0]), .b(pr[1]), .c(1'b0), .p(garbage[4]), .q(garbage[5]), .r(p01));
  fredkin_gate u_f_and012 (.a(pr[2]), .b(p01),   .c(1'b0), .p(garbage[6]), .q(garbage[7]), .r(p012));
  fredkin_gate u_f_and    (.a(pr[3]), .b(p012),  .c(1'b0), .p(garbage[8]), .q(garbage[9]), .r(blk_p));

  // carry skip: Q = blk_p' c4 + blk_p cin
  fredkin_gate u_f_skip (.a(blk_p), .b(c[4]), .c(cin), .p(garbage[10]), .q(c_skip), .r(garbage[11]));

  // decimal carry terms
  fredkin_gate u_f_t1 (.a(z[2]), .b(z[3]), .c(1'b0),   .p(garbage[12]), .q(z3_nz2), .r(t1));
  fredkin_gate u_f_t2 (.a(z[1]), .b(1'b0), .c(z3_nz2), .p(garbage[13]), .q(t2),     .r(garbage[14]));
  ts3_gate     u_ts3  (.a(t1), .b(t2), .c(c_skip), .p(garbage[15]), .q(garbage[16]), .r(cout));

  assign corr = {1'b0, cout, cout, 1'b0};
  assign e[0] = 1'b0;
  for (genvar i = 0; i < 4; i++) begin : g_bot
    tsg_full_adder u_fa (
      .a(z[i]), .b(corr[i]), .cin(e[i]),
      .sum(s[i]), .cout(e[i+1]), .prop(garbage[17+2*i]), .pass_a(garbage[17+2*i+1])
    );
  end
  assign garbage[25] = e[4];
endmodule
