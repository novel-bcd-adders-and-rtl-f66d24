// new_gate: the 3x3 reversible "New Gate" (NG).
//
//   P = A
//   Q = A B ^ C
//   R = A'C' ^ B'
// With C = 0, Q is the AND of A and B. With A = x, B = k, C = y, R equals
// (x | y) ^ k, which is the OR of x, y and k whenever k excludes x and y; the
// reversible conventional BCD adder uses both forms. These equations are the
// standard published definition of the gate; the BCD adder description only
// names it. Combinational.
module new_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  always_comb begin
    p = a;
    q = (a & b) ^ c;
    r = (~a & ~c) ^ ~b;
  end
endmodule
