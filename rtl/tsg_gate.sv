// tsg_gate: the 4x4 reversible TS gate (TSG).
//
// One input passes straight through (P = A); the other three outputs are
//   Q = A'C' ^ B'
//   R = Q ^ D
//   S = (Q & D) ^ (A B ^ C)
// The mapping from (A,B,C,D) to (P,Q,R,S) is one-to-one, so the gate is
// reversible. With C tied to 0 it is a full adder (see tsg_full_adder).
// Purely combinational; the equations are the ones printed for the gate.
module tsg_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  input  logic d,
  output logic p,
  output logic q,
  output logic r,
  output logic s
);
  always_comb begin
    p = a;
    q = (~a & ~c) ^ ~b;
    r = q ^ d;
    s = (q & d) ^ ((a & b) ^ c);
  end
endmodule
