// ts3_gate: the 3x3 reversible TS-3 gate.
//
// Two inputs pass straight through (P = A, Q = B), which also gives free
// fan-out of A and B, and the third output is the three-input parity
// R = A ^ B ^ C. Knowing A and B, C is recovered from R, so the gate is
// reversible. The reversible carry-skip BCD adder uses it as its 3-input
// XOR that forms the decimal carry. Combinational.
module ts3_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  always_comb begin
    p = a;
    q = b;
    r = a ^ b ^ c;
  end
endmodule
