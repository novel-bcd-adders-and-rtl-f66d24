// fredkin_gate: the 3x3 reversible Fredkin gate (controlled swap).
//
//   P = A
//   Q = A'B + A C
//   R = A'C + A B
// When A = 0, B and C pass straight; when A = 1 they are swapped. With C = 0,
// R = A B (an AND gate with two garbage outputs). With A = select it is a 2:1
// multiplexer on Q, which the reversible carry-skip adder uses as its skip
// logic. Standard definition of the gate. Combinational.
module fredkin_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  always_comb begin
    p = a;
    q = (~a & b) | (a & c);
    r = (~a & c) | (a & b);
  end
endmodule
