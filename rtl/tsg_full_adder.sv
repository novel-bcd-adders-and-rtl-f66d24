// tsg_full_adder: a single TSG gate wired as a full adder.
//
// Inputs A = a, B = b, C = 0 and D = cin. With C = 0 the TSG outputs become
//   P = a            (pass-through, garbage unless reused)
//   Q = a ^ b        (half-sum; the carry-skip adders reuse it as propagate)
//   R = a ^ b ^ cin  (sum)
//   S = (a ^ b) cin ^ a b  (carry out)
// so one reversible gate gives a full adder with two garbage outputs.
// Combinational.
module tsg_full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout,
  output logic prop,
  output logic pass_a
);
  tsg_gate u_tsg (
    .a(a), .b(b), .c(1'b0), .d(cin),
    .p(pass_a), .q(prop), .r(sum), .s(cout)
  );
endmodule
