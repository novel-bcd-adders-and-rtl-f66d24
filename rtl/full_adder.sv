// full_adder: a plain (irreversible) one-bit full adder, the "FA" cell of the
// carry-skip BCD adder. sum = a ^ b ^ cin; cout = majority(a, b, cin).
// Combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);
  always_comb begin
    sum  = a ^ b ^ cin;
    cout = (a & b) | (cin & (a ^ b));
  end
endmodule
