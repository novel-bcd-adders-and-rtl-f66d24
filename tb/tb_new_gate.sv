// tb_new_gate: exhaustive self-checking test of the New Gate (NG).
// Compares the 8 output rows with the gate's truth table written out as a
// constant, checks that all rows differ (reversibility), and checks the two
// facts the reversible BCD adder relies on: Q = A B when C = 0, and
// R = (A | C) xor B for every input. Ends with a TB_RESULT line.
module tb_new_gate;
  logic a, b, c, p, q, r;
  int checks = 0, failures = 0;
  logic [7:0] seen;
  // expected {P,Q,R} for input {A,B,C} = 0..7, worked out by hand from
  // P = A, Q = AB xor C, R = A'C' xor B'
  localparam logic [2:0] TT [8] = '{3'b000, 3'b011, 3'b001, 3'b010,
                                    3'b101, 3'b111, 3'b110, 3'b100};

  new_gate dut (.a, .b, .c, .p, .q, .r);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seen = '0;
    for (int v = 0; v < 8; v++) begin
      {a, b, c} = 3'(v);
      #1;
      checks += 3;
      if ({p, q, r} !== TT[v]) begin
        failures++; $display("FAIL v=%0d got %b exp %b", v, {p, q, r}, TT[v]);
      end
      if (seen[{p, q, r}]) begin failures++; $display("FAIL repeat v=%0d", v); end
      seen[{p, q, r}] = 1'b1;
      if (r !== ((a | c) ^ b)) begin failures++; $display("FAIL R identity v=%0d", v); end
      if (c == 1'b0) begin
        checks++;
        if (q !== (a & b)) begin failures++; $display("FAIL AND use v=%0d", v); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
