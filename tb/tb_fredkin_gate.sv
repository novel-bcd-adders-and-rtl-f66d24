// tb_fredkin_gate: exhaustive self-checking test of the Fredkin gate.
// For all 8 inputs: P = A; B and C pass when A = 0 and swap when A = 1; the
// number of ones is conserved; all output rows differ. Also checks the AND
// use (C = 0 gives R = A B) and the multiplexer use (Q = A ? C : B).
// Ends with a TB_RESULT line.
module tb_fredkin_gate;
  logic a, b, c, p, q, r;
  int checks = 0, failures = 0;
  logic [7:0] seen;

  fredkin_gate dut (.a, .b, .c, .p, .q, .r);

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
      checks += 4;
      if (p !== a) begin failures++; $display("FAIL P v=%0d", v); end
      if ({q, r} !== (a ? {c, b} : {b, c})) begin failures++; $display("FAIL swap v=%0d", v); end
      if ($countones({p, q, r}) != $countones({a, b, c})) begin
        failures++; $display("FAIL ones v=%0d", v);
      end
      if (seen[{p, q, r}]) begin failures++; $display("FAIL repeat v=%0d", v); end
      seen[{p, q, r}] = 1'b1;
      if (c == 1'b0) begin
        checks++;
        if (r !== (a & b)) begin failures++; $display("FAIL AND use v=%0d", v); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
