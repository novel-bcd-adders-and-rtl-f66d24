// tb_ts3_gate: exhaustive self-checking test of the TS-3 gate.
// For all 8 input patterns: P = A, Q = B, R = parity of the three inputs
// (counted as an integer sum), and all 8 output patterns distinct.
// Ends with a TB_RESULT line.
module tb_ts3_gate;
  logic a, b, c, p, q, r;
  int checks = 0, failures = 0;
  logic [7:0] seen;

  ts3_gate dut (.a, .b, .c, .p, .q, .r);

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
      if (q !== b) begin failures++; $display("FAIL Q v=%0d", v); end
      if (r !== logic'((int'(a) + int'(b) + int'(c)) % 2)) begin
        failures++; $display("FAIL R v=%0d", v);
      end
      if (seen[{p, q, r}]) begin failures++; $display("FAIL repeat v=%0d", v); end
      seen[{p, q, r}] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
