// tb_tsg_gate: exhaustive self-checking test of the TSG gate.
// All 16 input patterns are applied; each output is compared with a truth
// table worked out by hand-coded case analysis, and the 16 output patterns
// must all differ (the gate is reversible). Also checks that with C = 0 the
// gate computes a full adder. Ends with a TB_RESULT line.
module tb_tsg_gate;
  logic a, b, c, d, p, q, r, s;
  int checks = 0, failures = 0;
  logic [15:0] seen;

  tsg_gate dut (.a, .b, .c, .d, .p, .q, .r, .s);

  function automatic logic ref_q(logic ra, logic rb, logic rc);
    // Q = A'C' xor B': when A or C is 1 the first term is 0 and Q = ~B,
    // otherwise Q = B
    return (ra || rc) ? !rb : rb;
  endfunction

  task automatic check(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%0b b=%0b c=%0b d=%0b got=%0b exp=%0b", what, a, b, c, d, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic eq, er, es;
    seen = '0;
    for (int v = 0; v < 16; v++) begin
      {a, b, c, d} = 4'(v);
      #1;
      eq = ref_q(a, b, c);
      er = (eq != d);
      es = (eq && d) != ((a && b) != c);
      check("P", p, a);
      check("Q", q, eq);
      check("R", r, er);
      check("S", s, es);
      checks++;
      if (seen[{p, q, r, s}]) begin
        failures++;
        $display("FAIL output pattern %b repeats", {p, q, r, s});
      end
      seen[{p, q, r, s}] = 1'b1;
      if (c == 1'b0) begin
        // full adder view: A + B + D = 2 S + R
        checks++;
        if (2 * int'(s) + int'(r) != int'(a) + int'(b) + int'(d)) begin
          failures++;
          $display("FAIL full-adder use a=%0b b=%0b d=%0b", a, b, d);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
