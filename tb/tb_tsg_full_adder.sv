// tb_tsg_full_adder: exhaustive self-checking test of the one-gate TSG full
// adder. For all 8 input patterns: sum and cout against integer addition,
// prop against a xor b, pass_a against a. Ends with a TB_RESULT line.
module tb_tsg_full_adder;
  logic a, b, cin, sum, cout, prop, pass_a;
  int checks = 0, failures = 0;

  tsg_full_adder dut (.a, .b, .cin, .sum, .cout, .prop, .pass_a);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total;
    for (int v = 0; v < 8; v++) begin
      {a, b, cin} = 3'(v);
      #1;
      total = int'(a) + int'(b) + int'(cin);
      checks += 4;
      if (sum !== logic'(total % 2)) begin failures++; $display("FAIL sum v=%0d", v); end
      if (cout !== logic'(total / 2)) begin failures++; $display("FAIL cout v=%0d", v); end
      if (prop !== (a != b)) begin failures++; $display("FAIL prop v=%0d", v); end
      if (pass_a !== a) begin failures++; $display("FAIL pass_a v=%0d", v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
