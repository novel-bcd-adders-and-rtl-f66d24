// tb_cla_bcd_adder: exhaustive self-checking test of cla_bcd_adder.
// Applies all 10 x 10 x 2 BCD operand and carry-in combinations and compares
// the sum digit and decimal carry with integer arithmetic:
//   sum = (a + b + cin) mod 10, cout = (a + b + cin) >= 10.
// Counts how often a decimal correction (binary sum above 9) happened.
// Ends with a TB_RESULT line.
module tb_cla_bcd_adder
  import bcd_pkg::*;
;
  bcd_digit_t a, b, s;
  logic       cin, cout;
  int checks = 0, failures = 0;
  int n_corrections = 0;

  cla_bcd_adder dut (.a, .b, .cin, .s, .cout);

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int total;
    for (int x = 0; x < 10; x++)
      for (int y = 0; y < 10; y++)
        for (int ci = 0; ci < 2; ci++) begin
          a = bcd_digit_t'(x);
          b = bcd_digit_t'(y);
          cin = logic'(ci);
          #1;
          total = x + y + ci;
          if (total > 9) n_corrections++;
          checks += 2;
          if (s !== bcd_digit_t'(total % 10)) begin
            failures++;
            $display("FAIL sum %0d+%0d+%0d: got %0d exp %0d", x, y, ci, s, total % 10);
          end
          if (cout !== (total >= 10)) begin
            failures++;
            $display("FAIL cout %0d+%0d+%0d: got %0b", x, y, ci, cout);
          end
        end
    checks++;
    if (n_corrections == 0) failures++;
    $display("corrections=%0d", n_corrections);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
