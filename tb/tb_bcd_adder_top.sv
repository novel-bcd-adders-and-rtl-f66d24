// tb_bcd_adder_top: end-to-end self-checking test of the NDIGITS-digit BCD
// adder, at the default size (34 digits).
//
// Each operand pair is applied once per architecture select. The expected sum
// is computed digit by digit with integer arithmetic in the testbench; the
// expected block-propagate bits are (a[d] ^ b[d]) == 4'b1111. Operands are
// random BCD digits, random digits biased towards 9s and skip pairs, and
// directed cases: 99..9 + 00..0 with carry in (a carry through every digit),
// 66..6 + 99..9 (every digit skips), and single-digit sums of 14 and 15.
// Counted mechanisms, each of which must occur at least once: every
// architecture selected, a decimal correction, a skipped digit, a carry
// rippling through all digits, a carry out of the top digit, a digit sum of
// 14 or 15 without carry in. A last phase adds 7-digit and 16-digit operands
// (the decimal32 and decimal64 significand lengths) in the low digits and
// counts carries out of them. Ends with a TB_RESULT line.
module tb_bcd_adder_top
  import bcd_pkg::*;
;
  localparam int unsigned N = 34;

  bcd_digit_t [N-1:0] a, b, sum;
  logic               cin, cout;
  adder_arch_e        arch;
  logic       [N-1:0] skip_cs, skip_rev_cs;

  int checks = 0, failures = 0;
  int n_arch [4];
  localparam int unsigned WIDTHS [2] = '{7, 16};
  int n_short_cout [2] = '{0, 0};
  int n_corr = 0, n_skip = 0, n_full_chain = 0, n_cout = 0, n_1415 = 0;

  bcd_adder_top dut (.a, .b, .cin, .arch, .sum, .cout, .skip_cs, .skip_rev_cs);

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected result and mechanism counts for the current a, b, cin
  task automatic apply_all_archs();
    bcd_digit_t [N-1:0] exp_sum;
    logic       [N-1:0] exp_skip;
    int c, t, run, longest;
    c = int'(cin);
    run = 0;
    longest = 0;
    for (int d = 0; d < N; d++) begin
      t = int'(a[d]) + int'(b[d]) + c;
      if (int'(a[d]) + int'(b[d]) >= 14 && c == 0) n_1415++;
      exp_sum[d] = bcd_digit_t'(t % 10);
      exp_skip[d] = ((a[d] ^ b[d]) == 4'b1111);
      if (t >= 10) n_corr++;
      c = (t >= 10) ? 1 : 0;
      run = (c != 0) ? run + 1 : 0;
      if (run > longest) longest = run;
    end
    if (longest >= N) n_full_chain++;
    if (c != 0) n_cout++;
    n_skip += $countones(exp_skip);
    for (int k = 0; k < 4; k++) begin
      arch = adder_arch_e'(k);
      #1;
      n_arch[k]++;
      checks += 4;
      if (sum !== exp_sum) begin
        failures++;
        $display("FAIL arch=%s sum\n  a=%h\n  b=%h cin=%0b\n  got=%h\n  exp=%h",
                 arch.name(), a, b, cin, sum, exp_sum);
      end
      if (cout !== logic'(c)) begin
        failures++;
        $display("FAIL arch=%s cout got %0b exp %0d", arch.name(), cout, c);
      end
      if (skip_cs !== exp_skip) begin failures++; $display("FAIL skip_cs"); end
      if (skip_rev_cs !== exp_skip) begin failures++; $display("FAIL skip_rev_cs"); end
    end
  endtask

  function automatic bcd_digit_t rand_digit(int mode);
    int r;
    if (mode == 0) return bcd_digit_t'($urandom_range(9));
    r = $urandom_range(9);
    if (r < 4) return 4'd9;
    return bcd_digit_t'($urandom_range(9));
  endfunction

  initial begin
    foreach (n_arch[k]) n_arch[k] = 0;

    // 99..9 + 00..0 + 1: carry through every digit, carry out
    for (int d = 0; d < N; d++) begin a[d] = 4'd9; b[d] = 4'd0; end
    cin = 1'b1;
    apply_all_archs();
    // 66..6 + 99..9: every digit has block propagate 1
    for (int d = 0; d < N; d++) begin a[d] = 4'd6; b[d] = 4'd9; end
    cin = 1'b0;
    apply_all_archs();
    cin = 1'b1;
    apply_all_archs();
    // 7 + 7 and 7 + 8 in every digit: binary digit sums 14 and 15
    for (int d = 0; d < N; d++) begin a[d] = 4'd7; b[d] = (d % 2 != 0) ? 4'd7 : 4'd8; end
    cin = 1'b0;
    apply_all_archs();

    // random operands
    for (int i = 0; i < 3000; i++) begin
      for (int d = 0; d < N; d++) begin
        a[d] = rand_digit(i % 2);
        b[d] = rand_digit(i % 2);
      end
      if (i % 3 == 2) begin
        // plant skip pairs
        for (int d = 0; d < N; d += 3) begin
          a[d] = 4'(6 + $urandom_range(3));
          b[d] = 4'd15 - a[d];
        end
      end
      cin = logic'($urandom_range(1));
      apply_all_archs();
    end

    // decimal32 and decimal64 significands (7 and 16 digits) in the low digits
    // of the 34-digit adder: the carry out of the short operand must appear
    // as a 1 in the digit just above it
    foreach (WIDTHS[w]) begin
      for (int i = 0; i < 500; i++) begin
        for (int d = 0; d < N; d++) begin
          a[d] = (d < WIDTHS[w]) ? rand_digit(1) : 4'd0;
          b[d] = (d < WIDTHS[w]) ? rand_digit(1) : 4'd0;
        end
        cin = logic'($urandom_range(1));
        apply_all_archs();
        checks++;
        if (sum[WIDTHS[w]] > 4'd1) begin failures++; $display("FAIL short carry digit"); end
        if (sum[WIDTHS[w]] == 4'd1) n_short_cout[w]++;
      end
    end

    $display("short significands: 7-digit carries out=%0d 16-digit carries out=%0d",
             n_short_cout[0], n_short_cout[1]);
    checks += 2;
    if (n_short_cout[0] == 0) begin failures++; $display("FAIL no 7-digit carry out"); end
    if (n_short_cout[1] == 0) begin failures++; $display("FAIL no 16-digit carry out"); end
    $display("arch uses: CLA=%0d CS=%0d REV_CONV=%0d REV_CS=%0d",
             n_arch[0], n_arch[1], n_arch[2], n_arch[3]);
    $display("decimal corrections=%0d skipped digits=%0d full carry chains=%0d couts=%0d sums14/15=%0d",
             n_corr, n_skip, n_full_chain, n_cout, n_1415);
    foreach (n_arch[k]) begin
      checks++;
      if (n_arch[k] == 0) begin failures++; $display("FAIL arch %0d never selected", k); end
    end
    checks += 5;
    if (n_corr == 0)       begin failures++; $display("FAIL no decimal correction"); end
    if (n_skip == 0)       begin failures++; $display("FAIL no skipped digit"); end
    if (n_full_chain == 0) begin failures++; $display("FAIL no full carry chain"); end
    if (n_cout == 0)       begin failures++; $display("FAIL no carry out"); end
    if (n_1415 == 0)       begin failures++; $display("FAIL no digit sum of 14 or 15"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
