// bcd_adder_top: NDIGITS-digit BCD significand adder with four selectable
// one-digit adder architectures.
//
// Decimal floating-point significands of 7, 16 or 34 BCD digits are added
// digit by digit: each digit adder takes two BCD digits and the decimal carry
// of the digit below, and passes its own carry to the digit above. This top
// builds one such chain for each of the four one-digit architectures
//   ARCH_CLA      cla_bcd_adder     carry look-ahead, XOR-based equations
//   ARCH_CS       cs_bcd_adder      carry skip, AND-OR skip logic
//   ARCH_REV_CONV rev_bcd_adder     reversible conventional (TSG + NG)
//   ARCH_REV_CS   rev_cs_bcd_adder  reversible carry skip (TSG + Fredkin + TS-3)
// and the arch input chooses which chain drives sum and cout. In the
// carry-skip chains a digit whose block propagate is 1 hands its carry in
// straight to the next digit.
//
// Interface: a and b hold NDIGITS BCD digits, digit 0 least significant;
// cin is the carry into digit 0. sum and cout come from the selected chain.
// The outputs of the carry-skip chains' block-propagate signals are brought out
// as skip_cs and skip_rev_cs, one bit per digit. Digits must be 0..9.
// Combinational, no clock. NDIGITS = 34 (the longest decimal significand) and
// the run-time select are this design's choices; the one-digit adders follow
// the published ones except where their own headers say otherwise.
module bcd_adder_top
  import bcd_pkg::*;
#(
  parameter int unsigned NDIGITS = 34
) (
  input  bcd_digit_t [NDIGITS-1:0] a,
  input  bcd_digit_t [NDIGITS-1:0] b,
  input  logic                     cin,
  input  adder_arch_e              arch,
  output bcd_digit_t [NDIGITS-1:0] sum,
  output logic                     cout,
  output logic       [NDIGITS-1:0] skip_cs,
  output logic       [NDIGITS-1:0] skip_rev_cs
);
  bcd_digit_t [NDIGITS-1:0] s_cla, s_cs, s_rconv, s_rcs;
  logic       [NDIGITS:0]   c_cla, c_cs, c_rconv, c_rcs;
  // garbage outputs of the reversible digits: produced by the reversible
  // gates but by definition not used further
  logic [NDIGITS-1:0][REV_CONV_GARBAGE-1:0] g_rconv;
  logic [NDIGITS-1:0][REV_CS_GARBAGE-1:0]   g_rcs;

  assign c_cla[0]   = cin;
  assign c_cs[0]    = cin;
  assign c_rconv[0] = cin;
  assign c_rcs[0]   = cin;

  for (genvar d = 0; d < NDIGITS; d++) begin : g_digit
    cla_bcd_adder u_cla (
      .a(a[d]), .b(b[d]), .cin(c_cla[d]), .s(s_cla[d]), .cout(c_cla[d+1])
    );
    cs_bcd_adder u_cs (
      .a(a[d]), .b(b[d]), .cin(c_cs[d]), .s(s_cs[d]), .cout(c_cs[d+1]),
      .blk_p(skip_cs[d])
    );
    rev_bcd_adder u_rconv (
      .a(a[d]), .b(b[d]), .cin(c_rconv[d]), .s(s_rconv[d]), .cout(c_rconv[d+1]),
      .garbage(g_rconv[d])
    );
    rev_cs_bcd_adder u_rcs (
      .a(a[d]), .b(b[d]), .cin(c_rcs[d]), .s(s_rcs[d]), .cout(c_rcs[d+1]),
      .blk_p(skip_rev_cs[d]), .garbage(g_rcs[d])
    );
  end

  always_comb begin
    unique case (arch)
      ARCH_CLA:      begin sum = s_cla;   cout = c_cla[NDIGITS];   end
      ARCH_CS:       begin sum = s_cs;    cout = c_cs[NDIGITS];    end
      ARCH_REV_CONV: begin sum = s_rconv; cout = c_rconv[NDIGITS]; end
      ARCH_REV_CS:   begin sum = s_rcs;   cout = c_rcs[NDIGITS];   end
      default:       begin sum = s_cla;   cout = c_cla[NDIGITS];   end
    endcase
  end
endmodule
