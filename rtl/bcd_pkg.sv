// bcd_pkg: types shared by the BCD adders and the multi-digit top.
//
// A BCD digit is four bits holding 0..9 in plain binary. The top can run any of
// the four one-digit adder architectures; adder_arch_e names them. The encoding
// of that select is this design's own choice.
package bcd_pkg;

  typedef logic [3:0] bcd_digit_t;

  // Which one-digit adder architecture the top routes to its outputs.
  typedef enum logic [1:0] {
    ARCH_CLA      = 2'd0,  // carry look-ahead BCD adder (equation form)
    ARCH_CS       = 2'd1,  // carry-skip BCD adder (AND-OR skip logic)
    ARCH_REV_CONV = 2'd2,  // reversible conventional BCD adder (TSG + NG)
    ARCH_REV_CS   = 2'd3   // reversible carry-skip BCD adder (TSG + Fredkin + TS-3)
  } adder_arch_e;

  // Garbage output counts of the two reversible adders.
  localparam int unsigned REV_CONV_GARBAGE = 22;
  localparam int unsigned REV_CS_GARBAGE   = 26;

endpackage
