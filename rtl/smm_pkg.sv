// smm_pkg: constants shared by the sign-magnitude multiplier blocks.
//
// OP_W is the operand width. Four bits is the width the whole design is
// built and characterised for; every block takes its width as a parameter
// with this default, and the product is always 2*OP_W bits wide.
//
// Operand formats used across the blocks (3-bit example values in brackets):
//   TC   two's complement                     (-4..3)
//   TCS  two's complement, symmetric range     (-3..3, code 100 illegal)
//   SM   sign-magnitude, no negative zero      (-3..3, code 100 illegal)
//   SME  sign-magnitude extended: the unused negative-zero code 100 of SM
//        is given the value -4, so the full TC range is covered.
package smm_pkg;
  localparam int unsigned OP_W = 4;
endpackage
