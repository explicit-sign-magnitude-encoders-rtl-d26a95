// mul_sm2tc: sign-magnitude operands in, two's complement product out.
//
// Function: p_tc = a * b, where a and b are W-bit sign-magnitude values in
// -(2^(W-1)-1) .. 2^(W-1)-1 and p_tc is the 2W-bit two's complement product.
// The SM code {1,0..0} (negative zero) is outside the input space; it is
// read as zero and gives a zero product.
//
// How it works: the two (W-1)-bit magnitudes go through an unsigned
// (W-1)x(W-1) multiplier (3b x 3b for W=4), the product sign is the XOR of
// the operand signs, and a negative result is converted to two's complement
// by inverting every bit and adding one. A zero magnitude stays zero after
// that conversion, so no negative zero can appear.
//
// Interface: a_sm, b_sm in, p_tc out, purely combinational.
//
// This structure is the one the paper describes for its SM->TC multiplier.
module mul_sm2tc #(
  parameter int unsigned W = smm_pkg::OP_W
) (
  input  logic [W-1:0]   a_sm,
  input  logic [W-1:0]   b_sm,
  output logic [2*W-1:0] p_tc
);
  logic           sign;
  logic [2*W-3:0] mag;     // (W-1) x (W-1) unsigned product
  logic [2*W-1:0] mag_ext;

  always_comb begin
    sign    = a_sm[W-1] ^ b_sm[W-1];
    mag     = (2*W-2)'(a_sm[W-2:0]) * (2*W-2)'(b_sm[W-2:0]);
    mag_ext = (2*W)'(mag);
    p_tc    = sign ? (~mag_ext + (2*W)'(1)) : mag_ext;
  end
endmodule
