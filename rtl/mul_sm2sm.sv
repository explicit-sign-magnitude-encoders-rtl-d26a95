// mul_sm2sm: sign-magnitude operands in, sign-magnitude product out.
//
// Function: p_sm = a * b with a, b W-bit sign-magnitude values in
// -(2^(W-1)-1) .. 2^(W-1)-1 and p_sm the 2W-bit sign-magnitude product:
// bit 2W-1 is the sign, bits 2W-2:0 the magnitude. A zero product always
// has sign 0, as no format in this design has a negative zero. The input
// code {1,0..0} is outside the input space and is read as zero.
//
// How it works: a (W-1)x(W-1) unsigned multiplier on the magnitudes and
// an XOR of the signs, gated to 0 when the magnitude product is zero. No
// conversion stage follows, which is what makes this the smallest of the
// multipliers.
//
// Interface: a_sm, b_sm in, p_sm out, purely combinational. An immediate
// assertion (simulation only) flags a negative-zero product. Bit 2W-2 of
// p_sm is always 0: the largest magnitude, (2^(W-1)-1)^2, needs only 2W-2
// bits; it is kept so the product has the 2W bits of the other multipliers.
//
// The SM-in/SM-out variant is one the paper evaluates; its gate structure
// and the zero-sign gating are this design's own.
module mul_sm2sm #(
  parameter int unsigned W = smm_pkg::OP_W
) (
  input  logic [W-1:0]   a_sm,
  input  logic [W-1:0]   b_sm,
  output logic [2*W-1:0] p_sm
);
  logic [2*W-3:0] mag;

  always_comb begin
    mag  = (2*W-2)'(a_sm[W-2:0]) * (2*W-2)'(b_sm[W-2:0]);
    p_sm = {(a_sm[W-1] ^ b_sm[W-1]) && (mag != '0), 1'b0, mag};
  end

  // Format rule: no negative zero on the product.
  always_comb
    assert (p_sm != {1'b1, {(2*W-1){1'b0}}})
      else $error("mul_sm2sm: negative zero on output");
endmodule
