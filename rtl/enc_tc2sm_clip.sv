// enc_tc2sm_clip: two's complement to sign-magnitude encoder with clipping.
//
// Function: takes a W-bit two's complement value x and returns the W-bit
// sign-magnitude code of x. The most negative value -2^(W-1) cannot be
// written in sign-magnitude; it is clipped to -(2^(W-1)-1), i.e. -8 becomes
// -7 for W=4. The output therefore never carries the illegal SM code
// {1,0..0}.
//
// How it works: the TC->SME conversion (negate when negative, keep the low
// W-1 bits) is followed by the clip: if the sign is set and the magnitude
// came out zero, which only happens for the most negative input, all
// magnitude bits are forced to one.
//
// Interface: tc_i in, sm_o out, purely combinational. An immediate
// assertion (simulation only) flags the illegal SM code on the output.
//
// The clipping of -8 to -7 inside the encoder follows the paper; the gate
// structure is this design's own.
module enc_tc2sm_clip #(
  parameter int unsigned W = smm_pkg::OP_W
) (
  input  logic [W-1:0] tc_i,
  output logic [W-1:0] sm_o
);
  logic         sign;
  logic [W-2:0] mag;

  always_comb begin
    sign     = tc_i[W-1];
    mag      = sign ? (~tc_i[W-2:0] + (W-1)'(1)) : tc_i[W-2:0];
    if (sign && (mag == '0)) mag = '1;   // -2^(W-1) -> -(2^(W-1)-1)
    sm_o     = {sign, mag};
  end

  // Format rule: sign-magnitude has no negative zero, so the code 10..0
  // must never leave this encoder.
  always_comb
    assert (sm_o != {1'b1, {(W-1){1'b0}}})
      else $error("enc_tc2sm_clip: illegal SM code on output");
endmodule
