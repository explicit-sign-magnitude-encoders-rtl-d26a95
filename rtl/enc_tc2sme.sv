// enc_tc2sme: two's complement to sign-magnitude-extended operand encoder.
//
// Function: takes a W-bit two's complement value x and returns the W-bit
// SME code {sign, |x|}. The most negative value -2^(W-1) has no magnitude
// in W-1 bits; SME gives it the code {1, 0...0}, which plain sign-magnitude
// leaves unused because there is no negative zero.
//
// How it works: the magnitude is the low W-1 bits of (sign ? -x : x),
// computed on the low W-1 input bits only (negation never lets a higher
// bit reach lower ones).
// For the most negative value -x wraps back to x, whose low bits are all
// zero, so the {1,0..0} code comes out without a special case.
//
// The same module is the TCS->SM encoder: on the symmetric TCS range
// (-(2^(W-1)-1) .. 2^(W-1)-1) SME and SM codes coincide, and the illegal
// TCS code {1,0..0} lands on the illegal SM code {1,0..0}.
//
// Interface: tc_i in, sm_o out, purely combinational (zero latency).
//
// The mapping (Table of formats) and the sharing of one encoder for
// TC->SME and TCS->SM follow the paper; the negate-and-truncate circuit
// is this design's own simplest form of it.
module enc_tc2sme #(
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
    sm_o     = {sign, mag};
  end
endmodule
