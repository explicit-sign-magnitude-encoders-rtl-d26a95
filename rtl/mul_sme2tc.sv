// mul_sme2tc: sign-magnitude-extended operands in, two's complement out.
//
// Function: p_tc = a * b over the full W-bit range -2^(W-1) .. 2^(W-1)-1
// (-8..7 for W=4), operands in SME, product in 2W-bit two's complement.
// It is numerically identical to a W-bit signed multiplier.
//
// How it works: it is the SM->TC multiplier with one addition. The SME code
// {1,0..0} stands for -2^(W-1), whose magnitude does not fit in W-1 bits.
// Instead of widening the unsigned core, that operand is replaced by
// 2^(W-2) (4 for W=4) and the core's product is shifted left by one
// place; each such operand adds one place. Example for W=4:
// -8 * 3 -> 4 * 3 = 12 -> 24 -> -24, and -8 * -8 -> 4 * 4 = 16 -> 64.
// The core thus stays (W-1)x(W-1) bits. The sign is the XOR of the
// operand signs and a negative result is inverted and incremented.
//
// Interface: a_sme, b_sme in, p_tc out, purely combinational.
//
// The replace-and-shift scheme follows the paper. The shift for two
// most-negative operands (by two places) is this design's reading of it.
module mul_sme2tc #(
  parameter int unsigned W = smm_pkg::OP_W
) (
  input  logic [W-1:0]   a_sme,
  input  logic [W-1:0]   b_sme,
  output logic [2*W-1:0] p_tc
);
  localparam logic [W-2:0] HALF = (W-1)'(1) << (W-2);   // 2^(W-2)

  logic           a_min, b_min;   // operand is the most negative value
  logic [W-2:0]   a_mag, b_mag;
  logic           sign;
  logic [2*W-3:0] core;
  logic [2*W-1:0] mag;

  always_comb begin
    a_min = a_sme[W-1] && (a_sme[W-2:0] == '0);
    b_min = b_sme[W-1] && (b_sme[W-2:0] == '0);
    a_mag = a_min ? HALF : a_sme[W-2:0];
    b_mag = b_min ? HALF : b_sme[W-2:0];
    sign  = a_sme[W-1] ^ b_sme[W-1];
    core  = (2*W-2)'(a_mag) * (2*W-2)'(b_mag);
    mag   = (2*W)'(core) << (2'(a_min) + 2'(b_min));
    p_tc  = sign ? (~mag + (2*W)'(1)) : mag;
  end
endmodule
