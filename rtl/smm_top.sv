// smm_top: decomposed two's complement multipliers built on sign-magnitude.
//
// What it does: multiplies two W-bit operands in four ways, one per
// encoder/multiplier configuration, each an independent circuit:
//   B  TC->SME encoders + SME->TC multiplier. Exact over -2^(W-1)..2^(W-1)-1;
//      a drop-in replacement for a W-bit signed multiplier.
//   C  clipping TC->SM encoders + SM->TC multiplier. The most negative input
//      is clipped to -(2^(W-1)-1) before multiplying.
//   D  TCS->SM encoders (the same circuit as TC->SME) + SM->TC multiplier.
//      Valid for the symmetric input range -(2^(W-1)-1)..2^(W-1)-1 only.
//   E  SM->SM multiplier on operands already stored in sign-magnitude.
// B, C and D read a_tc/b_tc and return two's complement products; E reads
// a_sm/b_sm and returns a sign-magnitude product. All products are 2W bits.
// A user keeps the output of the configuration wanted; synthesis removes
// the others.
//
// How it works: each operand passes through its own encoder, so a product
// costs two encoders and one multiplier. The encoders and multipliers are
// kept as separate modules on purpose: synthesizing them apart preserves the
// sign-magnitude signals between them, which toggle less than two's
// complement for values near zero.
//
// Timing: with ENC_PIPE = 0 (default) the whole module is combinational and
// clk/rst_n are unused. With ENC_PIPE = 1 a register sits on the encoder
// outputs (and on the SM operands of E, to keep all four outputs aligned),
// so every product appears one clock after its operands. That register is
// W bits per operand, narrower than a register inside the multiplier.
// It resets asynchronously (rst_n low) to zero. Lint reports clk and rst_n
// as unused in the default, combinational build; they are kept so that both
// builds share one port list.
//
// Following the paper: the formats, the encoder/multiplier split, the four
// configurations and the idea of a register at the encoder output. This
// design's own: bundling the configurations in one module, the reset.
module smm_top #(
  parameter int unsigned W        = smm_pkg::OP_W,
  parameter bit          ENC_PIPE = 1'b0
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [W-1:0]   a_tc,
  input  logic [W-1:0]   b_tc,
  input  logic [W-1:0]   a_sm,
  input  logic [W-1:0]   b_sm,
  output logic [2*W-1:0] p_b,
  output logic [2*W-1:0] p_c,
  output logic [2*W-1:0] p_d,
  output logic [2*W-1:0] p_e
);
  // Encoded operands, one bundle per configuration.
  typedef struct packed {
    logic [W-1:0] a;
    logic [W-1:0] b;
  } opnd_t;

  opnd_t enc_b, enc_c, enc_d, in_e;   // encoder outputs / E operands
  opnd_t mul_b, mul_c, mul_d, mul_e;  // multiplier inputs

  // Configuration B: TC -> SME
  enc_tc2sme     #(.W(W)) u_enc_b_a (.tc_i(a_tc), .sm_o(enc_b.a));
  enc_tc2sme     #(.W(W)) u_enc_b_b (.tc_i(b_tc), .sm_o(enc_b.b));
  // Configuration C: TC -> SM with clipping
  enc_tc2sm_clip #(.W(W)) u_enc_c_a (.tc_i(a_tc), .sm_o(enc_c.a));
  enc_tc2sm_clip #(.W(W)) u_enc_c_b (.tc_i(b_tc), .sm_o(enc_c.b));
  // Configuration D: TCS -> SM, same circuit as TC -> SME
  enc_tc2sme     #(.W(W)) u_enc_d_a (.tc_i(a_tc), .sm_o(enc_d.a));
  enc_tc2sme     #(.W(W)) u_enc_d_b (.tc_i(b_tc), .sm_o(enc_d.b));
  // Configuration E: no encoder
  assign in_e = '{a: a_sm, b: b_sm};

  if (ENC_PIPE) begin : g_pipe
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        mul_b <= '0;
        mul_c <= '0;
        mul_d <= '0;
        mul_e <= '0;
      end else begin
        mul_b <= enc_b;
        mul_c <= enc_c;
        mul_d <= enc_d;
        mul_e <= in_e;
      end
    end
  end else begin : g_comb
    assign mul_b = enc_b;
    assign mul_c = enc_c;
    assign mul_d = enc_d;
    assign mul_e = in_e;
  end

  mul_sme2tc #(.W(W)) u_mul_b (.a_sme(mul_b.a), .b_sme(mul_b.b), .p_tc(p_b));
  mul_sm2tc  #(.W(W)) u_mul_c (.a_sm(mul_c.a),  .b_sm(mul_c.b),  .p_tc(p_c));
  mul_sm2tc  #(.W(W)) u_mul_d (.a_sm(mul_d.a),  .b_sm(mul_d.b),  .p_tc(p_d));
  mul_sm2sm  #(.W(W)) u_mul_e (.a_sm(mul_e.a),  .b_sm(mul_e.b),  .p_sm(p_e));
endmodule
