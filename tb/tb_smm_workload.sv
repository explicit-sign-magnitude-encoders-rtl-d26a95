// tb_smm_workload: smm_top at its default parameters under the
// normally distributed operand streams the design is meant for.
//
// First every 4-bit operand pair is applied once. Then, for each standard
// deviation sigma = 2.0, 3.0 and 4.0, 10,000 operand pairs are drawn
// independently from a zero-mean normal distribution (Box-Muller), rounded
// to integers and clipped to the range of the format: -8..7 for the two's
// complement inputs of configurations B, C, D and -7..7 for the
// sign-magnitude inputs of configuration E. One pair is applied per clock
// cycle and all four products are checked against integer arithmetic.
//
// The testbench also counts bit toggles between consecutive cycles on the
// two's complement operand buses and on the sign-magnitude buses leaving
// the configuration-B encoders. For operands clustered around zero the
// sign-magnitude buses must toggle less; this is the effect the whole
// design is built on, and each sigma counts a check for it. The toggle
// counts are bus-level only, not a gate-level power estimate.
// A watchdog ends the run after a fixed number of clock cycles.
module tb_smm_workload;
  import smm_ref_pkg::*;

  localparam int N_STIM = 10000;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       rst_n = 1'b1;
  logic [3:0] a_tc, b_tc, a_sm, b_sm;
  logic [7:0] p_b, p_c, p_d, p_e;

  smm_top dut (.clk, .rst_n, .a_tc, .b_tc, .a_sm, .b_sm, .p_b, .p_c, .p_d, .p_e);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic int clip(int v, int lo, int hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction

  // One sample of N(0, sigma^2), rounded to the nearest integer.
  function automatic int gauss(real sigma);
    real u1, u2, z;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    z  = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
    return int'($floor(z * sigma + 0.5));
  endfunction

  task automatic apply_and_check(int va, int vb, int sa, int sb);
    @(negedge clk);
    a_tc = 4'(tc_code(va, 4)); b_tc = 4'(tc_code(vb, 4));
    a_sm = 4'(sm_code(sa, 4)); b_sm = 4'(sm_code(sb, 4));
    #1;
    check(tc_val(p_b, 8) == va * vb, $sformatf("B %0d*%0d got %0d", va, vb, tc_val(p_b, 8)));
    check(tc_val(p_c, 8) == clip(va, -7, 7) * clip(vb, -7, 7),
          $sformatf("C %0d*%0d got %0d", va, vb, tc_val(p_c, 8)));
    if (va != -8 && vb != -8)
      check(tc_val(p_d, 8) == va * vb, $sformatf("D %0d*%0d got %0d", va, vb, tc_val(p_d, 8)));
    check(sm_val(p_e, 8) == sa * sb && !sm_is_negzero(p_e, 8),
          $sformatf("E %0d*%0d got %b", sa, sb, p_e));
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sigmas[3] = '{2.0, 3.0, 4.0};
    a_tc = '0; b_tc = '0; a_sm = '0; b_sm = '0;

    // Every operand pair once.
    for (int va = -8; va <= 7; va++)
      for (int vb = -8; vb <= 7; vb++)
        apply_and_check(va, vb, clip(va, -7, 7), clip(vb, -7, 7));

    void'($urandom(32'd2025));
    foreach (sigmas[k]) begin
      longint tog_tc, tog_sme;
      int n_clip;
      logic [3:0] last_tc_a, last_tc_b, last_sme_a, last_sme_b;
      tog_tc = 0; tog_sme = 0; n_clip = 0;
      for (int i = 0; i < N_STIM; i++) begin
        int ra, rb, va, vb, sa, sb;
        ra = gauss(sigmas[k]);
        rb = gauss(sigmas[k]);
        va = clip(ra, -8, 7);
        vb = clip(rb, -8, 7);
        sa = clip(ra, -7, 7);
        sb = clip(rb, -7, 7);
        if (va != ra || vb != rb) n_clip++;
        apply_and_check(va, vb, sa, sb);
        if (i > 0) begin
          tog_tc  += hamming(a_tc, last_tc_a) + hamming(b_tc, last_tc_b);
          tog_sme += hamming(dut.u_enc_b_a.sm_o, last_sme_a)
                   + hamming(dut.u_enc_b_b.sm_o, last_sme_b);
        end
        last_tc_a  = a_tc;              last_tc_b  = b_tc;
        last_sme_a = dut.u_enc_b_a.sm_o; last_sme_b = dut.u_enc_b_b.sm_o;
      end
      $display("sigma=%.1f: %0d pairs, %0d with a clipped operand, operand-bus toggles/cycle TC=%.3f SME=%.3f",
               sigmas[k], N_STIM, n_clip, real'(tog_tc) / (N_STIM - 1),
               real'(tog_sme) / (N_STIM - 1));
      check(tog_sme < tog_tc, $sformatf("sigma=%.1f SME buses toggled no less than TC", sigmas[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
