// tb_smm_top: end-to-end check of all four configurations of smm_top.
//
// Two instances are driven with the same operands: the default,
// combinational one and one with the encoder-output register
// (ENC_PIPE = 1). Every pair of 4-bit codes is applied, once on the two's
// complement inputs (configurations B, C, D) and once on the sign-magnitude
// inputs (configuration E). Expected products come from integer
// arithmetic on the decoded operands. A third, combinational instance with
// 8-bit operands is swept over every 8-bit pair in the same way.
// Expected products:
//   B  exact product over -8..7
//   C  product after clipping -8 to -7
//   D  exact product, checked only for the symmetric range -7..7
//   E  exact product, sign-magnitude, no negative zero
// The combinational instance must match in the same cycle; the pipelined
// one must show each product exactly one clock later and hold zero in
// reset. The testbench counts how often each mechanism of the design was
// exercised (most-negative operand replaced and shifted once or twice,
// clipping, negation of a negative product, sign gating of a zero
// product, pipelined result, reset) and counts a failure for any that never
// occurred. A watchdog ends the run after a fixed number of clock cycles.
module tb_smm_top;
  import smm_ref_pkg::*;

  int checks = 0, failures = 0;
  int n_shift1 = 0, n_shift2 = 0, n_clip = 0, n_neg = 0, n_zero_gate = 0;
  int n_pipe = 0, n_reset = 0;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic [3:0] a_tc, b_tc, a_sm, b_sm;
  logic [7:0] c_b, c_c, c_d, c_e;   // combinational instance
  logic [7:0] q_b, q_c, q_d, q_e;   // pipelined instance

  smm_top u_comb (.clk, .rst_n, .a_tc, .b_tc, .a_sm, .b_sm,
                  .p_b(c_b), .p_c(c_c), .p_d(c_d), .p_e(c_e));
  smm_top #(.ENC_PIPE(1'b1)) u_pipe (.clk, .rst_n, .a_tc, .b_tc, .a_sm, .b_sm,
                  .p_b(q_b), .p_c(q_c), .p_d(q_d), .p_e(q_e));

  // 8-bit operand instance, combinational.
  logic [7:0]  a8_tc, b8_tc, a8_sm, b8_sm;
  logic [15:0] w_b, w_c, w_d, w_e;
  smm_top #(.W(8)) u_w8 (.clk, .rst_n, .a_tc(a8_tc), .b_tc(b8_tc), .a_sm(a8_sm), .b_sm(b8_sm),
                         .p_b(w_b), .p_c(w_c), .p_d(w_d), .p_e(w_e));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int clip7(int v);
    return v < -7 ? -7 : v;
  endfunction

  // Compares one set of outputs with the operand codes they belong to.
  task automatic check_outputs(string tag, int unsigned ta, int unsigned tb,
                               int unsigned sa, int unsigned sb,
                               logic [7:0] pb, logic [7:0] pc,
                               logic [7:0] pd, logic [7:0] pe);
    int va = tc_val(ta, 4), vb = tc_val(tb, 4);
    check(tc_val(pb, 8) == va * vb,
          $sformatf("%s B %0d*%0d got %0d", tag, va, vb, tc_val(pb, 8)));
    check(tc_val(pc, 8) == clip7(va) * clip7(vb),
          $sformatf("%s C %0d*%0d got %0d", tag, va, vb, tc_val(pc, 8)));
    if (va != -8 && vb != -8)
      check(tc_val(pd, 8) == va * vb,
            $sformatf("%s D %0d*%0d got %0d", tag, va, vb, tc_val(pd, 8)));
    if (!sm_is_negzero(sa, 4) && !sm_is_negzero(sb, 4))
      check(sm_val(pe, 8) == sm_val(sa, 4) * sm_val(sb, 4) && !sm_is_negzero(pe, 8),
            $sformatf("%s E %0d*%0d got %b", tag, sm_val(sa, 4), sm_val(sb, 4), pe));
  endtask

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned pa_tc, pb_tc, pa_sm, pb_sm;   // previous cycle's operands
    bit have_prev = 1'b0;

    rst_n = 1'b0;
    a_tc = 4'd5; b_tc = 4'd3; a_sm = 4'd5; b_sm = 4'd3;
    repeat (2) @(posedge clk);
    @(negedge clk);
    check(q_b == '0 && q_c == '0 && q_d == '0 && q_e == '0,
          "pipelined outputs not zero in reset");
    n_reset++;
    rst_n = 1'b1;

    // Two sweeps: all TC pairs with E idle at 0*0, then all SM pairs with
    // B, C, D idle at 0*0.
    for (int sweep = 0; sweep < 2; sweep++) begin
      for (int ca = 0; ca < 16; ca++) begin
        for (int cb = 0; cb < 16; cb++) begin
          @(negedge clk);
          if (sweep == 0) begin
            a_tc = 4'(ca); b_tc = 4'(cb); a_sm = '0; b_sm = '0;
          end else begin
            a_tc = '0; b_tc = '0; a_sm = 4'(ca); b_sm = 4'(cb);
          end
          #1;
          check_outputs("comb", a_tc, b_tc, a_sm, b_sm, c_b, c_c, c_d, c_e);
          if (have_prev) begin
            check_outputs("pipe", pa_tc, pb_tc, pa_sm, pb_sm, q_b, q_c, q_d, q_e);
            n_pipe++;
          end
          pa_tc = a_tc; pb_tc = b_tc; pa_sm = a_sm; pb_sm = b_sm;
          have_prev = 1'b1;

          // Mechanism counters, from the operands.
          if ((tc_val(a_tc, 4) == -8) != (tc_val(b_tc, 4) == -8)) n_shift1++;
          if (tc_val(a_tc, 4) == -8 && tc_val(b_tc, 4) == -8)     n_shift2++;
          if (tc_val(a_tc, 4) == -8 || tc_val(b_tc, 4) == -8)     n_clip++;
          if (tc_val(a_tc, 4) * tc_val(b_tc, 4) < 0)              n_neg++;
          if (!sm_is_negzero(a_sm, 4) && !sm_is_negzero(b_sm, 4) &&
              (a_sm[3] ^ b_sm[3]) && sm_val(a_sm, 4) * sm_val(b_sm, 4) == 0)
            n_zero_gate++;
        end
      end
    end
    @(negedge clk);
    check_outputs("pipe", pa_tc, pb_tc, pa_sm, pb_sm, q_b, q_c, q_d, q_e);
    n_pipe++;

    // 8-bit sweep: every TC pair on B, C, D and every SM pair on E at once.
    for (int ca = 0; ca < 256; ca++) begin
      for (int cb = 0; cb < 256; cb++) begin
        int va, vb;
        @(negedge clk);
        a8_tc = 8'(ca); b8_tc = 8'(cb); a8_sm = 8'(ca); b8_sm = 8'(cb);
        #1;
        va = tc_val(ca, 8);
        vb = tc_val(cb, 8);
        check(tc_val(w_b, 16) == va * vb, $sformatf("W=8 B %0d*%0d", va, vb));
        check(tc_val(w_c, 16) == (va < -127 ? -127 : va) * (vb < -127 ? -127 : vb),
              $sformatf("W=8 C %0d*%0d", va, vb));
        if (va != -128 && vb != -128)
          check(tc_val(w_d, 16) == va * vb, $sformatf("W=8 D %0d*%0d", va, vb));
        if (!sm_is_negzero(ca, 8) && !sm_is_negzero(cb, 8))
          check(sm_val(w_e, 16) == sm_val(ca, 8) * sm_val(cb, 8) && !sm_is_negzero(w_e, 16),
                $sformatf("W=8 E %0d*%0d", sm_val(ca, 8), sm_val(cb, 8)));
        if (va == -128 && vb == -128) n_shift2++;
      end
    end

    $display("mechanisms: B one -8 operand (shift by 1)=%0d, B two -8 operands (shift by 2)=%0d",
             n_shift1, n_shift2);
    $display("mechanisms: C clip=%0d, negative TC product=%0d, E zero-sign gating=%0d",
             n_clip, n_neg, n_zero_gate);
    $display("mechanisms: pipelined results=%0d, reset=%0d", n_pipe, n_reset);
    if (n_shift1 == 0 || n_shift2 == 0 || n_clip == 0 || n_neg == 0 ||
        n_zero_gate == 0 || n_pipe == 0 || n_reset == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
