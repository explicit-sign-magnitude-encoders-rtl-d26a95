// tb_mul_sm2tc: exhaustive check of the SM->TC multiplier.
//
// Operands are sign-magnitude without the illegal code 10..0, so the range is -(2^(W-1)-1)..2^(W-1)-1; the product is two's complement.
// Every legal operand pair of a 4-bit and an 8-bit instance is applied;
// the product is decoded and compared with the integer product of the
// decoded operands. A watchdog ends the run after a fixed number of clock
// cycles.
module tb_mul_sm2tc;
  import smm_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0]  a4, b4;
  logic [7:0]  p4;
  logic [7:0]  a8, b8;
  logic [15:0] p8;
  mul_sm2tc          dut4 (.a_sm(a4), .b_sm(b4), .p_tc(p4));
  mul_sm2tc #(.W(8)) dut8 (.a_sm(a8), .b_sm(b8), .p_tc(p8));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (70000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 4; w <= 8; w += 4) begin
      for (int ca = 0; ca < (1 << w); ca++) begin
        for (int cb = 0; cb < (1 << w); cb++) begin
          if (!(!sm_is_negzero(ca, w) && !sm_is_negzero(cb, w))) continue;
          if (w == 4) begin a4 = 4'(ca); b4 = 4'(cb); end
          else        begin a8 = 8'(ca); b8 = 8'(cb); end
          @(posedge clk);
          begin
            int exp_v;
            int unsigned p;
            exp_v = sm_val(ca, w) * sm_val(cb, w);
            p = (w == 4) ? 32'(p4) : 32'(p8);
            check(tc_val(p, 2*w) == exp_v,
                  $sformatf("W=%0d a=%0d b=%0d expected %0d got %b",
                            w, sm_val(ca, w), sm_val(cb, w), exp_v, p));
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
