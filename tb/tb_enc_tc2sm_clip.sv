// tb_enc_tc2sm_clip: exhaustive check of the clipping TC->SM encoder.
//
// For every input of a 4-bit and an 8-bit instance, the output read as
// sign-magnitude must equal the input value, except the most negative
// input, which must come out as -(2^(W-1)-1). The illegal SM code 10..0
// must never appear. A watchdog ends the run after a fixed number of
// clock cycles.
module tb_enc_tc2sm_clip;
  import smm_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] x4, y4;
  logic [7:0] x8, y8;
  enc_tc2sm_clip          dut4 (.tc_i(x4), .sm_o(y4));
  enc_tc2sm_clip #(.W(8)) dut8 (.tc_i(x8), .sm_o(y8));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int clip(int v, int w);
    return v < -((1 << (w - 1)) - 1) ? -((1 << (w - 1)) - 1) : v;
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 16; c++) begin
      x4 = 4'(c);
      @(posedge clk);
      check(sm_val(y4, 4) == clip(tc_val(c, 4), 4) && !sm_is_negzero(y4, 4),
            $sformatf("W=4 in=%0d out=%b", tc_val(c, 4), y4));
    end
    for (int c = 0; c < 256; c++) begin
      x8 = 8'(c);
      @(posedge clk);
      check(sm_val(y8, 8) == clip(tc_val(c, 8), 8) && !sm_is_negzero(y8, 8),
            $sformatf("W=8 in=%0d out=%b", tc_val(c, 8), y8));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
