// tb_enc_tc2sme: exhaustive check of the TC->SME / TCS->SM encoder.
//
// For every input code of a 4-bit and an 8-bit instance, the output is
// decoded as SME and must equal the two's complement value of the input.
// The most negative input must give the code 10..0, and every input in the
// symmetric range must, read as plain SM, give back the same value (the
// TCS->SM use of the encoder). A watchdog ends the run after a fixed
// number of clock cycles.
module tb_enc_tc2sme;
  import smm_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0] x4, y4;
  logic [7:0] x8, y8;
  enc_tc2sme              dut4 (.tc_i(x4), .sm_o(y4));
  enc_tc2sme #(.W(8))     dut8 (.tc_i(x8), .sm_o(y8));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

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
      check(sme_val(y4, 4) == tc_val(c, 4),
            $sformatf("W=4 in=%0d out=%b", tc_val(c, 4), y4));
      if (tc_val(c, 4) != -8)
        check(sm_val(y4, 4) == tc_val(c, 4) && !sm_is_negzero(y4, 4),
              $sformatf("W=4 TCS->SM in=%0d out=%b", tc_val(c, 4), y4));
      else
        check(y4 == 4'b1000, $sformatf("W=4 -8 code %b", y4));
    end
    for (int c = 0; c < 256; c++) begin
      x8 = 8'(c);
      @(posedge clk);
      check(sme_val(y8, 8) == tc_val(c, 8),
            $sformatf("W=8 in=%0d out=%b", tc_val(c, 8), y8));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
