// tb_lut_mul: exhaustive check of the logic-only 4x6 multiplier, all 64
// activations x 16 nibbles x signed/unsigned weight interpretation.
//
// Interface and timing: no ports; the unit is combinational, so each
// stimulus is applied and checked after a 1 ns delay. A watchdog ends a hung
// run with a failure. References are computed here from the arithmetic
// definitions, independently of the design.
module tb_lut_mul;
  import quasar_pkg::*;
  logic signed [ACT_W-1:0]  act;
  logic        [NIB_W-1:0]  wgt;
  logic                     wgt_signed;
  logic signed [PROD_W-1:0] prod;
  int checks = 0, failures = 0;

  lut_mul dut (.act, .wgt, .wgt_signed, .prod);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++)
      for (int av = -32; av < 32; av++)
        for (int wv = 0; wv < 16; wv++) begin
          int w;
          w = (s == 1 && wv > 7) ? wv - 16 : wv;
          act = ACT_W'(av); wgt = NIB_W'(wv); wgt_signed = s[0];
          #1;
          checks++;
          if (int'(prod) != av * w) begin
            failures++;
            if (failures < 10) $display("MISMATCH a=%0d w=%0d s=%0d prod=%0d", av, wv, s, prod);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
