// tb_dsp_pack3: checks the three products unpacked from one packing-factor-3
// DSP against plain multiplication, on corner and random operands with mixed
// signed and unsigned weight nibbles.
//
// Interface and timing: no ports; the unit is combinational, so each
// stimulus is applied and checked after a 1 ns delay. A watchdog ends a hung
// run with a failure. References are computed here from the arithmetic
// definitions, independently of the design.
module tb_dsp_pack3;
  import quasar_pkg::*;
  logic signed [ACT_W-1:0]  act;
  logic        [NIB_W-1:0]  wgt  [3];
  logic                     sgn  [3];
  logic signed [PROD_W-1:0] prod [3];
  int checks = 0, failures = 0;

  dsp_pack3 dut (.act, .wgt, .wgt_signed(sgn), .prod);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(int a, int w0, int w1, int w2, int s);
    int wi [3];
    int wv [3];
    wi[0] = w0; wi[1] = w1; wi[2] = w2;
    act = ACT_W'(a);
    for (int k = 0; k < 3; k++) begin
      wgt[k] = NIB_W'(wi[k]);
      sgn[k] = s[k];
      wv[k]  = (s[k] && wi[k] > 7) ? wi[k] - 16 : wi[k];
    end
    #1;
    for (int k = 0; k < 3; k++) begin
      checks++;
      if (int'(prod[k]) != a * wv[k]) begin
        failures++;
        if (failures < 10)
          $display("MISMATCH a=%0d w=%0d,%0d,%0d s=%0d k=%0d got %0d exp %0d",
                   a, w0, w1, w2, s, k, prod[k], a * wv[k]);
      end
    end
  endtask

  initial begin
    int cv [6] = '{-32, -31, -1, 0, 1, 31};
    int cw [5] = '{0, 7, 8, 9, 15};
    foreach (cv[i]) foreach (cw[k]) foreach (cw[m]) foreach (cw[n])
      for (int s = 0; s < 8; s++) try(cv[i], cw[k], cw[m], cw[n], s);
    for (int i = 0; i < 5000; i++)
      try(int'($urandom % 64) - 32, int'($urandom % 16), int'($urandom % 16),
          int'($urandom % 16), int'($urandom % 8));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
