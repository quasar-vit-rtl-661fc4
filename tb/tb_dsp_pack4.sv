// tb_dsp_pack4: checks the four products unpacked from one packing-factor-4
// DSP against plain multiplication, for corner operands (most negative /
// positive activations, 8/-8/15 weights, mixed signed and unsigned nibbles)
// and random ones.
//
// Interface and timing: no ports; the unit is combinational, so each
// stimulus is applied and checked after a 1 ns delay. A watchdog ends a hung
// run with a failure. References are computed here from the arithmetic
// definitions, independently of the design.
module tb_dsp_pack4;
  import quasar_pkg::*;
  logic signed [ACT_W-1:0]  act  [2];
  logic        [NIB_W-1:0]  wgt  [2];
  logic                     sgn  [2];
  logic signed [PROD_W-1:0] prod [2][2];
  int checks = 0, failures = 0;

  dsp_pack4 dut (.act, .wgt, .wgt_signed(sgn), .prod);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(int a0, int a1, int w0, int w1, bit s0, bit s1);
    int wv [2];
    int av [2];
    act[0] = ACT_W'(a0); act[1] = ACT_W'(a1);
    wgt[0] = NIB_W'(w0); wgt[1] = NIB_W'(w1);
    sgn[0] = s0; sgn[1] = s1;
    av[0] = a0; av[1] = a1;
    wv[0] = (s0 && w0 > 7) ? w0 - 16 : w0;
    wv[1] = (s1 && w1 > 7) ? w1 - 16 : w1;
    #1;
    for (int t = 0; t < 2; t++)
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (int'(prod[t][l]) != av[t] * wv[l]) begin
          failures++;
          if (failures < 10)
            $display("MISMATCH a=%0d,%0d w=%0d,%0d s=%0d%0d [%0d][%0d] got %0d exp %0d",
                     a0, a1, w0, w1, s0, s1, t, l, prod[t][l], av[t] * wv[l]);
        end
      end
  endtask

  initial begin
    int cv [6] = '{-32, -31, -1, 0, 1, 31};
    int cw [6] = '{0, 1, 7, 8, 9, 15};
    foreach (cv[i]) foreach (cv[j]) foreach (cw[k]) foreach (cw[m])
      for (int s = 0; s < 4; s++) try(cv[i], cv[j], cw[k], cw[m], s[0], s[1]);
    for (int i = 0; i < 5000; i++)
      try(int'($urandom % 64) - 32, int'($urandom % 64) - 32, int'($urandom % 16),
          int'($urandom % 16), 1'($urandom), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
