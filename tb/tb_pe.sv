// tb_pe: checks the three processing-element kinds (packing factor 4,
// packing factor 3, LUT only) over T_N = 8 input channels: every partial sum
// must equal the dot product of its token's activations with its lane's
// weights, for random operands with mixed signed / unsigned lanes, and for the
// largest-magnitude operands (to exercise the sum width).
//
// Interface and timing: no ports; the unit is combinational, so each
// stimulus is applied and checked after a 1 ns delay. A watchdog ends a hung
// run with a failure. References are computed here from the arithmetic
// definitions, independently of the design.
module tb_pe;
  import quasar_pkg::*;
  localparam int T_N = 8;
  localparam int PSUM_W = PROD_W + $clog2(T_N);

  logic signed [ACT_W-1:0]  a4 [2][T_N];
  logic        [NIB_W-1:0]  w4 [2][T_N];
  logic                     s4 [2];
  logic signed [PSUM_W-1:0] p4 [2][2];
  logic signed [ACT_W-1:0]  a3 [1][T_N];
  logic        [NIB_W-1:0]  w3 [3][T_N];
  logic                     s3 [3];
  logic signed [PSUM_W-1:0] p3 [1][3];
  logic signed [ACT_W-1:0]  a1 [1][T_N];
  logic        [NIB_W-1:0]  w1 [1][T_N];
  logic                     s1 [1];
  logic signed [PSUM_W-1:0] p1 [1][1];
  int checks = 0, failures = 0;

  pe #(.KIND(PE_DSP4), .T_N(T_N)) u4 (.act(a4), .wgt(w4), .wgt_signed(s4), .psum(p4));
  pe #(.KIND(PE_DSP3), .T_N(T_N)) u3 (.act(a3), .wgt(w3), .wgt_signed(s3), .psum(p3));
  pe #(.KIND(PE_LUT),  .T_N(T_N)) u1 (.act(a1), .wgt(w1), .wgt_signed(s1), .psum(p1));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int wval(logic [NIB_W-1:0] w, logic s);
    return (s && w[NIB_W-1]) ? int'(w) - 16 : int'(w);
  endfunction

  task automatic cmp(string name, int got, int exp_v);
    checks++;
    if (got != exp_v) begin
      failures++;
      if (failures < 10) $display("MISMATCH %s got %0d exp %0d", name, got, exp_v);
    end
  endtask

  initial begin
    for (int it = 0; it < 2000; it++) begin
      bit extreme; extreme = (it < 20);
      for (int n = 0; n < T_N; n++) begin
        for (int t = 0; t < 2; t++) a4[t][n] = extreme ? -6'sd32 : ACT_W'($urandom);
        a3[0][n] = extreme ? -6'sd32 : ACT_W'($urandom);
        a1[0][n] = extreme ? -6'sd32 : ACT_W'($urandom);
        for (int l = 0; l < 2; l++) w4[l][n] = extreme ? 4'd15 : NIB_W'($urandom);
        for (int l = 0; l < 3; l++) w3[l][n] = extreme ? 4'd15 : NIB_W'($urandom);
        w1[0][n] = extreme ? 4'd15 : NIB_W'($urandom);
      end
      for (int l = 0; l < 2; l++) s4[l] = extreme ? 1'b0 : 1'($urandom);
      for (int l = 0; l < 3; l++) s3[l] = extreme ? 1'b0 : 1'($urandom);
      s1[0] = extreme ? 1'b0 : 1'($urandom);
      #1;
      for (int t = 0; t < 2; t++)
        for (int l = 0; l < 2; l++) begin
          int e; e = 0;
          for (int n = 0; n < T_N; n++) e += int'(a4[t][n]) * wval(w4[l][n], s4[l]);
          cmp("pack4", int'(p4[t][l]), e);
        end
      for (int l = 0; l < 3; l++) begin
        int e; e = 0;
        for (int n = 0; n < T_N; n++) e += int'(a3[0][n]) * wval(w3[l][n], s3[l]);
        cmp("pack3", int'(p3[0][l]), e);
      end
      begin
        int e; e = 0;
        for (int n = 0; n < T_N; n++) e += int'(a1[0][n]) * wval(w1[0][n], s1[0]);
        cmp("lut", int'(p1[0][0]), e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
