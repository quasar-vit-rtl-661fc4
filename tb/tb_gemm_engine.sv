// tb_gemm_engine: checks the PE array and accumulators of two small engines,
// one built with packing factor 4 and one with packing factor 3, each with
// DSP and LUT tokens. Three input tiles are accumulated into two rows per
// tile (first input tile with c_first), the rows are drained and compared with
// a reference dot product over all tiles; lane pair 0 is an 8-bit row, so its
// even lane must read (high << 4) + low and its odd lane zero. The drain
// latency (one cycle) is checked too.
//
// Interface and timing: no ports; a 10 ns clock generated here, stimulus
// applied away from the active edge, and a watchdog that counts a failure and
// ends the run if the test hangs. The reference values are computed here from
// the arithmetic definitions, independently of the design.
module tb_gemm_engine;
  import quasar_pkg::*;
  localparam int T_M = 6, T_N = 4, P_F = 4, F_MAX = 8, NT = 3;
  localparam int ROW_W = 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    c_valid = 1'b0, c_first = 1'b0, d_valid = 1'b0;
  logic [ROW_W-1:0]        c_row = '0, d_row = '0;
  logic signed [ACT_W-1:0] act [P_F][T_N];
  logic        [NIB_W-1:0] wgt [T_M][T_N];
  logic                    wsg [T_M];
  logic                    w8p [T_M/2];
  logic                    o_valid4, o_valid3;
  logic [ROW_W-1:0]        o_row4, o_row3;
  logic signed [OUTV_W-1:0] o_val4 [P_F][T_M];
  logic signed [OUTV_W-1:0] o_val3 [P_F][T_M];
  int checks = 0, failures = 0;

  gemm_engine #(.T_M(T_M), .T_N(T_N), .P_F(P_F), .P_F_LUT(2), .PACK(4), .F_MAX(F_MAX)) u4 (
    .clk, .rst_n, .c_valid, .c_row, .c_first, .act, .wgt, .wgt_signed(wsg),
    .d_valid, .d_row, .w8pair(w8p), .o_valid(o_valid4), .o_row(o_row4), .o_val(o_val4));
  gemm_engine #(.T_M(T_M), .T_N(T_N), .P_F(P_F), .P_F_LUT(1), .PACK(3), .F_MAX(F_MAX)) u3 (
    .clk, .rst_n, .c_valid, .c_row, .c_first, .act, .wgt, .wgt_signed(wsg),
    .d_valid, .d_row, .w8pair(w8p), .o_valid(o_valid3), .o_row(o_row3), .o_val(o_val3));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int A [NT][2][P_F][T_N];
  int W [NT][T_M][T_N];
  longint acc [2][P_F][T_M];

  initial begin
    for (int m = 0; m < T_M; m++) wsg[m] = !(m < 2) || (m % 2 == 1);  // lanes 0,1 = one 8-bit row
    for (int k = 0; k < T_M / 2; k++) w8p[k] = (k == 0);
    for (int it = 0; it < NT; it++) begin
      for (int r = 0; r < 2; r++)
        for (int t = 0; t < P_F; t++)
          for (int n = 0; n < T_N; n++) A[it][r][t][n] = int'($urandom % 64) - 32;
      for (int m = 0; m < T_M; m++)
        for (int n = 0; n < T_N; n++) W[it][m][n] = int'($urandom % 16);
    end
    for (int r = 0; r < 2; r++)
      for (int t = 0; t < P_F; t++)
        for (int m = 0; m < T_M; m++) begin
          acc[r][t][m] = 0;
          for (int it = 0; it < NT; it++)
            for (int n = 0; n < T_N; n++) begin
              int w;
              w = W[it][m][n];
              if (wsg[m] && w > 7) w -= 16;
              acc[r][t][m] += longint'(A[it][r][t][n]) * w;
            end
        end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // compute: three input tiles, two rows each
    for (int it = 0; it < NT; it++)
      for (int r = 0; r < 2; r++) begin
        @(negedge clk);
        c_valid = 1'b1; c_first = (it == 0); c_row = ROW_W'(r);
        for (int t = 0; t < P_F; t++)
          for (int n = 0; n < T_N; n++) act[t][n] = ACT_W'(A[it][r][t][n]);
        for (int m = 0; m < T_M; m++)
          for (int n = 0; n < T_N; n++) wgt[m][n] = NIB_W'(W[it][m][n]);
      end
    @(negedge clk) c_valid = 1'b0;
    repeat (2) @(negedge clk);
    // drain both rows
    for (int r = 0; r < 2; r++) begin
      d_valid = 1'b1; d_row = ROW_W'(r);
      @(negedge clk);
      d_valid = 1'b0;
      checks++;
      if (!o_valid4 || !o_valid3 || o_row4 != ROW_W'(r)) begin
        failures++;
        $display("drain latency/row wrong");
      end
      for (int t = 0; t < P_F; t++)
        for (int m = 0; m < T_M; m++) begin
          longint e;
          if (m == 0)      e = (acc[r][t][1] <<< 4) + acc[r][t][0];
          else if (m == 1) e = 0;
          else             e = acc[r][t][m];
          checks += 2;
          if (longint'(o_val4[t][m]) != e || longint'(o_val3[t][m]) != e) begin
            failures++;
            if (failures < 10)
              $display("MISMATCH row %0d tok %0d lane %0d: pack4 %0d pack3 %0d exp %0d",
                       r, t, m, o_val4[t][m], o_val3[t][m], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
