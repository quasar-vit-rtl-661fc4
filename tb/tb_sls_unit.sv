// tb_sls_unit: checks per-channel layer scaling and requantisation. A lambda
// table is written through the host port; rows of random values are then sent
// with SLS enabled and bypassed and various shifts, and each 6-bit result is
// compared with round-to-nearest((v * lambda) / 2^(12 + shift)) (or
// v / 2^shift when bypassed), saturated to -32..31. Checks the one-cycle
// latency and that out_row follows in_row.
//
// Interface and timing: no ports; a 10 ns clock generated here, stimulus
// applied away from the active edge, and a watchdog that counts a failure and
// ends the run if the test hangs. The reference values are computed here from
// the arithmetic definitions, independently of the design.
module tb_sls_unit;
  import quasar_pkg::*;
  localparam int T_M = 4, P_F = 2, ROW_W = 3, LD = 32;
  localparam int LI_W = $clog2(LD);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic lam_we = 1'b0;
  logic [LI_W-1:0] lam_addr = '0;
  logic signed [LAMBDA_W-1:0] lam_data = '0;
  logic sls_en = 1'b0;
  logic [4:0] out_shift = '0;
  logic [LI_W-1:0] lam_idx [T_M];
  logic in_valid = 1'b0, out_valid;
  logic [ROW_W-1:0] in_row = '0, out_row;
  logic signed [OUTV_W-1:0] in_val [P_F][T_M];
  logic signed [ACT_W-1:0]  out_q  [P_F][T_M];
  int checks = 0, failures = 0, n_sat = 0;
  int LAMV [LD];

  sls_unit #(.T_M(T_M), .P_F(P_F), .ROW_W(ROW_W), .LAMBDA_DEPTH(LD)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < LD; i++) begin
      LAMV[i] = int'($urandom % 16384) - 8192;
      lam_we = 1'b1; lam_addr = LI_W'(i); lam_data = LAMBDA_W'(LAMV[i]);
      @(negedge clk);
    end
    lam_we = 1'b0;
    for (int it = 0; it < 600; it++) begin
      longint v [P_F][T_M];
      sls_en = 1'($urandom);
      out_shift = 5'(3 + $urandom % 8);
      for (int m = 0; m < T_M; m++) lam_idx[m] = LI_W'($urandom % LD);
      for (int t = 0; t < P_F; t++)
        for (int m = 0; m < T_M; m++) begin
          v[t][m] = longint'($urandom % 2048) - 1024;
          in_val[t][m] = OUTV_W'(v[t][m]);
        end
      in_valid = 1'b1; in_row = ROW_W'(it);
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (!out_valid || out_row != ROW_W'(it)) begin
        failures++;
        $display("latency or row wrong");
      end
      for (int t = 0; t < P_F; t++)
        for (int m = 0; m < T_M; m++) begin
          longint num, e;
          int sh;
          sh  = 12 + int'(out_shift);
          num = sls_en ? v[t][m] * LAMV[lam_idx[m]] : v[t][m] * 4096;
          e   = (num + (64'sd1 <<< (sh - 1))) >>> sh;
          if (e > 31)  begin e = 31;  n_sat++; end
          if (e < -32) begin e = -32; n_sat++; end
          checks++;
          if (longint'(out_q[t][m]) != e) begin
            failures++;
            if (failures < 10)
              $display("MISMATCH v=%0d lam=%0d sls=%0d sh=%0d got %0d exp %0d",
                       v[t][m], LAMV[lam_idx[m]], sls_en, out_shift, out_q[t][m], e);
          end
        end
    end
    $display("saturated results: %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
