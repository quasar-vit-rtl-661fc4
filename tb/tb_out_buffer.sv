// tb_out_buffer: writes whole rows of P_F tokens into both banks of the output
// buffer and reads them back token by token through two read ports,
// comparing every lane; then overwrites one bank and checks the other kept
// its contents.
//
// Interface and timing: no ports; a 10 ns clock generated here, stimulus
// applied away from the active edge, and a watchdog that counts a failure and
// ends the run if the test hangs. The reference values are computed here from
// the arithmetic definitions, independently of the design.
module tb_out_buffer;
  import quasar_pkg::*;
  localparam int T_M = 5, P_F = 3, F_MAX = 8, NPORT = 2;
  localparam int ROWS = (F_MAX + P_F - 1) / P_F;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wr_en = 1'b0, wr_bank = 1'b0, rd_bank = 1'b0;
  logic [1:0] wr_row = '0;
  logic signed [ACT_W-1:0] wr_data [P_F][T_M];
  logic [3:0] rd_tok [NPORT];
  logic signed [ACT_W-1:0] rd_data [NPORT][T_M];
  int checks = 0, failures = 0;
  int V [2][ROWS*P_F][T_M];

  out_buffer #(.T_M(T_M), .P_F(P_F), .F_MAX(F_MAX), .NPORT(NPORT)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(int b);
    @(negedge clk);
    wr_bank = b[0];
    for (int r = 0; r < ROWS; r++) begin
      wr_en = 1'b1; wr_row = 2'(r);
      for (int t = 0; t < P_F; t++)
        for (int m = 0; m < T_M; m++) begin
          V[b][r*P_F+t][m] = int'($urandom % 64) - 32;
          wr_data[t][m] = ACT_W'(V[b][r*P_F+t][m]);
        end
      @(negedge clk);
    end
    wr_en = 1'b0;
  endtask

  task automatic check_bank(int b);
    rd_bank = b[0];
    for (int f = 0; f < ROWS * P_F; f += NPORT) begin
      for (int p = 0; p < NPORT; p++) rd_tok[p] = 4'((f + p) % (ROWS * P_F));
      #1;
      for (int p = 0; p < NPORT; p++)
        for (int m = 0; m < T_M; m++) begin
          checks++;
          if (int'(rd_data[p][m]) != V[b][(f+p) % (ROWS*P_F)][m]) begin
            failures++;
            if (failures < 10) $display("MISMATCH bank %0d tok %0d lane %0d", b, f + p, m);
          end
        end
    end
  endtask

  initial begin
    @(negedge clk);
    fill(0);
    fill(1);
    check_bank(0);
    check_bank(1);
    fill(1);
    check_bank(0);
    check_bank(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
