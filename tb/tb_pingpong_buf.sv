// tb_pingpong_buf: fills both banks of a small ping-pong buffer through two
// write ports with multi-word items (8-bit containers, 6-bit elements), then
// reads windows of items from each bank and compares every element. Also
// checks that writing one bank leaves the other untouched.
//
// Interface and timing: no ports; a 10 ns clock generated here, stimulus
// applied away from the active edge, and a watchdog that counts a failure and
// ends the run if the test hangs. The reference values are computed here from
// the arithmetic definitions, independently of the design.
module tb_pingpong_buf;
  import quasar_pkg::*;
  localparam int ITEMS = 10, ELEMS = 20, NPORT = 2, RD = 3;
  localparam int EPW = AXI_W / 8;
  localparam int WPI = (ELEMS + EPW - 1) / EPW;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic              wr_bank = 1'b0;
  logic              wr_en   [NPORT];
  logic [3:0]        wr_item [NPORT];
  logic [0:0]        wr_word [NPORT];
  logic [AXI_W-1:0]  wr_data [NPORT];
  logic              rd_bank = 1'b0;
  logic [3:0]        rd_base = '0;
  logic [5:0]        rd_data [RD][ELEMS];
  int checks = 0, failures = 0;
  int V [2][ITEMS][ELEMS];

  pingpong_buf #(.ITEMS(ITEMS), .ELEMS(ELEMS), .ELEM_W(6), .CW(8), .NPORT(NPORT),
                 .RD_ITEMS(RD)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(int b);
    @(negedge clk);
    wr_bank = b[0];
    for (int i = 0; i < ITEMS; i += NPORT)
      for (int s = 0; s < WPI; s++) begin
        for (int p = 0; p < NPORT; p++) begin
          wr_en[p] = (i + p < ITEMS);
          wr_item[p] = 4'(i + p);
          wr_word[p] = 1'(s);
          wr_data[p] = {$urandom, $urandom, $urandom, $urandom};
          for (int e = 0; e < EPW; e++)
            if (s * EPW + e < ELEMS && i + p < ITEMS)
              V[b][i+p][s*EPW+e] = int'(wr_data[p][e*8 +: 6]);
        end
        @(negedge clk);
      end
    for (int p = 0; p < NPORT; p++) wr_en[p] = 1'b0;
  endtask

  task automatic check_bank(int b);
    rd_bank = b[0];
    for (int base = 0; base + RD <= ITEMS; base++) begin
      rd_base = 4'(base);
      #1;
      for (int i = 0; i < RD; i++)
        for (int e = 0; e < ELEMS; e++) begin
          checks++;
          if (int'(rd_data[i][e]) != V[b][base+i][e]) begin
            failures++;
            if (failures < 10)
              $display("MISMATCH bank %0d item %0d elem %0d got %0d exp %0d",
                       b, base + i, e, rd_data[i][e], V[b][base+i][e]);
          end
        end
    end
  endtask

  initial begin
    for (int p = 0; p < NPORT; p++) wr_en[p] = 1'b0;
    @(negedge clk);
    fill(0);
    fill(1);
    check_bank(0);
    check_bank(1);
    fill(0);
    check_bank(1);
    check_bank(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
