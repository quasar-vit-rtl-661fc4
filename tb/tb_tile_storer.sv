// tb_tile_storer: stores tiles of several token counts through two write
// ports with random back-pressure. The output buffer is modelled here as a
// function of (token, lane); every word address must be written once with the
// lanes sign-extended into 8-bit containers in lane order, token f going to
// port f mod 2, and done must come once per tile. Without back-pressure the
// time must be ceil(T_M/16) * ceil(tokens/2) plus at most 3 cycles.
//
// Interface and timing: no ports; a 10 ns clock generated here, stimulus
// applied away from the active edge, and a watchdog that counts a failure and
// ends the run if the test hangs. The reference values are computed here from
// the arithmetic definitions, independently of the design.
module tb_tile_storer;
  import quasar_pkg::*;
  localparam int T_M = 20, NPORT = 2, TM = 16;
  localparam int OPT = (T_M + D_ACT - 1) / D_ACT;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  logic [ADDR_W-1:0] base = '0;
  logic [4:0] n_tok = '0;
  logic [3:0] rd_tok [NPORT];
  logic signed [ACT_W-1:0] rd_data [NPORT][T_M];
  logic w_valid [NPORT], w_ready [NPORT];
  logic [ADDR_W-1:0] w_addr [NPORT];
  logic [AXI_W-1:0] w_data [NPORT];
  int checks = 0, failures = 0;
  int stall = 0;

  tile_storer #(.T_M(T_M), .NPORT(NPORT), .TOK_MAX(TM)) dut (.*);

  function automatic int lane_val(int f, int m);
    return ((f * 7 + m * 3) % 64) - 32;
  endfunction

  always_comb
    for (int p = 0; p < NPORT; p++)
      for (int m = 0; m < T_M; m++) rd_data[p][m] = ACT_W'(lane_val(int'(rd_tok[p]), m));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hits [TM*OPT];
  int n_done = 0;
  bit bad = 0;

  always @(posedge clk) begin
    if (done) n_done++;
    for (int p = 0; p < NPORT; p++) begin
      if (w_valid[p] && w_ready[p]) begin
        int off, f, s;
        logic [AXI_W-1:0] e;
        off = int'(w_addr[p] - base);
        f = off / OPT; s = off % OPT;
        if (off < 0 || off >= TM * OPT) bad = 1;
        else begin
          hits[off]++;
          e = '0;
          for (int k = 0; k < D_ACT; k++)
            if (s * D_ACT + k < T_M) e[k*8 +: 8] = 8'(lane_val(f, s * D_ACT + k));
          if (w_data[p] !== e) bad = 1;
          if (f % NPORT != p) bad = 1;
        end
      end
      w_ready[p] <= (stall == 0) || (($urandom % 100) >= stall);
    end
  end

  task automatic run(int n, int b, int st);
    int cyc, ideal;
    stall = st;
    for (int i = 0; i < TM * OPT; i++) hits[i] = 0;
    n_done = 0; bad = 0;
    @(negedge clk);
    base = ADDR_W'(b); n_tok = 5'(n); start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    repeat (2) @(negedge clk);
    for (int i = 0; i < TM * OPT; i++) begin
      checks++;
      if (hits[i] != ((i < n * OPT) ? 1 : 0)) begin
        failures++;
        $display("word %0d written %0d times", i, hits[i]);
      end
    end
    checks += 2;
    if (bad) begin failures++; $display("wrong data, address or port"); end
    if (n_done != 1) begin failures++; $display("done count %0d", n_done); end
    ideal = OPT * ((n + NPORT - 1) / NPORT);
    $display("tile of %0d tokens: %0d cycles (ideal %0d)", n, cyc, ideal);
    if (st == 0) begin
      checks++;
      if (cyc < ideal || cyc > ideal + 3) begin failures++; $display("time out of range"); end
    end
  endtask

  initial begin
    for (int p = 0; p < NPORT; p++) w_ready[p] = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(9, 500, 0);
    run(16, 40, 0);
    run(1, 3, 0);
    run(11, 200, 35);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
