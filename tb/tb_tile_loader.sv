// tb_tile_loader: runs tiles of several sizes through a 2-port loader with
// two words per item against the memory model, with and without random
// back-pressure. Every (item, word) must be written exactly once with the
// word stored at base + item*WPI + word, and done must come once per tile.
// Without back-pressure the tile time must equal ceil(items/ports)*WPI plus
// the memory latency and at most 4 cycles of handshake overhead.
//
// Interface and timing: no ports; a 10 ns clock generated here, stimulus
// applied away from the active edge, and a watchdog that counts a failure and
// ends the run if the test hangs. The reference values are computed here from
// the arithmetic definitions, independently of the design.
module tb_tile_loader;
  import quasar_pkg::*;
  localparam int NPORT = 2, WPI = 2, IM = 16, LAT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start = 1'b0, busy, done;
  logic [ADDR_W-1:0] base = '0;
  logic [4:0]        n_items = '0;
  logic              ar_valid [NPORT], ar_ready [NPORT], r_valid [NPORT];
  logic [ADDR_W-1:0] ar_addr [NPORT];
  logic [AXI_W-1:0]  r_data [NPORT];
  logic              wr_en [NPORT];
  logic [3:0]        wr_item [NPORT];
  logic [0:0]        wr_word [NPORT];
  logic [AXI_W-1:0]  wr_data [NPORT];
  logic              nv [1], nr [1], nrv [1], wv [1], wr [1];
  logic [ADDR_W-1:0] na [1], wa [1];
  logic [AXI_W-1:0]  nd [1], wd [1];
  int checks = 0, failures = 0;

  tile_loader #(.NPORT(NPORT), .WPI(WPI), .ITEMS_MAX(IM)) dut (.*);

  ddr_model #(.NR0(NPORT), .NR1(1), .NW(1), .DEPTH(4096), .LAT(LAT)) u_mem (
    .clk, .rst_n, .ar0_valid(ar_valid), .ar0_addr(ar_addr), .ar0_ready(ar_ready),
    .r0_valid(r_valid), .r0_data(r_data),
    .ar1_valid(nv), .ar1_addr(na), .ar1_ready(nr), .r1_valid(nrv), .r1_data(nd),
    .w_valid(wv), .w_addr(wa), .w_data(wd), .w_ready(wr));

  assign nv[0] = 1'b0;
  assign na[0] = '0;
  assign wv[0] = 1'b0;
  assign wa[0] = '0;
  assign wd[0] = '0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hits [IM][WPI];
  int n_done = 0;
  bit bad_data = 0;

  always @(posedge clk) begin
    if (done) n_done++;
    for (int p = 0; p < NPORT; p++)
      if (wr_en[p]) begin
        hits[wr_item[p]][wr_word[p]]++;
        if (wr_data[p] !== u_mem.mem[base + ADDR_W'(wr_item[p]) * WPI + ADDR_W'(wr_word[p])])
          bad_data = 1;
        if (int'(wr_item[p]) % NPORT != p) bad_data = 1;
      end
  end

  task automatic run(int n, int b, int stall);
    int cyc, ideal;
    for (int i = 0; i < IM; i++) for (int w = 0; w < WPI; w++) hits[i][w] = 0;
    u_mem.stall_pct = stall;
    n_done = 0; bad_data = 0;
    @(negedge clk);
    base = ADDR_W'(b); n_items = 5'(n); start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (busy) begin @(negedge clk); cyc++; end
    repeat (3) @(negedge clk);
    for (int i = 0; i < IM; i++)
      for (int w = 0; w < WPI; w++) begin
        checks++;
        if (hits[i][w] != ((i < n) ? 1 : 0)) begin
          failures++;
          $display("item %0d word %0d written %0d times", i, w, hits[i][w]);
        end
      end
    checks += 2;
    if (bad_data) begin failures++; $display("wrong data or port for n=%0d", n); end
    if (n_done != 1) begin failures++; $display("done count %0d", n_done); end
    ideal = ((n + NPORT - 1) / NPORT) * WPI;
    $display("tile of %0d items: %0d cycles (ideal transfer %0d)", n, cyc, ideal);
    if (stall == 0) begin
      checks++;
      if (cyc < ideal || cyc > ideal + LAT + 4) begin
        failures++;
        $display("tile time out of range");
      end
    end
  endtask

  initial begin
    for (int a = 0; a < 4096; a++) u_mem.mem[a] = {$urandom, $urandom, $urandom, a};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(7, 100, 0);
    run(16, 300, 0);
    run(1, 7, 0);
    run(13, 1000, 40);
    run(16, 2000, 25);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
