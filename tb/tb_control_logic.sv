// tb_control_logic: drives the sequencer with stand-in loaders and storer that
// answer after programmable delays, and checks the complete command stream of
// several layers:
//   - load commands: one per (output tile, input tile), bank k mod 2, input
//     and weight addresses as documented in control_logic;
//   - compute rows: every row of every tile in order, from the right bank,
//     c_first only on the first input tile, never before that tile is loaded;
//   - a load never overwrites a bank compute has not finished (double buffer);
//   - drain: all rows after the last input tile, never into an output bank the
//     storer still holds; lane signedness, 8-bit pairing and SLS indices
//     against a reference of the lane map;
//   - store commands: one per output tile with the right address and bank, and
//     one done pulse at the end.
// Overlap of loading with computing and of storing with computing is counted
// and must occur in the multi-tile layers.
//
// Interface and timing: no ports; a 10 ns clock generated here, stimulus
// applied away from the active edge, and a watchdog that counts a failure and
// ends the run if the test hangs. The reference values are computed here from
// the arithmetic definitions, independently of the design.
module tb_control_logic;
  import quasar_pkg::*;
  localparam int T_M = 8, T_N = 20, P_F = 4, F_MAX = 21, LD = 64;
  localparam int ROWS = (F_MAX + P_F - 1) / P_F, ROW_W = $clog2(ROWS);
  localparam int TOKS = ROWS * P_F, TOK_W = $clog2(TOKS), LI_W = $clog2(LD);
  localparam int WPT = 2, WPW = 1, OPT = 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  layer_cfg_t cfg;
  logic ld_start, ld_bank, in_ld_done = 1'b0, wgt_ld_done = 1'b0;
  logic [ADDR_W-1:0] in_ld_base, wgt_ld_base, st_base;
  logic [TOK_W:0] in_ld_items, st_items;
  logic c_valid, c_first, c_bank, d_valid, sls_en, ob_wr_bank, st_start, st_bank;
  logic st_done = 1'b0;
  logic [ROW_W-1:0] c_row, d_row;
  logic [TOK_W-1:0] act_rd_base;
  logic wgt_signed [T_M];
  logic w8pair [T_M/2];
  logic [LI_W-1:0] lam_idx [T_M];
  logic [4:0] out_shift;
  int checks = 0, failures = 0;

  control_logic #(.T_M(T_M), .T_N(T_N), .P_F(P_F), .F_MAX(F_MAX), .LAMBDA_DEPTH(LD)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL t=%0t %s", $time, msg);
    end
  endtask

  // stand-in loaders and storer
  int in_lat = 3, wgt_lat = 5, st_lat = 4;
  int in_cd = 0, wgt_cd = 0, st_cd = 0;
  // layer bookkeeping
  int nt, mtiles, rows_f;
  int n_ld, n_loaded, n_cvalid, n_drain, n_st, n_stored, n_done;
  int cur_ck, cur_row, tiles_computed, drains_done;
  int ov_load, ov_store;

  // reference lane map
  function automatic void lane_ref(int mt, int j, output bit sg, output int li);
    int l;
    l = mt * T_M + j;
    if (l < 2 * int'(cfg.w8_rows)) begin sg = l[0]; li = int'(cfg.sls_offset) + l / 2; end
    else begin sg = 1; li = int'(cfg.sls_offset) + l - int'(cfg.w8_rows); end
  endfunction

  always @(posedge clk) if (rst_n) begin
    in_ld_done  <= 1'b0;
    wgt_ld_done <= 1'b0;
    st_done     <= 1'b0;
    if (in_cd > 0) begin in_cd--; if (in_cd == 0) in_ld_done <= 1'b1; end
    if (wgt_cd > 0) begin wgt_cd--; if (wgt_cd == 0) wgt_ld_done <= 1'b1; end
    if (st_cd > 0) begin st_cd--; if (st_cd == 0) begin st_done <= 1'b1; n_stored++; end end
    if ((in_cd > 0 || wgt_cd > 0) && c_valid) ov_load++;
    if (st_cd > 0 && (c_valid || d_valid)) ov_store++;
    if (in_ld_done && wgt_ld_done) n_loaded++;
    else if (in_ld_done || wgt_ld_done) begin
      // the two loads end separately: count the tile when the later one ends
      if (in_lat == wgt_lat) chk(0, "loaders out of step");
    end
    if (ld_start) begin
      int k, it;
      k = n_ld; it = k % nt;
      chk(in_cd == 0 && wgt_cd == 0, "load started while loaders busy");
      chk(ld_bank == k[0], "load bank");
      chk(in_ld_base == cfg.in_base + ADDR_W'(it * int'(cfg.f) * WPT), "input tile address");
      chk(wgt_ld_base == cfg.wgt_base + ADDR_W'(k * T_M * WPW), "weight tile address");
      chk(int'(in_ld_items) == int'(cfg.f), "input item count");
      // the bank being refilled must already be computed (tile k-2 finished)
      chk(k < 2 || tiles_computed >= k - 1, "load overwrites a bank still in use");
      in_cd = in_lat; wgt_cd = wgt_lat;
      n_ld++;
    end
    if (c_valid) begin
      int it, mt;
      bit sg; int li;
      it = cur_ck % nt; mt = cur_ck / nt;
      chk(int'(c_row) == cur_row, "compute row order");
      chk(c_bank == cur_ck[0], "compute bank");
      chk(c_first == (it == 0), "c_first");
      chk(int'(act_rd_base) == cur_row * P_F, "activation read base");
      chk(cur_ck < n_loaded, "compute before tile loaded");
      for (int j = 0; j < T_M; j++) begin
        lane_ref(mt, j, sg, li);
        chk(wgt_signed[j] == sg, "weight signedness");
      end
      n_cvalid++;
      if (cur_row == rows_f - 1) begin cur_row = 0; cur_ck++; tiles_computed++; end
      else cur_row++;
    end
    if (d_valid) begin
      int mt;
      bit sg; int li;
      mt = drains_done;
      chk(int'(d_row) == n_drain % rows_f, "drain row order");
      chk(ob_wr_bank == mt[0], "drain bank");
      chk(tiles_computed >= (mt + 1) * nt, "drain before last input tile");
      chk(mt < 2 || n_stored >= mt - 1, "drain into a bank not yet stored");
      chk(sls_en == cfg.sls_en && out_shift == cfg.out_shift, "SLS controls");
      for (int j = 0; j < T_M; j++) begin
        lane_ref(mt, j, sg, li);
        chk(int'(lam_idx[j]) == li, "lambda index");
      end
      for (int q = 0; q < T_M / 2; q++)
        chk(w8pair[q] == ((mt * T_M + 2 * q) < 2 * int'(cfg.w8_rows)), "8-bit pair flag");
      n_drain++;
      if (n_drain % rows_f == 0) drains_done++;
    end
    if (st_start) begin
      chk(st_cd == 0, "store started while storer busy");
      chk(st_bank == n_st[0], "store bank");
      chk(st_base == cfg.out_base + ADDR_W'(n_st * int'(cfg.f) * OPT), "store address");
      chk(int'(st_items) == int'(cfg.f), "store item count");
      chk(drains_done > n_st, "store before drain finished");
      st_cd = st_lat;
      n_st++;
    end
    if (done) n_done++;
  end

  task automatic run(int f, int nh, int tph, int mt, int w8, bit sls, int offs,
                     int il, int wl, int sl, bit want_overlap);
    cfg = '0;
    cfg.f = 9'(f); cfg.n_heads = 8'(nh); cfg.tiles_per_head = 16'(tph);
    cfg.m_tiles = 16'(mt); cfg.w8_rows = 16'(w8); cfg.sls_en = sls;
    cfg.sls_offset = 16'(offs); cfg.out_shift = 5'(f % 7);
    cfg.in_base = 32'(1000 + f); cfg.wgt_base = 32'(5000 + mt); cfg.out_base = 32'(9000 + nh);
    nt = nh * tph; mtiles = mt; rows_f = (f + P_F - 1) / P_F;
    in_lat = il; wgt_lat = wl; st_lat = sl;
    n_ld = 0; n_loaded = 0; n_cvalid = 0; n_drain = 0; n_st = 0; n_stored = 0; n_done = 0;
    cur_ck = 0; cur_row = 0; tiles_computed = 0; drains_done = 0; ov_load = 0; ov_store = 0;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    chk(n_ld == mt * nt, "number of loads");
    chk(n_cvalid == mt * nt * rows_f, "number of compute rows");
    chk(n_drain == mt * rows_f, "number of drain rows");
    chk(n_st == mt && n_stored == mt, "number of stores");
    chk(n_done == 1, "done pulses");
    $display("layer f=%0d tiles=%0dx%0d: loads %0d rows %0d drains %0d stores %0d, load/compute overlap %0d, store/compute overlap %0d",
             f, mt, nt, n_ld, n_cvalid, n_drain, n_st, ov_load, ov_store);
    if (want_overlap) begin
      chk(ov_load > 0, "loading never overlapped computing");
      chk(ov_store > 0, "storing never overlapped computing");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(21, 2, 2, 3, 7, 1, 5, 3, 3, 9, 1);   // several heads, 8-bit rows span tiles
    run(17, 1, 3, 2, 0, 0, 0, 8, 8, 2, 1);   // load-bound
    run(4, 3, 1, 4, 12, 1, 20, 3, 3, 30, 1); // store-bound, all 8-bit
    run(5, 1, 1, 1, 2, 1, 3, 2, 2, 2, 0);    // single tile
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
