// tb_quasar_top: end-to-end self-checking testbench of quasar_top at reduced sizes.
//
// For each layer it draws random 6-bit activations, 4-bit weight lanes (with a
// number of 8-bit rows split over lane pairs) and SLS scales, lays them out in
// the memory model in the accelerator's tile format, runs the layer and
// compares every output word with a reference computed here from the
// definitions (sum of products, 8-bit row = (high << 4) + low, optional scale,
// round-to-nearest shift, saturation to 6 bits). It also compares the run time
// of a stall-free layer with the tiled latency model, and counts how often each
// mechanism occurred: load/compute overlap, store/compute overlap, memory
// back-pressure, 8-bit row recombination, SLS and SLS bypass, saturation,
// several heads and a partial last token group. A mechanism that never occurred
// counts as a failure.
//
// Interface and timing: no ports; a 10 ns clock generated here, stimulus
// applied away from the active edge, and a watchdog that counts a failure and
// ends the run if the test hangs. The reference values are computed here from
// the arithmetic definitions, independently of the design.
module tb_quasar_top;
  import quasar_pkg::*;
  localparam int T_M = 12, T_N = 20, P_F = 4, P_F_LUT = 2, PACK = 4;
  localparam int A_IN = 2, A_WGT = 2, A_OUT = 1, F_MAX = 21, LD = 64;
  localparam int WPT  = (T_N + D_ACT - 1) / D_ACT;
  localparam int WPW  = (T_N + D_WGT - 1) / D_WGT;
  localparam int OPT  = (T_M + D_ACT - 1) / D_ACT;
  localparam int LI_W = $clog2(LD);
  localparam int LAT  = 4;
  localparam int DEPTH = 65536;
  localparam logic [ADDR_W-1:0] IN_BASE  = 32'h0000;
  localparam logic [ADDR_W-1:0] WGT_BASE = 32'h4000;
  localparam logic [ADDR_W-1:0] OUT_BASE = 32'h8000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  layer_cfg_t cfg;
  logic lam_we = 1'b0;
  logic [LI_W-1:0] lam_addr = '0;
  logic signed [LAMBDA_W-1:0] lam_data = '0;
  logic              in_ar_valid [A_IN], in_ar_ready [A_IN], in_r_valid [A_IN];
  logic [ADDR_W-1:0] in_ar_addr [A_IN];
  logic [AXI_W-1:0]  in_r_data [A_IN];
  logic              wgt_ar_valid [A_WGT], wgt_ar_ready [A_WGT], wgt_r_valid [A_WGT];
  logic [ADDR_W-1:0] wgt_ar_addr [A_WGT];
  logic [AXI_W-1:0]  wgt_r_data [A_WGT];
  logic              out_w_valid [A_OUT], out_w_ready [A_OUT];
  logic [ADDR_W-1:0] out_w_addr [A_OUT];
  logic [AXI_W-1:0]  out_w_data [A_OUT];

  quasar_top #(.T_M(T_M), .T_N(T_N), .P_F(P_F), .P_F_LUT(P_F_LUT), .PACK(PACK), .A_IN(A_IN),
               .A_WGT(A_WGT), .A_OUT(A_OUT), .F_MAX(F_MAX), .LAMBDA_DEPTH(LD)) u_dut (
    .clk, .rst_n, .start, .cfg, .busy, .done, .lam_we, .lam_addr, .lam_data,
    .in_ar_valid, .in_ar_addr, .in_ar_ready, .in_r_valid, .in_r_data,
    .wgt_ar_valid, .wgt_ar_addr, .wgt_ar_ready, .wgt_r_valid, .wgt_r_data,
    .out_w_valid, .out_w_addr, .out_w_data, .out_w_ready);

  ddr_model #(.NR0(A_IN), .NR1(A_WGT), .NW(A_OUT), .DEPTH(DEPTH), .LAT(LAT)) u_ddr (
    .clk, .rst_n,
    .ar0_valid(in_ar_valid), .ar0_addr(in_ar_addr), .ar0_ready(in_ar_ready),
    .r0_valid(in_r_valid), .r0_data(in_r_data),
    .ar1_valid(wgt_ar_valid), .ar1_addr(wgt_ar_addr), .ar1_ready(wgt_ar_ready),
    .r1_valid(wgt_r_valid), .r1_data(wgt_r_data),
    .w_valid(out_w_valid), .w_addr(out_w_addr), .w_data(out_w_data), .w_ready(out_w_ready));

  int checks = 0, failures = 0;
  int n_ovl_load = 0, n_ovl_store = 0, n_w8 = 0, n_sls = 0, n_bypass = 0;
  int n_sat = 0, n_multihead = 0, n_partial = 0, n_latency = 0;

  // mechanism monitors
  always @(posedge clk) begin
    if (u_dut.u_in_ld.busy && u_dut.c_valid) n_ovl_load++;
    if (u_dut.u_store.busy && u_dut.c_valid) n_ovl_store++;
    if (u_dut.d_valid && u_dut.w8pair[0]) n_w8++;
    if (u_dut.d_valid && u_dut.sls_en) n_sls++;
    if (u_dut.d_valid && !u_dut.sls_en) n_bypass++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int X [][];     // [channel][token]
  int WN [][];    // [lane][channel] nibble 0..15
  int LAMV [LD];

  function automatic longint lane_sum(int l, int t, int nch, int w8);
    longint s = 0;
    bit sgn = !(l < 2 * w8) || (l % 2 == 1);
    for (int c = 0; c < nch; c++) begin
      int w = WN[l][c];
      if (sgn && w > 7) w -= 16;
      s += longint'(X[c][t]) * w;
    end
    return s;
  endfunction

  // When set, 8-bit rows carry 6-bit activation values (a key or value matrix
  // used as the weight operand of an attention product), sign-extended to 8 bits.
  bit wgt_act6 = 1'b0;

  task automatic run_layer(int f, int nh, int tph, int mt, int w8, bit sls, int offs,
                           int shift, int stall, bit chk_lat);
    int nit = nh * tph;
    int nch = nit * T_N;
    int lanes = mt * T_M;
    int cyc;
    X  = new[nch];
    WN = new[lanes];
    for (int c = 0; c < nch; c++) begin
      X[c] = new[f];
      for (int t = 0; t < f; t++) X[c][t] = int'($urandom % 64) - 32;
    end
    for (int l = 0; l < lanes; l++) begin
      WN[l] = new[nch];
      for (int c = 0; c < nch; c++) WN[l][c] = int'($urandom % 16);
    end
    if (wgt_act6)
      for (int r = 0; r < w8; r++)
        for (int c = 0; c < nch; c++) begin
          int v = int'($urandom % 64) - 32;
          WN[2*r][c]   = v & 15;
          WN[2*r+1][c] = (v >>> 4) & 15;
        end
    // input tiles: (it, token, word) -> 8-bit containers
    for (int it = 0; it < nit; it++)
      for (int t = 0; t < f; t++)
        for (int s = 0; s < WPT; s++) begin
          logic [AXI_W-1:0] wd = '0;
          for (int e = 0; e < D_ACT; e++)
            if (s * D_ACT + e < T_N) wd[e*ACT_CW +: ACT_CW] = 8'(X[it*T_N + s*D_ACT + e][t]);
          u_ddr.mem[IN_BASE + (it * f + t) * WPT + s] = wd;
        end
    // weight tiles: (mt, it, lane, word) -> nibbles
    for (int m = 0; m < mt; m++)
      for (int it = 0; it < nit; it++)
        for (int r = 0; r < T_M; r++)
          for (int s = 0; s < WPW; s++) begin
            logic [AXI_W-1:0] wd = '0;
            for (int e = 0; e < D_WGT; e++)
              if (s * D_WGT + e < T_N) wd[e*NIB_W +: NIB_W] = 4'(WN[m*T_M + r][it*T_N + s*D_WGT + e]);
            u_ddr.mem[WGT_BASE + ((m * nit + it) * T_M + r) * WPW + s] = wd;
          end
    for (int a = 0; a < mt * f * OPT; a++) u_ddr.mem[OUT_BASE + a] = {AXI_W/8{8'hA5}};
    // scales
    for (int i = 0; i < LD; i++) begin
      LAMV[i] = int'($urandom % 16384) - 8192;
      @(negedge clk);
      lam_we = 1'b1; lam_addr = LI_W'(i); lam_data = LAMBDA_W'(LAMV[i]);
    end
    @(negedge clk) lam_we = 1'b0;
    cfg = '0;
    cfg.m_tiles = 16'(mt);  cfg.w8_rows = 16'(w8);  cfg.n_heads = 8'(nh);
    cfg.tiles_per_head = 16'(tph);  cfg.f = 9'(f);  cfg.sls_en = sls;
    cfg.sls_offset = 16'(offs);  cfg.out_shift = 5'(shift);
    cfg.in_base = IN_BASE;  cfg.wgt_base = WGT_BASE;  cfg.out_base = OUT_BASE;
    u_ddr.stall_pct = stall;
    if (nh > 1) n_multihead++;
    if (f % P_F != 0) n_partial++;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    // compare every output word
    for (int m = 0; m < mt; m++)
      for (int t = 0; t < f; t++)
        for (int s = 0; s < OPT; s++) begin
          logic [AXI_W-1:0] exp_w = '0;
          logic [AXI_W-1:0] got;
          for (int e = 0; e < D_ACT; e++) begin
            int j = s * D_ACT + e;
            if (j < T_M) begin
              int l = m * T_M + j;
              bit is8 = l < 2 * w8;
              longint v, prod, rnd;
              int row, sh, li;
              if (is8) v = (l % 2 == 0) ? (lane_sum(l + 1, t, nch, w8) <<< 4) + lane_sum(l, t, nch, w8) : 0;
              else     v = lane_sum(l, t, nch, w8);
              row  = is8 ? l / 2 : l - w8;
              sh   = LAMBDA_FR + shift;
              li   = (offs + row) % (1 << LI_W);
              prod = sls ? v * ((li < LD) ? LAMV[li] : 0) : v <<< LAMBDA_FR;
              rnd  = (prod + (64'sd1 <<< (sh - 1))) >>> sh;
              if (rnd > 31)  begin rnd = 31;  n_sat++; end
              if (rnd < -32) begin rnd = -32; n_sat++; end
              exp_w[e*ACT_CW +: ACT_CW] = 8'(rnd);
            end
          end
          got = u_ddr.mem[OUT_BASE + (m * f + t) * OPT + s];
          checks++;
          if (got !== exp_w) begin
            failures++;
            if (failures < 10)
              $display("MISMATCH tile %0d token %0d word %0d: got %h exp %h", m, t, s, got, exp_w);
          end
        end
    if (chk_lat) begin
      int model = model_cycles(T_M, T_N, P_F, A_IN, A_WGT, A_OUT, f, nit, mt);
      int slack = nit * mt * (LAT + 6) + mt * 12 + 30;
      // with two output banks a store-bound layer may finish up to one
      // output-tile store (L_out) earlier than the formula
      int l_out = ((T_M + D_ACT - 1) / D_ACT) * ((f + A_OUT - 1) / A_OUT);
      $display("layer f=%0d heads=%0d tiles/head=%0d out tiles=%0d: %0d cycles, model %0d",
               f, nh, tph, mt, cyc, model, slack);
      checks++;
      n_latency++;
      if (cyc < model - l_out || cyc > model + slack) begin
        failures++;
        $display("LATENCY outside [model - %0d, model + %0d]", l_out, slack);
      end
    end else
      $display("layer f=%0d heads=%0d tiles/head=%0d out tiles=%0d: %0d cycles (with stalls)",
               f, nh, tph, mt, cyc);
  endtask

  task automatic need(string what, int n);
    checks++;
    $display("mechanism %-28s %0d", what, n);
    if (n == 0) begin
      failures++;
      $display("mechanism %s never occurred", what);
    end
  endtask

  task automatic chk_pack(longint s_dsp, longint s_lut, int expect_pack);
    checks++;
    if (pack_choice(s_dsp, s_lut, 64'd70, 64'd70) != expect_pack) begin
      failures++;
      $display("packing rule for %0d DSP / %0d LUT: got %0d, expected %0d",
               s_dsp, s_lut, pack_choice(s_dsp, s_lut, 64'd70, 64'd70), expect_pack);
    end
  endtask

  initial begin
    // packing-factor rule, cases worked out by hand: plenty of LUTs (the
    // default device), LUT-limited between the two demands (both outcomes),
    // and too few LUTs even for packing factor 3
    chk_pack(2520, 274080, 4);
    chk_pack(2520, 120000, 4);
    chk_pack(2520, 90000, 3);
    chk_pack(2520, 60000, 3);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // f, heads, tiles/head, out tiles, 8-bit rows, sls, offset, shift, stall %, latency
    run_layer(21, 2, 2, 3, 8, 1'b1, 5, 8, 30, 1'b0);
    run_layer(17, 1, 3, 2, 0, 1'b0, 0, 5, 0, 1'b1);
    run_layer(4, 3, 1, 2, 12, 1'b1, 9, 7, 0, 1'b1);
    run_layer(21, 1, 1, 1, 3, 1'b0, 0, 2, 10, 1'b0);
    need("load/compute overlap", n_ovl_load);
    need("store/compute overlap", n_ovl_store);
    need("memory back-pressure", int'(u_ddr.stall_events));
    need("8-bit row recombination", n_w8);
    need("SLS scaling", n_sls);
    need("SLS bypass", n_bypass);
    need("saturation", n_sat);
    need("several heads", n_multihead);
    need("partial token group", n_partial);
    need("latency check", n_latency);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
