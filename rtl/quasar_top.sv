// quasar_top: FPGA-side accelerator for the linear layers of a mixed-precision
// (4-bit / 8-bit weight, 6-bit activation) vision transformer.
//
// Structure: control logic sequences a layer; two tile loaders bring input
// activations and 4-bit weight lanes from off-chip memory into two ping-pong
// buffers; the GEMM engine (an array of DSP-packed and LUT-only PEs with
// accumulators) multiplies them; finished output tiles pass the SLS unit
// (per-channel layer scaling, or bypass) and requantisation into a two-bank
// output buffer, from which the storer writes them back. LayerNorm, Softmax and
// GELU run on the host processor, which shares the off-chip memory.
//
// Default sizes (this design's choices, the paper gives no tile sizes): T_M = 72
// weight lanes by T_N = 16 input channels, P_F = 8 tokens per cycle, of which 6
// on packing-factor-4 DSPs (1728 DSP slices, 69% of an XCZU9EG) and 2 on LUT
// multipliers; 4 input, 2 weight and 2 output ports of 128 bits; up to 197
// tokens (224x224 image, 16x16 patches, plus the class token).
//
// Interface: host writes lambdas (lam_*), sets cfg and pulses start; done
// pulses when the layer's output is in memory. Read ports: *_ar_valid/ready/
// addr issue word addresses, *_r_valid/r_data return words in order, one per
// cycle at most, always accepted. Write ports: out_w_valid/ready/addr/data.
//
// Block partition, SLS placement with a bypass, double buffering and the
// DSP/LUT mix follow the paper; port counts, widths, buffer organisation and
// requantisation are this design's. Lint notes: the unused upper DSP product
// bits (see dsp_pack4) and the rst_n used in assertion disable conditions (see
// tile_loader) are reported through this module too.
module quasar_top
  import quasar_pkg::*;
#(
  parameter int T_M          = 72,
  parameter int T_N          = 16,
  parameter int P_F          = 8,
  parameter int P_F_LUT      = 2,
  parameter int PACK         = pack_choice(DEV_DSP, DEV_LUT, UTIL_PCT, UTIL_PCT),
  parameter int A_IN         = 4,
  parameter int A_WGT        = 2,
  parameter int A_OUT        = 2,
  parameter int F_MAX        = 197,
  parameter int LAMBDA_DEPTH = 448,
  localparam int LI_W        = $clog2(LAMBDA_DEPTH)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  layer_cfg_t                 cfg,
  output logic                       busy,
  output logic                       done,
  input  logic                       lam_we,
  input  logic [LI_W-1:0]            lam_addr,
  input  logic signed [LAMBDA_W-1:0] lam_data,
  output logic                       in_ar_valid  [A_IN],
  output logic [ADDR_W-1:0]          in_ar_addr   [A_IN],
  input  logic                       in_ar_ready  [A_IN],
  input  logic                       in_r_valid   [A_IN],
  input  logic [AXI_W-1:0]           in_r_data    [A_IN],
  output logic                       wgt_ar_valid [A_WGT],
  output logic [ADDR_W-1:0]          wgt_ar_addr  [A_WGT],
  input  logic                       wgt_ar_ready [A_WGT],
  input  logic                       wgt_r_valid  [A_WGT],
  input  logic [AXI_W-1:0]           wgt_r_data   [A_WGT],
  output logic                       out_w_valid  [A_OUT],
  output logic [ADDR_W-1:0]          out_w_addr   [A_OUT],
  output logic [AXI_W-1:0]           out_w_data   [A_OUT],
  input  logic                       out_w_ready  [A_OUT]
);
  localparam int ROWS  = (F_MAX + P_F - 1) / P_F;
  localparam int ROW_W = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int TOKS  = ROWS * P_F;
  localparam int TOK_W = $clog2(TOKS);
  localparam int WPT   = (T_N + D_ACT - 1) / D_ACT;
  localparam int WPW   = (T_N + D_WGT - 1) / D_WGT;
  localparam int WT_W  = $clog2(T_M);
  localparam int WPT_W = (WPT > 1) ? $clog2(WPT) : 1;
  localparam int WPW_W = (WPW > 1) ? $clog2(WPW) : 1;

  // control
  logic              ld_start, ld_bank, in_ld_done, wgt_ld_done, in_ld_busy, wgt_ld_busy;
  logic [ADDR_W-1:0] in_ld_base, wgt_ld_base, st_base;
  logic [TOK_W:0]    in_ld_items, st_items;
  logic              c_valid, c_first, c_bank, d_valid, sls_en, ob_wr_bank;
  logic [ROW_W-1:0]  c_row, d_row;
  logic [TOK_W-1:0]  act_rd_base;
  logic              wgt_signed [T_M];
  logic              w8pair     [T_M/2];
  logic [LI_W-1:0]   lam_idx    [T_M];
  logic [4:0]        out_shift;
  logic              st_start, st_bank, st_done, st_busy, ctrl_busy;

  // the sequencer is busy whenever a loader or the storer is; the OR only
  // makes the top-level flag independent of that internal detail
  assign busy = ctrl_busy | in_ld_busy | wgt_ld_busy | st_busy;

  control_logic #(.T_M(T_M), .T_N(T_N), .P_F(P_F), .F_MAX(F_MAX),
                  .LAMBDA_DEPTH(LAMBDA_DEPTH)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy(ctrl_busy), .done,
    .ld_start, .ld_bank, .in_ld_base, .in_ld_items, .wgt_ld_base,
    .in_ld_done, .wgt_ld_done,
    .c_valid, .c_row, .c_first, .c_bank, .act_rd_base, .wgt_signed,
    .d_valid, .d_row, .w8pair, .lam_idx, .sls_en, .out_shift, .ob_wr_bank,
    .st_start, .st_bank, .st_base, .st_items, .st_done);

  // input tile: tokens x T_N activations
  logic              in_wr_en   [A_IN];
  logic [TOK_W-1:0]  in_wr_item [A_IN];
  logic [WPT_W-1:0]  in_wr_word [A_IN];
  logic [AXI_W-1:0]  in_wr_data [A_IN];
  logic [ACT_W-1:0]  act_u      [P_F][T_N];
  logic signed [ACT_W-1:0] act  [P_F][T_N];

  tile_loader #(.NPORT(A_IN), .WPI(WPT), .ITEMS_MAX(TOKS)) u_in_ld (
    .clk, .rst_n, .start(ld_start), .base(in_ld_base), .n_items(in_ld_items),
    .busy(in_ld_busy), .done(in_ld_done),
    .ar_valid(in_ar_valid), .ar_addr(in_ar_addr), .ar_ready(in_ar_ready),
    .r_valid(in_r_valid), .r_data(in_r_data),
    .wr_en(in_wr_en), .wr_item(in_wr_item), .wr_word(in_wr_word), .wr_data(in_wr_data));

  pingpong_buf #(.ITEMS(TOKS), .ELEMS(T_N), .ELEM_W(ACT_W), .CW(ACT_CW),
                 .NPORT(A_IN), .RD_ITEMS(P_F)) u_in_buf (
    .clk, .wr_bank(ld_bank), .wr_en(in_wr_en), .wr_item(in_wr_item),
    .wr_word(in_wr_word), .wr_data(in_wr_data),
    .rd_bank(c_bank), .rd_base(act_rd_base), .rd_data(act_u));

  // weight tile: T_M lanes x T_N nibbles
  logic              w_wr_en   [A_WGT];
  logic [WT_W-1:0]   w_wr_item [A_WGT];
  logic [WPW_W-1:0]  w_wr_word [A_WGT];
  logic [AXI_W-1:0]  w_wr_data [A_WGT];
  logic [NIB_W-1:0]  wgt       [T_M][T_N];

  tile_loader #(.NPORT(A_WGT), .WPI(WPW), .ITEMS_MAX(T_M)) u_wgt_ld (
    .clk, .rst_n, .start(ld_start), .base(wgt_ld_base), .n_items((WT_W+1)'(T_M)),
    .busy(wgt_ld_busy), .done(wgt_ld_done),
    .ar_valid(wgt_ar_valid), .ar_addr(wgt_ar_addr), .ar_ready(wgt_ar_ready),
    .r_valid(wgt_r_valid), .r_data(wgt_r_data),
    .wr_en(w_wr_en), .wr_item(w_wr_item), .wr_word(w_wr_word), .wr_data(w_wr_data));

  pingpong_buf #(.ITEMS(T_M), .ELEMS(T_N), .ELEM_W(NIB_W), .CW(NIB_W),
                 .NPORT(A_WGT), .RD_ITEMS(T_M)) u_wgt_buf (
    .clk, .wr_bank(ld_bank), .wr_en(w_wr_en), .wr_item(w_wr_item),
    .wr_word(w_wr_word), .wr_data(w_wr_data),
    .rd_bank(c_bank), .rd_base('0), .rd_data(wgt));

  always_comb
    for (int t = 0; t < P_F; t++)
      for (int n = 0; n < T_N; n++) act[t][n] = act_u[t][n];

  // GEMM engine
  logic                     e_valid;
  logic [ROW_W-1:0]         e_row;
  logic signed [OUTV_W-1:0] e_val [P_F][T_M];

  gemm_engine #(.T_M(T_M), .T_N(T_N), .P_F(P_F), .P_F_LUT(P_F_LUT), .PACK(PACK),
                .F_MAX(F_MAX)) u_gemm (
    .clk, .rst_n, .c_valid, .c_row, .c_first, .act, .wgt, .wgt_signed,
    .d_valid, .d_row, .w8pair, .o_valid(e_valid), .o_row(e_row), .o_val(e_val));

  // SLS and requantisation
  logic                    q_valid;
  logic [ROW_W-1:0]        q_row;
  logic signed [ACT_W-1:0] q_val [P_F][T_M];

  sls_unit #(.T_M(T_M), .P_F(P_F), .ROW_W(ROW_W), .LAMBDA_DEPTH(LAMBDA_DEPTH)) u_sls (
    .clk, .rst_n, .lam_we, .lam_addr, .lam_data, .sls_en, .out_shift, .lam_idx,
    .in_valid(e_valid), .in_row(e_row), .in_val(e_val),
    .out_valid(q_valid), .out_row(q_row), .out_q(q_val));

  // output buffer and storer
  logic [TOK_W-1:0]        ob_rd_tok  [A_OUT];
  logic signed [ACT_W-1:0] ob_rd_data [A_OUT][T_M];

  out_buffer #(.T_M(T_M), .P_F(P_F), .F_MAX(F_MAX), .NPORT(A_OUT)) u_obuf (
    .clk, .wr_en(q_valid), .wr_bank(ob_wr_bank), .wr_row(q_row), .wr_data(q_val),
    .rd_bank(st_bank), .rd_tok(ob_rd_tok), .rd_data(ob_rd_data));

  tile_storer #(.T_M(T_M), .NPORT(A_OUT), .TOK_MAX(TOKS)) u_store (
    .clk, .rst_n, .start(st_start), .base(st_base), .n_tok(st_items),
    .busy(st_busy), .done(st_done), .rd_tok(ob_rd_tok), .rd_data(ob_rd_data),
    .w_valid(out_w_valid), .w_addr(out_w_addr), .w_data(out_w_data), .w_ready(out_w_ready));
endmodule
