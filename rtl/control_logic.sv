// control_logic: sequences one layer (one GEMM) through the accelerator.
//
// A layer computes Y[M x F] = W[M x N] * X[N x F] in tiles. The N input
// channels are split into n_heads heads of tiles_per_head tiles of T_N
// channels; all n_tiles = n_heads * tiles_per_head input tiles are accumulated
// into one output tile of T_M weight lanes, and there are m_tiles output
// tiles. Tile k = mt * n_tiles + it pairs input tile it with weight tile
// (mt, it); the input tile is fetched again for every output tile, as in the
// paper's latency model.
//
// Three processes run concurrently, coupled only by full/empty flags, which
// gives the double buffering of the paper:
//   load    fetches input tile it and weight tile (mt, it) into ping-pong bank
//           k mod 2 as soon as that bank is empty;
//   compute issues ceil(F/P_F) compute rows per tile from the full bank, then,
//           after the last input tile, drains the accumulators through the SLS
//           unit into output bank mt mod 2 once the storer has emptied it;
//   store   writes each finished output bank to off-chip memory.
// So one tile costs max(L_in, L_wgt, L_cmpt), an output tile
// n_tiles * that + ceil(F/P_F) for the drain, and storing overlaps the next
// output tile.
//
// Lane map (this design's choice for row-wise mixed precision): the w8_rows
// 8-bit rows of a layer come first and take two lanes each (even = low nibble,
// unsigned; odd = high nibble, signed); the 4-bit rows follow, one lane each.
// For the output tile in the engine the block derives per lane: weight
// signedness, whether the lane pair is one 8-bit row, and the SLS table index
// sls_offset + row.
//
// Interface: start (while idle) with cfg valid; busy until done pulses after the
// last output tile is stored. Off-chip addresses, in 128-bit words:
//   input  tile it, token f, word s : in_base  + (it*F + f)*WPT + s
//   weight tile k, lane r,  word s  : wgt_base + (k*T_M + r)*WPW + s
//   output tile mt, token f, word s : out_base + (mt*F + f)*OPT + s
//
// Timing: load, compute and store advance independently; a compute row
// issues every cycle while a loaded bank is available; drain starts two cycles
// after the last compute row of an output tile (engine pipeline). The tiling
// order and the overlap follow the paper; the descriptor, the flags and the
// address layout are this design's. Lint note: rst_n is reported as used both
// asynchronously and synchronously; the synchronous use is the disable
// condition of the drain assertion and makes no logic.
module control_logic
  import quasar_pkg::*;
#(
  parameter int T_M          = 72,
  parameter int T_N          = 16,
  parameter int P_F          = 8,
  parameter int F_MAX        = 197,
  parameter int LAMBDA_DEPTH = 448,
  localparam int ROWS  = (F_MAX + P_F - 1) / P_F,
  localparam int ROW_W = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int TOKS  = ROWS * P_F,
  localparam int TOK_W = $clog2(TOKS),
  localparam int LI_W  = $clog2(LAMBDA_DEPTH),
  localparam int WPT   = (T_N + D_ACT - 1) / D_ACT,
  localparam int WPW   = (T_N + D_WGT - 1) / D_WGT,
  localparam int OPT   = (T_M + D_ACT - 1) / D_ACT
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  layer_cfg_t        cfg,
  output logic              busy,
  output logic              done,
  // tile loaders
  output logic              ld_start,
  output logic              ld_bank,
  output logic [ADDR_W-1:0] in_ld_base,
  output logic [TOK_W:0]    in_ld_items,
  output logic [ADDR_W-1:0] wgt_ld_base,
  input  logic              in_ld_done,
  input  logic              wgt_ld_done,
  // GEMM engine, compute side
  output logic              c_valid,
  output logic [ROW_W-1:0]  c_row,
  output logic              c_first,
  output logic              c_bank,
  output logic [TOK_W-1:0]  act_rd_base,
  output logic              wgt_signed [T_M],
  // GEMM engine, drain side, and SLS
  output logic              d_valid,
  output logic [ROW_W-1:0]  d_row,
  output logic              w8pair     [T_M/2],
  output logic [LI_W-1:0]   lam_idx    [T_M],
  output logic              sls_en,
  output logic [4:0]        out_shift,
  output logic              ob_wr_bank,
  // storer
  output logic              st_start,
  output logic              st_bank,
  output logic [ADDR_W-1:0] st_base,
  output logic [TOK_W:0]    st_items,
  input  logic              st_done
);
  typedef enum logic [1:0] {L_IDLE, L_WAIT, L_RUN} ld_state_e;
  typedef enum logic [2:0] {C_IDLE, C_WAIT, C_RUN, C_DWAIT, C_DRAIN, C_DDONE} c_state_e;
  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_RUN} st_state_e;

  layer_cfg_t cfg_q;
  ld_state_e  ld_st;
  c_state_e   c_st;
  st_state_e  s_st;

  logic [31:0] n_tiles, tot_tiles, rows_f;
  logic [1:0]  in_full, ob_full;
  logic [1:0]  in_full_set, in_full_clr, ob_full_set, ob_full_clr;

  // load process
  logic [31:0] ld_k, ld_it;
  logic [ADDR_W-1:0] in_off, wgt_off;
  logic in_got, wgt_got;
  // compute process
  logic [31:0] c_k, c_it, c_mt, lane_base;
  logic [1:0]  wcnt;
  // store process
  logic [31:0] s_mt;
  logic [ADDR_W-1:0] st_off;

  always_comb begin
    n_tiles   = 32'(cfg_q.n_heads) * 32'(cfg_q.tiles_per_head);
    tot_tiles = 32'(cfg_q.m_tiles) * n_tiles;
    rows_f    = (32'(cfg_q.f) + P_F - 1) / P_F;
  end

  assign busy        = (ld_st != L_IDLE) || (c_st != C_IDLE) || (s_st != S_IDLE);
  assign ld_bank     = ld_k[0];
  assign in_ld_base  = cfg_q.in_base + in_off;
  assign in_ld_items = (TOK_W+1)'(cfg_q.f);
  assign wgt_ld_base = cfg_q.wgt_base + wgt_off;
  assign c_valid     = (c_st == C_RUN);
  assign c_first     = (c_it == 0);
  assign c_bank      = c_k[0];
  assign act_rd_base = TOK_W'(32'(c_row) * P_F);
  assign d_valid     = (c_st == C_DRAIN);
  assign sls_en      = cfg_q.sls_en;
  assign out_shift   = cfg_q.out_shift;
  assign ob_wr_bank  = c_mt[0];
  assign st_bank     = s_mt[0];
  assign st_base     = cfg_q.out_base + st_off;
  assign st_items    = (TOK_W+1)'(cfg_q.f);

  // per-lane configuration of the output tile in the engine
  always_comb begin
    for (int j = 0; j < T_M; j++) begin
      logic [31:0] l;
      logic        is_w8;
      l     = lane_base + 32'(j);
      is_w8 = l < (32'(cfg_q.w8_rows) << 1);
      wgt_signed[j] = !is_w8 || l[0];
      lam_idx[j]    = LI_W'(32'(cfg_q.sls_offset) + (is_w8 ? (l >> 1) : (l - 32'(cfg_q.w8_rows))));
    end
    for (int k = 0; k < T_M / 2; k++)
      w8pair[k] = (lane_base + 32'(2 * k)) < (32'(cfg_q.w8_rows) << 1);
  end

  // ---------------- load ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_st    <= L_IDLE;
      ld_start <= 1'b0;
      ld_k     <= '0;
      ld_it    <= '0;
      in_off   <= '0;
      wgt_off  <= '0;
      in_got   <= 1'b0;
      wgt_got  <= 1'b0;
    end else begin
      ld_start <= 1'b0;
      case (ld_st)
        L_IDLE: if (start && !busy) begin
          ld_st   <= L_WAIT;
          ld_k    <= '0;
          ld_it   <= '0;
          in_off  <= '0;
          wgt_off <= '0;
        end
        L_WAIT: if (!in_full[ld_k[0]]) begin
          ld_start <= 1'b1;
          in_got   <= 1'b0;
          wgt_got  <= 1'b0;
          ld_st    <= L_RUN;
        end
        L_RUN: begin
          in_got  <= in_got | in_ld_done;
          wgt_got <= wgt_got | wgt_ld_done;
          if ((in_got || in_ld_done) && (wgt_got || wgt_ld_done)) begin
            wgt_off <= wgt_off + ADDR_W'(T_M * WPW);
            if (ld_it == n_tiles - 1) begin
              ld_it  <= '0;
              in_off <= '0;
            end else begin
              ld_it  <= ld_it + 1;
              in_off <= in_off + ADDR_W'(32'(cfg_q.f) * WPT);
            end
            ld_k  <= ld_k + 1;
            ld_st <= (ld_k == tot_tiles - 1) ? L_IDLE : L_WAIT;
          end
        end
        default: ld_st <= L_IDLE;
      endcase
    end
  end

  always_comb begin
    in_full_set = '0;
    if (ld_st == L_RUN && (in_got || in_ld_done) && (wgt_got || wgt_ld_done))
      in_full_set[ld_k[0]] = 1'b1;
    in_full_clr = '0;
    if (c_st == C_RUN && 32'(c_row) == rows_f - 1) in_full_clr[c_k[0]] = 1'b1;
    ob_full_set = '0;
    if (c_st == C_DDONE && wcnt == 2'd1) ob_full_set[c_mt[0]] = 1'b1;
    ob_full_clr = '0;
    if (s_st == S_RUN && st_done) ob_full_clr[s_mt[0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_full <= '0;
      ob_full <= '0;
    end else begin
      in_full <= (in_full | in_full_set) & ~in_full_clr;
      ob_full <= (ob_full | ob_full_set) & ~ob_full_clr;
    end
  end

  // ---------------- compute and drain ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_st      <= C_IDLE;
      c_k       <= '0;
      c_it      <= '0;
      c_mt      <= '0;
      c_row     <= '0;
      d_row     <= '0;
      lane_base <= '0;
      wcnt      <= '0;
    end else begin
      case (c_st)
        C_IDLE: if (start && !busy) begin
          c_st      <= C_WAIT;
          c_k       <= '0;
          c_it      <= '0;
          c_mt      <= '0;
          lane_base <= '0;
        end
        C_WAIT: if (in_full[c_k[0]]) begin
          c_row <= '0;
          c_st  <= C_RUN;
        end
        C_RUN: begin
          if (32'(c_row) == rows_f - 1) begin
            c_k <= c_k + 1;
            if (c_it == n_tiles - 1) begin
              c_it <= '0;
              wcnt <= '0;
              c_st <= C_DWAIT;
            end else begin
              c_it <= c_it + 1;
              c_st <= C_WAIT;
            end
          end else c_row <= c_row + 1'b1;
        end
        C_DWAIT: begin
          if (wcnt != 2'd3) wcnt <= wcnt + 1'b1;
          if (wcnt != 2'd0 && !ob_full[c_mt[0]]) begin
            d_row <= '0;
            c_st  <= C_DRAIN;
          end
        end
        C_DRAIN: begin
          if (32'(d_row) == rows_f - 1) begin
            wcnt <= '0;
            c_st <= C_DDONE;
          end else d_row <= d_row + 1'b1;
        end
        C_DDONE: begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == 2'd1) begin
            c_mt      <= c_mt + 1;
            lane_base <= lane_base + 32'(T_M);
            c_st      <= (c_mt == 32'(cfg_q.m_tiles) - 1) ? C_IDLE : C_WAIT;
          end
        end
        default: c_st <= C_IDLE;
      endcase
    end
  end

  // ---------------- store ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_st     <= S_IDLE;
      s_mt     <= '0;
      st_off   <= '0;
      st_start <= 1'b0;
      done     <= 1'b0;
      cfg_q    <= '0;
    end else begin
      st_start <= 1'b0;
      done     <= 1'b0;
      case (s_st)
        S_IDLE: if (start && !busy) begin
          cfg_q  <= cfg;
          s_mt   <= '0;
          st_off <= '0;
          s_st   <= S_WAIT;
        end
        S_WAIT: if (ob_full[s_mt[0]]) begin
          st_start <= 1'b1;
          s_st     <= S_RUN;
        end
        S_RUN: if (st_done) begin
          s_mt   <= s_mt + 1;
          st_off <= st_off + ADDR_W'(32'(cfg_q.f) * OPT);
          if (s_mt == 32'(cfg_q.m_tiles) - 1) begin
            done <= 1'b1;
            s_st <= S_IDLE;
          end else s_st <= S_WAIT;
        end
        default: s_st <= S_IDLE;
      endcase
    end
  end

  // the drain may only write an output bank the storer has released
  assert property (@(posedge clk) disable iff (!rst_n)
                   (c_st == C_DRAIN) |-> !ob_full[c_mt[0]])
    else $error("control_logic: drain into a full output bank");
endmodule
