// quasar_pkg: widths, types and the latency model shared by the mixed-precision
// ViT GEMM accelerator.
//
// Number formats. Activations are 6-bit two's complement (A6). Weights are kept
// in 4-bit "lanes": a 4-bit weight row uses one lane (signed nibble), an 8-bit
// weight row uses two adjacent lanes, the even lane holding the low nibble
// (unsigned) and the odd lane the high nibble (signed), so that
// w8 * a = ((w_hi * a) << 4) + w_lo * a.  A single 4-bit x 6-bit product always
// fits in 10 bits (range -480 .. 465).
//
// Off-chip words are 128 bits wide (a choice of this design). Activations are
// stored one per 8-bit container, 16 per word; weight nibbles 32 per word.
//
// The layer descriptor layer_cfg_t is what the host writes before a start pulse.
//
// The 4-bit atomic weight, 6-bit activation, the split of 8-bit weights and the
// latency equations follow the paper; word width, container sizes, accumulator
// widths and the scale format are this design's. Modules import the whole
// package, so lint lists the constants a given module does not use.
package quasar_pkg;

  localparam int ACT_W     = 6;    // activation width (paper: A6)
  localparam int NIB_W     = 4;    // atomic weight width (paper: 4-bit atomic computation)
  localparam int PROD_W    = 10;   // one 4x6 product
  localparam int ACC_W     = 24;   // accumulator of one weight lane
  localparam int OUTV_W    = 28;   // combined (8-bit row) accumulator value
  localparam int AXI_W     = 128;  // off-chip word width
  localparam int ACT_CW    = 8;    // container width of one activation in a word
  localparam int D_ACT     = AXI_W / ACT_CW;  // activations per word (paper: D_act)
  localparam int D_WGT     = AXI_W / NIB_W;   // weight nibbles per word (paper: D_wgt)
  localparam int ADDR_W    = 32;   // word address
  localparam int LAMBDA_W  = 16;   // SLS scale, signed fixed point
  localparam int LAMBDA_FR = 12;   // fractional bits of the SLS scale

  // Which multiplier a processing element is built from.
  typedef enum logic [1:0] {
    PE_DSP4 = 2'd0,   // DSP packing factor 4: 2 weights x 2 activations
    PE_DSP3 = 2'd1,   // DSP packing factor 3: 3 weights x 1 activation
    PE_LUT  = 2'd2    // pure-LUT multiplier: 1 weight x 1 activation
  } pe_kind_e;

  // Layer descriptor. All addresses are in 128-bit words.
  typedef struct packed {
    logic [15:0] m_tiles;       // output tiles of T_M lanes
    logic [15:0] w8_rows;       // 8-bit rows; they occupy lanes 0 .. 2*w8_rows-1
    logic [7:0]  n_heads;       // heads N_h (1 for a fully connected layer)
    logic [15:0] tiles_per_head;// input tiles of T_N channels per head
    logic [8:0]  f;             // tokens F
    logic        sls_en;        // apply supernet layer scaling
    logic [15:0] sls_offset;    // first lambda of the selected subnet (paper: m)
    logic [4:0]  out_shift;     // requantisation right shift
    logic [ADDR_W-1:0] in_base;
    logic [ADDR_W-1:0] wgt_base;
    logic [ADDR_W-1:0] out_base;
  } layer_cfg_t;

  function automatic int ceil_div(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  // Cycle model of one layer, written after the paper's equations:
  //   L_in  = ceil(T_n/D_act) * ceil(F/A_in)
  //   L_wgt = ceil(T_n/D_wgt) * ceil(T_m/A_wgt)
  //   L_out = ceil(T_m/D_act) * ceil(F/A_out)
  //   L_cmpt= ceil(F/P_F)   (the array is sized so the resource term never dominates)
  //   L1 = max(L_in, L_wgt, L_cmpt);  L2 = max(L1 * n_tiles + L_cmpt, L_out)
  //   L_tot = ceil(M/T_m) * L2 + L_out
  function automatic int model_cycles(input int t_m, input int t_n, input int p_f,
                                      input int a_in, input int a_wgt, input int a_out,
                                      input int f, input int n_tiles, input int m_tiles);
    int l_in, l_wgt, l_out, l_cmpt, l1, l2;
    l_in   = ceil_div(t_n, D_ACT) * ceil_div(f, a_in);
    l_wgt  = ceil_div(t_n, D_WGT) * ceil_div(t_m, a_wgt);
    l_out  = ceil_div(t_m, D_ACT) * ceil_div(f, a_out);
    l_cmpt = ceil_div(f, p_f);
    l1 = l_in;
    if (l_wgt > l1) l1 = l_wgt;
    if (l_cmpt > l1) l1 = l_cmpt;
    l2 = l1 * n_tiles + l_cmpt;
    if (l_out > l2) l2 = l_out;
    return m_tiles * l2 + l_out;
  endfunction

  // Choice of the DSP packing factor from the device resources, following the
  // three situations of the resource model. Costs are LUTs per product in
  // tenths (measured unit costs: packing factor 3 -> 10.9,
  // packing factor 4 -> 12.9, pure LUT -> 33.3); g_dsp and g_lut are the
  // allowed utilisation in percent.
  //   1: LUTs cannot even carry all DSPs at packing factor 3      -> 3
  //   2: LUTs carry all DSPs at packing factor 4                 -> 4 if
  //      (4*C4 - 3*C3) * S_dsp*g_dsp <= S_lut*g_lut * C_lut, else 3
  //   3: in between                                               -> 4 if
  //      (S_lut*g_lut + 3*S_dsp*g_dsp*(C_lut - C3)) / C_lut <= S_lut*g_lut / C4
  localparam longint C_LUT3_X10 = 109;
  localparam longint C_LUT4_X10 = 129;
  localparam longint C_LUT_X10  = 333;

  function automatic int pack_choice(input longint s_dsp, input longint s_lut,
                                     input longint g_dsp, input longint g_lut);
    longint dsp, lut;
    dsp = s_dsp * g_dsp;   // available DSPs x 100
    lut = s_lut * g_lut;   // available LUTs x 100
    if (lut * 10 <= 3 * dsp * C_LUT3_X10)
      return 3;
    if (4 * dsp * C_LUT4_X10 <= lut * 10)
      return ((4 * C_LUT4_X10 - 3 * C_LUT3_X10) * dsp <= lut * C_LUT_X10) ? 4 : 3;
    return ((lut * 10 + 3 * dsp * (C_LUT_X10 - C_LUT3_X10)) * C_LUT4_X10 <= lut * 10 * C_LUT_X10) ? 4 : 3;
  endfunction

  // Resources of the XCZU9EG device of the ZCU102 board and the utilisation
  // aimed at (about 70 % of the DSPs, as a dense FPGA design can still be routed).
  localparam longint DEV_DSP  = 2520;
  localparam longint DEV_LUT  = 274080;
  localparam longint UTIL_PCT = 70;

endpackage
