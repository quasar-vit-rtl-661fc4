// gemm_engine: the PE array of the accelerator with its accumulators.
//
// Each compute cycle the engine takes P_F tokens x T_N input channels of
// activations and a T_M x T_N tile of 4-bit weight lanes, forms all
// P_F x T_M x T_N products and reduces them over T_N (the paper's fully
// parallel T_m x T_n MACs, with parallel factor P_F along the tokens). The
// P_F x T_M partial sums are added into an accumulator row, one row per
// P_F tokens, so that the sums over all input tiles of every head build up in
// place (c_first starts a new output tile).
//
// Array layout (this design's choice): the first P_F - P_F_LUT tokens are served
// by DSP-packed PEs (packing factor PACK = 4: 2 tokens x 2 lanes per DSP, or
// PACK = 3: 1 token x 3 lanes per DSP), the last P_F_LUT tokens by pure-LUT
// PEs, which is how the paper fills the LUTs left over after the DSPs.
//
// Drain: d_valid/d_row read one accumulator row; one cycle later o_valid/o_val
// give it with the 8-bit rows recombined: for a lane pair k with w8pair[k] set,
// lane 2k (low nibble, unsigned) and lane 2k+1 (high nibble, signed) give
// o_val[2k] = (acc[2k+1] << 4) + acc[2k] and o_val[2k+1] = 0.
//
// Timing: compute inputs are registered once (stage 1) and written into the
// accumulators on the next edge (stage 2); a drain of a row must start at
// least two cycles after its last compute issue.
//
// The 4-bit atomic units, the 8-bit recombination and the token-parallel
// factor P_F follow the paper; accumulator memory, pipeline and lane order are
// this design's. Lint note: unused upper DSP product bits are explained in
// dsp_pack4.
module gemm_engine
  import quasar_pkg::*;
#(
  parameter int T_M     = 72,
  parameter int T_N     = 16,
  parameter int P_F     = 8,
  parameter int P_F_LUT = 2,
  parameter int PACK    = 4,
  parameter int F_MAX   = 197,
  localparam int ROWS   = (F_MAX + P_F - 1) / P_F,
  localparam int ROW_W  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // compute
  input  logic                    c_valid,
  input  logic [ROW_W-1:0]        c_row,
  input  logic                    c_first,
  input  logic signed [ACT_W-1:0] act        [P_F][T_N],
  input  logic        [NIB_W-1:0] wgt        [T_M][T_N],
  input  logic                    wgt_signed [T_M],
  // drain
  input  logic                    d_valid,
  input  logic [ROW_W-1:0]        d_row,
  input  logic                    w8pair     [T_M/2],
  output logic                    o_valid,
  output logic [ROW_W-1:0]        o_row,
  output logic signed [OUTV_W-1:0] o_val     [P_F][T_M]
);
  localparam int P_F_DSP = P_F - P_F_LUT;
  localparam int PSUM_W  = PROD_W + $clog2(T_N);

  initial begin
    assert (T_M % 2 == 0) else $error("T_M must be even (8-bit rows use lane pairs)");
    assert (PACK == 3 || PACK == 4) else $error("PACK must be 3 or 4");
    assert (PACK != 4 || (P_F_DSP % 2 == 0)) else $error("PACK 4 needs an even number of DSP tokens");
    assert (PACK != 3 || (T_M % 3 == 0)) else $error("PACK 3 needs T_M divisible by 3");
  end

  logic signed [PSUM_W-1:0] psum [P_F][T_M];

  // ---------------- PE array ----------------
  if (PACK == 4) begin : g_pack4
    for (genvar g = 0; g < P_F_DSP / 2; g++) begin : g_tok
      for (genvar k = 0; k < T_M / 2; k++) begin : g_lane
        logic signed [ACT_W-1:0]  a [2][T_N];
        logic        [NIB_W-1:0]  w [2][T_N];
        logic                     s [2];
        logic signed [PSUM_W-1:0] ps [2][2];
        always_comb
          for (int i = 0; i < 2; i++) begin
            a[i] = act[2*g+i];
            w[i] = wgt[2*k+i];
            s[i] = wgt_signed[2*k+i];
          end
        pe #(.KIND(PE_DSP4), .T_N(T_N)) u_pe (.act(a), .wgt(w), .wgt_signed(s), .psum(ps));
        always_comb
          for (int t = 0; t < 2; t++)
            for (int l = 0; l < 2; l++) psum[2*g+t][2*k+l] = ps[t][l];
      end
    end
  end else begin : g_pack3
    for (genvar g = 0; g < P_F_DSP; g++) begin : g_tok
      for (genvar k = 0; k < T_M / 3; k++) begin : g_lane
        logic signed [ACT_W-1:0]  a [1][T_N];
        logic        [NIB_W-1:0]  w [3][T_N];
        logic                     s [3];
        logic signed [PSUM_W-1:0] ps [1][3];
        always_comb begin
          a[0] = act[g];
          for (int i = 0; i < 3; i++) begin
            w[i] = wgt[3*k+i];
            s[i] = wgt_signed[3*k+i];
          end
        end
        pe #(.KIND(PE_DSP3), .T_N(T_N)) u_pe (.act(a), .wgt(w), .wgt_signed(s), .psum(ps));
        always_comb
          for (int l = 0; l < 3; l++) psum[g][3*k+l] = ps[0][l];
      end
    end
  end

  for (genvar g = P_F_DSP; g < P_F; g++) begin : g_lut_tok
    for (genvar k = 0; k < T_M; k++) begin : g_lane
      logic signed [ACT_W-1:0]  a [1][T_N];
      logic        [NIB_W-1:0]  w [1][T_N];
      logic                     s [1];
      logic signed [PSUM_W-1:0] ps [1][1];
      always_comb begin
        a[0] = act[g];
        w[0] = wgt[k];
        s[0] = wgt_signed[k];
      end
      pe #(.KIND(PE_LUT), .T_N(T_N)) u_pe (.act(a), .wgt(w), .wgt_signed(s), .psum(ps));
      assign psum[g][k] = ps[0][0];
    end
  end

  // ---------------- accumulation ----------------
  logic signed [ACC_W-1:0]  acc_mem [ROWS][P_F][T_M];
  logic signed [PSUM_W-1:0] ps_q    [P_F][T_M];
  logic                     s1_valid, s1_first;
  logic [ROW_W-1:0]         s1_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_row   <= '0;
    end else begin
      s1_valid <= c_valid;
      s1_first <= c_first;
      s1_row   <= c_row;
    end
  end

  always_ff @(posedge clk) begin
    if (c_valid) ps_q <= psum;
    if (s1_valid)
      for (int t = 0; t < P_F; t++)
        for (int m = 0; m < T_M; m++)
          acc_mem[s1_row][t][m] <= s1_first ? ACC_W'(ps_q[t][m])
                                            : acc_mem[s1_row][t][m] + ACC_W'(ps_q[t][m]);
  end

  // ---------------- drain with 8-bit recombination ----------------
  logic signed [ACC_W-1:0] rd_q [P_F][T_M];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0;
      o_row   <= '0;
    end else begin
      o_valid <= d_valid;
      o_row   <= d_row;
    end
  end

  always_ff @(posedge clk)
    if (d_valid) rd_q <= acc_mem[d_row];

  always_comb begin
    for (int t = 0; t < P_F; t++)
      for (int k = 0; k < T_M / 2; k++) begin
        if (w8pair[k]) begin
          o_val[t][2*k]   = (OUTV_W'(rd_q[t][2*k+1]) <<< NIB_W) + OUTV_W'(rd_q[t][2*k]);
          o_val[t][2*k+1] = '0;
        end else begin
          o_val[t][2*k]   = OUTV_W'(rd_q[t][2*k]);
          o_val[t][2*k+1] = OUTV_W'(rd_q[t][2*k+1]);
        end
      end
  end
endmodule
