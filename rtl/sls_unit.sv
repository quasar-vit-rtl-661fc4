// sls_unit: supernet layer scaling (SLS) and requantisation of finished
// output rows, on the way from the GEMM engine to the output buffer.
//
// SLS is a per-output-channel multiplication by a learned scale lambda,
// y_c = lambda_c * z_c, applied after the attention projection and after the
// second MLP layer. For a searched subnet whose output channels are
// m .. n of the supernet, the scales lambda_m .. lambda_n are used; here the
// control logic gives the per-lane table index (lam_idx = m + channel). With sls_en low
// the scale is bypassed (the other linear layers). The residual addition of
// the encoder block is not part of this unit.
//
// Requantisation (this design's choice): the value is shifted right by
// LAMBDA_FR + out_shift with rounding to nearest and saturated to a 6-bit
// activation, so the result can be stored packed like an input activation.
// Lambdas are signed LAMBDA_W-bit fixed point with LAMBDA_FR fractional bits,
// written by the host through lam_we/lam_addr/lam_data.
//
// An index at or past LAMBDA_DEPTH reads a zero scale.
//
// Timing: one register stage; out_* follow in_* by one cycle.
module sls_unit
  import quasar_pkg::*;
#(
  parameter int T_M          = 72,
  parameter int P_F          = 8,
  parameter int ROW_W        = 5,
  parameter int LAMBDA_DEPTH = 448,
  localparam int LI_W        = $clog2(LAMBDA_DEPTH)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       lam_we,
  input  logic [LI_W-1:0]            lam_addr,
  input  logic signed [LAMBDA_W-1:0] lam_data,
  input  logic                       sls_en,
  input  logic [4:0]                 out_shift,
  input  logic [LI_W-1:0]            lam_idx  [T_M],
  input  logic                       in_valid,
  input  logic [ROW_W-1:0]           in_row,
  input  logic signed [OUTV_W-1:0]   in_val   [P_F][T_M],
  output logic                       out_valid,
  output logic [ROW_W-1:0]           out_row,
  output logic signed [ACT_W-1:0]    out_q    [P_F][T_M]
);
  localparam int PW = OUTV_W + LAMBDA_W;
  localparam logic signed [PW-1:0] QMAX = PW'((1 <<< (ACT_W - 1)) - 1);
  localparam logic signed [PW-1:0] QMIN = -PW'(1 <<< (ACT_W - 1));

  logic signed [LAMBDA_W-1:0] lam_mem [LAMBDA_DEPTH];
  logic signed [LAMBDA_W-1:0] lam     [T_M];
  logic signed [ACT_W-1:0]    q       [P_F][T_M];

  always_ff @(posedge clk)
    if (lam_we) lam_mem[lam_addr] <= lam_data;

  always_comb begin
    // lanes past the end of the table (padding rows of a last, partly used
    // output tile) get a zero scale instead of an undefined read
    for (int m = 0; m < T_M; m++)
      lam[m] = (int'(lam_idx[m]) < LAMBDA_DEPTH) ? lam_mem[lam_idx[m]] : '0;
    for (int t = 0; t < P_F; t++)
      for (int m = 0; m < T_M; m++) begin
        logic signed [PW-1:0] prod, rnd;
        int unsigned sh;
        sh   = LAMBDA_FR + 32'(out_shift);
        prod = sls_en ? PW'(in_val[t][m]) * PW'(lam[m])
                      : PW'(in_val[t][m]) <<< LAMBDA_FR;
        rnd  = (prod + (PW'(1) <<< (sh - 1))) >>> sh;
        if (rnd > QMAX)      q[t][m] = ACT_W'(QMAX);
        else if (rnd < QMIN) q[t][m] = ACT_W'(QMIN);
        else                 q[t][m] = ACT_W'(rnd);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_row   <= '0;
    end else begin
      out_valid <= in_valid;
      out_row   <= in_row;
    end
  end

  always_ff @(posedge clk)
    if (in_valid) out_q <= q;
endmodule
