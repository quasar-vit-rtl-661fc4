// pe: one processing element of the GEMM array.
//
// A PE multiplies NT tokens by NL weight lanes over all T_N input channels of
// the current tile and reduces over the channels, giving NT x NL partial sums
// per cycle. It is built from one kind of atomic 4-bit-weight unit per input
// channel, chosen by KIND:
//   PE_DSP4  one dsp_pack4 per channel: 2 tokens x 2 lanes (packing factor 4)
//   PE_DSP3  one dsp_pack3 per channel: 1 token  x 3 lanes (packing factor 3)
//   PE_LUT   one lut_mul   per channel: 1 token  x 1 lane  (logic only)
// The multipliers follow the paper; the grouping of them into PEs with an adder
// tree over T_N is this design's choice. Combinational.
//
// Lint note: the unused upper product bits reported inside the DSP units are
// explained in dsp_pack4 and dsp_pack3.
module pe
  import quasar_pkg::*;
#(
  parameter pe_kind_e KIND = PE_DSP4,
  parameter int T_N = 16,
  localparam int NT = (KIND == PE_DSP4) ? 2 : 1,
  localparam int NL = (KIND == PE_DSP4) ? 2 : ((KIND == PE_DSP3) ? 3 : 1),
  localparam int PSUM_W = PROD_W + $clog2(T_N)
) (
  input  logic signed [ACT_W-1:0]  act        [NT][T_N],
  input  logic        [NIB_W-1:0]  wgt        [NL][T_N],
  input  logic                     wgt_signed [NL],
  output logic signed [PSUM_W-1:0] psum       [NT][NL]
);
  logic signed [PROD_W-1:0] prod [T_N][NT][NL];

  for (genvar n = 0; n < T_N; n++) begin : g_ch
    if (KIND == PE_DSP4) begin : g_dsp4
      logic signed [ACT_W-1:0]  a2 [2];
      logic        [NIB_W-1:0]  w2 [2];
      logic                     s2 [2];
      logic signed [PROD_W-1:0] p4 [2][2];
      always_comb begin
        for (int k = 0; k < 2; k++) begin
          a2[k] = act[k][n];
          w2[k] = wgt[k][n];
          s2[k] = wgt_signed[k];
        end
      end
      dsp_pack4 u_mul (.act(a2), .wgt(w2), .wgt_signed(s2), .prod(p4));
      always_comb
        for (int t = 0; t < NT; t++)
          for (int l = 0; l < NL; l++) prod[n][t][l] = p4[t][l];
    end else if (KIND == PE_DSP3) begin : g_dsp3
      logic        [NIB_W-1:0]  w3 [3];
      logic                     s3 [3];
      logic signed [PROD_W-1:0] p3 [3];
      always_comb
        for (int k = 0; k < 3; k++) begin
          w3[k] = wgt[k][n];
          s3[k] = wgt_signed[k];
        end
      dsp_pack3 u_mul (.act(act[0][n]), .wgt(w3), .wgt_signed(s3), .prod(p3));
      always_comb
        for (int l = 0; l < NL; l++) prod[n][0][l] = p3[l];
    end else begin : g_lut
      lut_mul u_mul (.act(act[0][n]), .wgt(wgt[0][n]), .wgt_signed(wgt_signed[0]),
                     .prod(prod[n][0][0]));
    end
  end

  always_comb begin
    for (int t = 0; t < NT; t++)
      for (int l = 0; l < NL; l++) begin
        psum[t][l] = '0;
        for (int n = 0; n < T_N; n++) psum[t][l] += PSUM_W'(prod[n][t][l]);
      end
  end
endmodule
