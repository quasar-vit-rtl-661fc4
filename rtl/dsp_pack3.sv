// dsp_pack3: three 4-bit x 6-bit multiplications in one DSP slice
// (packing factor 3, "3 weights sharing 1 activation").
//
// Port B carries one signed 6-bit activation. Port D carries three 4-bit
// weights at bits 0, 11 and 22, combined in logic before the slice (first two
// weights, then the third). Each weight nibble is signed or unsigned according
// to wgt_signed (the low half of an 8-bit weight is unsigned). The product
// fields are 10 bits at offsets 0, 11 and 22 with one guard bit between them;
// each is recovered by adding the sign (borrow) bit of the field below.
// The layout follows the published packing figure; the offsets are this
// design's reading of it. Combinational.
//
// Lint note: P bits 47:33 stay unused, since the highest field ends at bit 32.
module dsp_pack3
  import quasar_pkg::*;
(
  input  logic signed [ACT_W-1:0]  act,
  input  logic        [NIB_W-1:0]  wgt        [3],
  input  logic                     wgt_signed [3],
  output logic signed [PROD_W-1:0] prod       [3]
);
  logic signed [26:0] d_port, d_pair;
  logic signed [17:0] b_port;
  logic signed [47:0] p_port;
  logic signed [NIB_W:0] wv [3];
  logic [PROD_W:0] fld [3];

  always_comb begin
    for (int k = 0; k < 3; k++)
      wv[k] = wgt_signed[k] ? {wgt[k][NIB_W-1], wgt[k]} : {1'b0, wgt[k]};
    d_pair = (27'(wv[1]) <<< 11) + 27'(wv[0]);
    d_port = (27'(wv[2]) <<< 22) + d_pair;
    b_port = 18'(act);
  end

  dsp48e2_mul u_dsp (.a(27'sd0), .d(d_port), .b(b_port), .p(p_port));

  always_comb begin
    fld[0] = p_port[10:0];
    fld[1] = p_port[21:11] + 11'(p_port[10]);
    fld[2] = p_port[32:22] + 11'(p_port[21]);
    for (int k = 0; k < 3; k++) prod[k] = fld[k][PROD_W-1:0];
  end
endmodule
