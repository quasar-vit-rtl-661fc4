// dsp_pack4: four 4-bit x 6-bit multiplications in one DSP slice
// (packing factor 4, "2 weights sharing 2 activations").
//
// Port D carries two signed 6-bit activations, act[0] at bit 0 and act[1] at
// bit 20; port B carries two 4-bit weights, wgt[0] at bit 0 and wgt[1] at bit 10.
// A weight nibble is treated as signed (4-bit rows and the high half of an 8-bit
// row) or unsigned (low half of an 8-bit row) according to wgt_signed. The
// product P = D x B then holds the four 10-bit products side by side with no
// guard bits:
//   P[ 9: 0] act0*w0   P[19:10] act0*w1   P[29:20] act1*w0   P[39:30] act1*w1
// Each field is recovered by adding the sign (borrow) bit just below it, which
// is exact because every product lies in -480..465.
// The layout (activations in D, weights in B, 10-bit product fields) follows the
// published packing figure; the exact offsets 0/10/20/30 and 0/20 are this
// design's reading of it. Combinational.
//
// Lint note: P bits 47:40 stay unused, since the highest field ends at bit 39;
// they are kept so the slice model keeps its real 48-bit output.
module dsp_pack4
  import quasar_pkg::*;
(
  input  logic signed [ACT_W-1:0]  act        [2],
  input  logic        [NIB_W-1:0]  wgt        [2],
  input  logic                     wgt_signed [2],
  output logic signed [PROD_W-1:0] prod       [2][2]   // [activation][weight]
);
  logic signed [26:0] d_port;
  logic signed [17:0] b_port;
  logic signed [47:0] p_port;
  logic signed [NIB_W:0] wv [2];

  always_comb begin
    for (int k = 0; k < 2; k++)
      wv[k] = wgt_signed[k] ? {wgt[k][NIB_W-1], wgt[k]} : {1'b0, wgt[k]};
    // LUT-side packing of the operands
    d_port = (27'(act[1]) <<< 20) + 27'(act[0]);
    b_port = (18'(wv[1]) <<< 10) + 18'(wv[0]);
  end

  dsp48e2_mul u_dsp (.a(27'sd0), .d(d_port), .b(b_port), .p(p_port));

  // LUT-side unpacking: field plus the borrow from the field below
  always_comb begin
    prod[0][0] = p_port[9:0];
    prod[0][1] = p_port[19:10] + PROD_W'(p_port[9]);
    prod[1][0] = p_port[29:20] + PROD_W'(p_port[19]);
    prod[1][1] = p_port[39:30] + PROD_W'(p_port[29]);
  end
endmodule
