// lut_mul: one 4-bit x 6-bit multiplication built from logic only (the
// "pure LUT-based" compute unit). The weight nibble is signed or unsigned as
// for the DSP-packed units, so the same lane format serves both. Combinational.
//
// The paper gives only its cost (about 33 LUTs per W4A6 product), not its
// circuit; the plain multiply here is left to synthesis.
module lut_mul
  import quasar_pkg::*;
(
  input  logic signed [ACT_W-1:0]  act,
  input  logic        [NIB_W-1:0]  wgt,
  input  logic                     wgt_signed,
  output logic signed [PROD_W-1:0] prod
);
  logic signed [NIB_W:0] wv;
  always_comb begin
    wv   = wgt_signed ? {wgt[NIB_W-1], wgt} : {1'b0, wgt};
    prod = PROD_W'(act * wv);
  end
endmodule
