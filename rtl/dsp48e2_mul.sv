// dsp48e2_mul: the arithmetic of one DSP48E2 slice as the packed multipliers use
// it, P = (A + D) x B, with 27-bit A and D, an 18-bit B and a 48-bit P of which
// 45 bits carry the product.
//
// The pre-adder result is kept to 27 bits as in the slice (A + D wraps), and the
// 27 x 18 signed product is sign-extended to 48 bits. The block is purely
// combinational here; a synthesis tool maps it onto one slice (its internal
// pipeline registers are left to retiming). This is a plain-logic description of
// the slice's datapath, not the vendor primitive.
//
// Interface: a, d (27-bit signed), b (18-bit signed), p (48-bit signed).
module dsp48e2_mul (
  input  logic signed [26:0] a,
  input  logic signed [26:0] d,
  input  logic signed [17:0] b,
  output logic signed [47:0] p
);
  logic signed [26:0] ad;
  logic signed [44:0] prod;

  always_comb begin
    ad   = a + d;
    prod = 45'(ad * b);
    p    = 48'(prod);
  end
endmodule
