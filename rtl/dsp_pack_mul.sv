// dsp_pack_mul: two int4 x int8 products from one 27 x 18 signed multiply.
//
// This is the DSP packing trick for W4A8 GEMMs. The activation sits in the
// low 8 bits of the 18-bit operand (sign-extended). The two weights are
// placed at bit 0 (w0, bits 3:0) and bit 13 (w1, bits 16:13) of the 27-bit
// operand, i.e. the operand is the signed value w0 + w1 * 2^13. The 45-bit
// product is then p0 + p1 * 2^13 with |p0| <= 1024, so p0 is bits 11:0 of
// the product (sign-extended) and p1 is bits 24:13 plus bit 12, which is set
// exactly when p0 is negative and has borrowed from the upper field.
// Bit positions follow the packing figure of the source design; the borrow
// correction is spelled out here because the figure does not show it.
// Purely combinational; a synthesis tool maps the multiply to one DSP slice.
module dsp_pack_mul (
  input  logic signed [7:0]  a,    // int8 activation
  input  logic signed [3:0]  w0,   // int4 weight of the even column
  input  logic signed [3:0]  w1,   // int4 weight of the odd column
  output logic signed [11:0] p0,   // a * w0
  output logic signed [11:0] p1    // a * w1
);
  logic signed [17:0] op_a;
  logic signed [26:0] op_b;
  logic signed [44:0] prod;

  always_comb begin
    op_a = 18'(a);
    op_b = 27'(w0) + (27'(w1) <<< 13);
    prod = 45'(op_a) * 45'(op_b);
    p0   = prod[11:0];
    p1   = prod[24:13] + 12'(prod[12]);
  end
endmodule
