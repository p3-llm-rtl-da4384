// pe_multiplier: one multiplier lane of a PCU processing element.
//
// The 4-bit weight or KV-cache code is decoded to a 6-bit signed operand
// (wkv_decoder). The input's 5-bit mantissa and sign form a 6-bit signed
// operand. A 6x6 signed multiply gives a 12-bit product, which is then shifted
// left by the input exponent: shift = max(e,1) - 1, 0..14, so that subnormal
// inputs (e = 0) share the scale of e = 1. The shifted product is 26 bits. There
// is no exponent alignment and no floating-point adder: all four lanes of a PE
// produce fixed-point numbers on a common scale.
//
// Follows the paper: decoder, 6-bit fixed-point multiplier, shift by the 4-bit
// input exponent, widths 6 / 12 / 26. The max(e,1)-1 mapping of the exponent to
// a shift amount is this design's reading of how 26 bits suffice.
//
// Interface: purely combinational.
module pe_multiplier
  import p3_pkg::*;
(
  input  dec_in_t                  x_i,
  input  logic [W_BITS-1:0]        code_i,
  input  logic [3:0]               meta_i,
  input  wkv_fmt_e                 fmt_i,
  output logic signed [SHP_W-1:0]  p_o
);
  logic signed [WDEC_W-1:0] w;
  logic signed [WDEC_W-1:0] xm;
  logic signed [PROD_W-1:0] prod;
  logic [EXP_W-1:0]         sh;

  wkv_decoder u_dec (.code_i(code_i), .meta_i(meta_i), .fmt_i(fmt_i), .w_o(w));

  always_comb begin
    xm   = x_i.s ? -signed'({1'b0, x_i.m}) : signed'({1'b0, x_i.m});
    prod = PROD_W'(xm) * PROD_W'(w);
    sh   = (x_i.e == '0) ? '0 : x_i.e - 4'd1;
    p_o  = SHP_W'(prod) <<< sh;
  end
endmodule
