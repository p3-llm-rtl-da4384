// fp8_s0e4m4_cast: converts one FP16 attention-score to unsigned FP8-S0E4M4.
//
// FP8-S0E4M4 has no sign bit, a 4-bit exponent with the same bias as FP16 (15)
// and a 4-bit mantissa. Softmax outputs lie in [0, 1], so their FP16 exponent
// field never exceeds 15 and the FP8 exponent is the low 4 bits of the FP16
// exponent. The cast therefore keeps FP16 bits [13:6] and rounds away the six
// low mantissa bits; no scaling factor is needed. FP16 subnormals map onto
// S0E4M4 subnormals (both have weight 2^-14 at exponent field 0).
//
// The bit mapping follows the paper ("round the least significant bits of every
// FP16 attention-score and keep its highest 4 mantissa bits"). This design's
// choices: rounding is to nearest, ties to even; a round-up carries into the
// exponent; negative inputs give 0; values of 2 or more, infinities, NaNs and
// round-ups past the largest code saturate to 0xFF (1.9375).
//
// Interface: purely combinational, fp16_i -> fp8_o.
module fp8_s0e4m4_cast (
  input  logic [15:0] fp16_i,
  output logic [7:0]  fp8_o
);
  logic [8:0] r;
  logic       up;

  always_comb begin
    up    = fp16_i[5] && ((fp16_i[4:0] != 5'd0) || fp16_i[6]);
    r     = {1'b0, fp16_i[13:6]} + 9'(up);
    if (fp16_i[15])
      fp8_o = 8'h00;
    else if (fp16_i[14] || r[8])
      fp8_o = 8'hFF;
    else
      fp8_o = r[7:0];
  end
endmodule
