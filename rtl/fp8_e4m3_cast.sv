// fp8_e4m3_cast: converts one FP16 value to FP8-E4M3.
//
// Activations (and, for post-RoPE key-cache models, the smoothed query) are
// quantized on the host NPU by a direct cast to FP8-E4M3 before they are sent
// to the PIM input register. E4M3 here is the OCP variant: exponent bias 7,
// subnormals at exponent field 0, largest finite value 448 (0x7E) and a single
// NaN code per sign (0x7F / 0xFF).
//
// How it works: the 11-bit FP16 significand is shifted right so that its last
// kept bit has the weight of an E4M3 mantissa LSB (3 fraction bits for normal
// results, 2^-9 for subnormal results) and rounded to nearest, ties to even. A
// round-up that carries out of the mantissa moves into the exponent. Values that
// round above 448 and infinities saturate to +-448; NaN stays NaN.
//
// The cast itself follows the paper (direct FP8-E4M3 cast, no Hadamard
// transform, no smoothing). Round-to-nearest-even and saturation are this
// design's choices; the paper does not name a rounding mode.
//
// Interface: purely combinational, fp16_i -> fp8_o.
module fp8_e4m3_cast (
  input  logic [15:0] fp16_i,
  output logic [7:0]  fp8_o
);
  logic        s;
  logic [4:0]  e16;
  logic [10:0] sig;
  int          exp_u;      // unbiased exponent of the FP16 value
  int          sh;         // right shift applied to sig
  logic [11:0] q;          // rounded significand (may carry)
  logic [11:0] rem, half;
  logic        up;
  int          e8;

  always_comb begin
    s     = fp16_i[15];
    e16   = fp16_i[14:10];
    sig   = {e16 != 5'd0, fp16_i[9:0]};
    exp_u = ((e16 == 5'd0) ? 1 : int'(e16)) - 15;
    // normal E4M3 result: keep 4 significant bits; subnormal: LSB weight 2^-9
    sh    = (exp_u >= -6) ? 7 : (1 - exp_u);
    if (sh > 12) sh = 12;
    q     = 12'({1'b0, sig} >> sh);
    rem   = 12'({1'b0, sig} & ((12'd1 << sh) - 12'd1));
    half  = 12'd1 << (sh - 1);
    up    = (rem > half) || ((rem == half) && q[0]);
    q     = q + 12'(up);
    fp8_o = 8'h00;
    e8    = 0;
    if (e16 == 5'h1F) begin
      fp8_o = (fp16_i[9:0] != 10'd0) ? {s, 7'h7F} : {s, 7'h7E};
    end else if (exp_u >= -6) begin
      // q is 8..16 here; 16 means the rounding carried into the exponent
      e8 = exp_u + 7 + ((q == 12'd16) ? 1 : 0);
      if (q == 12'd16) q = 12'd8;
      if (e8 > 15 || (e8 == 15 && q[2:0] == 3'b111))
        fp8_o = {s, 7'h7E};
      else
        fp8_o = {s, e8[3:0], q[2:0]};
    end else begin
      // subnormal result: q is 0..8, and 8 is exactly the smallest normal
      fp8_o = {s, q[6:0]};
    end
  end
endmodule
