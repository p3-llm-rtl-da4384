// p3_ref_pkg: reference arithmetic for the P3-LLM testbenches.
//
// Everything here works on real numbers from the format definitions, not on the
// bit manipulations the RTL uses: an FP8 code is decoded with its textbook
// formula, and a cast is done by searching all FP8 codes for the nearest value
// (ties to the code with an even LSB). Testbenches compare the RTL's fixed-point
// results with these values scaled by a power of two.
package p3_ref_pkg;

  function automatic real pow2(int n);
    real r = 1.0;
    if (n >= 0) for (int i = 0; i < n; i++) r = r * 2.0;
    else        for (int i = 0; i < -n; i++) r = r / 2.0;
    return r;
  endfunction

  // FP16 -> real (infinities and NaNs are not passed here)
  function automatic real fp16_to_real(logic [15:0] h);
    int  e = int'(h[14:10]);
    real m = real'(h[9:0]) / 1024.0;
    real v = (e == 0) ? m * pow2(-14) : (1.0 + m) * pow2(e - 15);
    return h[15] ? -v : v;
  endfunction

  function automatic real e4m3_to_real(logic [7:0] c);
    int  e = int'(c[6:3]);
    real m = real'(c[2:0]) / 8.0;
    real v = (e == 0) ? m * pow2(-6) : (1.0 + m) * pow2(e - 7);
    return c[7] ? -v : v;
  endfunction

  function automatic real s0e4m4_to_real(logic [7:0] c);
    int  e = int'(c[7:4]);
    real m = real'(c[3:0]) / 16.0;
    return (e == 0) ? m * pow2(-14) : (1.0 + m) * pow2(e - 15);
  endfunction

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // Nearest-value FP16 -> FP8-E4M3 cast with saturation at 448
  function automatic logic [7:0] ref_e4m3(logic [15:0] h);
    real        mag, best_d, d;
    logic [7:0] best;
    if (h[14:10] == 5'h1F) return (h[9:0] != 0) ? {h[15], 7'h7F} : {h[15], 7'h7E};
    mag = fabs(fp16_to_real(h));
    if (mag >= 448.0) return {h[15], 7'h7E};
    best = 8'h00; best_d = 1.0e9;
    for (int c = 0; c <= 'h7E; c++) begin
      d = fabs(e4m3_to_real(8'(c)) - mag);
      if (d < best_d || (d == best_d && c[0] == 1'b0)) begin best_d = d; best = 8'(c); end
    end
    return {h[15], best[6:0]};
  endfunction

  // Nearest-value FP16 -> FP8-S0E4M4 cast; negatives give 0, saturates at 0xFF
  function automatic logic [7:0] ref_s0e4m4(logic [15:0] h);
    real        x, best_d, d;
    logic [7:0] best;
    if (h[15]) return 8'h00;
    if (h[14:10] == 5'h1F) return 8'hFF;
    x = fp16_to_real(h);
    if (x >= s0e4m4_to_real(8'hFF)) return 8'hFF;
    best = 8'h00; best_d = 1.0e9;
    for (int c = 0; c <= 255; c++) begin
      d = fabs(s0e4m4_to_real(8'(c)) - x);
      if (d < best_d || (d == best_d && c[0] == 1'b0)) begin best_d = d; best = 8'(c); end
    end
    return best;
  endfunction

  // Value of a 4-bit operand: BitMoD (fmt 0) in real units, INT4-Asym (fmt 1)
  function automatic real wkv_value(logic [3:0] code, logic [3:0] meta, logic fmt);
    real fp4 [8] = '{0.0, 0.5, 1.0, 1.5, 2.0, 3.0, 4.0, 6.0};
    real sv  [4] = '{5.0, -5.0, 8.0, -8.0};
    if (fmt) return real'(int'(code)) - real'(int'(meta));
    if (code == 4'b1000) return sv[meta[1:0]];
    return code[3] ? -fp4[code[2:0]] : fp4[code[2:0]];
  endfunction

  // The RTL's fixed-point scale of an operand: BitMoD weights are in half units
  function automatic real wkv_scale(logic fmt);
    return fmt ? 1.0 : 2.0;
  endfunction

  // Value of an FP8 input byte in format fmt (0: E4M3, 1: S0E4M4)
  function automatic real in_value(logic [7:0] b, logic fmt);
    return fmt ? s0e4m4_to_real(b) : e4m3_to_real(b);
  endfunction

  // The RTL's fixed-point scale of an input: 2^10 for E4M3, 2^18 for S0E4M4
  function automatic real in_scale(logic fmt);
    return fmt ? pow2(18) : pow2(10);
  endfunction

  // Random FP8 input byte; E4M3 avoids the NaN codes
  function automatic logic [7:0] rand_in(logic fmt);
    logic [7:0] b = 8'($urandom);
    if (!fmt && b[6:0] == 7'h7F) b[6:0] = 7'h7E;
    return b;
  endfunction

endpackage
