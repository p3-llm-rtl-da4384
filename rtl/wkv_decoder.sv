// wkv_decoder: decodes a 4-bit weight or KV-cache code into the 6-bit signed
// fixed-point operand of a PCU multiplier.
//
// Weights and KV-cache occupy the same multiplier operand, so one decoder
// serves both formats, selected by fmt_i:
//  * BitMoD weights: an FP4 (E2M1) code with values {0, 0.5, 1, 1.5, 2, 3, 4, 6}
//    and a sign bit. The redundant negative-zero code (4'b1000) is remapped to
//    one of the special values {+5, -5, +8, -8}, chosen per group. The output is
//    in half units, so the value set becomes {0,1,2,3,4,6,8,12} and the special
//    values +-10 and +-16, which need 6 signed bits.
//  * INT4-Asym KV-cache: the unsigned code minus the 4-bit zero point z_KV,
//    giving -15..15 (5 significant bits).
// The per-multiplier side input meta_i carries z_KV in KV mode, and the BitMoD
// special-value select in its low two bits in weight mode (encoding in p3_pkg).
//
// The value sets and widths are the paper's; the half-unit scaling and the
// select encoding are this design's choices.
//
// Interface: purely combinational.
module wkv_decoder
  import p3_pkg::*;
(
  input  logic [W_BITS-1:0]        code_i,
  input  logic [3:0]               meta_i,
  input  wkv_fmt_e                 fmt_i,
  output logic signed [WDEC_W-1:0] w_o
);
  logic [WDEC_W-1:0] mag;

  always_comb begin
    unique case (code_i[2:0])
      3'd0: mag = 6'd0;
      3'd1: mag = 6'd1;
      3'd2: mag = 6'd2;
      3'd3: mag = 6'd3;
      3'd4: mag = 6'd4;
      3'd5: mag = 6'd6;
      3'd6: mag = 6'd8;
      default: mag = 6'd12;
    endcase
    if (fmt_i == WKV_INT4ASYM) begin
      w_o = signed'({2'b00, code_i}) - signed'({2'b00, meta_i});
    end else if (code_i == 4'b1000) begin
      unique case (bitmod_sv_e'(meta_i[1:0]))
        SV_P5:   w_o = 6'sd10;
        SV_N5:   w_o = -6'sd10;
        SV_P8:   w_o = 6'sd16;
        default: w_o = -6'sd16;
      endcase
    end else begin
      w_o = code_i[3] ? -signed'(mag) : signed'(mag);
    end
  end
endmodule
