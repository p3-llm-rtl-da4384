// tb_wkv_decoder: exhaustive check of the weight / KV-cache decoder.
// All 16 codes x 16 side inputs x 2 formats are compared with the BitMoD value
// table (FP4 values plus the special values +-5, +-8 for the negative-zero code)
// and with code - zero_point for INT4-Asym.
module tb_wkv_decoder;
  import p3_pkg::*;
  import p3_ref_pkg::*;
  logic [3:0]        code, meta;
  wkv_fmt_e          fmt;
  logic signed [5:0] w;
  int checks = 0, failures = 0;

  wkv_decoder dut (.code_i(code), .meta_i(meta), .fmt_i(fmt), .w_o(w));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int f = 0; f < 2; f++)
      for (int c = 0; c < 16; c++)
        for (int m = 0; m < 16; m++) begin
          real expv;
          code = 4'(c); meta = 4'(m); fmt = wkv_fmt_e'(f);
          #1;
          expv = wkv_value(code, meta, 1'(f)) * wkv_scale(1'(f));
          checks++;
          if (real'(int'(w)) != expv) begin
            failures++;
            if (failures < 10) $display("FAIL fmt=%0d code=%h meta=%h got=%0d exp=%f", f, c, m, w, expv);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
