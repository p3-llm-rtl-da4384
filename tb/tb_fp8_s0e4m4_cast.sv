// tb_fp8_s0e4m4_cast: exhaustive check of the FP16 -> FP8-S0E4M4 cast.
// Every FP16 code is cast and compared with a nearest-value search over all
// 256 S0E4M4 codes (ties to even, negatives to 0, saturation at 0xFF).
module tb_fp8_s0e4m4_cast;
  import p3_ref_pkg::*;
  logic [15:0] h;
  logic [7:0]  y;
  int checks = 0, failures = 0;

  fp8_s0e4m4_cast dut (.fp16_i(h), .fp8_o(y));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 65536; i++) begin
      logic [7:0] exp_y;
      h = 16'(i);
      #1;
      exp_y = ref_s0e4m4(h);
      checks++;
      if (y !== exp_y) begin
        failures++;
        if (failures < 10) $display("FAIL fp16=%h got=%h exp=%h", h, y, exp_y);
      end
    end
    // a softmax output of exactly 1.0 must be representable
    h = 16'h3C00; #1; checks++;
    if (y !== 8'hF0) begin failures++; $display("FAIL 1.0 -> %h", y); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
