// tb_fp8_e4m3_cast: exhaustive check of the FP16 -> FP8-E4M3 cast.
// Every one of the 65536 FP16 codes is cast and compared with a nearest-value
// search over all E4M3 codes (ties to even, saturation at +-448, NaN kept).
module tb_fp8_e4m3_cast;
  import p3_ref_pkg::*;
  logic [15:0] h;
  logic [7:0]  y;
  int checks = 0, failures = 0;

  fp8_e4m3_cast dut (.fp16_i(h), .fp8_o(y));

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
      exp_y = ref_e4m3(h);
      checks++;
      if (y !== exp_y) begin
        failures++;
        if (failures < 10) $display("FAIL fp16=%h got=%h exp=%h", h, y, exp_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
