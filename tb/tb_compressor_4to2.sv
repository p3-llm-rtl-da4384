// tb_compressor_4to2: the 28-bit output must equal the signed sum of the four
// 26-bit inputs, for random operands and for all-extreme operand sets.
module tb_compressor_4to2;
  logic signed [25:0] x [4];
  logic signed [27:0] s;
  int checks = 0, failures = 0;

  compressor_4to2 dut (.x_i(x), .sum_o(s));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    longint expv;
    #1;
    expv = longint'(x[0]) + longint'(x[1]) + longint'(x[2]) + longint'(x[3]);
    checks++;
    if (longint'(s) != expv) begin
      failures++;
      if (failures < 10) $display("FAIL %0d %0d %0d %0d got=%0d exp=%0d", x[0], x[1], x[2], x[3], s, expv);
    end
  endtask

  initial begin
    for (int i = 0; i < 4; i++) x[i] = 26'sh1FFFFFF;   // all max positive
    check();
    for (int i = 0; i < 4; i++) x[i] = -26'sh2000000;  // all min negative
    check();
    for (int t = 0; t < 50000; t++) begin
      for (int i = 0; i < 4; i++) x[i] = 26'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
