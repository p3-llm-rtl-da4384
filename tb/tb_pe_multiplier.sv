// tb_pe_multiplier: random and corner operands through one multiplier lane.
// The shifted product must equal input value * weight value times the fixed
// scales (2^10 or 2^18 for the input format, 2 for BitMoD half units), where
// both values come from the reference format definitions.
module tb_pe_multiplier;
  import p3_pkg::*;
  import p3_ref_pkg::*;
  dec_in_t           x;
  logic [3:0]        code, meta;
  wkv_fmt_e          fmt;
  logic signed [25:0] p;
  int checks = 0, failures = 0;

  pe_multiplier dut (.x_i(x), .code_i(code), .meta_i(meta), .fmt_i(fmt), .p_o(p));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Split an FP8 byte into the PCU fields (same split as the input register)
  function automatic dec_in_t split(logic [7:0] b, logic f);
    dec_in_t d;
    if (f) begin d.s = 0; d.e = b[7:4]; d.m = {b[7:4] != 0, b[3:0]}; end
    else   begin d.s = b[7]; d.e = b[6:3]; d.m = {b[6:3] != 0, b[2:0], 1'b0}; end
    return d;
  endfunction

  task automatic run(input logic [7:0] b, input logic inf, input logic [3:0] c,
                     input logic [3:0] m, input logic wf);
    real expv;
    x = split(b, inf); code = c; meta = m; fmt = wkv_fmt_e'(wf);
    #1;
    expv = in_value(b, inf) * in_scale(inf) * wkv_value(c, m, wf) * wkv_scale(wf);
    checks++;
    if (real'(p) != expv) begin
      failures++;
      if (failures < 10) $display("FAIL in=%h f=%0d code=%h meta=%h wf=%0d got=%0d exp=%f",
                                  b, inf, c, m, wf, p, expv);
    end
  endtask

  initial begin
    // extremes: largest inputs times largest-magnitude operands
    run(8'h7E, 0, 4'b1000, 4'd3, 0);   // 448 * -8
    run(8'hFE, 0, 4'b1000, 4'd2, 0);   // -448 * +8
    run(8'hFF, 1, 4'd0, 4'd15, 1);     // 1.9375 * -15
    run(8'h01, 0, 4'd15, 4'd0, 1);     // smallest subnormal
    for (int t = 0; t < 20000; t++) begin
      logic inf = 1'($urandom);
      run(rand_in(inf), inf, 4'($urandom), 4'($urandom), 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
