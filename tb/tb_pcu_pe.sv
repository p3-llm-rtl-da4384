// tb_pcu_pe: random sequences of MAC and clear commands on both accumulator
// slots of one PE. The model keeps two accumulators computed from the reference
// values of the inputs and operands; after every clock both are compared.
module tb_pcu_pe;
  import p3_pkg::*;
  import p3_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mac, clr, slot;
  dec_in_t [3:0] x;
  logic [15:0] code, meta;
  wkv_fmt_e fmt;
  logic signed [31:0] acc [2];
  longint model [2];
  int checks = 0, failures = 0;

  pcu_pe dut (.clk(clk), .rst_n(rst_n), .mac_i(mac), .clr_i(clr), .slot_i(slot), .x_i(x),
              .code_i(code), .meta_i(meta), .fmt_i(fmt), .acc_o(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mac = 0; clr = 0; slot = 0; x = '0; code = '0; meta = '0; fmt = WKV_BITMOD;
    model[0] = 0; model[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      logic [7:0] b [4];
      logic       inf;
      real        dot;
      @(negedge clk);
      inf  = 1'($urandom);
      fmt  = wkv_fmt_e'($urandom % 2);
      slot = 1'($urandom);
      code = 16'($urandom); meta = 16'($urandom);
      dot  = 0.0;
      for (int k = 0; k < 4; k++) begin
        b[k] = rand_in(inf);
        if (inf) begin x[k].s = 0; x[k].e = b[k][7:4]; x[k].m = {b[k][7:4] != 0, b[k][3:0]}; end
        else     begin x[k].s = b[k][7]; x[k].e = b[k][6:3]; x[k].m = {b[k][6:3] != 0, b[k][2:0], 1'b0}; end
        dot += in_value(b[k], inf) * in_scale(inf) * wkv_value(code[k*4 +: 4], meta[k*4 +: 4], fmt)
               * wkv_scale(fmt);
      end
      clr = ($urandom % 16) == 0;
      mac = !clr && ($urandom % 4 != 0);
      @(posedge clk);
      if (clr) model[slot] = 0;
      else if (mac) model[slot] = longint'(int'(model[slot] + longint'(dot)));  // wraps at 32 bits
      #1;
      for (int s = 0; s < 2; s++) begin
        checks++;
        if (longint'(acc[s]) != model[s]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d slot=%0d got=%0d exp=%0d", t, s, acc[s], model[s]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
