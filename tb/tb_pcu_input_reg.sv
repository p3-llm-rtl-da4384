// tb_pcu_input_reg: random 256-bit writes into the two input slots, with both
// formats. After every write random tiles of both slots are read back; each lane's (s, e, m) fields must
// give the value of the byte written, (-1)^s * m * 2^(max(e,1)-1) / scale, with
// the byte decoded by the FP8 formula of its format.
module tb_pcu_input_reg;
  import p3_pkg::*;
  import p3_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic we, wslot, rslot;
  logic [2:0] rtile;
  in_fmt_e wfmt;
  logic [255:0] wdata;
  dec_in_t [3:0] x;
  logic [255:0] model_data [2];
  logic        model_fmt  [2];
  int checks = 0, failures = 0;

  pcu_input_reg dut (.clk(clk), .rst_n(rst_n), .we_i(we), .wslot_i(wslot), .wfmt_i(wfmt),
                     .wdata_i(wdata), .rslot_i(rslot), .rtile_i(rtile), .x_o(x));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_slot(input logic s);
    rslot = s;
    rtile = 3'($urandom);
    #1;
    for (int k = 0; k < 4; k++) begin
      real got, expv;
      int  sh;
      sh   = (x[k].e == 0) ? 0 : int'(x[k].e) - 1;
      got  = real'(int'(x[k].m)) * pow2(sh) / in_scale(model_fmt[s]);
      if (x[k].s) got = -got;
      expv = in_value(model_data[s][rtile*32 + k*8 +: 8], model_fmt[s]);
      checks++;
      if (got != expv) begin
        failures++;
        if (failures < 10) $display("FAIL slot=%0d lane=%0d byte=%h got=%g exp=%g", s, k,
                                    model_data[s][rtile*32 + k*8 +: 8], got, expv);
      end
    end
  endtask

  initial begin
    we = 0; wslot = 0; rslot = 0; wfmt = FMT_E4M3; wdata = '0;
    model_data[0] = '0; model_data[1] = '0; model_fmt[0] = 0; model_fmt[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_slot(0); check_slot(1);
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      we    = 1;
      wslot = 1'($urandom);
      wfmt  = in_fmt_e'($urandom % 2);
      for (int k = 0; k < 32; k++) wdata[k*8 +: 8] = rand_in(wfmt);
      @(posedge clk);
      model_data[wslot] = wdata; model_fmt[wslot] = wfmt;
      @(negedge clk);
      we = 0;
      check_slot(0); check_slot(1); check_slot(0); check_slot(1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
