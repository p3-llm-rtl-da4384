// tb_pcu: random command streams into one PCU.
// Input writes (both formats, both slots), side-input writes, MACs that read the
// even or the odd bank column, MACs that reuse the kept column, clears and
// read-outs are issued at random. A model built from the reference format
// values keeps 2 x 16 accumulators and the kept column; every CMD_RD result is
// compared in full. The test also checks that reuse really uses the column read
// by the previous CMD_MAC_RD even after the bank inputs have changed.
module tb_pcu;
  import p3_pkg::*;
  import p3_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic valid, sel;
  pim_cmd_t cmd;
  logic [255:0] data, bank_even, bank_odd;
  logic out_valid;
  logic [31:0] out [16];
  // model
  logic [255:0] m_in [2];
  logic         m_fmt [2];
  logic [255:0] m_meta, m_wreg;
  longint       m_acc [2][16];
  int checks = 0, failures = 0, n_rd = 0, n_reuse = 0;

  pcu dut (.clk(clk), .rst_n(rst_n), .valid_i(valid), .cmd_i(cmd), .data_i(data), .sel_i(sel),
           .bank_even_i(bank_even), .bank_odd_i(bank_odd), .out_valid_o(out_valid), .out_o(out));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint dot(int p, logic [255:0] col, logic s, logic [2:0] t, logic wf);
    real d = 0.0;
    for (int k = 0; k < 4; k++)
      d += in_value(m_in[s][t*32 + k*8 +: 8], m_fmt[s]) * in_scale(m_fmt[s])
           * wkv_value(col[(p*4+k)*4 +: 4], m_meta[(p*4+k)*4 +: 4], wf) * wkv_scale(wf);
    return longint'(d);
  endfunction

  initial begin
    valid = 0; sel = 0; cmd = '0; data = '0; bank_even = '0; bank_odd = '0;
    m_meta = '0; m_wreg = '0;
    for (int s = 0; s < 2; s++) begin
      m_in[s] = '0; m_fmt[s] = 0;
      for (int p = 0; p < 16; p++) m_acc[s][p] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      int r;
      @(negedge clk);
      r = $urandom % 100;
      valid = 1; sel = 1; cmd = '0;
      cmd.slot = 1'($urandom); cmd.tile = 3'($urandom); cmd.bank_odd = 1'($urandom);
      cmd.wkv_fmt = wkv_fmt_e'($urandom % 2); cmd.in_fmt = in_fmt_e'($urandom % 2);
      for (int i = 0; i < 8; i++) begin
        bank_even[i*32 +: 32] = $urandom; bank_odd[i*32 +: 32] = $urandom; data[i*32 +: 32] = $urandom;
      end
      if (r < 10) begin
        cmd.op = CMD_WR_IN;
        for (int i = 0; i < 32; i++) data[i*8 +: 8] = rand_in(cmd.in_fmt);
        sel = ($urandom % 4) != 0;
      end else if (r < 15) begin
        cmd.op = CMD_WR_META;
        sel = ($urandom % 4) != 0;
      end else if (r < 45) cmd.op = CMD_MAC_RD;
      else if (r < 75) cmd.op = CMD_MAC_REUSE;
      else if (r < 80) cmd.op = CMD_CLR;
      else if (r < 95) cmd.op = CMD_RD;
      else cmd.op = CMD_NOP;
      @(posedge clk);
      // model update, with the values present during the cycle
      case (cmd.op)
        CMD_WR_IN:   if (sel) begin m_in[cmd.slot] = data; m_fmt[cmd.slot] = cmd.in_fmt; end
        CMD_WR_META: if (sel) m_meta = data;
        CMD_MAC_RD: begin
          m_wreg = cmd.bank_odd ? bank_odd : bank_even;
          for (int p = 0; p < 16; p++)
            m_acc[cmd.slot][p] = longint'(int'(m_acc[cmd.slot][p] + dot(p, m_wreg, cmd.slot, cmd.tile, cmd.wkv_fmt)));
          n_rd++;
        end
        CMD_MAC_REUSE: begin
          for (int p = 0; p < 16; p++)
            m_acc[cmd.slot][p] = longint'(int'(m_acc[cmd.slot][p] + dot(p, m_wreg, cmd.slot, cmd.tile, cmd.wkv_fmt)));
          n_reuse++;
        end
        CMD_CLR: for (int p = 0; p < 16; p++) m_acc[cmd.slot][p] = 0;
        default: ;
      endcase
      #1;
      checks++;
      if (out_valid !== (cmd.op == CMD_RD)) begin
        failures++; $display("FAIL out_valid at t=%0d", t);
      end
      if (cmd.op == CMD_RD)
        for (int p = 0; p < 16; p++) begin
          checks++;
          if (longint'(signed'(out[p])) != m_acc[cmd.slot][p]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d slot=%0d pe=%0d got=%0d exp=%0d", t, cmd.slot, p,
                                        signed'(out[p]), m_acc[cmd.slot][p]);
          end
        end
    end
    checks++;
    if (n_rd == 0 || n_reuse == 0) failures++;
    $display("column reads=%0d reuses=%0d", n_rd, n_reuse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
