// tb_pim_cmd_ctrl: command timing of one channel.
// 1) Back-to-back CMD_MAC_RD commands: each must be accepted exactly tCCD_L
//    (2 PCU cycles) after the previous one, with a stall cycle in between.
// 2) Alternating CMD_MAC_RD / CMD_MAC_REUSE: one command per cycle, no stall,
//    so 2N MACs take 2N cycles (the throughput-enhanced schedule).
// 3) Random commands: every accepted command appears in the execute stage the
//    next cycle with its data and mask; the bank strobe follows CMD_MAC_RD.
module tb_pim_cmd_ctrl;
  import p3_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready;
  pim_cmd_t cmd, exe_cmd;
  logic [255:0] cmd_data, exe_data;
  logic [7:0] cmd_mask, exe_mask;
  logic exe_valid, bank_rd, bank_odd, stall;
  logic [4:0] bank_col;
  int checks = 0, failures = 0;
  int cyc = 0;

  pim_cmd_ctrl dut (.clk(clk), .rst_n(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
                    .cmd_i(cmd), .cmd_data_i(cmd_data), .cmd_mask_i(cmd_mask),
                    .exe_valid_o(exe_valid), .exe_cmd_o(exe_cmd), .exe_data_o(exe_data),
                    .exe_mask_o(exe_mask), .bank_rd_o(bank_rd), .bank_odd_o(bank_odd),
                    .bank_col_o(bank_col), .stall_o(stall));

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s at cycle %0d", what, cyc); end
  endtask

  // issue one command, hold it until accepted; returns the acceptance cycle
  task automatic issue(input pim_cmd_t c, output int acc_cyc, output int stalls);
    stalls = 0;
    @(negedge clk);
    cmd_valid = 1; cmd = c; cmd_data = {8{$urandom}}; cmd_mask = 8'($urandom);
    #1;
    while (!cmd_ready) begin
      check(stall, "stall flag while held off");
      stalls++; @(negedge clk); #1;
    end
    acc_cyc = cyc;
    @(posedge clk); #1;
    check(exe_valid && exe_cmd == c && exe_data == cmd_data && exe_mask == cmd_mask, "execute stage");
    check(bank_rd == (c.op == CMD_MAC_RD), "bank strobe");
    if (c.op == CMD_MAC_RD) check(bank_col == c.col && bank_odd == c.bank_odd, "bank address");
    @(negedge clk);
    cmd_valid = 0;
  endtask

  initial begin
    pim_cmd_t c;
    int a, prev, st, t0, total_st;
    cmd_valid = 0; cmd = '0; cmd_data = '0; cmd_mask = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1) back-to-back column reads, driven without gaps
    @(negedge clk);
    prev = -1; total_st = 0;
    for (int i = 0; i < 10; i++) begin
      c = '0; c.op = CMD_MAC_RD; c.col = 5'(i); c.bank_odd = 1'(i);
      cmd_valid = 1; cmd = c; st = 0;
      #1;
      while (!cmd_ready) begin st++; @(negedge clk); #1; end
      a = cyc;
      if (prev >= 0) check(a - prev == 2, "MAC_RD spacing = tCCD_L");
      if (i > 0) check(st == 1, "one stall cycle per early MAC_RD");
      total_st += st;
      prev = a;
      @(negedge clk);
    end
    cmd_valid = 0;
    check(total_st == 9, "stall count");
    // 2) read + reuse pairs: one command per cycle
    repeat (3) @(negedge clk);
    t0 = -1;
    for (int i = 0; i < 16; i++) begin
      c = '0; c.op = (i % 2 == 0) ? CMD_MAC_RD : CMD_MAC_REUSE; c.slot = 1'(i); c.col = 5'(i / 2);
      cmd_valid = 1; cmd = c;
      #1;
      check(cmd_ready, "no stall in read/reuse schedule");
      if (t0 < 0) t0 = cyc;
      @(negedge clk);
    end
    cmd_valid = 0;
    check(cyc - t0 == 16, "16 MACs in 16 cycles");
    // 3) random commands
    for (int i = 0; i < 500; i++) begin
      c = pim_cmd_t'($urandom);
      c.op = cmd_op_e'($urandom % 7);
      issue(c, a, st);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
