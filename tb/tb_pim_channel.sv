// tb_pim_channel: GEMV tiles on one PIM channel (8 PCUs, 16 banks).
// Bank models hold random weight / KV-cache columns. Three phases:
//  A) linear layer, batch 2: BitMoD weights from the even banks, FP8-E4M3
//     inputs in slots A and B; every column is read once and reused once, so
//     8 columns x 2 inputs take 16 cycles.
//  B) batch 1 on the same weights: read-only MACs, one column per tCCD_L,
//     so 8 columns take 15 cycles from the first to the last accept (stalls).
//  C) attention P*V, two query heads of a GQA group: INT4-Asym values from the
//     odd banks with per-multiplier zero points, FP8-S0E4M4 scores that differ
//     per PCU (written with one-hot masks).
// All 8 x 16 outputs of each slot are compared with a reference computed from
// the bank contents and the format definitions.
module tb_pim_channel;
  import p3_pkg::*;
  import p3_ref_pkg::*;
  localparam int NP = 8;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready;
  pim_cmd_t cmd;
  logic [255:0] cmd_data;
  logic [NP-1:0] cmd_mask;
  logic bank_rd, bank_odd, stall, out_valid;
  logic [4:0] bank_col;
  logic [255:0] even_d [NP], odd_d [NP];
  logic [31:0] out [NP][16];
  // bank loading
  logic load;
  logic [4:0] load_col;
  logic [255:0] load_even [NP], load_odd [NP];
  // stimulus copies for the reference
  logic [255:0] w_even [NP][8], w_odd [NP][8];
  logic [255:0] meta_w [NP], meta_kv [NP];
  logic [255:0] in_buf [NP][2];
  int checks = 0, failures = 0, cyc = 0;

  pim_channel dut (.clk(clk), .rst_n(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready),
                   .cmd_i(cmd), .cmd_data_i(cmd_data), .cmd_mask_i(cmd_mask),
                   .bank_rd_o(bank_rd), .bank_odd_o(bank_odd), .bank_col_o(bank_col),
                   .bank_even_i(even_d), .bank_odd_i(odd_d), .out_valid_o(out_valid),
                   .out_o(out), .stall_o(stall));

  for (genvar u = 0; u < NP; u++) begin : g_bank
    hbm_bank_model u_even (.clk(clk), .load_i(load), .load_col_i(load_col), .load_data_i(load_even[u]),
                           .rd_col_i(bank_col), .rd_data_o(even_d[u]));
    hbm_bank_model u_odd  (.clk(clk), .load_i(load), .load_col_i(load_col), .load_data_i(load_odd[u]),
                           .rd_col_i(bank_col), .rd_data_o(odd_d[u]));
  end

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // issue a command and wait until it is accepted; returns the accept cycle
  task automatic issue(input cmd_op_e op, input logic slot, input logic [2:0] tile,
                       input logic odd, input logic [4:0] col, input logic infmt,
                       input logic wf, input logic [255:0] d, input logic [NP-1:0] mask,
                       output int acc_cyc);
    @(negedge clk);
    cmd = '0; cmd.op = op; cmd.slot = slot; cmd.tile = tile; cmd.bank_odd = odd; cmd.col = col;
    cmd.in_fmt = in_fmt_e'(infmt); cmd.wkv_fmt = wkv_fmt_e'(wf);
    cmd_valid = 1; cmd_data = d; cmd_mask = mask;
    #1;
    while (!cmd_ready) begin @(negedge clk); #1; end
    acc_cyc = cyc;
    @(posedge clk);
    #1 cmd_valid = 0;
  endtask

  // read out slot s and compare with the reference
  task automatic read_check(input logic s, input logic infmt, input logic wf, input logic odd,
                            input string tag);
    int a;
    issue(CMD_RD, s, 0, 0, 0, 0, 0, '0, '0, a);
    while (!out_valid) @(posedge clk);
    #1;
    for (int u = 0; u < NP; u++)
      for (int p = 0; p < 16; p++) begin
        real r = 0.0;
        for (int c = 0; c < 8; c++)
          for (int k = 0; k < 4; k++) begin
            logic [255:0] col = odd ? w_odd[u][c] : w_even[u][c];
            logic [255:0] mt  = wf ? meta_kv[u] : meta_w[u];
            r += in_value(in_buf[u][s][c*32 + k*8 +: 8], infmt) * in_scale(infmt)
                 * wkv_value(col[(p*4+k)*4 +: 4], mt[(p*4+k)*4 +: 4], wf) * wkv_scale(wf);
          end
        checks++;
        if (longint'(signed'(out[u][p])) != longint'(r)) begin
          failures++;
          if (failures < 10) $display("FAIL %s slot=%0d pcu=%0d pe=%0d got=%0d exp=%0d", tag, s, u, p,
                                      signed'(out[u][p]), longint'(r));
        end
      end
  endtask

  initial begin
    int a, t0, t1;
    logic [255:0] d;
    cmd_valid = 0; cmd = '0; cmd_data = '0; cmd_mask = '0; load = 0; load_col = '0;
    // fill banks: columns 0..7 of every even and odd bank
    for (int c = 0; c < 8; c++) begin
      @(negedge clk);
      load = 1; load_col = 5'(c);
      for (int u = 0; u < NP; u++) begin
        for (int i = 0; i < 8; i++) begin
          load_even[u][i*32 +: 32] = $urandom; load_odd[u][i*32 +: 32] = $urandom;
        end
        w_even[u][c] = load_even[u]; w_odd[u][c] = load_odd[u];
      end
      @(posedge clk);
    end
    @(negedge clk); load = 0;
    rst_n = 1;

    // ---- A) linear layer, batch 2
    d = {8{$urandom}};
    for (int i = 0; i < 8; i++) d[i*32 +: 32] = $urandom;
    for (int u = 0; u < NP; u++) meta_w[u] = d;
    issue(CMD_WR_META, 0, 0, 0, 0, 0, 0, d, '1, a);
    for (int s = 0; s < 2; s++) begin
      for (int i = 0; i < 32; i++) d[i*8 +: 8] = rand_in(0);
      for (int u = 0; u < NP; u++) in_buf[u][s] = d;
      issue(CMD_WR_IN, 1'(s), 0, 0, 0, 0, 0, d, '1, a);
      issue(CMD_CLR, 1'(s), 0, 0, 0, 0, 0, '0, '0, a);
    end
    for (int c = 0; c < 8; c++) begin
      issue(CMD_MAC_RD, 0, 3'(c), 0, 5'(c), 0, 0, '0, '0, a);
      if (c == 0) t0 = a;
      issue(CMD_MAC_REUSE, 1, 3'(c), 0, 5'(c), 0, 0, '0, '0, a);
    end
    t1 = a;
    checks++;
    if (t1 - t0 != 15) begin failures++; $display("FAIL batch-2 took %0d cycles", t1 - t0 + 1); end
    read_check(0, 0, 0, 0, "linear A");
    read_check(1, 0, 0, 0, "linear B");

    // ---- B) batch 1: column reads only, each waits for tCCD_L
    issue(CMD_CLR, 0, 0, 0, 0, 0, 0, '0, '0, a);
    for (int c = 0; c < 8; c++) begin
      issue(CMD_MAC_RD, 0, 3'(c), 0, 5'(c), 0, 0, '0, '0, a);
      if (c == 0) t0 = a;
    end
    checks++;
    if (a - t0 != 14) begin failures++; $display("FAIL batch-1 took %0d cycles", a - t0 + 1); end
    read_check(0, 0, 0, 0, "batch-1");

    // ---- C) P*V with INT4-Asym values and S0E4M4 scores, per-PCU inputs
    for (int u = 0; u < NP; u++) begin
      for (int i = 0; i < 8; i++) meta_kv[u][i*32 +: 32] = $urandom;
      issue(CMD_WR_META, 0, 0, 0, 0, 0, 0, meta_kv[u], NP'(1) << u, a);
      for (int s = 0; s < 2; s++) begin
        for (int i = 0; i < 32; i++) in_buf[u][s][i*8 +: 8] = rand_in(1);
        issue(CMD_WR_IN, 1'(s), 0, 0, 0, 1, 0, in_buf[u][s], NP'(1) << u, a);
      end
    end
    issue(CMD_CLR, 0, 0, 0, 0, 0, 0, '0, '0, a);
    issue(CMD_CLR, 1, 0, 0, 0, 0, 0, '0, '0, a);
    for (int c = 0; c < 8; c++) begin
      issue(CMD_MAC_RD, 0, 3'(c), 1, 5'(c), 0, 1, '0, '0, a);
      issue(CMD_MAC_REUSE, 1, 3'(c), 1, 5'(c), 0, 1, '0, '0, a);
    end
    read_check(0, 1, 1, 1, "P*V head 0");
    read_check(1, 1, 1, 1, "P*V head 1");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
