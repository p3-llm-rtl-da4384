// tb_p3llm_top: end-to-end run of the P3-LLM PIM side with NC pseudo channels
// (the design has 16; NC = 2 keeps the simulator build short), each with its
// default 8 PCUs x 16 PEs, all channels working in parallel.
//
// The host writes FP16 numbers; the top casts them to FP8 on the way into the
// PCU input registers. Each channel runs a command program of four GEMV phases
// on random data held in behavioural bank models (16 columns per bank):
//  A) linear layer, batch 2: BitMoD weights (even banks) x FP8-E4M3 inputs,
//     each column read once and reused for the second input.
//  B) linear layer, batch 1: column reads only; each read waits for tCCD_L.
//  C) Q*K^T for a post-RoPE key cache, two query heads of one GQA group:
//     INT4-Asym keys (even banks, columns 8..15) x FP8-E4M3 queries.
//  D) P*V, two query heads: INT4-Asym values (odd banks) x FP8-S0E4M4 scores,
//     different scores per PCU.
// While the program is generated, a reference model built from the FP16 inputs
// (cast by nearest-value search) and the bank contents predicts every read-out;
// a monitor compares all 8 x 16 outputs of each read-out. The batch-2 MAC phase
// must take one cycle per MAC and the batch-1 phase two cycles per column. The
// test counts each mechanism (column read, column reuse, tCCD_L stall, even
// bank, odd bank, E4M3 and S0E4M4 writes, BitMoD special values, INT4-Asym
// MACs) and fails if one never happened.
module tb_p3llm_top;
  import p3_pkg::*;
  import p3_ref_pkg::*;
  localparam int NC   = 2;
  localparam int NP   = 8;
  localparam int NCOL = 16;
  localparam int MAXP = 128;   // program length
  localparam int MAXR = 8;     // read-outs per program

  typedef struct {
    pim_cmd_t      c;
    logic [255:0]  data;
    logic [15:0]   fp16 [32];
    logic [NP-1:0] mask;
  } step_t;

  logic clk = 0, rst_n = 0;
  logic                cmd_valid [NC];
  logic                cmd_ready [NC];
  pim_cmd_t            cmd       [NC];
  logic [255:0]        cmd_data  [NC];
  logic [15:0]         cmd_fp16  [NC][32];
  logic [NP-1:0]       cmd_mask  [NC];
  logic                bank_rd   [NC];
  logic                bank_odd  [NC];
  logic [4:0]          bank_col  [NC];
  logic [255:0]        even_d    [NC][NP];
  logic [255:0]        odd_d     [NC][NP];
  logic                out_valid [NC];
  logic [31:0]         out       [NC][NP][16];
  logic                stall     [NC];
  logic                load;
  logic [4:0]          load_col;
  logic [255:0]        w_even [NC][NP][NCOL], w_odd [NC][NP][NCOL];

  // programs, predictions and phase markers
  step_t   prog     [NC][MAXP];
  int      prog_len [NC];
  longint  expect_o [NC][MAXR][NP][16];
  int      n_expect [NC];
  int      n_outs   [NC];
  int      acc_cyc  [NC][MAXP];
  int      mark_a0 [NC], mark_a1 [NC], mark_b0 [NC], mark_b1 [NC];
  logic    start = 0;
  logic    done [NC];

  int checks = 0, failures = 0, cyc = 0;
  int n_rd = 0, n_reuse = 0, n_stall = 0, n_even = 0, n_odd = 0;
  int n_wr_e4m3 = 0, n_wr_s0 = 0, n_special = 0, n_int4 = 0;
  // loop bounds held in variables so the reference loops stay loops
  int np_v = NP, npe_v = 16;

  p3llm_top #(.NUM_CH(NC)) dut (
    .clk(clk), .rst_n(rst_n), .cmd_valid_i(cmd_valid), .cmd_ready_o(cmd_ready), .cmd_i(cmd),
    .cmd_data_i(cmd_data), .cmd_fp16_i(cmd_fp16), .cmd_mask_i(cmd_mask), .bank_rd_o(bank_rd),
    .bank_odd_o(bank_odd), .bank_col_o(bank_col), .bank_even_i(even_d), .bank_odd_i(odd_d),
    .out_valid_o(out_valid), .out_o(out), .stall_o(stall));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    for (int c = 0; c < NC; c++) begin
      if (stall[c]) n_stall++;
      if (bank_rd[c]) begin
        n_rd++;
        if (bank_odd[c]) n_odd++; else n_even++;
      end
      if (cmd_valid[c] && cmd_ready[c] && cmd[c].op == CMD_MAC_REUSE) n_reuse++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- program
  // Reference PCU state used while the program is generated
  logic [7:0]   m_in   [NP][2][32];
  logic         m_fmt  [2];
  logic [255:0] m_meta [NP];
  logic [255:0] m_wreg [NP];
  longint       m_acc  [NP][2][16];

  // one program step: record it and apply its meaning to the reference model
  function automatic void add(int c, cmd_op_e op, logic slot, logic [2:0] tile, logic odd,
                              int col, logic infmt, logic wf, logic [NP-1:0] mask);
    int i = prog_len[c];
    prog[c][i].c = '0;
    prog[c][i].c.op = op; prog[c][i].c.slot = slot; prog[c][i].c.tile = tile;
    prog[c][i].c.bank_odd = odd; prog[c][i].c.col = 5'(col);
    prog[c][i].c.in_fmt = in_fmt_e'(infmt); prog[c][i].c.wkv_fmt = wkv_fmt_e'(wf);
    prog[c][i].mask = mask;
    for (int k = 0; k < np_v; k++) prog[c][i].data[k*32 +: 32] = $urandom;
    for (int k = 0; k < 4 * np_v; k++) begin
      if (infmt) prog[c][i].fp16[k] = {1'b0, 5'($urandom % 16), 10'($urandom)};           // scores in [0, 2)
      else       prog[c][i].fp16[k] = {1'($urandom), 5'(6 + $urandom % 18), 10'($urandom)}; // activations
    end
    if (infmt) prog[c][i].fp16[0] = 16'h3C00;   // a score of exactly 1.0
    if (op == CMD_WR_IN) begin
      m_fmt[slot] = infmt;
      for (int u = 0; u < np_v; u++)
        if (mask[u]) for (int k = 0; k < 4 * np_v; k++)
          m_in[u][slot][k] = infmt ? ref_s0e4m4(prog[c][i].fp16[k]) : ref_e4m3(prog[c][i].fp16[k]);
      if (infmt) n_wr_s0++; else n_wr_e4m3++;
    end
    if (op == CMD_WR_META)
      for (int u = 0; u < np_v; u++) if (mask[u]) m_meta[u] = prog[c][i].data;
    if (op == CMD_MAC_RD || op == CMD_MAC_REUSE) begin
      for (int u = 0; u < np_v; u++) begin
        if (op == CMD_MAC_RD) m_wreg[u] = odd ? w_odd[c][u][col] : w_even[c][u][col];
        for (int p = 0; p < npe_v; p++) begin
          real r;
          r = 0.0;
          for (int k = 0; k < 4; k++) begin
            logic [3:0] code = m_wreg[u][(p*4+k)*4 +: 4];
            if (!wf && code == 4'b1000) n_special++;
            r += in_value(m_in[u][slot][tile*4 + k], m_fmt[slot]) * in_scale(m_fmt[slot])
                 * wkv_value(code, m_meta[u][(p*4+k)*4 +: 4], wf) * wkv_scale(wf);
          end
          m_acc[u][slot][p] = longint'(int'(m_acc[u][slot][p] + longint'(r)));
        end
      end
      if (wf) n_int4++;
    end
    if (op == CMD_CLR)
      for (int u = 0; u < np_v; u++) for (int p = 0; p < npe_v; p++) m_acc[u][slot][p] = 0;
    if (op == CMD_RD) begin
      for (int u = 0; u < np_v; u++) for (int p = 0; p < npe_v; p++)
        expect_o[c][n_expect[c]][u][p] = m_acc[u][slot][p];
      n_expect[c]++;
    end
    prog_len[c] = i + 1;
  endfunction

  // The program is described as a table of (op, slot, in_fmt, wkv_fmt, bank,
  // first column, mask kind) rows; a MAC row expands to 8 tiles.
  typedef struct { cmd_op_e op; logic slot; logic infmt; logic wf; logic odd; int col0;
                   int batch2; int per_pcu; } row_t;

  function automatic void build(int c);
    row_t rows [$];
    prog_len[c] = 0; n_expect[c] = 0;
    for (int u = 0; u < np_v; u++) begin
      m_meta[u] = '0; m_wreg[u] = '0;
      for (int s = 0; s < 2; s++) for (int p = 0; p < npe_v; p++) m_acc[u][s][p] = 0;
    end
    // A) linear layer, batch 2 (rows 0..6)
    rows.push_back('{CMD_WR_META, 0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_WR_IN,   0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_WR_IN,   1, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_CLR,     0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_CLR,     1, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_MAC_RD,  0, 0, 0, 0, 0, 1, 0});
    rows.push_back('{CMD_RD,      0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_RD,      1, 0, 0, 0, 0, 0, 0});
    // B) batch 1
    rows.push_back('{CMD_CLR,     0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_MAC_RD,  0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_RD,      0, 0, 0, 0, 0, 0, 0});
    // C) Q*K^T, INT4-Asym keys
    rows.push_back('{CMD_WR_META, 0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_WR_IN,   0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_WR_IN,   1, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_CLR,     0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_CLR,     1, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_MAC_RD,  0, 0, 1, 0, 8, 1, 0});
    rows.push_back('{CMD_RD,      0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_RD,      1, 0, 0, 0, 0, 0, 0});
    // D) P*V, INT4-Asym values, per-PCU scores
    rows.push_back('{CMD_WR_META, 0, 0, 0, 0, 0, 0, 1});
    rows.push_back('{CMD_WR_IN,   0, 1, 0, 0, 0, 0, 1});
    rows.push_back('{CMD_WR_IN,   1, 1, 0, 0, 0, 0, 1});
    rows.push_back('{CMD_CLR,     0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_CLR,     1, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_MAC_RD,  0, 0, 1, 1, 0, 1, 0});
    rows.push_back('{CMD_RD,      0, 0, 0, 0, 0, 0, 0});
    rows.push_back('{CMD_RD,      1, 0, 0, 0, 0, 0, 0});
    for (int r = 0; r < rows.size(); r++) begin
      if (rows[r].op == CMD_MAC_RD) begin
        if (r == 5) mark_a0[c] = prog_len[c];
        if (r == 9) mark_b0[c] = prog_len[c];
        for (int t = 0; t < 8; t++) begin
          add(c, CMD_MAC_RD, 0, 3'(t), rows[r].odd, rows[r].col0 + t, 0, rows[r].wf, '0);
          if (rows[r].batch2 != 0)
            add(c, CMD_MAC_REUSE, 1, 3'(t), rows[r].odd, rows[r].col0 + t, 0, rows[r].wf, '0);
        end
        if (r == 5) mark_a1[c] = prog_len[c] - 1;
        if (r == 9) mark_b1[c] = prog_len[c] - 1;
      end else if (rows[r].per_pcu != 0) begin
        for (int u = 0; u < np_v; u++)
          add(c, rows[r].op, rows[r].slot, 0, 0, 0, rows[r].infmt, 0, NP'(1) << u);
      end else begin
        add(c, rows[r].op, rows[r].slot, 0, 0, 0, rows[r].infmt, 0, '1);
      end
    end
  endfunction

  // ---------------------------------------------------------------- channels
  for (genvar c = 0; c < NC; c++) begin : g_ch
    for (genvar u = 0; u < NP; u++) begin : g_pcu
      hbm_bank_model u_even (.clk(clk), .load_i(load), .load_col_i(load_col),
                             .load_data_i(w_even[c][u][load_col[3:0]]), .rd_col_i(bank_col[c]),
                             .rd_data_o(even_d[c][u]));
      hbm_bank_model u_odd  (.clk(clk), .load_i(load), .load_col_i(load_col),
                             .load_data_i(w_odd[c][u][load_col[3:0]]), .rd_col_i(bank_col[c]),
                             .rd_data_o(odd_d[c][u]));
    end

    // driver: one command per cycle, held until accepted
    initial begin
      cmd_valid[c] = 0; cmd[c] = '0; cmd_data[c] = '0; cmd_mask[c] = '0; done[c] = 0;
      for (int k = 0; k < 32; k++) cmd_fp16[c][k] = '0;
      wait (start);
      for (int i = 0; i < prog_len[c]; i++) begin
        @(negedge clk);
        cmd_valid[c] = 1; cmd[c] = prog[c][i].c; cmd_data[c] = prog[c][i].data;
        cmd_mask[c] = prog[c][i].mask;
        for (int k = 0; k < 32; k++) cmd_fp16[c][k] = prog[c][i].fp16[k];
        @(posedge clk);
        while (!cmd_ready[c]) @(posedge clk);
        acc_cyc[c][i] = cyc;
      end
      @(negedge clk);
      cmd_valid[c] = 0;
      repeat (4) @(posedge clk);
      done[c] = 1;
    end

    // monitor: compare every read-out with its prediction
    always @(posedge clk) begin
      #1;
      if (out_valid[c]) begin
        for (int u = 0; u < np_v; u++)
          for (int p = 0; p < npe_v; p++) begin
            checks++;
            if (longint'(signed'(out[c][u][p])) != expect_o[c][n_outs[c]][u][p]) begin
              failures++;
              if (failures < 12) $display("FAIL ch=%0d readout=%0d pcu=%0d pe=%0d got=%0d exp=%0d",
                                          c, n_outs[c], u, p, signed'(out[c][u][p]),
                                          expect_o[c][n_outs[c]][u][p]);
            end
          end
        n_outs[c]++;
      end
    end
  end

  initial begin
    for (int c = 0; c < NC; c++) n_outs[c] = 0;
    for (int c = 0; c < NC; c++)
      for (int u = 0; u < np_v; u++)
        for (int k = 0; k < NCOL; k++)
          for (int i = 0; i < 8; i++) begin
            w_even[c][u][k][i*32 +: 32] = $urandom;
            w_odd[c][u][k][i*32 +: 32]  = $urandom;
          end
    for (int c = 0; c < NC; c++) build(c);
    load = 0; load_col = '0;
    for (int k = 0; k < NCOL; k++) begin
      @(negedge clk); load = 1; load_col = 5'(k);
      @(posedge clk);
    end
    @(negedge clk); load = 0;
    rst_n = 1;
    start = 1;
    for (int c = 0; c < NC; c++) wait (done[c]);
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (n_outs[c] != n_expect[c]) begin
        failures++; $display("FAIL ch=%0d saw %0d read-outs, expected %0d", c, n_outs[c], n_expect[c]);
      end
      checks++;
      if (acc_cyc[c][mark_a1[c]] - acc_cyc[c][mark_a0[c]] + 1 != 16) begin
        failures++; $display("FAIL ch=%0d batch-2: 16 MACs took %0d cycles", c,
                             acc_cyc[c][mark_a1[c]] - acc_cyc[c][mark_a0[c]] + 1);
      end
      checks++;
      if (acc_cyc[c][mark_b1[c]] - acc_cyc[c][mark_b0[c]] + 1 != 15) begin
        failures++; $display("FAIL ch=%0d batch-1: 8 column reads took %0d cycles", c,
                             acc_cyc[c][mark_b1[c]] - acc_cyc[c][mark_b0[c]] + 1);
      end
    end
    checks++; if (n_rd == 0)      begin failures++; $display("FAIL no column read"); end
    checks++; if (n_reuse == 0)   begin failures++; $display("FAIL no column reuse"); end
    checks++; if (n_stall == 0)   begin failures++; $display("FAIL no tCCD_L stall"); end
    checks++; if (n_even == 0)    begin failures++; $display("FAIL no even-bank read"); end
    checks++; if (n_odd == 0)     begin failures++; $display("FAIL no odd-bank read"); end
    checks++; if (n_wr_e4m3 == 0) begin failures++; $display("FAIL no E4M3 input write"); end
    checks++; if (n_wr_s0 == 0)   begin failures++; $display("FAIL no S0E4M4 input write"); end
    checks++; if (n_special == 0) begin failures++; $display("FAIL no BitMoD special value"); end
    checks++; if (n_int4 == 0)    begin failures++; $display("FAIL no INT4-Asym MAC"); end
    $display("events: reads=%0d reuses=%0d stalls=%0d even=%0d odd=%0d wr_e4m3=%0d wr_s0e4m4=%0d bitmod_special=%0d int4_macs=%0d cycles=%0d",
             n_rd, n_reuse, n_stall, n_even, n_odd, n_wr_e4m3, n_wr_s0, n_special, n_int4, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
