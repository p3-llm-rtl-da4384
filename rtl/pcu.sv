// pcu: the low-precision, throughput-enhanced PIM compute unit of P3-LLM.
//
// One PCU sits between an even and an odd DRAM bank and computes a 1x4x16 GEMV
// tile per PIM command: 4 eight-bit inputs from the input register times one
// 256-bit DRAM column of 64 four-bit weights or KV-cache codes, into 16 32-bit
// outputs (one per PE). Column bits [(p*4+k)*4 +: 4] feed input k of PE p. The
// 4 inputs are tile `tile` of input slot `slot` (see pcu_input_reg).
//
// Temporal reuse: a HBM-PIM PCU consumes one column per tCCD_L. This PCU runs
// at tCCD_S (half of tCCD_L), so a column read by CMD_MAC_RD is kept in a weight
// register and CMD_MAC_REUSE multiplies it once more, normally with the other
// input slot, inside the same tCCD_L window. Two batch rows or two GQA query
// heads then share every column read.
//
// Commands (arriving from pim_cmd_ctrl, one per PCU cycle = one tCCD_S):
//   CMD_WR_IN     (if sel_i) store data_i (32 FP8 inputs) into slot `slot`
//   CMD_WR_META   (if sel_i) store data_i as 64 four-bit side inputs: the zero
//                 point z_KV (INT4-Asym) or BitMoD special-value select of
//                 multiplier (p*4+k) in bits [(p*4+k)*4 +: 4]
//   CMD_MAC_RD    use the even or odd bank column (bank_odd), keep it, MAC
//                 with tile `tile` of slot `slot` into the accumulators of `slot`
//   CMD_MAC_REUSE MAC with the kept column
//   CMD_CLR       clear the accumulators of slot `slot`
//   CMD_RD        copy the 16 accumulators of slot `slot` to out_o, out_valid_o
//
// Follows the paper: 16 PEs of 4 multipliers, 256-bit column per MAC, PCU shared
// by two banks, reuse of one column by two inputs at tCCD_S. This design's
// choices: the command set, the weight register, the side-input register that
// supplies z_KV / BitMoD selects, and the output register.
//
// Timing: a command acts at the clock edge ending its cycle; out_o is valid the
// cycle after CMD_RD.
module pcu
  import p3_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     valid_i,
  input  pim_cmd_t                 cmd_i,
  input  logic [COL_BITS-1:0]      data_i,
  input  logic                     sel_i,
  input  logic [COL_BITS-1:0]      bank_even_i,
  input  logic [COL_BITS-1:0]      bank_odd_i,
  output logic                     out_valid_o,
  output logic [ACC_W-1:0]         out_o [N_PE]
);
  logic [COL_BITS-1:0]      wreg_q;
  logic [COL_BITS-1:0]      meta_q;
  logic [COL_BITS-1:0]      col;
  dec_in_t [K_DOT-1:0]      x;
  logic                     mac, clr, wr_in;
  logic signed [ACC_W-1:0]  acc [N_PE][N_SLOT];

  assign wr_in = valid_i && sel_i && (cmd_i.op == CMD_WR_IN);
  assign mac   = valid_i && (cmd_i.op == CMD_MAC_RD || cmd_i.op == CMD_MAC_REUSE);
  assign clr   = valid_i && (cmd_i.op == CMD_CLR);
  assign col   = (cmd_i.op == CMD_MAC_RD) ? (cmd_i.bank_odd ? bank_odd_i : bank_even_i)
                                          : wreg_q;

  pcu_input_reg u_inreg (
    .clk    (clk),
    .rst_n  (rst_n),
    .we_i   (wr_in),
    .wslot_i(cmd_i.slot),
    .wfmt_i (cmd_i.in_fmt),
    .wdata_i(data_i),
    .rslot_i(cmd_i.slot),
    .rtile_i(cmd_i.tile),
    .x_o    (x)
  );

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    pcu_pe u_pe (
      .clk   (clk),
      .rst_n (rst_n),
      .mac_i (mac),
      .clr_i (clr),
      .slot_i(cmd_i.slot),
      .x_i   (x),
      .code_i(col[p*K_DOT*W_BITS +: K_DOT*W_BITS]),
      .meta_i(meta_q[p*K_DOT*4 +: K_DOT*4]),
      .fmt_i (cmd_i.wkv_fmt),
      .acc_o (acc[p])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wreg_q      <= '0;
      meta_q      <= '0;
      out_valid_o <= 1'b0;
      for (int p = 0; p < N_PE; p++) out_o[p] <= '0;
    end else begin
      out_valid_o <= valid_i && (cmd_i.op == CMD_RD);
      if (valid_i && cmd_i.op == CMD_MAC_RD) wreg_q <= col;
      if (valid_i && sel_i && cmd_i.op == CMD_WR_META) meta_q <= data_i;
      if (valid_i && cmd_i.op == CMD_RD)
        for (int p = 0; p < N_PE; p++) out_o[p] <= acc[p][cmd_i.slot];
    end
  end
endmodule
