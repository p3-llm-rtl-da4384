// pim_channel: one P3-LLM PIM channel.
//
// A channel holds 16 banks and 8 PCUs; each PCU is shared by one even and one
// odd bank to halve the compute area. The channel's command controller
// (pim_cmd_ctrl) broadcasts every executed command to all 8 PCUs (all-bank
// mode): a CMD_MAC_RD reads the same column address from the even or the odd
// bank of every PCU, so the 8 PCUs compute 8 different 1x4x16 tiles of the same
// GEMV in parallel. Input and side-input writes go only to the PCUs whose bit is
// set in the write mask, so PCUs can hold the same or different input tiles.
//
// The banks themselves are outside this module: bank_rd_o / bank_odd_o /
// bank_col_o request a column and bank_even_i / bank_odd_i return, per PCU, the
// 256-bit column of its even and its odd bank in the same cycle.
//
// Follows the paper: 8 PCUs per channel, each shared by 2 banks, 256-bit columns.
// This design's choices: broadcast command issue and the write mask.
//
// Timing: see pim_cmd_ctrl (one command per cycle = tCCD_S, one column read per
// tCCD_L) and pcu (outputs valid two cycles after a CMD_RD is accepted).
module pim_channel
  import p3_pkg::*;
#(
  parameter int unsigned N_PCU  = 8,
  parameter int unsigned TCCD_S = 2,
  parameter int unsigned TCCD_L = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid_i,
  output logic                 cmd_ready_o,
  input  pim_cmd_t             cmd_i,
  input  logic [COL_BITS-1:0]  cmd_data_i,
  input  logic [N_PCU-1:0]     cmd_mask_i,
  output logic                 bank_rd_o,
  output logic                 bank_odd_o,
  output logic [COL_AW-1:0]    bank_col_o,
  input  logic [COL_BITS-1:0]  bank_even_i [N_PCU],
  input  logic [COL_BITS-1:0]  bank_odd_i  [N_PCU],
  output logic                 out_valid_o,
  output logic [ACC_W-1:0]     out_o [N_PCU][N_PE],
  output logic                 stall_o
);
  logic                exe_valid;
  pim_cmd_t            exe_cmd;
  logic [COL_BITS-1:0] exe_data;
  logic [N_PCU-1:0]    exe_mask;
  logic [N_PCU-1:0]    pcu_ov;

  pim_cmd_ctrl #(.N_PCU(N_PCU), .TCCD_S(TCCD_S), .TCCD_L(TCCD_L)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .cmd_valid_i(cmd_valid_i),
    .cmd_ready_o(cmd_ready_o),
    .cmd_i      (cmd_i),
    .cmd_data_i (cmd_data_i),
    .cmd_mask_i (cmd_mask_i),
    .exe_valid_o(exe_valid),
    .exe_cmd_o  (exe_cmd),
    .exe_data_o (exe_data),
    .exe_mask_o (exe_mask),
    .bank_rd_o  (bank_rd_o),
    .bank_odd_o (bank_odd_o),
    .bank_col_o (bank_col_o),
    .stall_o    (stall_o)
  );

  for (genvar u = 0; u < N_PCU; u++) begin : g_pcu
    pcu u_pcu (
      .clk        (clk),
      .rst_n      (rst_n),
      .valid_i    (exe_valid),
      .cmd_i      (exe_cmd),
      .data_i     (exe_data),
      .sel_i      (exe_mask[u]),
      .bank_even_i(bank_even_i[u]),
      .bank_odd_i (bank_odd_i[u]),
      .out_valid_o(pcu_ov[u]),
      .out_o      (out_o[u])
    );
  end

  assign out_valid_o = &pcu_ov;  // all PCUs read out in the same cycle
endmodule
