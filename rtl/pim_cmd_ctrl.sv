// pim_cmd_ctrl: PIM command front end of one channel.
//
// The host issues PIM commands over a valid/ready handshake. The controller
// registers each accepted command (with its 256-bit write data and PCU select
// mask) into an execute stage that all PCUs of the channel see in the next
// cycle, and in that same cycle drives the column read of the banks for
// CMD_MAC_RD.
//
// The controller and the PCUs run on one clock whose period is tCCD_S, so at
// most one PIM command is executed per tCCD_S. A DRAM bank can deliver a new
// column only once per tCCD_L. A CMD_MAC_RD that arrives earlier than tCCD_L
// after the previous column read is held off (cmd_ready_o low, a stall) until
// the gap has passed; every other command, including CMD_MAC_REUSE, is accepted
// at once. TCCD_S and TCCD_L are given in DRAM clock cycles; with the HBM2
// values (2 and 4) a column read is allowed every second PCU cycle, which is
// the spacing in the command timing of the paper (Weight 1, Weight 2).
//
// Follows the paper: one PIM command per tCCD_S, one column per tCCD_L, tCCD_S
// = 2 and tCCD_L = 4 DRAM cycles. This design's choices: the handshake, the
// stall, the one-cycle execute stage and the read strobe timing (the bank is
// assumed to return the column in the execute cycle, from an open row).
module pim_cmd_ctrl
  import p3_pkg::*;
#(
  parameter int unsigned N_PCU  = 8,
  parameter int unsigned TCCD_S = 2,
  parameter int unsigned TCCD_L = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host side
  input  logic                 cmd_valid_i,
  output logic                 cmd_ready_o,
  input  pim_cmd_t             cmd_i,
  input  logic [COL_BITS-1:0]  cmd_data_i,
  input  logic [N_PCU-1:0]     cmd_mask_i,
  // execute stage, to the PCUs
  output logic                 exe_valid_o,
  output pim_cmd_t             exe_cmd_o,
  output logic [COL_BITS-1:0]  exe_data_o,
  output logic [N_PCU-1:0]     exe_mask_o,
  // column read strobe, to the banks
  output logic                 bank_rd_o,
  output logic                 bank_odd_o,
  output logic [COL_AW-1:0]    bank_col_o,
  // events
  output logic                 stall_o
);
  localparam int unsigned RD_GAP = (TCCD_L + TCCD_S - 1) / TCCD_S;  // PCU cycles
  localparam int unsigned GAP_W  = $clog2(RD_GAP + 1) + 1;

  logic [GAP_W-1:0] gap_q;   // PCU cycles since the last accepted column read
  logic             is_rd;
  logic             accept;

  assign is_rd       = (cmd_i.op == CMD_MAC_RD);
  assign cmd_ready_o = !is_rd || (gap_q >= GAP_W'(RD_GAP));
  assign accept      = cmd_valid_i && cmd_ready_o;
  assign stall_o     = cmd_valid_i && !cmd_ready_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gap_q       <= GAP_W'(RD_GAP);
      exe_valid_o <= 1'b0;
      exe_cmd_o   <= '0;
      exe_data_o  <= '0;
      exe_mask_o  <= '0;
    end else begin
      if (accept && is_rd)             gap_q <= GAP_W'(1);
      else if (gap_q < GAP_W'(RD_GAP)) gap_q <= gap_q + GAP_W'(1);
      exe_valid_o <= accept;
      if (accept) begin
        exe_cmd_o  <= cmd_i;
        exe_data_o <= cmd_data_i;
        exe_mask_o <= cmd_mask_i;
      end
    end
  end

  assign bank_rd_o  = exe_valid_o && (exe_cmd_o.op == CMD_MAC_RD);
  assign bank_odd_o = exe_cmd_o.bank_odd;
  assign bank_col_o = exe_cmd_o.col;

  // Host-side handshake rule: a command held off keeps its value.
  a_hold_stable : assert property (@(posedge clk) disable iff (!rst_n)
      (cmd_valid_i && !cmd_ready_o) |=> (cmd_valid_i && $stable(cmd_i)));
  // Bank rule: column reads are at least tCCD_L apart.
  a_tccd_l : assert property (@(posedge clk) disable iff (!rst_n)
      bank_rd_o |=> !bank_rd_o [*(RD_GAP-1)]);
endmodule
