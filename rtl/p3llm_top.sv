// p3llm_top: the PIM side of the P3-LLM NPU-PIM accelerator.
//
// P3-LLM offloads the memory-bound GEMV work of LLM decoding (linear layers,
// Q*K^T for post-RoPE key caches, and P*V) to low-precision PIM compute units
// inside HBM, while the host NPU does the element-wise work in FP16. This module
// holds NUM_CH pseudo channels (16 in the evaluated system), each a pim_channel
// of 8 PCUs, plus the FP8 casts through which the NPU writes the PCU input
// registers: FP16 activations or queries become FP8-E4M3, FP16 attention-scores
// become FP8-S0E4M4, selected by the command's in_fmt.
//
// Host interface, per channel c:
//   cmd_valid_i[c] / cmd_ready_o[c] / cmd_i[c]   PIM command handshake
//   cmd_data_i[c]   256-bit data for CMD_WR_META
//   cmd_fp16_i[c]   32 FP16 inputs for CMD_WR_IN (cast to FP8 here)
//   cmd_mask_i[c]   PCUs that take a write
//   out_valid_o[c], out_o[c][pcu][pe]   accumulators after CMD_RD
// Bank interface, per channel c (the DRAM banks are outside this design):
//   bank_rd_o[c], bank_odd_o[c], bank_col_o[c]   column read request
//   bank_even_i[c][pcu], bank_odd_i[c][pcu]      returned 256-bit columns
// stall_o[c] is high in a cycle in which a column read waits for tCCD_L.
//
// Follows the paper: 16 pseudo channels, 8 PCUs per channel, FP8-E4M3 and
// FP8-S0E4M4 input formats. This design's choices: casting at the PIM write port
// (the NPU's own datapath is not modelled) and the per-channel command ports.
//
// Timing: see pim_cmd_ctrl and pcu; the casts add no cycle.
module p3llm_top
  import p3_pkg::*;
#(
  parameter int unsigned NUM_CH = 16,
  parameter int unsigned N_PCU  = 8,
  parameter int unsigned TCCD_S = 2,
  parameter int unsigned TCCD_L = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid_i [NUM_CH],
  output logic                 cmd_ready_o [NUM_CH],
  input  pim_cmd_t             cmd_i       [NUM_CH],
  input  logic [COL_BITS-1:0]  cmd_data_i  [NUM_CH],
  input  logic [15:0]          cmd_fp16_i  [NUM_CH][N_IN_WR],
  input  logic [N_PCU-1:0]     cmd_mask_i  [NUM_CH],
  output logic                 bank_rd_o   [NUM_CH],
  output logic                 bank_odd_o  [NUM_CH],
  output logic [COL_AW-1:0]    bank_col_o  [NUM_CH],
  input  logic [COL_BITS-1:0]  bank_even_i [NUM_CH][N_PCU],
  input  logic [COL_BITS-1:0]  bank_odd_i  [NUM_CH][N_PCU],
  output logic                 out_valid_o [NUM_CH],
  output logic [ACC_W-1:0]     out_o       [NUM_CH][N_PCU][N_PE],
  output logic                 stall_o     [NUM_CH]
);

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    logic [7:0]          fp8_a [N_IN_WR];
    logic [7:0]          fp8_p [N_IN_WR];
    logic [COL_BITS-1:0] wdata;

    for (genvar k = 0; k < N_IN_WR; k++) begin : g_cast
      fp8_e4m3_cast   u_act (.fp16_i(cmd_fp16_i[c][k]), .fp8_o(fp8_a[k]));
      fp8_s0e4m4_cast u_att (.fp16_i(cmd_fp16_i[c][k]), .fp8_o(fp8_p[k]));
    end

    always_comb begin
      wdata = cmd_data_i[c];
      if (cmd_i[c].op == CMD_WR_IN) begin
        wdata = '0;
        for (int k = 0; k < N_IN_WR; k++)
          wdata[k*IN_BITS +: IN_BITS] = (cmd_i[c].in_fmt == FMT_S0E4M4) ? fp8_p[k] : fp8_a[k];
      end
    end

    pim_channel #(.N_PCU(N_PCU), .TCCD_S(TCCD_S), .TCCD_L(TCCD_L)) u_ch (
      .clk        (clk),
      .rst_n      (rst_n),
      .cmd_valid_i(cmd_valid_i[c]),
      .cmd_ready_o(cmd_ready_o[c]),
      .cmd_i      (cmd_i[c]),
      .cmd_data_i (wdata),
      .cmd_mask_i (cmd_mask_i[c]),
      .bank_rd_o  (bank_rd_o[c]),
      .bank_odd_o (bank_odd_o[c]),
      .bank_col_o (bank_col_o[c]),
      .bank_even_i(bank_even_i[c]),
      .bank_odd_i (bank_odd_i[c]),
      .out_valid_o(out_valid_o[c]),
      .out_o      (out_o[c]),
      .stall_o    (stall_o[c])
    );
  end
endmodule
