// pcu_pe: one processing element of the PCU.
//
// Each PE computes a 4-way dot product per PIM command: four pe_multiplier lanes
// multiply the four inputs of the selected input slot with four 4-bit weight or
// KV-cache codes, a 4:2 compressor tree adds the four 26-bit shifted products
// into 28 bits, and the sign-extended sum is added to a 32-bit fixed-point
// accumulator. A PCU holds 16 of these PEs.
//
// The PE keeps one accumulator per input slot (A and B), so that the two input
// vectors that share a weight column in the throughput-enhanced PCU accumulate
// into separate outputs. clr_i clears the accumulator of slot_i; mac_i adds the
// dot product into it. Accumulation wraps modulo 2^32.
//
// Follows the paper: 4 multipliers, 4:2 compressor tree, 32-bit fixed-point
// accumulator. This design's choices: one accumulator per input slot, clear
// command, wrap-around on overflow, asynchronous active-low reset.
//
// Timing: the dot product is combinational; the accumulator updates on the
// clock edge at the end of the cycle in which mac_i is high.
module pcu_pe
  import p3_pkg::*;
(
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        mac_i,
  input  logic                        clr_i,
  input  logic                        slot_i,
  input  dec_in_t [K_DOT-1:0]         x_i,
  input  logic [K_DOT*W_BITS-1:0]     code_i,
  input  logic [K_DOT*4-1:0]          meta_i,
  input  wkv_fmt_e                    fmt_i,
  output logic signed [ACC_W-1:0]     acc_o [N_SLOT]
);
  logic signed [SHP_W-1:0]  prod [K_DOT];
  logic signed [TREE_W-1:0] dot;
  logic signed [ACC_W-1:0]  acc_q [N_SLOT];

  for (genvar k = 0; k < K_DOT; k++) begin : g_mul
    pe_multiplier u_mul (
      .x_i   (x_i[k]),
      .code_i(code_i[k*W_BITS +: W_BITS]),
      .meta_i(meta_i[k*4 +: 4]),
      .fmt_i (fmt_i),
      .p_o   (prod[k])
    );
  end

  compressor_4to2 u_tree (.x_i(prod), .sum_o(dot));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_SLOT; i++) acc_q[i] <= '0;
    end else if (clr_i) begin
      acc_q[slot_i] <= '0;
    end else if (mac_i) begin
      acc_q[slot_i] <= acc_q[slot_i] + ACC_W'(dot);
    end
  end

  assign acc_o = acc_q;
endmodule
