// pcu_input_reg: the PCU input register.
//
// The host NPU writes the 8-bit inputs (activations or attention-scores) of a
// GEMV into the PCU before the weight columns stream past. The register has two
// slots, A and B: the throughput-enhanced PCU multiplies one 256-bit weight
// column with two different input vectors in two consecutive tCCD_S windows, so
// two input vectors must be resident at once. A slot is filled by one 256-bit
// write with 32 inputs, i.e. IN_TILES = 8 tiles of 4 inputs; input k of tile t
// is byte (t*4 + k) of the write. Each slot also records the format it was
// written in.
//
// The read side selects one tile of one slot and splits its four bytes into the
// fields the multipliers use: sign s (1 bit), exponent e (4 bits) and mantissa
// m (5 bits with the hidden bit). E4M3 mantissas (1.mmm) get a zero LSB so both
// formats share the 5-bit mantissa and the shift-by-exponent step:
//   E4M3   : value = (-1)^s * m * 2^(max(e,1)-1) * 2^-10
//   S0E4M4 : value =          m * 2^(max(e,1)-1) * 2^-18
//
// The field widths (e 4, s 1, m 5) and the A/B slots of the command timing are
// the paper's. The slot depth of 8 tiles, the per-slot format bit and the zero
// reset value are this design's choices (the paper's text counts only one 1x4
// tile of input register per PCU, but its command timing streams two columns
// after a single write of A and of B).
//
// Timing: a write lands at the clock edge; the read port is combinational.
module pcu_input_reg
  import p3_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       we_i,
  input  logic                       wslot_i,
  input  in_fmt_e                    wfmt_i,
  input  logic [COL_BITS-1:0]        wdata_i,
  input  logic                       rslot_i,
  input  logic [TILE_AW-1:0]         rtile_i,
  output dec_in_t [K_DOT-1:0]        x_o
);
  localparam int unsigned TILE_BITS = K_DOT * IN_BITS;

  logic [COL_BITS-1:0] data_q [N_SLOT];
  in_fmt_e             fmt_q  [N_SLOT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_SLOT; i++) begin
        data_q[i] <= '0;
        fmt_q[i]  <= FMT_E4M3;
      end
    end else if (we_i) begin
      data_q[wslot_i] <= wdata_i;
      fmt_q[wslot_i]  <= wfmt_i;
    end
  end

  always_comb begin
    for (int k = 0; k < K_DOT; k++) begin
      logic [IN_BITS-1:0] b;
      b = data_q[rslot_i][rtile_i*TILE_BITS + k*IN_BITS +: IN_BITS];
      if (fmt_q[rslot_i] == FMT_S0E4M4) begin
        x_o[k].s = 1'b0;
        x_o[k].e = b[7:4];
        x_o[k].m = {b[7:4] != 4'd0, b[3:0]};
      end else begin
        x_o[k].s = b[7];
        x_o[k].e = b[6:3];
        x_o[k].m = {b[6:3] != 4'd0, b[2:0], 1'b0};
      end
    end
  end
endmodule
