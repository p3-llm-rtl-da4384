// p3_pkg: types and constants shared by the P3-LLM PIM datapath.
//
// The PIM compute unit (PCU) multiplies 8-bit inputs (FP8-E4M3 activations or
// unsigned FP8-S0E4M4 attention-scores) with 4-bit operands read from DRAM
// (BitMoD weights or INT4-Asym KV-cache). The widths below are the ones printed
// on the PCU datapath: a 4-bit exponent, a sign and a 5-bit mantissa per input,
// a 6-bit decoded weight, a 12-bit product, 26-bit shifted products, a 28-bit
// compressor-tree sum and a 32-bit accumulator. A PCU works on a 1x4x16 tile:
// 4 inputs, 64 four-bit weights (one 256-bit DRAM column) and 16 outputs.
// Each of the two input slots holds IN_TILES such 1x4 tiles, filled by one
// 256-bit write, so a slot feeds IN_TILES consecutive column reads.
//
// The command set, its encoding and the BitMoD special-value select code are
// this design's own choices; the paper does not define a PIM instruction set.
package p3_pkg;

  // Tile and datapath sizes
  localparam int unsigned COL_BITS  = 256;  // DRAM column access granularity
  localparam int unsigned N_PE      = 16;   // PEs per PCU (outputs per tile)
  localparam int unsigned K_DOT     = 4;    // inputs per tile = multipliers per PE
  localparam int unsigned W_BITS    = 4;    // weight / KV-cache code width
  localparam int unsigned IN_BITS   = 8;    // FP8 input width
  localparam int unsigned EXP_W     = 4;    // input exponent width
  localparam int unsigned MAN_W     = 5;    // input mantissa incl. hidden bit
  localparam int unsigned WDEC_W    = 6;    // decoded weight / KV width
  localparam int unsigned PROD_W    = 12;   // multiplier product width
  localparam int unsigned SHP_W     = 26;   // shifted product width
  localparam int unsigned TREE_W    = 28;   // 4:2 compressor tree output width
  localparam int unsigned ACC_W     = 32;   // fixed-point accumulator width
  localparam int unsigned N_SLOT    = 2;    // input slots (A, B) for temporal reuse
  localparam int unsigned IN_TILES  = 8;    // 1x4 input tiles per slot (one 256-bit write)
  localparam int unsigned TILE_AW   = 3;    // tile index width
  localparam int unsigned N_IN_WR   = COL_BITS / IN_BITS;  // 32 inputs per write
  localparam int unsigned COL_AW    = 5;    // column address width (32 columns per row)

  // Input formats held in the PCU input register
  typedef enum logic {
    FMT_E4M3   = 1'b0,   // signed FP8, 4-bit exponent (bias 7), 3-bit mantissa
    FMT_S0E4M4 = 1'b1    // unsigned FP8, 4-bit exponent (bias 15), 4-bit mantissa
  } in_fmt_e;

  // Formats of the 4-bit operand read from the bank
  typedef enum logic {
    WKV_BITMOD   = 1'b0, // FP4 with the negative zero remapped to a special value
    WKV_INT4ASYM = 1'b1  // unsigned 4-bit code minus a 4-bit zero point
  } wkv_fmt_e;

  // One input after the input register splits it into its fields
  typedef struct packed {
    logic             s;   // sign (always 0 for FP8-S0E4M4)
    logic [EXP_W-1:0] e;   // exponent field; sets the product shift
    logic [MAN_W-1:0] m;   // mantissa with hidden bit, aligned to 5 bits
  } dec_in_t;

  // PIM commands
  typedef enum logic [2:0] {
    CMD_NOP       = 3'd0,
    CMD_WR_IN     = 3'd1,  // write 32 FP8 inputs (8 tiles) into input slot `slot`
    CMD_WR_META   = 3'd2,  // write 64 x 4-bit zero points / BitMoD selects
    CMD_MAC_RD    = 3'd3,  // read a column from the bank and multiply-accumulate
    CMD_MAC_REUSE = 3'd4,  // multiply-accumulate with the column read last
    CMD_CLR       = 3'd5,  // clear the accumulators of slot `slot`
    CMD_RD        = 3'd6   // read out the accumulators of slot `slot`
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e           op;
    logic              slot;     // input slot / accumulator set (A = 0, B = 1)
    logic [TILE_AW-1:0] tile;    // input tile of the slot used by a MAC command
    logic              bank_odd; // 0: even bank, 1: odd bank of each PCU
    logic [COL_AW-1:0] col;      // column address for CMD_MAC_RD
    in_fmt_e           in_fmt;   // input format for CMD_WR_IN
    wkv_fmt_e          wkv_fmt;  // operand format for MAC commands
  } pim_cmd_t;

  // BitMoD special values (in half units): select code -> value
  //   0: +5 (+10), 1: -5 (-10), 2: +8 (+16), 3: -8 (-16)
  typedef enum logic [1:0] {
    SV_P5 = 2'd0, SV_N5 = 2'd1, SV_P8 = 2'd2, SV_N8 = 2'd3
  } bitmod_sv_e;

endpackage
