// compressor_4to2: adds the four shifted products of a PE.
//
// A row of 4:2 compressor cells turns four 26-bit operands (sign-extended to 28
// bits) into a sum vector and a carry vector. Each cell is two chained full
// adders: the first adds x0, x1, x2 and passes its carry sideways (cout) to the
// next bit position; the second adds that sum, x3 and the sideways carry from
// the previous bit. A final carry-propagate adder adds the two vectors. The
// result of four 26-bit signed numbers always fits the 28-bit output.
//
// The 4:2 compressor tree and its 26-bit inputs and 28-bit output are the
// paper's; the paper does not give its cells, so a standard single-level 4:2
// row with a final adder is used.
//
// Interface: purely combinational.
module compressor_4to2
  import p3_pkg::*;
(
  input  logic signed [SHP_W-1:0]  x_i [K_DOT],
  output logic signed [TREE_W-1:0] sum_o
);
  logic [TREE_W-1:0] a, b, c, d;
  logic [TREE_W-1:0] s_vec, c_vec, cout, cin;
  logic [TREE_W-1:0] s1;

  always_comb begin
    a = TREE_W'(x_i[0]);
    b = TREE_W'(x_i[1]);
    c = TREE_W'(x_i[2]);
    d = TREE_W'(x_i[3]);
    // first full adder of every cell
    s1   = a ^ b ^ c;
    cout = (a & b) | (a & c) | (b & c);
    cin  = {cout[TREE_W-2:0], 1'b0};
    // second full adder of every cell
    s_vec = s1 ^ d ^ cin;
    c_vec = (s1 & d) | (s1 & cin) | (d & cin);
    sum_o = signed'(s_vec + {c_vec[TREE_W-2:0], 1'b0});
  end
endmodule
