// compressor_3to2 -- W-bit row of 3:2 compressors (full adders).
//
// Per bit: sum = x ^ y ^ z and carry = (x ^ y) & z | x & y, the XOR/AND/OR
// arrangement of the 3:2 cell in the paper's CSA-tree figure. The carry row is
// returned already shifted one place left, so x + y + z = sum_o + carry_o
// (mod 2^W). Combinational.
module compressor_3to2 #(
  parameter int unsigned W = 18
) (
  input  logic [W-1:0] x_i,
  input  logic [W-1:0] y_i,
  input  logic [W-1:0] z_i,
  output logic [W-1:0] sum_o,
  output logic [W-1:0] carry_o
);
  logic [W-1:0] xy, c;
  assign xy      = x_i ^ y_i;
  assign sum_o   = xy ^ z_i;
  assign c       = (xy & z_i) | (x_i & y_i);
  assign carry_o = {c[W-2:0], 1'b0};
endmodule
