// compressor_4to2 -- W-bit row of 4:2 compressors.
//
// Per bit, following the XOR and 2:1 MUX cell of the paper's CSA-tree figure:
//   x1 = a ^ b, x = x1 ^ c ^ d,
//   c_out = x1 ? c : a,   sum = x ^ c_in,   carry = x ? c_in : d.
// c_out of bit i is the c_in of bit i+1 (c_in of bit 0 is 0); c_out does not
// depend on c_in, so nothing ripples. The select wiring of the two muxes is the
// usual one for this cell. The carry row is returned shifted one place left:
// a + b + c + d = sum_o + carry_o (mod 2^W). Combinational.
module compressor_4to2 #(
  parameter int unsigned W = 18
) (
  input  logic [W-1:0] a_i,
  input  logic [W-1:0] b_i,
  input  logic [W-1:0] c_i,
  input  logic [W-1:0] d_i,
  output logic [W-1:0] sum_o,
  output logic [W-1:0] carry_o
);
  logic [W-1:0] x1, x2, x, cout, cin, cy;
  assign x1   = a_i ^ b_i;
  assign x2   = c_i ^ d_i;
  assign x    = x1 ^ x2;
  assign cout = (x1 & c_i) | (~x1 & a_i);
  assign cin  = {cout[W-2:0], 1'b0};
  assign sum_o = x ^ cin;
  assign cy   = (x & cin) | (~x & d_i);
  assign carry_o = {cy[W-2:0], 1'b0};
endmodule
