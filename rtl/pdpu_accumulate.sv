// pdpu_accumulate -- S4: sum of the aligned operands, as sign and magnitude.
//
// The NUM aligned two's complement operands (the N products and the
// accumulator) are compressed into a sum and a carry word by the recursive
// csa_tree, one carry-propagate adder adds the two, and the result is split
// into its final sign f_s and its magnitude s_m. W must hold the true total
// (the caller gives WM + 1 + clog2(NUM) bits). Combinational.
module pdpu_accumulate #(
  parameter int unsigned NUM = 5,
  parameter int unsigned W   = 18
) (
  input  logic [NUM-1:0][W-1:0] aligned_i,
  output logic                  sign_o,
  output logic [W-1:0]          mag_o
);
  logic [W-1:0] s, c, total;

  csa_tree #(.NUM(NUM), .W(W)) u_csa (.in_i(aligned_i), .sum_o(s), .carry_o(c));

  assign total  = s + c;
  assign sign_o = total[W-1];
  assign mag_o  = sign_o ? (~total + 1'b1) : total;
endmodule
