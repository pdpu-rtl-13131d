// comp_tree -- recursive comparator tree returning the largest signed value.
//
// Used in S2 to find e_max over the N product exponents and the accumulator
// exponent. NUM inputs are halved recursively (NUM/2 and NUM - NUM/2), each
// half reduced by a smaller comp_tree, and the two winners compared; the tree
// shape is this design's choice, the paper only names a comparator tree.
// Combinational; depth grows as log2(NUM).
// Lint note: when this recursive module is linted on its own as the top,
// the Verilator linter does not follow the recursion into the smaller comp_tree instances
// and reports m1/m2 as undriven (and exp_i as unused). Linted inside
// pdpu_top it reports nothing, and simulations of every
// tree size show those signals driven by the sub-instances.
module comp_tree #(
  parameter int unsigned NUM = 5,
  parameter int unsigned EW  = 10
) (
  input  logic signed [NUM-1:0][EW-1:0] exp_i,
  output logic signed [EW-1:0]          max_o
);
  if (NUM == 1) begin : g_leaf
    assign max_o = exp_i[0];
  end else begin : g_split
    localparam int unsigned NUM1 = NUM / 2;
    logic signed [EW-1:0] m1, m2;
    comp_tree #(.NUM(NUM1), .EW(EW)) u_lo (.exp_i(exp_i[NUM1-1:0]), .max_o(m1));
    comp_tree #(.NUM(NUM - NUM1), .EW(EW)) u_hi (.exp_i(exp_i[NUM-1:NUM1]), .max_o(m2));
    assign max_o = (m1 > m2) ? m1 : m2;
  end
endmodule
