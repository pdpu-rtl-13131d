// csa_tree -- recursive carry-save adder tree, NUM operands to sum and carry.
//
// Built by the recursion of the paper's CSA-tree figure, written for NUM = N+1
// inputs: two inputs pass straight through, three go through a 3:2 compressor
// row, four through a 4:2 row; more are split into NUM1 = NUM/2 and
// NUM2 = NUM - NUM1 inputs, each half is reduced by a smaller csa_tree and the
// two resulting (sum, carry) pairs are merged by one more 4:2 row. A single
// input (used only by callers with NUM = 1) is returned as sum with a zero
// carry. Everything is modulo 2^W: sum_o + carry_o = sum of in_i (mod 2^W), so
// two's complement operands work when W holds the true total.
// Combinational; depth grows as log2(NUM).
// Lint note: when this recursive module is linted on its own as the top,
// the Verilator linter does not follow the recursion into the smaller csa_tree instances
// and reports s1/c1/s2/c2 as undriven (and in_i as unused). Linted inside
// pdpu_top or booth_multiplier it reports nothing, and simulations of every
// tree size show those signals driven by the sub-instances.
module csa_tree #(
  parameter int unsigned NUM = 5,
  parameter int unsigned W   = 18
) (
  input  logic [NUM-1:0][W-1:0] in_i,
  output logic [W-1:0]          sum_o,
  output logic [W-1:0]          carry_o
);
  if (NUM == 1) begin : g_one
    assign sum_o   = in_i[0];
    assign carry_o = '0;
  end else if (NUM == 2) begin : g_two
    assign sum_o   = in_i[0];
    assign carry_o = in_i[1];
  end else if (NUM == 3) begin : g_three
    compressor_3to2 #(.W(W)) u_c32 (
      .x_i(in_i[0]), .y_i(in_i[1]), .z_i(in_i[2]),
      .sum_o(sum_o), .carry_o(carry_o)
    );
  end else if (NUM == 4) begin : g_four
    compressor_4to2 #(.W(W)) u_c42 (
      .a_i(in_i[0]), .b_i(in_i[1]), .c_i(in_i[2]), .d_i(in_i[3]),
      .sum_o(sum_o), .carry_o(carry_o)
    );
  end else begin : g_split
    localparam int unsigned NUM1 = NUM / 2;
    localparam int unsigned NUM2 = NUM - NUM1;
    logic [W-1:0] s1, c1, s2, c2;
    csa_tree #(.NUM(NUM1), .W(W)) u_lo (
      .in_i(in_i[NUM1-1:0]), .sum_o(s1), .carry_o(c1)
    );
    csa_tree #(.NUM(NUM2), .W(W)) u_hi (
      .in_i(in_i[NUM-1:NUM1]), .sum_o(s2), .carry_o(c2)
    );
    compressor_4to2 #(.W(W)) u_merge (
      .a_i(s1), .b_i(c1), .c_i(s2), .d_i(c2),
      .sum_o(sum_o), .carry_o(carry_o)
    );
  end
endmodule
