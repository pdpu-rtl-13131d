// booth_multiplier -- unsigned W x W multiplier with radix-4 Booth recoding.
//
// The multiplier b is read in overlapping 3-bit groups (b[2j+1], b[2j],
// b[2j-1]) with b[-1] = 0 and zeros above the MSB; each group selects a digit
// in {-2,-1,0,+1,+2}. W/2+1 digits cover an unsigned b, so the top digit is
// never negative. Partial product j = digit_j * a, sign-extended to 2W+2 bits
// and weighted 4^j, and all partial products are reduced by the recursive
// csa_tree followed by one carry-propagate adder. The paper says only that S2
// uses "a modified radix-4 booth multiplier"; this plain radix-4 form is this
// design's choice. Combinational.
module booth_multiplier #(
  parameter int unsigned W = 9
) (
  input  logic [W-1:0]   a_i,
  input  logic [W-1:0]   b_i,
  output logic [2*W-1:0] p_o
);
  localparam int unsigned G  = W / 2 + 1;      // Booth digits
  localparam int unsigned PW = 2 * W + 2;      // partial product width

  logic [2*G:0]              bx;               // {zeros, b, 0}
  logic [G-1:0][PW-1:0]      pp;
  logic [PW-1:0]             s, c, total;

  assign bx = {{(2*G - W){1'b0}}, b_i, 1'b0};

  always_comb begin
    for (int j = 0; j < G; j++) begin
      logic signed [PW-1:0] a_ext, term;
      a_ext = signed'({{(PW - W){1'b0}}, a_i});
      unique case (bx[2*j +: 3])
        3'b000, 3'b111: term = '0;
        3'b001, 3'b010: term = a_ext;
        3'b011:         term = a_ext <<< 1;
        3'b100:         term = -(a_ext <<< 1);
        default:        term = -a_ext;          // 3'b101, 3'b110
      endcase
      pp[j] = PW'(term <<< (2 * j));
    end
  end

  csa_tree #(.NUM(G), .W(PW)) u_tree (.in_i(pp), .sum_o(s), .carry_o(c));

  assign total = s + c;
  assign p_o   = total[2*W-1:0];
endmodule
