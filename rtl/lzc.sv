// lzc -- leading zero counter.
//
// Counts the zeros above the most significant one of data_i; an all-zero word
// gives W and raises zero_o. A plain priority scan from the MSB: the paper names
// leading zero counting inside the posit decoder and the normaliser but not its
// structure, so the simplest form is used and synthesis picks the tree.
// Purely combinational.
module lzc #(
  parameter int unsigned W  = 16,
  parameter int unsigned CW = $clog2(W + 1)
) (
  input  logic [W-1:0]  data_i,
  output logic [CW-1:0] cnt_o,
  output logic          zero_o
);
  always_comb begin
    cnt_o = CW'(W);
    for (int i = 0; i < W; i++) begin
      if (data_i[i]) cnt_o = CW'(W - 1 - i);
    end
  end
  assign zero_o = (data_i == '0);
endmodule
