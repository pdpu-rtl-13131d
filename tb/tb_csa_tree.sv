// tb_csa_tree -- self-check of the recursive CSA tree and its 3:2 and 4:2 cells.
//
// Trees of every size from 1 to 9 inputs (covering each branch of the
// recursion: pass-through, 3:2, 4:2 and split-and-merge) receive random 18-bit
// words; sum_o + carry_o must equal the sum of the inputs modulo 2^18. The
// 4:2 cell is also checked on its own over all 16 single-bit input patterns.
module tb_csa_tree;
  localparam int W = 18;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [8:0][W-1:0] in;
  logic [8:0][W-1:0] s, c;

  for (genvar k = 1; k <= 9; k++) begin : g_t
    csa_tree #(.NUM(k), .W(W)) dut (.in_i(in[k-1:0]), .sum_o(s[k-1]), .carry_o(c[k-1]));
  end

  logic [3:0] a4, b4, c4, d4, s4, y4;
  compressor_4to2 #(.W(4)) u_c42 (.a_i(a4), .b_i(b4), .c_i(c4), .d_i(d4), .sum_o(s4), .carry_o(y4));

  initial begin
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < 9; i++)
        in[i] = (n < 10) ? {W{1'b1}} : W'($urandom);
      #1;
      for (int k = 1; k <= 9; k++) begin
        logic [W-1:0] ref_sum;
        ref_sum = '0;
        for (int i = 0; i < k; i++) ref_sum += in[i];
        checks++;
        if (W'(s[k-1] + c[k-1]) != ref_sum) begin
          failures++;
          if (failures < 10) $display("NUM=%0d sum mismatch", k);
        end
      end
    end
    for (int p = 0; p < 16; p++) begin
      a4 = {3'b0, p[0]}; b4 = {3'b0, p[1]}; c4 = {3'b0, p[2]}; d4 = {3'b0, p[3]}; #1;
      checks++;
      if (4'(s4 + y4) != 4'(p[0] + p[1] + p[2] + p[3])) begin
        failures++;
        $display("4:2 cell pattern %b wrong", p[3:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
