// tb_comp_tree -- self-check of the recursive comparator tree.
//
// Trees of 5 (N = 4 plus the accumulator), 9 (N = 8) and 1 inputs of signed
// 10-bit exponents get random values, including the most negative value used
// for zero operands; the output must equal the largest input.
module tb_comp_tree;
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

  logic signed [4:0][9:0] e5;
  logic signed [8:0][9:0] e9;
  logic signed [0:0][9:0] e1;
  logic signed [9:0]      m5, m9, m1;

  comp_tree #(.NUM(5), .EW(10)) dut5 (.exp_i(e5), .max_o(m5));
  comp_tree #(.NUM(9), .EW(10)) dut9 (.exp_i(e9), .max_o(m9));
  comp_tree #(.NUM(1), .EW(10)) dut1 (.exp_i(e1), .max_o(m1));

  function automatic logic [9:0] rnd();
    int r = int'($urandom_range(9));
    if (r == 0) return 10'sh200;                 // most negative: zero operand
    return 10'($urandom_range(1023));
  endfunction

  initial begin
    for (int n = 0; n < 5000; n++) begin
      int ref5, ref9;
      for (int i = 0; i < 5; i++) e5[i] = rnd();
      for (int i = 0; i < 9; i++) e9[i] = rnd();
      e1[0] = rnd();
      #1;
      ref5 = -100000;
      for (int i = 0; i < 5; i++) if (int'(signed'(e5[i])) > ref5) ref5 = int'(signed'(e5[i]));
      ref9 = -100000;
      for (int i = 0; i < 9; i++) if (int'(signed'(e9[i])) > ref9) ref9 = int'(signed'(e9[i]));
      checks += 3;
      if (int'(m5) != ref5) begin failures++; if (failures < 10) $display("5-input max %0d ref %0d", m5, ref5); end
      if (int'(m9) != ref9) begin failures++; if (failures < 10) $display("9-input max %0d ref %0d", m9, ref9); end
      if (m1 != e1[0]) begin failures++; if (failures < 10) $display("1-input max wrong"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
