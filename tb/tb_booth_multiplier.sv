// tb_booth_multiplier -- self-check of the radix-4 Booth significand multiplier.
//
// The 9-bit multiplier used for P(13,2) significands is checked exhaustively
// (all 2^18 operand pairs) against the integer product; a 12-bit instance
// (P(16,2) significands) is checked on random pairs and the corner values.
module tb_booth_multiplier;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [8:0]  a9, b9;   logic [17:0] p9;
  logic [11:0] a12, b12; logic [23:0] p12;

  booth_multiplier #(.W(9))  dut9  (.a_i(a9),  .b_i(b9),  .p_o(p9));
  booth_multiplier #(.W(12)) dut12 (.a_i(a12), .b_i(b12), .p_o(p12));

  initial begin
    for (int i = 0; i < 512; i++) begin
      for (int j = 0; j < 512; j++) begin
        a9 = 9'(i); b9 = 9'(j); #1;
        checks++;
        if (int'(p9) != i * j) begin
          failures++;
          if (failures < 10) $display("W9 %0d*%0d gave %0d", i, j, p9);
        end
      end
    end
    for (int n = 0; n < 20000; n++) begin
      int x, y;
      x = (n < 4) ? ((n & 1) ? 4095 : 2048) : int'($urandom_range(4095));
      y = (n < 4) ? ((n & 2) ? 4095 : 2048) : int'($urandom_range(4095));
      a12 = 12'(x); b12 = 12'(y); #1;
      checks++;
      if (int'(p12) != x * y) begin
        failures++;
        if (failures < 10) $display("W12 %0d*%0d gave %0d", x, y, p12);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
