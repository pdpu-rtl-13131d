// tb_pdpu_accumulate -- self-check of the S4 accumulation (CSA tree + adder).
//
// Five aligned two's complement operands of 15 bits (W_m = 14 plus sign),
// sign-extended to 18 bits, are summed; the final sign and magnitude must
// match the integer sum. Sums of equal and opposite terms check the zero case.
module tb_pdpu_accumulate;
  localparam int NUM = 5, W = 18;
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

  logic [NUM-1:0][W-1:0] al;
  logic                  sign;
  logic [W-1:0]          mag;

  pdpu_accumulate #(.NUM(NUM), .W(W)) dut (.aligned_i(al), .sign_o(sign), .mag_o(mag));

  initial begin
    for (int n = 0; n < 20000; n++) begin
      int v[NUM];
      int total;
      total = 0;
      for (int i = 0; i < NUM; i++) begin
        v[i] = int'($urandom_range(32766)) - 16383;
        if (n % 50 == 0) v[i] = (i == NUM - 1) ? -(v[0] + v[1] + v[2] + v[3]) : v[i] / 8;
        if (n == 1) v[i] = -16383;
        if (n == 2) v[i] = 16383;
        al[i] = W'(v[i]);
        total += v[i];
      end
      #1;
      checks++;
      if (sign != (total < 0) || int'(mag) != ((total < 0) ? -total : total)) begin
        failures++;
        if (failures < 10) $display("sum %0d: got sign %0d mag %0d", total, sign, mag);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
