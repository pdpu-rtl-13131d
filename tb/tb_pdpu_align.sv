// tb_pdpu_align -- self-check of the S3 alignment unit.
//
// Random 18-bit significands (2 integer bits), signs and shift distances from
// 0 to well past the window are aligned with W_m = 14. The expected value is
// floor(mant * 2^(WM-2) / 2^(16 + shift)), negated for a negative sign, worked
// out with integer arithmetic.
module tb_pdpu_align;
  localparam int IN_W = 18, WM = 14, SW = 11;
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

  logic [IN_W-1:0]     mant;
  logic                sign;
  logic [SW-1:0]       shift;
  logic signed [WM:0]  aligned;

  pdpu_align #(.IN_W(IN_W), .WM(WM), .SW(SW)) dut (
    .mant_i(mant), .sign_i(sign), .shift_i(shift), .aligned_o(aligned)
  );

  initial begin
    for (int n = 0; n < 20000; n++) begin
      longint m, expv;
      int sh;
      m  = longint'($urandom_range((1 << IN_W) - 1));
      sh = (n % 4 == 0) ? int'($urandom_range(1023)) : int'($urandom_range(40));
      mant = IN_W'(m); shift = SW'(sh); sign = 1'($urandom_range(1));
      #1;
      // mant has IN_W-2 fraction bits; keep WM-2 fraction bits after the shift
      expv = (sh + (IN_W - 2) - (WM - 2) >= 60) ? 0 : (m >> (sh + (IN_W - 2) - (WM - 2)));
      if (sign) expv = -expv;
      checks++;
      if (longint'(aligned) != expv) begin
        failures++;
        if (failures < 10) $display("m=%h sh=%0d s=%0d: got %0d expected %0d", m, sh, sign, aligned, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
