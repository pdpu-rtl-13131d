// tb_posit_decoder -- exhaustive self-check of posit_decoder.
//
// Every word of P(13,2) (the input format) and P(16,2) (the accumulator
// format) is decoded by the RTL and by the loop-based reference in
// posit_ref_pkg; sign, zero, NaR, scale and significand must agree. The two
// P(8,2) examples 0111_1101 = 2^(4*4) * 2^2 * 1.0 and 0001_1001 =
// 2^(-2*4) * 2^2 * 1.25 are checked against their printed values.
module tb_posit_decoder;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [12:0] p13; logic s13, z13, n13; logic signed [6:0] e13; logic [8:0]  m13;
  logic [15:0] p16; logic s16, z16, n16; logic signed [7:0] e16; logic [11:0] m16;
  logic [7:0]  p8;  logic s8, z8, n8;    logic signed [6:0] e8;  logic [3:0]  m8;

  posit_decoder #(.N(13), .ES(2)) dut13 (.posit_i(p13), .sign_o(s13), .zero_o(z13), .nar_o(n13), .scale_o(e13), .mant_o(m13));
  posit_decoder #(.N(16), .ES(2)) dut16 (.posit_i(p16), .sign_o(s16), .zero_o(z16), .nar_o(n16), .scale_o(e16), .mant_o(m16));
  posit_decoder #(.N(8),  .ES(2)) dut8  (.posit_i(p8),  .sign_o(s8),  .zero_o(z8),  .nar_o(n8),  .scale_o(e8),  .mant_o(m8));

  task automatic cmp(string tag, longint unsigned p, dec_t d, bit s, bit z, bit n, int e, longint m);
    checks++;
    if (s !== d.sign || z !== d.zero || n !== d.nar ||
        (!d.zero && !d.nar && (e != d.scale || m != d.sig)) ||
        ((d.zero || d.nar) && m != 0)) begin
      failures++;
      if (failures < 10)
        $display("%s mismatch p=%h: dut s%0d z%0d n%0d e%0d m%0h ref s%0d z%0d n%0d e%0d m%0h",
                 tag, p, s, z, n, e, m, d.sign, d.zero, d.nar, d.scale, d.sig);
    end
  endtask

  initial begin
    for (int i = 0; i < (1 << 13); i++) begin
      p13 = 13'(i); #1;
      cmp("P13", longint'(i), decode(longint'(i), 13, 2), s13, z13, n13, int'(e13), longint'(m13));
    end
    for (int i = 0; i < (1 << 16); i++) begin
      p16 = 16'(i); #1;
      cmp("P16", longint'(i), decode(longint'(i), 16, 2), s16, z16, n16, int'(e16), longint'(m16));
    end
    // printed P(8,2) examples
    p8 = 8'b0111_1101; #1;
    checks++;
    if (!(s8 == 0 && e8 == 16 + 2 && m8 == 4'b1000)) begin
      failures++; $display("example 1 wrong: e=%0d m=%b", e8, m8);
    end
    p8 = 8'b0001_1001; #1;
    checks++;
    if (!(s8 == 0 && e8 == -8 + 2 && m8 == 4'b1010)) begin
      failures++; $display("example 2 wrong: e=%0d m=%b", e8, m8);
    end
    // the negated word decodes to the same magnitude with the sign set
    p8 = 8'b1110_0111; #1;
    checks++;
    if (!(s8 == 1 && e8 == -6 && m8 == 4'b1010)) begin
      failures++; $display("example 2 negated wrong");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
