// tb_posit_encoder -- self-check of the S6 posit encoder (P(16,2) output).
//
// 1) Round trip: every P(16,2) word is decoded by the reference and re-encoded
//    by the RTL with its fraction padded with zeros; the word must come back.
// 2) Rounding: random signs, exponents (including far outside the posit range)
//    and 17-bit fractions are encoded by the RTL and by the reference encoder,
//    which writes the bit string out and rounds to nearest even with
//    saturation to maxpos/minpos.
// 3) zero_i and nar_i give 0 and 1000...0.
module tb_posit_encoder;
  import posit_ref_pkg::*;
  localparam int N = 16, ES = 2, EW = 10, FW = 17;
  int checks = 0, failures = 0;
  int n_round_up = 0, n_sat = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic                 sign, zero, nar;
  logic signed [EW-1:0] exp;
  logic [FW-1:0]        frac;
  logic [N-1:0]         out;

  posit_encoder #(.N(N), .ES(ES), .EW(EW), .FW(FW)) dut (
    .sign_i(sign), .zero_i(zero), .nar_i(nar), .exp_i(exp), .frac_i(frac), .posit_o(out)
  );

  initial begin
    zero = 0; nar = 0;
    for (int i = 1; i < (1 << N); i++) begin
      dec_t d;
      if (i == (1 << (N - 1))) continue;
      d = decode(longint'(i), N, ES);
      sign = d.sign; exp = EW'(d.scale);
      frac = FW'(d.sig << (FW - d.fbits));
      #1;
      checks++;
      if (int'(out) != i) begin
        failures++;
        if (failures < 10) $display("round trip %h gave %h", i, out);
      end
    end
    for (int n = 0; n < 50000; n++) begin
      longint unsigned r;
      int e;
      e = int'($urandom_range(150)) - 75;
      sign = 1'($urandom_range(1)); exp = EW'(e); frac = FW'($urandom);
      #1;
      r = encode(sign, e, longint'({1'b1, frac}), FW, 1'b0, N, ES);
      if (e > 56 || e < -56) n_sat++;
      checks++;
      if (longint'(out) != r) begin
        failures++;
        if (failures < 10) $display("s%0d e%0d f%h: got %h ref %h", sign, e, frac, out, r);
      end
    end
    zero = 1; #1; checks++;
    if (out != '0) begin failures++; $display("zero wrong"); end
    zero = 0; nar = 1; #1; checks++;
    if (out != 16'h8000) begin failures++; $display("NaR wrong"); end
    checks++;
    if (n_sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
