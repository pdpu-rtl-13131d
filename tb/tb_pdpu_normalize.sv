// tb_pdpu_normalize -- self-check of the S5 normaliser.
//
// Random 18-bit magnitudes (binary point 12 bits up) with random e_max: the
// expected exponent is e_max + (position of the leading one) - 12 and the
// expected fraction is the bits below that leading one, left-justified; both
// are found by a bit-by-bit scan. Zero must raise zero_o.
module tb_pdpu_normalize;
  localparam int W = 18, FRAC = 12, EW = 10;
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

  logic [W-1:0]         mag;
  logic signed [EW-1:0] emax, fe;
  logic                 zero;
  logic [W-2:0]         fm;

  pdpu_normalize #(.W(W), .FRAC(FRAC), .EW(EW)) dut (
    .mag_i(mag), .emax_i(emax), .zero_o(zero), .exp_o(fe), .frac_o(fm)
  );

  initial begin
    for (int n = 0; n < 20000; n++) begin
      int m, p, e, ref_e;
      logic [W-2:0] ref_f;
      m = (n == 0) ? 0 : int'($urandom_range((1 << W) - 1)) >> $urandom_range(W - 1);
      e = int'($urandom_range(200)) - 100;
      mag = W'(m); emax = EW'(e);
      #1;
      checks++;
      if (m == 0) begin
        if (!zero) begin failures++; $display("zero not flagged"); end
      end else begin
        p = 0;
        for (int j = 0; j < W; j++) if (m[j]) p = j;
        ref_e = e + p - FRAC;
        ref_f = '0;
        for (int j = 0; j < p; j++) ref_f[W-2-j] = m[p-1-j];
        if (zero || int'(fe) != ref_e || fm != ref_f) begin
          failures++;
          if (failures < 10) $display("m=%h e=%0d: got e%0d f%h, expected e%0d f%h", m, e, fe, fm, ref_e, ref_f);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
