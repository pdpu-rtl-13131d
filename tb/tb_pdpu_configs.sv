// tb_pdpu_configs -- the unit in the other evaluated configurations.
//
// Besides the main configuration (P(13/16,2), N = 4, W_m = 14, covered by
// tb_pdpu_top) the unit is built here five more times through its parameters:
//   c0  P(16/16,2)  N = 4  W_m = 14   (uniform precision)
//   c1  P(13/16,2)  N = 8  W_m = 14
//   c2  P(10/16,2)  N = 8  W_m = 14
//   c3  P(13/16,2)  N = 8  W_m = 10   (narrow alignment)
//   c4  P(10/16,0)  N = 4  W_m = 14   (es = 0 on both sides)
// Each instance gets a stream of random dot products, one per cycle, and each
// result is compared with the bit-accurate reference posit_ref_pkg::dot_ref
// for that configuration and must appear 6 cycles after its inputs.
module tb_pdpu_configs;
  import posit_ref_pkg::*;

  localparam int LAT = 6;
  localparam int NCFG = 5;
  localparam int CNI[NCFG] = '{16, 13, 10, 13, 10};
  localparam int CN [NCFG] = '{4, 8, 8, 8, 4};
  localparam int CWM[NCFG] = '{14, 14, 14, 10, 14};
  localparam int CES[NCFG] = '{2, 2, 2, 2, 0};
  localparam int MAXN = 8, MAXNI = 16, NO = 16;

  int checks = 0, failures = 0;
  int cycle = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic                        valid_i;
  logic [MAXN-1:0][MAXNI-1:0]  va, vb;
  logic [NO-1:0]               acc;
  logic [NCFG-1:0]             valid_o;
  logic [NCFG-1:0][NO-1:0]     out;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int NI = CNI[c], N = CN[c];
    logic [N-1:0][NI-1:0] a_c, b_c;
    for (genvar i = 0; i < N; i++) begin : g_op
      assign a_c[i] = va[i][NI-1:0];
      assign b_c[i] = vb[i][NI-1:0];
    end
    pdpu_top #(.N_IN(NI), .ES_IN(CES[c]), .N_OUT(NO), .ES_OUT(CES[c]), .N(N), .WM(CWM[c])) dut (
      .clk_i(clk), .rst_ni(rst_n), .valid_i(valid_i), .vec_a_i(a_c), .vec_b_i(b_c),
      .acc_i(acc), .valid_o(valid_o[c]), .out_o(out[c])
    );
  end

  typedef struct { longint unsigned res[NCFG]; int due; } exp_t;
  exp_t expq[$];

  always @(negedge clk) begin
    if (|valid_o) begin
      exp_t e;
      if (expq.size() == 0 || valid_o != '1) begin
        checks++; failures++;
        $display("unexpected or partial output at cycle %0d", cycle);
      end else begin
        e = expq.pop_front();
        for (int c = 0; c < NCFG; c++) begin
          checks++;
          if (longint'(out[c]) != e.res[c] || cycle != e.due) begin
            failures++;
            if (failures < 10)
              $display("cfg %0d cycle %0d: out %h expected %h due %0d", c, cycle, out[c], e.res[c], e.due);
          end
        end
      end
    end
  end

  // random posit of the given width, mostly of magnitude near 1
  function automatic longint unsigned rnd_posit(int n);
    longint unsigned p;
    int r = int'($urandom_range(99));
    if (r < 5) return 0;
    p = {$urandom, $urandom};
    if (r < 80) begin
      p = p & ((64'd1 << (n - 3)) - 1);
      p |= ($urandom_range(1) ? 64'd2 : 64'd1) << (n - 3);
    end
    p &= (64'd1 << (n - 1)) - 1;
    if ($urandom_range(1)) p = (~p + 1) & ((64'd1 << n) - 1);
    if (p == (64'd1 << (n - 1))) p = 0;
    return p;
  endfunction

  initial begin
    exp_t e;
    longint unsigned aa[], bb[];
    valid_i = 0; va = '0; vb = '0; acc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 2000; n++) begin
      // draw at the widest format, then each configuration reads its own width
      for (int i = 0; i < MAXN; i++) begin
        va[i] = MAXNI'(rnd_posit(MAXNI));
        vb[i] = MAXNI'(rnd_posit(MAXNI));
      end
      acc = NO'(rnd_posit(NO));
      for (int c = 0; c < NCFG; c++) begin
        aa = new[CN[c]]; bb = new[CN[c]];
        for (int i = 0; i < CN[c]; i++) begin
          aa[i] = longint'(va[i]) & ((64'd1 << CNI[c]) - 1);
          bb[i] = longint'(vb[i]) & ((64'd1 << CNI[c]) - 1);
        end
        e.res[c] = dot_ref(aa, bb, longint'(acc), CNI[c], CES[c], NO, CES[c], CWM[c]);
      end
      e.due = cycle + LAT;
      expq.push_back(e);
      valid_i = 1;
      @(negedge clk);
    end
    valid_i = 0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
