// pdpu_top -- posit dot-product unit (PDPU), six pipeline stages.
//
// Computes out = acc + a_0*b_0 + ... + a_{N-1}*b_{N-1} with the operands in
// P(N_IN,ES_IN) and acc/out in P(N_OUT,ES_OUT) (mixed precision), decoding
// every input once and rounding only once at the end (fused):
//   S1 decode    2N+1 posit decoders; product signs s_ab = s_a ^ s_b and
//                exponents e_ab = e_a + e_b.
//   S2 multiply  N radix-4 Booth significand multipliers; a comparator tree
//                finds e_max over the e_ab and the accumulator exponent e_c.
//   S3 align     every product and acc is shifted right by e_max - e_i, cut to
//                W_m bits and made two's complement.
//   S4 accumulate a recursive CSA tree and one adder give sign f_s and
//                magnitude s_m.
//   S5 normalize leading zero count, left shift, exponent f_e and fraction f_m.
//   S6 encode    one posit encoder rounds and packs out.
// The stage list, the unit counts (2N+1 decoders, one encoder), the mixed
// precision and the parameters N and W_m are the paper's. The register
// placement (one at the end of each stage), the valid signal, the reset and
// the exception rules are this design's choices: any NaR operand gives NaR,
// zero operands are left out of e_max, and a zero sum gives 0.
//
// Interface: valid_i qualifies vec_a_i, vec_b_i and acc_i in a cycle; the
// result appears on out_o with valid_o exactly 6 clock cycles later. One new
// dot product can enter every cycle; there is no back-pressure. rst_ni
// (asynchronous, active low) clears only the valid bits.
module pdpu_top
  import pdpu_pkg::*;
#(
  parameter int unsigned N_IN   = DefNIn,
  parameter int unsigned ES_IN  = DefEsIn,
  parameter int unsigned N_OUT  = DefNOut,
  parameter int unsigned ES_OUT = DefEsOut,
  parameter int unsigned N      = DefN,
  parameter int unsigned WM     = DefWm
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       valid_i,
  input  logic [N-1:0][N_IN-1:0]     vec_a_i,
  input  logic [N-1:0][N_IN-1:0]     vec_b_i,
  input  logic [N_OUT-1:0]           acc_i,
  output logic                       valid_o,
  output logic [N_OUT-1:0]           out_o
);
  // ---------------------------------------------------------------- widths
  localparam int unsigned STAGES = 6;
  localparam int unsigned MWI  = mant_w(N_IN, ES_IN);     // input significand
  localparam int unsigned MWO  = mant_w(N_OUT, ES_OUT);   // acc significand
  localparam int unsigned SWI  = scale_w(N_IN, ES_IN);
  localparam int unsigned SWO  = scale_w(N_OUT, ES_OUT);
  localparam int unsigned EW   = max2(SWI + 1, SWO) + 2;  // internal exponent
  localparam int unsigned PW   = 2 * MWI;                 // product width
  localparam int unsigned FI   = max2(PW - 2, MWO - 1);   // fraction bits before alignment
  localparam int unsigned IN_W = FI + 2;                  // 2 integer bits
  localparam int unsigned SUMW = WM + 1 + $clog2(N + 1);  // accumulator width
  localparam int unsigned FW   = SUMW - 1;                // f_m width
  localparam logic signed [EW-1:0] EMIN = {1'b1, {(EW-1){1'b0}}};

  // ------------------------------------------------------- stage registers
  typedef struct packed {
    logic                   nar;
    logic [N-1:0]           s_ab;
    logic [N-1:0]           z_ab;
    logic [N-1:0][EW-1:0]   e_ab;
    logic [N-1:0][MWI-1:0]  m_a;
    logic [N-1:0][MWI-1:0]  m_b;
    logic                   s_c;
    logic                   z_c;
    logic [EW-1:0]          e_c;
    logic [MWO-1:0]         m_c;
  } s1_t;

  typedef struct packed {
    logic                   nar;
    logic [N:0]             sign;       // products, then acc at index N
    logic [N:0][EW-1:0]     exp;
    logic [N-1:0][PW-1:0]   prod;
    logic [MWO-1:0]         m_c;
    logic [EW-1:0]          e_max;
  } s2_t;

  typedef struct packed {
    logic                   nar;
    logic [N:0][SUMW-1:0]   aligned;
    logic [EW-1:0]          e_max;
  } s3_t;

  typedef struct packed {
    logic                   nar;
    logic                   f_s;
    logic [SUMW-1:0]        s_m;
    logic [EW-1:0]          e_max;
  } s4_t;

  typedef struct packed {
    logic                   nar;
    logic                   f_s;
    logic                   zero;
    logic [EW-1:0]          f_e;
    logic [FW-1:0]          f_m;
  } s5_t;

  s1_t s1_d, s1_q;
  s2_t s2_d, s2_q;
  s3_t s3_d, s3_q;
  s4_t s4_d, s4_q;
  s5_t s5_d, s5_q;
  logic [N_OUT-1:0]  out_d;
  logic [STAGES-1:0] valid_q;

  // ------------------------------------------------------------ S1 decode
  logic [N-1:0]                  sa, sb, za, zb, na, nb;
  logic signed [N-1:0][SWI-1:0]  ea, eb;
  logic [N-1:0][MWI-1:0]         ma, mb;
  logic                          sc, zc, nc;
  logic signed [SWO-1:0]         ec;
  logic [MWO-1:0]                mc;

  for (genvar i = 0; i < N; i++) begin : g_dec
    posit_decoder #(.N(N_IN), .ES(ES_IN)) u_dec_a (
      .posit_i(vec_a_i[i]), .sign_o(sa[i]), .zero_o(za[i]), .nar_o(na[i]),
      .scale_o(ea[i]), .mant_o(ma[i])
    );
    posit_decoder #(.N(N_IN), .ES(ES_IN)) u_dec_b (
      .posit_i(vec_b_i[i]), .sign_o(sb[i]), .zero_o(zb[i]), .nar_o(nb[i]),
      .scale_o(eb[i]), .mant_o(mb[i])
    );
  end

  posit_decoder #(.N(N_OUT), .ES(ES_OUT)) u_dec_c (
    .posit_i(acc_i), .sign_o(sc), .zero_o(zc), .nar_o(nc),
    .scale_o(ec), .mant_o(mc)
  );

  always_comb begin
    s1_d     = '0;
    s1_d.nar = nc | (|na) | (|nb);
    for (int i = 0; i < N; i++) begin
      s1_d.s_ab[i] = sa[i] ^ sb[i];
      s1_d.z_ab[i] = za[i] | zb[i] | na[i] | nb[i];
      s1_d.e_ab[i] = EW'(signed'(ea[i])) + EW'(signed'(eb[i]));
      s1_d.m_a[i]  = ma[i];
      s1_d.m_b[i]  = mb[i];
    end
    s1_d.s_c = sc;
    s1_d.z_c = zc | nc;
    s1_d.e_c = EW'(ec);
    s1_d.m_c = mc;
  end

  // ---------------------------------------------------------- S2 multiply
  logic signed [N:0][EW-1:0] cmp_in;
  logic signed [EW-1:0]      e_max;
  logic [N-1:0][PW-1:0]      prod;

  for (genvar i = 0; i < N; i++) begin : g_mul
    booth_multiplier #(.W(MWI)) u_mul (
      .a_i(s1_q.m_a[i]), .b_i(s1_q.m_b[i]), .p_o(prod[i])
    );
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      cmp_in[i] = s1_q.z_ab[i] ? EMIN : s1_q.e_ab[i];
    end
    cmp_in[N] = s1_q.z_c ? EMIN : s1_q.e_c;
  end

  comp_tree #(.NUM(N + 1), .EW(EW)) u_cmp (.exp_i(cmp_in), .max_o(e_max));

  always_comb begin
    s2_d.nar   = s1_q.nar;
    s2_d.sign  = {s1_q.s_c, s1_q.s_ab};
    s2_d.exp   = cmp_in;
    s2_d.prod  = prod;
    s2_d.m_c   = s1_q.m_c;
    s2_d.e_max = e_max;
  end

  // ------------------------------------------------------------- S3 align
  logic [N:0][IN_W-1:0]  al_mant;
  logic [N:0][EW:0]      al_shift;
  logic signed [N:0][WM:0] al_out;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      al_mant[i] = {s2_q.prod[i], {(IN_W - PW){1'b0}}};
    end
    al_mant[N] = {1'b0, s2_q.m_c, {(IN_W - 1 - MWO){1'b0}}};
    for (int i = 0; i <= N; i++) begin
      al_shift[i] = (EW + 1)'(signed'(s2_q.e_max)) - (EW + 1)'(signed'(s2_q.exp[i]));
    end
  end

  for (genvar i = 0; i <= N; i++) begin : g_align
    pdpu_align #(.IN_W(IN_W), .WM(WM), .SW(EW + 1)) u_align (
      .mant_i(al_mant[i]), .sign_i(s2_q.sign[i]), .shift_i(al_shift[i]),
      .aligned_o(al_out[i])
    );
  end

  always_comb begin
    s3_d.nar   = s2_q.nar;
    s3_d.e_max = s2_q.e_max;
    for (int i = 0; i <= N; i++) begin
      s3_d.aligned[i] = SUMW'(signed'(al_out[i]));
    end
  end

  // -------------------------------------------------------- S4 accumulate
  pdpu_accumulate #(.NUM(N + 1), .W(SUMW)) u_acc (
    .aligned_i(s3_q.aligned), .sign_o(s4_d.f_s), .mag_o(s4_d.s_m)
  );
  assign s4_d.nar   = s3_q.nar;
  assign s4_d.e_max = s3_q.e_max;

  // --------------------------------------------------------- S5 normalize
  pdpu_normalize #(.W(SUMW), .FRAC(WM - 2), .EW(EW)) u_norm (
    .mag_i(s4_q.s_m), .emax_i(s4_q.e_max),
    .zero_o(s5_d.zero), .exp_o(s5_d.f_e), .frac_o(s5_d.f_m)
  );
  assign s5_d.nar = s4_q.nar;
  assign s5_d.f_s = s4_q.f_s;

  // ------------------------------------------------------------ S6 encode
  posit_encoder #(.N(N_OUT), .ES(ES_OUT), .EW(EW), .FW(FW)) u_enc (
    .sign_i(s5_q.f_s), .zero_i(s5_q.zero), .nar_i(s5_q.nar),
    .exp_i(s5_q.f_e), .frac_i(s5_q.f_m), .posit_o(out_d)
  );

  // ------------------------------------------------------------- registers
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) valid_q <= '0;
    else         valid_q <= {valid_q[STAGES-2:0], valid_i};
  end

  always_ff @(posedge clk_i) begin
    s1_q  <= s1_d;
    s2_q  <= s2_d;
    s3_q  <= s3_d;
    s4_q  <= s4_d;
    s5_q  <= s5_d;
    out_o <= out_d;
  end

  assign valid_o = valid_q[STAGES-1];
endmodule
