// tb_pdpu_top -- end-to-end self-check of the posit dot-product unit.
//
// The unit runs with its default parameters: P(13,2) vectors, P(16,2)
// accumulator and output, N = 4, W_m = 14. Three phases:
//  1) a stream of random dot products, one per cycle, each compared with the
//     bit-accurate reference posit_ref_pkg::dot_ref and required to come out
//     exactly 6 cycles after it went in;
//  2) directed cases: NaR operands, exact cancellation to zero, saturation at
//     maxpos and minpos, terms too small to survive alignment;
//  3) a chunked long dot product of 147 terms (the length of one output of a
//     7x7x3 convolution) fed four terms at a time, each result returned as acc
//     of the next chunk, checked step by step against the reference.
// Each mechanism is counted; one that never happens counts as a failure.
module tb_pdpu_top;
  import pdpu_pkg::*;
  import posit_ref_pkg::*;

  localparam int NI = DefNIn, EI = DefEsIn, NO = DefNOut, EO = DefEsOut;
  localparam int N = DefN, WM = DefWm;
  localparam int LAT = 6;

  int checks = 0, failures = 0;
  int cycle = 0;
  int n_nar = 0, n_zero_cancel = 0, n_maxpos = 0, n_minpos = 0, n_dropped = 0;
  int n_negative = 0, n_back_to_back = 0, n_chain = 0, n_acc_used = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic                   valid_i, valid_o, valid_o_q;
  logic [N-1:0][NI-1:0]   va, vb;
  logic [NO-1:0]          acc, out;

  pdpu_top dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(valid_i), .vec_a_i(va), .vec_b_i(vb),
    .acc_i(acc), .valid_o(valid_o), .out_o(out)
  );

  // expected results, with the cycle in which each must appear
  typedef struct { longint unsigned res; int due; } exp_t;
  exp_t expq[$];

  // outputs are sampled at the falling edge, when all registers have settled
  always @(negedge clk) begin
    valid_o_q <= valid_o;
    if (valid_o && valid_o_q) n_back_to_back++;
    if (valid_o) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("unexpected output at cycle %0d", cycle);
      end else begin
        e = expq.pop_front();
        if (longint'(out) != e.res || cycle != e.due) begin
          failures++;
          if (failures < 10)
            $display("cycle %0d: out %h expected %h due %0d", cycle, out, e.res, e.due);
        end
      end
    end
  end

  function automatic logic [NI-1:0] rnd_in(int mode);
    int r = int'($urandom_range(99));
    if (mode == 0 || r < 60) begin
      // magnitude near 1: regime 10 or 01, random exponent and fraction
      logic [NI-1:0] p;
      p = {1'b0, ($urandom_range(1) ? 2'b10 : 2'b01), (NI - 3)'($urandom)};
      return $urandom_range(1) ? -p : p;
    end
    if (r < 63) return '0;
    return NI'($urandom);
  endfunction

  function automatic logic [NO-1:0] rnd_acc();
    int r = int'($urandom_range(99));
    logic [NO-1:0] p;
    if (r < 20) return '0;
    p = {1'b0, ($urandom_range(1) ? 2'b10 : 2'b01), (NO - 3)'($urandom)};
    if (r < 90) return $urandom_range(1) ? -p : p;
    p = NO'($urandom);
    return (p == {1'b1, {(NO-1){1'b0}}}) ? '0 : p;
  endfunction

  function automatic longint unsigned ref_of(logic [N-1:0][NI-1:0] a, logic [N-1:0][NI-1:0] b,
                                             logic [NO-1:0] c);
    longint unsigned aa[], bb[];
    aa = new[N]; bb = new[N];
    for (int i = 0; i < N; i++) begin
      aa[i] = longint'(a[i]); bb[i] = longint'(b[i]);
    end
    return dot_ref(aa, bb, longint'(c), NI, EI, NO, EO, WM);
  endfunction

  // classify a case for the mechanism counters
  task automatic classify(logic [N-1:0][NI-1:0] a, logic [N-1:0][NI-1:0] b,
                          logic [NO-1:0] c, longint unsigned r);
    int emax, emin;
    bit any_nar, nonzero;
    dec_t da, db, dc;
    emax = -100000; emin = 100000; any_nar = 0; nonzero = 0;
    for (int i = 0; i < N; i++) begin
      da = decode(longint'(a[i]), NI, EI);
      db = decode(longint'(b[i]), NI, EI);
      any_nar |= da.nar | db.nar;
      if (!(da.zero || db.zero || da.nar || db.nar)) begin
        nonzero = 1;
        if (da.scale + db.scale > emax) emax = da.scale + db.scale;
        if (da.scale + db.scale < emin) emin = da.scale + db.scale;
      end
    end
    dc = decode(longint'(c), NO, EO);
    any_nar |= dc.nar;
    if (!dc.zero && !dc.nar) begin
      nonzero = 1;
      n_acc_used++;
      if (dc.scale > emax) emax = dc.scale;
      if (dc.scale < emin) emin = dc.scale;
    end
    if (any_nar) n_nar++;
    else begin
      if (nonzero && r == 0) n_zero_cancel++;
      if (nonzero && emax - emin > WM) n_dropped++;
      if (r == 64'(16'h7fff) || r == 64'(16'h8001)) n_maxpos++;
      if (r == 64'(16'h0001) || r == 64'(16'hffff)) n_minpos++;
      if (r[NO-1]) n_negative++;
    end
  endtask

  task automatic issue(logic [N-1:0][NI-1:0] a, logic [N-1:0][NI-1:0] b, logic [NO-1:0] c);
    longint unsigned r;
    exp_t e;
    r = ref_of(a, b, c);
    classify(a, b, c, r);
    // called at a falling edge; the unit samples at the next rising edge
    va = a; vb = b; acc = c; valid_i = 1'b1;
    e.res = r; e.due = cycle + LAT;
    expq.push_back(e);
    @(negedge clk);
  endtask

  logic [N-1:0][NI-1:0] ta, tb;
  logic [NO-1:0]        tc;

  initial begin
    valid_i = 0; va = '0; vb = '0; acc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---------------- phase 1: random stream, one dot product per cycle
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < N; i++) begin
        ta[i] = rnd_in(n % 3);
        tb[i] = rnd_in(n % 3);
      end
      tc = rnd_acc();
      issue(ta, tb, tc);
    end

    // ---------------- phase 2: directed cases
    // NaR in a vector and in acc
    ta = '0; tb = '0; ta[1] = {1'b1, {(NI-1){1'b0}}}; tb[1] = 13'h0800; issue(ta, tb, 16'h4000);
    ta = '0; tb = '0; issue(ta, tb, 16'h8000);
    // exact cancellation: 1*1 + (-1)*1 + acc 0
    ta = '0; tb = '0;
    ta[0] = 13'h0800; tb[0] = 13'h0800; ta[1] = -13'sh0800; tb[1] = 13'h0800;
    issue(ta, tb, '0);
    // acc cancels the products: 2*1 + acc(-2)
    ta = '0; tb = '0; ta[0] = 13'h0900; tb[0] = 13'h0800; issue(ta, tb, 16'hb800);
    // saturation: maxpos * maxpos, and minpos * minpos
    ta = '0; tb = '0; for (int i = 0; i < N; i++) begin ta[i] = 13'h0fff; tb[i] = 13'h0fff; end
    issue(ta, tb, '0);
    ta = '0; tb = '0; ta[0] = 13'h0001; tb[0] = 13'h0001; issue(ta, tb, '0);
    ta = '0; tb = '0; ta[0] = -13'sh0001; tb[0] = 13'h0001; issue(ta, tb, '0);
    // a tiny term next to a large acc is dropped by alignment
    ta = '0; tb = '0; ta[0] = 13'h0001; tb[0] = 13'h0800; issue(ta, tb, 16'h4000);
    valid_i = 0;
    repeat (LAT + 2) @(negedge clk);

    // ---------------- phase 3: chunked 147-term dot product with acc feedback
    begin
      logic [NO-1:0] running;
      real exact;
      running = '0;
      exact = 0.0;
      for (int ch = 0; ch < (147 + N - 1) / N; ch++) begin
        for (int i = 0; i < N; i++) begin
          if (ch * N + i < 147) begin
            ta[i] = rnd_in(0); tb[i] = rnd_in(0);
          end else begin
            ta[i] = '0; tb[i] = '0;
          end
          exact += to_real(longint'(ta[i]), NI, EI) * to_real(longint'(tb[i]), NI, EI);
        end
        issue(ta, tb, running);
        valid_i = 0;
        while (!valid_o) @(negedge clk);
        running = out;
        n_chain++;
      end
      $display("147-term dot product: unit %f, exact %f", to_real(longint'(running), NO, EO), exact);
    end
    repeat (LAT + 2) @(negedge clk);

    // every issued case must have come out
    checks++;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end

    $display("mechanisms: nar=%0d zero_cancel=%0d maxpos=%0d minpos=%0d dropped_terms=%0d negative=%0d acc_used=%0d back_to_back=%0d chain_steps=%0d",
             n_nar, n_zero_cancel, n_maxpos, n_minpos, n_dropped, n_negative, n_acc_used, n_back_to_back, n_chain);
    checks += 9;
    if (n_nar == 0)          begin failures++; $display("NaR never seen"); end
    if (n_zero_cancel == 0)  begin failures++; $display("cancellation never seen"); end
    if (n_maxpos == 0)       begin failures++; $display("maxpos saturation never seen"); end
    if (n_minpos == 0)       begin failures++; $display("minpos saturation never seen"); end
    if (n_dropped == 0)      begin failures++; $display("alignment truncation never seen"); end
    if (n_negative == 0)     begin failures++; $display("negative result never seen"); end
    if (n_acc_used == 0)     begin failures++; $display("accumulator never used"); end
    if (n_back_to_back == 0) begin failures++; $display("full throughput never seen"); end
    if (n_chain != 37)       begin failures++; $display("chain incomplete"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
