// posit_ref_pkg -- bit-accurate software reference of posit arithmetic for the
// testbenches.
//
// Written independently of the RTL in a plain, loop-based style: decoding walks
// the regime bit by bit, encoding writes the posit bit string into a queue and
// rounds it to nearest, ties to even, with saturation to maxpos/minpos.
// dot_ref models the whole dot-product unit: exact significand products, the
// largest exponent, truncation of every term to WM aligned bits (2 integer
// bits), an exact sum and one final rounding. Widths up to 32-bit posits and
// WM up to 40 are supported.
package posit_ref_pkg;

  typedef struct {
    bit          sign;
    bit          zero;
    bit          nar;
    int          scale;    // k*2^es + e
    longint      sig;      // significand with hidden bit, fbits fraction bits
    int          fbits;
  } dec_t;

  function automatic dec_t decode(longint unsigned p, int n, int es);
    dec_t d;
    longint unsigned mask = (n == 64) ? '1 : ((64'd1 << n) - 1);
    longint unsigned m;
    int i, run, k, e;
    bit r;
    p &= mask;
    d.sign = p[n-1];
    d.zero = (p == 0);
    d.nar  = (p == (64'd1 << (n - 1)));
    d.fbits = n - es - 3;
    d.scale = 0;
    d.sig   = 0;
    if (d.zero || d.nar) return d;
    m = d.sign ? ((~p + 1) & mask) : p;
    i = n - 2;
    r = m[i];
    run = 0;
    while (i >= 0 && m[i] == r) begin
      run++;
      i--;
    end
    i--;                                   // skip the terminating bit
    k = r ? run - 1 : -run;
    e = 0;
    for (int j = 0; j < es; j++) begin
      e = e * 2 + ((i >= 0) ? int'(m[i]) : 0);
      i--;
    end
    d.sig = 1;
    for (int j = 0; j < d.fbits; j++) begin
      d.sig = d.sig * 2 + ((i >= 0) ? longint'(m[i]) : 0);
      i--;
    end
    d.scale = k * (1 << es) + e;
    return d;
  endfunction

  // value = (-1)^sign * sig/2^fbits * 2^scale, sig has its leading one at bit
  // fbits; sticky marks nonzero bits below sig.
  function automatic longint unsigned encode(bit sign, int scale, longint sig,
                                             int fbits, bit sticky, int n, int es);
    bit bs[$];
    int k, e;
    longint unsigned mag, res;
    bit guard, st;
    longint unsigned mask = (64'd1 << n) - 1;
    k = (scale >= 0) ? scale / (1 << es) : -((-scale + (1 << es) - 1) / (1 << es));
    e = scale - k * (1 << es);
    if (k > n - 2) mag = (64'd1 << (n - 1)) - 1;
    else if (k < -(n - 2)) mag = 1;
    else begin
      if (k >= 0) begin
        repeat (k + 1) bs.push_back(1'b1);
        bs.push_back(1'b0);
      end else begin
        repeat (-k) bs.push_back(1'b0);
        bs.push_back(1'b1);
      end
      for (int j = es - 1; j >= 0; j--) bs.push_back(e[j]);
      for (int j = fbits - 1; j >= 0; j--) bs.push_back(sig[j]);
      mag = 0;
      for (int j = 0; j < n - 1; j++) mag = mag * 2 + ((j < bs.size()) ? longint'(bs[j]) : 0);
      guard = (n - 1 < bs.size()) ? bs[n-1] : 1'b0;
      st = sticky;
      for (int j = n; j < bs.size(); j++) st |= bs[j];
      if (guard && (st || mag[0])) mag++;
    end
    res = sign ? ((~mag + 1) & mask) : mag;
    return res;
  endfunction

  // Reference of the dot-product unit. a/b in P(nin,esin), acc and result in
  // P(nout,esout).
  function automatic longint unsigned dot_ref(longint unsigned a[], longint unsigned b[],
                                              longint unsigned acc, int nin, int esin,
                                              int nout, int esout, int wm);
    int nn = a.size();
    dec_t da, db, dc;
    int fin = nin - esin - 3, fout = nout - esout - 3;
    int fi = (2 * fin > fout) ? 2 * fin : fout;
    int e_i[$];
    longint v_i[$];
    bit s_i[$];
    int emax;
    bit any;
    longint sum, mag;
    int p;
    bit nar = 0;
    for (int i = 0; i < nn; i++) begin
      da = decode(a[i], nin, esin);
      db = decode(b[i], nin, esin);
      if (da.nar || db.nar) nar = 1;
      if (!(da.zero || db.zero || da.nar || db.nar)) begin
        e_i.push_back(da.scale + db.scale);
        v_i.push_back((da.sig * db.sig) << (fi - 2 * fin));
        s_i.push_back(da.sign ^ db.sign);
      end
    end
    dc = decode(acc, nout, esout);
    if (dc.nar) nar = 1;
    if (nar) return 64'd1 << (nout - 1);
    if (!dc.zero) begin
      e_i.push_back(dc.scale);
      v_i.push_back(dc.sig << (fi - fout));
      s_i.push_back(dc.sign);
    end
    if (e_i.size() == 0) return 0;
    emax = e_i[0];
    foreach (e_i[i]) if (e_i[i] > emax) emax = e_i[i];
    sum = 0;
    foreach (e_i[i]) begin
      int sh = fi - (wm - 2) + (emax - e_i[i]);   // right shift to wm-2 fraction bits
      longint t;
      if (sh >= 62) t = 0;
      else if (sh >= 0) t = v_i[i] >>> sh;
      else t = v_i[i] <<< (-sh);
      sum += s_i[i] ? -t : t;
    end
    if (sum == 0) return 0;
    mag = (sum < 0) ? -sum : sum;
    p = 0;
    for (int j = 0; j < 63; j++) if (mag[j]) p = j;
    return encode(sum < 0, emax - (wm - 2) + p, mag, p, 1'b0, nout, esout);
  endfunction

  // Reference decode to a real number, for sanity checks against printed values.
  function automatic real to_real(longint unsigned p, int n, int es);
    dec_t d = decode(p, n, es);
    real v;
    if (d.zero || d.nar) return 0.0;
    v = real'(d.sig) / (2.0 ** d.fbits) * (2.0 ** d.scale);
    return d.sign ? -v : v;
  endfunction

endpackage
