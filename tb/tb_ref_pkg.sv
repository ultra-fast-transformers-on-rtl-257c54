// tb_ref_pkg: bit-accurate software model of the tagger, used by the
// testbenches as the expected-value reference.
//
// It is written separately from the RTL with plain integers: values are ints
// holding 20-bit two's-complement numbers with 10 fractional bits, sums are
// longints.  Rounding is floor (arithmetic shift), results saturate to
// [-2^19, 2^19-1].  The softmax recomputes every table entry with $exp
// instead of reading a table: e = round(2^16*exp(-k/64)) with
// k = min(1023, floor((max-x)*64)), r = min(2^18-1, round(2^16*64/(j+0.5)))
// with j = min(1023, floor(sum(e)/2^10)), y = floor(e*r/2^22).
// Parameter slices follow the Keras order: kernel [input][output], then bias.
package tb_ref_pkg;

  typedef int vec_t[];

  function automatic int r_sat(input longint v);
    if (v > 524287) return 524287;
    if (v < -524288) return -524288;
    return int'(v);
  endfunction

  function automatic int r_rq(input longint v);   // 20 -> 10 fractional bits
    return r_sat(v >>> 10);
  endfunction

  function automatic vec_t r_dense(input vec_t x, input vec_t p, input int off,
                                   input int nout, input bit relu);
    vec_t y = new[nout];
    int nin = x.size();
    for (int o = 0; o < nout; o++) begin
      longint acc = longint'(p[off + nin*nout + o]) * 1024;
      for (int i = 0; i < nin; i++) acc += longint'(x[i]) * longint'(p[off + i*nout + o]);
      y[o] = r_rq(acc);
      if (relu && y[o] < 0) y[o] = 0;
    end
    return y;
  endfunction

  function automatic vec_t r_softmax(input vec_t x);
    int n = x.size();
    vec_t y = new[n];
    longint e[] = new[n];
    longint m = x[0], s = 0, j, r;
    foreach (x[i]) if (x[i] > m) m = x[i];
    foreach (x[i]) begin
      longint k = (m - x[i]) / 16;
      if (k > 1023) k = 1023;
      e[i] = longint'($exp(-real'(k) / 64.0) * 65536.0);  // cast rounds to nearest
      s += e[i];
    end
    j = s / 1024;
    if (j > 1023) j = 1023;
    r = longint'(65536.0 * 64.0 / (real'(j) + 0.5));
    if (r > 262143) r = 262143;
    foreach (x[i]) y[i] = int'((e[i] * r) / 4194304);
    return y;
  endfunction

  function automatic int r_score(input vec_t q, input vec_t k, input int scale);
    longint acc = 0;
    foreach (q[d]) acc += longint'(q[d]) * longint'(k[d]);
    return r_rq(longint'(r_rq(acc)) * scale);
  endfunction

  // Multi-head attention on a whole sequence x[seq*din] (row-major).
  function automatic vec_t r_mha(input vec_t x, input int seq, input int din,
                                 input int nh, input int dk, input vec_t p, input int off);
    int pd = nh*dk;
    int oq = off, ok = oq + din*pd + pd, ov = ok + din*pd + pd, oo = ov + din*pd + pd;
    vec_t q[] = new[seq], k[] = new[seq], v[] = new[seq];
    vec_t y = new[seq*din];
    for (int t = 0; t < seq; t++) begin
      vec_t row = new[din];
      for (int i = 0; i < din; i++) row[i] = x[t*din + i];
      q[t] = r_dense(row, p, oq, pd, 0);
      k[t] = r_dense(row, p, ok, pd, 0);
      v[t] = r_dense(row, p, ov, pd, 0);
    end
    for (int t = 0; t < seq; t++) begin
      vec_t cat = new[pd];
      vec_t o;
      for (int h = 0; h < nh; h++) begin
        vec_t sc = new[seq];
        vec_t pr;
        vec_t qh = new[dk];
        for (int d = 0; d < dk; d++) qh[d] = q[t][h*dk + d];
        for (int j = 0; j < seq; j++) begin
          vec_t kh = new[dk];
          for (int d = 0; d < dk; d++) kh[d] = k[j][h*dk + d];
          sc[j] = r_score(qh, kh, 181);
        end
        pr = r_softmax(sc);
        for (int d = 0; d < dk; d++) begin
          longint acc = 0;
          for (int j = 0; j < seq; j++) acc += longint'(pr[j]) * longint'(v[j][h*dk + d]);
          cat[h*dk + d] = r_rq(acc);
        end
      end
      o = r_dense(cat, p, oo, din, 0);
      for (int i = 0; i < din; i++) y[t*din + i] = o[i];
    end
    return y;
  endfunction

  function automatic int mha_params(input int din, input int nh, input int dk);
    return 3*(din*nh*dk + nh*dk) + nh*dk*din + din;
  endfunction

  function automatic int enc_params(input int din, input int nh, input int dk, input int f1);
    return mha_params(din, nh, dk) + din*f1 + f1 + f1*din + din;
  endfunction

  function automatic vec_t r_encoder(input vec_t x, input int seq, input int din, input int nh,
                                     input int dk, input int f1, input vec_t p, input int off);
    vec_t a = r_mha(x, seq, din, nh, dk, p, off);
    int o1 = off + mha_params(din, nh, dk);
    int o2 = o1 + din*f1 + f1;
    vec_t y = new[seq*din];
    for (int t = 0; t < seq; t++) begin
      vec_t h = new[din];
      vec_t f, g;
      for (int i = 0; i < din; i++) h[i] = r_sat(longint'(a[t*din+i]) + x[t*din+i]);
      f = r_dense(h, p, o1, f1, 1);
      g = r_dense(f, p, o2, din, 0);
      for (int i = 0; i < din; i++) y[t*din + i] = r_sat(longint'(h[i]) + g[i]);
    end
    return y;
  endfunction

  // Classifier: flat vector -> 32/16/8 ReLU -> 3 -> softmax
  function automatic vec_t r_head(input vec_t flat, input int l1, input int l2, input int l3,
                                  input int nc, input vec_t p, input int off);
    int nf = flat.size();
    int o2 = off + nf*l1 + l1, o3 = o2 + l1*l2 + l2, o4 = o3 + l2*l3 + l3;
    vec_t a = r_dense(flat, p, off, l1, 1);
    vec_t b = r_dense(a, p, o2, l2, 1);
    vec_t c = r_dense(b, p, o3, l3, 1);
    vec_t d = r_dense(c, p, o4, nc, 0);
    return r_softmax(d);
  endfunction

  function automatic vec_t r_model(input vec_t x, input vec_t p);
    vec_t h = x;
    int ep = enc_params(6, 2, 32, 8);
    for (int e = 0; e < 3; e++) h = r_encoder(h, 15, 6, 2, 32, 8, p, e*ep);
    return r_head(h, 32, 16, 8, 3, p, 3*ep);
  endfunction

  // Random fixed-point value in [-lim, lim] (raw units of 2^-10)
  function automatic int rnd(input int lim);
    return int'($urandom_range(2*lim)) - lim;
  endfunction

endpackage
