// tb_bch_ref_pkg: reference arithmetic for the encoder testbenches, written
// independently of the RTL constant functions.
//
// gen_poly_ref builds g(x) directly as the product of the linear factors
// (x + alpha^e) over GF(2^T), for every exponent e of the cyclotomic cosets
// of 1 .. 2*ERRS; parity_ref divides m(x) x^(n-k) by it bit by bit;
// syndromes_nonzero evaluates a received word at alpha^1 .. alpha^(2*ERRS)
// by Horner's rule.  A systematic word whose syndromes are all zero and
// whose message part is right is the unique correct code word.
package tb_bch_ref_pkg;

  typedef bit bitvec_t[];

  function automatic int unsigned gf_mul(int unsigned a, int unsigned b, int t, int unsigned prim);
    int unsigned r = 0;
    for (int i = 0; i < t; i++) begin
      if (((b >> i) & 1) != 0) r ^= a;
      a = a << 1;
      if (((a >> t) & 1) != 0) a ^= prim;
    end
    return r;
  endfunction

  function automatic int unsigned alpha_pow(int e, int t, int unsigned prim);
    int unsigned r = 1;
    for (int i = 0; i < e; i++) r = gf_mul(r, 2, t, prim);
    return r;
  endfunction

  // g(x), index k = coefficient of x^k, length deg g + 1.
  function automatic bitvec_t gen_poly_ref(int t, int unsigned prim, int errs);
    int          n = (1 << t) - 1;
    bit          root[];
    int unsigned c[];      // GF(2^t) coefficients of the running product
    int          d = 0;
    int unsigned beta, pw;
    bitvec_t     g;
    root = new[n];
    for (int j = 1; j <= 2 * errs; j++) begin
      int e = j % n;
      for (int s = 0; s < t; s++) begin
        root[e] = 1'b1;
        e = (2 * e) % n;
      end
    end
    c = new[n + 1];
    foreach (c[i]) c[i] = 0;
    c[0] = 1;
    pw = 1;                // alpha^e, stepped through e = 0 .. n-1
    for (int e = 0; e < n; e++) begin
      if (root[e]) begin
        beta = pw;
        d++;
        for (int k = d; k >= 1; k--) c[k] = c[k-1] ^ gf_mul(beta, c[k], t, prim);
        c[0] = gf_mul(beta, c[0], t, prim);
      end
      pw = gf_mul(pw, 2, t, prim);
    end
    g = new[d + 1];
    for (int k = 0; k <= d; k++) g[k] = c[k][0];
    return g;
  endfunction

  // Rem_g(m(x) x^nk), msg index i = m_i, result index k = coefficient of x^k.
  function automatic bitvec_t parity_ref(bitvec_t msg, bitvec_t g);
    int      nk = g.size() - 1;
    bitvec_t rem;
    bit      fb;
    rem = new[nk];
    foreach (rem[i]) rem[i] = 1'b0;
    for (int i = msg.size() - 1; i >= 0; i--) begin
      fb = msg[i] ^ rem[nk-1];
      for (int k = nk - 1; k >= 1; k--) rem[k] = rem[k-1] ^ (fb & g[k]);
      rem[0] = fb & g[0];
    end
    return rem;
  endfunction

  // Number of j in 1 .. 2*errs with cw(alpha^j) != 0; cw index i = c_i.
  function automatic int syndromes_nonzero(bitvec_t cw, int t, int unsigned prim, int errs);
    int cnt = 0;
    for (int j = 1; j <= 2 * errs; j++) begin
      int unsigned aj = alpha_pow(j, t, prim);
      int unsigned s  = 0;
      for (int i = cw.size() - 1; i >= 0; i--) s = gf_mul(s, aj, t, prim) ^ int'(cw[i]);
      if (s != 0) cnt++;
    end
    return cnt;
  endfunction

endpackage
