// crt_bch_pkg: design-time arithmetic for the CRT-based BCH encoder.
//
// A narrow-sense binary BCH code of length N = 2^T - 1 that corrects ERRS
// errors has the zeros alpha^1 .. alpha^(2*ERRS), alpha a root of the
// primitive polynomial PRIM.  Its generator g(x) is the product of the
// distinct minimal polynomials w_1 .. w_r of those zeros, one per cyclotomic
// coset.  The encoder replaces the single division by g(x) with r short
// divisions, using the Chinese Remainder Theorem:
//
//   Rem_g(f) = sum_i  w_i'(x) * Rem_{w_i}( u_i(x) * f(x) ),
//   w_i' = g / w_i,   u_i * w_i' == 1 (mod w_i).
//
// The functions below compute every constant of that identity (w_i, w_i',
// u_i, g and the branch count r) from the three code parameters, so the
// RTL is generated for any (T, PRIM, ERRS) and holds no pasted tables.
// They run only at elaboration.  Branch i (0-based) belongs to the i-th
// cyclotomic coset leader in increasing order (1, 3, 5, ... for T prime).
// The inverse u_i is found as a^(2^d - 2) in the field GF(2)[x]/w_i(x),
// d = deg w_i, instead of by the extended Euclidean algorithm; both give
// the same unique polynomial of degree below d.
//
// Limits: T <= MAX_T, deg g < PW, r <= MAX_R.  All loops are bounded by PW or MAX_T.
package crt_bch_pkg;

  localparam int MAX_T = 16;   // largest field degree supported
  localparam int PW    = 640;  // widest polynomial handled (deg g < PW)
  localparam int MAX_R = 64;   // most minimal polynomials in one generator

  typedef logic [PW-1:0] poly_t;   // GF(2)[x] polynomial, bit k = coeff of x^k
  typedef logic [31:0]   gf_t;     // element of GF(2^T), polynomial basis
  typedef logic [MAX_R*(MAX_T+1)-1:0] wset_t;  // w_0 .. w_(r-1), packed

  // Degree of a polynomial (-1 for the zero polynomial).
  function automatic int pdeg(input poly_t p);
    int d;
    d = -1;
    for (int i = 0; i < PW; i++)
      if (p[i]) d = i;
    return d;
  endfunction

  // GF(2^T) multiplication modulo the primitive polynomial prim.
  function automatic gf_t gf_mul(input gf_t a, input gf_t b, input int t, input gf_t prim);
    gf_t r, aa;
    r  = '0;
    aa = a;
    for (int i = 0; i < MAX_T; i++) begin
      if (i < t) begin
        if (b[i]) r = r ^ aa;
        aa = aa << 1;
        if (aa[t]) aa = aa ^ prim;
      end
    end
    return r;
  endfunction

  // alpha^e by square-and-multiply (alpha = x).
  function automatic gf_t gf_alpha_pow(input int e, input int t, input gf_t prim);
    gf_t r, s;
    r = 32'd1;
    s = 32'd2;
    for (int i = 0; i < 2 * MAX_T; i++) begin
      if (((e >> i) & 1) == 1) r = gf_mul(r, s, t, prim);
      s = gf_mul(s, s, t, prim);
    end
    return r;
  endfunction

  // Smallest member of the cyclotomic coset of j modulo 2^t - 1.
  function automatic int coset_rep(input int j, input int t);
    int n, x, m;
    n = (1 << t) - 1;
    x = j % n;
    m = x;
    for (int s = 1; s < MAX_T; s++) begin
      if (s < t) begin
        x = (2 * x) % n;
        if (x < m) m = x;
      end
    end
    return m;
  endfunction

  // Number r of distinct minimal polynomials among alpha^1 .. alpha^(2*errs).
  function automatic int num_branches(input int t, input int errs);
    int c;
    c = 0;
    for (int j = 1; j <= 2 * errs; j++)
      if (coset_rep(j, t) == j) c++;
    return c;
  endfunction

  // Coset leader of branch idx (0-based).
  function automatic int coset_leader(input int t, input int errs, input int idx);
    int c, l;
    c = 0;
    l = 0;
    for (int j = 1; j <= 2 * errs; j++)
      if (coset_rep(j, t) == j) begin
        if (c == idx) l = j;
        c++;
      end
    return l;
  endfunction

  // Minimal polynomial of alpha^leader: product of (x + alpha^e) over the coset.
  function automatic poly_t min_poly(input int leader, input int t, input gf_t prim);
    gf_t   c [MAX_T+1];
    gf_t   beta;
    poly_t p;
    int    n, e;
    bit    done;
    n = (1 << t) - 1;
    for (int k = 0; k <= MAX_T; k++) c[k] = '0;
    c[0] = 32'd1;
    e    = leader;
    beta = gf_alpha_pow(leader, t, prim);
    done = 1'b0;
    for (int s = 0; s < MAX_T; s++) begin
      if (!done) begin
        for (int k = MAX_T; k >= 1; k--)
          c[k] = c[k-1] ^ gf_mul(beta, c[k], t, prim);
        c[0] = gf_mul(beta, c[0], t, prim);
        beta = gf_mul(beta, beta, t, prim);   // alpha^(2e)
        e = (2 * e) % n;
        if (e == leader) done = 1'b1;
      end
    end
    p = '0;
    for (int k = 0; k <= MAX_T; k++) p[k] = c[k][0];
    return p;
  endfunction

  // a(x) * b(x) over GF(2), b of degree at most MAX_T.
  function automatic poly_t pmul_small(input poly_t a, input poly_t b);
    poly_t r;
    r = '0;
    for (int i = 0; i <= MAX_T; i++)
      if (b[i]) r = r ^ (a << i);
    return r;
  endfunction

  // a(x) mod m(x) over GF(2).
  function automatic poly_t pmod(input poly_t a, input poly_t m);
    poly_t r;
    int    dm;
    r  = a;
    dm = pdeg(m);
    for (int i = PW - 1; i >= 0; i--)
      if (i >= dm && r[i]) r = r ^ (m << (i - dm));
    return r;
  endfunction

  // All minimal polynomials w_0 .. w_(r-1), packed MAX_T+1 bits apiece, so
  // that an encoder computes them once and hands them to its branches.
  function automatic wset_t all_w(input int t, input gf_t prim, input int errs);
    wset_t          ws;
    logic [MAX_T:0] w;
    int             c;
    ws = '0;
    c  = 0;
    for (int j = 1; j <= 2 * errs; j++)
      if (coset_rep(j, t) == j) begin
        w = (MAX_T+1)'(min_poly(j, t, prim));
        ws[c*(MAX_T+1) +: MAX_T+1] = w;
        c++;
      end
    return ws;
  endfunction

  // w_idx taken from a packed set.
  function automatic poly_t set_w(input wset_t ws, input int idx);
    poly_t p;
    p = '0;
    p[MAX_T:0] = ws[idx*(MAX_T+1) +: MAX_T+1];
    return p;
  endfunction

  // w_idx'(x) = g(x) / w_idx(x): product of the other r-1 minimal polynomials.
  function automatic poly_t set_wp(input wset_t ws, input int r, input int idx);
    poly_t p;
    p = poly_t'(1);
    for (int j = 0; j < MAX_R; j++)
      if (j < r && j != idx) p = pmul_small(p, set_w(ws, j));
    return p;
  endfunction

  // g(x) = product of all r minimal polynomials.
  function automatic poly_t set_g(input wset_t ws, input int r);
    poly_t p;
    p = poly_t'(1);
    for (int j = 0; j < MAX_R; j++)
      if (j < r) p = pmul_small(p, set_w(ws, j));
    return p;
  endfunction

  // Inverse of a modulo the irreducible w: a^(2^d - 2) = prod_{s=1..d-1} a^(2^s).
  function automatic poly_t inv_mod(input poly_t a, input poly_t w);
    poly_t b, r;
    int    d;
    d = pdeg(w);
    b = pmod(a, w);
    r = poly_t'(1);
    for (int s = 1; s < MAX_T; s++) begin
      if (s < d) begin
        b = pmod(pmul_small(b, b), w);
        r = pmod(pmul_small(r, b), w);
      end
    end
    return r;
  endfunction

  // u_idx(x): inverse of w_idx' modulo w_idx, degree < deg w_idx.
  function automatic poly_t set_u(input wset_t ws, input int r, input int idx);
    return inv_mod(set_wp(ws, r, idx), set_w(ws, idx));
  endfunction

  // Convenience forms computed directly from the code parameters.
  function automatic poly_t branch_w(input int t, input gf_t prim, input int errs, input int idx);
    return set_w(all_w(t, prim, errs), idx);
  endfunction

  function automatic poly_t branch_wp(input int t, input gf_t prim, input int errs, input int idx);
    return set_wp(all_w(t, prim, errs), num_branches(t, errs), idx);
  endfunction

  function automatic poly_t branch_u(input int t, input gf_t prim, input int errs, input int idx);
    return set_u(all_w(t, prim, errs), num_branches(t, errs), idx);
  endfunction

  function automatic poly_t gen_poly(input int t, input gf_t prim, input int errs);
    return set_g(all_w(t, prim, errs), num_branches(t, errs));
  endfunction

  // Number of parity bits n - k = deg g.
  function automatic int parity_len(input int t, input gf_t prim, input int errs);
    return pdeg(gen_poly(t, prim, errs));
  endfunction

endpackage
