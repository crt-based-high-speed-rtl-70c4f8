// tb_crt_bch_pkg: checks the design-time CRT constants of crt_bch_pkg.
//
// Example 1 (T = 4, x^4+x+1, 3 errors): r = 3, factors x^4+x+1,
// x^4+x^3+x^2+x+1, x^2+x+1 and g = 0x537, the published values.
// Default code (T = 11, x^11+x^2+1, 11 errors): r = 11, all factors of
// degree 11, deg g = 121 and g equal to a fixed value.
// Example 3 (T = 13, 39 errors): r = 39 and deg g = 507.
// For every branch of the three codes the CRT conditions are checked with
// arithmetic written here: w_i * w_i' = g, u_i * w_i' = 1 mod w_i,
// deg u_i < deg w_i.
module tb_crt_bch_pkg;
  import crt_bch_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // full GF(2) product, both operands of any degree below PW
  function automatic poly_t mul_full(poly_t a, poly_t b);
    poly_t r = '0;
    for (int i = 0; i < PW; i++) if (b[i]) r ^= a << i;
    return r;
  endfunction

  function automatic poly_t rem_full(poly_t a, poly_t m);
    int dm = -1;
    for (int i = 0; i < PW; i++) if (m[i]) dm = i;
    for (int i = PW - 1; i >= dm; i--) if (a[i]) a ^= m << (i - dm);
    return a;
  endfunction

  task automatic check_code(int t, gf_t prim, int errs, int r_exp, int nk_exp);
    wset_t ws;
    poly_t g, w, wp, u;
    int    r;
    ws = all_w(t, prim, errs);
    r  = num_branches(t, errs);
    g  = set_g(ws, r);
    check(r == r_exp, $sformatf("T=%0d: r = %0d", t, r));
    check(pdeg(g) == nk_exp, $sformatf("T=%0d: deg g = %0d", t, pdeg(g)));
    for (int i = 0; i < r; i++) begin
      w  = set_w(ws, i);
      wp = set_wp(ws, r, i);
      u  = set_u(ws, r, i);
      check(mul_full(w, wp) == g, $sformatf("T=%0d branch %0d: w*w' = g", t, i));
      check(rem_full(mul_full(u, wp), w) == poly_t'(1), $sformatf("T=%0d branch %0d: u*w' = 1 mod w", t, i));
      check(pdeg(u) < pdeg(w), $sformatf("T=%0d branch %0d: deg u", t, i));
    end
  endtask

  initial begin
    wset_t ws;
    ws = all_w(4, 32'h13, 3);
    check(set_w(ws, 0) == poly_t'(5'h13), "ex1 w_1");
    check(set_w(ws, 1) == poly_t'(5'h1f), "ex1 w_2");
    check(set_w(ws, 2) == poly_t'(3'h7),  "ex1 w_3");
    check(gen_poly(4, 32'h13, 3) == poly_t'(11'h537), "ex1 g");
    check_code(4, 32'h13, 3, 3, 10);
    check(gen_poly(11, 32'h805, 11) == poly_t'(122'h25f6d4664d093a23bf2aa0c4af17939), "default g");
    for (int i = 0; i < 11; i++) check(pdeg(branch_w(11, 32'h805, 11, i)) == 11, "default factor degree");
    check_code(11, 32'h805, 11, 11, 121);
    check_code(13, 32'h201b, 39, 39, 507);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
