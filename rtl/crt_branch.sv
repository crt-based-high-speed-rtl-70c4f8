// crt_branch: one of the r parallel CRT branches of the encoder, for the
// minimal polynomial w_i(x) of branch IDX (Steps 1 to 3).
//
//   Step 1  gf2_mul_lfsr  multiplies the input stream by u_i(x), the inverse
//                         of w_i'(x) modulo w_i(x).  u_i has degree below
//                         deg w_i <= T; it is padded to T-1 stages in every
//                         branch, so all branches see streams of the same
//                         length and finish together.
//   Step 2  gf2_div_lfsr  reduces that product stream modulo w_i(x).
//   Step 3  crt_lift      multiplies the final remainder by w_i'(x) and emits
//                         the deg g product coefficients serially.
//
// The constants come from crt_bch_pkg at elaboration; the encoder computes
// the set WS of minimal polynomials once and passes it to every branch.  Steps 1 and 2 run
// combinationally chained in one cycle per input bit (stage A); step 3 runs
// after b_load (stage B), so a branch works on two code words at once.
module crt_branch #(
  parameter int                T    = 11,
  parameter crt_bch_pkg::gf_t  PRIM = 32'h805,
  parameter int                ERRS = 11,
  parameter int                IDX  = 0,
  // minimal polynomials and their count, normally handed down by the encoder
  parameter crt_bch_pkg::wset_t WS   = crt_bch_pkg::all_w(T, PRIM, ERRS),
  parameter int                R    = crt_bch_pkg::num_branches(T, ERRS)
) (
  input  logic clk,
  input  logic rst_n,
  // stage A
  input  logic a_clr,
  input  logic a_en,
  input  logic a_bit,
  // stage B
  input  logic b_load,
  input  logic b_en,
  output logic b_bit
);

  localparam crt_bch_pkg::poly_t W_FULL  = crt_bch_pkg::set_w(WS, IDX);
  localparam crt_bch_pkg::poly_t WP_FULL = crt_bch_pkg::set_wp(WS, R, IDX);
  localparam int DW = crt_bch_pkg::pdeg(W_FULL);
  localparam int DP = crt_bch_pkg::pdeg(WP_FULL);
  localparam logic [DW:0]  W  = (DW+1)'(W_FULL);
  localparam logic [DP:0]  WP = (DP+1)'(WP_FULL);
  localparam logic [T-1:0] U  = T'(crt_bch_pkg::inv_mod(WP_FULL, W_FULL));

  logic          prod_bit;
  logic [DW-1:0] rem;

  gf2_mul_lfsr #(.DEG(T - 1), .COEF(U)) u_step1 (
    .clk     (clk),
    .rst_n   (rst_n),
    .clr     (a_clr),
    .en      (a_en),
    .in_bit  (a_bit),
    .out_bit (prod_bit)
  );

  gf2_div_lfsr #(.DEG(DW), .POLY(W)) u_step2 (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr    (a_clr),
    .en     (a_en),
    .in_bit (prod_bit),
    .rem    (rem)
  );

  crt_lift #(.DW(DW), .DP(DP), .WP(WP)) u_step3 (
    .clk     (clk),
    .rst_n   (rst_n),
    .load    (b_load),
    .rem_in  (rem),
    .en      (b_en),
    .out_bit (b_bit)
  );

endmodule
