// crt_bch_encoder: systematic encoder for a binary narrow-sense BCH code of
// length N = 2^T - 1 correcting ERRS errors, built on the Chinese Remainder
// Theorem.  Defaults: the (2047, 1926) code, T = 11, ERRS = 11, eleven
// degree-11 factors w_i, 121 parity bits, with the primitive polynomial
// x^11 + x^2 + 1.
//
// Instead of one long division LFSR by g(x) (fanout up to deg g), the parity
// Rem_g(m(x) x^(n-k)) is formed as sum_i w_i' * Rem_{w_i}(u_i * m * x^(n-k))
// in r parallel crt_branch instances (Steps 1-3) and an XOR summation
// crt_sum (Step 4); crt_bch_ctrl sequences them.  No gate output drives
// more than T+1 loads in the datapath.
//
// Interface:
//   in_valid/in_ready/in_bit  message bits m_(K-1) first, one per handshake;
//                             a code word is exactly K bits.
//   par_valid/par_bit/par_last the NK parity bits c_(NK-1) first, on NK
//                             consecutive cycles, par_last on the last one.
//                             The full code word is the message followed by
//                             these bits.  No back-pressure on this side.
// Timing without stalls: message bit 0 is taken in cycle 0, the first parity
// bit appears in cycle K+NK+T+1 and the last in cycle K+2*NK+T.  The next
// message is taken from cycle K+NK+T on, so one code word takes N+T cycles
// and parity output of one overlaps the input of the next.
//
// The decomposition and the four steps follow the CRT architecture; the
// primitive polynomial, the bit-serial valid/ready interface, the parity-only
// serial output and the two-stage overlap are this design's choices.  The
// branches take any set WS of pairwise coprime factors of degree <= 16; the
// top fills it with the BCH minimal polynomials.
module crt_bch_encoder #(
  parameter int                T    = 11,
  parameter crt_bch_pkg::gf_t  PRIM = 32'h805,
  parameter int                ERRS = 11
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  logic in_bit,
  output logic par_valid,
  output logic par_bit,
  output logic par_last
);

  localparam int N  = (1 << T) - 1;
  localparam int R  = crt_bch_pkg::num_branches(T, ERRS);
  localparam crt_bch_pkg::wset_t WS = crt_bch_pkg::all_w(T, PRIM, ERRS);
  localparam int NK = crt_bch_pkg::pdeg(crt_bch_pkg::set_g(WS, R));
  localparam int K  = N - NK;

  if (R < 2) begin : g_bad_code
    $error("crt_bch_encoder: g(x) must have at least two factors");
  end

  logic         a_en, a_bit, a_clr;
  logic         b_load, b_en, b_last;
  logic [R-1:0] b_bits;

  crt_bch_ctrl #(.K(K), .NK(NK), .T(T)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (in_valid),
    .in_ready (in_ready),
    .in_bit   (in_bit),
    .a_en     (a_en),
    .a_bit    (a_bit),
    .a_clr    (a_clr),
    .b_load   (b_load),
    .b_en     (b_en),
    .b_last   (b_last)
  );

  for (genvar i = 0; i < R; i++) begin : g_branch
    crt_branch #(.T(T), .PRIM(PRIM), .ERRS(ERRS), .IDX(i), .WS(WS), .R(R)) u_branch (
      .clk    (clk),
      .rst_n  (rst_n),
      .a_clr  (a_clr),
      .a_en   (a_en),
      .a_bit  (a_bit),
      .b_load (b_load),
      .b_en   (b_en),
      .b_bit  (b_bits[i])
    );
  end

  crt_sum #(.R(R)) u_sum (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (b_en),
    .in_last   (b_last),
    .in_bits   (b_bits),
    .par_valid (par_valid),
    .par_last  (par_last),
    .par_bit   (par_bit)
  );

  // Upstream rule: a bit on offer stays on offer, unchanged, until taken.
  a_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
                              in_valid && !in_ready |=> in_valid && $stable(in_bit));

endmodule
