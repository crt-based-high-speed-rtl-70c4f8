// gf2_mul_lfsr: bit-serial multiplier by a constant polynomial over GF(2).
//
// Computes p(x) = COEF(x) * f(x).  The multiplicand f(x) enters one bit per
// enabled cycle, highest coefficient first; the product leaves on out_bit in
// the same order, one coefficient per enabled cycle, with no delay:
// in the cycle that presents input bit f_(L-1-tau), out_bit is p_(L-1+DEG-tau).
// After the L input bits, DEG more enabled cycles with in_bit = 0 flush the
// low end of the product.
//
// Structure: a DEG-stage delay line of past input bits and a fixed AND/XOR
// tap network (direct form), so every register drives one next stage plus at
// most one XOR input and no node has a fanout growing with DEG; the XOR tree
// has depth about log2(DEG+1).  This is the "multiplication LFSR" of Steps 1
// and 3 of the CRT encoder; the direct form was chosen here because it
// avoids the large fanout the architecture sets out to remove.
//
// Interface: clr clears the delay line synchronously (it wins over en);
// rst_n is an asynchronous active-low reset.  DEG must be at least 1.
module gf2_mul_lfsr #(
  parameter int               DEG  = 10,
  parameter logic [DEG:0]     COEF = {1'b1, {(DEG-1){1'b0}}, 1'b1}
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic en,
  input  logic in_bit,
  output logic out_bit
);

  if (DEG < 1) begin : g_bad_deg
    $error("gf2_mul_lfsr: DEG must be at least 1");
  end

  // dl[j-1] holds the input bit of j enabled cycles ago, j = 1..DEG.
  logic [DEG-1:0] dl;
  // win[j] is the input bit of j cycles ago, win[0] the current one.
  logic [DEG:0]   win;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   dl <= '0;
    else if (clr) dl <= '0;
    else if (en)  dl <= win[DEG-1:0];
  end

  assign win = {dl, in_bit};

  // out = sum_j COEF[DEG-j] * in(tau - j)
  always_comb begin
    out_bit = 1'b0;
    for (int j = 0; j <= DEG; j++)
      out_bit = out_bit ^ (COEF[DEG-j] & win[j]);
  end

endmodule
