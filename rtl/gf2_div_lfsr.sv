// gf2_div_lfsr: bit-serial remainder of a polynomial modulo a constant
// polynomial over GF(2) (the "division LFSR" of Step 2 of the CRT encoder).
//
// The dividend enters on in_bit one coefficient per enabled cycle, highest
// first.  rem always holds the remainder, modulo POLY(x), of the bits
// received so far; after the last bit it is Rem_POLY(f).  Each step is
// rem <- (rem * x + in_bit) mod POLY, a Galois-form LFSR.
//
// The feedback bit rem[DEG-1] drives one XOR per nonzero low coefficient of
// POLY, so the fanout is bounded by DEG (at most T, about log2 N, for a BCH
// factor w_i), instead of deg g for a division by the whole generator.
//
// The step itself (a division LFSR that leaves the remainder) is the
// architecture's; the Galois form and the parallel remainder output are
// this design's choices.
//
// Interface: clr clears rem synchronously (it wins over en); rst_n is an
// asynchronous active-low reset.  POLY must have degree exactly DEG.
module gf2_div_lfsr #(
  parameter int           DEG  = 11,
  parameter logic [DEG:0] POLY = 12'h805
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr,
  input  logic           en,
  input  logic           in_bit,
  output logic [DEG-1:0] rem
);

  if (POLY[DEG] != 1'b1) begin : g_bad_poly
    $error("gf2_div_lfsr: POLY must have degree DEG");
  end

  logic [DEG:0]   shifted;
  logic [DEG-1:0] rem_next;

  always_comb begin
    shifted  = {rem, in_bit};
    rem_next = shifted[DEG-1:0] ^ (shifted[DEG] ? POLY[DEG-1:0] : '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   rem <= '0;
    else if (clr) rem <= '0;
    else if (en)  rem <= rem_next;
  end

endmodule
