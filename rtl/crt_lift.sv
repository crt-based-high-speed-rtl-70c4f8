// crt_lift: Step 3 of the CRT encoder for one branch, the multiplication of
// the branch remainder rho_i(x) = Rem_{w_i}(u_i * m * x^(n-k)) by the
// constant w_i'(x) = g(x) / w_i(x).
//
// load captures rho_i (DW bits, the width of the branch divider) into a
// shift register and clears the multiplier.  Each following enabled cycle
// shifts one bit of rho_i, highest first, into a gf2_mul_lfsr whose taps are
// w_i'; after rho_i is exhausted zeros follow.  The product has
// DW + DP = deg g coefficients, so exactly deg g enabled cycles after a load
// present on out_bit the product coefficients x^(deg g - 1) down to x^0, one
// per cycle, combinationally from the registers (no extra latency).
// Because deg w_i + deg w_i' = deg g for every branch, all branches of an
// encoder produce aligned streams of equal length, which the summation
// simply XORs.
//
// The bit-serial form follows the paper's "multiplication LFSR" for this
// step; loading the remainder into a shift register is this design's way of
// turning the divider's parallel remainder into that serial input.
module crt_lift #(
  parameter int           DW = 11,
  parameter int           DP = 110,
  parameter logic [DP:0]  WP = (DP+1)'(crt_bch_pkg::branch_wp(11, 32'h805, 11, 0))
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [DW-1:0] rem_in,
  input  logic          en,
  output logic          out_bit
);

  logic [DW-1:0] sh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sh <= '0;
    else if (load) sh <= rem_in;
    else if (en)   sh <= sh << 1;
  end

  gf2_mul_lfsr #(
    .DEG  (DP),
    .COEF (WP)
  ) u_mul_wp (
    .clk     (clk),
    .rst_n   (rst_n),
    .clr     (load),
    .en      (en),
    .in_bit  (sh[DW-1]),
    .out_bit (out_bit)
  );

endmodule
