// crt_sum: Step 4 of the CRT encoder, the summation of the r branch
// products w_i'(x) * rho_i(x) into Rem_g(m(x) x^(n-k)).
//
// The branch products arrive as r aligned bit streams, one coefficient per
// cycle, highest first; over GF(2) their sum is the XOR of the r bits of a
// cycle.  The result is registered, so par_bit/par_valid/par_last follow
// in_bits/in_valid/in_last by one clock cycle.  The output register is this
// design's choice: it cuts the r-input XOR tree (depth log2 r) off the
// encoder's output.  No back-pressure: one parity bit per valid cycle.
module crt_sum #(
  parameter int R = 11
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic         in_last,
  input  logic [R-1:0] in_bits,
  output logic         par_valid,
  output logic         par_last,
  output logic         par_bit
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      par_valid <= 1'b0;
      par_last  <= 1'b0;
      par_bit   <= 1'b0;
    end else begin
      par_valid <= in_valid;
      par_last  <= in_valid & in_last;
      par_bit   <= in_valid & (^in_bits);
    end
  end

endmodule
