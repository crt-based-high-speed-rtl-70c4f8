// tb_gf2_mul_lfsr: checks the bit-serial constant multiplier.
//
// The constant is u_1(x) = 0x62d of the default (2047, 1926) encoder, so
// DEG = 10.  Each trial clears the multiplier, feeds a random 40-bit
// multiplicand highest bit first followed by DEG zeros, with random
// cycles where en is low, and compares every output bit, taken on enabled
// cycles only, with the product computed here by shift-and-add.
module tb_gf2_mul_lfsr;

  localparam int          DEG  = 10;
  localparam logic [DEG:0] COEF = 11'h62d;
  localparam int          L    = 40;
  localparam int          NTR  = 30;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clr = 1'b0, en = 1'b0, in_bit = 1'b0;
  logic out_bit;
  int   checks = 0, failures = 0;

  gf2_mul_lfsr #(.DEG(DEG), .COEF(COEF)) dut (.clk, .rst_n, .clr, .en, .in_bit, .out_bit);

  always #5 clk = ~clk;

  initial begin
    logic [L-1:0]     f;
    logic [L+DEG-1:0] p;
    int               tau;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int tr = 0; tr < NTR; tr++) begin
      f = {$urandom, $urandom};
      if (tr == 0) f = '0;
      if (tr == 1) f = {1'b1, {(L-1){1'b0}}};
      p = '0;
      for (int i = 0; i <= DEG; i++) if (COEF[i]) p = p ^ ((L+DEG)'(f) << i);
      @(negedge clk);
      clr = 1'b1; en = 1'b1; in_bit = 1'b1;   // clr must win over en
      @(negedge clk);
      clr = 1'b0;
      tau = 0;
      while (tau < L + DEG) begin
        en     = ($urandom_range(0, 3) != 0);
        in_bit = (tau < L) ? f[L-1-tau] : 1'b0;
        if (!en) in_bit = $urandom_range(0, 1);
        #1;
        if (en) begin
          checks++;
          if (out_bit !== p[L+DEG-1-tau]) begin
            failures++;
            $display("FAIL trial %0d tau %0d: got %b want %b", tr, tau, out_bit, p[L+DEG-1-tau]);
          end
          tau++;
        end
        @(negedge clk);
      end
      en = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NTR * (L + DEG) * 3 + 500) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
