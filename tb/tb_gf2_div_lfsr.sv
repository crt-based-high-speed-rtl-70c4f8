// tb_gf2_div_lfsr: checks the bit-serial division (remainder) LFSR.
//
// Divisor w_1(x) = x^11 + x^2 + 1 (DEG = 11), the first factor of the
// default code.  Each trial clears the divider and feeds a random 64-bit
// dividend highest bit first, with random idle cycles; after every enabled
// cycle the remainder of the prefix received so far is compared with a
// reference computed here as the XOR of x^i mod w(x) over the set bits.
module tb_gf2_div_lfsr;

  localparam int           DEG  = 11;
  localparam logic [DEG:0] POLY = 12'h805;
  localparam int           L    = 64;
  localparam int           NTR  = 30;

  logic           clk = 1'b0, rst_n = 1'b0;
  logic           clr = 1'b0, en = 1'b0, in_bit = 1'b0;
  logic [DEG-1:0] rem;
  int             checks = 0, failures = 0;

  gf2_div_lfsr #(.DEG(DEG), .POLY(POLY)) dut (.clk, .rst_n, .clr, .en, .in_bit, .rem);

  always #5 clk = ~clk;

  // x^i mod POLY for i < L, by repeated multiplication by x
  logic [DEG-1:0] xpow [L];
  initial begin
    logic [DEG:0] v;
    v = 1;
    for (int i = 0; i < L; i++) begin
      xpow[i] = v[DEG-1:0];
      v = {v[DEG-1:0], 1'b0};
      if (v[DEG]) v = v ^ POLY;
    end
  end

  function automatic logic [DEG-1:0] ref_rem(logic [L-1:0] f, int len);
    logic [DEG-1:0] r = '0;
    // prefix of len bits: f[L-1 .. L-len] as a polynomial of degree len-1
    for (int i = 0; i < len; i++) if (f[L-len+i]) r = r ^ xpow[i];
    return r;
  endfunction

  initial begin
    logic [L-1:0] f;
    int           tau;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int tr = 0; tr < NTR; tr++) begin
      f = {$urandom, $urandom};
      @(negedge clk);
      clr = 1'b1; en = 1'b1; in_bit = 1'b1;
      @(negedge clk);
      clr = 1'b0;
      checks++;
      if (rem !== '0) begin failures++; $display("FAIL: clear"); end
      tau = 0;
      while (tau < L) begin
        en     = ($urandom_range(0, 3) != 0);
        in_bit = en ? f[L-1-tau] : 1'($urandom_range(0, 1));
        @(negedge clk);
        if (en) begin
          tau++;
          checks++;
          if (rem !== ref_rem(f, tau)) begin
            failures++;
            $display("FAIL trial %0d after %0d bits: got %h want %h", tr, tau, rem, ref_rem(f, tau));
          end
        end
      end
      en = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NTR * L * 3 + 500) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
