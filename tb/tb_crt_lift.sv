// tb_crt_lift: checks Step 3 (multiplication of a branch remainder by w_i').
//
// Default parameters: branch 1 of the (2047, 1926) code, DW = 11,
// DP = 110, w_1'(x) = g(x) / (x^11 + x^2 + 1), whose value is fixed here.
// Each trial loads a random 11-bit remainder and runs 121 enabled cycles
// (with idle cycles in between); every output bit must equal the product
// coefficient x^(120 - tau) computed here.
module tb_crt_lift;

  localparam int           DW = 11;
  localparam int           DP = 110;
  localparam logic [DP:0]  WP_EXPECTED = 111'h4bc13072ad115ec3c7ce5f6d050d;
  localparam int           NTR = 20;

  logic          clk = 1'b0, rst_n = 1'b0;
  logic          load = 1'b0, en = 1'b0;
  logic [DW-1:0] rem_in = '0;
  logic          out_bit;
  int            checks = 0, failures = 0;

  crt_lift dut (.clk, .rst_n, .load, .rem_in, .en, .out_bit);

  always #5 clk = ~clk;

  initial begin
    logic [DW+DP-1:0] p;
    logic [DW-1:0]    r;
    int               tau;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int tr = 0; tr < NTR; tr++) begin
      r = DW'($urandom);
      if (tr == 0) r = 1;           // product is w' itself
      p = '0;
      for (int i = 0; i < DW; i++) if (r[i]) p = p ^ ((DW+DP)'(WP_EXPECTED) << i);
      @(negedge clk);
      load = 1'b1; rem_in = r; en = 1'b1;  // load wins over en
      @(negedge clk);
      load = 1'b0; rem_in = DW'($urandom);
      tau = 0;
      while (tau < DW + DP) begin
        en = ($urandom_range(0, 4) != 0);
        #1;
        if (en) begin
          checks++;
          if (out_bit !== p[DW+DP-1-tau]) begin
            failures++;
            $display("FAIL trial %0d tau %0d", tr, tau);
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
    repeat (NTR * (DW + DP) * 3 + 500) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
