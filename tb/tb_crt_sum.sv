// tb_crt_sum: checks Step 4, the XOR summation of the branch streams.
// Random in_bits/in_valid/in_last each cycle; one cycle later par_bit must
// be the XOR of the bits (0 when not valid), par_valid = in_valid and
// par_last = in_valid & in_last.
module tb_crt_sum;

  localparam int R = 11;
  localparam int NCYC = 400;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         in_valid = 1'b0, in_last = 1'b0;
  logic [R-1:0] in_bits = '0;
  logic         par_valid, par_last, par_bit;
  int           checks = 0, failures = 0;

  crt_sum dut (.clk, .rst_n, .in_valid, .in_last, .in_bits, .par_valid, .par_last, .par_bit);

  always #5 clk = ~clk;

  initial begin
    logic         v, l, x;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int c = 0; c < NCYC; c++) begin
      in_valid = ($urandom_range(0, 3) != 0);
      in_last  = ($urandom_range(0, 5) == 0);
      in_bits  = R'($urandom);
      v = in_valid;
      l = in_valid & in_last;
      x = 1'b0;
      for (int i = 0; i < R; i++) x = x ^ in_bits[i];
      x = x & in_valid;
      @(negedge clk);
      checks++;
      if (par_valid !== v || par_last !== l || par_bit !== x) begin
        failures++;
        $display("FAIL cycle %0d: got %b%b%b want %b%b%b", c, par_valid, par_last, par_bit, v, l, x);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCYC + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
