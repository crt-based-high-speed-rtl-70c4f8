// tb_crt_bch_ctrl: checks the encoder sequencer against a cycle model.
//
// Small sizes (K = 5, NK = 10, T = 4, the Example-1 code) keep the phases
// short.  in_valid is random.  Every cycle the outputs are compared with a
// model kept here in plain counters: K handshaken message bits passed to
// stage A, then NK+T-1 forced zero bits, then one load/clear cycle, and a
// stage-B window of exactly NK cycles after each load with b_last on its
// last cycle.  The number of stage-A enables between two loads must be
// K+NK+T-1.
module tb_crt_bch_ctrl;

  localparam int K = 5, NK = 10, T = 4;
  localparam int NWORDS = 12;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_bit = 1'b0;
  logic in_ready, a_en, a_bit, a_clr, b_load, b_en, b_last;
  int   checks = 0, failures = 0;

  crt_bch_ctrl #(.K(K), .NK(NK), .T(T)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_bit,
    .a_en, .a_bit, .a_clr, .b_load, .b_en, .b_last
  );

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int  msg_cnt = 0, zero_cnt = 0, b_left = 0, words = 0, a_cnt = 0;
    bit  done_phase = 0;
    bit  e_ready, e_aen, e_abit, e_load;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    while (words < NWORDS) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 2) != 0);
      in_bit   = $urandom_range(0, 1);
      #1;
      e_ready = !done_phase && msg_cnt < K;
      e_aen   = (e_ready && in_valid) || (!done_phase && msg_cnt == K);
      e_abit  = e_ready ? in_bit : 1'b0;
      e_load  = done_phase;
      check(in_ready == e_ready, "in_ready");
      check(a_en == e_aen, "a_en");
      check(!a_en || a_bit == e_abit, "a_bit");
      check(a_clr == e_load && b_load == e_load, "a_clr/b_load");
      check(b_en == (b_left > 0), "b_en");
      check(b_last == (b_left == 1), "b_last");
      // advance the model
      if (b_left > 0) b_left--;
      if (e_aen) a_cnt++;
      if (done_phase) begin
        check(a_cnt == K + NK + T - 1, "stage-A stream length");
        done_phase = 0; msg_cnt = 0; zero_cnt = 0; a_cnt = 0;
        b_left = NK;
        words++;
      end else if (msg_cnt < K) begin
        if (in_valid) msg_cnt++;
      end else begin
        zero_cnt++;
        if (zero_cnt == NK + T - 1) done_phase = 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NWORDS * (K * 4 + NK + T + 10) + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
