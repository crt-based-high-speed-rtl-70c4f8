// tb_crt_bch_encoder: end-to-end test of crt_bch_encoder at its default
// size, the (2047, 1926) BCH code with T = 11 and 121 parity bits.
//
// Encodes NCW messages (all zeros, all ones, then random) back to back.
// The driver inserts random input bubbles and keeps in_valid high while the
// encoder is not ready; the monitor collects each parity stream and checks
//   - every parity bit against a direct division by g(x), with g built from
//     its roots (tb_bch_ref_pkg), and g itself against a fixed value,
//   - that the code word has all 22 syndromes zero,
//   - the latency: the first parity bit comes NK+T+2 cycles after the last
//     message bit is taken, and the NK bits come on consecutive cycles,
//   - that the mechanisms happened: input stalls, in_valid held while not
//     ready, and parity output overlapping the next message's input.
module tb_crt_bch_encoder;
  import tb_bch_ref_pkg::*;

  localparam int          T    = 11;
  localparam int unsigned PRIM = 32'h805;
  localparam int          ERRS = 11;
  localparam int          N    = (1 << T) - 1;
  localparam int          NK   = 121;
  localparam int          K    = N - NK;
  localparam int          NCW  = 5;
  localparam logic [NK:0] G_EXPECTED = 122'h25f6d4664d093a23bf2aa0c4af17939;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0, in_bit = 1'b0;
  logic in_ready, par_valid, par_bit, par_last;

  int checks = 0, failures = 0;
  int cycle = 0;

  crt_bch_encoder dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_bit, .par_valid, .par_bit, .par_last
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  bitvec_t g;
  bitvec_t msgs[NCW];
  int      last_msg_cycle[NCW];
  int      n_stall = 0, n_hold = 0, n_overlap = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Driver: one code word after another, random bubbles.
  initial begin : driver
    int bi;
    bit pending = 1'b0;   // a bit was on offer and refused at the last edge
    for (int w = 0; w < NCW; w++) begin
      msgs[w] = new[K];
      foreach (msgs[w][i]) msgs[w][i] = (w == 0) ? 1'b0 : (w == 1) ? 1'b1 : 1'($urandom_range(0, 1));
    end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int w = 0; w < NCW; w++) begin
      bi = K - 1;
      while (bi >= 0) begin
        @(negedge clk);
        if ($urandom_range(0, 15) == 0 && !pending) begin
          in_valid = 1'b0;
          if (in_ready) n_stall++;
        end else begin
          in_valid = 1'b1;
          in_bit   = msgs[w][bi];
        end
        @(posedge clk);
        pending = in_valid && !in_ready;
        if (in_valid && in_ready) begin
          if (bi == 0) last_msg_cycle[w] = cycle;
          bi--;
        end else if (in_valid && !in_ready) n_hold++;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
  end

  // Monitor
  initial begin : monitor
    bitvec_t par, ref_par, cw;
    int      first_cycle, nbits;
    g = gen_poly_ref(T, PRIM, ERRS);
    check(g.size() == NK + 1, "deg g");
    for (int k = 0; k <= NK; k++) check(g[k] == G_EXPECTED[k], $sformatf("g coefficient %0d", k));
    wait (rst_n);
    for (int w = 0; w < NCW; w++) begin
      par = new[NK];
      nbits = 0;
      while (nbits < NK) begin
        @(posedge clk);
        if (par_valid) begin
          if (nbits == 0) first_cycle = cycle;
          else check(cycle == first_cycle + nbits, "parity bits on consecutive cycles");
          par[NK - 1 - nbits] = par_bit;
          check(par_last == (nbits == NK - 1), "par_last position");
          if (in_valid && in_ready) n_overlap++;
          nbits++;
        end
      end
      check(first_cycle - last_msg_cycle[w] == NK + T + 2,
            $sformatf("latency word %0d: %0d", w, first_cycle - last_msg_cycle[w]));
      ref_par = parity_ref(msgs[w], g);
      for (int k = 0; k < NK; k++)
        check(par[k] == ref_par[k], $sformatf("word %0d parity bit %0d", w, k));
      cw = new[N];
      for (int i = 0; i < NK; i++) cw[i] = par[i];
      for (int i = 0; i < K; i++) cw[NK + i] = msgs[w][i];
      check(syndromes_nonzero(cw, T, PRIM, ERRS) == 0, $sformatf("word %0d syndromes", w));
    end
    repeat (5) @(posedge clk);
    check(n_stall > 0, "input stall exercised");
    check(n_hold > 0, "in_valid held while not ready exercised");
    check(n_overlap > 0, "parity output overlapping next input exercised");
    $display("mechanisms: stalls=%0d holds=%0d overlap_cycles=%0d", n_stall, n_hold, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (NCW * (N + T + 400) + 2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
