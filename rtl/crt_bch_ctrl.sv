// crt_bch_ctrl: sequencing of the CRT-based systematic BCH encoder.
//
// Stage A (Steps 1 and 2 of every branch) must see the polynomial
// m(x) x^(n-k) followed by the T-1 zero bits that flush the u_i multipliers,
// highest coefficient first:
//   S_MSG  : K message bits, taken from the input handshake (in_valid &
//            in_ready); a cycle without in_valid stalls stage A.
//   S_ZERO : NK + T - 1 zero bits, one per cycle, the input not ready.
//   S_DONE : one cycle; the branch remainders are final.  b_load copies them
//            into the Step-3 shift registers and a_clr clears stage A.
// Stage B (Steps 3 and 4) then runs NK cycles on its own (b_en, b_last on
// the last), while stage A already takes the next message.  A stage-A pass
// lasts K + NK + T cycles without stalls, more than NK, so stage B is
// always idle again before the next load.
//
// The paper fixes the input stream m(x) x^(n-k) and the order of the
// steps; the three-phase sequence, the valid/ready input and the one-cycle
// hand-over are this design's choices.
//
// Lint note: the assertion below uses rst_n in "disable iff" while the
// flops use it as an asynchronous reset, which Verilator reports as
// SYNCASYNCNET; the assertion is not hardware and the warning stands.
module crt_bch_ctrl #(
  parameter int K  = 1926,  // message bits
  parameter int NK = 121,   // parity bits, deg g
  parameter int T  = 11     // field degree; the u_i multipliers have T-1 stages
) (
  input  logic clk,
  input  logic rst_n,
  // message input
  input  logic in_valid,
  output logic in_ready,
  input  logic in_bit,
  // stage A (Steps 1-2)
  output logic a_en,
  output logic a_bit,
  output logic a_clr,
  // stage B (Steps 3-4)
  output logic b_load,
  output logic b_en,
  output logic b_last
);

  localparam int SL  = K + NK + T - 1;       // stage-A stream length
  localparam int ACW = $clog2(SL + 1);
  localparam int BCW = $clog2(NK + 1);

  typedef enum logic [1:0] {S_MSG, S_ZERO, S_DONE} state_t;

  state_t           state;
  logic [ACW-1:0]   a_cnt;
  logic             b_active;
  logic [BCW-1:0]   b_cnt;

  always_comb begin
    in_ready = (state == S_MSG);
    a_en     = ((state == S_MSG) && in_valid) || (state == S_ZERO);
    a_bit    = (state == S_MSG) ? in_bit : 1'b0;
    a_clr    = (state == S_DONE);
    b_load   = (state == S_DONE);
    b_en     = b_active;
    b_last   = b_active && (b_cnt == BCW'(NK - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_MSG;
      a_cnt <= '0;
    end else begin
      unique case (state)
        S_MSG:
          if (in_valid) begin
            a_cnt <= a_cnt + 1'b1;
            if (a_cnt == ACW'(K - 1)) state <= S_ZERO;
          end
        S_ZERO: begin
          a_cnt <= a_cnt + 1'b1;
          if (a_cnt == ACW'(SL - 1)) state <= S_DONE;
        end
        S_DONE: begin
          a_cnt <= '0;
          state <= S_MSG;
        end
        default: state <= S_MSG;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_active <= 1'b0;
      b_cnt    <= '0;
    end else if (b_load) begin
      b_active <= 1'b1;
      b_cnt    <= '0;
    end else if (b_active) begin
      b_cnt <= b_cnt + 1'b1;
      if (b_last) b_active <= 1'b0;
    end
  end

  // Stage B must have finished before the next remainders are loaded.
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) b_load |-> !b_active || b_last);

endmodule
