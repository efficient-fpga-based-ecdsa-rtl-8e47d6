// mod_sub: word-serial modular subtraction / addition modulo P-256.
//
// Subtraction (add = 0): c = (a - b) mod p. The operands are cut into t = 8 words of W = 32 bits
// and one word pair is subtracted per cycle with the borrow of the previous word, as a single
// DSP-style 32-bit subtractor would do. A final borrow means a < b, and p is added back.
// Addition (add = 1): the same chain computes a - ~b - 1 = a + b - 2^256 (initial borrow 1);
// the final borrow is then the inverted 257th sum bit. If the 257-bit sum is >= p (decided by
// p256_cmp), p is subtracted. Both corrections take one full-width cycle.
// Interface: pulse start with a, b, add valid (a, b in [0, p-1]); done pulses with y valid.
// Timing: done comes 10 cycles after start (1 load + 8 word steps + 1 correction), the latency
// the paper reports for its subtractor. Word-serial subtraction and addition through the
// subtractor follow the paper; the one-cycle full-width correction is this design's choice.
module mod_sub
  import p256_pkg::*;
#(
  parameter int unsigned W = 32   // word width (paper: 32, one DSP adder/subtractor)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  add,
  input  fe_t   a,
  input  fe_t   b,
  output logic  busy,
  output logic  done,
  output fe_t   y
);
  localparam int unsigned T = FW / W;

  typedef enum logic [1:0] {S_IDLE, S_WORD, S_CORR} state_e;
  state_e state;

  fe_t                    areg, breg, creg;
  logic                   borrow, add_q;
  logic [$clog2(T+1)-1:0] cnt;
  logic [W:0]             wdiff;
  logic [256:0]           sum257;
  logic                   sum_ge_p;

  always_comb wdiff = {1'b0, areg[W-1:0]} - {1'b0, breg[W-1:0]} - {{W{1'b0}}, borrow};

  // in add mode the true sum is {~borrow, creg}
  always_comb sum257 = {~borrow, creg};
  p256_cmp u_cmp (.r(sum257), .ge(sum_ge_p));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      areg   <= '0;
      breg   <= '0;
      creg   <= '0;
      borrow <= 1'b0;
      add_q  <= 1'b0;
      cnt    <= '0;
      done   <= 1'b0;
      y      <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          areg   <= a;
          breg   <= add ? ~b : b;
          borrow <= add;
          add_q  <= add;
          cnt    <= '0;
          state  <= S_WORD;
        end
        S_WORD: begin
          areg   <= areg >> W;
          breg   <= breg >> W;
          creg   <= {wdiff[W-1:0], creg[FW-1:W]};
          borrow <= wdiff[W];
          cnt    <= cnt + 1'b1;
          if (cnt == $bits(cnt)'(T - 1)) state <= S_CORR;
        end
        S_CORR: begin
          if (add_q) y <= sum_ge_p ? creg - P_MOD : creg;
          else       y <= borrow   ? creg + P_MOD : creg;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
