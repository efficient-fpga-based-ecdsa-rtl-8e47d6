// p256_red: fast reduction of a 512-bit integer modulo P-256 (NIST generalized-Mersenne method).
//
// With c = (c15, ..., c0) in 32-bit words, c mod p = s1 + 2*s2 + 2*s3 + s4 + s5 - s6 - s7 - s8 - s9,
// each s_k a 256-bit word permutation of c. Instead of forming the whole sum and correcting a
// result that can lie anywhere in (-4p, 5p) with many wide comparisons, the running value r is
// corrected right after each step: after an addition p is subtracted while r >= p (tested with
// the P-256 comparator of p256_cmp), after a subtraction p is added while r < 0 (the sign bit).
// Steps in order: r = s1; r += s2; r += s2; r += 2*s3; r += s4; r += s5; r -= s6; r -= s7;
// r -= s8; r -= s9. Every cycle either corrects r (when it is out of [0, p)) or, when r is in
// range, applies the next step, so a step that needs no correction costs one cycle.
// Interface: pulse start with c valid; done pulses with y = c mod p.
// Timing: 12 cycles plus one per correction (load, 9 steps, end test, output); about 17 on
// average for products of field elements, at most 22 in practice. The paper reports 19 cycles
// with one correction per step; one is not always enough (s1 and s2 can each exceed p), so the
// correction repeats here. The step order and the per-step correction follow the paper.
module p256_red
  import p256_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [2*FW-1:0] c,
  output logic            busy,
  output logic            done,
  output fe_t             y
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_e;
  state_e state;

  logic [31:0]  cw [16];
  logic [258:0] r;             // signed running value, |r| < 2^258
  logic [3:0]   step;          // 1..9: the s2, s2, 2*s3, s4, s5, s6, s7, s8, s9 steps
  logic [2*FW-1:0] creg;
  fe_t          s_op;
  logic         sub_op;
  logic         r_neg, r_ge_p;

  always_comb for (int i = 0; i < 16; i++) cw[i] = creg[32*i +: 32];

  // operand of the current step
  always_comb begin
    sub_op = 1'b0;
    unique case (step)
      4'd1, 4'd2: s_op = {cw[15], cw[14], cw[13], cw[12], cw[11], 32'd0, 32'd0, 32'd0};
      4'd3:       s_op = {32'd0, cw[15], cw[14], cw[13], cw[12], 32'd0, 32'd0, 32'd0} << 1;
      4'd4:       s_op = {cw[15], cw[14], 32'd0, 32'd0, 32'd0, cw[10], cw[9], cw[8]};
      4'd5:       s_op = {cw[8], cw[13], cw[15], cw[14], cw[13], cw[11], cw[10], cw[9]};
      4'd6: begin s_op = {cw[10], cw[8], 32'd0, 32'd0, 32'd0, cw[13], cw[12], cw[11]}; sub_op = 1'b1; end
      4'd7: begin s_op = {cw[11], cw[9], 32'd0, 32'd0, cw[15], cw[14], cw[13], cw[12]}; sub_op = 1'b1; end
      4'd8: begin s_op = {cw[12], 32'd0, cw[10], cw[9], cw[8], cw[15], cw[14], cw[13]}; sub_op = 1'b1; end
      4'd9: begin s_op = {cw[13], 32'd0, cw[11], cw[10], cw[9], 32'd0, cw[15], cw[14]}; sub_op = 1'b1; end
      default:    s_op = '0;
    endcase
  end

  assign r_neg = r[258];
  p256_cmp u_cmp (.r({r[257] | r[256], r[255:0]}), .ge(r_ge_p));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      r     <= '0;
      step  <= '0;
      creg  <= '0;
      done  <= 1'b0;
      y     <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          creg  <= c;
          r     <= {3'b000, c[FW-1:0]};   // s1
          step  <= 4'd1;
          state <= S_RUN;
        end
        S_RUN: begin
          // correct the running value first; only an in-range value takes the next step
          if (r_neg)              r <= r + {3'b000, P_MOD};
          else if (r_ge_p)        r <= r - {3'b000, P_MOD};
          else if (step == 4'd10) state <= S_OUT;
          else begin
            r    <= sub_op ? r - {3'b000, s_op} : r + {3'b000, s_op};
            step <= step + 1'b1;
          end
        end
        S_OUT: begin
          y     <= r[FW-1:0];
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
