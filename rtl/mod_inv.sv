// mod_inv: modular inverse y = a^-1 mod m for an odd modulus m given as an input.
//
// Binary extended Euclid: u = a, v = m, x1 = 1, x2 = 0; keep u*x2 == v*x1 == ... invariant
// (x1*a == u, x2*a == v mod m). Each cycle either halves every even one of u and v (halving its
// x with an addition of m when that x is odd: two adders working in parallel), or, when both
// are odd, subtracts the smaller of u, v from the larger and the matching x's modulo m.
// The loop ends when u or v reaches 1; its x is the inverse. Only shifts, additions and
// subtractions are used, and the latency depends on the data.
// Interface: pulse start with a (1 <= a < m) and m (odd) valid; done pulses with y. For a = 0
// the unit returns 0.
// Timing: data dependent, about 530 cycles on average for 256-bit operands and below 600
// (the paper reports 35 to 600 cycles, about 550 on average, for its unit).
// The paper uses the fast inversion of Chen and Qin with the modulus as an input, shift-and-add only and two 256-bit adders; that reference's exact
// steps are not given in the paper, so this is the closest well-known algorithm of that kind.
module mod_inv
  import p256_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fe_t  a,
  input  fe_t  m,
  output logic busy,
  output logic done,
  output fe_t  y
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_e;
  state_e state;

  fe_t          u, v, x1, x2, mreg;
  fe_t          x1h, x2h;
  fe_t          x1s, x2s;

  // halving modulo m and subtraction modulo m
  always_comb begin
    // (x + m) / 2 for odd x and odd m is (x >> 1) + (m >> 1) + 1, which fits in FW bits
    x1h = (x1 >> 1) + (x1[0] ? (mreg >> 1) + fe_t'(1) : '0);
    x2h = (x2 >> 1) + (x2[0] ? (mreg >> 1) + fe_t'(1) : '0);
    x1s = (x1 >= x2) ? x1 - x2 : x1 - x2 + mreg;
    x2s = (x2 >= x1) ? x2 - x1 : x2 - x1 + mreg;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      u     <= '0;
      v     <= '0;
      x1    <= '0;
      x2    <= '0;
      mreg  <= '0;
      done  <= 1'b0;
      y     <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          u     <= a;
          v     <= m;
          x1    <= fe_t'(1);
          x2    <= '0;
          mreg  <= m;
          state <= S_RUN;
        end
        S_RUN: begin
          if (u == fe_t'(1) || v == fe_t'(1) || u == '0) begin
            state <= S_OUT;
          end else if (!u[0] || !v[0]) begin
            if (!u[0]) begin
              u  <= u >> 1;
              x1 <= x1h;
            end
            if (!v[0]) begin
              v  <= v >> 1;
              x2 <= x2h;
            end
          end else if (u >= v) begin
            u  <= u - v;
            x1 <= x1s;
          end else begin
            v  <= v - u;
            x2 <= x2s;
          end
        end
        S_OUT: begin
          y     <= (u == fe_t'(1)) ? x1 : (v == fe_t'(1)) ? x2 : '0;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
