// int_mult: 256 x 256-bit integer multiplier, schoolbook over 32-bit words with a Karatsuba-Ofman
// split of every 32 x 32 word product.
//
// a and b are cut into t = 8 words of W = 32 bits. Each word product A[i]*B[j] is formed from
// three 16-bit products (a1*b1, a0*b0 and (a0+a1)*(b0+b1), the last one 17 x 17 bits) as
//   ab = a1b1*2^32 + ((a0+a1)(b0+b1) - a1b1 - a0b0)*2^16 + a0b0.
// The inner (j) loop is unrolled: one row A[i]*B is formed per cycle into registers (the DSP
// output registers), and the next cycle adds the row, shifted by 32*i bits, into the 512-bit
// accumulator. Interface: pulse start with a, b valid; done pulses with the 512-bit y.
// Timing: done comes 11 cycles after start (load, 8 rows, pipeline drain, output). The paper's
// multiplier takes 39 cycles; its exact pipelining is not described, and the two-stage row
// pipeline here is this design's choice. The word split and the Karatsuba step follow the paper.
module int_mult
  import p256_pkg::*;
#(
  parameter int unsigned W = 32,  // schoolbook word width
  parameter int unsigned L = 16   // Karatsuba half width (W/2)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  fe_t            a,
  input  fe_t            b,
  output logic           busy,
  output logic           done,
  output logic [2*FW-1:0] y
);
  localparam int unsigned T = FW / W;

  // one Karatsuba-Ofman step on a W-bit word pair
  function automatic logic [2*W-1:0] kmul(input logic [W-1:0] x, input logic [W-1:0] q);
    logic [L-1:0]     x1, x0, z1, z0;
    logic [2*L-1:0]   hh, ll;
    logic [L:0]       sx, sz;
    logic [2*L+1:0]   mm;
    logic [2*W-1:0]   res;
    x1 = x[W-1:L]; x0 = x[L-1:0];
    z1 = q[W-1:L]; z0 = q[L-1:0];
    hh = x1 * z1;
    ll = x0 * z0;
    sx = {1'b0, x0} + {1'b0, x1};
    sz = {1'b0, z0} + {1'b0, z1};
    mm = sx * sz;
    res = ({{W{1'b0}}, hh} << (2 * L))
        + ({{(2*W-2*L-2){1'b0}}, mm - {2'b00, hh} - {2'b00, ll}} << L)
        + {{W{1'b0}}, ll};
    return res;
  endfunction

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_e;
  state_e state;

  fe_t                        areg, breg;
  logic [2*W-1:0]             prod [T];     // registered word products of the current row
  logic                       prod_vld;
  logic [$clog2(T+1)-1:0]     row, acc_row;
  logic [2*FW-1:0]            acc;
  logic [FW+W-1:0]            row_sum;

  always_comb begin
    row_sum = '0;
    for (int j = 0; j < T; j++)
      row_sum = row_sum + ({{(FW-W){1'b0}}, prod[j]} << (W * j));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      areg     <= '0;
      breg     <= '0;
      prod_vld <= 1'b0;
      row      <= '0;
      acc_row  <= '0;
      acc      <= '0;
      done     <= 1'b0;
      y        <= '0;
      for (int j = 0; j < T; j++) prod[j] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          areg     <= a;
          breg     <= b;
          acc      <= '0;
          row      <= '0;
          acc_row  <= '0;
          prod_vld <= 1'b0;
          state    <= S_RUN;
        end
        S_RUN: begin
          // stage 1: row i of word products
          if (row < $bits(row)'(T)) begin
            for (int j = 0; j < T; j++) prod[j] <= kmul(areg[W*0 +: W], breg[W*j +: W]);
            areg     <= areg >> W;
            row      <= row + 1'b1;
            prod_vld <= 1'b1;
          end else begin
            prod_vld <= 1'b0;
          end
          // stage 2: accumulate the previous row
          if (prod_vld) begin
            acc     <= acc + ({{(FW-W){1'b0}}, row_sum} << (W * acc_row));
            acc_row <= acc_row + 1'b1;
            if (acc_row == $bits(acc_row)'(T - 1)) state <= S_OUT;
          end
        end
        S_OUT: begin
          y     <= acc;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
