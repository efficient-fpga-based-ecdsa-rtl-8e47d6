// barrett_red: reduction of a 512-bit integer modulo the P-256 group order n (Barrett).
//
// Base b = 4, k = floor(log4 n) + 1 = 128, mu = floor(4^(2k)/n) (257 bits, held as 258).
//   q1 = z >> 2(k-1)           (258 bits)
//   q3 = (q1 * mu) >> 2(k+1)   first 258 x 258 multiplication
//   r  = (z mod 2^258) - ((q3 * n) mod 2^258)   second 258 x 258 multiplication
//   if r < 0: r += 2^258;  while r >= n: r -= n   (at most two subtractions)
// Divisions by powers of b are shifts and reductions modulo b^(k+1) are bit masks. Each 258-bit
// multiplication is done serially, schoolbook over t = 6 words of 43 bits, one 43 x 43 word
// product per cycle through a single mult43, accumulated into a 516-bit register.
// Interface: pulse start with z valid; done pulses with y = z mod n.
// Timing: about 80 cycles (2 x 36 word products, loads, the sign fix and up to two
// subtractions). The paper's unit takes 1,552 cycles with its own (undescribed) schedule around
// the same multiplier; the 43-bit word size, the use of b = 4 and the mask/shift form follow
// the paper. The paper's line "q = (z >> 2(k-1)).(mu >> 2(k+1))" is read as the standard
// q3 = ((z >> 2(k-1)) * mu) >> 2(k+1); taken literally, mu >> 258 would be 0.
module barrett_red
  import p256_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [2*FW-1:0] z,
  output logic            busy,
  output logic            done,
  output fe_t             y
);
  localparam int unsigned WW = 43;   // word width of the 258-bit multiplier
  localparam int unsigned TW = 6;    // words per operand
  localparam int unsigned MW = WW * TW;   // 258

  typedef enum logic [2:0] {S_IDLE, S_MUL, S_NEXT, S_FIX, S_OUT} state_e;
  state_e state;

  logic [MW-1:0]    zreg;     // low MW bits of z (the rest only feeds q1)
  logic [MW-1:0]    ma, mb;
  logic [2*MW-1:0]  acc;
  logic [2:0]       wi, wj;
  logic             phase;       // 0: q1*mu, 1: q3*n
  logic [MW:0]      r;           // signed, 259 bits
  logic [WW-1:0]    wa, wb;
  logic [2*WW-1:0]  wp;

  always_comb begin
    wa = ma[WW*wi +: WW];
    wb = mb[WW*wj +: WW];
  end

  mult43 u_mul (.a(wa), .b(wb), .p(wp));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      zreg  <= '0;
      ma    <= '0;
      mb    <= '0;
      acc   <= '0;
      wi    <= '0;
      wj    <= '0;
      phase <= 1'b0;
      r     <= '0;
      done  <= 1'b0;
      y     <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          zreg  <= z[MW-1:0];
          ma    <= z[2*FW-1 : 2*(BARRETT_K-1)];
          mb    <= BARRETT_MU;
          acc   <= '0;
          wi    <= '0;
          wj    <= '0;
          phase <= 1'b0;
          state <= S_MUL;
        end
        S_MUL: begin
          acc <= acc + ({{(2*MW-2*WW){1'b0}}, wp} << (WW * (32'(wi) + 32'(wj))));
          if (wj == 3'(TW - 1)) begin
            wj <= '0;
            if (wi == 3'(TW - 1)) begin
              wi    <= '0;
              state <= S_NEXT;
            end else wi <= wi + 1'b1;
          end else wj <= wj + 1'b1;
        end
        S_NEXT: begin
          if (!phase) begin
            ma    <= acc[2*MW-1 : 2*(BARRETT_K+1)];   // q3
            mb    <= {2'b00, N_ORD};
            acc   <= '0;
            phase <= 1'b1;
            state <= S_MUL;
          end else begin
            r     <= {1'b0, zreg} - {1'b0, acc[MW-1:0]};
            state <= S_FIX;
          end
        end
        S_FIX: begin
          if (r[MW])                          r <= r + {1'b1, {MW{1'b0}}};
          else if (r[MW-1:0] >= {2'b00, N_ORD}) r <= r - {3'b000, N_ORD};
          else                                state <= S_OUT;
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
