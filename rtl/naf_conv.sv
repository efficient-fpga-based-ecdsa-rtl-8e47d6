// naf_conv: serial width-w non-adjacent form (NAF) recoding of a 256-bit scalar.
//
// Produces one signed digit per cycle, least significant first: if k is odd the digit is
// k mods 2^w (the residue in [-2^(w-1), 2^(w-1))) and is subtracted from k, else it is 0; then
// k is halved. Nonzero digits are odd and any w consecutive digits hold at most one nonzero.
// With w = 2 this is the ordinary NAF (digits -1, 0, 1) used by the fixed-base windowing
// multiplication; with w = 4 it is the width-4 NAF (digits +-1, +-3, +-5, +-7).
// Interface: pulse start with k valid; done pulses when all digits are out. digits holds digit i
// in bits [DW*i +: DW] (two's complement), len the number of digits (0 for k = 0).
// Digits of a new conversion overwrite the old ones from the start pulse on.
// Timing: len + 2 cycles after start (at most 259). The recoding rule is the standard
// algorithm the paper cites; the serial one-digit-per-cycle structure is this design's choice.
module naf_conv #(
  parameter int unsigned W    = 2,     // NAF width (2: plain NAF)
  parameter int unsigned NMAX = 257,   // maximum number of digits for a 256-bit scalar
  parameter int unsigned DW   = W      // bits per stored digit (two's complement)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [255:0]            k,
  output logic                    busy,
  output logic                    done,
  output logic [NMAX*DW-1:0]      digits,
  output logic [$clog2(NMAX+1)-1:0] len
);
  typedef enum logic [0:0] {S_IDLE, S_RUN} state_e;
  state_e state;

  logic [256:0]                 kreg;
  logic [$clog2(NMAX+1)-1:0]    idx;
  logic signed [W:0]            res;     // k mods 2^w
  logic [256:0]                 knext;

  always_comb begin
    // {sign, low w bits} read as a (w+1)-bit two's complement number is k mods 2^w
    res = $signed({kreg[W-1], kreg[W-1:0]});
    if (kreg[0]) knext = kreg - {{(257-W-1){res[W]}}, res};
    else         knext = kreg;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      kreg   <= '0;
      idx    <= '0;
      len    <= '0;
      done   <= 1'b0;
      digits <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          kreg   <= {1'b0, k};
          idx    <= '0;
          digits <= '0;
          state  <= S_RUN;
        end
        S_RUN: begin
          if (kreg == '0 || idx == $bits(idx)'(NMAX)) begin
            len   <= idx;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            digits[DW*idx +: DW] <= kreg[0] ? DW'(res) : '0;
            kreg <= knext >> 1;
            idx  <= idx + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
