// field_alu: the single set of modular arithmetic units shared by one engine.
//
// One instance of each unit sits behind a common start/op/done port, so an engine needs only
// one multiplier, one reducer per modulus and one subtractor:
//   ALU_MULP  y = a*b mod p   int_mult, then p256_red
//   ALU_MULN  y = a*b mod n   int_mult, then barrett_red (only when HAS_BARRETT = 1)
//   ALU_SUB   y = a-b mod p   mod_sub
//   ALU_ADD   y = a+b mod p   mod_sub in addition mode
// One operation is in flight at a time. Interface: pulse start with op, a, b valid (while busy
// is low); done pulses with y. Timing: MULP 11 + (12..22) + 1 cycles (about 27 on average),
// MULN about 89, SUB/ADD 11. Sharing one instance of each unit follows the paper's engine organisation; the
// port protocol is this design's choice.
module field_alu
  import p256_pkg::*;
#(
  parameter bit HAS_BARRETT = 1'b1   // the precompute block has no mod-n reduction
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  alu_op_e op,
  input  fe_t     a,
  input  fe_t     b,
  output logic    busy,
  output logic    done,
  output fe_t     y
);
  typedef enum logic [1:0] {S_IDLE, S_MUL, S_RED, S_SUB} state_e;
  state_e state;

  alu_op_e         op_q;
  logic            mul_start, mul_done, red_start, pred_done, bred_done, sub_start, sub_done;
  logic [2*FW-1:0] prod;
  fe_t             pred_y, bred_y, sub_y;
  logic            mul_busy, pred_busy, bred_busy, sub_busy;

  int_mult u_mult (.clk, .rst_n, .start(mul_start), .a, .b, .busy(mul_busy), .done(mul_done),
                   .y(prod));

  p256_red u_pred (.clk, .rst_n, .start(red_start && op_q == ALU_MULP), .c(prod),
                   .busy(pred_busy), .done(pred_done), .y(pred_y));

  generate
    if (HAS_BARRETT) begin : g_barrett
      barrett_red u_bred (.clk, .rst_n, .start(red_start && op_q == ALU_MULN), .z(prod),
                          .busy(bred_busy), .done(bred_done), .y(bred_y));
    end else begin : g_no_barrett
      assign bred_busy = 1'b0;
      assign bred_done = 1'b0;
      assign bred_y    = '0;
    end
  endgenerate

  mod_sub u_sub (.clk, .rst_n, .start(sub_start), .add(op == ALU_ADD), .a, .b,
                 .busy(sub_busy), .done(sub_done), .y(sub_y));

  always_comb begin
    mul_start = start && (state == S_IDLE) && (op == ALU_MULP || op == ALU_MULN);
    sub_start = start && (state == S_IDLE) && (op == ALU_SUB  || op == ALU_ADD);
    red_start = (state == S_MUL) && mul_done;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      op_q  <= ALU_MULP;
      done  <= 1'b0;
      y     <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          op_q  <= op;
          state <= (op == ALU_MULP || op == ALU_MULN) ? S_MUL : S_SUB;
        end
        S_MUL: if (mul_done) state <= S_RED;
        S_RED: if (pred_done || bred_done) begin
          y     <= (op_q == ALU_MULP) ? pred_y : bred_y;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_SUB: if (sub_done) begin
          y     <= sub_y;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // a reduction is never requested without its unit; all sub-units are idle when the ALU is
  // checked only outside reset (flops hold random values before the first reset edge)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      if (state == S_IDLE)
        assert (!mul_busy && !pred_busy && !bred_busy && !sub_busy) else $error("field_alu: unit busy while idle");
      if (start && state == S_IDLE)
        assert (HAS_BARRETT || op != ALU_MULN) else $error("field_alu: ALU_MULN without Barrett unit");
    end
  end
endmodule
