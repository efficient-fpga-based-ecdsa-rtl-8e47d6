// point_unit: elliptic-curve point addition and doubling in projective Chudnovsky coordinates.
//
// A point is (X, Y, Z, Z^2, Z^3), the affine point being (X/Z^2, Y/Z^3). The unit holds a
// 32-entry register file of field elements and steps through a fixed micro-program, issuing
// one modular operation at a time to an external field ALU (the engine's shared one):
//   addition  U1 = X1*Z2^2, U2 = X2*Z1^2, S1 = Y1*Z2^3, S2 = Y2*Z1^3, H = U2-U1, R = S2-S1,
//             X3 = R^2 - H^3 - 2*U1*H^2, Y3 = R*(U1*H^2 - X3) - S1*H^3, Z3 = H*Z1*Z2,
//             Z3^2, Z3^3 = Z3^2*Z3                       (14 multiplications, 7 add/sub)
//   doubling  S = 4*X*Y^2, M = 3*X^2 + a*Z^4 with a = -3 (formed as 3X^2 - 3Z^4),
//             X' = M^2 - 2S, Y' = M*(S - X') - 8*Y^4, Z' = 2*Y*Z, Z'^2, Z'^3
//                                                        (10 multiplications, 15 add/sub)
// The formulas are the paper's. Its choices around them are this design's: the point at
// infinity is a separate flag; an addition with an infinite operand returns the other one; an
// addition with H = 0 becomes a doubling of P1 when R = 0 (P1 = P2) and gives infinity
// otherwise (P1 = -P2); neg2 subtracts P2 (Y2 replaced by p - Y2 first), which the windowing
// scalar multiplication needs.
// Interface: pulse start with op, p1/p1_inf, p2/p2_inf, neg2 valid; done pulses with r/r_inf;
// eq_dbl pulses when an addition found P1 = P2 and switched to doubling.
// ALU port: alu_start pulses with alu_op/alu_a/alu_b, the ALU answers with alu_done/alu_y.
// Timing (with field_alu): an addition takes about 480 cycles and a doubling about 460
// (the paper reports 622 and 435); an infinite operand finishes in 2 cycles.
module point_unit
  import p256_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  pt_op_e  op,
  input  logic    neg2,
  input  cpoint_t p1,
  input  logic    p1_inf,
  input  cpoint_t p2,
  input  logic    p2_inf,
  output logic    busy,
  output logic    done,
  output cpoint_t r,
  output logic    r_inf,
  output logic    eq_dbl,     // pulse: an addition of equal points was turned into a doubling
  // shared field ALU
  output logic    alu_start,
  output alu_op_e alu_op,
  output fe_t     alu_a,
  output fe_t     alu_b,
  input  logic    alu_done,
  input  fe_t     alu_y
);
  // register file map
  localparam logic [4:0] X1 = 5'd0, Y1 = 5'd1, Z1 = 5'd2, Z1S = 5'd3, Z1C = 5'd4;
  localparam logic [4:0] X2 = 5'd5, Y2 = 5'd6, Z2 = 5'd7, Z2S = 5'd8, Z2C = 5'd9;
  localparam logic [4:0] RX = 5'd22, RY = 5'd23, RZ = 5'd24, RZS = 5'd25, RZC = 5'd26;
  localparam logic [4:0] ZERO = 5'd31;

  typedef enum logic [1:0] {PG_ADD, PG_DBL, PG_NEG} prog_e;
  typedef enum logic [1:0] {SRC_RES, SRC_P1, SRC_P2} src_e;

  typedef struct packed {
    alu_op_e    op;
    logic [4:0] d;
    logic [4:0] a;
    logic [4:0] b;
    logic       last;
  } uinstr_t;

  function automatic uinstr_t ui(alu_op_e o, logic [4:0] d, logic [4:0] a, logic [4:0] b,
                                 logic last = 1'b0);
    ui = '{op: o, d: d, a: a, b: b, last: last};
  endfunction

  // micro-programs; register numbers 10..21 are temporaries
  function automatic uinstr_t uprog(prog_e pg, logic [4:0] pc);
    uprog = ui(ALU_SUB, ZERO, ZERO, ZERO, 1'b1);
    unique case (pg)
      PG_NEG: uprog = ui(ALU_SUB, Y2, ZERO, Y2, 1'b1);
      PG_ADD: unique case (pc)
        5'd0:  uprog = ui(ALU_SUB,  Y2, ZERO, Y2);      // Y2 = -Y2 (only when neg2)
        5'd1:  uprog = ui(ALU_MULP, 10, X1, Z2S);       // U1
        5'd2:  uprog = ui(ALU_MULP, 11, X2, Z1S);       // U2
        5'd3:  uprog = ui(ALU_MULP, 12, Y1, Z2C);       // S1
        5'd4:  uprog = ui(ALU_MULP, 13, Y2, Z1C);       // S2
        5'd5:  uprog = ui(ALU_SUB,  14, 11, 10);        // H = U2 - U1
        5'd6:  uprog = ui(ALU_SUB,  15, 13, 12);        // R = S2 - S1
        5'd7:  uprog = ui(ALU_MULP, 16, 14, 14);        // H^2
        5'd8:  uprog = ui(ALU_MULP, 17, 16, 14);        // H^3
        5'd9:  uprog = ui(ALU_MULP, 18, 10, 16);        // U1*H^2
        5'd10: uprog = ui(ALU_MULP, 19, 15, 15);        // R^2
        5'd11: uprog = ui(ALU_SUB,  20, 19, 17);        // R^2 - H^3
        5'd12: uprog = ui(ALU_ADD,  21, 18, 18);        // 2*U1*H^2
        5'd13: uprog = ui(ALU_SUB,  RX, 20, 21);        // X3
        5'd14: uprog = ui(ALU_SUB,  20, 18, RX);        // U1*H^2 - X3
        5'd15: uprog = ui(ALU_MULP, 20, 15, 20);        // R*(U1*H^2 - X3)
        5'd16: uprog = ui(ALU_MULP, 21, 12, 17);        // S1*H^3
        5'd17: uprog = ui(ALU_SUB,  RY, 20, 21);        // Y3
        5'd18: uprog = ui(ALU_MULP, 20, Z1, Z2);        // Z1*Z2
        5'd19: uprog = ui(ALU_MULP, RZ, 14, 20);        // Z3 = H*Z1*Z2
        5'd20: uprog = ui(ALU_MULP, RZS, RZ, RZ);       // Z3^2
        5'd21: uprog = ui(ALU_MULP, RZC, RZS, RZ, 1'b1);// Z3^3
        default: ;
      endcase
      PG_DBL: unique case (pc)
        5'd0:  uprog = ui(ALU_MULP, 10, Y1, Y1);        // Y^2
        5'd1:  uprog = ui(ALU_MULP, 11, X1, 10);        // X*Y^2
        5'd2:  uprog = ui(ALU_ADD,  11, 11, 11);        // 2XY^2
        5'd3:  uprog = ui(ALU_ADD,  11, 11, 11);        // S = 4XY^2
        5'd4:  uprog = ui(ALU_MULP, 12, X1, X1);        // X^2
        5'd5:  uprog = ui(ALU_ADD,  13, 12, 12);        // 2X^2
        5'd6:  uprog = ui(ALU_ADD,  13, 13, 12);        // 3X^2
        5'd7:  uprog = ui(ALU_MULP, 14, Z1S, Z1S);      // Z^4
        5'd8:  uprog = ui(ALU_ADD,  15, 14, 14);        // 2Z^4
        5'd9:  uprog = ui(ALU_ADD,  15, 15, 14);        // 3Z^4
        5'd10: uprog = ui(ALU_SUB,  13, 13, 15);        // M = 3X^2 - 3Z^4
        5'd11: uprog = ui(ALU_MULP, 16, 13, 13);        // M^2
        5'd12: uprog = ui(ALU_ADD,  17, 11, 11);        // 2S
        5'd13: uprog = ui(ALU_SUB,  RX, 16, 17);        // X'
        5'd14: uprog = ui(ALU_SUB,  18, 11, RX);        // S - X'
        5'd15: uprog = ui(ALU_MULP, 18, 13, 18);        // M*(S - X')
        5'd16: uprog = ui(ALU_MULP, 19, 10, 10);        // Y^4
        5'd17: uprog = ui(ALU_ADD,  19, 19, 19);        // 2Y^4
        5'd18: uprog = ui(ALU_ADD,  19, 19, 19);        // 4Y^4
        5'd19: uprog = ui(ALU_ADD,  19, 19, 19);        // 8Y^4
        5'd20: uprog = ui(ALU_SUB,  RY, 18, 19);        // Y'
        5'd21: uprog = ui(ALU_MULP, 20, Y1, Z1);        // Y*Z
        5'd22: uprog = ui(ALU_ADD,  RZ, 20, 20);        // Z' = 2YZ
        5'd23: uprog = ui(ALU_MULP, RZS, RZ, RZ);       // Z'^2
        5'd24: uprog = ui(ALU_MULP, RZC, RZS, RZ, 1'b1);// Z'^3
        default: ;
      endcase
      default: ;
    endcase
  endfunction

  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_WAIT, S_HCHK, S_FIN} state_e;
  state_e state;

  fe_t        rf [32];
  prog_e      prog;
  logic [4:0] pc;
  uinstr_t    cur;
  src_e       res_src;
  logic       res_inf;

  assign cur = uprog(prog, pc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      prog    <= PG_ADD;
      pc      <= '0;
      res_src <= SRC_RES;
      res_inf <= 1'b0;
      done    <= 1'b0;
      eq_dbl  <= 1'b0;
      r       <= '0;
      r_inf   <= 1'b0;
      for (int i = 0; i < 32; i++) rf[i] <= '0;
    end else begin
      done   <= 1'b0;
      eq_dbl <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          rf[X1] <= p1.x; rf[Y1] <= p1.y; rf[Z1] <= p1.z; rf[Z1S] <= p1.z2; rf[Z1C] <= p1.z3;
          rf[X2] <= p2.x; rf[Y2] <= p2.y; rf[Z2] <= p2.z; rf[Z2S] <= p2.z2; rf[Z2C] <= p2.z3;
          rf[ZERO] <= '0;
          res_src  <= SRC_RES;
          res_inf  <= 1'b0;
          pc       <= '0;
          if (op == PT_DBL) begin
            prog <= PG_DBL;
            if (p1_inf) begin res_inf <= 1'b1; state <= S_FIN; end
            else        state <= S_ISSUE;
          end else begin
            prog <= PG_ADD;
            if (p1_inf && p2_inf) begin
              res_inf <= 1'b1; state <= S_FIN;
            end else if (p2_inf) begin
              res_src <= SRC_P1; state <= S_FIN;
            end else if (p1_inf) begin
              res_src <= SRC_P2;
              if (neg2) begin prog <= PG_NEG; state <= S_ISSUE; end
              else      state <= S_FIN;
            end else begin
              pc    <= neg2 ? 5'd0 : 5'd1;
              state <= S_ISSUE;
            end
          end
        end
        S_ISSUE: state <= S_WAIT;
        S_WAIT: if (alu_done) begin
          rf[cur.d] <= alu_y;
          if (cur.last)                          state <= S_FIN;
          else if (prog == PG_ADD && pc == 5'd6) state <= S_HCHK;
          else begin pc <= pc + 1'b1;            state <= S_ISSUE; end
        end
        S_HCHK: begin
          if (rf[14] == '0) begin
            if (rf[15] == '0) begin   // P1 == P2: double P1 instead
              eq_dbl <= 1'b1;
              prog  <= PG_DBL;
              pc    <= '0;
              state <= S_ISSUE;
            end else begin            // P1 == -P2
              res_inf <= 1'b1;
              state   <= S_FIN;
            end
          end else begin
            pc    <= pc + 1'b1;
            state <= S_ISSUE;
          end
        end
        S_FIN: begin
          unique case (res_src)
            SRC_P1:  r <= '{x: rf[X1], y: rf[Y1], z: rf[Z1], z2: rf[Z1S], z3: rf[Z1C]};
            SRC_P2:  r <= '{x: rf[X2], y: rf[Y2], z: rf[Z2], z2: rf[Z2S], z3: rf[Z2C]};
            default: r <= '{x: rf[RX], y: rf[RY], z: rf[RZ], z2: rf[RZS], z3: rf[RZC]};
          endcase
          r_inf <= res_inf;
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    alu_start = (state == S_ISSUE);
    alu_op    = cur.op;
    alu_a     = rf[cur.a];
    alu_b     = rf[cur.b];
  end

  assign busy = (state != S_IDLE);
endmodule
