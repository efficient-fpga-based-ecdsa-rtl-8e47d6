// spm_engine: generic ECDSA P-256 verification by simultaneous point multiplication.
//
// Verifies (r, s) on hash z for any affine public key Q = (qx, qy), with no stored tables:
//   1. r, s in [1, n-1], else invalid (range_err)
//   2. w = s^-1 mod n; k2 = r*w mod n; k1 = z*w mod n; NAF_4(k2) runs beside the k1 product
//      and NAF_4(k1) beside the table step
//   3. table of odd multiples iG and iQ, i = 1, 3, 5, 7: one doubling (2P) and three
//      additions per base point (3P = P + 2P, 5P = 3P + 2P, 7P = 5P + 2P)
//   4. A = k1*G + k2*Q by Shamir's trick over the width-4 NAF digits, most significant first:
//      A = 2A, then A = A +- |d1| G if d1 != 0, then A = A +- |d2| Q if d2 != 0
//   5. x = X * (Z^2)^-1 mod p, valid = (x mod n == r)
// Negative digits add the negated table point (the point unit's neg2). The point at infinity
// is carried as a flag, so the doublings of a still-empty A are skipped.
// The algorithm (width-w NAF with w = 4, shared doublings) and the single instance of each
// arithmetic unit follow the paper's generic engine. The order of the table step and the
// NAF conversions, and keeping the eight table points in registers, are this design's choices.
// Interface: pulse start with r, s, z, qx, qy (while busy is low); done pulses with valid;
// range_err marks a rejection at step 1; eq_dbl pulses when an addition met equal points.
// Timing: about 160,000 to 175,000 cycles per signature in simulation (the paper reports about
// 190,000 for its generic engine); a range rejection is answered after 2 cycles.
module spm_engine
  import p256_pkg::*;
#(
  parameter int unsigned WNAF = 4   // NAF width w
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  fe_t  qx,
  input  fe_t  qy,
  input  fe_t  r,
  input  fe_t  s,
  input  fe_t  z,
  output logic busy,
  output logic done,
  output logic valid,
  output logic range_err,
  output logic eq_dbl       // status pulse: a point addition met equal points
);
  localparam int unsigned NMAX = 257;                   // digits of a 256-bit scalar
  localparam int unsigned DW   = WNAF;                  // bits per digit
  localparam int unsigned NODD = 1 << (WNAF - 2);       // odd multiples 1, 3, .., 2^(w-1)-1
  localparam int unsigned OW   = (NODD > 1) ? $clog2(NODD) : 1;

  typedef enum logic [3:0] {
    S_IDLE, S_RANGE, S_INVW, S_K2, S_K1, S_TBL, S_LOOP, S_AINV, S_AMUL, S_CMP
  } state_e;
  typedef enum logic [1:0] {L_DBL, L_ADD1, L_ADD2, L_NEXT} lstate_e;

  state_e  state;
  lstate_e lst;

  fe_t  r_q, s_q, z_q, w_q, k1_q, k2_q, x_q, qx_q, qy_q;
  logic waiting;

  // ---------------- shared units ----------------
  logic    alu_start, alu_done, alu_busy;
  alu_op_e alu_op;
  fe_t     alu_a, alu_b, alu_y;
  logic    eng_alu_start;
  alu_op_e eng_alu_op;
  fe_t     eng_alu_a, eng_alu_b;

  logic    pu_start, pu_busy, pu_done, pu_neg, pu_p1_inf, pu_p2_inf, pu_rinf;
  pt_op_e  pu_op;
  cpoint_t pu_p1, pu_p2, pu_r;
  logic    pu_alu_start;
  alu_op_e pu_alu_op;
  fe_t     pu_alu_a, pu_alu_b;

  logic    inv_start, inv_busy, inv_done;
  fe_t     inv_a, inv_m, inv_y;

  logic                       naf1_start, naf1_busy, naf1_done;
  logic                       naf2_start, naf2_busy, naf2_done;
  logic [NMAX*DW-1:0]         naf1_dig, naf2_dig;
  logic [$clog2(NMAX+1)-1:0]  naf1_len, naf2_len;

  field_alu #(.HAS_BARRETT(1'b1)) u_alu (
    .clk, .rst_n, .start(alu_start), .op(alu_op), .a(alu_a), .b(alu_b),
    .busy(alu_busy), .done(alu_done), .y(alu_y));

  point_unit u_pu (
    .clk, .rst_n, .start(pu_start), .op(pu_op), .neg2(pu_neg),
    .p1(pu_p1), .p1_inf(pu_p1_inf), .p2(pu_p2), .p2_inf(pu_p2_inf),
    .busy(pu_busy), .done(pu_done), .r(pu_r), .r_inf(pu_rinf), .eq_dbl,
    .alu_start(pu_alu_start), .alu_op(pu_alu_op), .alu_a(pu_alu_a), .alu_b(pu_alu_b),
    .alu_done, .alu_y);

  mod_inv u_inv (.clk, .rst_n, .start(inv_start), .a(inv_a), .m(inv_m),
                 .busy(inv_busy), .done(inv_done), .y(inv_y));

  naf_conv #(.W(WNAF), .NMAX(NMAX), .DW(DW)) u_naf1 (
    .clk, .rst_n, .start(naf1_start), .k(k1_q), .busy(naf1_busy), .done(naf1_done),
    .digits(naf1_dig), .len(naf1_len));

  naf_conv #(.W(WNAF), .NMAX(NMAX), .DW(DW)) u_naf2 (
    .clk, .rst_n, .start(naf2_start), .k(k2_q), .busy(naf2_busy), .done(naf2_done),
    .digits(naf2_dig), .len(naf2_len));

  // the point unit owns the ALU while it runs
  always_comb begin
    if (pu_busy) begin
      alu_start = pu_alu_start; alu_op = pu_alu_op; alu_a = pu_alu_a; alu_b = pu_alu_b;
    end else begin
      alu_start = eng_alu_start; alu_op = eng_alu_op; alu_a = eng_alu_a; alu_b = eng_alu_b;
    end
  end

  // ---------------- odd-multiple table and digits ----------------
  cpoint_t                   tbl_g [NODD];   // (2m+1) G
  cpoint_t                   tbl_q [NODD];   // (2m+1) Q
  cpoint_t                   two_p;          // 2G or 2Q during the table step
  logic                      tb_q;           // table step: 0 for G, 1 for Q
  logic [OW:0]               tb_m;           // table step: next multiple index
  logic [8:0]                li;             // digit index in the main loop
  logic signed [DW-1:0]      d1, d2;
  logic [OW-1:0]             d1_idx, d2_idx;

  always_comb begin
    d1     = $signed(naf1_dig[DW*int'(li) +: DW]);
    d2     = $signed(naf2_dig[DW*int'(li) +: DW]);
    // |d| = 2m + 1; for odd negative d, (|d| >> 1) = (~d) >> 1
    d1_idx = d1[DW-1] ? ~d1[OW:1] : d1[OW:1];
    d2_idx = d2[DW-1] ? ~d2[OW:1] : d2[OW:1];
  end

  cpoint_t acc;
  logic    acc_inf;

  // ---------------- main FSM ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;  lst <= L_DBL;
      r_q <= '0; s_q <= '0; z_q <= '0; w_q <= '0; k1_q <= '0; k2_q <= '0; x_q <= '0;
      qx_q <= '0; qy_q <= '0; waiting <= 1'b0;
      done <= 1'b0; valid <= 1'b0; range_err <= 1'b0;
      eng_alu_start <= 1'b0; eng_alu_op <= ALU_MULN; eng_alu_a <= '0; eng_alu_b <= '0;
      inv_start <= 1'b0; inv_a <= '0; inv_m <= '0;
      naf1_start <= 1'b0; naf2_start <= 1'b0;
      pu_start <= 1'b0; pu_op <= PT_ADD; pu_neg <= 1'b0; pu_p1 <= '0; pu_p2 <= '0;
      pu_p1_inf <= 1'b1; pu_p2_inf <= 1'b1;
      for (int m = 0; m < NODD; m++) begin tbl_g[m] <= '0; tbl_q[m] <= '0; end
      two_p <= '0; tb_q <= 1'b0; tb_m <= '0; li <= '0;
      acc <= '0; acc_inf <= 1'b1;
    end else begin
      done          <= 1'b0;
      eng_alu_start <= 1'b0;
      inv_start     <= 1'b0;
      naf1_start    <= 1'b0;
      naf2_start    <= 1'b0;
      pu_start      <= 1'b0;

      unique case (state)
        S_IDLE: if (start) begin
          r_q <= r; s_q <= s; z_q <= z; qx_q <= qx; qy_q <= qy;
          range_err <= 1'b0;
          state <= S_RANGE;
        end
        S_RANGE: begin
          if (r_q == '0 || r_q >= N_ORD || s_q == '0 || s_q >= N_ORD) begin
            valid     <= 1'b0;
            range_err <= 1'b1;
            done      <= 1'b1;
            state     <= S_IDLE;
          end else begin
            inv_a <= s_q; inv_m <= N_ORD; inv_start <= 1'b1;
            state <= S_INVW;
          end
        end
        S_INVW: if (inv_done) begin
          w_q <= inv_y;
          eng_alu_op <= ALU_MULN; eng_alu_a <= r_q; eng_alu_b <= inv_y; eng_alu_start <= 1'b1;
          state <= S_K2;
        end
        S_K2: if (alu_done) begin
          k2_q <= alu_y;
          naf2_start <= 1'b1;                      // NAF(k2) beside the k1 multiplication
          eng_alu_op <= ALU_MULN; eng_alu_a <= z_q; eng_alu_b <= w_q; eng_alu_start <= 1'b1;
          state <= S_K1;
        end
        S_K1: if (alu_done) begin
          k1_q <= alu_y;
          naf1_start <= 1'b1;                      // NAF(k1) beside the table step
          // table step starts with G: 1G, then 2G
          tbl_g[0] <= '{x: GX, y: GY, z: fe_t'(1), z2: fe_t'(1), z3: fe_t'(1)};
          tbl_q[0] <= '{x: qx_q, y: qy_q, z: fe_t'(1), z2: fe_t'(1), z3: fe_t'(1)};
          pu_op <= PT_DBL; pu_neg <= 1'b0;
          pu_p1 <= '{x: GX, y: GY, z: fe_t'(1), z2: fe_t'(1), z3: fe_t'(1)};
          pu_p1_inf <= 1'b0; pu_p2_inf <= 1'b1; pu_start <= 1'b1;
          tb_q <= 1'b0; tb_m <= '0;
          state <= S_TBL;
        end
        S_TBL: if (pu_done) begin
          if (tb_m == '0) two_p <= pu_r;
          else if (!tb_q) tbl_g[tb_m[OW-1:0]] <= pu_r;
          else            tbl_q[tb_m[OW-1:0]] <= pu_r;
          if (tb_m == (OW+1)'(NODD - 1)) begin
            if (!tb_q) begin                       // G done, start on Q with 2Q
              tb_q <= 1'b1; tb_m <= '0;
              pu_op <= PT_DBL; pu_p1 <= tbl_q[0]; pu_p1_inf <= 1'b0; pu_start <= 1'b1;
            end else begin                         // both tables done: main loop
              acc_inf <= 1'b1;
              li      <= 9'(NMAX - 1);
              lst     <= L_DBL;
              waiting <= 1'b0;
              state   <= S_LOOP;
            end
          end else begin
            // next odd multiple: (2m+3)P = (2m+1)P + 2P
            pu_op <= PT_ADD; pu_neg <= 1'b0;
            if (tb_m == '0) pu_p1 <= tb_q ? tbl_q[0] : tbl_g[0];
            else            pu_p1 <= pu_r;
            pu_p2 <= (tb_m == '0) ? pu_r : two_p;
            pu_p1_inf <= 1'b0; pu_p2_inf <= 1'b0; pu_start <= 1'b1;
            tb_m <= tb_m + 1'b1;
          end
        end
        S_LOOP: begin
          unique case (lst)
            L_DBL: begin
              // the digits must be ready before the loop reads them
              if (!waiting && !naf1_busy && !naf1_start && !naf2_busy) begin
                if (acc_inf) lst <= L_ADD1;
                else begin
                  pu_op <= PT_DBL; pu_p1 <= acc; pu_p1_inf <= 1'b0; pu_start <= 1'b1;
                  waiting <= 1'b1;
                end
              end else if (waiting && pu_done) begin
                acc <= pu_r; acc_inf <= pu_rinf;
                waiting <= 1'b0;
                lst <= L_ADD1;
              end
            end
            L_ADD1: begin
              if (!waiting) begin
                if (d1 == '0) lst <= L_ADD2;
                else begin
                  pu_op <= PT_ADD; pu_neg <= d1[DW-1];
                  pu_p1 <= acc; pu_p1_inf <= acc_inf; pu_p2 <= tbl_g[d1_idx]; pu_p2_inf <= 1'b0;
                  pu_start <= 1'b1;
                  waiting <= 1'b1;
                end
              end else if (pu_done) begin
                acc <= pu_r; acc_inf <= pu_rinf;
                waiting <= 1'b0;
                lst <= L_ADD2;
              end
            end
            L_ADD2: begin
              if (!waiting) begin
                if (d2 == '0) lst <= L_NEXT;
                else begin
                  pu_op <= PT_ADD; pu_neg <= d2[DW-1];
                  pu_p1 <= acc; pu_p1_inf <= acc_inf; pu_p2 <= tbl_q[d2_idx]; pu_p2_inf <= 1'b0;
                  pu_start <= 1'b1;
                  waiting <= 1'b1;
                end
              end else if (pu_done) begin
                acc <= pu_r; acc_inf <= pu_rinf;
                waiting <= 1'b0;
                lst <= L_NEXT;
              end
            end
            L_NEXT: begin
              if (li == '0) begin
                if (acc_inf) begin
                  valid <= 1'b0;
                  done  <= 1'b1;
                  state <= S_IDLE;
                end else begin
                  x_q   <= acc.x;
                  inv_a <= acc.z2; inv_m <= P_MOD; inv_start <= 1'b1;
                  state <= S_AINV;
                end
              end else begin
                li  <= li - 1'b1;
                lst <= L_DBL;
              end
            end
            default: lst <= L_DBL;
          endcase
        end
        S_AINV: if (inv_done) begin
          eng_alu_op <= ALU_MULP; eng_alu_a <= x_q; eng_alu_b <= inv_y; eng_alu_start <= 1'b1;
          state <= S_AMUL;
        end
        S_AMUL: if (alu_done) begin
          x_q   <= alu_y;
          state <= S_CMP;
        end
        S_CMP: begin
          valid <= (((x_q >= N_ORD) ? x_q - N_ORD : x_q) == r_q);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // checked only outside reset (flops hold random values before the first reset edge)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      if (eng_alu_start) assert (!pu_busy) else $error("spm_engine: ALU conflict");
      if (alu_start) assert (!alu_busy) else $error("spm_engine: ALU started while busy");
      if (inv_start) assert (!inv_busy) else $error("spm_engine: inverter started while busy");
      if (pu_start) assert (!pu_busy) else $error("spm_engine: point unit started while busy");
      if (naf1_done) assert (int'(naf1_len) <= NMAX) else $error("spm_engine: NAF(k1) too long");
      if (naf2_done) assert (int'(naf2_len) <= NMAX) else $error("spm_engine: NAF(k2) too long");
    end
  end
endmodule
