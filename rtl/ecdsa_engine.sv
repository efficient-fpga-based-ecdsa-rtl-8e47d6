// ecdsa_engine: ECDSA P-256 signature verification from precomputed point tables.
//
// Verifies (r, s) on hash z for a public key K whose table P_i = 2^(4i) K sits in the points
// storage (slot 0 holds the same table for the generator G):
//   1. r, s in [1, n-1], else invalid
//   2. w  = s^-1 mod n                    (mod_inv, modulus n)
//   3. k2 = r*w mod n                     (field ALU: integer mult + Barrett)
//   4. k1 = z*w mod n, NAF(k2) in parallel
//   5. k2*K by fixed-base NAF windowing, NAF(k1) in parallel
//   6. k1*G by fixed-base NAF windowing
//   7. (X, Y, Z) = k1*G + k2*K            (one point addition)
//   8. x = X * (Z^2)^-1 mod p             (mod_inv with modulus p, then one mod-p multiplication)
//   9. valid = (x mod n == r)             (x < p < 2n, so one conditional subtraction)
// Fixed-base NAF windowing with w = 4: the NAF digits of k are grouped four at a time into
// window values k_i in [-10, 10], k = sum k_i 2^(4i). For j = 10 down to 1, every stored point
// P_i with k_i = j is added to an accumulator B and every one with k_i = -j subtracted, then
// A = A + B. So k*P costs only point additions (about 60 + 10), the doublings having moved into
// the precompute block. Windows are scanned one per cycle; a match reads P_i from the storage.
// One field ALU, one point unit and one inverter are shared by all steps, as in the paper; the
// two NAF converters work beside them. The order of steps 3-6 and the overlap of the NAF
// conversions follow the paper's data flow. Scanning the windows in order and the point unit's
// handling of infinity are this design's choices.
// Interface: pulse start with r, s, z and the key's storage slot (while busy is low); done
// pulses with valid. range_err marks a rejection at step 1. Storage read port: rdata valid the
// cycle after re.
// Timing: 67,000 to 71,000 cycles per signature in simulation (the paper reports about 92,000);
// a signature failing the range check is answered after 2 cycles.
module ecdsa_engine
  import p256_pkg::*;
#(
  parameter int unsigned NPTS   = 65,  // stored points per base point
  parameter int unsigned WIN    = 4,   // window width w
  parameter int unsigned SLOT_W = 5,
  parameter int unsigned IDX_W  = $clog2(NPTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [SLOT_W-1:0] slot,
  input  fe_t               r,
  input  fe_t               s,
  input  fe_t               z,
  output logic              busy,
  output logic              done,
  output logic              valid,
  output logic              range_err,
  output logic              eq_dbl,     // status pulse: a point addition met equal points
  // points storage read port
  output logic              re,
  output logic [SLOT_W-1:0] rslot,
  output logic [IDX_W-1:0]  ridx,
  input  cpoint_t           rdata
);
  localparam int unsigned NMAX = 257;              // NAF digits of a 256-bit scalar
  localparam int unsigned DW   = 2;                // bits per NAF digit
  localparam int unsigned JMAX = ((1 << (WIN + 1)) - 2) / 3;   // I = (2^(w+1) - 2)/3 = 10

  typedef enum logic [3:0] {
    S_IDLE, S_RANGE, S_INVW, S_K2, S_K1, S_FPMK, S_FPMG, S_PADD, S_AINV, S_AMUL, S_CMP
  } state_e;
  typedef enum logic [2:0] {F_START, F_SCAN, F_READ, F_BADD, F_AADD, F_END} fstate_e;

  state_e  state;
  fstate_e fst;

  fe_t               r_q, s_q, z_q, w_q, k1_q, k2_q, x_q;
  logic [SLOT_W-1:0] slot_q;
  logic              waiting;

  // ---------------- shared units ----------------
  logic    alu_start, alu_done, alu_busy;
  alu_op_e alu_op;
  fe_t     alu_a, alu_b, alu_y;
  logic    eng_alu_start;
  alu_op_e eng_alu_op;
  fe_t     eng_alu_a, eng_alu_b;

  logic    pu_start, pu_busy, pu_done, pu_neg, pu_p1_inf, pu_p2_inf, pu_rinf;
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
    .clk, .rst_n, .start(pu_start), .op(PT_ADD), .neg2(pu_neg),
    .p1(pu_p1), .p1_inf(pu_p1_inf), .p2(pu_p2), .p2_inf(pu_p2_inf),
    .busy(pu_busy), .done(pu_done), .r(pu_r), .r_inf(pu_rinf), .eq_dbl,
    .alu_start(pu_alu_start), .alu_op(pu_alu_op), .alu_a(pu_alu_a), .alu_b(pu_alu_b),
    .alu_done, .alu_y);

  mod_inv u_inv (.clk, .rst_n, .start(inv_start), .a(inv_a), .m(inv_m),
                 .busy(inv_busy), .done(inv_done), .y(inv_y));

  naf_conv #(.W(2), .NMAX(NMAX), .DW(DW)) u_naf1 (
    .clk, .rst_n, .start(naf1_start), .k(k1_q), .busy(naf1_busy), .done(naf1_done),
    .digits(naf1_dig), .len(naf1_len));

  naf_conv #(.W(2), .NMAX(NMAX), .DW(DW)) u_naf2 (
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

  // ---------------- window values ----------------
  logic [NPTS*WIN*DW-1:0] dig_pad;
  logic [IDX_W-1:0]       wi;      // window being scanned
  logic [3:0]             wj;      // current j (JMAX .. 1)
  logic signed [5:0]      wval;
  logic                   fpm_g;   // 0: k2*K, 1: k1*G

  always_comb begin
    dig_pad = '0;
    dig_pad[NMAX*DW-1:0] = fpm_g ? naf1_dig : naf2_dig;
    wval = '0;
    for (int d = WIN - 1; d >= 0; d--)
      wval = (wval <<< 1) + 6'($signed(dig_pad[DW*(WIN*int'(wi) + d) +: DW]));
  end

  // ---------------- FPM accumulators ----------------
  cpoint_t acc_a, acc_b, q_k;
  logic    a_inf, b_inf, qk_inf;

  // ---------------- main FSM ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;  fst <= F_START;
      r_q <= '0; s_q <= '0; z_q <= '0; w_q <= '0; k1_q <= '0; k2_q <= '0; x_q <= '0;
      slot_q <= '0; waiting <= 1'b0;
      done <= 1'b0; valid <= 1'b0; range_err <= 1'b0;
      eng_alu_start <= 1'b0; eng_alu_op <= ALU_MULN; eng_alu_a <= '0; eng_alu_b <= '0;
      inv_start <= 1'b0; inv_a <= '0; inv_m <= '0;
      naf1_start <= 1'b0; naf2_start <= 1'b0;
      pu_start <= 1'b0; pu_neg <= 1'b0; pu_p1 <= '0; pu_p2 <= '0; pu_p1_inf <= 1'b1; pu_p2_inf <= 1'b1;
      acc_a <= '0; acc_b <= '0; q_k <= '0; a_inf <= 1'b1; b_inf <= 1'b1; qk_inf <= 1'b1;
      wi <= '0; wj <= '0; fpm_g <= 1'b0;
      re <= 1'b0; rslot <= '0; ridx <= '0;
    end else begin
      done          <= 1'b0;
      eng_alu_start <= 1'b0;
      inv_start     <= 1'b0;
      naf1_start    <= 1'b0;
      naf2_start    <= 1'b0;
      pu_start      <= 1'b0;
      re            <= 1'b0;

      unique case (state)
        S_IDLE: if (start) begin
          r_q <= r; s_q <= s; z_q <= z; slot_q <= slot;
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
            waiting <= 1'b0;
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
          waiting <= 1'b0;
          state <= S_K1;
        end
        S_K1: begin
          if (alu_done) begin
            k1_q    <= alu_y;
            waiting <= 1'b1;
          end
          if (waiting && !naf2_busy && !naf2_start) begin
            naf1_start <= 1'b1;                    // NAF(k1) beside the first FPM
            waiting <= 1'b0;
            fpm_g  <= 1'b0;
            rslot  <= slot_q;
            fst    <= F_START;
            state  <= S_FPMK;
          end
        end
        S_FPMK, S_FPMG: begin
          unique case (fst)
            F_START: begin
              a_inf <= 1'b1; b_inf <= 1'b1;
              wj <= 4'(JMAX); wi <= '0;
              if (!fpm_g || (!naf1_busy && !naf1_start)) fst <= F_SCAN;
            end
            F_SCAN: begin
              if (wval == 6'(wj) || wval == -6'(wj)) begin
                re    <= 1'b1;
                ridx  <= wi;
                fst   <= F_READ;
              end else if (wi == IDX_W'(NPTS - 1)) begin
                pu_p1 <= acc_a; pu_p1_inf <= a_inf; pu_p2 <= acc_b; pu_p2_inf <= b_inf;
                pu_neg <= 1'b0; pu_start <= 1'b1;
                fst <= F_AADD;
              end else wi <= wi + 1'b1;
            end
            F_READ: begin
              // storage data arrive this cycle
              fst <= F_BADD;
            end
            F_BADD: begin
              if (!waiting) begin
                pu_p1 <= acc_b; pu_p1_inf <= b_inf; pu_p2 <= rdata; pu_p2_inf <= 1'b0;
                pu_neg <= wval[5]; pu_start <= 1'b1;
                waiting <= 1'b1;
              end else if (pu_done) begin
                acc_b <= pu_r; b_inf <= pu_rinf;
                waiting <= 1'b0;
                if (wi == IDX_W'(NPTS - 1)) begin
                  pu_p1 <= acc_a; pu_p1_inf <= a_inf; pu_p2 <= pu_r; pu_p2_inf <= pu_rinf;
                  pu_neg <= 1'b0; pu_start <= 1'b1;
                  fst <= F_AADD;
                end else begin
                  wi  <= wi + 1'b1;
                  fst <= F_SCAN;
                end
              end
            end
            F_AADD: if (pu_done) begin
              acc_a <= pu_r; a_inf <= pu_rinf;
              if (wj == 4'd1) fst <= F_END;
              else begin
                wj  <= wj - 1'b1;
                wi  <= '0;
                fst <= F_SCAN;
              end
            end
            F_END: begin
              fst <= F_START;
              if (state == S_FPMK) begin
                q_k <= acc_a; qk_inf <= a_inf;
                fpm_g <= 1'b1;
                rslot <= '0;                       // G table
                state <= S_FPMG;
              end else begin
                // k1*G + k2*K
                pu_p1 <= acc_a; pu_p1_inf <= a_inf; pu_p2 <= q_k; pu_p2_inf <= qk_inf;
                pu_neg <= 1'b0; pu_start <= 1'b1;
                state <= S_PADD;
              end
            end
            default: fst <= F_START;
          endcase
        end
        S_PADD: if (pu_done) begin
          if (pu_rinf) begin
            valid <= 1'b0;
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            x_q   <= pu_r.x;
            inv_a <= pu_r.z2; inv_m <= P_MOD; inv_start <= 1'b1;
            state <= S_AINV;
          end
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

  // the engine never starts the ALU while the point unit owns it; reads stay inside the table
  // checked only outside reset (flops hold random values before the first reset edge)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      if (eng_alu_start) assert (!pu_busy) else $error("ecdsa_engine: ALU conflict");
      if (re) assert (int'(ridx) < NPTS) else $error("ecdsa_engine: read index out of range");
      if (alu_start) assert (!alu_busy) else $error("ecdsa_engine: ALU started while busy");
      if (inv_start) assert (!inv_busy) else $error("ecdsa_engine: inverter started while busy");
      // every NAF digit lies inside the WIN * NPTS digits the table covers
      if (naf1_done) assert (int'(naf1_len) <= WIN * NPTS) else $error("ecdsa_engine: NAF(k1) too long");
      if (naf2_done) assert (int'(naf2_len) <= WIN * NPTS) else $error("ecdsa_engine: NAF(k2) too long");
    end
  end
endmodule
