// precompute: fills the points storage with P_i = 2^(4i) * P, i = 0 .. NPTS-1, for a base point P.
//
// Starting from the affine point (x, y) taken as (x, y, 1, 1, 1), it runs a doubling-only binary
// scalar multiplication: every WIN point doublings give the next power 2^(4(i+1)) * P from the
// previous one (no restart from P), and each P_i is written to the storage as soon as it
// exists. For NPTS = 65 that is 256 doublings. The block has its own field ALU (integer
// multiplier, P-256 reduction, subtractor; no mod-n reduction) and point unit, as the paper's
// precompute block has its own arithmetic and FSM.
// After reset it first runs once for the generator G into slot 0, then raises ready; the paper
// stores the G table offline, here it is built on chip at start-up so that no large constant
// table is needed. Afterwards a start pulse with (x, y) and a slot precomputes a public key.
// Interface: start, slot, px, py in; busy, done (pulse), ready out; memory write port out.
// Timing: 256 doublings of about 460 cycles, i.e. about 118,000 cycles per point (the paper: about
// 120,000).
module precompute
  import p256_pkg::*;
#(
  parameter int unsigned NPTS   = 65,  // d + 1 points, d = 256 / w = 64
  parameter int unsigned WIN    = 4,   // window width w: doublings between stored points
  parameter int unsigned SLOT_W = 5,
  parameter int unsigned IDX_W  = $clog2(NPTS),
  parameter bit          INIT_G = 1'b1 // build the G table after reset
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [SLOT_W-1:0] slot,
  input  fe_t               px,
  input  fe_t               py,
  output logic              busy,
  output logic              done,
  output logic              ready,    // idle and G table built: start is accepted
  output logic              g_ready,  // G table built
  // points storage write port
  output logic              we,
  output logic [SLOT_W-1:0] wslot,
  output logic [IDX_W-1:0]  widx,
  output cpoint_t           wdata
);
  typedef enum logic [1:0] {S_IDLE, S_WRITE, S_DBL, S_WAIT} state_e;
  state_e state;

  cpoint_t                  cur;
  logic [$clog2(WIN+1)-1:0] dcnt;
  logic [IDX_W-1:0]         idx;
  logic [SLOT_W-1:0]        slot_q;
  logic                     g_done;

  logic    pu_start, pu_busy, pu_done, pu_rinf, pu_eq_dbl;
  cpoint_t pu_r;
  logic    alu_start, alu_done, alu_busy;
  alu_op_e alu_op;
  fe_t     alu_a, alu_b, alu_y;

  field_alu #(.HAS_BARRETT(1'b0)) u_alu (
    .clk, .rst_n, .start(alu_start), .op(alu_op), .a(alu_a), .b(alu_b),
    .busy(alu_busy), .done(alu_done), .y(alu_y));

  point_unit u_pu (
    .clk, .rst_n, .start(pu_start), .op(PT_DBL), .neg2(1'b0),
    .p1(cur), .p1_inf(1'b0), .p2(cur), .p2_inf(1'b1),
    .busy(pu_busy), .done(pu_done), .r(pu_r), .r_inf(pu_rinf), .eq_dbl(pu_eq_dbl),
    .alu_start, .alu_op, .alu_a, .alu_b, .alu_done, .alu_y);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cur      <= '0;
      dcnt     <= '0;
      idx      <= '0;
      slot_q   <= '0;
      g_done   <= !INIT_G;
      done     <= 1'b0;
      we       <= 1'b0;
      wslot    <= '0;
      widx     <= '0;
      wdata    <= '0;
      pu_start <= 1'b0;
    end else begin
      done     <= 1'b0;
      we       <= 1'b0;
      pu_start <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (!g_done) begin
            cur    <= '{x: GX, y: GY, z: fe_t'(1), z2: fe_t'(1), z3: fe_t'(1)};
            slot_q <= '0;
            idx    <= '0;
            state  <= S_WRITE;
          end else if (start) begin
            cur    <= '{x: px, y: py, z: fe_t'(1), z2: fe_t'(1), z3: fe_t'(1)};
            slot_q <= slot;
            idx    <= '0;
            state  <= S_WRITE;
          end
        end
        S_WRITE: begin
          we    <= 1'b1;
          wslot <= slot_q;
          widx  <= idx;
          wdata <= cur;
          if (idx == IDX_W'(NPTS - 1)) begin
            g_done <= 1'b1;
            done   <= g_done;   // the start-up G run is not reported as a request
            state  <= S_IDLE;
          end else begin
            idx   <= idx + 1'b1;
            dcnt  <= '0;
            state <= S_DBL;
          end
        end
        S_DBL: begin
          pu_start <= 1'b1;
          state    <= S_WAIT;
        end
        S_WAIT: if (pu_done) begin
          cur <= pu_r;
          if (dcnt == $bits(dcnt)'(WIN - 1)) state <= S_WRITE;
          else begin
            dcnt  <= dcnt + 1'b1;
            state <= S_DBL;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy  = (state != S_IDLE) || !g_done;
  assign ready   = g_done && (state == S_IDLE);
  assign g_ready = g_done;

  // writes stay inside the table; a pure doubling never takes the equal-point path
  // checked only outside reset (flops hold random values before the first reset edge)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      assert (!pu_eq_dbl) else $error("precompute: unexpected equal-point signal");
      if (alu_start) assert (!alu_busy) else $error("precompute: ALU started while busy");
      if (pu_start) assert (!pu_busy) else $error("precompute: point unit started while busy");
      // the group order is prime and odd, so doubling a finite point never gives infinity
      if (pu_done) assert (!pu_rinf) else $error("precompute: doubling gave infinity");
      if (we) assert (int'(widx) < NPTS) else $error("precompute: write index out of range");
    end
  end
endmodule
