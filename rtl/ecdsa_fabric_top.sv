// ecdsa_fabric_top: ECDSA P-256 verification for a permissioned blockchain node with per-key
// precomputation.
//
// Four parts: the precompute block, the points storage, the verification engine and a generic
// engine for keys without a table. Public
// keys are known well before the signatures made with them arrive, so each new key is
// registered once: the precompute block doubles it into P_i = 2^(4i) K, i = 0..64, and writes
// them to its slot of the storage. After reset the same block first builds the table of the
// generator G (storage slot 0); g_ready rises when that is done. A verification then needs
// only point additions (fixed-base NAF windowing over both tables), one point addition, the
// affine conversion and a comparison.
// Interface (all synchronous to clk, active-low asynchronous reset):
//   key_start/key_slot/key_x/key_y: register affine key (key_x, key_y) in key slot key_slot
//     (0 .. KEY_SLOTS-1); accepted while key_ready is high; key_done pulses when stored.
//   ver_start/ver_slot/ver_r/ver_s/ver_z: verify signature (r, s) on hash z with the key of
//     ver_slot; accepted while ver_busy is low and g_ready is high; ver_done pulses with
//     ver_valid, ver_range_err marks a signature rejected by the range check.
// The key slot must not be re-registered while a verification uses it.
//   key_busy is high while the G table or a key table is being built.
//   gen_start/gen_qx/gen_qy/gen_r/gen_s/gen_z: verify a signature under any affine key with
//     the generic engine (simultaneous point multiplication, no stored table), for example
//     while that key's table is still being built; gen_done pulses with gen_valid.
// Timing: G table and each key registration about 120,000 cycles, verification 67,000 to
// 71,000 cycles, generic verification 170,000 to 178,000 cycles (the paper: about 120,000,
// 92,000 and 190,000). Registration and
// verification run at the same time when they use different slots.
// The structure follows the paper; the slot count, the port protocol and placing the generic
// engine beside the table-based one are this design's choices (the paper evaluates the two
// engines separately).
module ecdsa_fabric_top
  import p256_pkg::*;
#(
  parameter int unsigned KEY_SLOTS = 16,
  parameter int unsigned NPTS      = 65,
  parameter int unsigned WIN       = 4,
  parameter int unsigned KEY_W     = (KEY_SLOTS > 1) ? $clog2(KEY_SLOTS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  output logic             g_ready,
  // key registration
  input  logic             key_start,
  input  logic [KEY_W-1:0] key_slot,
  input  fe_t              key_x,
  input  fe_t              key_y,
  output logic             key_ready,
  output logic             key_busy,       // G table or a key table being built
  output logic             key_done,
  // verification
  input  logic             ver_start,
  input  logic [KEY_W-1:0] ver_slot,
  input  fe_t              ver_r,
  input  fe_t              ver_s,
  input  fe_t              ver_z,
  output logic             ver_busy,
  output logic             ver_done,
  output logic             ver_valid,
  output logic             ver_range_err,
  output logic             ver_eq_dbl,     // status pulse: equal points met in a point addition
  // generic verification (any key, no table)
  input  logic             gen_start,
  input  fe_t              gen_qx,
  input  fe_t              gen_qy,
  input  fe_t              gen_r,
  input  fe_t              gen_s,
  input  fe_t              gen_z,
  output logic             gen_busy,
  output logic             gen_done,
  output logic             gen_valid,
  output logic             gen_range_err,
  output logic             gen_eq_dbl
);
  localparam int unsigned SLOTS  = KEY_SLOTS + 1;
  localparam int unsigned SLOT_W = $clog2(SLOTS);
  localparam int unsigned IDX_W  = $clog2(NPTS);

  logic              we, re;
  logic [SLOT_W-1:0] wslot, rslot;
  logic [IDX_W-1:0]  widx, ridx;
  cpoint_t           wdata, rdata;

  precompute #(.NPTS(NPTS), .WIN(WIN), .SLOT_W(SLOT_W), .IDX_W(IDX_W)) u_pre (
    .clk, .rst_n,
    .start(key_start), .slot(SLOT_W'(key_slot) + SLOT_W'(1)), .px(key_x), .py(key_y),
    .busy(key_busy), .done(key_done), .ready(key_ready), .g_ready,
    .we, .wslot, .widx, .wdata);

  points_mem #(.SLOTS(SLOTS), .NPTS(NPTS), .SLOT_W(SLOT_W), .IDX_W(IDX_W)) u_mem (
    .clk, .we, .wslot, .widx, .wdata, .re, .rslot, .ridx, .rdata);

  ecdsa_engine #(.NPTS(NPTS), .WIN(WIN), .SLOT_W(SLOT_W), .IDX_W(IDX_W)) u_eng (
    .clk, .rst_n,
    .start(ver_start && g_ready), .slot(SLOT_W'(ver_slot) + SLOT_W'(1)),
    .r(ver_r), .s(ver_s), .z(ver_z),
    .busy(ver_busy), .done(ver_done), .valid(ver_valid), .range_err(ver_range_err),
    .eq_dbl(ver_eq_dbl),
    .re, .rslot, .ridx, .rdata);

  spm_engine #(.WNAF(4)) u_gen (
    .clk, .rst_n, .start(gen_start), .qx(gen_qx), .qy(gen_qy), .r(gen_r), .s(gen_s), .z(gen_z),
    .busy(gen_busy), .done(gen_done), .valid(gen_valid), .range_err(gen_range_err),
    .eq_dbl(gen_eq_dbl));
endmodule
