// points_mem: storage of precomputed Chudnovsky points (the "points storage" BRAM).
//
// Slot s holds the NPTS points P_i = 2^(4i) * P, i = 0 .. NPTS-1, of one base point; slot 0 is
// the generator G and slots 1 .. SLOTS-1 are public keys. Each word is a full point
// (X, Y, Z, Z^2, Z^3), 1280 bits, so one key with NPTS = 65 takes 10.4 KB and G plus one key
// about 20 KB, the figure the paper gives. One write port (precompute block) and one read port
// (verification engine), both synchronous; rdata is valid the cycle after re. No reset: the
// contents are only read after they were written. Address ranges are asserted by the
// precompute block and the engine, which drive the ports. The number of key slots is not given by the
// paper ("tens of unique identities"); it is a parameter here.
module points_mem
  import p256_pkg::*;
#(
  parameter int unsigned SLOTS  = 17,   // G + 16 public keys
  parameter int unsigned NPTS   = 65,   // points per base point (i = 0..64)
  parameter int unsigned SLOT_W = $clog2(SLOTS),
  parameter int unsigned IDX_W  = $clog2(NPTS)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [SLOT_W-1:0] wslot,
  input  logic [IDX_W-1:0]  widx,
  input  cpoint_t           wdata,
  input  logic              re,
  input  logic [SLOT_W-1:0] rslot,
  input  logic [IDX_W-1:0]  ridx,
  output cpoint_t           rdata
);
  cpoint_t mem [SLOTS*NPTS];

  always_ff @(posedge clk) begin
    if (we) mem[int'(wslot) * NPTS + int'(widx)] <= wdata;
    if (re) rdata <= mem[int'(rslot) * NPTS + int'(ridx)];
  end
endmodule
