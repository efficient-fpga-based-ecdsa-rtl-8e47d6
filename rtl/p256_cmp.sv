// p256_cmp: "r >= p" test for P-256 without a 256-bit magnitude comparator.
//
// The prime p = 2^256 - 2^224 + 2^192 + 2^96 - 1 splits into four fields whose values are
// trivial: P[95:0] all ones, P[191:96] zero, P[223:192] = 1 and P[255:224] all ones. The input r
// (257 bits) is split the same way plus its bit 256. r is greater than p when bit 256 is set, or
// when the top word is all ones and either r[223:192] > 1 or (r[223:192] == 1 and r[191:96] != 0);
// r equals p when all four fields match. Only AND/OR reductions and one 32-bit compare remain.
// Output: ge (r >= p), the only result the users need. Purely combinational. The split and the conditions follow the paper's comparison algorithm;
// reading its "r3 == C3 and r2 > C2 or (...)" as r3 == C3 and (r2 > C2 or (...)) is the only
// interpretation under which the test is exact, and it is the one used here. The test is exact
// for every 257-bit r, not only for r < 2p.
module p256_cmp (
  input  logic [256:0] r,
  output logic         ge    // r >= p
);
  logic        r0, r3, r4, r1_nz, gt, eq;
  logic [31:0] r2;

  assign r0    = &r[95:0];
  assign r1_nz = |r[191:96];
  assign r2    = r[223:192];
  assign r3    = &r[255:224];
  assign r4    = r[256];
  assign gt    = r4 | (r3 & ((r2 > 32'd1) | ((r2 == 32'd1) & r1_nz)));
  assign eq    = ~r4 & r3 & (r2 == 32'd1) & ~r1_nz & r0;
  assign ge    = gt | eq;
endmodule
