// p256_pkg: constants and types shared by the NIST P-256 ECDSA verification datapath.
//
// Holds the P-256 domain parameters (field prime p, group order n, curve coefficient a = -3,
// generator G), the Barrett constant mu = floor(4^(2k)/n) for b = 4, k = 128, the projective
// Chudnovsky point type (X, Y, Z, Z^2, Z^3) and the operation codes of the shared field ALU and
// of the point unit. The domain parameters are the FIPS 186-4 values; the packing of a point as
// one struct with a separate "point at infinity" flag is a choice of this design.
// Every module imports the whole package, so a module that needs only the types (for example
// mod_inv or points_mem) leaves some constants unused; lint reports these as unused parameters,
// which is expected and harmless.
package p256_pkg;

  localparam int unsigned FW = 256;  // field element width

  typedef logic [FW-1:0] fe_t;

  // p = 2^256 - 2^224 + 2^192 + 2^96 - 1
  localparam fe_t P_MOD = 256'hffffffff00000001000000000000000000000000ffffffffffffffffffffffff;
  // group order n
  localparam fe_t N_ORD = 256'hffffffff00000000ffffffffffffffffbce6faada7179e84f3b9cac2fc632551;
  // generator G
  localparam fe_t GX = 256'h6b17d1f2e12c4247f8bce6e563a440f277037d812deb33a0f4a13945d898c296;
  localparam fe_t GY = 256'h4fe342e2fe1a7f9b8ee7eb4a7c0f9e162bce33576b315ececbb6406837bf51f5;

  // Barrett reduction over n with b = 4: k = floor(log4 n) + 1 = 128, mu = floor(4^(2k) / n)
  localparam int unsigned BARRETT_K = 128;
  localparam logic [257:0] BARRETT_MU =
      258'h100000000fffffffffffffffeffffffff43190552df1a6c21012ffd85eedf9bfe;

  // Projective Chudnovsky point: affine (X/Z^2, Y/Z^3), with Z^2 and Z^3 carried along
  typedef struct packed {
    fe_t x;
    fe_t y;
    fe_t z;
    fe_t z2;
    fe_t z3;
  } cpoint_t;


  // Field ALU operations
  typedef enum logic [1:0] {
    ALU_MULP = 2'd0,  // (a*b) mod p : integer multiplier + fast P-256 reduction
    ALU_MULN = 2'd1,  // (a*b) mod n : integer multiplier + Barrett reduction
    ALU_SUB  = 2'd2,  // (a-b) mod p : word-serial subtraction
    ALU_ADD  = 2'd3   // (a+b) mod p : same chain, second operand complemented
  } alu_op_e;

  // Point unit operations
  typedef enum logic [0:0] {
    PT_ADD = 1'b0,
    PT_DBL = 1'b1
  } pt_op_e;

endpackage
