// mult43: 43 x 43-bit multiplier built only from multipliers that fit a 27x18 DSP slice.
//
// Level 1 splits each operand into an 11-bit low part and a 32-bit high part, so
//   A*B = a0*b0 + (a0*b1 + a1*b0)*2^11 + a1*b1*2^22.
// Level 2 splits the 32-bit parts into 16-bit halves: a1*b1 uses one Karatsuba-Ofman step
// (three 16/17-bit products) and each 11 x 32 product is two 16 x 12 products, recombined as
// r_mid = r_low[27:16] + r_high[11:0] (13 bits), r_high' = r_high[26:12] + r_mid[12] and
// result = {r_high', r_mid[11:0], r_low[15:0]}. Purely combinational; the caller registers the
// 86-bit product. The two-level split and the 11 x 32 recombination steps follow the paper.
module mult43 (
  input  logic [42:0] a,
  input  logic [42:0] b,
  output logic [85:0] p
);
  // 11 x 32 product from two 16 x 12 products
  function automatic logic [42:0] mul11x32(input logic [10:0] x, input logic [31:0] q);
    logic [11:0] x12;
    logic [27:0] rl;
    logic [26:0] rh;
    logic [12:0] rmid;
    logic [14:0] rhi;
    x12  = {1'b0, x};
    rl   = q[15:0] * x12;
    rh   = q[31:16] * x12;
    rmid = {1'b0, rl[27:16]} + {1'b0, rh[11:0]};
    rhi  = rh[26:12] + {14'd0, rmid[12]};
    return {rhi, rmid[11:0], rl[15:0]};
  endfunction

  // 32 x 32 product by one Karatsuba-Ofman split
  function automatic logic [63:0] kmul32(input logic [31:0] x, input logic [31:0] q);
    logic [31:0] hh, ll;
    logic [16:0] sx, sy;
    logic [33:0] mm;
    hh = x[31:16] * q[31:16];
    ll = x[15:0] * q[15:0];
    sx = {1'b0, x[15:0]} + {1'b0, x[31:16]};
    sy = {1'b0, q[15:0]} + {1'b0, q[31:16]};
    mm = sx * sy;
    return ({32'd0, hh} << 32) + ({30'd0, mm - {2'b00, hh} - {2'b00, ll}} << 16) + {32'd0, ll};
  endfunction

  logic [10:0] a0, b0;
  logic [31:0] a1, b1;
  logic [21:0] p00;
  logic [42:0] p01, p10;
  logic [63:0] p11;

  always_comb begin
    a0  = a[10:0];  a1 = a[42:11];
    b0  = b[10:0];  b1 = b[42:11];
    p00 = a0 * b0;
    p01 = mul11x32(a0, b1);
    p10 = mul11x32(b0, a1);
    p11 = kmul32(a1, b1);
    p   = {64'd0, p00}
        + ({42'd0, {1'b0, p01} + {1'b0, p10}} << 11)
        + ({22'd0, p11} << 22);
  end
endmodule
