// tb_point_unit: point doubling and addition on multiples of G, with the field ALU attached.
// Results are checked in affine form against independently computed 2G and 3G
// (x = X/Z^2, y = Y/Z^3 tested as X == x*Z^2 and Y == y*Z^3 mod p, plus Z^2 and Z^3
// consistency). Covers: doubling, addition, addition of equal points (falls back to doubling),
// P + (-P) = infinity, subtraction (neg2), infinite operands, and the latencies.
module tb_point_unit;
  import p256_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam fe_t G2X = 256'h7cf27b188d034f7e8a52380304b51ac3c08969e277f21b35a60b48fc47669978;
  localparam fe_t G2Y = 256'h07775510db8ed040293d9ac69f7430dbba7dade63ce982299e04b79d227873d1;
  localparam fe_t G3X = 256'h5ecbe4d1a6330a44c8f7ef951d4bf165e6c6b721efada985fb41661bc6e7fd6c;
  localparam fe_t G3Y = 256'h8734640c4998ff7e374b06ce1a64a2ecd82ab036384fb83d9a79b127a27d5032;

  logic    start = 1'b0, neg2 = 1'b0, p1_inf = 1'b0, p2_inf = 1'b0;
  pt_op_e  op = PT_ADD;
  cpoint_t p1 = '0, p2 = '0, r;
  logic    busy, done, r_inf, eq_dbl;
  int      eqd = 0;
  always @(posedge clk) if (rst_n && eq_dbl) eqd++;
  logic    alu_start, alu_done, alu_busy;
  alu_op_e alu_op;
  fe_t     alu_a, alu_b, alu_y;

  field_alu u_alu (.clk, .rst_n, .start(alu_start), .op(alu_op), .a(alu_a), .b(alu_b),
                   .busy(alu_busy), .done(alu_done), .y(alu_y));
  point_unit dut (.clk, .rst_n, .start, .op, .neg2, .p1, .p1_inf, .p2, .p2_inf, .busy, .done,
                  .r, .r_inf, .eq_dbl, .alu_start, .alu_op, .alu_a, .alu_b, .alu_done, .alu_y);

  function automatic fe_t mulp(fe_t x, fe_t z);
    logic [511:0] t;
    t = ({256'd0, x} * {256'd0, z}) % {256'd0, P_MOD};
    return t[255:0];
  endfunction

  function automatic cpoint_t affine(fe_t x, fe_t y);
    return '{x: x, y: y, z: fe_t'(1), z2: fe_t'(1), z3: fe_t'(1)};
  endfunction

  int cyc;
  task automatic run(pt_op_e o, cpoint_t a, logic ai, cpoint_t b, logic bi, logic ng);
    @(negedge clk);
    op = o; p1 = a; p1_inf = ai; p2 = b; p2_inf = bi; neg2 = ng; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  task automatic expect_pt(string what, fe_t x, fe_t y);
    logic ok;
    ok = !r_inf && r.z != '0 &&
         r.z2 == mulp(r.z, r.z) && r.z3 == mulp(r.z2, r.z) &&
         r.x == mulp(x, r.z2) && r.y == mulp(y, r.z3);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic expect_lat(string what, int lo, int hi);
    $display("%s: %0d cycles", what, cyc);
    checks++;
    if (cyc < lo || cyc > hi) begin failures++; $display("FAIL %s latency %0d", what, cyc); end
  endtask

  initial begin
    cpoint_t g2, g3;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 2G by doubling
    run(PT_DBL, affine(GX, GY), 1'b0, '0, 1'b1, 1'b0);
    expect_pt("2G = dbl(G)", G2X, G2Y);
    expect_lat("point double", 300, 600);
    g2 = r;
    // 3G = 2G + G (projective + affine)
    run(PT_ADD, g2, 1'b0, affine(GX, GY), 1'b0, 1'b0);
    expect_pt("3G = 2G + G", G3X, G3Y);
    expect_lat("point add", 400, 700);
    g3 = r;
    // 3G = G + 2G (both orders)
    run(PT_ADD, affine(GX, GY), 1'b0, g2, 1'b0, 1'b0);
    expect_pt("3G = G + 2G", G3X, G3Y);
    // 2G = 3G - G
    run(PT_ADD, g3, 1'b0, affine(GX, GY), 1'b0, 1'b1);
    expect_pt("2G = 3G - G", G2X, G2Y);
    // G + G: equal points, handled as a doubling
    run(PT_ADD, affine(GX, GY), 1'b0, affine(GX, GY), 1'b0, 1'b0);
    expect_pt("2G = G + G", G2X, G2Y);
    checks++;
    if (eqd != 1) begin failures++; $display("FAIL eq_dbl count %0d", eqd); end
    // 2G (projective) + 2G (other representation)
    run(PT_ADD, g2, 1'b0, affine(G2X, G2Y), 1'b0, 1'b0);
    checks++;
    if (r_inf) begin failures++; $display("FAIL 2G + 2G gave infinity"); end
    // G - G = infinity
    run(PT_ADD, affine(GX, GY), 1'b0, affine(GX, GY), 1'b0, 1'b1);
    checks++;
    if (!r_inf) begin failures++; $display("FAIL G - G not infinity"); end
    // infinity operands
    run(PT_ADD, '0, 1'b1, affine(GX, GY), 1'b0, 1'b0);
    expect_pt("inf + G", GX, GY);
    expect_lat("inf + G", 1, 4);
    run(PT_ADD, g3, 1'b0, '0, 1'b1, 1'b0);
    expect_pt("3G + inf", G3X, G3Y);
    run(PT_ADD, '0, 1'b1, affine(GX, GY), 1'b0, 1'b1);
    expect_pt("inf - G", GX, P_MOD - GY);
    run(PT_ADD, '0, 1'b1, '0, 1'b1, 1'b0);
    checks++;
    if (!r_inf) begin failures++; $display("FAIL inf + inf"); end
    run(PT_DBL, '0, 1'b1, '0, 1'b1, 1'b0);
    checks++;
    if (!r_inf) begin failures++; $display("FAIL dbl(inf)"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
