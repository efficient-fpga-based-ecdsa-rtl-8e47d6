// tb_precompute: the precompute block with a reduced table (NPTS = 3: P, 16P, 256P). After
// reset it must build the G table in slot 0 on its own (G, 16G, 256G checked in affine form
// against independently computed values). Then G is registered again as a key in slot 2 (same
// table expected) and 2G in slot 3 (first entry 2G, different chain). Also checks busy/ready,
// that the start-up run raises no done pulse, and the number of storage writes.
module tb_precompute;
  import p256_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam fe_t G2X  = 256'h7cf27b188d034f7e8a52380304b51ac3c08969e277f21b35a60b48fc47669978;
  localparam fe_t G2Y  = 256'h07775510db8ed040293d9ac69f7430dbba7dade63ce982299e04b79d227873d1;
  localparam fe_t G16X = 256'h76a94d138a6b41858b821c629836315fcd28392eff6ca038a5eb4787e1277c6e;
  localparam fe_t G16Y = 256'ha985fe61341f260e6cb0a1b5e11e87208599a0040fc78baa0e9ddd724b8c5110;
  localparam fe_t G256X = 256'h34a2d4a3b009165987ffd1528603ed61190d0b710d6a564c2db2e35f12d0441b;
  localparam fe_t G256Y = 256'hbeaaed6a53a1e3c22bca71046e777fc0e7d766b9deddd81db424e7845e93b146;

  logic start = 1'b0, busy, done, ready, g_ready, we;
  logic [4:0] slot = '0, wslot;
  logic [1:0] widx;
  fe_t px = '0, py = '0;
  cpoint_t wdata;
  cpoint_t tbl [4][3];
  int writes = 0, dones = 0;

  precompute #(.NPTS(3), .WIN(4), .SLOT_W(5)) dut (.clk, .rst_n, .start, .slot, .px, .py, .busy,
    .done, .ready, .g_ready, .we, .wslot, .widx, .wdata);

  always @(posedge clk) begin
    if (rst_n && we) begin
      if (wslot < 4 && widx < 3) tbl[wslot[1:0]][widx] <= wdata;
      writes++;
    end
    if (rst_n && done) dones++;
  end

  function automatic fe_t mulp(fe_t x, fe_t z);
    logic [511:0] t;
    t = ({256'd0, x} * {256'd0, z}) % {256'd0, P_MOD};
    return t[255:0];
  endfunction

  task automatic expect_pt(string what, cpoint_t q, fe_t x, fe_t y);
    checks++;
    if (!(q.z2 == mulp(q.z, q.z) && q.z3 == mulp(q.z2, q.z) &&
          q.x == mulp(x, q.z2) && q.y == mulp(y, q.z3))) begin
      failures++; $display("FAIL %s", what);
    end
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    cyc = 0;
    while (!g_ready) begin @(negedge clk); cyc++; end
    $display("G table (3 points, 8 doublings): %0d cycles", cyc);
    @(negedge clk);
    checks++;
    if (!ready || writes != 3 || dones != 0) begin
      failures++; $display("FAIL after G: ready=%b writes=%0d dones=%0d", ready, writes, dones);
    end
    expect_pt("slot0[0] = G", tbl[0][0], GX, GY);
    expect_pt("slot0[1] = 16G", tbl[0][1], G16X, G16Y);
    expect_pt("slot0[2] = 256G", tbl[0][2], G256X, G256Y);
    // key G placed in slot 2 must give the same table
    px = GX; py = GY; slot = 5'd2; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    checks++;
    if (ready || !busy) begin failures++; $display("FAIL not busy after start"); end
    while (!done) @(negedge clk);
    @(negedge clk);
    expect_pt("slot2[1] = 16G", tbl[2][1], G16X, G16Y);
    expect_pt("slot2[2] = 256G", tbl[2][2], G256X, G256Y);
    // key 2G into slot 3: first entry is 2G itself
    px = G2X; py = G2Y; slot = 5'd3; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    @(negedge clk);
    expect_pt("slot3[0] = 2G", tbl[3][0], G2X, G2Y);
    checks++;
    if (tbl[3][1].x == tbl[0][1].x || writes != 9 || dones != 2) begin
      failures++; $display("FAIL key 2G: writes=%0d dones=%0d", writes, dones);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
