// tb_ecdsa_fabric_top: end-to-end run of the whole design at its default parameters.
// After reset the G table is built; then two public keys (random private keys d1, d2) are
// registered in key slots 0 and 3, and G itself (private key 1) in slot 15 while a
// verification runs at the same time. Signatures from an independent software model:
//   T1, T3 by d1 and T2 by d2 (valid); T2 checked against slot 0 (wrong key: invalid);
//   T1 with a changed hash (invalid); a d = 1 signature with z = r, whose final point addition
//   adds two equal points (valid, needs the doubling fallback); r = n (range check).
// Counts each mechanism (G table build, key registration, verification overlapping a
// registration, accept, reject, range rejection, equal-point fallback, generic-engine accept and
// reject while the G table is still being built) and fails any that never happened. The
// generic engine verifies T1 and T2 against key d1 directly, without a table. Also checks the
// verification and registration latencies against the paper's figures within a wide margin.
module tb_ecdsa_fabric_top;
  import p256_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam fe_t K1X = 256'h77c552ac5c9dfd5f7b358dc2b7386adce7948e099d045f7f551bf78257170e8d;
  localparam fe_t K1Y = 256'hbca9fbce99cfc1f420283957fedad27ac005001f10516a162b9806330d27256f;
  localparam fe_t K2X = 256'h34bd6e33388c49e6c136f6d1c5b98933c7e728e58e8bff31849e444b4efe3ed8;
  localparam fe_t K2Y = 256'heac33303baf8df855fe2bf68cbefe75015b473282d4eb696485e7cd46732fb62;
  localparam fe_t T1Z = 256'h8c985b2d9224b0990ca78846b48567f739e5deb2fc2ab7f81f16fc379107e55d;
  localparam fe_t T1R = 256'h548fba47167aa166d7890814551b77e3cf499a0d963901d5aa0979443ef1223c;
  localparam fe_t T1S = 256'hf1633d3ca189a6cbd4a8e4e96a181acadedbe5fb9d103c3979e2109eb482aa1d;
  localparam fe_t T2Z = 256'h6fb90cc8cb8e99c232eb7413bf11f03efb72d2ec34d6c2d929844a7f173b5d5e;
  localparam fe_t T2R = 256'hbf85eb6886a1c0fcb9a03211e4ec7f4b33ab88d2462527c64f73cac6da522ca9;
  localparam fe_t T2S = 256'h6df5476ffab73929ccf72f7bd53fec27fea6bff5a1d495a84e251ba6b243c278;
  localparam fe_t T3Z = 256'h295b8acee98738802113fbea49c6f643f97994b51d37ae60fecfafa4f7e11729;
  localparam fe_t T3R = 256'hb0bb72eb8293b39aaa3cb2267dfc3c07ec9b450897d76e88e3e78c4719e03bef;
  localparam fe_t T3S = 256'h41f85db0f52d1ca4b4a0d218cdd6a096d849d915cc4377d53fb7f00cc97b0c27;
  localparam fe_t E2R = 256'h8dd0cb91f783328c76cbdbdc3106e4435e34cd7635a747f135f4457e8ecf1a6c;
  localparam fe_t E2S = 256'hca9334545b47d718259f177a52e60692c5d71be25f2719d800865024da461fb0;

  logic       g_ready, key_ready, key_busy, key_done, ver_busy, ver_done, ver_valid, ver_range_err, ver_eq_dbl;
  logic       key_start = 1'b0, ver_start = 1'b0;
  logic [3:0] key_slot = '0, ver_slot = '0;
  fe_t        key_x = '0, key_y = '0, ver_r = '0, ver_s = '0, ver_z = '0;
  logic       gen_start = 1'b0, gen_busy, gen_done, gen_valid, gen_range_err, gen_eq_dbl;
  fe_t        gen_qx = '0, gen_qy = '0, gen_r = '0, gen_s = '0, gen_z = '0;

  ecdsa_fabric_top dut (.clk, .rst_n, .g_ready, .key_start, .key_slot, .key_x, .key_y, .key_ready, .key_busy,
    .key_done, .ver_start, .ver_slot, .ver_r, .ver_s, .ver_z, .ver_busy, .ver_done, .ver_valid,
    .ver_range_err, .ver_eq_dbl, .gen_start, .gen_qx, .gen_qy, .gen_r, .gen_s, .gen_z, .gen_busy,
    .gen_done, .gen_valid, .gen_range_err, .gen_eq_dbl);

  // mechanism counters
  int n_gtable = 0, n_keys = 0, n_accept = 0, n_reject = 0, n_range = 0, n_eqdbl = 0, n_overlap = 0;
  int n_gen_accept = 0, n_gen_reject = 0, n_gen_before_g = 0;
  always @(posedge clk) if (rst_n) begin
    if (key_done) n_keys++;
    if (ver_done && ver_valid) n_accept++;
    if (ver_done && !ver_valid && !ver_range_err) n_reject++;
    if (ver_done && ver_range_err) n_range++;
    if (ver_eq_dbl) n_eqdbl++;
    if (ver_busy && !key_ready && g_ready) n_overlap++;
    if (gen_done && gen_valid) n_gen_accept++;
    if (gen_done && !gen_valid) n_gen_reject++;
    if (gen_busy && !g_ready) n_gen_before_g++;
  end

  task automatic register_key(logic [3:0] sl, fe_t x, fe_t y, logic wait_done);
    @(negedge clk);
    while (!key_ready) @(negedge clk);
    key_slot = sl; key_x = x; key_y = y; key_start = 1'b1;
    @(negedge clk);
    key_start = 1'b0;
    if (wait_done) begin
      int cyc = 1;
      while (!key_done) begin @(negedge clk); cyc++; end
      $display("key slot %0d registered in %0d cycles", sl, cyc);
      checks++;
      if (cyc < 60000 || cyc > 180000) begin failures++; $display("FAIL key latency %0d", cyc); end
    end
  endtask

  task automatic verify(string what, logic [3:0] sl, fe_t rv, fe_t sv, fe_t zv, logic exp_valid);
    int cyc;
    @(negedge clk);
    while (ver_busy) @(negedge clk);
    ver_slot = sl; ver_r = rv; ver_s = sv; ver_z = zv; ver_start = 1'b1;
    @(negedge clk);
    ver_start = 1'b0;
    cyc = 1;
    while (!ver_done) begin @(negedge clk); cyc++; end
    $display("%s: valid=%b, %0d cycles", what, ver_valid, cyc);
    checks++;
    if (ver_valid !== exp_valid) begin failures++; $display("FAIL %s", what); end
    if (!ver_range_err) begin
      checks++;
      if (cyc < 40000 || cyc > 120000) begin failures++; $display("FAIL %s latency %0d", what, cyc); end
    end
    @(negedge clk);  // let the monitor see the done pulse
  endtask

  // generic engine: key given directly, no table needed
  task automatic gen_verify(string what, fe_t kx, fe_t ky, fe_t rv, fe_t sv, fe_t zv, logic exp_valid);
    int cyc;
    @(negedge clk);
    while (gen_busy) @(negedge clk);
    gen_qx = kx; gen_qy = ky; gen_r = rv; gen_s = sv; gen_z = zv; gen_start = 1'b1;
    @(negedge clk);
    gen_start = 1'b0;
    cyc = 1;
    while (!gen_done) begin @(negedge clk); cyc++; end
    $display("generic %s: valid=%b, %0d cycles", what, gen_valid, cyc);
    checks += 2;
    if (gen_valid !== exp_valid) begin failures++; $display("FAIL generic %s", what); end
    if (cyc < 100000 || cyc > 260000) begin failures++; $display("FAIL generic %s latency %0d", what, cyc); end
    @(negedge clk);
  endtask

  task automatic mech(string what, int n);
    $display("mechanism %-28s %0d", what, n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism %s never happened", what); end
  endtask

  initial begin
    int cyc;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // the generic engine works while the tables are still being built
    fork
      begin
        gen_verify("T1 with key d1", K1X, K1Y, T1R, T1S, T1Z, 1'b1);
        gen_verify("T2 against key d1", K1X, K1Y, T2R, T2S, T2Z, 1'b0);
      end
    join_none
    cyc = 0;
    while (!g_ready) begin @(negedge clk); cyc++; end
    n_gtable++;
    checks++;
    if (key_busy || !key_ready) begin failures++; $display("FAIL key port not free after G table"); end
    $display("G table built in %0d cycles", cyc);
    register_key(4'd0, K1X, K1Y, 1'b1);
    register_key(4'd3, K2X, K2Y, 1'b1);
    verify("T1 with key d1", 4'd0, T1R, T1S, T1Z, 1'b1);
    // register G in slot 15 while T2 is being verified
    register_key(4'd15, GX, GY, 1'b0);
    verify("T2 with key d2 (during a key registration)", 4'd3, T2R, T2S, T2Z, 1'b1);
    while (!key_ready) @(negedge clk);
    verify("T3 with key d1", 4'd0, T3R, T3S, T3Z, 1'b1);
    verify("T2 against the wrong key", 4'd0, T2R, T2S, T2Z, 1'b0);
    verify("T1 with a changed hash", 4'd0, T1R, T1S, T1Z ^ (256'h1 << 200), 1'b0);
    verify("z = r with key G (equal points)", 4'd15, E2R, E2S, E2R, 1'b1);
    verify("r = n", 4'd0, N_ORD, T1S, T1Z, 1'b0);
    while (gen_busy) @(negedge clk);
    @(negedge clk);
    mech("generic accept", n_gen_accept);
    mech("generic reject", n_gen_reject);
    mech("generic before G table", n_gen_before_g);
    mech("G table build", n_gtable);
    mech("key registration", n_keys);
    mech("verify during registration", n_overlap);
    mech("signature accepted", n_accept);
    mech("signature rejected", n_reject);
    mech("range-check rejection", n_range);
    mech("equal-point doubling", n_eqdbl);
    checks++;
    if (n_keys != 3 || n_accept != 4 || n_reject != 2 || n_range != 1) begin
      failures++; $display("FAIL counts keys=%0d acc=%0d rej=%0d range=%0d", n_keys, n_accept, n_reject, n_range);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
