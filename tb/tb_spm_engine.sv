// tb_spm_engine: checks the generic (simultaneous point multiplication) verification engine
// with signatures from an independent software model of P-256: two valid signatures under two
// keys, a signature against the wrong key, a changed hash, r = 0 (range check) and a signature
// with key G and z = r, where the first step of the joint loop adds two equal points (counted
// through eq_dbl). Also checks the latency against a wide window around the paper's figure.
module tb_spm_engine;
  import p256_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_eq = 0;

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
  localparam fe_t E2R = 256'h8dd0cb91f783328c76cbdbdc3106e4435e34cd7635a747f135f4457e8ecf1a6c;
  localparam fe_t E2S = 256'hca9334545b47d718259f177a52e60692c5d71be25f2719d800865024da461fb0;

  logic start = 1'b0, busy, done, valid, range_err, eq_dbl;
  fe_t  qx = '0, qy = '0, r = '0, s = '0, z = '0;

  spm_engine dut (.clk, .rst_n, .start, .qx, .qy, .r, .s, .z, .busy, .done, .valid, .range_err,
                  .eq_dbl);

  always @(posedge clk) if (rst_n && eq_dbl) n_eq++;

  task automatic verify(string what, fe_t kx, fe_t ky, fe_t rv, fe_t sv, fe_t zv,
                        logic exp_valid, logic exp_range);
    int cyc;
    @(negedge clk);
    qx = kx; qy = ky; r = rv; s = sv; z = zv; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("%s: valid=%b range_err=%b, %0d cycles", what, valid, range_err, cyc);
    checks++;
    if (valid !== exp_valid || range_err !== exp_range) begin failures++; $display("FAIL %s", what); end
    if (!exp_range) begin
      checks++;
      if (cyc < 100000 || cyc > 260000) begin failures++; $display("FAIL %s latency %0d", what, cyc); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    verify("T1 with key d1", K1X, K1Y, T1R, T1S, T1Z, 1'b1, 1'b0);
    verify("T2 with key d2", K2X, K2Y, T2R, T2S, T2Z, 1'b1, 1'b0);
    verify("T2 against the wrong key", K1X, K1Y, T2R, T2S, T2Z, 1'b0, 1'b0);
    verify("T1 with a changed hash", K1X, K1Y, T1R, T1S, T1Z ^ 256'h1, 1'b0, 1'b0);
    verify("r = 0", K1X, K1Y, '0, T1S, T1Z, 1'b0, 1'b1);
    verify("z = r with key G (equal points)", GX, GY, E2R, E2S, E2R, 1'b1, 1'b0);
    @(negedge clk);
    $display("equal-point fallbacks: %0d", n_eq);
    checks++;
    if (n_eq == 0) begin failures++; $display("FAIL equal-point path never taken"); end
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
