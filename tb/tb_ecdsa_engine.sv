// tb_ecdsa_engine: the verification engine with a full-size points storage, whose G table is
// built by the precompute block after reset. The key used is K = G (private key 1), so the G
// table serves as the key table too. Signatures come from an independent software model and
// were cross-checked with a standard library. Cases: a valid signature; the same signature on
// a changed hash; the same with s changed; a valid signature with z = r, where k1 = k2 and the
// final point addition sees two equal points (it must fall back to a doubling); r = 0, s = n
// (range check). Checks the verdicts, the range-error flag, that the fallback happened, and the
// verification latency (the paper reports about 92,000 cycles).
module tb_ecdsa_engine;
  import p256_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam fe_t E1Z = 256'hcabdbdfa02c612a9652e5e4965db9180b25e68ffcdb4deb4b278992a3967c67f;
  localparam fe_t E1R = 256'h14b8a2c95626f164e38703bd976b200e0650503e4b701ecbf29f96abf786d31f;
  localparam fe_t E1S = 256'h891618cbbda3778e3fc84682d78073e31bf73084ad530c0d880f43f5a67a0cae;
  localparam fe_t E2R = 256'h8dd0cb91f783328c76cbdbdc3106e4435e34cd7635a747f135f4457e8ecf1a6c;
  localparam fe_t E2S = 256'hca9334545b47d718259f177a52e60692c5d71be25f2719d800865024da461fb0;

  logic we, re, g_ready, pre_ready, pre_busy, pre_done;
  logic [4:0] wslot, rslot;
  logic [6:0] widx, ridx;
  cpoint_t wdata, rdata;
  logic start = 1'b0, busy, done, valid, range_err, eq_dbl;
  fe_t r = '0, s = '0, z = '0;
  int fallbacks = 0;

  precompute #(.SLOT_W(5)) u_pre (.clk, .rst_n, .start(1'b0), .slot('0), .px('0), .py('0),
    .busy(pre_busy), .done(pre_done), .ready(pre_ready), .g_ready, .we, .wslot, .widx, .wdata);
  points_mem #(.SLOTS(17), .SLOT_W(5)) u_mem (.clk, .we, .wslot, .widx, .wdata, .re, .rslot, .ridx,
    .rdata);
  ecdsa_engine #(.SLOT_W(5)) u_eng (.clk, .rst_n, .start, .slot(5'd0), .r, .s, .z, .busy, .done,
    .valid, .range_err, .eq_dbl, .re, .rslot, .ridx, .rdata);

  always @(posedge clk) if (rst_n && eq_dbl) fallbacks++;

  int cyc;
  task automatic verify(string what, fe_t rv, fe_t sv, fe_t zv, logic exp_valid, logic exp_rerr);
    @(negedge clk);
    r = rv; s = sv; z = zv; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("%s: valid=%b range_err=%b, %0d cycles", what, valid, range_err, cyc);
    checks++;
    if (valid !== exp_valid || range_err !== exp_rerr) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    while (!g_ready) @(negedge clk);
    verify("valid signature", E1R, E1S, E1Z, 1'b1, 1'b0);
    checks++;
    if (cyc < 40000 || cyc > 110000) begin failures++; $display("FAIL latency %0d", cyc); end
    verify("changed hash", E1R, E1S, E1Z ^ 256'h1, 1'b0, 1'b0);
    verify("changed s", E1R, E1S + 256'h10, E1Z, 1'b0, 1'b0);
    verify("z = r, equal points in final addition", E2R, E2S, E2R, 1'b1, 1'b0);
    checks++;
    if (fallbacks == 0) begin failures++; $display("FAIL equal-point fallback never taken"); end
    verify("r = 0", '0, E1S, E1Z, 1'b0, 1'b1);
    verify("s = n", E1R, N_ORD, E1Z, 1'b0, 1'b1);
    $display("equal-point fallbacks: %0d", fallbacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (700000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
