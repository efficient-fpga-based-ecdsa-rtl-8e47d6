// tb_mod_inv: inverses modulo n and modulo p, checked by a*y mod m == 1 with wide arithmetic;
// also reports the mean latency and checks every latency against 600 cycles, the top of the range the paper gives.
module tb_mod_inv;
  import p256_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint total = 0;
  int runs = 0;

  logic start = 1'b0, busy, done;
  fe_t a = '0, m = '0, y;
  mod_inv dut (.clk, .rst_n, .start, .a, .m, .busy, .done, .y);

  function automatic fe_t rnd_mod(fe_t md);
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    v = v % {256'd0, md};
    if (v == 0) v = 1;
    return v[255:0];
  endfunction

  task automatic run(fe_t x, fe_t md);
    logic [511:0] prod;
    int cyc;
    @(negedge clk);
    a = x; m = md; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    prod = ({256'd0, x} * {256'd0, y}) % {256'd0, md};
    checks++;
    if (prod != 512'd1 || y >= md) begin failures++; $display("FAIL a=%h m=%h y=%h", x, md, y); end
    checks++;
    if (cyc > 600) begin failures++; $display("FAIL latency %0d", cyc); end
    total += cyc;
    runs++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(fe_t'(1), N_ORD);
    run(N_ORD - 1, N_ORD);
    run(fe_t'(2), P_MOD);
    run(P_MOD - 1, P_MOD);
    for (int i = 0; i < 100; i++) begin
      run(rnd_mod(N_ORD), N_ORD);
      run(rnd_mod(P_MOD), P_MOD);
    end
    $display("mean latency %0d cycles over %0d inverses", total / runs, runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
