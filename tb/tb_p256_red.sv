// tb_p256_red: reduction of 512-bit values modulo p against the simulator's wide '%', on
// random values, products of field elements and extreme values; checks the latency
// (12 cycles plus one per correction, at most 22) and that the mean stays at or below 19.
module tb_p256_red;
  import p256_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, total = 0, runs = 0;

  logic start = 1'b0, busy, done;
  logic [511:0] c = '0;
  fe_t y;
  p256_red dut (.clk, .rst_n, .start, .c, .busy, .done, .y);

  function automatic logic [511:0] rnd512();
    for (int i = 0; i < 16; i++) rnd512[32*i +: 32] = $urandom;
  endfunction

  task automatic run(logic [511:0] v);
    logic [511:0] ref_v;
    int cyc;
    @(negedge clk);
    c = v; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    ref_v = v % {256'd0, P_MOD};
    checks++;
    if (y !== ref_v[255:0]) begin failures++; $display("FAIL c=%h y=%h", v, y); end
    checks++;
    if (cyc < 12 || cyc > 22) begin failures++; $display("FAIL latency %0d", cyc); end
    total += cyc;
    runs++;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('0);
    run('1);
    run({256'd0, P_MOD});
    run({256'd0, P_MOD - 1} * {256'd0, P_MOD - 1});
    run({256'hffffffff_00000000_00000000_00000000_00000000_00000000_00000000_00000000, 256'd0});
    for (int i = 0; i < 400; i++) begin
      logic [255:0] x, z;
      x = rnd512()[255:0] % P_MOD;
      z = rnd512()[255:0] % P_MOD;
      run({256'd0, x} * {256'd0, z});
      run(rnd512());
    end
    // on average the per-step corrections keep the latency near the paper's 19 cycles
    $display("mean latency %0d cycles", total / runs);
    checks++;
    if (total / runs > 19) begin failures++; $display("FAIL mean latency %0d", total / runs); end
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
