// tb_barrett_red: reduction of 512-bit values modulo n against the simulator's wide '%', on
// random values, products of scalars and extreme values; checks the latency (78 to 80 cycles).
module tb_barrett_red;
  import p256_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 1'b0, busy, done;
  logic [511:0] z = '0;
  fe_t y;
  barrett_red dut (.clk, .rst_n, .start, .z, .busy, .done, .y);

  function automatic logic [511:0] rnd512();
    for (int i = 0; i < 16; i++) rnd512[32*i +: 32] = $urandom;
  endfunction

  task automatic run(logic [511:0] v);
    logic [511:0] ref_v;
    int cyc;
    @(negedge clk);
    z = v; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    ref_v = v % {256'd0, N_ORD};
    checks++;
    if (y !== ref_v[255:0]) begin failures++; $display("FAIL z=%h y=%h ref=%h", v, y, ref_v[255:0]); end
    checks++;
    if (cyc < 77 || cyc > 81) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('0);
    run('1);
    run({256'd0, N_ORD});
    run({256'd0, N_ORD} - 1);
    run({256'd0, N_ORD - 1} * {256'd0, N_ORD - 1});
    run({256'd0, '1} * {256'd0, '1});
    for (int i = 0; i < 300; i++) begin
      run(rnd512());
      run({256'd0, rnd512()[255:0]} * {256'd0, rnd512()[255:0] % N_ORD});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
