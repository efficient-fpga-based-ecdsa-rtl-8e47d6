// tb_int_mult: 256 x 256-bit products against the simulator's wide multiplication, on
// random, all-ones and sparse operands; also checks the 11-cycle latency.
module tb_int_mult;
  import p256_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 1'b0, busy, done;
  fe_t a = '0, b = '0;
  logic [511:0] y;
  int_mult dut (.clk, .rst_n, .start, .a, .b, .busy, .done, .y);

  function automatic fe_t rnd256();
    for (int i = 0; i < 8; i++) rnd256[32*i +: 32] = $urandom;
  endfunction

  task automatic run(fe_t x, fe_t z);
    logic [511:0] ref_v;
    int cyc;
    @(negedge clk);
    a = x; b = z; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    ref_v = {256'd0, x} * {256'd0, z};
    checks++;
    if (y !== ref_v) begin failures++; $display("FAIL a=%h b=%h", x, z); end
    checks++;
    if (cyc != 11) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('1, '1);
    run('0, '1);
    run(fe_t'(1), P_MOD);
    run({8{32'hffff0000}}, {8{32'h0000ffff}});
    for (int i = 0; i < 300; i++) run(rnd256(), rnd256());
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
