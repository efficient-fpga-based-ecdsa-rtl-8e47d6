// tb_mod_sub: modular subtraction and addition modulo p on random and boundary operands,
// checked against wide integer arithmetic; also checks the 10-cycle latency.
module tb_mod_sub;
  import p256_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 1'b0, add = 1'b0, busy, done;
  fe_t a = '0, b = '0, y;
  mod_sub dut (.clk, .rst_n, .start, .add, .a, .b, .busy, .done, .y);

  function automatic fe_t rndp();
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return fe_t'(v % {256'd0, P_MOD});
  endfunction

  task automatic run(fe_t x, fe_t z, logic ad);
    logic [257:0] ref_v;
    int cyc;
    @(negedge clk);
    a = x; b = z; add = ad; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    if (ad) ref_v = ({2'b0, x} + {2'b0, z}) % {2'b0, P_MOD};
    else    ref_v = ({2'b0, x} + {2'b0, P_MOD} - {2'b0, z}) % {2'b0, P_MOD};
    checks++;
    if (y !== ref_v[255:0]) begin
      failures++;
      $display("FAIL add=%b a=%h b=%h y=%h ref=%h", ad, x, z, y, ref_v[255:0]);
    end
    checks++;
    if (cyc != 10) begin failures++; $display("FAIL latency %0d", cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('0, '0, 1'b0);
    run('0, P_MOD - 1, 1'b0);
    run(P_MOD - 1, P_MOD - 1, 1'b1);
    run(P_MOD - 1, fe_t'(1), 1'b1);
    run(fe_t'(5), fe_t'(7), 1'b0);
    for (int i = 0; i < 300; i++) begin
      run(rndp(), rndp(), 1'b0);
      run(rndp(), rndp(), 1'b1);
    end
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
