// tb_p256_cmp: checks the P-256 comparator against a plain 257-bit comparison with p, on values
// at and next to p, at the field boundaries the comparator splits on, and on random values.
module tb_p256_cmp;
  import p256_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [256:0] r;
  logic ge;
  p256_cmp dut (.r, .ge);

  function automatic logic [255:0] rnd256();
    for (int i = 0; i < 8; i++) rnd256[32*i +: 32] = $urandom;
  endfunction

  task automatic try(logic [256:0] v);
    r = v;
    #1;
    checks++;
    if (ge !== (v >= {1'b0, P_MOD})) begin
      failures++;
      $display("FAIL r=%h ge=%b", v, ge);
    end
  endtask

  initial begin
    try({1'b0, P_MOD});
    for (int d = 1; d < 40; d++) begin
      try({1'b0, P_MOD} + 257'(d));
      try({1'b0, P_MOD} - 257'(d));
    end
    for (int b = 0; b < 257; b++) begin
      try({1'b0, P_MOD} ^ (257'(1) << b));     // flip every bit of p once
    end
    try({1'b0, 256'hffffffff00000002000000000000000000000000000000000000000000000000});
    try({1'b0, 256'hffffffff00000001000000000000000000000001000000000000000000000000});
    try({1'b0, 256'hffffffff00000000ffffffffffffffffffffffffffffffffffffffffffffffff});
    try({1'b1, 256'h0});
    for (int i = 0; i < 2000; i++) begin
      try({1'($urandom), rnd256()});
      try({1'b0, 32'hffffffff, rnd256()[223:0]});
      try({1'b0, 32'hffffffff, 32'($urandom % 3), rnd256()[191:0] & {96'($urandom % 2 ? '1 : '0), 96'h0} | rnd256()[95:0]});
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
