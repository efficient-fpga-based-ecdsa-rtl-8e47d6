// tb_mult43: 43 x 43-bit products against plain multiplication, on random, extreme and
// split-boundary operands.
module tb_mult43;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [42:0] a, b;
  logic [85:0] p;
  mult43 dut (.a, .b, .p);

  task automatic try(logic [42:0] x, logic [42:0] z);
    a = x; b = z;
    #1;
    checks++;
    if (p !== {43'd0, x} * {43'd0, z}) begin failures++; $display("FAIL %h * %h = %h", x, z, p); end
  endtask

  initial begin
    try('1, '1);
    try('0, '1);
    try(43'h7ff, 43'h7ff);
    try(43'h7fffffff800, 43'h7ff);
    try(43'h7fffffff800, 43'h7fffffff800);
    for (int i = 0; i < 20000; i++) try({11'($urandom), $urandom}, {11'($urandom), $urandom});
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
