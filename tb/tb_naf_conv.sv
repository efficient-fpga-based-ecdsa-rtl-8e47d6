// tb_naf_conv: NAF (w = 2) and width-4 NAF recoding of random and extreme scalars. Checks that
// the digits sum back to k, that nonzero digits are odd and below 2^(w-1) in magnitude, that
// any w consecutive digits hold at most one nonzero, the reported length and the latency.
module tb_naf_conv;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NMAX = 257;
  logic start = 1'b0;
  logic [255:0] k = '0;
  logic busy2, done2, busy4, done4;
  logic [NMAX*2-1:0] dig2;
  logic [NMAX*4-1:0] dig4;
  logic [8:0] len2, len4;

  naf_conv #(.W(2), .NMAX(NMAX), .DW(2)) dut2 (.clk, .rst_n, .start, .k, .busy(busy2),
    .done(done2), .digits(dig2), .len(len2));
  naf_conv #(.W(4), .NMAX(NMAX), .DW(4)) dut4 (.clk, .rst_n, .start, .k, .busy(busy4),
    .done(done4), .digits(dig4), .len(len4));

  task automatic check_digits(int w, logic [255:0] kv, int len, int cyc,
                              logic signed [7:0] d [NMAX]);
    logic signed [259:0] sum;
    int last_nz;
    logic ok;
    sum = '0;
    ok = 1'b1;
    last_nz = -1000;
    for (int i = NMAX - 1; i >= 0; i--) sum = (sum <<< 1) + 260'(d[i]);
    for (int i = 0; i < NMAX; i++) begin
      if (d[i] != 0) begin
        if (d[i][0] == 1'b0) ok = 1'b0;
        if (d[i] >= (1 << (w - 1)) || d[i] <= -(1 << (w - 1))) ok = 1'b0;
        if (i - last_nz < w) ok = 1'b0;
        last_nz = i;
        if (i >= len) ok = 1'b0;
      end
    end
    if (len > 0 && d[len-1] == 0) ok = 1'b0;
    checks++;
    if (sum != {4'd0, kv} || !ok) begin failures++; $display("FAIL w=%0d k=%h", w, kv); end
    checks++;
    if (cyc != len + 2) begin failures++; $display("FAIL w=%0d latency %0d len %0d", w, cyc, len); end
  endtask

  task automatic run(logic [255:0] kv);
    int c2, c4, cyc;
    logic signed [7:0] d [NMAX];
    @(negedge clk);
    k = kv; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1; c2 = 0; c4 = 0;
    while (c2 == 0 || c4 == 0) begin
      if (done2 && c2 == 0) c2 = cyc;
      if (done4 && c4 == 0) c4 = cyc;
      @(negedge clk); cyc++;
    end
    for (int i = 0; i < NMAX; i++) d[i] = 8'($signed(dig2[2*i +: 2]));
    check_digits(2, kv, int'(len2), c2, d);
    for (int i = 0; i < NMAX; i++) d[i] = 8'($signed(dig4[4*i +: 4]));
    check_digits(4, kv, int'(len4), c4, d);
  endtask

  initial begin
    logic [255:0] v;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run('0);
    run(256'd1);
    run(256'd7);
    run('1);
    run({128'h0, {4{32'haaaaaaab}}});
    for (int i = 0; i < 100; i++) begin
      for (int j = 0; j < 8; j++) v[32*j +: 32] = $urandom;
      run(v);
    end
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
