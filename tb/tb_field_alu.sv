// tb_field_alu: all four field ALU operations (mod-p multiply, mod-n multiply, mod-p subtract,
// mod-p add) on random operands against wide integer arithmetic, with their latencies.
module tb_field_alu;
  import p256_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 1'b0, busy, done;
  alu_op_e op = ALU_MULP;
  fe_t a = '0, b = '0, y;
  field_alu dut (.clk, .rst_n, .start, .op, .a, .b, .busy, .done, .y);

  function automatic fe_t rnd_mod(fe_t md);
    logic [511:0] v;
    for (int i = 0; i < 16; i++) v[32*i +: 32] = $urandom;
    return fe_t'(v % {256'd0, md});
  endfunction

  task automatic run(alu_op_e o, fe_t x, fe_t z);
    logic [511:0] ref_v;
    int cyc, lo, hi;
    @(negedge clk);
    op = o; a = x; b = z; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    unique case (o)
      ALU_MULP: begin ref_v = ({256'd0, x} * {256'd0, z}) % {256'd0, P_MOD}; lo = 20; hi = 40; end
      ALU_MULN: begin ref_v = ({256'd0, x} * {256'd0, z}) % {256'd0, N_ORD}; lo = 85; hi = 95; end
      ALU_SUB:  begin ref_v = ({256'd0, x} + {256'd0, P_MOD} - {256'd0, z}) % {256'd0, P_MOD}; lo = 11; hi = 11; end
      default:  begin ref_v = ({256'd0, x} + {256'd0, z}) % {256'd0, P_MOD}; lo = 11; hi = 11; end
    endcase
    checks++;
    if (y !== ref_v[255:0]) begin failures++; $display("FAIL op=%s a=%h b=%h y=%h", o.name(), x, z, y); end
    checks++;
    if (cyc < lo || cyc > hi) begin failures++; $display("FAIL op=%s latency %0d", o.name(), cyc); end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 100; i++) begin
      run(ALU_MULP, rnd_mod(P_MOD), rnd_mod(P_MOD));
      run(ALU_MULN, rnd_mod(N_ORD), rnd_mod(N_ORD));
      run(ALU_SUB,  rnd_mod(P_MOD), rnd_mod(P_MOD));
      run(ALU_ADD,  rnd_mod(P_MOD), rnd_mod(P_MOD));
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
