// tb_points_mem: writes random points to random (slot, index) addresses, keeps a model, and
// checks every read, including the one-cycle read latency and read-after-write.
module tb_points_mem;
  import p256_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int SLOTS = 5, NPTS = 65;
  logic we = 1'b0, re = 1'b0;
  logic [2:0] wslot = '0, rslot = '0;
  logic [6:0] widx = '0, ridx = '0;
  cpoint_t wdata = '0, rdata;
  cpoint_t model [SLOTS*NPTS];
  bit      written [SLOTS*NPTS];

  points_mem #(.SLOTS(SLOTS), .NPTS(NPTS)) dut (.clk, .we, .wslot, .widx, .wdata, .re, .rslot,
    .ridx, .rdata);

  function automatic cpoint_t rndpt();
    for (int i = 0; i < 40; i++) rndpt[32*i +: 32] = $urandom;
  endfunction

  initial begin
    int s, i, a;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      s = $urandom % SLOTS; i = $urandom % NPTS; a = s * NPTS + i;
      we = 1'b1; wslot = 3'(s); widx = 7'(i); wdata = rndpt();
      model[a] = wdata; written[a] = 1'b1;
      re = 1'b0;
      @(negedge clk);
      we = 1'b0;
      // read either the entry just written or a random written one
      if ($urandom % 2) begin s = $urandom % SLOTS; i = $urandom % NPTS; a = s * NPTS + i; end
      if (written[a]) begin
        re = 1'b1; rslot = 3'(s); ridx = 7'(i);
        @(negedge clk);
        re = 1'b0;
        checks++;
        if (rdata !== model[a]) begin failures++; $display("FAIL read slot %0d idx %0d", s, i); end
      end
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
