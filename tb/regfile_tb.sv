// regfile_tb: self-checking test of the integer register file and its
// SIMF flush. Random writes and reads are compared with a reference array;
// x0 must read 0; the flush must clear all 31 registers in one cycle.
module regfile_tb;
  import simf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [4:0]      raddr_a, raddr_b, waddr;
  logic [XLEN-1:0] rdata_a, rdata_b, wdata;
  logic            we, flush;
  logic [5:0]      nonzero_regs;

  regfile dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [XLEN-1:0] refr [32];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    checks++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    raddr_a = 0; raddr_b = 0; waddr = 0; wdata = 0; we = 0; flush = 0;
    foreach (refr[i]) refr[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 1000; k++) begin
      @(negedge clk);
      we = 1'b1; waddr = 5'($urandom); wdata = {$urandom, $urandom} | 64'h1;
      @(negedge clk);
      we = 1'b0;
      if (waddr != 0) refr[waddr] = wdata;
      raddr_a = 5'($urandom); raddr_b = 5'($urandom); #1;
      check(rdata_a == refr[raddr_a] && rdata_b == refr[raddr_b], "read ports");
    end
    for (int i = 1; i < 32; i++) begin
      @(negedge clk); we = 1; waddr = 5'(i); wdata = 64'(i) << 20 | 64'h1;
      @(negedge clk); we = 0;
    end
    check(nonzero_regs == 31, "all registers hold data");
    @(negedge clk); flush = 1; we = 1; waddr = 5; wdata = 64'hdead;
    @(negedge clk); flush = 0; we = 0;
    check(nonzero_regs == 0, "all registers cleared by the flush");
    for (int i = 0; i < 32; i++) begin
      raddr_a = 5'(i); #1;
      check(rdata_a == '0, $sformatf("x%0d cleared", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
