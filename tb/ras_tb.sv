// ras_tb: self-checking test of the 6-entry return address stack and its
// SIMF flush. Pushes and pops are compared with a reference stack that
// keeps only the newest DEPTH entries; the flush must leave the stack empty
// (pointer reset) so that no earlier return address is predicted.
module ras_tb;
  import simf_pkg::*;

  localparam int unsigned D = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               push, pop, empty, flush;
  logic [VADDR_W-1:0] push_addr, top;
  logic [2:0]         count;

  ras dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [VADDR_W-1:0] refq [$];

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    checks++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [VADDR_W-1:0] a;
    int op;
    push = 0; pop = 0; flush = 0; push_addr = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(empty && count == 0, "empty after reset");
    for (int k = 0; k < 2000; k++) begin
      op = $urandom % 3;                 // 0,1: push  2: pop
      a  = VADDR_W'({$urandom, $urandom});
      @(negedge clk);
      push = (op != 2); pop = (op == 2); push_addr = a;
      @(negedge clk);
      push = 0; pop = 0;
      if (op != 2) begin
        refq.push_back(a);
        if (refq.size() > D) void'(refq.pop_front());
      end else if (refq.size() > 0) void'(refq.pop_back());
      check(int'(count) == refq.size(), $sformatf("count %0d vs %0d", count, refq.size()));
      if (refq.size() > 0) check(!empty && top == refq[$], "top of stack");
      else check(empty, "empty");
    end
    // fill, then SIMF flush: pointer reset, stack empty
    for (int i = 0; i < D; i++) begin
      @(negedge clk); push = 1; push_addr = VADDR_W'(100 + i);
      @(negedge clk); push = 0;
    end
    check(count == 3'(D), "full before flush");
    @(negedge clk); flush = 1; push = 1; push_addr = 7;
    @(negedge clk); flush = 0; push = 0;
    check(empty && count == 0, "empty after flush");
    @(negedge clk); pop = 1;
    @(negedge clk); pop = 0;
    check(empty && count == 0, "pop on the flushed stack stays empty");
    @(negedge clk); push = 1; push_addr = 64'h55;
    @(negedge clk); push = 0;
    check(count == 1 && top == VADDR_W'(64'h55), "first push after flush");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
