// btb_tb: self-checking test of the 28-entry BTB and its SIMF flush.
// Fills all entries, checks targets against a reference list, checks
// round-robin replacement across the non-power-of-two size, flushes and
// checks that every lookup misses and no entry stays valid.
module btb_tb;
  import simf_pkg::*;

  localparam int unsigned N = 28;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [VADDR_W-1:0] lookup_pc, lookup_target, update_pc, update_target;
  logic               lookup_hit, update_valid, flush;
  logic [4:0]         valid_entries;

  btb dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    checks++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic upd(input logic [VADDR_W-1:0] pc, input logic [VADDR_W-1:0] tgt);
    @(negedge clk);
    update_valid = 1'b1; update_pc = pc; update_target = tgt;
    @(negedge clk);
    update_valid = 1'b0;
  endtask

  initial begin
    logic [VADDR_W-1:0] pcs [N+1], tgts [N+1];
    lookup_pc = '0; update_valid = 0; update_pc = '0; update_target = '0; flush = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i <= N; i++) begin
      pcs[i]  = VADDR_W'(64'h0000_4000 + i * 8 + ({$urandom} % 16) * 1024);
      tgts[i] = VADDR_W'({$urandom, $urandom});
    end
    for (int i = 0; i < N; i++) upd(pcs[i], tgts[i]);
    check(valid_entries == 5'(N), $sformatf("btb full (%0d)", valid_entries));
    for (int i = 0; i < N; i++) begin
      lookup_pc = pcs[i]; #1;
      check(lookup_hit && lookup_target == tgts[i], $sformatf("lookup %0d", i));
    end
    upd(pcs[N], tgts[N]);                 // replaces entry 0
    lookup_pc = pcs[0]; #1;   check(!lookup_hit, "oldest entry replaced");
    lookup_pc = pcs[N]; #1;   check(lookup_hit && lookup_target == tgts[N], "new entry");
    lookup_pc = pcs[N-1]; #1; check(lookup_hit && lookup_target == tgts[N-1], "last entry kept");
    // SIMF flush, with an update in the same cycle that must be dropped
    @(negedge clk);
    flush = 1'b1; update_valid = 1'b1; update_pc = pcs[0]; update_target = tgts[0];
    @(negedge clk);
    flush = 1'b0; update_valid = 1'b0;
    check(valid_entries == 0, "btb empty after flush");
    for (int i = 0; i <= N; i++) begin
      lookup_pc = pcs[i]; #1;
      check(!lookup_hit, $sformatf("lookup %0d misses after flush", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
