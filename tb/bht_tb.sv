// bht_tb: self-checking test of the two-level adaptive predictor and its
// SIMF flush. A reference model (global history + 2-bit counters, index =
// pc word bits XOR history) is trained with the same random branch stream
// and every prediction is compared. The flush must clear the history
// register and every counter, after which all predictions are not-taken.
module bht_tb;
  import simf_pkg::*;

  localparam int unsigned N = 512, H = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [VADDR_W-1:0] predict_pc, update_pc;
  logic               predict_taken, update_valid, update_taken, flush;
  logic [H-1:0]       history;
  logic [9:0]         nonzero_counters;

  bht dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [1:0]   ref_cnt [N];
  logic [H-1:0] ref_hist;

  function automatic int ridx(logic [VADDR_W-1:0] pc);
    return int'(pc[10:2] ^ 9'(ref_hist));
  endfunction

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    checks++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [VADDR_W-1:0] pc;
    logic t;
    int nz;
    predict_pc = '0; update_valid = 0; update_pc = '0; update_taken = 0; flush = 0;
    foreach (ref_cnt[i]) ref_cnt[i] = 2'b00;
    ref_hist = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3000; k++) begin
      pc = VADDR_W'(64'h1_0000 + ({$urandom} % 64) * 4);
      t  = ($urandom % 4) != 0;                 // mostly taken
      @(negedge clk);
      predict_pc = pc; #1;
      check(predict_taken == ref_cnt[ridx(pc)][1], $sformatf("prediction %0d", k));
      update_valid = 1'b1; update_pc = pc; update_taken = t;
      @(negedge clk);
      update_valid = 1'b0;
      if (t && ref_cnt[ridx(pc)] != 2'b11) ref_cnt[ridx(pc)] += 1;
      else if (!t && ref_cnt[ridx(pc)] != 2'b00) ref_cnt[ridx(pc)] -= 1;
      ref_hist = {ref_hist[H-2:0], t};
      check(history == ref_hist, "history register");
    end
    nz = 0;
    foreach (ref_cnt[i]) nz += (ref_cnt[i] != 0);
    check(int'(nonzero_counters) == nz, $sformatf("trained counters %0d vs %0d", nonzero_counters, nz));
    check(nz > 0 && history != 0, "predictor holds state before the flush");
    // SIMF flush
    @(negedge clk);
    flush = 1'b1; update_valid = 1'b1; update_pc = pc; update_taken = 1'b1;
    @(negedge clk);
    flush = 1'b0; update_valid = 1'b0;
    check(history == '0, "history bits cleared");
    check(nonzero_counters == 0, "history table cleared");
    for (int i = 0; i < 64; i++) begin
      predict_pc = VADDR_W'(64'h1_0000 + i * 4); #1;
      check(!predict_taken, "not taken after flush");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
