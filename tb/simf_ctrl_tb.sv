// simf_ctrl_tb: self-checking test of the SIMF controller on its own.
// Drives the pipeline view (ID instruction, EX/ME occupancy) and the D-cache
// handshake directly, and checks cycle by cycle: FLUSHX stalls in ID while
// EX or ME hold an older instruction, the D-cache flush is started in ME
// (waiting for flush_ready), ME is held until flush_done, every other flush
// is pulsed for exactly one cycle in WB (register file only when enabled),
// the fetch is held from ID to WB and redirected to pc+4, and FLUSHX in
// U-mode is reported illegal and not executed.
module simf_ctrl_tb;
  import simf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               id_valid, ex_valid, me_valid, rf_flush_en;
  logic [31:0]        id_instr;
  logic [VADDR_W-1:0] id_pc, redirect_pc;
  priv_e              priv;
  logic               id_is_flushx, illegal_instr, id_stall, fetch_hold, me_stall;
  logic               redirect_valid, dc_flush_start, dc_flush_ready, dc_flush_done;
  wb_flush_t          wb_flush;

  simf_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  initial begin : watchdog
    repeat (2000) @(posedge clk);
    checks++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one_flushx(input bit rf_en, input int stall_cycles, input int dc_cycles,
                            input logic [VADDR_W-1:0] pc);
    int start_seen;
    wb_flush_t expect_wb;
    rf_flush_en = rf_en;
    @(negedge clk);
    id_valid = 1; id_instr = FLUSHX_INSTR; id_pc = pc;
    for (int i = 0; i < stall_cycles; i++) begin
      ex_valid = (i % 2 == 0); me_valid = (i % 2 == 1);
      #1;
      check(id_is_flushx && id_stall && fetch_hold, "stall in ID while older instructions in EX/ME");
      check(wb_flush == '0 && !dc_flush_start, "no flush before the older instructions commit");
      @(negedge clk);
    end
    ex_valid = 0; me_valid = 0; #1;
    check(id_is_flushx && !id_stall, "leaves ID once EX and ME are empty");
    @(negedge clk);                                  // EX
    id_valid = 0;
    #1;
    check(fetch_hold && !me_stall && wb_flush == '0, "EX stage");
    @(negedge clk);                                  // ME, D-cache not ready yet
    dc_flush_ready = 0; #1;
    check(me_stall && !dc_flush_start, "ME waits for the D-cache");
    @(negedge clk);
    dc_flush_ready = 1; #1;
    check(me_stall && dc_flush_start, "O_l1dc started in ME");
    @(negedge clk);
    dc_flush_ready = 0;
    for (int i = 0; i < dc_cycles; i++) begin
      #1;
      check(me_stall && !dc_flush_start && wb_flush == '0, "ME held during the D-cache flush");
      @(negedge clk);
    end
    dc_flush_done = 1; #1;
    check(!me_stall, "ME released on flush_done");
    @(negedge clk);                                  // WB
    dc_flush_done = 0; dc_flush_ready = 1; #1;
    expect_wb = '{l1ic: 1, itlb: 1, dtlb: 1, l2tlb: 1, btb: 1, bht: 1, ras: 1, rf: rf_en};
    check(wb_flush == expect_wb, $sformatf("WB flush vector %b", wb_flush));
    check(redirect_valid && redirect_pc == pc + 4, "redirect to pc+4 in WB");
    check(fetch_hold, "fetch still held in WB");
    @(negedge clk); #1;
    check(!fetch_hold && wb_flush == '0 && !redirect_valid, "fetch released after WB");
  endtask

  initial begin
    id_valid = 0; ex_valid = 0; me_valid = 0; rf_flush_en = 0; id_instr = '0; id_pc = '0;
    priv = PRV_S; dc_flush_ready = 1; dc_flush_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // an ordinary instruction is not FLUSHX
    @(negedge clk);
    id_valid = 1; id_instr = 32'h0000_0013; ex_valid = 1; #1;   // addi x0,x0,0
    check(!id_is_flushx && !id_stall && !fetch_hold, "nop passes");
    id_valid = 0; ex_valid = 0;
    one_flushx(1'b1, 2, 5, 39'h80_0000);
    one_flushx(1'b0, 0, 1, 39'h80_0100);
    priv = PRV_M;
    one_flushx(1'b1, 3, 0, 39'h80_0200);
    // U-mode: illegal, not executed
    priv = PRV_U;
    @(negedge clk);
    id_valid = 1; id_instr = FLUSHX_INSTR; #1;
    check(illegal_instr && !id_is_flushx && !fetch_hold, "FLUSHX in U-mode is illegal");
    @(negedge clk);
    id_valid = 0;
    repeat (3) begin
      @(negedge clk); #1;
      check(wb_flush == '0 && !dc_flush_start, "illegal FLUSHX flushes nothing");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
