// simf_core_tb: end-to-end test of the SIMF core at its full default size
// (32 KiB 8-way L1 caches, 32/32/128-entry TLBs, 28-entry BTB, 512-entry
// BHT, 6-entry RAS, 31 registers).
//
// Each round plays one security-domain switch. First the "previous owner"
// leaves state everywhere: dirty and clean D-cache lines, I-cache lines,
// translations in all three TLBs, BTB entries, trained BHT counters and
// history, RAS entries and register values. Then an instruction stream
// with FLUSHX in it is fed through the pipeline and the test checks:
//   * the pipeline timing of the SIMF control (FLUSHX two cycles in ID
//     behind the previous instruction, i0.WB -> FLUSHX.EX, ME held for the
//     whole D-cache walk, i1.WB -> i2.IF),
//   * the D-cache walk time (one cycle per line plus the memory wait of each
//     dirty line), that every dirty line was written back with its data,
//   * that afterwards nothing is left: every status count is zero, loads
//     and fetches miss, TLB and BTB lookups miss, the BHT predicts not taken,
//     the RAS is empty, and the registers read 0 (when enabled).
// Round 2 runs with register-file flushing disabled; round 3 issues FLUSHX
// in U-mode, which must be reported illegal and flush nothing. The count of
// each mechanism (ID stall, ME stall, held fetch, write-back, redirect,
// register-file flush, illegal FLUSHX) is printed and must be non-zero.
module simf_core_tb;
  import simf_pkg::*;

  localparam int unsigned LAT    = 2;
  localparam int unsigned NLINES = 64 * 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  priv_e              priv;
  logic               rf_flush_en;
  logic               fetch_valid, fetch_ready, redirect_valid, commit_valid, illegal_instr, flushx_busy;
  logic [VADDR_W-1:0] fetch_pc, redirect_pc, commit_pc;
  logic [31:0]        fetch_instr, commit_instr;
  logic               dc_req_valid, dc_req_ready, dc_req_we, dc_resp_valid;
  logic [PADDR_W-1:0] dc_req_addr;
  logic [XLEN-1:0]    dc_req_wdata, dc_resp_rdata;
  logic [7:0]         dc_req_wmask;
  logic               dmem_req_valid, dmem_req_ready, dmem_req_we, dmem_resp_valid;
  logic [PADDR_W-1:0] dmem_req_addr;
  logic [LINE_W-1:0]  dmem_req_wdata, dmem_resp_rdata;
  logic               ic_req_valid, ic_req_ready, ic_resp_valid;
  logic [PADDR_W-1:0] ic_req_addr;
  logic [31:0]        ic_resp_rdata;
  logic               imem_req_valid, imem_req_ready, imem_resp_valid;
  logic [PADDR_W-1:0] imem_req_addr;
  logic [LINE_W-1:0]  imem_resp_rdata;
  tlb_req_t           tlb_req  [3];
  tlb_resp_t          tlb_resp [3];
  logic [VADDR_W-1:0] btb_lookup_pc, btb_target, btb_update_pc, btb_update_target;
  logic               btb_hit, btb_update_valid;
  logic [VADDR_W-1:0] bht_predict_pc, bht_update_pc;
  logic               bht_predict_taken, bht_update_valid, bht_update_taken;
  logic               ras_push, ras_pop, ras_empty;
  logic [VADDR_W-1:0] ras_push_addr, ras_top;
  logic [4:0]         rf_raddr_a, rf_raddr_b, rf_waddr;
  logic [XLEN-1:0]    rf_rdata_a, rf_rdata_b, rf_wdata;
  logic               rf_we;
  sof_status_t        sof_status;

  simf_core dut (.*);

  int unsigned dmem_writes, dmem_reads, imem_writes, imem_reads;
  line_mem_model #(.LAT(LAT)) dmem (
    .clk, .rst_n, .req_valid (dmem_req_valid), .req_ready (dmem_req_ready), .req_we (dmem_req_we),
    .req_addr (dmem_req_addr), .req_wdata (dmem_req_wdata),
    .resp_valid (dmem_resp_valid), .resp_rdata (dmem_resp_rdata),
    .writes (dmem_writes), .reads (dmem_reads)
  );
  line_mem_model #(.LAT(LAT)) imem (
    .clk, .rst_n, .req_valid (imem_req_valid), .req_ready (imem_req_ready), .req_we (1'b0),
    .req_addr (imem_req_addr), .req_wdata ('0),
    .resp_valid (imem_resp_valid), .resp_rdata (imem_resp_rdata),
    .writes (imem_writes), .reads (imem_reads)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- mechanism counters
  int n_id_stall = 0, n_me_stall = 0, n_fetch_held = 0, n_writeback = 0;
  int n_redirect = 0, n_rf_flush = 0, n_illegal = 0, n_flushx = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.id_stall) n_id_stall++;
    if (dut.me_stall) n_me_stall++;
    if (fetch_valid && !fetch_ready) n_fetch_held++;
    if (dmem_req_valid && dmem_req_ready && dmem_req_we && dut.u_dcache.flush_busy) n_writeback++;
    if (redirect_valid) n_redirect++;
    if (dut.u_ctrl.wb_flush.rf) n_rf_flush++;
    if (illegal_instr) n_illegal++;
    if (commit_valid && is_flushx(commit_instr)) n_flushx++;
  end

  // ---- instruction fetch source: NOPs with FLUSHX at one pc
  localparam logic [31:0] NOP = 32'h0000_0013;
  logic [VADDR_W-1:0] flushx_pc;
  bit                 fetch_on;
  longint unsigned    if_cyc  [logic [VADDR_W-1:0]];
  longint unsigned    wb_cyc  [logic [VADDR_W-1:0]];

  assign fetch_valid = fetch_on;
  assign fetch_instr = (fetch_pc == flushx_pc) ? FLUSHX_INSTR : NOP;

  always @(posedge clk) begin
    if (!rst_n) fetch_pc <= 39'h80_0000;
    else begin
      if (fetch_valid && fetch_ready) begin
        if_cyc[fetch_pc] = cyc;
        fetch_pc <= fetch_pc + 4;
      end
      if (redirect_valid) fetch_pc <= redirect_pc;
      if (commit_valid) wb_cyc[commit_pc] = cyc;
    end
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    checks++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- core-side helpers
  task automatic dc_access(input bit we, input logic [PADDR_W-1:0] a, input logic [XLEN-1:0] d,
                           output logic [XLEN-1:0] q, output int lat);
    longint unsigned t0;
    @(negedge clk);
    dc_req_valid = 1; dc_req_we = we; dc_req_addr = a; dc_req_wdata = d; dc_req_wmask = 8'hFF;
    while (!dc_req_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    dc_req_valid = 0;
    while (!dc_resp_valid) @(negedge clk);
    q = dc_resp_rdata; lat = int'(cyc - t0);
  endtask

  task automatic ic_fetch(input logic [PADDR_W-1:0] a, output int lat);
    longint unsigned t0;
    @(negedge clk);
    ic_req_valid = 1; ic_req_addr = a;
    while (!ic_req_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    ic_req_valid = 0;
    while (!ic_resp_valid) @(negedge clk);
    lat = int'(cyc - t0);
  endtask

  logic [XLEN-1:0] ref_mem [logic [PADDR_W-1:0]];
  int dirty_now;

  // the previous owner of the core leaves state in every component
  task automatic leave_state(input int round);
    logic [XLEN-1:0] q, d;
    logic [PADDR_W-1:0] a;
    int lat;
    dirty_now = 0;
    for (int i = 0; i < 96; i++) begin
      a = PADDR_W'(32'h0004_0000 + round * 32'h0001_0000 + i * 64 * 5);
      if (i % 3 != 0) begin
        d = {$urandom, $urandom};
        dc_access(1, a, d, q, lat);
        ref_mem[a] = d;
        dirty_now++;
      end else dc_access(0, a, '0, q, lat);
    end
    for (int i = 0; i < 40; i++) ic_fetch(PADDR_W'(32'h0800_0000 + i * 64), lat);
    for (int t = 0; t < 3; t++) begin
      for (int i = 0; i < 20; i++) begin
        @(negedge clk);
        tlb_req[t].fill_valid = 1; tlb_req[t].fill_vpn = VPN_W'(1000 * t + i); tlb_req[t].fill_ppn = PPN_W'(i + 1);
      end
      @(negedge clk);
      tlb_req[t].fill_valid = 0;
    end
    for (int i = 0; i < 10; i++) begin
      @(negedge clk);
      btb_update_valid = 1; btb_update_pc = VADDR_W'(64'h4000 + i * 4); btb_update_target = VADDR_W'(64'h9000 + i);
      bht_update_valid = 1; bht_update_pc = VADDR_W'(64'h4000 + (i % 3) * 4); bht_update_taken = 1;
      ras_push = (i < 4); ras_push_addr = VADDR_W'(64'h7000 + i * 4);
      rf_we = 1; rf_waddr = 5'(i + 1); rf_wdata = 64'h1234_0000 + 64'(i);
    end
    @(negedge clk);
    btb_update_valid = 0; bht_update_valid = 0; ras_push = 0; rf_we = 0;
    #1;
    check(sof_status.dcache_lines != 0 && sof_status.icache_lines != 0 &&
          sof_status.itlb_entries != 0 && sof_status.dtlb_entries != 0 &&
          sof_status.l2tlb_entries != 0 && sof_status.btb_entries != 0 &&
          sof_status.bht_counters != 0 && sof_status.bht_history != 0 &&
          sof_status.ras_count != 0 && sof_status.rf_nonzero != 0,
          "state left in every component before the switch");
  endtask

  // run the instruction stream through FLUSHX and check the pipeline timing
  task automatic run_flushx(input logic [VADDR_W-1:0] fpc, input bit expect_exec, input int dirty);
    logic [VADDR_W-1:0] i0, i2;
    int unsigned        w0;
    int                 me_cycles;
    w0 = dmem_writes;
    flushx_pc = fpc;
    i0 = fpc - 4; i2 = fpc + 4;
    if_cyc.delete(); wb_cyc.delete();
    @(negedge clk);
    fetch_on = 1;
    while (!(wb_cyc.exists(i2 + 8))) @(negedge clk);
    fetch_on = 0;
    repeat (4) @(negedge clk);
    check(if_cyc.exists(i0) && if_cyc.exists(fpc) && if_cyc.exists(i2), "instructions fetched");
    check(if_cyc[fpc] == if_cyc[i0] + 1, "FLUSHX fetched right after i0");
    check(wb_cyc[i0] == if_cyc[i0] + 4, "i0 takes five stages");
    if (expect_exec) begin
      // T = walk time of the D-cache; ME occupancy = T + 2 (start and done)
      me_cycles = NLINES + dirty * LAT + 2;
      // Table 4: i1.ID at IF+1, stalled until i0.WB, EX at i0.WB+1, then ME, WB
      check(wb_cyc[fpc] == wb_cyc[i0] + 1 + me_cycles + 1,
            $sformatf("FLUSHX WB at %0d, expected %0d", wb_cyc[fpc] - wb_cyc[i0], 2 + me_cycles));
      check(if_cyc[i2] == wb_cyc[fpc] + 1, "next instruction fetched the cycle after FLUSHX WB");
      check(dmem_writes - w0 == dirty, $sformatf("dirty lines written back: %0d of %0d", dmem_writes - w0, dirty));
    end else begin
      check(if_cyc[i2] == if_cyc[fpc] + 1, "illegal FLUSHX does not hold the fetch");
      check(dmem_writes == w0, "illegal FLUSHX writes nothing back");
    end
  endtask

  task automatic check_clean(input bit rf_flushed);
    logic [XLEN-1:0] q;
    int lat;
    check(sof_status.dcache_lines == 0, "D-cache empty");
    check(sof_status.icache_lines == 0, "I-cache empty");
    check(sof_status.itlb_entries == 0 && sof_status.dtlb_entries == 0 && sof_status.l2tlb_entries == 0,
          "TLBs empty");
    check(sof_status.btb_entries == 0, "BTB empty");
    check(sof_status.bht_counters == 0 && sof_status.bht_history == 0, "BHT cleared");
    check(sof_status.ras_count == 0 && ras_empty, "RAS empty");
    check((sof_status.rf_nonzero == 0) == rf_flushed, $sformatf("register file flushed=%0b", rf_flushed));
    foreach (ref_mem[a]) begin
      check(dmem.read_line({a[PADDR_W-1:6], 6'd0})[a[5:3]*64 +: 64] == ref_mem[a], "written-back data in memory");
    end
    for (int t = 0; t < 3; t++) begin
      tlb_req[t].lookup_vpn = VPN_W'(1000 * t + 3);
    end
    btb_lookup_pc = VADDR_W'(64'h4004); bht_predict_pc = VADDR_W'(64'h4004); rf_raddr_a = 5'd2;
    #1;
    check(!tlb_resp[0].hit && !tlb_resp[1].hit && !tlb_resp[2].hit, "TLB lookups miss");
    check(!btb_hit && !bht_predict_taken, "BTB misses, BHT predicts not taken");
    check((rf_rdata_a == 0) == rf_flushed, "register x2");
    foreach (ref_mem[a]) begin
      dc_access(0, a, '0, q, lat);
      check(q == ref_mem[a] && lat > 2 + LAT, "load after FLUSHX misses and sees its data");
      break;
    end
    ic_fetch(32'h0800_0000, lat);
    check(lat > 2 + LAT, "fetch after FLUSHX misses the I-cache");
  endtask

  initial begin
    priv = PRV_S; rf_flush_en = 1; fetch_on = 0; flushx_pc = '1;
    dc_req_valid = 0; dc_req_we = 0; dc_req_addr = '0; dc_req_wdata = '0; dc_req_wmask = '0;
    ic_req_valid = 0; ic_req_addr = '0;
    for (int t = 0; t < 3; t++) tlb_req[t] = '0;
    btb_lookup_pc = '0; btb_update_valid = 0; btb_update_pc = '0; btb_update_target = '0;
    bht_predict_pc = '0; bht_update_valid = 0; bht_update_pc = '0; bht_update_taken = 0;
    ras_push = 0; ras_pop = 0; ras_push_addr = '0;
    rf_raddr_a = 0; rf_raddr_b = 0; rf_we = 0; rf_waddr = 0; rf_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // round 1: supervisor mode, register-file flushing on
    leave_state(0);
    run_flushx(39'h80_0040, 1, dirty_now);
    check_clean(1);

    // round 2: register-file flushing off
    rf_flush_en = 0;
    leave_state(1);
    run_flushx(39'h80_0100, 1, dirty_now);
    check_clean(0);

    // round 3: FLUSHX in U-mode is illegal and flushes nothing
    priv = PRV_U;
    leave_state(2);
    run_flushx(39'h80_0200, 0, 0);
    #1;
    check(sof_status.dcache_lines != 0 && sof_status.btb_entries != 0 && sof_status.l2tlb_entries != 0,
          "illegal FLUSHX leaves the state");

    $display("mechanisms: id_stall=%0d me_stall=%0d fetch_held=%0d writeback=%0d redirect=%0d rf_flush=%0d illegal=%0d flushx=%0d",
             n_id_stall, n_me_stall, n_fetch_held, n_writeback, n_redirect, n_rf_flush, n_illegal, n_flushx);
    check(n_id_stall > 0, "ID stall happened");
    check(n_id_stall == 4, "two ID stall cycles per FLUSHX");
    check(n_me_stall > 0, "ME stall happened");
    check(n_fetch_held > 0, "fetch held");
    check(n_writeback > 0, "write-back during flush happened");
    check(n_redirect == 2, "redirect once per executed FLUSHX");
    check(n_rf_flush == 1, "register-file flush only when enabled");
    check(n_illegal > 0, "illegal FLUSHX happened");
    check(n_flushx == 3, "three FLUSHX committed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
