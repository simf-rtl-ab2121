// flush_overhead_tb: the flush-overhead case study run on the SIMF core at
// its full default size. A cache-sized (32 KiB) contiguous buffer is
// written, so every one of the 512 D-cache lines is valid and dirty, and a
// single FLUSHX is then executed. The test measures the FLUSHX latency from
// fetch to write-back and its dynamic instruction count (one), and checks
// the latency against the walk arithmetic: 512 lines x (1 + memory wait)
// plus the fixed pipeline cycles (IF, ID, EX, two ME hand-over cycles, WB).
// It also checks that all 512 lines reached memory with their data and that
// the cache is empty afterwards. The memory wait LAT is a property of the
// behavioural memory; the flush time scales as 512 x (1 + LAT).
module flush_overhead_tb;
  import simf_pkg::*;

  localparam int unsigned LAT    = 2;
  localparam int unsigned NLINES = 512;

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
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    checks++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // FLUSHX is fetched once at FX_PC; nothing else is fetched
  localparam logic [VADDR_W-1:0] FX_PC = 39'h80_0000;
  logic             fx_sent;
  bit               go = 0;
  longint unsigned  t_if, t_wb;
  int               n_commit;
  assign fetch_valid = go && !fx_sent;
  assign fetch_pc    = FX_PC;
  assign fetch_instr = FLUSHX_INSTR;
  always @(posedge clk) begin
    if (!rst_n) begin fx_sent <= 0; n_commit = 0; end
    else begin
      if (fetch_valid && fetch_ready) begin fx_sent <= 1; t_if = cyc; end
      if (commit_valid) begin n_commit++; t_wb = cyc; end
    end
  end

  logic [XLEN-1:0] buf_ref [NLINES];

  initial begin
    logic [PADDR_W-1:0] a;
    priv = PRV_M; rf_flush_en = 0;
    dc_req_valid = 0; dc_req_we = 0; dc_req_addr = '0; dc_req_wdata = '0; dc_req_wmask = '0;
    ic_req_valid = 0; ic_req_addr = '0;
    for (int t = 0; t < 3; t++) tlb_req[t] = '0;
    btb_lookup_pc = '0; btb_update_valid = 0; btb_update_pc = '0; btb_update_target = '0;
    bht_predict_pc = '0; bht_update_valid = 0; bht_update_pc = '0; bht_update_taken = 0;
    ras_push = 0; ras_pop = 0; ras_push_addr = '0;
    rf_raddr_a = 0; rf_raddr_b = 0; rf_we = 0; rf_waddr = 0; rf_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < NLINES; i++) begin
      a = PADDR_W'(32'h0100_0000 + i * 64);
      buf_ref[i] = {$urandom, $urandom};
      @(negedge clk);
      dc_req_valid = 1; dc_req_we = 1; dc_req_addr = a; dc_req_wdata = buf_ref[i]; dc_req_wmask = 8'hFF;
      while (!dc_req_ready) @(negedge clk);
      @(negedge clk);
      dc_req_valid = 0;
      while (!dc_resp_valid) @(negedge clk);
    end
    check(sof_status.dcache_lines == NLINES, "buffer fills the whole D-cache");
    @(negedge clk);
    go = 1;                       // now fetch the FLUSHX
    while (n_commit == 0) @(negedge clk);
    repeat (2) @(negedge clk);
    // IF, ID, EX, then ME = walk + 2, then WB
    $display("FLUSHX: %0d cycles fetch to write-back, %0d dynamic instruction(s), %0d lines written back",
             t_wb - t_if, n_commit, dmem_writes);
    check(int'(t_wb - t_if) == 3 + NLINES * (1 + LAT) + 2, $sformatf("FLUSHX latency %0d", t_wb - t_if));
    check(n_commit == 1, "one dynamic instruction");
    check(dmem_writes == NLINES, "every line written back");
    check(sof_status.dcache_lines == 0, "D-cache empty");
    for (int i = 0; i < NLINES; i++)
      check(dmem.read_line(PADDR_W'(32'h0100_0000 + i * 64))[63:0] == buf_ref[i], "buffer data in memory");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
