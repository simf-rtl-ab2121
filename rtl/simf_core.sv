// simf_core: the SIMF-extended core state. It joins the SIMF controller to
// every component of the sphere of flushing (L1 D-cache, L1 I-cache, L1
// ITLB, L1 DTLB, L2 TLB, BTB, BHT, RAS and integer register file) and to a
// 5-stage in-order instruction pipeline (IF, ID, EX, ME, WB) through which
// FLUSHX travels.
//
// Instruction flow: an instruction is in IF in the cycle the fetch port
// hands it over (fetch_valid && fetch_ready), then moves one stage per
// cycle through the ID, EX, ME and WB registers and is reported on the
// commit port in its WB cycle. Instructions other than FLUSHX are not
// executed here (the host core's datapath is not part of this design);
// they only occupy pipeline stages, which is what the SIMF ordering rules
// depend on. FLUSHX is held in ID until EX and ME are empty, holds ME while
// the D-cache flush runs, and flushes everything else in its WB cycle; the
// fetch port is closed from the cycle FLUSHX is in ID to its WB cycle, and
// redirect_valid/redirect_pc (pc+4) are given in that WB cycle.
//
// The core-side ports of the components (cache requests, TLB lookups and
// fills, branch predictor lookups and updates, register reads and writes)
// and the line-wide memory ports of the two caches are brought out, for the
// host datapath and the memory system to use. sof_status reports how much
// state each component holds. Parameter defaults are the evaluated
// configuration: 32 KiB 8-way caches with 64 B lines, 32/32/128 TLB entries,
// 28 BTB entries, 512 BHT entries, 6 RAS entries. The smaller evaluated
// configuration (16 KiB caches, no L2 TLB) is DC_SETS = IC_SETS = 32 and
// L2TLB_ENTRIES = 0.
module simf_core
  import simf_pkg::*;
#(
  parameter int unsigned DC_SETS       = 64,
  parameter int unsigned DC_WAYS       = 8,
  parameter int unsigned IC_SETS       = 64,
  parameter int unsigned IC_WAYS       = 8,
  parameter int unsigned ITLB_ENTRIES  = 32,
  parameter int unsigned DTLB_ENTRIES  = 32,
  parameter int unsigned L2TLB_ENTRIES = 128,
  parameter int unsigned BTB_ENTRIES   = 28,
  parameter int unsigned BHT_ENTRIES   = 512,
  parameter int unsigned BHT_HIST      = 8,
  parameter int unsigned RAS_DEPTH     = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  priv_e              priv,
  input  logic               rf_flush_en,
  // instruction fetch (IF) and commit (WB)
  input  logic               fetch_valid,
  output logic               fetch_ready,
  input  logic [VADDR_W-1:0] fetch_pc,
  input  logic [31:0]        fetch_instr,
  output logic               redirect_valid,
  output logic [VADDR_W-1:0] redirect_pc,
  output logic               commit_valid,
  output logic [VADDR_W-1:0] commit_pc,
  output logic [31:0]        commit_instr,
  output logic               illegal_instr,
  output logic               flushx_busy,
  // L1 D-cache, core side
  input  logic               dc_req_valid,
  output logic               dc_req_ready,
  input  logic               dc_req_we,
  input  logic [PADDR_W-1:0] dc_req_addr,
  input  logic [XLEN-1:0]    dc_req_wdata,
  input  logic [XLEN/8-1:0]  dc_req_wmask,
  output logic               dc_resp_valid,
  output logic [XLEN-1:0]    dc_resp_rdata,
  // L1 D-cache, memory side
  output logic               dmem_req_valid,
  input  logic               dmem_req_ready,
  output logic               dmem_req_we,
  output logic [PADDR_W-1:0] dmem_req_addr,
  output logic [LINE_W-1:0]  dmem_req_wdata,
  input  logic               dmem_resp_valid,
  input  logic [LINE_W-1:0]  dmem_resp_rdata,
  // L1 I-cache, core side
  input  logic               ic_req_valid,
  output logic               ic_req_ready,
  input  logic [PADDR_W-1:0] ic_req_addr,
  output logic               ic_resp_valid,
  output logic [31:0]        ic_resp_rdata,
  // L1 I-cache, memory side
  output logic               imem_req_valid,
  input  logic               imem_req_ready,
  output logic [PADDR_W-1:0] imem_req_addr,
  input  logic               imem_resp_valid,
  input  logic [LINE_W-1:0]  imem_resp_rdata,
  // TLBs: index 0 = L1 ITLB, 1 = L1 DTLB, 2 = L2 TLB
  input  tlb_req_t           tlb_req  [3],
  output tlb_resp_t          tlb_resp [3],
  // BTB
  input  logic [VADDR_W-1:0] btb_lookup_pc,
  output logic               btb_hit,
  output logic [VADDR_W-1:0] btb_target,
  input  logic               btb_update_valid,
  input  logic [VADDR_W-1:0] btb_update_pc,
  input  logic [VADDR_W-1:0] btb_update_target,
  // BHT
  input  logic [VADDR_W-1:0] bht_predict_pc,
  output logic               bht_predict_taken,
  input  logic               bht_update_valid,
  input  logic [VADDR_W-1:0] bht_update_pc,
  input  logic               bht_update_taken,
  // RAS
  input  logic               ras_push,
  input  logic [VADDR_W-1:0] ras_push_addr,
  input  logic               ras_pop,
  output logic [VADDR_W-1:0] ras_top,
  output logic               ras_empty,
  // register file
  input  logic [4:0]         rf_raddr_a,
  output logic [XLEN-1:0]    rf_rdata_a,
  input  logic [4:0]         rf_raddr_b,
  output logic [XLEN-1:0]    rf_rdata_b,
  input  logic               rf_we,
  input  logic [4:0]         rf_waddr,
  input  logic [XLEN-1:0]    rf_wdata,
  // occupancy of the sphere of flushing
  output sof_status_t        sof_status
);

  // ------------------------------------------------------------------
  // pipeline stage registers
  typedef struct packed {
    logic               valid;
    logic [VADDR_W-1:0] pc;
    logic [31:0]        instr;
  } stage_t;

  stage_t id_q, ex_q, me_q, wb_q;

  logic      id_stall, me_stall, fetch_hold, id_is_flushx;
  logic      dc_flush_start, dc_flush_ready, dc_flush_done, dc_flush_busy;
  wb_flush_t wb_flush;

  assign fetch_ready = !fetch_hold && !me_stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      id_q <= '0;
      ex_q <= '0;
      me_q <= '0;
      wb_q <= '0;
    end else if (me_stall) begin
      wb_q <= '0;                       // ME holds FLUSHX: bubble into WB
    end else begin
      wb_q <= me_q;
      me_q <= ex_q;
      ex_q <= id_stall ? '0 : id_q;
      if (!id_stall)
        id_q <= (fetch_valid && fetch_ready) ? '{valid: 1'b1, pc: fetch_pc, instr: fetch_instr} : '0;
    end
  end

  assign commit_valid = wb_q.valid;
  assign commit_pc    = wb_q.pc;
  assign commit_instr = wb_q.instr;
  assign flushx_busy  = fetch_hold;

  // ------------------------------------------------------------------
  simf_ctrl u_ctrl (
    .clk, .rst_n,
    .id_valid       (id_q.valid),
    .id_instr       (id_q.instr),
    .id_pc          (id_q.pc),
    .ex_valid       (ex_q.valid),
    .me_valid       (me_q.valid),
    .priv,
    .rf_flush_en,
    .id_is_flushx,
    .illegal_instr,
    .id_stall,
    .fetch_hold,
    .me_stall,
    .redirect_valid,
    .redirect_pc,
    .dc_flush_start,
    .dc_flush_ready,
    .dc_flush_done,
    .wb_flush
  );

  // ------------------------------------------------------------------
  logic [$clog2(DC_SETS*DC_WAYS+1)-1:0] dc_lines;
  logic [$clog2(IC_SETS*IC_WAYS+1)-1:0] ic_lines;

  l1_dcache #(.SETS(DC_SETS), .WAYS(DC_WAYS)) u_dcache (
    .clk, .rst_n,
    .req_valid      (dc_req_valid),
    .req_ready      (dc_req_ready),
    .req_we         (dc_req_we),
    .req_addr       (dc_req_addr),
    .req_wdata      (dc_req_wdata),
    .req_wmask      (dc_req_wmask),
    .resp_valid     (dc_resp_valid),
    .resp_rdata     (dc_resp_rdata),
    .flush_start    (dc_flush_start),
    .flush_ready    (dc_flush_ready),
    .flush_busy     (dc_flush_busy),
    .flush_done     (dc_flush_done),
    .mem_req_valid  (dmem_req_valid),
    .mem_req_ready  (dmem_req_ready),
    .mem_req_we     (dmem_req_we),
    .mem_req_addr   (dmem_req_addr),
    .mem_req_wdata  (dmem_req_wdata),
    .mem_resp_valid (dmem_resp_valid),
    .mem_resp_rdata (dmem_resp_rdata),
    .valid_lines    (dc_lines)
  );

  l1_icache #(.SETS(IC_SETS), .WAYS(IC_WAYS)) u_icache (
    .clk, .rst_n,
    .req_valid      (ic_req_valid),
    .req_ready      (ic_req_ready),
    .req_addr       (ic_req_addr),
    .resp_valid     (ic_resp_valid),
    .resp_rdata     (ic_resp_rdata),
    .flush          (wb_flush.l1ic),
    .mem_req_valid  (imem_req_valid),
    .mem_req_ready  (imem_req_ready),
    .mem_req_addr   (imem_req_addr),
    .mem_resp_valid (imem_resp_valid),
    .mem_resp_rdata (imem_resp_rdata),
    .valid_lines    (ic_lines)
  );

  // ------------------------------------------------------------------
  logic [$clog2(ITLB_ENTRIES+1)-1:0]  itlb_n;
  logic [$clog2(DTLB_ENTRIES+1)-1:0]  dtlb_n;
  localparam int unsigned L2TLB_N_W = (L2TLB_ENTRIES > 0) ? $clog2(L2TLB_ENTRIES + 1) : 1;
  logic [L2TLB_N_W-1:0]               l2tlb_n;

  tlb #(.ENTRIES(ITLB_ENTRIES)) u_itlb (
    .clk, .rst_n,
    .lookup_vpn (tlb_req[0].lookup_vpn), .lookup_hit (tlb_resp[0].hit), .lookup_ppn (tlb_resp[0].ppn),
    .fill_valid (tlb_req[0].fill_valid), .fill_vpn (tlb_req[0].fill_vpn), .fill_ppn (tlb_req[0].fill_ppn),
    .flush (wb_flush.itlb), .valid_entries (itlb_n)
  );
  tlb #(.ENTRIES(DTLB_ENTRIES)) u_dtlb (
    .clk, .rst_n,
    .lookup_vpn (tlb_req[1].lookup_vpn), .lookup_hit (tlb_resp[1].hit), .lookup_ppn (tlb_resp[1].ppn),
    .fill_valid (tlb_req[1].fill_valid), .fill_vpn (tlb_req[1].fill_vpn), .fill_ppn (tlb_req[1].fill_ppn),
    .flush (wb_flush.dtlb), .valid_entries (dtlb_n)
  );
  // L2TLB_ENTRIES = 0 builds the core without an L2 TLB: its port then
  // never hits and holds no state.
  if (L2TLB_ENTRIES > 0) begin : g_l2tlb
    tlb #(.ENTRIES(L2TLB_ENTRIES)) u_l2tlb (
      .clk, .rst_n,
      .lookup_vpn (tlb_req[2].lookup_vpn), .lookup_hit (tlb_resp[2].hit), .lookup_ppn (tlb_resp[2].ppn),
      .fill_valid (tlb_req[2].fill_valid), .fill_vpn (tlb_req[2].fill_vpn), .fill_ppn (tlb_req[2].fill_ppn),
      .flush (wb_flush.l2tlb), .valid_entries (l2tlb_n)
    );
  end else begin : g_no_l2tlb
    assign tlb_resp[2] = '0;
    assign l2tlb_n     = '0;
  end

  // ------------------------------------------------------------------
  logic [$clog2(BTB_ENTRIES+1)-1:0] btb_n;
  logic [$clog2(BHT_ENTRIES+1)-1:0] bht_n;
  logic [BHT_HIST-1:0]              bht_hist;
  logic [$clog2(RAS_DEPTH+1)-1:0]   ras_n;
  logic [5:0]                       rf_n;

  btb #(.ENTRIES(BTB_ENTRIES)) u_btb (
    .clk, .rst_n,
    .lookup_pc     (btb_lookup_pc),
    .lookup_hit    (btb_hit),
    .lookup_target (btb_target),
    .update_valid  (btb_update_valid),
    .update_pc     (btb_update_pc),
    .update_target (btb_update_target),
    .flush         (wb_flush.btb),
    .valid_entries (btb_n)
  );

  bht #(.ENTRIES(BHT_ENTRIES), .HIST_W(BHT_HIST)) u_bht (
    .clk, .rst_n,
    .predict_pc       (bht_predict_pc),
    .predict_taken    (bht_predict_taken),
    .update_valid     (bht_update_valid),
    .update_pc        (bht_update_pc),
    .update_taken     (bht_update_taken),
    .flush            (wb_flush.bht),
    .history          (bht_hist),
    .nonzero_counters (bht_n)
  );

  ras #(.DEPTH(RAS_DEPTH)) u_ras (
    .clk, .rst_n,
    .push      (ras_push),
    .push_addr (ras_push_addr),
    .pop       (ras_pop),
    .top       (ras_top),
    .empty     (ras_empty),
    .flush     (wb_flush.ras),
    .count     (ras_n)
  );

  regfile #(.NREGS(32)) u_rf (
    .clk, .rst_n,
    .raddr_a (rf_raddr_a), .rdata_a (rf_rdata_a),
    .raddr_b (rf_raddr_b), .rdata_b (rf_rdata_b),
    .we (rf_we), .waddr (rf_waddr), .wdata (rf_wdata),
    .flush (wb_flush.rf),
    .nonzero_regs (rf_n)
  );

  always_comb begin
    sof_status               = '0;
    sof_status.dcache_lines  = 16'(dc_lines);
    sof_status.icache_lines  = 16'(ic_lines);
    sof_status.itlb_entries  = 16'(itlb_n);
    sof_status.dtlb_entries  = 16'(dtlb_n);
    sof_status.l2tlb_entries = 16'(l2tlb_n);
    sof_status.btb_entries   = 16'(btb_n);
    sof_status.bht_counters  = 16'(bht_n);
    sof_status.bht_history   = 16'(bht_hist);
    sof_status.ras_count     = 16'(ras_n);
    sof_status.rf_nonzero    = 16'(rf_n);
  end

  // the D-cache flush runs only while FLUSHX holds ME
  assert property (@(posedge clk) disable iff (!rst_n) dc_flush_busy |-> me_stall);
  // no FLUSHX passes ID while an older instruction is in EX or ME
  assert property (@(posedge clk) disable iff (!rst_n)
    id_is_flushx && (ex_q.valid || me_q.valid) |-> id_stall);

endmodule
