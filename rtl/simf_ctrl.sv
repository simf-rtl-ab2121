// simf_ctrl: SIMF control. It decodes the FLUSHX instruction and schedules
// its flushing operations in a classic 5-stage in-order pipeline
// (IF, ID, EX, ME, WB).
//
// Scheduling (as late as possible, respecting the dependency graph):
//   * FLUSHX waits in ID until every older instruction has committed: it
//     leaves ID in the cycle in which EX and ME are empty (the last older
//     instruction may be in WB in that cycle), so i0.WB -> i1.EX.
//   * In ME it starts the L1 D-cache flush O_l1dc (write back dirty lines,
//     reset valid/dirty bits) and holds ME until the D-cache reports done:
//     ME takes about alpha * #CL cycles.
//   * In WB, one cycle, it pulses all remaining operations at once:
//     O_l1ic, O_itlb, O_dtlb, O_l2tlb, O_btb, O_bht, O_ras and, when
//     rf_flush_en is set, O_rf. O_l1ic and O_dtlb therefore come strictly
//     after O_l1dc (the RAW and WAR dependences on the D-cache flush).
//   * From the cycle FLUSHX is decoded in ID until its WB cycle the fetch
//     is held (younger instructions are delayed), and in the WB cycle a
//     redirect to pc+4 is issued, so the next instruction is fetched in the
//     cycle after FLUSHX's WB and observes the flushed state (i1.WB -> i2.IF).
// Once FLUSHX has left ID there is no way to cancel it, so the whole flush
// is atomic with respect to interrupts. FLUSHX is privileged: decoded in
// U-mode it is reported on illegal_instr and not executed. The encoding
// (custom-0 opcode), the privilege check and the rf_flush_en input are this
// design's choices; SIMF specifies that FLUSHX is used in kernel space and
// that register-file flushing can be disabled.
module simf_ctrl
  import simf_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // pipeline view
  input  logic               id_valid,
  input  logic [31:0]        id_instr,
  input  logic [VADDR_W-1:0] id_pc,
  input  logic               ex_valid,     // an older instruction is in EX
  input  logic               me_valid,     // an older instruction is in ME
  input  priv_e              priv,
  input  logic               rf_flush_en,
  // pipeline control
  output logic               id_is_flushx, // legal FLUSHX in ID
  output logic               illegal_instr,// FLUSHX in ID outside S/M mode
  output logic               id_stall,     // hold FLUSHX in ID (bubble to EX)
  output logic               fetch_hold,   // delay younger instructions
  output logic               me_stall,     // hold FLUSHX in ME
  output logic               redirect_valid,
  output logic [VADDR_W-1:0] redirect_pc,
  // flush commands
  output logic               dc_flush_start,
  input  logic               dc_flush_ready,
  input  logic               dc_flush_done,
  output wb_flush_t          wb_flush
);

  typedef enum logic [2:0] {F_IDLE, F_EX, F_ME_START, F_ME_WAIT, F_WB} fstate_e;

  fstate_e            st_q;
  logic [VADDR_W-1:0] pc_q;

  logic id_fx;
  assign id_fx         = id_valid && is_flushx(id_instr);
  assign id_is_flushx  = id_fx && priv != PRV_U && st_q == F_IDLE;
  assign illegal_instr = id_fx && priv == PRV_U;
  assign id_stall      = id_is_flushx && (ex_valid || me_valid);
  assign fetch_hold    = id_is_flushx || st_q != F_IDLE;
  assign me_stall      = (st_q == F_ME_START) || (st_q == F_ME_WAIT && !dc_flush_done);
  assign dc_flush_start = (st_q == F_ME_START) && dc_flush_ready;

  assign redirect_valid = (st_q == F_WB);
  assign redirect_pc    = pc_q + VADDR_W'(4);

  always_comb begin
    wb_flush = '0;
    if (st_q == F_WB) begin
      wb_flush.l1ic  = 1'b1;
      wb_flush.itlb  = 1'b1;
      wb_flush.dtlb  = 1'b1;
      wb_flush.l2tlb = 1'b1;
      wb_flush.btb   = 1'b1;
      wb_flush.bht   = 1'b1;
      wb_flush.ras   = 1'b1;
      wb_flush.rf    = rf_flush_en;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= F_IDLE;
      pc_q <= '0;
    end else begin
      unique case (st_q)
        F_IDLE:     if (id_is_flushx && !id_stall) begin
                      st_q <= F_EX;
                      pc_q <= id_pc;
                    end
        F_EX:       st_q <= F_ME_START;
        F_ME_START: if (dc_flush_ready) st_q <= F_ME_WAIT;
        F_ME_WAIT:  if (dc_flush_done) st_q <= F_WB;
        F_WB:       st_q <= F_IDLE;
        default:    st_q <= F_IDLE;
      endcase
    end
  end

  // ordering rules of the SIMF pipeline control
  assert property (@(posedge clk) disable iff (!rst_n)
    st_q == F_EX |-> !me_valid);                 // all older instructions committed
  assert property (@(posedge clk) disable iff (!rst_n)
    wb_flush != '0 |-> !ex_valid && !me_valid);  // nothing younger in flight

endmodule
