// simf_pkg: shared constants and types of the SIMF (single-instruction
// multiple-flush) core state.
//
// The sizes below are the evaluated configuration of the SIMF core: 32 KiB
// 8-way L1 caches with 64-byte lines, 32-entry L1 I/D TLBs, a 128-entry L2
// TLB, a 28-entry BTB, a 512-entry BHT and a 6-entry RAS. Address widths,
// the FLUSHX encoding and the flush-request bundle are choices of this RTL.
package simf_pkg;

  // ---- address widths (choice of this RTL: Sv39 virtual, 32-bit physical)
  localparam int unsigned XLEN     = 64;
  localparam int unsigned PADDR_W  = 32;
  localparam int unsigned VPN_W    = 27;   // Sv39 virtual page number
  localparam int unsigned PPN_W    = PADDR_W - 12;
  localparam int unsigned VADDR_W  = 39;   // Sv39 virtual address
  localparam int unsigned LINE_B   = 64;   // cache line bytes
  localparam int unsigned LINE_W   = LINE_B * 8;
  localparam int unsigned OFF_W    = $clog2(LINE_B);

  // ---- FLUSHX encoding (choice of this RTL): RISC-V custom-0 major opcode,
  // funct3 = 0, rd = rs1 = 0, imm = 0.
  localparam logic [6:0] OPC_CUSTOM0 = 7'b0001011;

  // Privilege levels of RISC-V
  typedef enum logic [1:0] {
    PRV_U = 2'b00,
    PRV_S = 2'b01,
    PRV_M = 2'b11
  } priv_e;

  // One bit per flushing operation O_x of the sphere of flushing.
  typedef struct packed {
    logic l1ic;
    logic itlb;
    logic dtlb;
    logic l2tlb;
    logic btb;
    logic bht;
    logic ras;
    logic rf;
  } wb_flush_t;

  function automatic logic is_flushx(input logic [31:0] instr);
    return instr[6:0] == OPC_CUSTOM0 && instr[14:12] == 3'b000
        && instr[11:7] == 5'd0 && instr[19:15] == 5'd0 && instr[31:20] == 12'd0;
  endfunction

  localparam logic [31:0] FLUSHX_INSTR = {12'd0, 5'd0, 3'b000, 5'd0, OPC_CUSTOM0};

  // Core-side port of one TLB (lookup and fill) and its answer.
  typedef struct packed {
    logic [VPN_W-1:0] lookup_vpn;
    logic             fill_valid;
    logic [VPN_W-1:0] fill_vpn;
    logic [PPN_W-1:0] fill_ppn;
  } tlb_req_t;

  typedef struct packed {
    logic             hit;
    logic [PPN_W-1:0] ppn;
  } tlb_resp_t;

  // Occupancy of every component of the sphere of flushing: how much state
  // a previous owner of the core has left behind.
  typedef struct packed {
    logic [15:0] dcache_lines;
    logic [15:0] icache_lines;
    logic [15:0] itlb_entries;
    logic [15:0] dtlb_entries;
    logic [15:0] l2tlb_entries;
    logic [15:0] btb_entries;
    logic [15:0] bht_counters;
    logic [15:0] bht_history;
    logic [15:0] ras_count;
    logic [15:0] rf_nonzero;
  } sof_status_t;

endpackage
