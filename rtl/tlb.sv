// tlb: fully associative translation look-aside buffer with the SIMF TLB
// flushing hardware. The same module serves as L1 ITLB (32 entries),
// L1 DTLB (32 entries) and unified L2 TLB (128 entries).
//
// A flush pulse resets the valid bit of every entry in one cycle (operation
// O_itlb / O_dtlb / O_l2tlb) and resets the round-robin replacement pointer.
// Lookup is combinational: lookup_vpn in, lookup_hit/lookup_ppn out in the
// same cycle. A fill writes {vpn, ppn} into the entry that already holds the
// vpn, or else into the round-robin victim, at the clock edge. A fill in the
// same cycle as a flush is dropped. Associativity, replacement and the
// lookup/fill handshake are this design's choices; SIMF fixes only the
// entry counts and that flushing clears the valid bits.
module tlb
  import simf_pkg::*;
#(
  parameter int unsigned ENTRIES = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [VPN_W-1:0]  lookup_vpn,
  output logic              lookup_hit,
  output logic [PPN_W-1:0]  lookup_ppn,
  input  logic              fill_valid,
  input  logic [VPN_W-1:0]  fill_vpn,
  input  logic [PPN_W-1:0]  fill_ppn,
  input  logic              flush,
  output logic [$clog2(ENTRIES+1)-1:0] valid_entries
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);

  logic [ENTRIES-1:0] valid_q;
  logic [VPN_W-1:0]   vpn_q [ENTRIES];
  logic [PPN_W-1:0]   ppn_q [ENTRIES];
  logic [IDX_W-1:0]   repl_q;

  always_comb begin
    lookup_hit = 1'b0;
    lookup_ppn = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && vpn_q[i] == lookup_vpn) begin
        lookup_hit = 1'b1;
        lookup_ppn = ppn_q[i];
      end
    end
  end

  // entry that already maps fill_vpn, if any
  logic             fill_hit;
  logic [IDX_W-1:0] fill_idx;
  always_comb begin
    fill_hit = 1'b0;
    fill_idx = repl_q;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && vpn_q[i] == fill_vpn) begin
        fill_hit = 1'b1;
        fill_idx = IDX_W'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      repl_q  <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        vpn_q[i] <= '0;
        ppn_q[i] <= '0;
      end
    end else if (flush) begin
      valid_q <= '0;             // reset every valid bit
      repl_q  <= '0;
    end else if (fill_valid) begin
      valid_q[fill_idx] <= 1'b1;
      vpn_q[fill_idx]   <= fill_vpn;
      ppn_q[fill_idx]   <= fill_ppn;
      if (!fill_hit) repl_q <= (repl_q == IDX_W'(ENTRIES - 1)) ? '0 : repl_q + 1'b1;
    end
  end

  always_comb begin
    valid_entries = '0;
    for (int i = 0; i < ENTRIES; i++) valid_entries = valid_entries + valid_q[i];
  end

endmodule
