// btb: fully associative branch target buffer (28 entries) with the SIMF
// BTB flushing hardware: a one-cycle flush pulse clears the valid bit of
// every entry and resets the replacement pointer.
//
// Lookup is combinational (lookup_pc in, lookup_hit/lookup_target out in the
// same cycle). An update writes {pc, target} at the clock edge into the entry
// that already holds pc, or else into the round-robin victim; an update in
// the same cycle as a flush is dropped. The entry count follows the
// evaluated configuration; associativity, tag width (the full virtual pc)
// and replacement are this design's choices.
module btb
  import simf_pkg::*;
#(
  parameter int unsigned ENTRIES = 28
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [VADDR_W-1:0] lookup_pc,
  output logic               lookup_hit,
  output logic [VADDR_W-1:0] lookup_target,
  input  logic               update_valid,
  input  logic [VADDR_W-1:0] update_pc,
  input  logic [VADDR_W-1:0] update_target,
  input  logic               flush,
  output logic [$clog2(ENTRIES+1)-1:0] valid_entries
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);

  logic [ENTRIES-1:0] valid_q;
  logic [VADDR_W-1:0] pc_q  [ENTRIES];
  logic [VADDR_W-1:0] tgt_q [ENTRIES];
  logic [IDX_W-1:0]   repl_q;

  always_comb begin
    lookup_hit    = 1'b0;
    lookup_target = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && pc_q[i] == lookup_pc) begin
        lookup_hit    = 1'b1;
        lookup_target = tgt_q[i];
      end
    end
  end

  logic             upd_hit;
  logic [IDX_W-1:0] upd_idx;
  always_comb begin
    upd_hit = 1'b0;
    upd_idx = repl_q;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && pc_q[i] == update_pc) begin
        upd_hit = 1'b1;
        upd_idx = IDX_W'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      repl_q  <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        pc_q[i]  <= '0;
        tgt_q[i] <= '0;
      end
    end else if (flush) begin
      valid_q <= '0;
      repl_q  <= '0;
    end else if (update_valid) begin
      valid_q[upd_idx] <= 1'b1;
      pc_q[upd_idx]    <= update_pc;
      tgt_q[upd_idx]   <= update_target;
      if (!upd_hit) repl_q <= (repl_q == IDX_W'(ENTRIES - 1)) ? '0 : repl_q + 1'b1;
    end
  end

  always_comb begin
    valid_entries = '0;
    for (int i = 0; i < ENTRIES; i++) valid_entries = valid_entries + valid_q[i];
  end

endmodule
