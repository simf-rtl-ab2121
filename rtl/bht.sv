// bht: two-level adaptive branch predictor (branch history table) with the
// SIMF BHT flushing hardware.
//
// Level one is a global history register of HIST_W bits; level two is a
// table of ENTRIES 2-bit saturating counters (taken when the counter's
// upper bit is set). The table is indexed by the branch pc (word address)
// XOR the history, gshare style. A one-cycle flush pulse clears the history
// register and resets every counter to 0 (strongly not taken), so neither
// level keeps any trace of earlier branches.
//
// Prediction is combinational (predict_pc in, predict_taken out). An update
// (update_pc, update_taken) trains the counter selected with the current
// history and shifts the outcome into the history at the clock edge; an
// update in the same cycle as a flush is dropped. The table size (512)
// follows the evaluated configuration; the history length and the index
// hash are this design's choices.
module bht
  import simf_pkg::*;
#(
  parameter int unsigned ENTRIES = 512,
  parameter int unsigned HIST_W  = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [VADDR_W-1:0] predict_pc,
  output logic               predict_taken,
  input  logic               update_valid,
  input  logic [VADDR_W-1:0] update_pc,
  input  logic               update_taken,
  input  logic               flush,
  output logic [HIST_W-1:0]  history,
  output logic [$clog2(ENTRIES+1)-1:0] nonzero_counters
);

  localparam int unsigned IDX_W = $clog2(ENTRIES);

  logic [1:0]        cnt_q [ENTRIES];
  logic [HIST_W-1:0] hist_q;

  function automatic logic [IDX_W-1:0] index(logic [VADDR_W-1:0] pc, logic [HIST_W-1:0] h);
    return pc[2 +: IDX_W] ^ IDX_W'(h);
  endfunction

  logic [IDX_W-1:0] pidx, uidx;
  assign pidx          = index(predict_pc, hist_q);
  assign uidx          = index(update_pc, hist_q);
  assign predict_taken = cnt_q[pidx][1];
  assign history       = hist_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist_q <= '0;
      for (int i = 0; i < ENTRIES; i++) cnt_q[i] <= 2'b00;
    end else if (flush) begin
      hist_q <= '0;                                       // history bits
      for (int i = 0; i < ENTRIES; i++) cnt_q[i] <= 2'b00; // history table
    end else if (update_valid) begin
      hist_q <= {hist_q[HIST_W-2:0], update_taken};
      if (update_taken && cnt_q[uidx] != 2'b11) cnt_q[uidx] <= cnt_q[uidx] + 2'b01;
      else if (!update_taken && cnt_q[uidx] != 2'b00) cnt_q[uidx] <= cnt_q[uidx] - 2'b01;
    end
  end

  always_comb begin
    nonzero_counters = '0;
    for (int i = 0; i < ENTRIES; i++) nonzero_counters = nonzero_counters + (cnt_q[i] != 2'b00);
  end

endmodule
