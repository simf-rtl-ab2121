// ras: return address stack (6 entries) with the SIMF RAS flushing
// hardware. As SIMF prescribes, flushing only resets the stack pointer
// (and the occupancy count), which makes the stack empty: entries written
// before the flush can no longer be popped or predicted.
//
// The stack is circular: a push on a full stack overwrites the oldest entry.
// push stores push_addr at the clock edge; top (valid when !empty) is the
// current prediction, and pop removes it at the clock edge. Push and pop in
// the same cycle replace the top entry. A flush overrides push and pop.
module ras
  import simf_pkg::*;
#(
  parameter int unsigned DEPTH = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               push,
  input  logic [VADDR_W-1:0] push_addr,
  input  logic               pop,
  output logic [VADDR_W-1:0] top,
  output logic               empty,
  input  logic               flush,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PTR_W = $clog2(DEPTH);

  logic [VADDR_W-1:0]       stk_q [DEPTH];
  logic [PTR_W-1:0]         sp_q;       // index of the top entry
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction
  function automatic logic [PTR_W-1:0] dec(logic [PTR_W-1:0] p);
    return (p == '0) ? PTR_W'(DEPTH - 1) : p - 1'b1;
  endfunction

  assign top   = stk_q[sp_q];
  assign empty = (cnt_q == '0);
  assign count = cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_q  <= '0;
      cnt_q <= '0;
      for (int i = 0; i < DEPTH; i++) stk_q[i] <= '0;
    end else if (flush) begin
      sp_q  <= '0;      // reset the pointer: the stack is empty
      cnt_q <= '0;
    end else if (push && pop && !empty) begin
      stk_q[sp_q] <= push_addr;
    end else if (push) begin
      stk_q[inc(sp_q)] <= push_addr;
      sp_q             <= inc(sp_q);
      if (cnt_q != ($clog2(DEPTH+1))'(DEPTH)) cnt_q <= cnt_q + 1'b1;
    end else if (pop && !empty) begin
      sp_q  <= dec(sp_q);
      cnt_q <= cnt_q - 1'b1;
    end
  end

endmodule
