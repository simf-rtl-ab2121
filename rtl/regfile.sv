// regfile: RISC-V integer register file (x0..x31, XLEN bits, x0 reads as 0)
// with the SIMF register-file flushing hardware (operation O_rf).
//
// Two combinational read ports and one write port that writes at the clock
// edge. A one-cycle flush pulse clears all 31 writable registers at once;
// a write in the same cycle as a flush is dropped. Whether FLUSHX flushes
// the register file at all is decided by the controller (it can be turned
// off, since the software must save and restore the registers around it).
module regfile
  import simf_pkg::*;
#(
  parameter int unsigned NREGS = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(NREGS)-1:0] raddr_a,
  output logic [XLEN-1:0]          rdata_a,
  input  logic [$clog2(NREGS)-1:0] raddr_b,
  output logic [XLEN-1:0]          rdata_b,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] waddr,
  input  logic [XLEN-1:0]          wdata,
  input  logic                     flush,
  output logic [$clog2(NREGS+1)-1:0] nonzero_regs
);

  logic [XLEN-1:0] r_q [1:NREGS-1];

  assign rdata_a = (raddr_a == '0) ? '0 : r_q[raddr_a];
  assign rdata_b = (raddr_b == '0) ? '0 : r_q[raddr_b];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i < NREGS; i++) r_q[i] <= '0;
    end else if (flush) begin
      for (int i = 1; i < NREGS; i++) r_q[i] <= '0;
    end else if (we && waddr != '0) begin
      r_q[waddr] <= wdata;
    end
  end

  always_comb begin
    nonzero_regs = '0;
    for (int i = 1; i < NREGS; i++) nonzero_regs = nonzero_regs + (r_q[i] != '0);
  end

endmodule
