// line_mem_model: behavioural model of the memory system behind an L1
// cache (L2 / main memory), for testbenches only. It takes line-wide
// requests: a request is accepted (req_ready) after LAT wait cycles of
// req_valid; a write is complete on acceptance, a read returns the line
// with resp_valid one cycle after acceptance. A line never written reads
// as a fixed pattern of its address (see pattern()). Writes are counted.
module line_mem_model
  import simf_pkg::*;
#(
  parameter int unsigned LAT = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_we,
  input  logic [PADDR_W-1:0] req_addr,
  input  logic [LINE_W-1:0]  req_wdata,
  output logic               resp_valid,
  output logic [LINE_W-1:0]  resp_rdata,
  output int unsigned        writes,
  output int unsigned        reads
);

  logic [LINE_W-1:0] store [logic [PADDR_W-1:0]];
  int unsigned       wait_q;

  // initial content of a line: its 64-bit words are addr ^ constant
  function automatic logic [XLEN-1:0] pattern(logic [PADDR_W-1:0] a);
    return {32'hC0DE_0000, a} ^ 64'h5A5A_0000_0000_0000;
  endfunction

  function automatic logic [LINE_W-1:0] read_line(logic [PADDR_W-1:0] line_addr);
    logic [LINE_W-1:0] l;
    if (store.exists(line_addr)) return store[line_addr];
    for (int w = 0; w < LINE_W/XLEN; w++) l[w*XLEN +: XLEN] = pattern(line_addr + PADDR_W'(w*8));
    return l;
  endfunction

  assign req_ready = req_valid && (wait_q >= LAT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_q     <= 0;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
      writes     <= 0;
      reads      <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (req_valid && !req_ready) wait_q <= wait_q + 1;
      if (req_valid && req_ready) begin
        wait_q <= 0;
        if (req_we) begin
          store[req_addr] = req_wdata;
          writes          <= writes + 1;
        end else begin
          resp_valid <= 1'b1;
          resp_rdata <= read_line(req_addr);
          reads      <= reads + 1;
        end
      end
    end
  end

endmodule
