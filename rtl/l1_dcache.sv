// l1_dcache: write-back, write-allocate, set-associative L1 data cache with
// the SIMF L1 D-cache flushing hardware (operation O_l1dc).
//
// Flushing follows SIMF's three sub-operations, applied to every one of
// the #CL = SETS*WAYS cache lines in turn: (1) look up the {tag, valid, dirty}
// entry of the line in the tag array, (2) if the line is valid and dirty,
// write its data back to main memory, (3) reset its valid and dirty bits.
// The walk takes one cycle per clean line and, for a dirty line, one cycle
// plus the cycles until memory accepts the write-back (alpha cycles per
// line). The replacement pointer is reset as well, so no replacement state
// of the previous owner survives. flush_start is a one-cycle pulse taken
// only when the cache is idle (flush_ready); flush_done pulses in the cycle
// the last line is cleared.
//
// Normal accesses (everything but the flush walk is this design's own
// choice, SIMF takes the cache from its host core): a request is taken
// when req_valid && req_ready; the response (load data, or an
// acknowledgement for a store) comes with resp_valid two cycles later on a
// hit. A miss fills an invalid way of the set, or else evicts a round-robin
// victim (written back if dirty), and refills the line from memory through a
// line-wide request/response port.
// Addresses are physical. Stores write a 64-bit word under a byte mask.
module l1_dcache
  import simf_pkg::*;
#(
  parameter int unsigned SETS = 64,   // 32 KiB / (8 ways * 64 B)
  parameter int unsigned WAYS = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  // core side
  input  logic                req_valid,
  output logic                req_ready,
  input  logic                req_we,
  input  logic [PADDR_W-1:0]  req_addr,
  input  logic [XLEN-1:0]     req_wdata,
  input  logic [XLEN/8-1:0]   req_wmask,
  output logic                resp_valid,
  output logic [XLEN-1:0]     resp_rdata,
  // SIMF flush (O_l1dc)
  input  logic                flush_start,
  output logic                flush_ready,
  output logic                flush_busy,
  output logic                flush_done,
  // memory side: line-wide requests, writes complete on the handshake
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic                mem_req_we,
  output logic [PADDR_W-1:0]  mem_req_addr,
  output logic [LINE_W-1:0]   mem_req_wdata,
  input  logic                mem_resp_valid,
  input  logic [LINE_W-1:0]   mem_resp_rdata,
  // status: number of valid lines
  output logic [$clog2(SETS*WAYS+1)-1:0] valid_lines
);

  localparam int unsigned NLINES = SETS * WAYS;
  localparam int unsigned SET_W  = $clog2(SETS);
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned IDX_W  = $clog2(NLINES);
  localparam int unsigned TAG_W  = PADDR_W - SET_W - OFF_W;
  localparam int unsigned WORD_W = $clog2(LINE_B / 8);

  typedef enum logic [2:0] {
    S_IDLE, S_LOOKUP, S_EVICT, S_REFILL_REQ, S_REFILL_WAIT, S_FLUSH
  } state_e;

  state_e                 state_q;
  logic [TAG_W-1:0]       tag_q   [NLINES];
  logic [LINE_W-1:0]      data_q  [NLINES];
  logic [NLINES-1:0]      valid_q, dirty_q;
  logic [WAY_W-1:0]       repl_q;              // round-robin victim pointer
  logic [IDX_W-1:0]       fidx_q;              // flush walk index
  logic [IDX_W-1:0]       vidx_q;              // victim line index

  // registered request
  logic                   r_we_q;
  logic [PADDR_W-1:0]     r_addr_q;
  logic [XLEN-1:0]        r_wdata_q;
  logic [XLEN/8-1:0]      r_wmask_q;

  logic [SET_W-1:0]       r_set;
  logic [TAG_W-1:0]       r_tag;
  logic [WORD_W-1:0]      r_word;
  assign r_set  = r_addr_q[OFF_W +: SET_W];
  assign r_tag  = r_addr_q[PADDR_W-1 -: TAG_W];
  assign r_word = r_addr_q[3 +: WORD_W];

  function automatic logic [IDX_W-1:0] line_idx(logic [SET_W-1:0] s, logic [WAY_W-1:0] w);
    return IDX_W'(s) * IDX_W'(WAYS) + IDX_W'(w);
  endfunction

  // hit detection on the registered request
  logic              hit;
  logic [IDX_W-1:0]  hit_idx;
  logic [WAY_W-1:0]  victim;  // first invalid way of the set, else round-robin
  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    victim  = repl_q;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!valid_q[line_idx(r_set, WAY_W'(w))]) victim = WAY_W'(w);
    for (int w = 0; w < WAYS; w++) begin
      if (valid_q[line_idx(r_set, WAY_W'(w))] && tag_q[line_idx(r_set, WAY_W'(w))] == r_tag) begin
        hit     = 1'b1;
        hit_idx = line_idx(r_set, WAY_W'(w));
      end
    end
  end

  logic flush_line_dirty;
  assign flush_line_dirty = valid_q[fidx_q] && dirty_q[fidx_q];

  assign req_ready   = (state_q == S_IDLE) && !flush_start;
  assign flush_ready = (state_q == S_IDLE);
  assign flush_busy  = (state_q == S_FLUSH);

  // memory request mux
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = '0;
    mem_req_wdata = data_q[vidx_q];
    unique case (state_q)
      S_EVICT: begin
        mem_req_valid = 1'b1;
        mem_req_we    = 1'b1;
        mem_req_addr  = {tag_q[vidx_q], r_set, OFF_W'(0)};
      end
      S_REFILL_REQ: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = {r_tag, r_set, OFF_W'(0)};
      end
      S_FLUSH: begin
        mem_req_valid = flush_line_dirty;
        mem_req_we    = 1'b1;
        mem_req_wdata = data_q[fidx_q];
        mem_req_addr  = {tag_q[fidx_q], SET_W'(fidx_q / IDX_W'(WAYS)), OFF_W'(0)};
      end
      default: ;
    endcase
  end

  // control, tags and status bits
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      valid_q    <= '0;
      dirty_q    <= '0;
      repl_q     <= '0;
      fidx_q     <= '0;
      vidx_q     <= '0;
      r_we_q     <= 1'b0;
      r_addr_q   <= '0;
      r_wdata_q  <= '0;
      r_wmask_q  <= '0;
      resp_valid <= 1'b0;
      flush_done <= 1'b0;
      for (int i = 0; i < NLINES; i++) tag_q[i] <= '0;
    end else begin
      resp_valid <= 1'b0;
      flush_done <= 1'b0;
      unique case (state_q)
        S_IDLE: begin
          if (flush_start) begin
            state_q <= S_FLUSH;
            fidx_q  <= '0;
          end else if (req_valid) begin
            r_we_q    <= req_we;
            r_addr_q  <= req_addr;
            r_wdata_q <= req_wdata;
            r_wmask_q <= req_wmask;
            state_q   <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          if (hit) begin
            resp_valid <= 1'b1;
            if (r_we_q) dirty_q[hit_idx] <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            vidx_q  <= line_idx(r_set, victim);
            repl_q  <= repl_q + 1'b1;
            state_q <= (valid_q[line_idx(r_set, victim)] && dirty_q[line_idx(r_set, victim)])
                       ? S_EVICT : S_REFILL_REQ;
          end
        end
        S_EVICT: if (mem_req_ready) begin
          dirty_q[vidx_q] <= 1'b0;
          state_q         <= S_REFILL_REQ;
        end
        S_REFILL_REQ: if (mem_req_ready) begin
          valid_q[vidx_q] <= 1'b0;
          state_q         <= S_REFILL_WAIT;
        end
        S_REFILL_WAIT: if (mem_resp_valid) begin
          valid_q[vidx_q] <= 1'b1;
          dirty_q[vidx_q] <= 1'b0;
          tag_q[vidx_q]   <= r_tag;
          state_q         <= S_LOOKUP;
        end
        S_FLUSH: begin
          // (1) look-up done combinationally; (2) write back if valid&dirty;
          // (3) reset valid and dirty once the line is safe.
          if (!flush_line_dirty || mem_req_ready) begin
            valid_q[fidx_q] <= 1'b0;
            dirty_q[fidx_q] <= 1'b0;
            if (fidx_q == IDX_W'(NLINES - 1)) begin
              state_q    <= S_IDLE;
              flush_done <= 1'b1;
              repl_q     <= '0;
            end
            fidx_q <= fidx_q + 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // data array: one write port (refill or store), read for hits and evictions
  always_ff @(posedge clk) begin
    if (state_q == S_REFILL_WAIT && mem_resp_valid) begin
      data_q[vidx_q] <= mem_resp_rdata;
    end else if (state_q == S_LOOKUP && hit && r_we_q) begin
      for (int b = 0; b < XLEN/8; b++)
        if (r_wmask_q[b])
          data_q[hit_idx][r_word*XLEN + b*8 +: 8] <= r_wdata_q[b*8 +: 8];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) resp_rdata <= '0;
    else if (state_q == S_LOOKUP && hit) resp_rdata <= data_q[hit_idx][r_word*XLEN +: XLEN];
  end

  always_comb begin
    valid_lines = '0;
    for (int i = 0; i < NLINES; i++) valid_lines = valid_lines + valid_q[i];
  end

  // a flush is only started from idle
  assert property (@(posedge clk) disable iff (!rst_n) flush_start |-> flush_ready);

endmodule
