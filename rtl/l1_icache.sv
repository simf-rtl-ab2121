// l1_icache: read-only set-associative L1 instruction cache with the SIMF
// L1 I-cache flushing hardware (operation O_l1ic).
//
// As the I-cache holds no dirty data, its flush only resets the valid bits:
// a one-cycle flush pulse clears every valid bit at once (one bit per line)
// and resets the round-robin replacement pointer. A refill that is still in
// flight when the flush arrives is completed on the memory port but not
// installed, so no line fetched before the flush is valid after it.
//
// Fetch interface (this design's own choice; the cache itself belongs to the
// host core): a request is taken on req_valid && req_ready, the 32-bit word
// at req_addr comes back with resp_valid two cycles later on a hit. A miss
// fills an invalid way of the set (else a round-robin victim) from memory
// through a line-wide read port (mem_req_valid/ready, then mem_resp_valid
// with the line).
module l1_icache
  import simf_pkg::*;
#(
  parameter int unsigned SETS = 64,   // 32 KiB / (8 ways * 64 B)
  parameter int unsigned WAYS = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req_valid,
  output logic                req_ready,
  input  logic [PADDR_W-1:0]  req_addr,
  output logic                resp_valid,
  output logic [31:0]         resp_rdata,
  // SIMF flush (O_l1ic), one cycle
  input  logic                flush,
  // memory side, read only
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic [PADDR_W-1:0]  mem_req_addr,
  input  logic                mem_resp_valid,
  input  logic [LINE_W-1:0]   mem_resp_rdata,
  output logic [$clog2(SETS*WAYS+1)-1:0] valid_lines
);

  localparam int unsigned NLINES = SETS * WAYS;
  localparam int unsigned SET_W  = $clog2(SETS);
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned IDX_W  = $clog2(NLINES);
  localparam int unsigned TAG_W  = PADDR_W - SET_W - OFF_W;
  localparam int unsigned WORD_W = $clog2(LINE_B / 4);

  typedef enum logic [1:0] {S_IDLE, S_LOOKUP, S_REFILL_REQ, S_REFILL_WAIT} state_e;

  state_e             state_q;
  logic [TAG_W-1:0]   tag_q  [NLINES];
  logic [LINE_W-1:0]  data_q [NLINES];
  logic [NLINES-1:0]  valid_q;
  logic [WAY_W-1:0]   repl_q;
  logic [IDX_W-1:0]   vidx_q;
  logic [PADDR_W-1:0] r_addr_q;
  logic               stale_q;     // refill in flight was overtaken by a flush

  logic [SET_W-1:0]   r_set;
  logic [TAG_W-1:0]   r_tag;
  logic [WORD_W-1:0]  r_word;
  assign r_set  = r_addr_q[OFF_W +: SET_W];
  assign r_tag  = r_addr_q[PADDR_W-1 -: TAG_W];
  assign r_word = r_addr_q[2 +: WORD_W];

  function automatic logic [IDX_W-1:0] line_idx(logic [SET_W-1:0] s, logic [WAY_W-1:0] w);
    return IDX_W'(s) * IDX_W'(WAYS) + IDX_W'(w);
  endfunction

  logic             hit;
  logic [IDX_W-1:0] hit_idx;
  logic [WAY_W-1:0] victim;   // first invalid way of the set, else round-robin
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

  assign req_ready     = (state_q == S_IDLE) && !flush;
  assign mem_req_valid = (state_q == S_REFILL_REQ);
  assign mem_req_addr  = {r_tag, r_set, OFF_W'(0)};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      valid_q    <= '0;
      repl_q     <= '0;
      vidx_q     <= '0;
      r_addr_q   <= '0;
      stale_q    <= 1'b0;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
      for (int i = 0; i < NLINES; i++) tag_q[i] <= '0;
    end else begin
      resp_valid <= 1'b0;
      unique case (state_q)
        S_IDLE: if (req_valid && !flush) begin
          r_addr_q <= req_addr;
          state_q  <= S_LOOKUP;
        end
        S_LOOKUP: begin
          if (hit && !flush) begin
            resp_valid <= 1'b1;
            resp_rdata <= data_q[hit_idx][r_word*32 +: 32];
            state_q    <= S_IDLE;
          end else if (!hit) begin
            vidx_q  <= line_idx(r_set, victim);
            repl_q  <= repl_q + 1'b1;
            stale_q <= 1'b0;
            state_q <= S_REFILL_REQ;
          end
        end
        S_REFILL_REQ: if (mem_req_ready) begin
          valid_q[vidx_q] <= 1'b0;
          state_q         <= S_REFILL_WAIT;
        end
        S_REFILL_WAIT: if (mem_resp_valid) begin
          tag_q[vidx_q]   <= r_tag;
          valid_q[vidx_q] <= !stale_q && !flush;
          state_q         <= S_LOOKUP;
        end
        default: state_q <= S_IDLE;
      endcase
      // O_l1ic: reset every valid bit in one cycle
      if (flush) begin
        valid_q <= '0;
        repl_q  <= '0;
        if (state_q == S_REFILL_REQ || state_q == S_REFILL_WAIT) stale_q <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (state_q == S_REFILL_WAIT && mem_resp_valid) data_q[vidx_q] <= mem_resp_rdata;
  end

  always_comb begin
    valid_lines = '0;
    for (int i = 0; i < NLINES; i++) valid_lines = valid_lines + valid_q[i];
  end

endmodule
