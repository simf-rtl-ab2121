// l1_dcache_tb: self-checking test of the L1 D-cache and its SIMF flush
// walk, at the full 32 KiB 8-way size.
//
// It fills all 512 lines (every even line stored to, so dirty; every odd
// line only loaded, so clean), checks the data, then starts the flush and
// checks: the flush takes exactly one cycle per clean line plus (1 + LAT)
// cycles per dirty line, every dirty line and only those are written back
// with the stored data, no line stays valid, and a later load misses (slow)
// and returns the written-back data. An eviction of a dirty victim is also
// checked. Expected values come from a word-level reference memory kept by
// the testbench.
module l1_dcache_tb;
  import simf_pkg::*;

  localparam int unsigned SETS = 64, WAYS = 8, LAT = 2;
  localparam int unsigned NLINES = SETS * WAYS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               req_valid, req_ready, req_we;
  logic [PADDR_W-1:0] req_addr;
  logic [XLEN-1:0]    req_wdata;
  logic [7:0]         req_wmask;
  logic               resp_valid;
  logic [XLEN-1:0]    resp_rdata;
  logic               flush_start, flush_ready, flush_busy, flush_done;
  logic               mem_req_valid, mem_req_ready, mem_req_we;
  logic [PADDR_W-1:0] mem_req_addr;
  logic [LINE_W-1:0]  mem_req_wdata;
  logic               mem_resp_valid;
  logic [LINE_W-1:0]  mem_resp_rdata;
  logic [$clog2(NLINES+1)-1:0] valid_lines;
  int unsigned        mem_writes, mem_reads;

  l1_dcache #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  line_mem_model #(.LAT(LAT)) mem (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_we (mem_req_we),
    .req_addr (mem_req_addr), .req_wdata (mem_req_wdata),
    .resp_valid (mem_resp_valid), .resp_rdata (mem_resp_rdata),
    .writes (mem_writes), .reads (mem_reads)
  );

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic [XLEN-1:0] ref_mem [logic [PADDR_W-1:0]];   // expected word contents

  function automatic logic [XLEN-1:0] ref_word(logic [PADDR_W-1:0] a);
    if (ref_mem.exists(a)) return ref_mem[a];
    return mem.pattern(a);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // one access; returns the number of cycles from acceptance to response
  task automatic access(input bit we, input logic [PADDR_W-1:0] a,
                        input logic [XLEN-1:0] d, output logic [XLEN-1:0] q,
                        output int lat);
    longint unsigned t0;
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_addr = a; req_wdata = d; req_wmask = 8'hFF;
    while (!req_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid) @(negedge clk);
    q   = resp_rdata;
    lat = int'(cyc - t0);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    checks++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [XLEN-1:0] q, d;
    logic [PADDR_W-1:0] a;
    int lat, hit_lat;
    longint unsigned t_start, t_done;
    int dirty_lines;
    req_valid = 0; req_we = 0; req_addr = '0; req_wdata = '0; req_wmask = '0;
    flush_start = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(valid_lines == 0, "cache empty after reset");

    // fill every line: line i at address i*64 (set = i % 64)
    dirty_lines = 0;
    for (int i = 0; i < NLINES; i++) begin
      a = PADDR_W'(i * LINE_B) + PADDR_W'((i % 8) * 8);
      if (i % 2 == 0) begin
        d = {$urandom, $urandom};
        access(1'b1, a, d, q, lat);
        ref_mem[a] = d;
        dirty_lines++;
      end else begin
        access(1'b0, a, '0, q, lat);
        check(q == ref_word(a), $sformatf("load after refill, line %0d", i));
      end
    end
    check(valid_lines == NLINES, $sformatf("all lines valid (%0d)", valid_lines));
    check(mem_writes == 0, "no write-back while filling an empty cache");

    // hits return stored data in two cycles
    for (int i = 0; i < 16; i++) begin
      a = PADDR_W'(i * LINE_B) + PADDR_W'((i % 8) * 8);
      access(1'b0, a, '0, q, hit_lat);
      check(q == ref_word(a), "hit data");
      check(hit_lat == 2, $sformatf("hit latency %0d", hit_lat));
    end

    // ---- SIMF flush of the whole D-cache
    @(negedge clk);
    check(flush_ready, "flush_ready while idle");
    flush_start = 1'b1;
    t_start = cyc;
    @(negedge clk);
    flush_start = 1'b0;
    check(flush_busy, "flush busy");
    while (!flush_done) @(negedge clk);
    t_done = cyc;
    // one cycle per clean line, 1+LAT per dirty line, done one cycle later
    check(int'(t_done - t_start) == NLINES + dirty_lines * LAT + 1,
          $sformatf("flush cycles %0d expected %0d", t_done - t_start, NLINES + dirty_lines * LAT + 1));
    check(mem_writes == dirty_lines, $sformatf("write-backs %0d expected %0d", mem_writes, dirty_lines));
    check(valid_lines == 0, "no valid line after flush");
    for (int i = 0; i < NLINES; i += 2) begin
      a = PADDR_W'(i * LINE_B);
      check(mem.read_line(a)[(i % 8) * XLEN +: XLEN] == ref_word(a + PADDR_W'((i % 8) * 8)),
            $sformatf("written-back data of line %0d", i));
    end

    // after the flush a load misses (slower than a hit) and sees the data
    for (int i = 0; i < 8; i++) begin
      a = PADDR_W'(i * 2 * LINE_B) + PADDR_W'(((i * 2) % 8) * 8);
      access(1'b0, a, '0, q, lat);
      check(q == ref_word(a), "data after flush");
      check(lat > hit_lat + LAT, $sformatf("load after flush misses (latency %0d)", lat));
    end

    // dirty eviction: 9 lines into set 1 (stores), the first must be written back
    begin
      int unsigned w0;
      w0 = mem_writes;
      for (int k = 0; k < WAYS + 1; k++) begin
        a = PADDR_W'(32'h0010_0000 + k * SETS * LINE_B + LINE_B);
        d = {$urandom, $urandom};
        access(1'b1, a, d, q, lat);
        ref_mem[a] = d;
      end
      check(mem_writes >= w0 + 1, "dirty victim written back");
      a = PADDR_W'(32'h0010_0000 + LINE_B);
      access(1'b0, a, '0, q, lat);
      check(q == ref_word(a), "evicted line reloaded with its stored data");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
