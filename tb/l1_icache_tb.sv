// l1_icache_tb: self-checking test of the L1 I-cache and its one-cycle
// SIMF flush (reset of all valid bits), at the full 32 KiB 8-way size.
//
// Fetches from 128 lines (miss, then hit), checks the words against the
// memory model's pattern, flushes, and checks that no line is valid one
// cycle later, that fetches miss again, and that a refill which was in
// flight during the flush is not installed (the fetch refills twice).
module l1_icache_tb;
  import simf_pkg::*;

  localparam int unsigned SETS = 64, WAYS = 8, LAT = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               req_valid, req_ready;
  logic [PADDR_W-1:0] req_addr;
  logic               resp_valid;
  logic [31:0]        resp_rdata;
  logic               flush;
  logic               mem_req_valid, mem_req_ready;
  logic [PADDR_W-1:0] mem_req_addr;
  logic               mem_resp_valid;
  logic [LINE_W-1:0]  mem_resp_rdata;
  logic [$clog2(SETS*WAYS+1)-1:0] valid_lines;
  int unsigned        mem_writes, mem_reads;

  l1_icache #(.SETS(SETS), .WAYS(WAYS)) dut (.*);

  line_mem_model #(.LAT(LAT)) mem (
    .clk, .rst_n,
    .req_valid (mem_req_valid), .req_ready (mem_req_ready), .req_we (1'b0),
    .req_addr (mem_req_addr), .req_wdata ('0),
    .resp_valid (mem_resp_valid), .resp_rdata (mem_resp_rdata),
    .writes (mem_writes), .reads (mem_reads)
  );

  int checks = 0, failures = 0;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] expect_word(logic [PADDR_W-1:0] a);
    logic [XLEN-1:0] d;
    d = mem.pattern({a[PADDR_W-1:3], 3'b000});
    return a[2] ? d[63:32] : d[31:0];
  endfunction

  task automatic fetch(input logic [PADDR_W-1:0] a, output logic [31:0] q, output int lat);
    longint unsigned t0;
    @(negedge clk);
    req_valid = 1'b1; req_addr = a;
    while (!req_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid) @(negedge clk);
    q = resp_rdata; lat = int'(cyc - t0);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    checks++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] q;
    logic [PADDR_W-1:0] a;
    int lat;
    int unsigned r0;
    req_valid = 0; req_addr = '0; flush = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 128; i++) begin
      a = PADDR_W'(32'h8000_0000 + i * 64 + (i % 16) * 4);
      fetch(a, q, lat);
      check(q == expect_word(a), $sformatf("miss data line %0d", i));
      check(lat > 2 + LAT, $sformatf("first fetch misses (latency %0d)", lat));
      fetch(a, q, lat);
      check(q == expect_word(a), "hit data");
      check(lat == 2, $sformatf("hit latency %0d", lat));
    end
    check(valid_lines == 128, $sformatf("128 valid lines (%0d)", valid_lines));

    // one-cycle flush
    @(negedge clk); flush = 1'b1;
    @(negedge clk); flush = 1'b0;
    check(valid_lines == 0, "all valid bits reset one cycle after the flush");
    for (int i = 0; i < 8; i++) begin
      a = PADDR_W'(32'h8000_0000 + i * 64);
      fetch(a, q, lat);
      check(lat > 2 + LAT, $sformatf("fetch after flush misses (latency %0d)", lat));
      check(q == expect_word(a), "data after flush");
    end

    // flush while a refill is in flight: the refill must not be installed
    r0 = mem_reads;
    @(negedge clk);
    req_valid = 1'b1; req_addr = 32'h9000_0040;
    @(negedge clk);
    req_valid = 1'b0;
    while (!mem_req_valid) @(negedge clk);
    @(negedge clk);
    flush = 1'b1;
    @(negedge clk);
    flush = 1'b0;
    while (!resp_valid) @(negedge clk);
    check(resp_rdata == expect_word(32'h9000_0040), "data of the refetched line");
    check(mem_reads == r0 + 2, $sformatf("stale refill dropped and refetched (%0d reads)", mem_reads - r0));
    check(valid_lines == 1, "only the refetched line is valid");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
