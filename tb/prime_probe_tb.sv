// prime_probe_tb: Prime+Probe timing channel on the L1 D-cache of the full
// default-size core (64 sets x 8 ways x 64 B), with and without FLUSHX on
// the switch from the victim back to the attacker.
//
// One sample is one round of the classic attack:
//   1. prime: the attacker loads 8 lines into every one of the 64 sets, so
//      the whole cache holds its lines;
//   2. victim: the victim loads one line into each set whose bit is set in
//      a random 64-bit secret, evicting one attacker line from that set;
//   3. on the protected system FLUSHX runs through the pipeline here, as
//      the kernel would execute it before returning to the attacker;
//   4. probe: the attacker reloads its 512 lines and times each load. A set
//      in which any load took longer than the 2-cycle hit latency counts as
//      "touched".
// On the unprotected system the touched sets must equal the secret bit for
// bit: the channel carries the whole secret. With FLUSHX every one of the
// 512 probe loads must miss, so every set reads as touched whatever the
// secret was, and the attacker learns nothing. The first samples of each
// system are printed as a map, one character per set ('#' all hits,
// '.' a miss).
module prime_probe_tb;
  import simf_pkg::*;

  localparam int unsigned LAT     = 2;
  localparam int unsigned SETS    = 64;
  localparam int unsigned WAYS    = 8;
  localparam int unsigned HIT_LAT = 2;
  localparam int unsigned SAMPLES = 8;
  localparam logic [PADDR_W-1:0] ATTACKER_BASE = 32'h0010_0000;
  localparam logic [PADDR_W-1:0] VICTIM_BASE   = 32'h0020_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  priv_e              priv;
  logic               rf_flush_en;
  logic               fetch_valid, fetch_ready, redirect_valid, commit_valid, illegal_instr, flushx_busy;
  logic [VADDR_W-1:0] fetch_pc, redirect_pc, commit_pc;
  logic [31:0]        fetch_instr, commit_instr;
  logic               dc_req_valid, dc_req_ready, dc_req_we, dc_resp_valid;
  logic [PADDR_W-1:0] dc_req_addr;
  logic [XLEN-1:0]    dc_req_wdata, dc_resp_rdata;
  logic [7:0]         dc_req_wmask;
  logic               dmem_req_valid, dmem_req_ready, dmem_req_we, dmem_resp_valid;
  logic [PADDR_W-1:0] dmem_req_addr;
  logic [LINE_W-1:0]  dmem_req_wdata, dmem_resp_rdata;
  logic               ic_req_valid, ic_req_ready, ic_resp_valid;
  logic [PADDR_W-1:0] ic_req_addr;
  logic [31:0]        ic_resp_rdata;
  logic               imem_req_valid, imem_req_ready, imem_resp_valid;
  logic [PADDR_W-1:0] imem_req_addr;
  logic [LINE_W-1:0]  imem_resp_rdata;
  tlb_req_t           tlb_req  [3];
  tlb_resp_t          tlb_resp [3];
  logic [VADDR_W-1:0] btb_lookup_pc, btb_target, btb_update_pc, btb_update_target;
  logic               btb_hit, btb_update_valid;
  logic [VADDR_W-1:0] bht_predict_pc, bht_update_pc;
  logic               bht_predict_taken, bht_update_valid, bht_update_taken;
  logic               ras_push, ras_pop, ras_empty;
  logic [VADDR_W-1:0] ras_push_addr, ras_top;
  logic [4:0]         rf_raddr_a, rf_raddr_b, rf_waddr;
  logic [XLEN-1:0]    rf_rdata_a, rf_rdata_b, rf_wdata;
  logic               rf_we;
  sof_status_t        sof_status;

  simf_core dut (.*);

  int unsigned dmem_writes, dmem_reads, imem_writes, imem_reads;
  line_mem_model #(.LAT(LAT)) dmem (
    .clk, .rst_n, .req_valid (dmem_req_valid), .req_ready (dmem_req_ready), .req_we (dmem_req_we),
    .req_addr (dmem_req_addr), .req_wdata (dmem_req_wdata),
    .resp_valid (dmem_resp_valid), .resp_rdata (dmem_resp_rdata),
    .writes (dmem_writes), .reads (dmem_reads)
  );
  line_mem_model #(.LAT(LAT)) imem (
    .clk, .rst_n, .req_valid (imem_req_valid), .req_ready (imem_req_ready), .req_we (1'b0),
    .req_addr (imem_req_addr), .req_wdata ('0),
    .resp_valid (imem_resp_valid), .resp_rdata (imem_resp_rdata),
    .writes (imem_writes), .reads (imem_reads)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (1000000) @(posedge clk);
    checks++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- instruction fetch source: NOPs with FLUSHX at one pc
  localparam logic [31:0] NOP = 32'h0000_0013;
  logic [VADDR_W-1:0] flushx_pc;
  bit                 fetch_on, flushx_committed;

  assign fetch_valid = fetch_on;
  assign fetch_instr = (fetch_pc == flushx_pc) ? FLUSHX_INSTR : NOP;

  always @(posedge clk) begin
    if (!rst_n) fetch_pc <= 39'h80_0000;
    else begin
      if (fetch_valid && fetch_ready) fetch_pc <= fetch_pc + 4;
      if (redirect_valid) fetch_pc <= redirect_pc;
      if (commit_valid && commit_pc == flushx_pc && is_flushx(commit_instr)) flushx_committed = 1'b1;
    end
  end

  // ---- core-side helpers
  task automatic load(input logic [PADDR_W-1:0] a, output int lat);
    longint unsigned t0;
    @(negedge clk);
    dc_req_valid = 1; dc_req_we = 0; dc_req_addr = a;
    while (!dc_req_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    dc_req_valid = 0;
    while (!dc_resp_valid) @(negedge clk);
    lat = int'(cyc - t0);
  endtask

  function automatic logic [PADDR_W-1:0] attacker_line(int s, int w);
    return ATTACKER_BASE + PADDR_W'(w * SETS * LINE_B + s * LINE_B);
  endfunction

  // the kernel's return path on the protected core: FLUSHX in supervisor mode
  task automatic run_flushx(input logic [VADDR_W-1:0] fpc);
    flushx_pc = fpc;
    flushx_committed = 1'b0;
    @(negedge clk);
    fetch_on = 1;
    while (!flushx_committed) @(negedge clk);
    fetch_on = 0;
    repeat (4) @(negedge clk);
  endtask

  int n_flushx = 0, n_probe_miss = 0, n_probe_hit = 0;

  // one Prime+Probe sample; returns the set of touched sets seen by the probe
  task automatic sample(input bit protect, input int k, input logic [SETS-1:0] secret,
                        output logic [SETS-1:0] seen, output int misses);
    int lat, w0;
    string map;
    for (int s = 0; s < SETS; s++)
      for (int w = 0; w < WAYS; w++) load(attacker_line(s, w), lat);
    check(sof_status.dcache_lines == 16'(SETS * WAYS), "prime fills the whole cache");
    for (int s = 0; s < SETS; s++)
      if (secret[s]) load(VICTIM_BASE + PADDR_W'(s * LINE_B), lat);
    if (protect) begin
      w0 = int'(dmem_writes);
      run_flushx(39'h80_1000 + VADDR_W'(k * 256));
      n_flushx++;
      check(sof_status.dcache_lines == 0, "FLUSHX empties the D-cache");
      check(int'(dmem_writes) == w0, "clean lines are not written back");
    end
    seen = '0; misses = 0; map = "";
    for (int s = 0; s < SETS; s++) begin
      for (int w = 0; w < WAYS; w++) begin
        load(attacker_line(s, w), lat);
        if (lat > int'(HIT_LAT)) begin seen[s] = 1'b1; misses++; n_probe_miss++; end
        else n_probe_hit++;
      end
      map = {map, seen[s] ? "." : "#"};
    end
    if (k < 4) $display("%s sample %0d  %s", protect ? "flushx  " : "baseline", k, map);
  endtask

  initial begin
    logic [SETS-1:0] secret, seen, first_seen;
    int misses;
    priv = PRV_S; rf_flush_en = 1; fetch_on = 0; flushx_pc = '1; flushx_committed = 0;
    dc_req_valid = 0; dc_req_we = 0; dc_req_addr = '0; dc_req_wdata = '0; dc_req_wmask = '0;
    ic_req_valid = 0; ic_req_addr = '0;
    for (int t = 0; t < 3; t++) tlb_req[t] = '0;
    btb_lookup_pc = '0; btb_update_valid = 0; btb_update_pc = '0; btb_update_target = '0;
    bht_predict_pc = '0; bht_update_valid = 0; bht_update_pc = '0; bht_update_taken = 0;
    ras_push = 0; ras_pop = 0; ras_push_addr = '0;
    rf_raddr_a = 0; rf_raddr_b = 0; rf_we = 0; rf_waddr = 0; rf_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // unprotected: the probe reads the victim's secret
    for (int k = 0; k < SAMPLES; k++) begin
      secret = {$urandom, $urandom};
      if (k == 0) secret = 64'h00FF_0F0F_3333_5555;
      sample(0, k, secret, seen, misses);
      check(seen == secret, $sformatf("baseline sample %0d: probe recovers the secret", k));
      check(misses >= $countones(secret), "baseline: at least one miss per victim set");
    end

    // protected: every probe load misses, whatever the secret
    for (int k = 0; k < SAMPLES; k++) begin
      secret = {$urandom, $urandom};
      if (k == 0) secret = 64'h00FF_0F0F_3333_5555;
      sample(1, k, secret, seen, misses);
      if (k == 0) first_seen = seen;
      check(misses == int'(SETS * WAYS), $sformatf("flushx sample %0d: all %0d probe loads miss (%0d)",
                                                   k, SETS * WAYS, misses));
      check(seen == first_seen, "flushx: probe result independent of the secret");
    end

    $display("mechanisms: flushx=%0d probe_miss=%0d probe_hit=%0d", n_flushx, n_probe_miss, n_probe_hit);
    check(n_flushx == SAMPLES, "one FLUSHX per protected sample");
    check(n_probe_hit > 0 && n_probe_miss > 0, "both hits and misses observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
