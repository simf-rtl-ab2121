// tlb_tb: self-checking test of the TLB and its SIMF flush, for the L1 size
// (32 entries) and the L2 size (128 entries) side by side.
//
// Fills every entry with random translations, checks lookups against a
// reference map, checks round-robin replacement and in-place refill, then
// flushes and checks that no entry stays valid and every lookup misses.
module tlb_tb;
  import simf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [VPN_W-1:0] lk_vpn [2];
  logic             lk_hit [2];
  logic [PPN_W-1:0] lk_ppn [2];
  logic             f_valid [2];
  logic [VPN_W-1:0] f_vpn [2];
  logic [PPN_W-1:0] f_ppn [2];
  logic             flush [2];
  logic [7:0]       nvalid [2];

  tlb #(.ENTRIES(32)) dut_l1 (
    .clk, .rst_n, .lookup_vpn (lk_vpn[0]), .lookup_hit (lk_hit[0]), .lookup_ppn (lk_ppn[0]),
    .fill_valid (f_valid[0]), .fill_vpn (f_vpn[0]), .fill_ppn (f_ppn[0]),
    .flush (flush[0]), .valid_entries (nvalid[0][5:0])
  );
  tlb #(.ENTRIES(128)) dut_l2 (
    .clk, .rst_n, .lookup_vpn (lk_vpn[1]), .lookup_hit (lk_hit[1]), .lookup_ppn (lk_ppn[1]),
    .fill_valid (f_valid[1]), .fill_vpn (f_vpn[1]), .fill_ppn (f_ppn[1]),
    .flush (flush[1]), .valid_entries (nvalid[1])
  );
  assign nvalid[0][7:6] = '0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    checks++;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int t, input int n);
    logic [VPN_W-1:0] vpns [$];
    logic [PPN_W-1:0] ppns [$];
    logic [VPN_W-1:0] v;
    // fill n distinct entries
    for (int i = 0; i < n; i++) begin
      v = VPN_W'({$urandom} % 32'h0100_0000) * VPN_W'(4) + VPN_W'(i % 4);
      foreach (vpns[k]) if (vpns[k] == v) v = v ^ VPN_W'(32'h0200_0000);
      vpns.push_back(v);
      ppns.push_back(PPN_W'($urandom));
      @(negedge clk);
      f_valid[t] = 1'b1; f_vpn[t] = vpns[i]; f_ppn[t] = ppns[i];
      @(negedge clk);
      f_valid[t] = 1'b0;
    end
    check(nvalid[t] == 8'(n), $sformatf("tlb%0d full (%0d)", t, nvalid[t]));
    foreach (vpns[i]) begin
      lk_vpn[t] = vpns[i]; #1;
      check(lk_hit[t] && lk_ppn[t] == ppns[i], $sformatf("tlb%0d lookup %0d", t, i));
    end
    lk_vpn[t] = vpns[0] ^ VPN_W'(1) ^ VPN_W'(32'h0400_0000); #1;
    check(!lk_hit[t], "unmapped vpn misses");
    // refill of a present vpn updates in place
    @(negedge clk);
    f_valid[t] = 1'b1; f_vpn[t] = vpns[3]; f_ppn[t] = ~ppns[3];
    @(negedge clk);
    f_valid[t] = 1'b0;
    ppns[3] = ~ppns[3];
    lk_vpn[t] = vpns[3]; #1;
    check(lk_hit[t] && lk_ppn[t] == ppns[3], "in-place refill");
    check(nvalid[t] == 8'(n), "in-place refill keeps the count");
    // one more fill replaces entry 0 (round robin wrapped)
    @(negedge clk);
    f_valid[t] = 1'b1; f_vpn[t] = vpns[0] ^ VPN_W'(32'h0400_0000); f_ppn[t] = 1;
    @(negedge clk);
    f_valid[t] = 1'b0;
    lk_vpn[t] = vpns[0]; #1;
    check(!lk_hit[t], "oldest entry replaced");
    lk_vpn[t] = vpns[1]; #1;
    check(lk_hit[t], "next entry kept");
    // SIMF flush
    @(negedge clk);
    flush[t] = 1'b1;
    f_valid[t] = 1'b1;   // a fill in the flush cycle is dropped
    @(negedge clk);
    flush[t] = 1'b0;
    f_valid[t] = 1'b0;
    check(nvalid[t] == 0, $sformatf("tlb%0d empty after flush", t));
    foreach (vpns[i]) begin
      lk_vpn[t] = vpns[i]; #1;
      check(!lk_hit[t], "lookup misses after flush");
    end
  endtask

  initial begin
    for (int t = 0; t < 2; t++) begin
      lk_vpn[t] = '0; f_valid[t] = 0; f_vpn[t] = '0; f_ppn[t] = '0; flush[t] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(0, 32);
    run(1, 128);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
