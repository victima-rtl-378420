// Shared body of the TLB testbenches. The including module defines
// ENTRIES, WAYS, LATENCY, HOLD_4K, HOLD_2M before including this file.
// Checks: lookup latency, hits and PPNs after fills in distinct sets,
// misses for unknown VPNs and foreign ASIDs, one eviction when a set
// overflows (the evicted page then misses, the others hit), overwrite of a
// duplicate without eviction, 2 MB entries hit anywhere in their 2 MB page,
// and the three invalidation commands.
  import victima_pkg::*;
  localparam int SETS = ENTRIES / WAYS;
  logic clk = 0, rst_n = 0;
  logic lookup_valid = 0; logic [VPN_W-1:0] lookup_vpn = 0; logic [ASID_W-1:0] lookup_asid = 0;
  logic resp_valid, resp_hit; tlb_entry_t resp_entry;
  logic fill_valid = 0; tlb_entry_t fill_entry = '0;
  logic evict_valid; tlb_entry_t evict_entry;
  logic inv_all = 0, inv_asid = 0, inv_va = 0;
  logic [ASID_W-1:0] inv_asid_val = 0; logic [VPN_W-1:0] inv_vpn = 0;
  int checks = 0, failures = 0;
  int n_evict = 0; tlb_entry_t last_evict;

  set_assoc_tlb #(.ENTRIES(ENTRIES), .WAYS(WAYS), .LATENCY(LATENCY), .HOLD_4K(HOLD_4K), .HOLD_2M(HOLD_2M)) dut (
    .clk, .rst_n, .lookup_valid, .lookup_vpn, .lookup_asid, .resp_valid, .resp_hit, .resp_entry,
    .fill_valid, .fill_entry, .evict_valid, .evict_entry, .inv_all, .inv_asid, .inv_va,
    .inv_asid_val, .inv_vpn);

  always #5 clk = ~clk;
  always @(posedge clk) if (evict_valid) begin n_evict++; last_evict = evict_entry; end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PPN_W-1:0] ppn_of(input logic [VPN_W-1:0] v);
    return PPN_W'(v) ^ 40'hA5_0000_0000 ^ 40'h0_0000_3C3C;
  endfunction

  function automatic tlb_entry_t mk(input logic [VPN_W-1:0] v, input logic [ASID_W-1:0] a, input bit big);
    tlb_entry_t e;
    e = '0; e.valid = 1; e.asid = a; e.vpn = v; e.ps = big ? PS_2M : PS_4K; e.ppn = ppn_of(v);
    if (big) begin e.vpn[8:0] = 0; e.ppn = ppn_of(e.vpn); e.ppn[8:0] = 0; end
    e.freq = 3'(v); e.cost = 4'(v >> 3);
    return e;
  endfunction

  task automatic fill(input tlb_entry_t e);
    @(negedge clk); fill_valid = 1; fill_entry = e;
    @(negedge clk); fill_valid = 0;
  endtask

  // Look up and check hit/miss, PPN and the latency in cycles.
  task automatic look(input logic [VPN_W-1:0] v, input logic [ASID_W-1:0] a, input bit exp_hit,
                      input logic [PPN_W-1:0] exp_ppn);
    int cyc = 0;
    @(negedge clk); lookup_valid = 1; lookup_vpn = v; lookup_asid = a;
    @(posedge clk); #1 lookup_valid = 0;
    while (!resp_valid && cyc < 100) begin @(posedge clk); #1; cyc++; end
    cyc++;
    checks++;
    if (!resp_valid || cyc != LATENCY) begin
      failures++; $display("FAIL latency %0d (expected %0d)", cyc, LATENCY);
    end
    checks++;
    if (resp_hit !== exp_hit || (exp_hit && resp_entry.ppn !== exp_ppn)) begin
      failures++;
      $display("FAIL vpn=%h asid=%0d hit=%0d exp=%0d ppn=%h exp=%h", v, a, resp_hit, exp_hit,
               resp_entry.ppn, exp_ppn);
    end
  endtask

  initial begin
    logic [VPN_W-1:0] base;
    int ev0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // distinct sets, 4 KB pages (or 2 MB pages for a 2 MB-only TLB)
    for (int i = 0; i < SETS / 2 && i < 64; i++) begin
      if (HOLD_4K) fill(mk(VPN_W'(36'h12340 + i), 12'd7, 0));
      else         fill(mk(VPN_W'((36'h1234 + i) << 9), 12'd7, 1));
    end
    checks++; if (n_evict != 0) begin failures++; $display("FAIL unexpected eviction"); end
    for (int i = 0; i < SETS / 2 && i < 64; i++) begin
      if (HOLD_4K) look(VPN_W'(36'h12340 + i), 12'd7, 1, ppn_of(VPN_W'(36'h12340 + i)));
      else         look(VPN_W'(((36'h1234 + i) << 9) + 5), 12'd7, 1, mk(VPN_W'((36'h1234 + i) << 9), 7, 1).ppn);
    end
    // foreign ASID and unknown page miss
    if (HOLD_4K) begin
      look(VPN_W'(36'h12340), 12'd8, 0, '0);
      look(VPN_W'(36'h99999), 12'd7, 0, '0);
    end
    // overflow one set: WAYS+1 pages in the set of base
    base = HOLD_4K ? VPN_W'(36'h5000F) : VPN_W'(36'h5000F << 9);
    ev0 = n_evict;
    for (int i = 0; i <= WAYS; i++)
      fill(mk(base + VPN_W'(HOLD_4K ? i * SETS : (i * SETS) << 9), 12'd3, !HOLD_4K));
    @(negedge clk);
    checks++;
    if (n_evict != ev0 + 1) begin failures++; $display("FAIL evictions %0d", n_evict - ev0); end
    begin
      int hits = 0;
      for (int i = 0; i <= WAYS; i++) begin
        logic [VPN_W-1:0] v;
        bit was_evicted;
        v = base + VPN_W'(HOLD_4K ? i * SETS : (i * SETS) << 9);
        was_evicted = (last_evict.vpn == v);
        look(v, 12'd3, !was_evicted, mk(v, 3, !HOLD_4K).ppn);
      end
    end
    // duplicate fill: no eviction
    ev0 = n_evict;
    fill(mk(base + VPN_W'(HOLD_4K ? SETS : SETS << 9), 12'd3, !HOLD_4K));
    @(negedge clk);
    checks++; if (n_evict != ev0) begin failures++; $display("FAIL duplicate evicted"); end
    // 2 MB entries in a TLB that holds both sizes
    if (HOLD_4K && HOLD_2M) begin
      fill(mk(VPN_W'(36'h777 << 9), 12'd9, 1));
      look(VPN_W'((36'h777 << 9) + 9'h1AB), 12'd9, 1, mk(VPN_W'(36'h777 << 9), 9, 1).ppn);
      look(VPN_W'((36'h778 << 9)), 12'd9, 0, '0);
    end
    // invalidate by VA
    @(negedge clk); inv_va = 1; inv_asid_val = 7;
    inv_vpn = HOLD_4K ? VPN_W'(36'h12341) : VPN_W'((36'h1235) << 9);
    @(negedge clk); inv_va = 0;
    look(inv_vpn, 12'd7, 0, '0);
    if (HOLD_4K) look(VPN_W'(36'h12342), 12'd7, 1, ppn_of(VPN_W'(36'h12342)));
    // invalidate by ASID 7: the ASID-3 pages survive
    @(negedge clk); inv_asid = 1; inv_asid_val = 7;
    @(negedge clk); inv_asid = 0;
    if (HOLD_4K) look(VPN_W'(36'h12342), 12'd7, 0, '0);
    look(base + VPN_W'(HOLD_4K ? SETS : SETS << 9), 12'd3, 1, mk(base + VPN_W'(HOLD_4K ? SETS : SETS << 9), 3, !HOLD_4K).ppn);
    // invalidate all
    @(negedge clk); inv_all = 1;
    @(negedge clk); inv_all = 0;
    look(base + VPN_W'(HOLD_4K ? SETS : SETS << 9), 12'd3, 0, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
