// tb_victima_l2_cache: the TLB-aware L2 cache at full size (2 MB, 16-way,
// 16 cycles) against the behavioural memory. Checks data read miss/hit with
// the 16-cycle hit latency, writes and dirty write-back, TLB-block insertion
// from a cached and from an uncached PTE line, probes of all eight PTEs of a
// 4 KB and of a 2 MB TLB block, ASID and nested-bit separation, "already
// present" on re-insertion, invalidation by VA, by ASID and of all TLB
// blocks (data untouched, sweep time), and the replacement policy: under
// translation pressure a TLB block survives 20 data fills into its set,
// without pressure it is evicted.
module tb_victima_l2_cache;
  import victima_pkg::*;
  localparam int SETS = 2048;
  logic clk = 0, rst_n = 0, pressure = 0;
  logic req_valid = 0, req_ready; l2_req_t req = '0;
  logic resp_valid; l2_resp_t resp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid; mem_req_t mem_req; logic [LINE_W-1:0] mem_resp_data;
  logic miss_event, init_done;
  int checks = 0, failures = 0, n_miss = 0;

  victima_l2_cache dut (.clk, .rst_n, .tlb_pressure(pressure), .req_valid, .req_ready, .req,
    .resp_valid, .resp, .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_data,
    .miss_event, .init_done);
  tb_mem_model #(.LATENCY(40)) mem (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && miss_event) n_miss++;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lat;
  task automatic xfer(input l2_req_t r, output l2_resp_t o);
    int cyc = 0;
    @(negedge clk); req_valid = 1; req = r;
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1 req_valid = 0;
    while (!resp_valid && cyc < 100000) begin @(posedge clk); #1; cyc++; end
    lat = cyc + 1;
    o = resp;
  endtask

  function automatic l2_req_t rq(input l2_op_e op, input logic [PA_W-1:0] pa, input logic [63:0] wd,
                                 input logic [VPN_W-1:0] vpn, input int asid, input page_size_e ps,
                                 input bit nested);
    l2_req_t r;
    r.op = op; r.pa = pa; r.wdata = wd; r.vpn = vpn; r.asid = ASID_W'(asid); r.ps = ps; r.nested = nested;
    return r;
  endfunction

  function automatic logic [63:0] pat(input logic [PA_W-1:0] pa);
    return {pa[31:0], ~pa[31:0]};
  endfunction

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic probe(input logic [VPN_W-1:0] v, input int asid, input bit nested,
                       input bit exp_hit, input page_size_e exp_ps, input logic [63:0] exp_pte,
                       input string what);
    l2_resp_t o;
    xfer(rq(L2_TLB_PROBE, 0, 0, v, asid, PS_4K, nested), o);
    chk(o.hit == exp_hit && (!exp_hit || (o.ps == exp_ps && o.rdata == exp_pte)) && lat == 16, what);
  endtask

  initial begin
    l2_resp_t o;
    logic [PA_W-1:0] a, b, p4, p2;
    logic [VPN_W-1:0] v4, v2;
    int t0;
    // memory contents: a pattern in every word used below
    for (int i = 0; i < 64; i++) for (int w = 0; w < 8; w++) begin
      mem.wr_word(52'h0_0040_0000 + 52'(i * SETS * 64) + 52'(w * 8), pat(52'h0_0040_0000 + 52'(i * SETS * 64) + 52'(w * 8)));
      mem.wr_word(52'h0_0900_0000 + 52'(i * 64) + 52'(w * 8), pat(52'h0_0900_0000 + 52'(i * 64) + 52'(w * 8)));
    end
    repeat (3) @(negedge clk); rst_n = 1;
    t0 = 0;
    while (!init_done) begin @(negedge clk); t0++; end
    chk(t0 >= SETS - 2 && t0 <= SETS + 2, "init sweep length");

    // ---- data ----
    a = 52'h0_0040_0000 + 52'h18;
    xfer(rq(L2_READ, a, 0, 0, 0, PS_4K, 0), o);
    chk(!o.hit && o.dram && o.rdata == pat(a) && lat > 40, $sformatf("read miss h%0d d%0d %h lat %0d", o.hit, o.dram, o.rdata, lat));
    xfer(rq(L2_READ, a, 0, 0, 0, PS_4K, 0), o);
    chk(o.hit && !o.dram && o.rdata == pat(a) && lat == 16, $sformatf("read hit, latency %0d", lat));
    xfer(rq(L2_WRITE, a, 64'hDEAD_BEEF_0123_4567, 0, 0, PS_4K, 0), o);
    chk(o.hit, "write hit");
    xfer(rq(L2_READ, a, 0, 0, 0, PS_4K, 0), o);
    chk(o.hit && o.rdata == 64'hDEAD_BEEF_0123_4567, "read after write");
    chk(n_miss == 1, "one miss event");
    // Fill the rest of the set. New lines enter at the maximum RRPV (Listing
    // 1), so the lowest-numbered such way is the next victim every time: a
    // write miss lands there dirty and the next fill writes it back.
    for (int i = 1; i <= 16; i++) xfer(rq(L2_READ, 52'h0_0040_0000 + 52'(i * SETS * 64), 0, 0, 0, PS_4K, 0), o);
    b = 52'h0_0040_0000 + 52'(17 * SETS * 64) + 52'h20;
    xfer(rq(L2_WRITE, b, 64'hDEAD_BEEF_0123_4567, 0, 0, PS_4K, 0), o);
    chk(!o.hit && o.dram, "write miss allocates");
    chk(mem.n_writes == 0, "no write-back yet");
    xfer(rq(L2_READ, 52'h0_0040_0000 + 52'(18 * SETS * 64), 0, 0, 0, PS_4K, 0), o);
    chk(mem.n_writes == 1 && mem.rd_word(b) == 64'hDEAD_BEEF_0123_4567, "dirty line written back");
    xfer(rq(L2_READ, b, 0, 0, 0, PS_4K, 0), o);
    chk(!o.hit && o.rdata == 64'hDEAD_BEEF_0123_4567, "re-read after write-back misses");
    xfer(rq(L2_READ, a, 0, 0, 0, PS_4K, 0), o);
    chk(o.hit && o.rdata == 64'hDEAD_BEEF_0123_4567, "reused line (RRPV 0) kept");

    // ---- 4 KB TLB block from a cached PTE line ----
    p4 = 52'h0_0900_0000 + 52'h40;                 // line 1 of the PTE area
    xfer(rq(L2_READ, p4, 0, 0, 0, PS_4K, 0), o);    // bring it in (as the walk would)
    v4 = 36'h0_1234_5678 & ~36'h7;
    xfer(rq(L2_TLB_INSERT, p4 + 52'h10, 0, v4 + 36'd5, 5, PS_4K, 0), o);
    chk(!o.hit && !o.dram, "insert 4 KB block from cached line");
    for (int k = 0; k < 8; k++)
      probe(v4 + 36'(k), 5, 0, 1, PS_4K, pat(p4 + 52'(k * 8)), $sformatf("4 KB probe PTE %0d", k));
    probe(v4 + 36'd3, 6, 0, 0, PS_4K, 0, "other ASID misses");
    probe(v4 + 36'd8, 5, 0, 0, PS_4K, 0, "next block misses");
    probe(v4 + 36'd3, 5, 1, 0, PS_4K, 0, "nested probe misses a TLB block");
    xfer(rq(L2_TLB_INSERT, p4, 0, v4, 5, PS_4K, 0), o);
    chk(o.hit, "re-insert reports present");
    xfer(rq(L2_READ, p4, 0, 0, 0, PS_4K, 0), o);
    chk(o.hit, "PTE data line still cached");

    // ---- 2 MB TLB block from an uncached line ----
    p2 = 52'h0_0900_0000 + 52'h400;
    v2 = 36'h0_0ABC_DE00 & ~36'hFFF;               // 8 consecutive 2 MB pages
    xfer(rq(L2_TLB_INSERT, p2, 0, v2, 5, PS_2M, 0), o);
    chk(!o.hit && o.dram, "insert 2 MB block from memory");
    for (int k = 0; k < 8; k++)
      probe(v2 + 36'(k * 512) + 36'(k * 37), 5, 0, 1, PS_2M, pat(p2 + 52'(k * 8)), $sformatf("2 MB probe PTE %0d", k));
    // nested TLB block
    xfer(rq(L2_TLB_INSERT, p4 + 52'h40, 0, 36'h0_0555_0000, 9, PS_4K, 1), o);
    probe(36'h0_0555_0002, 9, 1, 1, PS_4K, pat(p4 + 52'h40 + 52'h10), "nested block hit");
    probe(36'h0_0555_0002, 9, 0, 0, PS_4K, 0, "TLB probe misses a nested block");

    // ---- invalidation ----
    xfer(rq(L2_INV_VA, 0, 0, v4 + 36'd3, 5, PS_4K, 0), o);
    chk(lat == 16, $sformatf("INV_VA latency %0d", lat));
    probe(v4, 5, 0, 0, PS_4K, 0, "INV_VA removes the whole block");
    probe(v2 + 36'd1, 5, 0, 1, PS_2M, pat(p2), "INV_VA leaves other blocks");
    xfer(rq(L2_TLB_INSERT, p4, 0, v4, 7, PS_4K, 0), o);
    xfer(rq(L2_INV_ASID, 0, 0, 0, 5, PS_4K, 0), o);
    chk(lat >= SETS && lat <= SETS + 4, $sformatf("ASID sweep time %0d", lat));
    probe(v2, 5, 0, 0, PS_4K, 0, "INV_ASID removes ASID 5");
    probe(v4, 7, 0, 1, PS_4K, pat(p4), "INV_ASID keeps ASID 7");
    xfer(rq(L2_INV_ASID, 0, 0, 0, 12'h807, PS_4K, 0), o);
    probe(v4, 7, 0, 0, PS_4K, 0, "ASID wider than 11 bits flushes all");
    xfer(rq(L2_TLB_INSERT, p4, 0, v4, 7, PS_4K, 0), o);
    xfer(rq(L2_INV_ALL, 0, 0, 0, 0, PS_4K, 0), o);
    probe(v4, 7, 0, 0, PS_4K, 0, "INV_ALL");
    probe(36'h0_0555_0002, 9, 1, 0, PS_4K, 0, "INV_ALL removes nested blocks");
    xfer(rq(L2_READ, p4, 0, 0, 0, PS_4K, 0), o);
    chk(o.hit, "data survives TLB invalidation");

    // ---- replacement: TLB block vs data in one set ----
    // 4 KB block of v lands in set v[13:3]; data line pa lands in set pa[16:6]
    pressure = 1;
    v4 = 36'h0_7000_0000 | (36'(11'h155) << 3);
    xfer(rq(L2_TLB_INSERT, p4, 0, v4, 3, PS_4K, 0), o);
    for (int i = 0; i < 20; i++)
      xfer(rq(L2_READ, 52'h0_2000_0000 + 52'(i * SETS * 64) + 52'(11'h155 << 6), 0, 0, 0, PS_4K, 0), o);
    probe(v4, 3, 0, 1, PS_4K, pat(p4), "TLB block kept under pressure");
    pressure = 0;
    v4 = 36'h0_7100_0000 | (36'(11'h2AA) << 3);
    xfer(rq(L2_TLB_INSERT, p4, 0, v4, 3, PS_4K, 0), o);
    for (int i = 0; i < 20; i++)
      xfer(rq(L2_READ, 52'h0_2000_0000 + 52'(i * SETS * 64) + 52'(11'h2AA << 6), 0, 0, 0, PS_4K, 0), o);
    probe(v4, 3, 0, 0, PS_4K, 0, "TLB block evicted without pressure");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
