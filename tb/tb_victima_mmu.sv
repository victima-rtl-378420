// tb_victima_mmu: the MMU on its own, in front of a TLB-aware L2 cache
// (full 2 MB, 16-way) and the behavioural memory holding four-level page
// tables. The testbench drives the two MPKI flags (translation pressure and
// high L2 cache MPKI) directly instead of through the epoch monitors.
//
// Every translation's physical address and source (L1 TLB, L2 TLB, TLB
// block in the L2 cache, page walk) are checked. Phases:
//   A  first walk of a 4 KB page inserts its TLB block; neighbours are found
//      in the L2 cache (walk aborted); L1 and L2 TLB hit latencies (1 and 12
//      cycles); a page fault; 2 MB pages and a 2 MB TLB block.
//   B  thirteen pages in one L2 TLB set with insertion disabled for the first
//      twelve: the thirteenth fill evicts a costly entry, whose block is built
//      by a background walk and later serves the evicted page.
//   C  invalidation by VA, by ASID and of everything.
//   D  with the high-L2-MPKI flag set, a page the predictor rejects is
//      inserted anyway (bypass).
// Each MMU event type is counted; one that never occurred is a failure.
module tb_victima_mmu;
  import victima_pkg::*;
  logic clk = 0, rst_n = 0;
  logic tr_valid = 0, tr_ready, tr_is_instr = 0, tr_resp_valid, tr_resp_fault;
  logic [VA_W-1:0] tr_va = '0;
  logic [PA_W-1:0] tr_resp_pa;
  tr_src_e tr_resp_src;
  logic [PPN_W-1:0] cr3 = 40'h100;
  logic [ASID_W-1:0] asid = 12'd5;
  logic inv_valid = 0, inv_ready, inv_done;
  inv_kind_e inv_kind = INV_ALL;
  logic [ASID_W-1:0] inv_asid = '0;
  logic [VA_W-1:0] inv_va = '0;
  logic cp_cfg_we = 0; logic [1:0] cp_cfg_sel = 0; logic [3:0] cp_cfg_data = 0;
  logic mem_req_valid, mem_req_ready, mem_resp_valid; mem_req_t mem_req; logic [LINE_W-1:0] mem_resp_data;
  mmu_ev_t ev;
  logic tlb_pressure = 0, l2c_high_mpki = 0, l2c_init_done;
  int checks = 0, failures = 0;

  logic c_valid, c_ready, c_resp_valid; l2_req_t c_req; l2_resp_t c_resp; logic c_miss;
  victima_mmu dut (.clk, .rst_n, .tr_valid(tr_valid && l2c_init_done), .tr_ready, .tr_va, .tr_is_instr,
    .tr_resp_valid, .tr_resp_pa, .tr_resp_fault, .tr_resp_src, .cr3_ppn(cr3), .cur_asid(asid),
    .inv_valid(inv_valid && l2c_init_done), .inv_ready, .inv_kind, .inv_asid, .inv_va, .inv_done,
    .cp_cfg_we, .cp_cfg_sel, .cp_cfg_data, .l2c_high_mpki, .l2_req_valid(c_valid),
    .l2_req_ready(c_ready), .l2_req(c_req), .l2_resp_valid(c_resp_valid), .l2_resp(c_resp), .ev);
  victima_l2_cache l2c (.clk, .rst_n, .tlb_pressure, .req_valid(c_valid), .req_ready(c_ready),
    .req(c_req), .resp_valid(c_resp_valid), .resp(c_resp), .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp_data, .miss_event(c_miss), .init_done(l2c_init_done));
  tb_mem_model #(.LATENCY(40)) mem (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  always #5 clk = ~clk;

  // ---- event counters ----
  int n_l1, n_l2h, n_l2m, n_l2c, n_walk, n_fault, n_costly, n_bypass, n_evict, n_evcostly,
      n_present, n_bg, n_ins, n_inv, n_press, n_high;
  initial begin
    n_l1 = 0; n_l2h = 0; n_l2m = 0; n_l2c = 0; n_walk = 0; n_fault = 0; n_costly = 0; n_bypass = 0;
    n_evict = 0; n_evcostly = 0; n_present = 0; n_bg = 0; n_ins = 0; n_inv = 0; n_press = 0; n_high = 0;
  end
  always @(posedge clk) if (rst_n && l2c_init_done) begin
    n_l1 += int'(ev.l1_hit); n_l2h += int'(ev.l2tlb_hit); n_l2m += int'(ev.l2tlb_miss);
    n_l2c += int'(ev.l2c_tlb_hit); n_walk += int'(ev.walk_done); n_fault += int'(ev.fault);
    n_costly += int'(ev.pred_costly); n_bypass += int'(ev.pred_bypass);
    n_evict += int'(ev.l2tlb_evict); n_evcostly += int'(ev.evict_costly);
    n_present += int'(ev.evict_present); n_bg += int'(ev.bg_walk); n_ins += int'(ev.insert);
    n_inv += int'(ev.inv); n_press += int'(tlb_pressure); n_high += int'(l2c_high_mpki);
  end

  initial begin
    #50000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---- translation ----
  int lat;
  logic [PA_W-1:0] r_pa; logic r_fault; tr_src_e r_src;
  task automatic translate(input logic [VA_W-1:0] va, input bit instr);
    int cyc = 0;
    @(negedge clk); tr_valid = 1; tr_va = va; tr_is_instr = instr;
    #1; while (!tr_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 tr_valid = 0;
    while (!tr_resp_valid && cyc < 100000) begin @(posedge clk); #1; cyc++; end
    lat = cyc + 1; r_pa = tr_resp_pa; r_fault = tr_resp_fault; r_src = tr_resp_src;
  endtask

  task automatic expect_tr(input logic [VA_W-1:0] va, input bit instr, input logic [PA_W-1:0] pa,
                           input tr_src_e src, input string what);
    translate(va, instr);
    chk(!r_fault && r_pa == pa && r_src == src,
        $sformatf("%s: va %h pa %h (exp %h) src %s (exp %s) fault %0d", what, va, r_pa, pa,
                  r_src.name(), src.name(), r_fault));
  endtask

  task automatic idle(input int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic cfg(input int sel, input int val);
    @(negedge clk); cp_cfg_we = 1; cp_cfg_sel = 2'(sel); cp_cfg_data = 4'(val);
    @(negedge clk); cp_cfg_we = 0;
  endtask

  task automatic invalidate(input inv_kind_e k, input logic [ASID_W-1:0] a, input logic [VA_W-1:0] va);
    int cyc = 0;
    @(negedge clk); inv_valid = 1; inv_kind = k; inv_asid = a; inv_va = va;
    #1; while (!inv_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 inv_valid = 0;
    while (!inv_done && cyc < 100000) begin @(posedge clk); #1; cyc++; end
    chk(inv_done, $sformatf("invalidation %s done", k.name()));
  endtask

  function automatic logic [PA_W-1:0] pa4(input logic [PPN_W-1:0] ppn, input logic [VA_W-1:0] va);
    return {ppn, va[11:0]};
  endfunction
  function automatic logic [PA_W-1:0] pa2(input logic [PPN_W-1:0] ppn, input logic [VA_W-1:0] va);
    return {ppn[PPN_W-1:9], va[20:0]};
  endfunction

  localparam logic [VA_W-1:0] V   = 48'h0000_4000_0000;   // 4 KB pages, block-aligned
  localparam logic [VA_W-1:0] V2M = 48'h0000_8000_0000;   // 2 MB pages
  localparam logic [VA_W-1:0] E   = 48'h0000_6000_5000;   // L2 TLB set 5
  localparam logic [VA_W-1:0] F   = 48'h0000_A000_0000;   // phase D pages

  initial begin
    int t0, lat_l1, lat_l2;
    logic [VA_W-1:0] va;
    for (int i = 0; i < 8; i++) mem.map_page(cr3, V + 48'(i * 4096), 40'h50000 + 40'(i), 0);
    for (int i = 0; i < 2; i++) mem.map_page(cr3, V2M + 48'(i * 2097152), 40'h80000 + 40'(i * 512), 1);
    for (int i = 0; i < 13; i++) mem.map_page(cr3, E + 48'(i * 128 * 4096), 40'h60000 + 40'(i), 0);
    for (int i = 0; i < 12; i++) mem.map_page(cr3, F + 48'(i * 8 * 4096), 40'h70000 + 40'(i), 0);

    idle(3); rst_n = 1;
    while (!l2c_init_done) @(negedge clk);

    // ---------------- A ----------------
    expect_tr(V + 48'h123, 0, pa4(40'h50000, 48'h123), SRC_PTW, "first walk");
    idle(300);
    chk(n_costly == 1 && n_ins == 1, $sformatf("first walk predicted costly and inserted (%0d %0d)", n_costly, n_ins));
    expect_tr(V + 48'h456, 0, pa4(40'h50000, 48'h456), SRC_L1TLB, "L1 D-TLB hit");
    lat_l1 = lat;
    chk(lat_l1 == 2, $sformatf("L1 TLB hit answered in %0d cycles (1 lookup + 1 response)", lat_l1));
    expect_tr(V + 48'h1ABC, 0, pa4(40'h50001, 48'hABC), SRC_L2C, "neighbour from TLB block");
    expect_tr(V + 48'h7008, 1, pa4(40'h50007, 48'h008), SRC_L2C, "instruction fetch from TLB block");
    expect_tr(V + 48'h0010, 1, pa4(40'h50000, 48'h010), SRC_L2TLB, "I-TLB miss, L2 TLB hit");
    lat_l2 = lat;
    chk(lat_l2 == lat_l1 + 12 + 1, $sformatf("L2 TLB hit answered in %0d cycles (L1 + 12 + fill)", lat_l2));
    translate(48'h0000_7000_0000, 0);
    chk(r_fault && r_src == SRC_PTW, "unmapped page faults");
    expect_tr(V2M + 48'h12345, 0, pa2(40'h80000, 48'h12345), SRC_PTW, "2 MB walk");
    idle(300);
    expect_tr(V2M + 48'h200000 + 48'h777, 0, pa2(40'h80200, 48'h777), SRC_L2C, "2 MB TLB block");
    expect_tr(V2M + 48'h1F_0000, 0, pa2(40'h80000, 48'h1F_0000), SRC_L1TLB, "2 MB L1 hit");

    // ---------------- B ----------------
    cfg(0, 7);                                   // only freq 7 is costly: nothing inserted
    for (int i = 0; i < 12; i++) begin
      expect_tr(E + 48'(i * 128 * 4096) + 48'h8, 0, pa4(40'h60000 + 40'(i), 48'h8), SRC_PTW, "set-5 walk");
      idle(50);
    end
    chk(n_evict == 0 && n_bg == 0, "twelve ways filled without eviction");
    t0 = n_ins;
    cfg(0, 1);
    expect_tr(E + 48'(12 * 128 * 4096) + 48'h8, 0, pa4(40'h6000C, 48'h8), SRC_PTW, "13th page");
    idle(600);
    chk(n_evict == 1 && n_evcostly == 1 && n_bg == 1 && n_ins == t0 + 2,
        $sformatf("eviction -> background walk -> insert (%0d %0d %0d %0d)", n_evict, n_evcostly, n_bg, n_ins - t0));
    // the evicted page now comes from the L2 cache (exactly one of the twelve)
    t0 = n_l2c;
    for (int i = 0; i < 12; i++) begin
      translate(E + 48'(i * 128 * 4096), 0);
      chk(!r_fault && r_pa == pa4(40'h60000 + 40'(i), 0), "set-5 re-translation");
      idle(600);
    end
    chk(n_l2c > t0, $sformatf("evicted pages found as TLB blocks (%0d)", n_l2c - t0));

    // ---------------- C ----------------
    invalidate(INV_VA, asid, V + 48'h2000);
    expect_tr(V + 48'h2000, 0, pa4(40'h50002, 0), SRC_PTW, "after INV_VA the block is gone");
    idle(300);
    // its PTE line was still cached: walk cost 0, below the box, not inserted
    expect_tr(V + 48'h3000, 0, pa4(40'h50003, 0), SRC_PTW, "cheap walk is not inserted");
    invalidate(INV_ASID, asid, '0);
    expect_tr(V + 48'h3000, 0, pa4(40'h50003, 0), SRC_PTW, "after INV_ASID");
    idle(300);
    asid = 12'd6;
    expect_tr(V + 48'h3000, 0, pa4(40'h50003, 0), SRC_PTW, "other ASID does not hit");
    idle(300);
    invalidate(INV_ALL, '0, '0);
    asid = 12'd5;

    // ---------------- D ----------------
    chk(!tlb_pressure && !l2c_high_mpki, "no pressure before the first epoch ends");
    for (int i = 0; i < 8; i++) begin
      expect_tr(F + 48'(i * 8 * 4096), 0, pa4(40'h70000 + 40'(i), 0), SRC_PTW, "phase D walk");
      idle(300);
    end
    tlb_pressure = 1; l2c_high_mpki = 1;
    chk(tlb_pressure && l2c_high_mpki, "pressure and high L2 MPKI after the epoch");
    cfg(0, 7);
    t0 = n_ins;
    expect_tr(F + 48'(9 * 8 * 4096), 0, pa4(40'h70009, 0), SRC_PTW, "bypassed walk");
    idle(300);
    chk(n_ins == t0 + 1, "predictor bypass inserts a non-costly page");
    expect_tr(F + 48'(9 * 8 * 4096) + 48'h1000, 0, 52'h0, SRC_L2C, "neighbour of bypassed page");
    cfg(0, 1);
    idle(400);

    // ---------------- mechanism counts ----------------
    $display("events: l1 %0d l2tlb-hit %0d l2tlb-miss %0d l2c-tlb-hit %0d walks %0d faults %0d costly %0d bypass %0d",
             n_l1, n_l2h, n_l2m, n_l2c, n_walk, n_fault, n_costly, n_bypass);
    $display("        evict %0d evict-costly %0d present %0d bg-walk %0d insert %0d inv %0d pressure-cycles %0d high-mpki-cycles %0d ",
             n_evict, n_evcostly, n_present, n_bg, n_ins, n_inv, n_press, n_high);
    chk(n_l1 > 0, "L1 TLB hits seen");
    chk(n_l2h > 0, "L2 TLB hits seen");
    chk(n_l2m > 0, "L2 TLB misses seen");
    chk(n_l2c > 0, "L2 cache TLB-block hits seen");
    chk(n_walk > 0, "walks seen");
    chk(n_fault > 0, "faults seen");
    chk(n_costly > 0, "costly predictions seen");
    chk(n_bypass > 0, "predictor bypass seen");
    chk(n_evict > 0, "L2 TLB evictions seen");
    chk(n_evcostly > 0, "costly evictions seen");
    chk(n_bg > 0, "background walks seen");
    chk(n_ins > 0, "insertions seen");
    chk(n_inv > 0, "invalidations seen");
    chk(n_press > 0, "translation pressure seen");
    chk(n_high > 0, "high L2 MPKI seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
