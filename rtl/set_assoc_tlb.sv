// set_assoc_tlb: set-associative TLB for 4 KB and/or 2 MB pages.
//
// Used for every TLB level of the MMU: the L1 I-TLB (128 entries, 8-way),
// the L1 D-TLBs for 4 KB (64, 4-way) and 2 MB pages (32, 4-way) and the
// unified L2 TLB (1536, 12-way, 12 cycles); the defaults are the L2 TLB's.
// An entry holds ASID, VPN, page size, PPN and the PTE's PTW frequency and
// cost counters, which the PTW cost predictor reads when the entry is evicted.
//
// Lookup: lookup_valid with a 4 KB VPN and ASID. The set of a 4 KB entry is
// indexed by the low VPN bits, that of a 2 MB entry by the VPN bits above the
// 2 MB page offset; when the TLB holds both sizes both sets are probed in the
// same cycle. The answer (resp_valid, resp_hit, resp_entry) appears LATENCY
// cycles later; lookups are pipelined, one per cycle.
//
// Fill: fill_valid with an entry. An entry with the same VPN, ASID and size is
// overwritten; otherwise the lowest invalid way is used, else the way named by
// the set's round-robin pointer, whose entry is then reported one cycle later
// on evict_valid/evict_entry. Replacement policy and the fill/evict timing are
// this design's choice (the paper gives only sizes, associativity and latency).
//
// Invalidation, one cycle: inv_all clears everything; inv_asid clears the
// entries of inv_asid_val; inv_va clears the entry translating inv_vpn in
// address space inv_asid_val (either page size).
module set_assoc_tlb
  import victima_pkg::*;
#(
  parameter int unsigned ENTRIES = 1536,
  parameter int unsigned WAYS    = 12,
  parameter int unsigned LATENCY = 12,
  parameter bit          HOLD_4K = 1'b1,
  parameter bit          HOLD_2M = 1'b1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lookup_valid,
  input  logic [VPN_W-1:0]  lookup_vpn,
  input  logic [ASID_W-1:0] lookup_asid,
  output logic              resp_valid,
  output logic              resp_hit,
  output tlb_entry_t        resp_entry,
  input  logic              fill_valid,
  input  tlb_entry_t        fill_entry,
  output logic              evict_valid,
  output tlb_entry_t        evict_entry,
  input  logic              inv_all,
  input  logic              inv_asid,
  input  logic              inv_va,
  input  logic [ASID_W-1:0] inv_asid_val,
  input  logic [VPN_W-1:0]  inv_vpn
);

  localparam int unsigned SETS  = ENTRIES / WAYS;
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  tlb_entry_t      ent_q [SETS][WAYS];
  logic [WAYS-1:0] vld_q [SETS];
  logic [WAY_W-1:0] rr_q [SETS];

  function automatic logic [IDX_W-1:0] set_of(input logic [VPN_W-1:0] vpn, input page_size_e ps);
    logic [VPN_W-1:0] v;
    v = (ps == PS_2M) ? (vpn >> 9) : vpn;
    return (SETS > 1) ? IDX_W'(v % SETS) : '0;
  endfunction

  function automatic logic entry_match(input tlb_entry_t e, input logic [VPN_W-1:0] vpn,
                                   input logic [ASID_W-1:0] asid);
    if (e.asid != asid) return 1'b0;
    if (e.ps == PS_2M) return e.vpn[VPN_W-1:9] == vpn[VPN_W-1:9];
    return e.vpn == vpn;
  endfunction

  // ---------------- lookup ----------------
  logic        l_hit;
  tlb_entry_t  l_entry;
  logic [IDX_W-1:0] s4, s2;

  always_comb begin
    l_hit   = 1'b0;
    l_entry = '0;
    s4 = set_of(lookup_vpn, PS_4K);
    s2 = set_of(lookup_vpn, PS_2M);
    for (int w = 0; w < WAYS; w++) begin
      if (HOLD_4K && vld_q[s4][w] && ent_q[s4][w].ps == PS_4K &&
          entry_match(ent_q[s4][w], lookup_vpn, lookup_asid)) begin
        l_hit = 1'b1; l_entry = ent_q[s4][w];
      end
      if (HOLD_2M && vld_q[s2][w] && ent_q[s2][w].ps == PS_2M &&
          entry_match(ent_q[s2][w], lookup_vpn, lookup_asid)) begin
        l_hit = 1'b1; l_entry = ent_q[s2][w];
      end
    end
  end

  logic       pv_q  [LATENCY];
  logic       ph_q  [LATENCY];
  tlb_entry_t pe_q  [LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) begin
        pv_q[i] <= 1'b0; ph_q[i] <= 1'b0; pe_q[i] <= '0;
      end
    end else begin
      pv_q[0] <= lookup_valid;
      ph_q[0] <= lookup_valid && l_hit;
      pe_q[0] <= l_entry;
      for (int i = 1; i < LATENCY; i++) begin
        pv_q[i] <= pv_q[i-1]; ph_q[i] <= ph_q[i-1]; pe_q[i] <= pe_q[i-1];
      end
    end
  end

  assign resp_valid = pv_q[LATENCY-1];
  assign resp_hit   = ph_q[LATENCY-1];
  assign resp_entry = pe_q[LATENCY-1];

  // ---------------- fill / replacement ----------------
  logic [IDX_W-1:0] f_set;
  logic [WAY_W-1:0] f_way;
  logic             f_dup, f_inv;

  always_comb begin
    f_set = set_of(fill_entry.vpn, fill_entry.ps);
    f_dup = 1'b0;
    f_inv = 1'b0;
    f_way = rr_q[f_set];
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (!vld_q[f_set][w]) begin
        f_inv = 1'b1; f_way = WAY_W'(w);
      end
    end
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (vld_q[f_set][w] && ent_q[f_set][w].ps == fill_entry.ps &&
          entry_match(ent_q[f_set][w], fill_entry.vpn, fill_entry.asid)) begin
        f_dup = 1'b1; f_way = WAY_W'(w);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) ent_q[f_set][f_way] <= fill_entry;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        vld_q[s] <= '0;
        rr_q[s]  <= '0;
      end
      evict_valid <= 1'b0;
      evict_entry <= '0;
    end else begin
      evict_valid <= fill_valid && !f_dup && !f_inv;
      if (fill_valid) begin
        evict_entry <= ent_q[f_set][f_way];
        if (!f_dup && !f_inv)
          rr_q[f_set] <= (int'(rr_q[f_set]) == WAYS - 1) ? '0 : rr_q[f_set] + 1'b1;
      end
      for (int s = 0; s < SETS; s++) begin
        for (int w = 0; w < WAYS; w++) begin
          if (inv_all ||
              (inv_asid && ent_q[s][w].asid == inv_asid_val) ||
              (inv_va && ent_q[s][w].asid == inv_asid_val && entry_match(ent_q[s][w], inv_vpn, inv_asid_val)))
            vld_q[s][w] <= 1'b0;
        end
      end
      if (fill_valid) vld_q[f_set][f_way] <= 1'b1;
    end
  end

endmodule
