// victima_mmu: memory management unit with Victima's translation flow.
//
// Holds the baseline MMU (L1 I-TLB, L1 D-TLBs for 4 KB and 2 MB pages, the
// unified L2 TLB, the page table walker with its three PWCs) and Victima's
// additions: the PTW cost predictor (ptw_cp) and the control that stores and
// finds TLB blocks in the L2 cache. Translation of one request (tr_valid,
// 48-bit VA, tr_is_instr) goes:
//
//   1. L1 TLB lookup (1 cycle): I-TLB, or both D-TLBs. Hit -> answer.
//   2. L2 TLB lookup (12 cycles). Hit -> fill the L1 TLB, answer.
//   3. L2 TLB miss: the walk starts and, in the same cycle, the L2 cache is
//      probed for a TLB block of (VA, ASID) as 4 KB and as 2 MB page. A probe
//      hit aborts the walk and the PTE from the block is used; otherwise the
//      walk finishes (or faults: answered with tr_resp_fault, nothing filled).
//   4. Fill L2 TLB and L1 TLB, answer (tr_resp_valid, PA, source).
//   5. Miss-based insertion: if the page came from the walk and PTW-CP says
//      "insert" (costly, or bypassed at high L2 cache MPKI), a job is queued
//      to turn the PTE line fetched by the walk into a TLB block.
//   6. Eviction-based insertion: if the L2 TLB fill evicted an entry and
//      PTW-CP says "insert" for that entry's counters, a job is queued that
//      probes the L2 cache for its TLB block and, if absent, runs a background
//      walk for it and then inserts the block.
//
// Jobs of steps 5 and 6 are queued, one of each kind; a job arriving while
// one of its kind waits is dropped (ev.job_dropped). Between translations a
// queued job runs before the next translation request is accepted, so a
// steady stream of requests cannot starve insertion; the request waits. Maintenance (inv_valid, inv_kind, inv_asid, inv_va):
// invalidates the TLBs (and flushes the PWCs for ALL/ASID), drops queued jobs,
// sends the matching command to the L2 cache and pulses inv_done when it has
// finished.
//
// The flow, the parallel walk/probe with abort, both insertion triggers and
// the predictor are the paper's; the serialisation (one walk at a time, a
// one-entry queue per job kind, requests blocked while a job runs) and all
// interfaces are this design's simplifications. All L2 traffic leaves
// through one l2_req_t port (controller before walker).
module victima_mmu
  import victima_pkg::*;
#(
  parameter int unsigned L1I_ENTRIES  = 128,
  parameter int unsigned L1I_WAYS     = 8,
  parameter int unsigned L1D4_ENTRIES = 64,
  parameter int unsigned L1D4_WAYS    = 4,
  parameter int unsigned L1D2_ENTRIES = 32,
  parameter int unsigned L1D2_WAYS    = 4,
  parameter int unsigned L1_LATENCY   = 1,
  parameter int unsigned L2T_ENTRIES  = 1536,
  parameter int unsigned L2T_WAYS     = 12,
  parameter int unsigned L2T_LATENCY  = 12,
  parameter int unsigned PWC_ENTRIES  = 32,
  parameter int unsigned PWC_WAYS     = 4,
  parameter int unsigned PWC_LATENCY  = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // translation requests from the core
  input  logic              tr_valid,
  output logic              tr_ready,
  input  logic [VA_W-1:0]   tr_va,
  input  logic              tr_is_instr,
  output logic              tr_resp_valid,
  output logic [PA_W-1:0]   tr_resp_pa,
  output logic              tr_resp_fault,
  output tr_src_e           tr_resp_src,
  // context
  input  logic [PPN_W-1:0]  cr3_ppn,
  input  logic [ASID_W-1:0] cur_asid,
  // maintenance
  input  logic              inv_valid,
  output logic              inv_ready,
  input  inv_kind_e         inv_kind,
  input  logic [ASID_W-1:0] inv_asid,
  input  logic [VA_W-1:0]   inv_va,
  output logic              inv_done,
  // PTW-CP threshold registers and bypass
  input  logic              cp_cfg_we,
  input  logic [1:0]        cp_cfg_sel,
  input  logic [3:0]        cp_cfg_data,
  input  logic              l2c_high_mpki,
  // L2 cache port
  output logic              l2_req_valid,
  input  logic              l2_req_ready,
  output l2_req_t           l2_req,
  input  logic              l2_resp_valid,
  input  l2_resp_t          l2_resp,
  // events
  output mmu_ev_t           ev
);

  typedef enum logic [3:0] {
    M_IDLE, M_L1, M_L2, M_START, M_MISS, M_FILL, M_EVCHK,
    M_INS, M_EVP, M_EVW, M_EVWAIT, M_INV, M_INV_WAIT
  } mstate_e;
  mstate_e st_q;

  logic [VA_W-1:0]   va_q;
  logic              instr_q;
  tlb_entry_t        ent_q;
  tr_src_e           src_q;
  logic              probe_pend_q, probe_done_q, probe_hit_q;
  logic              walk_done_q, walk_fault_q;
  logic [63:0]       walk_pte_q;
  logic [PA_W-1:0]   walk_pa_q;
  page_size_e        walk_ps_q;
  logic              from_walk_q;
  logic              sent_q;

  // queued jobs
  logic              ins_pend_q;
  logic [PA_W-1:0]   ins_pa_q;
  logic [VPN_W-1:0]  ins_vpn_q;
  logic [ASID_W-1:0] ins_asid_q;
  page_size_e        ins_ps_q;
  logic              evj_pend_q;
  logic [VPN_W-1:0]  evj_vpn_q;
  logic [ASID_W-1:0] evj_asid_q;
  page_size_e        evj_ps_q;

  inv_kind_e         invk_q;
  logic [ASID_W-1:0] inva_q;
  logic [VA_W-1:0]   invv_q;

  // ---------------- TLBs ----------------
  logic       l1_lookup_i, l1_lookup_d;
  logic       i_rv, i_hit, d4_rv, d4_hit, d2_rv, d2_hit;
  tlb_entry_t i_ent, d4_ent, d2_ent;
  logic       fill_i, fill_d4, fill_d2, fill_l2;
  logic       ev_i, ev_d4, ev_d2;
  tlb_entry_t ev_i_ent, ev_d4_ent, ev_d2_ent;
  logic       l2t_lookup, l2t_rv, l2t_hit, l2t_evict;
  tlb_entry_t l2t_ent, l2t_evict_ent;
  logic       t_inv_all, t_inv_asid, t_inv_va;
  logic [VPN_W-1:0] t_inv_vpn;

  assign t_inv_all  = (st_q == M_INV) && invk_q == INV_ALL;
  assign t_inv_asid = (st_q == M_INV) && invk_q == INV_ASID;
  assign t_inv_va   = (st_q == M_INV) && invk_q == INV_VA;
  assign t_inv_vpn  = invv_q[VA_W-1:PAGE_OFS_W];

  logic accept_tr;
  assign accept_tr   = (st_q == M_IDLE) && !inv_valid && !ins_pend_q && !evj_pend_q && tr_valid;
  assign tr_ready    = accept_tr;
  assign inv_ready   = (st_q == M_IDLE) && inv_valid;
  assign l1_lookup_i = accept_tr && tr_is_instr;
  assign l1_lookup_d = accept_tr && !tr_is_instr;

  set_assoc_tlb #(.ENTRIES(L1I_ENTRIES), .WAYS(L1I_WAYS), .LATENCY(L1_LATENCY),
                  .HOLD_4K(1'b1), .HOLD_2M(1'b1)) u_l1_itlb (
    .clk, .rst_n, .lookup_valid(l1_lookup_i), .lookup_vpn(tr_va[VA_W-1:PAGE_OFS_W]),
    .lookup_asid(cur_asid), .resp_valid(i_rv), .resp_hit(i_hit), .resp_entry(i_ent),
    .fill_valid(fill_i), .fill_entry(ent_q), .evict_valid(ev_i), .evict_entry(ev_i_ent),
    .inv_all(t_inv_all), .inv_asid(t_inv_asid), .inv_va(t_inv_va),
    .inv_asid_val(inva_q), .inv_vpn(t_inv_vpn));
  set_assoc_tlb #(.ENTRIES(L1D4_ENTRIES), .WAYS(L1D4_WAYS), .LATENCY(L1_LATENCY),
                  .HOLD_4K(1'b1), .HOLD_2M(1'b0)) u_l1_dtlb_4k (
    .clk, .rst_n, .lookup_valid(l1_lookup_d), .lookup_vpn(tr_va[VA_W-1:PAGE_OFS_W]),
    .lookup_asid(cur_asid), .resp_valid(d4_rv), .resp_hit(d4_hit), .resp_entry(d4_ent),
    .fill_valid(fill_d4), .fill_entry(ent_q), .evict_valid(ev_d4), .evict_entry(ev_d4_ent),
    .inv_all(t_inv_all), .inv_asid(t_inv_asid), .inv_va(t_inv_va),
    .inv_asid_val(inva_q), .inv_vpn(t_inv_vpn));
  set_assoc_tlb #(.ENTRIES(L1D2_ENTRIES), .WAYS(L1D2_WAYS), .LATENCY(L1_LATENCY),
                  .HOLD_4K(1'b0), .HOLD_2M(1'b1)) u_l1_dtlb_2m (
    .clk, .rst_n, .lookup_valid(l1_lookup_d), .lookup_vpn(tr_va[VA_W-1:PAGE_OFS_W]),
    .lookup_asid(cur_asid), .resp_valid(d2_rv), .resp_hit(d2_hit), .resp_entry(d2_ent),
    .fill_valid(fill_d2), .fill_entry(ent_q), .evict_valid(ev_d2), .evict_entry(ev_d2_ent),
    .inv_all(t_inv_all), .inv_asid(t_inv_asid), .inv_va(t_inv_va),
    .inv_asid_val(inva_q), .inv_vpn(t_inv_vpn));
  set_assoc_tlb #(.ENTRIES(L2T_ENTRIES), .WAYS(L2T_WAYS), .LATENCY(L2T_LATENCY),
                  .HOLD_4K(1'b1), .HOLD_2M(1'b1)) u_l2_tlb (
    .clk, .rst_n, .lookup_valid(l2t_lookup), .lookup_vpn(va_q[VA_W-1:PAGE_OFS_W]),
    .lookup_asid(cur_asid), .resp_valid(l2t_rv), .resp_hit(l2t_hit), .resp_entry(l2t_ent),
    .fill_valid(fill_l2), .fill_entry(ent_q), .evict_valid(l2t_evict), .evict_entry(l2t_evict_ent),
    .inv_all(t_inv_all), .inv_asid(t_inv_asid), .inv_va(t_inv_va),
    .inv_asid_val(inva_q), .inv_vpn(t_inv_vpn));

  // L1 evictions are dropped, as in the baseline.
  logic unused_l1_ev;
  assign unused_l1_ev = ev_i ^ ev_d4 ^ ev_d2 ^ (|ev_i_ent) ^ (|ev_d4_ent) ^ (|ev_d2_ent) ^ i_rv ^ d2_rv;

  logic       l1_hit;
  tlb_entry_t l1_ent;
  always_comb begin
    l1_hit = 1'b0;
    l1_ent = d4_ent;
    if (instr_q) begin
      l1_hit = i_hit; l1_ent = i_ent;
    end else if (d4_hit) begin
      l1_hit = 1'b1;  l1_ent = d4_ent;
    end else if (d2_hit) begin
      l1_hit = 1'b1;  l1_ent = d2_ent;
    end
  end

  // ---------------- walker ----------------
  logic             w_start, w_abort, w_busy, w_done, w_fault, w_dram;
  logic [VA_W-1:0]  w_va;
  logic [63:0]      w_pte;
  logic [PA_W-1:0]  w_pte_pa;
  page_size_e       w_ps;
  logic             w_req_valid, w_req_ready, w_resp_valid;
  l2_req_t          w_req;
  logic             pwc_flush;

  assign pwc_flush = (st_q == M_INV) && invk_q != INV_VA;

  page_table_walker #(.PWC_ENTRIES(PWC_ENTRIES), .PWC_WAYS(PWC_WAYS), .PWC_LATENCY(PWC_LATENCY)) u_ptw (
    .clk, .rst_n, .start(w_start), .start_va(w_va), .cr3_ppn(cr3_ppn), .abort_req(w_abort),
    .pwc_flush, .busy(w_busy), .done(w_done), .done_fault(w_fault), .done_pte(w_pte),
    .done_pte_pa(w_pte_pa), .done_ps(w_ps), .done_dram(w_dram),
    .mreq_valid(w_req_valid), .mreq_ready(w_req_ready), .mreq(w_req),
    .mresp_valid(w_resp_valid), .mresp(l2_resp));

  logic unused_w;
  assign unused_w = w_dram;

  // ---------------- PTW cost predictor ----------------
  logic [FREQ_W-1:0] cp_freq;
  logic [COST_W-1:0] cp_cost;
  logic              cp_costly, cp_insert, cp_bypassed;

  always_comb begin
    if (st_q == M_EVCHK) begin
      cp_freq = l2t_evict_ent.freq; cp_cost = l2t_evict_ent.cost;
    end else begin
      cp_freq = pte_freq(walk_pte_q); cp_cost = pte_cost(walk_pte_q);
    end
  end

  ptw_cp u_ptw_cp (
    .clk, .rst_n, .cfg_we(cp_cfg_we), .cfg_sel(cp_cfg_sel), .cfg_data(cp_cfg_data),
    .freq(cp_freq), .cost(cp_cost), .l2c_high_mpki(l2c_high_mpki),
    .costly(cp_costly), .insert(cp_insert), .bypassed(cp_bypassed));

  // ---------------- controller's L2 requests ----------------
  logic    c_req_valid, c_req_ready, c_resp_valid;
  l2_req_t c_req;

  always_comb begin
    c_req       = '0;
    c_req.asid  = cur_asid;
    c_req_valid = 1'b0;
    unique case (st_q)
      M_MISS: begin
        c_req_valid = probe_pend_q;
        c_req.op    = L2_TLB_PROBE;
        c_req.vpn   = va_q[VA_W-1:PAGE_OFS_W];
      end
      M_INS: begin
        c_req_valid = !sent_q;
        c_req.op    = L2_TLB_INSERT;
        c_req.pa    = ins_pa_q;
        c_req.vpn   = ins_vpn_q;
        c_req.asid  = ins_asid_q;
        c_req.ps    = ins_ps_q;
      end
      M_EVP: begin
        c_req_valid = !sent_q;
        c_req.op    = L2_TLB_PROBE;
        c_req.vpn   = evj_vpn_q;
        c_req.asid  = evj_asid_q;
      end
      M_INV_WAIT: begin
        c_req_valid = !sent_q;
        c_req.op    = (invk_q == INV_ALL) ? L2_INV_ALL : (invk_q == INV_ASID) ? L2_INV_ASID : L2_INV_VA;
        c_req.asid  = inva_q;
        c_req.vpn   = invv_q[VA_W-1:PAGE_OFS_W];
      end
      default: ;
    endcase
  end

  l2_req_t       arb_in [2];
  logic [1:0]    arb_ready, arb_resp;
  assign arb_in[0] = c_req;
  assign arb_in[1] = w_req;

  l2_port_arbiter #(.N(2)) u_arb (
    .clk, .rst_n, .in_valid({w_req_valid, c_req_valid}), .in_ready(arb_ready), .in_req(arb_in),
    .in_resp_valid(arb_resp), .out_valid(l2_req_valid), .out_ready(l2_req_ready),
    .out_req(l2_req), .out_resp_valid(l2_resp_valid));

  assign c_req_ready  = arb_ready[0];
  assign w_req_ready  = arb_ready[1];
  assign c_resp_valid = arb_resp[0];
  assign w_resp_valid = arb_resp[1];

  // ---------------- helpers ----------------
  function automatic tlb_entry_t entry_from_pte(input logic [63:0] pte, input logic [VA_W-1:0] va,
                                               input logic [ASID_W-1:0] asid, input page_size_e ps);
    tlb_entry_t e;
    e.valid = 1'b1;
    e.asid  = asid;
    e.ps    = ps;
    e.vpn   = va[VA_W-1:PAGE_OFS_W];
    e.ppn   = pte_ppn(pte);
    if (ps == PS_2M) begin
      e.vpn[8:0] = '0;
      e.ppn[8:0] = '0;
    end
    e.freq  = pte_freq(pte);
    e.cost  = pte_cost(pte);
    return e;
  endfunction

  function automatic logic [PA_W-1:0] pa_of(input tlb_entry_t e, input logic [VA_W-1:0] va);
    if (e.ps == PS_2M) return {e.ppn[PPN_W-1:9], va[20:0]};
    return {e.ppn, va[11:0]};
  endfunction

  // ---------------- control ----------------
  assign l2t_lookup = (st_q == M_L1) && !l1_hit;
  assign w_start    = ((st_q == M_START) || (st_q == M_EVW)) && !w_busy;
  assign w_va       = (st_q == M_EVW) ? {evj_vpn_q, 12'h000} : va_q;
  assign w_abort    = (st_q == M_MISS) && c_resp_valid && l2_resp.hit;
  assign fill_l2    = (st_q == M_FILL) && src_q != SRC_L2TLB;
  assign fill_i     = (st_q == M_FILL) && instr_q;
  assign fill_d4    = (st_q == M_FILL) && !instr_q && ent_q.ps == PS_4K;
  assign fill_d2    = (st_q == M_FILL) && !instr_q && ent_q.ps == PS_2M;

  logic walk_ok;
  assign walk_ok = walk_done_q && !walk_fault_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= M_IDLE;
      va_q <= '0; instr_q <= 1'b0; ent_q <= '0; src_q <= SRC_L1TLB;
      probe_pend_q <= 1'b0; probe_done_q <= 1'b0; probe_hit_q <= 1'b0;
      walk_done_q <= 1'b0; walk_fault_q <= 1'b0; walk_pte_q <= '0; walk_pa_q <= '0;
      walk_ps_q <= PS_4K; from_walk_q <= 1'b0; sent_q <= 1'b0;
      ins_pend_q <= 1'b0; ins_pa_q <= '0; ins_vpn_q <= '0; ins_asid_q <= '0; ins_ps_q <= PS_4K;
      evj_pend_q <= 1'b0; evj_vpn_q <= '0; evj_asid_q <= '0; evj_ps_q <= PS_4K;
      invk_q <= INV_ALL; inva_q <= '0; invv_q <= '0;
      tr_resp_valid <= 1'b0; tr_resp_pa <= '0; tr_resp_fault <= 1'b0; tr_resp_src <= SRC_L1TLB;
      inv_done <= 1'b0;
      ev <= '0;
    end else begin
      tr_resp_valid <= 1'b0;
      tr_resp_fault <= 1'b0;
      inv_done      <= 1'b0;
      ev            <= '0;
      unique case (st_q)
        M_IDLE: begin
          sent_q <= 1'b0;
          if (inv_valid) begin
            invk_q <= inv_kind; inva_q <= inv_asid; invv_q <= inv_va;
            ins_pend_q <= 1'b0; evj_pend_q <= 1'b0;
            st_q <= M_INV;
          end else if (ins_pend_q) begin
            st_q <= M_INS;
          end else if (evj_pend_q) begin
            st_q <= M_EVP;
          end else if (tr_valid) begin
            va_q <= tr_va; instr_q <= tr_is_instr;
            st_q <= M_L1;
          end
        end
        M_L1: begin
          if (l1_hit) begin
            tr_resp_valid <= 1'b1;
            tr_resp_pa    <= pa_of(l1_ent, va_q);
            tr_resp_src   <= SRC_L1TLB;
            ev.l1_hit     <= 1'b1;
            st_q          <= M_IDLE;
          end else begin
            st_q <= M_L2;
          end
        end
        M_L2: if (l2t_rv) begin
          if (l2t_hit) begin
            ent_q <= l2t_ent; src_q <= SRC_L2TLB; ev.l2tlb_hit <= 1'b1;
            st_q  <= M_FILL;
          end else begin
            ev.l2tlb_miss <= 1'b1;
            probe_pend_q <= 1'b0; probe_done_q <= 1'b0; probe_hit_q <= 1'b0;
            walk_done_q <= 1'b0; walk_fault_q <= 1'b0;
            st_q <= M_START;
          end
        end
        M_START: if (!w_busy) begin
          probe_pend_q <= 1'b1;          // probe goes out with the walk's start
          st_q <= M_MISS;
        end
        M_MISS: begin
          if (c_req_valid && c_req_ready) probe_pend_q <= 1'b0;
          if (c_resp_valid) begin
            probe_done_q <= 1'b1;
            probe_hit_q  <= l2_resp.hit;
            if (l2_resp.hit) begin
              ent_q <= entry_from_pte(l2_resp.rdata, va_q, cur_asid, l2_resp.ps);
              src_q <= SRC_L2C;
              ev.l2c_tlb_hit <= 1'b1;
              from_walk_q <= 1'b0;
              st_q <= M_FILL;
            end
          end
          if (w_done) begin
            walk_done_q <= 1'b1; walk_fault_q <= w_fault;
            walk_pte_q <= w_pte; walk_pa_q <= w_pte_pa; walk_ps_q <= w_ps;
            ev.walk_done <= 1'b1;
          end
          if (probe_done_q && !probe_hit_q && walk_done_q) begin
            if (walk_fault_q) begin
              tr_resp_valid <= 1'b1; tr_resp_fault <= 1'b1; tr_resp_src <= SRC_PTW;
              ev.fault <= 1'b1;
              st_q <= M_IDLE;
            end else begin
              ent_q <= entry_from_pte(walk_pte_q, va_q, cur_asid, walk_ps_q);
              src_q <= SRC_PTW;
              from_walk_q <= 1'b1;
              ev.pred_costly <= cp_costly;
              ev.pred_bypass <= cp_bypassed;
              if (cp_insert) begin
                if (ins_pend_q) ev.job_dropped <= 1'b1;
                else begin
                  ins_pend_q <= 1'b1; ins_pa_q <= walk_pa_q;
                  ins_vpn_q  <= va_q[VA_W-1:PAGE_OFS_W]; ins_asid_q <= cur_asid; ins_ps_q <= walk_ps_q;
                end
              end
              st_q <= M_FILL;
            end
          end
        end
        M_FILL: begin
          tr_resp_valid <= 1'b1;
          tr_resp_pa    <= pa_of(ent_q, va_q);
          tr_resp_src   <= src_q;
          st_q          <= (src_q == SRC_L2TLB) ? M_IDLE : M_EVCHK;
        end
        M_EVCHK: begin
          if (l2t_evict) begin
            ev.l2tlb_evict <= 1'b1;
            if (cp_insert) begin
              ev.evict_costly <= 1'b1;
              if (evj_pend_q) ev.job_dropped <= 1'b1;
              else begin
                evj_pend_q <= 1'b1; evj_vpn_q <= l2t_evict_ent.vpn;
                evj_asid_q <= l2t_evict_ent.asid; evj_ps_q <= l2t_evict_ent.ps;
              end
            end
          end
          st_q <= M_IDLE;
        end
        M_INS: begin
          if (c_req_valid && c_req_ready) sent_q <= 1'b1;
          if (c_resp_valid) begin
            ev.insert  <= !l2_resp.hit;
            ins_pend_q <= 1'b0;
            st_q       <= M_IDLE;
          end
        end
        M_EVP: begin
          if (c_req_valid && c_req_ready) sent_q <= 1'b1;
          if (c_resp_valid) begin
            if (l2_resp.hit) begin
              ev.evict_present <= 1'b1;
              evj_pend_q <= 1'b0;
              st_q <= M_IDLE;
            end else begin
              st_q <= M_EVW;
            end
          end
        end
        M_EVW: if (!w_busy) begin
          ev.bg_walk <= 1'b1;
          st_q <= M_EVWAIT;
        end
        M_EVWAIT: if (w_done) begin
          evj_pend_q <= 1'b0;
          if (!w_fault) begin
            ins_pend_q <= 1'b1; ins_pa_q <= w_pte_pa; ins_vpn_q <= evj_vpn_q;
            ins_asid_q <= evj_asid_q; ins_ps_q <= w_ps;
          end
          st_q <= M_IDLE;
        end
        M_INV: st_q <= M_INV_WAIT;
        M_INV_WAIT: begin
          if (c_req_valid && c_req_ready) sent_q <= 1'b1;
          if (c_resp_valid) begin
            inv_done <= 1'b1;
            ev.inv   <= 1'b1;
            st_q     <= M_IDLE;
          end
        end
        default: st_q <= M_IDLE;
      endcase
    end
  end

  logic unused_misc;
  assign unused_misc = from_walk_q ^ evj_ps_q[0] ^ walk_ok;

endmodule
