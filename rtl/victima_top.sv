// victima_top: one core's MMU and L2 cache with Victima.
//
// Victima lets the L2 cache hold "TLB blocks" (eight PTEs of eight
// consecutive virtual pages) next to ordinary data, which backs the L2 TLB
// with a far larger, cheap translation store. This top wires:
//
//   victima_mmu       L1/L2 TLBs, page table walker + PWCs, PTW cost
//                     predictor, the L2-TLB-miss and eviction flows
//   victima_l2_cache  2 MB 16-way L2 with TLB blocks and TLB-aware SRRIP
//   l2_port_arbiter   L2 request port shared by the MMU (priority) and the
//                     L1 caches' port (dreq_*)
//   mpki_monitor x2   L2 TLB MPKI > 5  -> tlb_pressure (replacement policy)
//                     L2 cache MPKI >= 5 -> l2c_high_mpki (predictor bypass)
//
// Outside parts appear as ports: the core's translation requests (tr_*),
// retired-instruction count (instr_inc), context (cr3_ppn, cur_asid) and TLB
// maintenance commands (inv_*); the L1 caches' L2 requests (dreq_*, READ or
// WRITE); main memory or the L3 behind the L2 (mem_*, 64-byte lines, a read
// answered by one mem_resp_valid pulse, writes unanswered). ev carries the
// MMU's event pulses. After reset the L2 cache clears its tags for 2048
// cycles (l2c_init_done); requests wait meanwhile.
module victima_top
  import victima_pkg::*;
#(
  parameter int unsigned L2C_SIZE_BYTES = 2097152,
  parameter int unsigned L2C_WAYS       = 16,
  parameter int unsigned L2C_LATENCY    = 16,
  parameter int unsigned L2T_ENTRIES    = 1536,
  parameter int unsigned L2T_WAYS       = 12,
  parameter int unsigned L2T_LATENCY    = 12,
  parameter int unsigned MPKI_THRESH    = 5,
  parameter int unsigned EPOCH_KI       = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              tr_valid,
  output logic              tr_ready,
  input  logic [VA_W-1:0]   tr_va,
  input  logic              tr_is_instr,
  output logic              tr_resp_valid,
  output logic [PA_W-1:0]   tr_resp_pa,
  output logic              tr_resp_fault,
  output tr_src_e           tr_resp_src,
  input  logic [PPN_W-1:0]  cr3_ppn,
  input  logic [ASID_W-1:0] cur_asid,
  input  logic [2:0]        instr_inc,
  input  logic              inv_valid,
  output logic              inv_ready,
  input  inv_kind_e         inv_kind,
  input  logic [ASID_W-1:0] inv_asid,
  input  logic [VA_W-1:0]   inv_va,
  output logic              inv_done,
  input  logic              cp_cfg_we,
  input  logic [1:0]        cp_cfg_sel,
  input  logic [3:0]        cp_cfg_data,
  input  logic              dreq_valid,
  output logic              dreq_ready,
  input  l2_req_t           dreq,
  output logic              dresp_valid,
  output l2_resp_t          dresp,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic              mem_resp_valid,
  input  logic [LINE_W-1:0] mem_resp_data,
  output mmu_ev_t           ev,
  output logic              tlb_pressure,
  output logic              l2c_high_mpki,
  output logic              l2c_init_done
);

  logic     m_req_valid, m_req_ready, m_resp_valid;
  l2_req_t  m_req;
  logic     c_req_valid, c_req_ready, c_resp_valid;
  l2_req_t  c_req;
  l2_resp_t c_resp;
  logic     l2c_miss;
  logic     unused_gt, unused_ge;

  victima_mmu #(.L2T_ENTRIES(L2T_ENTRIES), .L2T_WAYS(L2T_WAYS), .L2T_LATENCY(L2T_LATENCY)) u_mmu (
    .clk, .rst_n,
    .tr_valid(tr_valid && l2c_init_done), .tr_ready, .tr_va, .tr_is_instr,
    .tr_resp_valid, .tr_resp_pa, .tr_resp_fault, .tr_resp_src,
    .cr3_ppn, .cur_asid,
    .inv_valid(inv_valid && l2c_init_done), .inv_ready, .inv_kind, .inv_asid, .inv_va, .inv_done,
    .cp_cfg_we, .cp_cfg_sel, .cp_cfg_data, .l2c_high_mpki,
    .l2_req_valid(m_req_valid), .l2_req_ready(m_req_ready), .l2_req(m_req),
    .l2_resp_valid(m_resp_valid), .l2_resp(c_resp), .ev);

  l2_req_t    arb_in [2];
  logic [1:0] arb_ready, arb_resp;
  assign arb_in[0] = m_req;
  assign arb_in[1] = dreq;

  l2_port_arbiter #(.N(2)) u_arb (
    .clk, .rst_n, .in_valid({dreq_valid, m_req_valid}), .in_ready(arb_ready), .in_req(arb_in),
    .in_resp_valid(arb_resp), .out_valid(c_req_valid), .out_ready(c_req_ready),
    .out_req(c_req), .out_resp_valid(c_resp_valid));

  assign m_req_ready  = arb_ready[0];
  assign dreq_ready   = arb_ready[1];
  assign m_resp_valid = arb_resp[0];
  assign dresp_valid  = arb_resp[1];
  assign dresp        = c_resp;

  victima_l2_cache #(.SIZE_BYTES(L2C_SIZE_BYTES), .WAYS(L2C_WAYS), .HIT_LATENCY(L2C_LATENCY)) u_l2c (
    .clk, .rst_n, .tlb_pressure,
    .req_valid(c_req_valid), .req_ready(c_req_ready), .req(c_req),
    .resp_valid(c_resp_valid), .resp(c_resp),
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp_data,
    .miss_event(l2c_miss), .init_done(l2c_init_done));

  mpki_monitor #(.THRESH_MPKI(MPKI_THRESH), .EPOCH_KI(EPOCH_KI)) u_tlb_mpki (
    .clk, .rst_n, .instr_inc, .event_i(ev.l2tlb_miss), .mpki_gt(tlb_pressure), .mpki_ge(unused_ge));

  mpki_monitor #(.THRESH_MPKI(MPKI_THRESH), .EPOCH_KI(EPOCH_KI)) u_l2c_mpki (
    .clk, .rst_n, .instr_inc, .event_i(l2c_miss), .mpki_gt(unused_gt), .mpki_ge(l2c_high_mpki));

endmodule
