// victima_l2_cache: unified L2 cache whose blocks can hold data or TLB blocks.
//
// Every cache entry holds either a conventional 64-byte data block, tagged by
// physical address, or a TLB block: the eight 8-byte PTEs of eight
// consecutive virtual pages, tagged by virtual address. Each entry's metadata
// therefore carries, besides valid and dirty, a TLB bit and a nested-TLB bit.
// In a TLB block the tag field is reused as {page size, ASID, virtual tag}:
//
//   4 KB block:  set = VA[14+IDX_W:15], PTE select = VA[14:12],
//                vtag = VA[47:15+IDX_W]                (22 bits at 2 MB/16-way)
//   2 MB block:  set = VA[23+IDX_W:24], PTE select = VA[23:21],
//                vtag = VA[47:24+IDX_W]                (13 bits)
//   tag field =  {ps[1:0], asid[10:0], vtag (zero-extended)}, 35 bits, the
//                same width as a data block's physical tag 51:17.
//
// This layout and the 2-bit page size / 11-bit ASID fields follow the paper's
// TLB-block figure (drawn there for a 1 MB cache, hence one bit more). It only
// fits when the physical tag is at least as wide as the TLB tag, which holds
// for 52-bit PA and 48-bit VA; an elaboration check enforces it.
//
// Requests (l2_req_t, valid/ready, one at a time, answered by a one-cycle
// resp_valid pulse with l2_resp_t):
//   L2_READ / L2_WRITE  64-bit word at pa, write-back write-allocate; a miss
//                       fetches the line from memory (mem_* port) and
//                       writes a dirty victim back first.
//   L2_TLB_PROBE        looks up (vpn, asid, nested) as a 4 KB and as a 2 MB
//                       TLB block at once (two sets read in the same cycle);
//                       on a hit returns the selected PTE and its page size.
//   L2_TLB_INSERT       if the TLB block of (vpn, asid, ps, nested) is absent,
//                       copies the PTE line that holds pa (from this cache, or
//                       from memory if it has left) into a TLB block in the
//                       VA-indexed set; resp.hit = 1 means already present.
//   L2_INV_VA           invalidates the TLB block holding vpn of asid (both
//                       page sizes), i.e. all eight PTEs of that block.
//   L2_INV_ALL/ASID     sweep all sets, one set (all ways) per cycle, and
//                       invalidate every TLB block / those of asid. An ASID
//                       wider than the 11 stored bits flushes all TLB blocks.
// A hit is answered HIT_LATENCY cycles after the request is accepted; misses
// add the memory time. A TLB block that is replaced is dropped, never written
// back. Replacement is the TLB-aware SRRIP (tlb_aware_srrip) with
// `tlb_pressure` = L2 TLB MPKI > 5. miss_event pulses once per data miss
// (for the L2 cache MPKI monitor).
//
// Follows the paper: metadata bits, tag layout, dual-size probe, insertion,
// invalidation commands, TLB-aware SRRIP, size, associativity and latency.
// This design's own choices: the request set and encoding, writing the TLB
// block as a copy in its VA-indexed set (the paper speaks of transforming the
// PTE block; in its figure the two live in different sets) so the PA-indexed
// data copy remains, a blocking single-request controller, the one-set-per-
// cycle sweep (the paper probes banks in parallel), and an initial sweep that
// clears all valid bits after reset (2^IDX_W cycles).
module victima_l2_cache
  import victima_pkg::*;
#(
  parameter int unsigned SIZE_BYTES  = 2097152,
  parameter int unsigned WAYS        = 16,
  parameter int unsigned HIT_LATENCY = 16,
  parameter int unsigned RRPV_W      = 2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          tlb_pressure,
  input  logic          req_valid,
  output logic          req_ready,
  input  l2_req_t       req,
  output logic          resp_valid,
  output l2_resp_t      resp,
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output mem_req_t      mem_req,
  input  logic          mem_resp_valid,
  input  logic [LINE_W-1:0] mem_resp_data,
  output logic          miss_event,
  output logic          init_done
);

  localparam int unsigned SETS    = SIZE_BYTES / (64 * WAYS);
  localparam int unsigned IDX_W   = $clog2(SETS);
  localparam int unsigned WAY_W   = $clog2(WAYS);
  localparam int unsigned DTAG_W  = PA_W - IDX_W - LINE_OFS_W;        // 35
  localparam int unsigned VTAG4_W = VA_W - 12 - 3 - IDX_W;            // 22
  localparam int unsigned VTAG2_W = VA_W - 21 - 3 - IDX_W;            // 13
  localparam int unsigned FIELD_W = 2 + L2C_ASID_W + VTAG4_W;         // 35

  if (FIELD_W > DTAG_W) begin : g_tag_check
    $error("TLB-block tag does not fit the data tag: PA must exceed VA-9");
  end

  typedef struct packed {
    logic              valid;
    logic              dirty;
    logic              tlb;
    logic              nested;
    logic [DTAG_W-1:0] tag;
  } meta_t;

  meta_t                          meta_q [SETS][WAYS];
  logic [WAYS-1:0][RRPV_W-1:0]    rrpv_q [SETS];
  logic [LINE_W-1:0]              data_q [SETS*WAYS];

  typedef enum logic [3:0] {
    C_INIT, C_IDLE, C_LOOK, C_VICT, C_WB, C_MREQ, C_MWAIT, C_WRITE, C_RESP, C_SWEEP
  } cstate_e;
  cstate_e st_q;

  l2_req_t           req_q;
  l2_resp_t          resp_q;
  logic [15:0]       lat_q;
  logic [IDX_W-1:0]  sweep_q;
  logic [IDX_W-1:0]  set_f_q;
  logic [DTAG_W-1:0] tag_f_q;
  logic              tlb_f_q;
  logic              need_mem_q;
  logic [WAY_W-1:0]  way_q;
  logic [LINE_W-1:0] line_q;

  function automatic logic [DTAG_W-1:0] tlb_tag(input logic [VPN_W-1:0] vpn,
                                                input logic [ASID_W-1:0] asid,
                                                input page_size_e ps);
    logic [VTAG4_W-1:0] vt;
    if (ps == PS_2M) vt = VTAG4_W'(vpn[VPN_W-1 : 9 + 3 + IDX_W]);
    else             vt = vpn[VPN_W-1 : 3 + IDX_W];
    return DTAG_W'({ps, asid[L2C_ASID_W-1:0], vt});
  endfunction

  function automatic logic [IDX_W-1:0] tlb_set(input logic [VPN_W-1:0] vpn, input page_size_e ps);
    return (ps == PS_2M) ? vpn[9 + 3 +: IDX_W] : vpn[3 +: IDX_W];
  endfunction

  // ---------------- lookup (state C_LOOK, on req_q) ----------------
  logic [IDX_W-1:0]  d_set, s4, s2, t_set;
  logic [DTAG_W-1:0] d_tag, g4, g2, t_tag;
  logic              d_hit, h4, h2, t_hit, src_hit;
  logic [WAY_W-1:0]  d_way, w4, w2, src_way;

  always_comb begin
    d_set = req_q.pa[LINE_OFS_W +: IDX_W];
    d_tag = req_q.pa[PA_W-1 -: DTAG_W];
    s4 = tlb_set(req_q.vpn, PS_4K);  g4 = tlb_tag(req_q.vpn, req_q.asid, PS_4K);
    s2 = tlb_set(req_q.vpn, PS_2M);  g2 = tlb_tag(req_q.vpn, req_q.asid, PS_2M);
    t_set = (req_q.ps == PS_2M) ? s2 : s4;
    t_tag = (req_q.ps == PS_2M) ? g2 : g4;
    d_hit = 1'b0; h4 = 1'b0; h2 = 1'b0;
    d_way = '0;   w4 = '0;   w2 = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (meta_q[d_set][w].valid && !meta_q[d_set][w].tlb && meta_q[d_set][w].tag == d_tag) begin
        d_hit = 1'b1; d_way = WAY_W'(w);
      end
      if (meta_q[s4][w].valid && meta_q[s4][w].tlb && meta_q[s4][w].nested == req_q.nested &&
          meta_q[s4][w].tag == g4) begin
        h4 = 1'b1; w4 = WAY_W'(w);
      end
      if (meta_q[s2][w].valid && meta_q[s2][w].tlb && meta_q[s2][w].nested == req_q.nested &&
          meta_q[s2][w].tag == g2) begin
        h2 = 1'b1; w2 = WAY_W'(w);
      end
    end
    t_hit   = (req_q.ps == PS_2M) ? h2 : h4;
    src_hit = d_hit;
    src_way = d_way;
  end

  // ---------------- replacement ----------------
  logic [IDX_W-1:0]              r_set;
  logic [WAY_W-1:0]              r_hit_way;
  logic                          r_hit_tlb;
  logic [WAYS-1:0]               r_valid, r_tlb;
  logic [WAY_W-1:0]              r_victim;
  logic [WAYS-1:0][RRPV_W-1:0]   r_aged, r_fill, r_hit;

  always_comb begin
    r_set     = set_f_q;
    r_hit_way = way_q;
    r_hit_tlb = 1'b0;
    if (st_q == C_LOOK) begin
      unique case (req_q.op)
        L2_TLB_PROBE: begin
          r_set = h4 ? s4 : s2; r_hit_way = h4 ? w4 : w2; r_hit_tlb = 1'b1;
        end
        default: begin
          r_set = d_set; r_hit_way = d_way;
        end
      endcase
    end
    for (int w = 0; w < WAYS; w++) begin
      r_valid[w] = meta_q[r_set][w].valid;
      r_tlb[w]   = meta_q[r_set][w].tlb;
    end
  end

  tlb_aware_srrip #(.WAYS(WAYS), .RRPV_W(RRPV_W)) u_repl (
    .valid(r_valid), .is_tlb(r_tlb), .rrpv(rrpv_q[r_set]), .pressure(tlb_pressure),
    .victim(r_victim), .rrpv_aged(r_aged),
    .fill_way(way_q), .fill_is_tlb(tlb_f_q), .rrpv_after_fill(r_fill),
    .hit_way(r_hit_way), .hit_is_tlb(r_hit_tlb), .rrpv_after_hit(r_hit));

  // ---------------- outputs ----------------
  logic [LINE_W-1:0] victim_line;
  meta_t             victim_meta;
  assign victim_line = data_q[{set_f_q, way_q}];
  assign victim_meta = meta_q[set_f_q][way_q];

  always_comb begin
    mem_req       = '0;
    mem_req_valid = 1'b0;
    if (st_q == C_WB) begin
      mem_req_valid = 1'b1;
      mem_req.we    = 1'b1;
      mem_req.line  = {victim_meta.tag, set_f_q};
      mem_req.wdata = victim_line;
    end else if (st_q == C_MREQ) begin
      mem_req_valid = 1'b1;
      mem_req.line  = req_q.pa[PA_W-1:LINE_OFS_W];
    end
  end

  assign req_ready  = st_q == C_IDLE;
  assign init_done  = st_q != C_INIT;
  assign resp       = resp_q;
  assign resp_valid = (st_q == C_RESP) && (lat_q >= 16'(HIT_LATENCY));

  logic [2:0] word;
  logic [2:0] pte4, pte2;
  assign word = req_q.pa[5:3];
  assign pte4 = req_q.vpn[2:0];
  assign pte2 = req_q.vpn[11:9];

  logic wide_asid;
  assign wide_asid = |req_q.asid[ASID_W-1:L2C_ASID_W];

  // ---------------- controller ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= C_INIT;
      sweep_q    <= '0;
      req_q      <= '0;
      resp_q     <= '0;
      lat_q      <= '0;
      set_f_q    <= '0;
      tag_f_q    <= '0;
      tlb_f_q    <= 1'b0;
      need_mem_q <= 1'b0;
      way_q      <= '0;
      line_q     <= '0;
      miss_event <= 1'b0;
    end else begin
      miss_event <= 1'b0;
      if (lat_q != '1) lat_q <= lat_q + 16'd1;
      unique case (st_q)
        C_INIT: begin
          sweep_q <= sweep_q + 1'b1;
          if (sweep_q == IDX_W'(SETS - 1)) st_q <= C_IDLE;
        end
        C_IDLE: if (req_valid) begin
          req_q  <= req;
          resp_q <= '0;
          lat_q  <= 16'd1;
          sweep_q <= '0;
          st_q   <= (req.op == L2_INV_ALL || req.op == L2_INV_ASID) ? C_SWEEP : C_LOOK;
        end
        C_LOOK: begin
          unique case (req_q.op)
            L2_READ, L2_WRITE: begin
              set_f_q <= d_set;
              if (d_hit) begin
                resp_q.hit   <= 1'b1;
                resp_q.rdata <= data_q[{d_set, d_way}][word*64 +: 64];
                st_q <= C_RESP;
              end else begin
                resp_q.dram <= 1'b1;
                tag_f_q     <= d_tag;
                tlb_f_q     <= 1'b0;
                need_mem_q  <= 1'b1;
                miss_event  <= 1'b1;
                st_q        <= C_VICT;
              end
            end
            L2_TLB_PROBE: begin
              if (h4 || h2) begin
                resp_q.hit   <= 1'b1;
                resp_q.ps    <= h4 ? PS_4K : PS_2M;
                resp_q.rdata <= h4 ? data_q[{s4, w4}][pte4*64 +: 64]
                                   : data_q[{s2, w2}][pte2*64 +: 64];
              end
              st_q <= C_RESP;
            end
            L2_TLB_INSERT: begin
              set_f_q <= t_set;
              tag_f_q <= t_tag;
              tlb_f_q <= 1'b1;
              if (t_hit) begin
                resp_q.hit <= 1'b1;
                st_q <= C_RESP;
              end else begin
                need_mem_q <= !src_hit;
                resp_q.dram <= !src_hit;
                if (src_hit) line_q <= data_q[{d_set, src_way}];
                st_q <= C_VICT;
              end
            end
            default: st_q <= C_RESP;   // L2_INV_VA, handled below
          endcase
        end
        C_VICT: begin
          way_q <= r_victim;
          if (meta_q[set_f_q][r_victim].valid && meta_q[set_f_q][r_victim].dirty &&
              !meta_q[set_f_q][r_victim].tlb)
            st_q <= C_WB;
          else
            st_q <= need_mem_q ? C_MREQ : C_WRITE;
        end
        C_WB: if (mem_req_ready) st_q <= need_mem_q ? C_MREQ : C_WRITE;
        C_MREQ: if (mem_req_ready) st_q <= C_MWAIT;
        C_MWAIT: if (mem_resp_valid) begin
          line_q <= mem_resp_data;
          st_q   <= C_WRITE;
        end
        C_WRITE: begin
          if (req_q.op == L2_READ) begin
            resp_q.rdata <= line_q[word*64 +: 64];
          end
          st_q <= C_RESP;
        end
        C_RESP: if (resp_valid) st_q <= C_IDLE;
        C_SWEEP: begin
          sweep_q <= sweep_q + 1'b1;
          if (sweep_q == IDX_W'(SETS - 1)) st_q <= C_RESP;
        end
        default: st_q <= C_IDLE;
      endcase
    end
  end

  // ---------------- arrays ----------------
  logic do_hit_upd;
  assign do_hit_upd = (st_q == C_LOOK) &&
                      (((req_q.op == L2_READ || req_q.op == L2_WRITE) && d_hit) ||
                       (req_q.op == L2_TLB_PROBE && (h4 || h2)));

  always_ff @(posedge clk) begin
    if (st_q == C_INIT) begin
      for (int w = 0; w < WAYS; w++) meta_q[sweep_q][w] <= '0;
      rrpv_q[sweep_q] <= '1;
    end
    if (do_hit_upd) rrpv_q[r_set] <= r_hit;
    if (st_q == C_LOOK && req_q.op == L2_WRITE && d_hit) begin
      data_q[{d_set, d_way}][word*64 +: 64] <= req_q.wdata;
      meta_q[d_set][d_way].dirty <= 1'b1;
    end
    if (st_q == C_LOOK && req_q.op == L2_INV_VA) begin
      if (h4) meta_q[s4][w4].valid <= 1'b0;
      if (h2) meta_q[s2][w2].valid <= 1'b0;
    end
    if (st_q == C_WRITE) begin
      meta_q[set_f_q][way_q] <= '{valid: 1'b1, dirty: (req_q.op == L2_WRITE), tlb: tlb_f_q,
                                  nested: tlb_f_q && req_q.nested, tag: tag_f_q};
      data_q[{set_f_q, way_q}] <= line_q;
      if (req_q.op == L2_WRITE) data_q[{set_f_q, way_q}][word*64 +: 64] <= req_q.wdata;
      rrpv_q[set_f_q] <= r_fill;
    end
    if (st_q == C_SWEEP) begin
      for (int w = 0; w < WAYS; w++) begin
        if (meta_q[sweep_q][w].tlb &&
            (req_q.op == L2_INV_ALL || wide_asid ||
             (meta_q[sweep_q][w].tag[VTAG4_W +: L2C_ASID_W] == req_q.asid[L2C_ASID_W-1:0])))
          meta_q[sweep_q][w].valid <= 1'b0;
      end
    end
  end

  // ---------------- protocol checks ----------------
  a_no_resp_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == C_IDLE) |-> !resp_valid);
  a_mem_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (mem_req_valid && !mem_req_ready) |=> mem_req_valid && $stable(mem_req));

endmodule
