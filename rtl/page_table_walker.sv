// page_table_walker: x86-64 four-level page table walker with split page
// walk caches and Victima's per-PTE cost counters.
//
// A walk starts on `start` with a 48-bit VA and the page-table root (CR3
// frame). The three page walk caches (PML4, PDP, PD levels) are probed in
// parallel; the deepest hit names the table where the walk resumes, else it
// begins at CR3. Each level reads one 8-byte entry at table*4096 + index*8,
// index being the VA's 9-bit field of that level, through the L2 request port
// (l2_req_t READ), and fills the level's PWC with the next-table frame. A PD
// entry with PS set is a 2 MB leaf, a PT entry a 4 KB leaf; an entry whose P
// bit is clear ends the walk with done_fault.
//
// At the leaf the walker updates the PTE's saturating counters, as Victima
// requires after every walk: PTW frequency +1, PTW cost +1 if any access of
// this walk had to go to DRAM (resp.dram), and writes the PTE back (WRITE).
// It then pulses done with the updated PTE, the PTE's physical address (its
// cache line is the future TLB block), page size and the DRAM flag.
//
// `abort_req` (the L2 cache supplied the translation) stops the walk at the next
// point where no request is in flight: an accepted read is drained, its data
// dropped, and the walker returns to idle without pulsing done.
//
// One walk at a time (the paper's walker can run several); request port:
// valid/ready, one outstanding request, response one-cycle pulse.
module page_table_walker
  import victima_pkg::*;
#(
  parameter int unsigned PWC_ENTRIES = 32,
  parameter int unsigned PWC_WAYS    = 4,
  parameter int unsigned PWC_LATENCY = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [VA_W-1:0]  start_va,
  input  logic [PPN_W-1:0] cr3_ppn,
  input  logic             abort_req,
  input  logic             pwc_flush,
  output logic             busy,
  output logic             done,
  output logic             done_fault,
  output logic [63:0]      done_pte,
  output logic [PA_W-1:0]  done_pte_pa,
  output page_size_e       done_ps,
  output logic             done_dram,
  output logic             mreq_valid,
  input  logic             mreq_ready,
  output l2_req_t          mreq,
  input  logic             mresp_valid,
  input  l2_resp_t         mresp
);

  typedef enum logic [2:0] {W_IDLE, W_PWC, W_REQ, W_WAIT, W_WB, W_WB_WAIT} wstate_e;
  wstate_e st_q;

  logic [VA_W-1:0]  va_q;
  logic [PPN_W-1:0] table_q;
  logic [2:0]       level_q;     // 4 = PML4 ... 1 = PT
  logic             dram_q;
  logic             abort_q;
  logic [63:0]      pte_q;
  logic [PA_W-1:0]  pte_pa_q;
  page_size_e       ps_q;

  // ---------------- page walk caches ----------------
  logic             pwc_lookup;
  logic             h4_v, h4_hit, h3_v, h3_hit, h2_v, h2_hit;
  logic [PPN_W-1:0] h4_ppn, h3_ppn, h2_ppn;
  logic             f4, f3, f2;
  logic [PPN_W-1:0] f_ppn;

  assign pwc_lookup = (st_q == W_IDLE) && start;

  pwc #(.KEY_W(9),  .ENTRIES(PWC_ENTRIES), .WAYS(PWC_WAYS), .LATENCY(PWC_LATENCY)) u_pwc_pml4 (
    .clk, .rst_n, .lookup_valid(pwc_lookup), .lookup_key(start_va[47:39]),
    .resp_valid(h4_v), .resp_hit(h4_hit), .resp_ppn(h4_ppn),
    .fill_valid(f4), .fill_key(va_q[47:39]), .fill_ppn(f_ppn), .inv_all(pwc_flush));
  pwc #(.KEY_W(18), .ENTRIES(PWC_ENTRIES), .WAYS(PWC_WAYS), .LATENCY(PWC_LATENCY)) u_pwc_pdp (
    .clk, .rst_n, .lookup_valid(pwc_lookup), .lookup_key(start_va[47:30]),
    .resp_valid(h3_v), .resp_hit(h3_hit), .resp_ppn(h3_ppn),
    .fill_valid(f3), .fill_key(va_q[47:30]), .fill_ppn(f_ppn), .inv_all(pwc_flush));
  pwc #(.KEY_W(27), .ENTRIES(PWC_ENTRIES), .WAYS(PWC_WAYS), .LATENCY(PWC_LATENCY)) u_pwc_pd (
    .clk, .rst_n, .lookup_valid(pwc_lookup), .lookup_key(start_va[47:21]),
    .resp_valid(h2_v), .resp_hit(h2_hit), .resp_ppn(h2_ppn),
    .fill_valid(f2), .fill_key(va_q[47:21]), .fill_ppn(f_ppn), .inv_all(pwc_flush));

  // ---------------- walk ----------------
  logic [8:0] idx;
  always_comb begin
    unique case (level_q)
      3'd4:    idx = va_q[47:39];
      3'd3:    idx = va_q[38:30];
      3'd2:    idx = va_q[29:21];
      default: idx = va_q[20:12];
    endcase
  end

  logic [63:0] rpte, new_pte;
  logic        leaf, fault, resp_dram;
  always_comb begin
    rpte      = mresp.rdata;
    resp_dram = dram_q || mresp.dram;
    fault     = !rpte[PTE_P_BIT];
    leaf      = (level_q == 3'd1) || (level_q == 3'd2 && rpte[PTE_PS_BIT]);
    new_pte   = rpte;
    new_pte[PTE_FREQ_LSB +: FREQ_W] = FREQ_W'(sat_inc(4'(pte_freq(rpte)), 4'(3'b111)));
    if (resp_dram)
      new_pte[PTE_COST_LSB +: COST_W] = sat_inc(pte_cost(rpte), 4'hF);
    f_ppn = pte_ppn(rpte);
    f4 = (st_q == W_WAIT) && mresp_valid && !abort_q && !abort_req && !fault && level_q == 3'd4;
    f3 = (st_q == W_WAIT) && mresp_valid && !abort_q && !abort_req && !fault && level_q == 3'd3;
    f2 = (st_q == W_WAIT) && mresp_valid && !abort_q && !abort_req && !fault && level_q == 3'd2 && !leaf;
  end

  always_comb begin
    mreq        = '0;
    mreq_valid  = 1'b0;
    if (st_q == W_REQ) begin
      mreq_valid = !abort_q && !abort_req;
      mreq.op    = L2_READ;
      mreq.pa    = {table_q, idx, 3'b000};
    end else if (st_q == W_WB) begin
      mreq_valid = 1'b1;
      mreq.op    = L2_WRITE;
      mreq.pa    = pte_pa_q;
      mreq.wdata = pte_q;
    end
  end

  assign busy        = st_q != W_IDLE;
  assign done_pte    = pte_q;
  assign done_pte_pa = pte_pa_q;
  assign done_ps     = ps_q;
  assign done_dram   = dram_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= W_IDLE;
      va_q       <= '0;
      table_q    <= '0;
      level_q    <= 3'd4;
      dram_q     <= 1'b0;
      abort_q    <= 1'b0;
      pte_q      <= '0;
      pte_pa_q   <= '0;
      ps_q       <= PS_4K;
      done       <= 1'b0;
      done_fault <= 1'b0;
    end else begin
      done       <= 1'b0;
      done_fault <= 1'b0;
      if (abort_req && st_q != W_IDLE) abort_q <= 1'b1;
      unique case (st_q)
        W_IDLE: if (start) begin
          va_q    <= start_va;
          table_q <= cr3_ppn;
          level_q <= 3'd4;
          dram_q  <= 1'b0;
          abort_q <= 1'b0;
          st_q    <= W_PWC;
        end
        W_PWC: if (h4_v) begin
          if (abort_q || abort_req) begin
            st_q <= W_IDLE;
          end else begin
            if (h2_hit)      begin table_q <= h2_ppn; level_q <= 3'd1; end
            else if (h3_hit) begin table_q <= h3_ppn; level_q <= 3'd2; end
            else if (h4_hit) begin table_q <= h4_ppn; level_q <= 3'd3; end
            st_q <= W_REQ;
          end
        end
        W_REQ: begin
          if (abort_q || abort_req) st_q <= W_IDLE;
          else if (mreq_ready) begin
            pte_pa_q <= {table_q, idx, 3'b000};
            st_q     <= W_WAIT;
          end
        end
        W_WAIT: if (mresp_valid) begin
          dram_q <= resp_dram;
          if (abort_q || abort_req) begin
            st_q <= W_IDLE;
          end else if (fault) begin
            pte_q      <= rpte;
            done       <= 1'b1;
            done_fault <= 1'b1;
            st_q       <= W_IDLE;
          end else if (leaf) begin
            pte_q <= new_pte;
            ps_q  <= (level_q == 3'd2) ? PS_2M : PS_4K;
            st_q  <= W_WB;
          end else begin
            table_q <= pte_ppn(rpte);
            level_q <= level_q - 3'd1;
            st_q    <= W_REQ;
          end
        end
        W_WB: if (mreq_ready) st_q <= W_WB_WAIT;
        W_WB_WAIT: if (mresp_valid) begin
          done <= 1'b1;
          st_q <= W_IDLE;
        end
        default: st_q <= W_IDLE;
      endcase
    end
  end

  // A request is held stable until accepted.
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      (mreq_valid && !mreq_ready && st_q == W_WB) |=> mreq_valid && $stable(mreq);
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
