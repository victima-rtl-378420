// victima_pkg: types and constants shared by the Victima MMU and L2 cache.
//
// The reference point is an x86-64 machine with 48-bit virtual and 52-bit
// physical addresses, 4 KB and 2 MB pages and 64-byte cache lines. A page
// table entry (PTE) is 8 bytes, so one cache line holds the PTEs of eight
// consecutive virtual pages; this is the unit Victima stores in the L2 cache
// as a "TLB block".
//
// Each PTE carries two saturating counters in bits that x86-64 leaves to
// software: a 3-bit PTW frequency (walks that fetched the PTE) and a 4-bit
// PTW cost (walks that needed at least one DRAM access). Their widths follow
// the paper; their position in bits 54:52 and 58:55 is this design's choice.
//
// The 2-bit page-size code (00 = 4 KB) follows the TLB-block layout figure;
// 01 = 2 MB is this design's choice. Core ASIDs are 12 bits (up to 4096
// address spaces); a TLB block keeps the low 11 bits, as the paper reserves
// 11 spare tag bits for the ASID.
package victima_pkg;

  localparam int unsigned VA_W       = 48;
  localparam int unsigned PA_W       = 52;
  localparam int unsigned PAGE_OFS_W = 12;
  localparam int unsigned VPN_W      = VA_W - PAGE_OFS_W;   // 36
  localparam int unsigned PPN_W      = PA_W - PAGE_OFS_W;   // 40
  localparam int unsigned ASID_W     = 12;
  localparam int unsigned L2C_ASID_W = 11;
  localparam int unsigned LINE_OFS_W = 6;                   // 64-byte lines
  localparam int unsigned LINE_W     = 512;
  localparam int unsigned LINE_ADDR_W = PA_W - LINE_OFS_W;  // 46
  localparam int unsigned PTES_PER_BLOCK = 8;
  localparam int unsigned FREQ_W     = 3;
  localparam int unsigned COST_W     = 4;

  // PTE bit positions (x86-64 plus the two counters).
  localparam int unsigned PTE_P_BIT    = 0;
  localparam int unsigned PTE_PS_BIT   = 7;
  localparam int unsigned PTE_FREQ_LSB = 52;
  localparam int unsigned PTE_COST_LSB = 55;

  typedef enum logic [1:0] {
    PS_4K = 2'b00,
    PS_2M = 2'b01
  } page_size_e;

  typedef struct packed {
    logic                valid;
    logic [ASID_W-1:0]   asid;
    logic [VPN_W-1:0]    vpn;     // 4 KB VPN; for 2 MB pages the low 9 bits are zero
    page_size_e          ps;
    logic [PPN_W-1:0]    ppn;     // 4 KB frame number; for 2 MB pages the low 9 bits are zero
    logic [FREQ_W-1:0]   freq;
    logic [COST_W-1:0]   cost;
  } tlb_entry_t;

  typedef enum logic [2:0] {
    L2_READ       = 3'd0,  // read the 64-bit word at pa
    L2_WRITE      = 3'd1,  // write the 64-bit word at pa
    L2_TLB_PROBE  = 3'd2,  // look up the TLB block of (vpn, asid), 4 KB and 2 MB
    L2_TLB_INSERT = 3'd3,  // copy the PTE line at pa into a TLB block of (vpn, asid, ps)
    L2_INV_ALL    = 3'd4,  // invalidate every TLB block
    L2_INV_ASID   = 3'd5,  // invalidate the TLB blocks of one ASID
    L2_INV_VA     = 3'd6   // invalidate the TLB block holding (vpn, asid)
  } l2_op_e;

  typedef struct packed {
    l2_op_e             op;
    logic [PA_W-1:0]    pa;
    logic [63:0]        wdata;
    logic [VPN_W-1:0]   vpn;
    logic [ASID_W-1:0]  asid;
    page_size_e         ps;
    logic               nested;   // nested TLB block (virtualized execution)
  } l2_req_t;

  typedef struct packed {
    logic               hit;      // data hit, TLB-block hit, or block already present
    logic               dram;     // the request needed a main-memory access
    logic [63:0]        rdata;    // data word or PTE
    page_size_e         ps;       // page size of the TLB block that hit
  } l2_resp_t;

  typedef struct packed {
    logic                   we;
    logic [LINE_ADDR_W-1:0] line;
    logic [LINE_W-1:0]      wdata;
  } mem_req_t;


  // Where a translation was found.
  typedef enum logic [1:0] {
    SRC_L1TLB = 2'd0,
    SRC_L2TLB = 2'd1,
    SRC_L2C   = 2'd2,   // TLB block in the L2 cache (walk aborted)
    SRC_PTW   = 2'd3
  } tr_src_e;

  // TLB maintenance commands.
  typedef enum logic [1:0] {
    INV_ALL  = 2'd0,
    INV_ASID = 2'd1,
    INV_VA   = 2'd2
  } inv_kind_e;

  // One-cycle event pulses of the MMU, for performance counters.
  typedef struct packed {
    logic l1_hit;        // translation served by an L1 TLB
    logic l2tlb_hit;     // served by the L2 TLB
    logic l2tlb_miss;    // L2 TLB miss (walk and TLB-block probe start)
    logic l2c_tlb_hit;   // TLB block found in the L2 cache, walk aborted
    logic walk_done;     // a foreground walk completed
    logic fault;         // the walk found a non-present entry
    logic pred_costly;   // PTW-CP predicted a missed page costly
    logic pred_bypass;   // PTW-CP bypassed (high L2 cache MPKI)
    logic l2tlb_evict;   // the L2 TLB evicted an entry
    logic evict_costly;  // the evicted entry was predicted costly (or bypassed)
    logic evict_present; // its TLB block was already in the L2 cache
    logic bg_walk;       // a background walk for an evicted entry started
    logic job_dropped;   // a background job was dropped (one already waiting)
    logic insert;        // a TLB-block insertion was sent to the L2 cache
    logic inv;           // a maintenance command completed
  } mmu_ev_t;

  function automatic logic [FREQ_W-1:0] pte_freq(input logic [63:0] pte);
    return pte[PTE_FREQ_LSB +: FREQ_W];
  endfunction

  function automatic logic [COST_W-1:0] pte_cost(input logic [63:0] pte);
    return pte[PTE_COST_LSB +: COST_W];
  endfunction

  function automatic logic [PPN_W-1:0] pte_ppn(input logic [63:0] pte);
    return pte[PA_W-1:PAGE_OFS_W];
  endfunction

  // Saturating increment of a w-bit counter held in a 4-bit field.
  function automatic logic [3:0] sat_inc(input logic [3:0] v, input logic [3:0] vmax);
    return (v >= vmax) ? vmax : v + 4'd1;
  endfunction

endpackage
