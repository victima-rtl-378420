// pwc: page walk cache for one level of the x86-64 page table.
//
// Maps a virtual-address prefix (KEY_W bits: VA[47:39] for the PML4 level,
// VA[47:30] for PDP, VA[47:21] for PD) to the physical frame of the next
// table, so a walk can skip the levels above. Three of these, split by level,
// sit in the page table walker. Size, associativity and latency (32 entries,
// 4-way, 2 cycles) are the simulated baseline's; the rest is this design's:
// set index from the low key bits, lowest invalid way else round-robin
// replacement, pipelined lookups answered LATENCY cycles later, single-cycle
// fill, and flush of all entries on inv_all (e.g. on a CR3 change).
module pwc
  import victima_pkg::*;
#(
  parameter int unsigned KEY_W   = 27,
  parameter int unsigned ENTRIES = 32,
  parameter int unsigned WAYS    = 4,
  parameter int unsigned LATENCY = 2
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             lookup_valid,
  input  logic [KEY_W-1:0] lookup_key,
  output logic             resp_valid,
  output logic             resp_hit,
  output logic [PPN_W-1:0] resp_ppn,
  input  logic             fill_valid,
  input  logic [KEY_W-1:0] fill_key,
  input  logic [PPN_W-1:0] fill_ppn,
  input  logic             inv_all
);

  localparam int unsigned SETS  = ENTRIES / WAYS;
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  logic [KEY_W-1:0] key_q [SETS][WAYS];
  logic [PPN_W-1:0] ppn_q [SETS][WAYS];
  logic [WAYS-1:0]  vld_q [SETS];
  logic [WAY_W-1:0] rr_q  [SETS];

  function automatic logic [IDX_W-1:0] set_of(input logic [KEY_W-1:0] k);
    return (SETS > 1) ? IDX_W'(k % SETS) : '0;
  endfunction

  logic             l_hit;
  logic [PPN_W-1:0] l_ppn;
  logic [IDX_W-1:0] l_set;
  always_comb begin
    l_set = set_of(lookup_key);
    l_hit = 1'b0;
    l_ppn = '0;
    for (int w = 0; w < WAYS; w++)
      if (vld_q[l_set][w] && key_q[l_set][w] == lookup_key) begin
        l_hit = 1'b1; l_ppn = ppn_q[l_set][w];
      end
  end

  logic             pv_q [LATENCY];
  logic             ph_q [LATENCY];
  logic [PPN_W-1:0] pp_q [LATENCY];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LATENCY; i++) begin
        pv_q[i] <= 1'b0; ph_q[i] <= 1'b0; pp_q[i] <= '0;
      end
    end else begin
      pv_q[0] <= lookup_valid;
      ph_q[0] <= lookup_valid && l_hit;
      pp_q[0] <= l_ppn;
      for (int i = 1; i < LATENCY; i++) begin
        pv_q[i] <= pv_q[i-1]; ph_q[i] <= ph_q[i-1]; pp_q[i] <= pp_q[i-1];
      end
    end
  end
  assign resp_valid = pv_q[LATENCY-1];
  assign resp_hit   = ph_q[LATENCY-1];
  assign resp_ppn   = pp_q[LATENCY-1];

  logic [IDX_W-1:0] f_set;
  logic [WAY_W-1:0] f_way;
  logic             f_new;
  always_comb begin
    f_set = set_of(fill_key);
    f_way = rr_q[f_set];
    f_new = 1'b1;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!vld_q[f_set][w]) f_way = WAY_W'(w);
    for (int w = WAYS - 1; w >= 0; w--)
      if (vld_q[f_set][w] && key_q[f_set][w] == fill_key) begin
        f_way = WAY_W'(w); f_new = 1'b0;
      end
  end

  always_ff @(posedge clk) begin
    if (fill_valid) begin
      key_q[f_set][f_way] <= fill_key;
      ppn_q[f_set][f_way] <= fill_ppn;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        vld_q[s] <= '0; rr_q[s] <= '0;
      end
    end else if (inv_all) begin
      for (int s = 0; s < SETS; s++) vld_q[s] <= '0;
    end else if (fill_valid) begin
      vld_q[f_set][f_way] <= 1'b1;
      if (f_new && f_way == rr_q[f_set])
        rr_q[f_set] <= (int'(rr_q[f_set]) == WAYS - 1) ? '0 : rr_q[f_set] + 1'b1;
    end
  end

endmodule
