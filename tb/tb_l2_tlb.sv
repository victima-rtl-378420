// tb_l2_tlb: the unified L2 TLB at its full size (1536 entries, 12-way,
// 12-cycle latency, 4 KB and 2 MB pages); checks in tb_tlb_common.svh.
module tb_l2_tlb;
  localparam int ENTRIES = 1536, WAYS = 12, LATENCY = 12;
  localparam bit HOLD_4K = 1, HOLD_2M = 1;
`include "tb_tlb_common.svh"
endmodule
