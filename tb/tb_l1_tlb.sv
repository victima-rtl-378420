// tb_l1_tlb: the L1 D-TLB for 4 KB pages (64 entries, 4-way, 1 cycle) and,
// through the same checks, the behaviour shared by all L1 TLB instances;
// checks in tb_tlb_common.svh.
module tb_l1_tlb;
  localparam int ENTRIES = 64, WAYS = 4, LATENCY = 1;
  localparam bit HOLD_4K = 1, HOLD_2M = 0;
`include "tb_tlb_common.svh"
endmodule
