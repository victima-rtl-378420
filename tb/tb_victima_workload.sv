// tb_victima_workload: the whole design at default parameters under two
// synthetic access streams shaped like the data-intensive programs Victima
// targets, scaled down to what RTL simulation can run.
//
//   random  GUPS-like: uniformly random 4 KB pages out of 4096 (16 MB), far
//           beyond the 6 MB reach of the 1536-entry L2 TLB.
//   graph   neighbour-list walk: runs of 1..8 consecutive pages starting at
//           random pages, as a graph kernel touching adjacent vertices.
//
// The core is modelled as retiring 21 instructions per memory access, so the
// MPKI monitors see epochs of a memory-intensive program and switch the
// cache into translation-pressure mode by themselves. Every physical
// address is checked against the page table the testbench built. The
// testbench prints how many translations each level served (L1 TLB, L2 TLB,
// TLB block in the L2 cache, page walk) and fails if the L2 cache never
// served one, if pressure mode never came on, or if nothing was inserted.
module tb_victima_workload;
  import victima_pkg::*;
  localparam int PAGES = 4096;
  localparam int N_RANDOM = 1500, N_GRAPH = 1500;
  localparam logic [VA_W-1:0] BASE = 48'h0000_2000_0000;
  logic clk = 0, rst_n = 0;
  logic tr_valid = 0, tr_ready, tr_is_instr = 0, tr_resp_valid, tr_resp_fault;
  logic [VA_W-1:0] tr_va = '0;
  logic [PA_W-1:0] tr_resp_pa;
  tr_src_e tr_resp_src;
  logic [2:0] instr_inc = 0;
  logic inv_valid = 0, inv_ready, inv_done;
  logic dreq_valid = 0, dreq_ready, dresp_valid; l2_req_t dreq = '0; l2_resp_t dresp;
  logic mem_req_valid, mem_req_ready, mem_resp_valid; mem_req_t mem_req; logic [LINE_W-1:0] mem_resp_data;
  mmu_ev_t ev;
  logic tlb_pressure, l2c_high_mpki, l2c_init_done;
  int checks = 0, failures = 0;

  victima_top dut (.clk, .rst_n, .tr_valid, .tr_ready, .tr_va, .tr_is_instr, .tr_resp_valid,
    .tr_resp_pa, .tr_resp_fault, .tr_resp_src, .cr3_ppn(40'h100), .cur_asid(12'd1), .instr_inc,
    .inv_valid, .inv_ready, .inv_kind(INV_ALL), .inv_asid(12'd0), .inv_va(48'd0), .inv_done,
    .cp_cfg_we(1'b0), .cp_cfg_sel(2'd0), .cp_cfg_data(4'd0), .dreq_valid, .dreq_ready, .dreq,
    .dresp_valid, .dresp, .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid,
    .mem_resp_data, .ev, .tlb_pressure, .l2c_high_mpki, .l2c_init_done);
  tb_mem_model #(.LATENCY(40)) mem (.clk, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .resp_valid(mem_resp_valid), .resp_data(mem_resp_data));

  always #5 clk = ~clk;

  initial begin
    #400000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_src [4];
  int n_press = 0, n_ins = 0, n_bg = 0;
  always @(posedge clk) if (rst_n && l2c_init_done) begin
    n_press += int'(tlb_pressure);
    n_ins   += int'(ev.insert);
    n_bg    += int'(ev.bg_walk);
  end

  function automatic logic [PPN_W-1:0] frame_of(input int page);
    return 40'h100000 + 40'(page * 3);
  endfunction

  task automatic access(input int page);
    logic [VA_W-1:0] va;
    int cyc = 0;
    va = BASE + 48'(page) * 48'h1000 + 48'($urandom % 4096);
    @(negedge clk); tr_valid = 1; tr_va = va;
    #1; while (!tr_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 tr_valid = 0;
    while (!tr_resp_valid && cyc < 100000) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (tr_resp_fault || tr_resp_pa != {frame_of(page), va[11:0]}) begin
      failures++;
      $display("FAIL va %h pa %h expected %h", va, tr_resp_pa, {frame_of(page), va[11:0]});
    end
    n_src[int'(tr_resp_src)]++;
    retire = 3;
  endtask

  // the core retires 21 instructions per memory access (3 cycles of 7 after
  // each translation), a memory-intensive instruction mix
  int retire = 0;
  always @(negedge clk) begin
    instr_inc <= (retire > 0) ? 3'd7 : 3'd0;
    if (retire > 0) retire--;
  end

  initial begin
    int p, run;
    for (int i = 0; i < 4; i++) n_src[i] = 0;
    for (int i = 0; i < PAGES; i++) mem.map_page(40'h100, BASE + 48'(i) * 48'h1000, frame_of(i), 0);
    repeat (3) @(negedge clk); rst_n = 1;
    while (!l2c_init_done) @(negedge clk);

    for (int i = 0; i < N_RANDOM; i++) access(int'($urandom % PAGES));
    $display("random: L1 %0d  L2 TLB %0d  L2 cache %0d  walk %0d", n_src[0], n_src[1], n_src[2], n_src[3]);
    checks++;
    if (n_src[2] == 0) begin failures++; $display("FAIL random stream never served from the L2 cache"); end
    for (int i = 0; i < 4; i++) n_src[i] = 0;

    for (int i = 0; i < N_GRAPH; ) begin
      p = int'($urandom % PAGES);
      run = 1 + int'($urandom % 8);
      for (int k = 0; k < run && i < N_GRAPH; k++, i++) access((p + k) % PAGES);
    end
    $display("graph:  L1 %0d  L2 TLB %0d  L2 cache %0d  walk %0d", n_src[0], n_src[1], n_src[2], n_src[3]);
    $display("pressure cycles %0d, insertions %0d, background walks %0d", n_press, n_ins, n_bg);
    checks++;
    if (n_src[2] == 0) begin failures++; $display("FAIL graph stream never served from the L2 cache"); end
    checks++;
    if (n_press == 0) begin failures++; $display("FAIL translation pressure never came on"); end
    checks++;
    if (n_ins == 0) begin failures++; $display("FAIL no TLB block inserted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
