// tb_page_table_walker: walks real four-level page tables built in the
// memory model, through an L2-port responder with a 16-cycle latency that
// marks accesses as DRAM accesses when told to. Checks the PTE, its address
// and page size, the number of table reads (4 cold, 1 with a PD-level PWC
// hit), the PTE written back with PTW frequency +1 and PTW cost +1 only for
// walks that touched DRAM, saturation of both counters (7 and 15), 2 MB
// leaves, faults on unmapped pages and abort (no done, walker idle, a later
// walk still correct).
module tb_page_table_walker;
  import victima_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0; logic [VA_W-1:0] start_va = 0; logic [PPN_W-1:0] cr3 = 40'h800;
  logic abort_req = 0, flush = 0;
  logic busy, done, fault, dram; logic [63:0] pte; logic [PA_W-1:0] pte_pa; page_size_e ps;
  logic mreq_valid, mreq_ready = 1; l2_req_t mreq; logic mresp_valid = 0; l2_resp_t mresp = '0;
  int checks = 0, failures = 0;
  int n_reads = 0, n_writes = 0; bit dram_mode = 0; bit dbg = 0;

  mem_req_t nreq = '0; logic nr, nresp; logic [LINE_W-1:0] nd;
  tb_mem_model mem (.clk, .req_valid(1'b0), .req_ready(nr), .req(nreq), .resp_valid(nresp), .resp_data(nd));

  page_table_walker dut (.clk, .rst_n, .start, .start_va, .cr3_ppn(cr3), .abort_req, .pwc_flush(flush),
    .busy, .done, .done_fault(fault), .done_pte(pte), .done_pte_pa(pte_pa), .done_ps(ps),
    .done_dram(dram), .mreq_valid, .mreq_ready, .mreq, .mresp_valid, .mresp);

  always #5 clk = ~clk;

  // L2-port responder: 16 cycles per access
  initial begin
    forever begin
      @(posedge clk);
      if (rst_n && mreq_valid && mreq_ready) begin
        l2_req_t r;
        r = mreq;
        if (dbg) $display("%0t req op=%0d pa=%h", $time, r.op, r.pa);
        mreq_ready <= 0;
        repeat (15) @(posedge clk);
        mresp <= '0;
        if (r.op == L2_READ) begin
          mresp.rdata <= mem.rd_word(r.pa); n_reads++;
        end else begin
          mem.wr_word(r.pa, r.wdata); n_writes++;
        end
        mresp.dram <= dram_mode;
        mresp_valid <= 1;
        @(posedge clk);
        mresp_valid <= 0;
        mreq_ready <= 1;
      end
    end
  end

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic walk(input logic [VA_W-1:0] va, output bit ok);
    int cyc = 0;
    @(negedge clk); start = 1; start_va = va;
    @(negedge clk); start = 0;
    while (!done && cyc < 2000) begin @(posedge clk); #1; cyc++; end
    ok = done && !fault;
    @(negedge clk);
  endtask

  task automatic expect_walk(input logic [VA_W-1:0] va, input logic [PPN_W-1:0] ppn, input bit big,
                             input int reads, input int f, input int c);
    bit ok; int r0, w0; logic [63:0] m;
    r0 = n_reads; w0 = n_writes;
    if (dbg) $display("r0=%0d", r0);
    walk(va, ok);
    checks++;
    if (!ok || pte[PA_W-1:12] !== ppn || (ps == PS_2M) !== big || n_reads - r0 != reads ||
        n_writes - w0 != 1 || pte_freq(pte) != 3'(f) || pte_cost(pte) != 4'(c)) begin
      failures++;
      $display("FAIL va=%h ok=%0d ppn=%h/%h ps=%0d reads=%0d/%0d writes=%0d f=%0d/%0d c=%0d/%0d",
               va, ok, pte[PA_W-1:12], ppn, ps, n_reads - r0, reads, n_writes - w0,
               pte_freq(pte), f, pte_cost(pte), c);
    end
    m = mem.rd_word(pte_pa);
    checks++;
    if (m !== pte) begin failures++; $display("FAIL written-back PTE differs"); end
  endtask

  initial begin
    bit ok;
    repeat (3) @(negedge clk); rst_n = 1;
    mem.map_page(cr3, 48'h0000_1234_5000, 40'h00AB_CDE1, 0);
    mem.map_page(cr3, 48'h0000_1234_6000, 40'h00AB_CDE2, 0);
    mem.map_page(cr3, 48'h0000_4000_0000, 40'h0012_3400, 1);
    dram_mode = 1;
    expect_walk(48'h0000_1234_5678, 40'h00AB_CDE1, 0, 4, 1, 1);
    dram_mode = 0;
    expect_walk(48'h0000_1234_5000, 40'h00AB_CDE1, 0, 1, 2, 1);   // PD-level PWC hit
    expect_walk(48'h0000_1234_6000, 40'h00AB_CDE2, 0, 1, 1, 0);
    expect_walk(48'h0000_4001_2345, 40'h0012_3400, 1, 2, 1, 0);   // 2 MB leaf at PD, PML4-level PWC hit
    dram_mode = 1;
    for (int i = 3; i <= 18; i++)
      expect_walk(48'h0000_1234_5000, 40'h00AB_CDE1, 0, 1, (i > 7) ? 7 : i, (i - 1 > 15) ? 15 : i - 1);
    // unmapped page faults, no write-back
    walk(48'h0000_7777_7000, ok);
    checks++; if (ok || !fault) begin failures++; $display("FAIL no fault"); end
    // abort while the walk is in flight
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    @(negedge clk); start = 1; start_va = 48'h0000_1234_6000;
    @(negedge clk); start = 0;
    repeat (20) @(negedge clk);
    abort_req = 1; @(negedge clk); abort_req = 0;
    begin
      int cyc = 0; bit saw_done = 0;
      while (busy && cyc < 200) begin @(posedge clk); #1; if (done) saw_done = 1; cyc++; end
      checks++; if (busy || saw_done) begin failures++; $display("FAIL abort busy=%0d done=%0d", busy, saw_done); end
    end
    dram_mode = 0;
    expect_walk(48'h0000_1234_6000, 40'h00AB_CDE2, 0, 3, 2, 0);   // PML4 PWC refilled by the aborted walk
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
