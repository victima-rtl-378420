// tb_pwc: page walk cache (32 entries, 4-way, 2 cycles). Checks the 2-cycle
// latency, hits with the filled frame after fills into distinct sets, a miss
// for an unknown key, that overflowing one set with 5 keys loses exactly
// one, refill of an existing key without loss, and flush.
module tb_pwc;
  import victima_pkg::*;
  logic clk = 0, rst_n = 0;
  logic lv = 0; logic [26:0] lk = 0; logic rv, rh; logic [PPN_W-1:0] rp;
  logic fv = 0; logic [26:0] fk = 0; logic [PPN_W-1:0] fp = 0; logic inv = 0;
  int checks = 0, failures = 0;

  pwc dut (.clk, .rst_n, .lookup_valid(lv), .lookup_key(lk), .resp_valid(rv), .resp_hit(rh),
           .resp_ppn(rp), .fill_valid(fv), .fill_key(fk), .fill_ppn(fp), .inv_all(inv));
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [PPN_W-1:0] val(input logic [26:0] k);
    return {13'h1ABC, k} + 40'd77;
  endfunction

  task automatic fill(input logic [26:0] k);
    @(negedge clk); fv = 1; fk = k; fp = val(k);
    @(negedge clk); fv = 0;
  endtask

  task automatic look(input logic [26:0] k, output bit hit);
    int cyc = 0;
    @(negedge clk); lv = 1; lk = k;
    @(posedge clk); #1 lv = 0;
    while (!rv && cyc < 20) begin @(posedge clk); #1; cyc++; end
    cyc++;
    checks++;
    if (cyc != 2) begin failures++; $display("FAIL latency %0d", cyc); end
    hit = rh;
    if (rh) begin
      checks++;
      if (rp !== val(k)) begin failures++; $display("FAIL ppn"); end
    end
  endtask

  initial begin
    bit h; int lost;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 8; i++) fill(27'h100 + 27'(i));
    for (int i = 0; i < 8; i++) begin
      look(27'h100 + 27'(i), h); checks++; if (!h) begin failures++; $display("FAIL miss %0d", i); end
    end
    look(27'h5555, h); checks++; if (h) failures++;
    // five keys of set 0 (0x100 already there): 0x108, 0x110, 0x118, 0x120
    for (int i = 1; i <= 4; i++) fill(27'h100 + 27'(8 * i));
    lost = 0;
    for (int i = 0; i <= 4; i++) begin look(27'h100 + 27'(8 * i), h); if (!h) lost++; end
    checks++; if (lost != 1) begin failures++; $display("FAIL lost %0d", lost); end
    fill(27'h101);
    look(27'h101, h); checks++; if (!h) failures++;
    look(27'h102, h); checks++; if (!h) failures++;
    @(negedge clk); inv = 1; @(negedge clk); inv = 0;
    look(27'h101, h); checks++; if (h) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
