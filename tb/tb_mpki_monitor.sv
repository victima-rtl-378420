// tb_mpki_monitor: drives epochs of 1000 instructions with known miss
// counts (4, 5, 6, 0, 12) at random retire widths and checks the > 5 and
// >= 5 flags after each epoch against the counts; also checks that the flags
// only change at epoch ends.
module tb_mpki_monitor;
  logic clk = 0, rst_n = 0;
  logic [2:0] instr_inc = 0; logic event_i = 0;
  logic gt, ge;
  int checks = 0, failures = 0;

  mpki_monitor dut (.clk, .rst_n, .instr_inc, .event_i, .mpki_gt(gt), .mpki_ge(ge));
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One epoch of exactly 1000 instructions with `misses` events spread in it.
  task automatic epoch(input int misses);
    int left = 1000, ev_left = misses;
    bit g0, e0;
    g0 = gt; e0 = ge;
    while (left > 0) begin
      int n = 1 + ($urandom % 4);
      if (n > left) n = left;
      @(negedge clk);
      instr_inc = 3'(n);
      event_i = (ev_left > 0);
      if (ev_left > 0) ev_left--;
      left -= n;
      if (left > 0) begin
        @(posedge clk); #1;
        checks++;
        if (gt !== g0 || ge !== e0) begin failures++; $display("FAIL flag changed mid-epoch"); end
      end
    end
    @(posedge clk); #1;
    instr_inc = 0; event_i = 0;
    checks++;
    if (gt !== (misses > 5) || ge !== (misses >= 5)) begin
      failures++; $display("FAIL misses=%0d gt=%0d ge=%0d", misses, gt, ge);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (gt || ge) failures++;
    epoch(4); epoch(5); epoch(6); epoch(0); epoch(12); epoch(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
