// tb_ptw_cp: exhaustive check of the PTW cost predictor.
// Every (frequency, cost) pair is compared with the bounding box
// 1 <= freq <= 7, 1 <= cost <= 12 computed here, with and without the
// high-MPKI bypass; then the threshold registers are reprogrammed and the
// sweep repeated against the new box.
module tb_ptw_cp;
  import victima_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [1:0] cfg_sel = 0; logic [3:0] cfg_data = 0;
  logic [2:0] freq; logic [3:0] cost; logic byp;
  logic costly, insert, bypassed;
  int checks = 0, failures = 0;

  ptw_cp dut (.clk, .rst_n, .cfg_we, .cfg_sel, .cfg_data, .freq, .cost,
              .l2c_high_mpki(byp), .costly, .insert, .bypassed);

  always #5 clk = ~clk;

  task automatic sweep(input int flo, input int fhi, input int clo, input int chi);
    for (int b = 0; b < 2; b++)
      for (int f = 0; f < 8; f++)
        for (int c = 0; c < 16; c++) begin
          bit exp;
          freq = 3'(f); cost = 4'(c); byp = b[0];
          #1;
          exp = (f >= flo) && (f <= fhi) && (c >= clo) && (c <= chi);
          checks++;
          if (costly !== exp || insert !== (exp || b[0]) || bypassed !== b[0]) begin
            failures++;
            $display("FAIL f=%0d c=%0d byp=%0d costly=%0d insert=%0d", f, c, b, costly, insert);
          end
        end
  endtask

  task automatic wcfg(input int sel, input int val);
    @(negedge clk); cfg_we = 1; cfg_sel = 2'(sel); cfg_data = 4'(val);
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    sweep(1, 7, 1, 12);
    wcfg(0, 2); wcfg(1, 5); wcfg(2, 3); wcfg(3, 9);
    sweep(2, 5, 3, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
