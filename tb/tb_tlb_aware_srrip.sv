// tb_tlb_aware_srrip: random sets against a step-by-step model of the
// paper's pseudocode (increment all RRPVs until one reaches the maximum,
// skip a TLB block under pressure if a data block is also at the maximum),
// plus the insertion (0 / max) and hit (-3 / -1) rules. Also checks a few
// hand-worked cases.
module tb_tlb_aware_srrip;
  localparam int W = 16;
  logic [W-1:0] valid, is_tlb;
  logic [W-1:0][1:0] rrpv, aged, afill, ahit;
  logic pressure, fill_tlb, hit_tlb;
  logic [3:0] victim, fill_way, hit_way;
  int checks = 0, failures = 0;

  tlb_aware_srrip #(.WAYS(W), .RRPV_W(2)) dut (
    .valid, .is_tlb, .rrpv, .pressure, .victim, .rrpv_aged(aged),
    .fill_way, .fill_is_tlb(fill_tlb), .rrpv_after_fill(afill),
    .hit_way, .hit_is_tlb(hit_tlb), .rrpv_after_hit(ahit));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one();
    int r [W];
    int v = -1;
    int exp_fill, exp_hit;
    bit done = 0;
    for (int i = 0; i < W; i++) r[i] = rrpv[i];
    for (int i = 0; i < W; i++) if (!valid[i] && v < 0) v = i;
    while (v < 0) begin
      for (int i = 0; i < W && v < 0; i++)
        if (r[i] == 3) begin
          if (is_tlb[i] && pressure) begin
            for (int k = 0; k < W && v < 0; k++) if (r[k] == 3 && !is_tlb[k]) v = k;
            if (v < 0) v = i;
          end else v = i;
        end
      if (v < 0) for (int i = 0; i < W; i++) r[i]++;
    end
    #1;
    checks++;
    if (victim !== 4'(v)) begin
      failures++; $display("FAIL victim dut=%0d exp=%0d", victim, v);
    end
    for (int i = 0; i < W; i++) begin
      exp_fill = (i == fill_way) ? ((fill_tlb && pressure) ? 0 : 3) : r[i];
      if (hit_tlb && pressure) exp_hit = (int'(rrpv[i]) >= 3) ? rrpv[i] - 3 : 0;
      else                     exp_hit = (rrpv[i] > 0) ? rrpv[i] - 1 : 0;
      if (i != hit_way) exp_hit = rrpv[i];
      checks++;
      if (aged[i] !== 2'(r[i]) || afill[i] !== 2'(exp_fill) || ahit[i] !== 2'(exp_hit)) begin
        failures++;
        $display("FAIL way %0d aged=%0d/%0d fill=%0d/%0d hit=%0d/%0d", i, aged[i], r[i],
                 afill[i], exp_fill, ahit[i], exp_hit);
      end
    end
  endtask

  initial begin
    // hand-worked: all valid, way 2 is a TLB block at RRPV 3, way 5 data at 3
    valid = '1; is_tlb = '0; is_tlb[2] = 1; rrpv = '0; rrpv[2] = 3; rrpv[5] = 3;
    pressure = 1; fill_way = 0; fill_tlb = 1; hit_way = 2; hit_tlb = 1;
    #1; checks++; if (victim !== 4'd5) begin failures++; $display("FAIL hand 1"); end
    pressure = 0;
    #1; checks++; if (victim !== 4'd2) begin failures++; $display("FAIL hand 2"); end
    // hand-worked: only TLB blocks at the maximum -> the TLB block goes
    pressure = 1; rrpv[5] = 1;
    #1; checks++; if (victim !== 4'd2) begin failures++; $display("FAIL hand 3"); end
    for (int n = 0; n < 20000; n++) begin
      for (int i = 0; i < W; i++) begin
        valid[i]  = ($urandom % 32) != 0;
        is_tlb[i] = ($urandom % 3) == 0;
        rrpv[i]   = 2'($urandom);
      end
      pressure = $urandom; fill_way = 4'($urandom); fill_tlb = $urandom;
      hit_way = 4'($urandom); hit_tlb = $urandom;
      check_one();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
