// tlb_aware_srrip: replacement logic of one L2 cache set, SRRIP extended to
// favour TLB blocks under translation pressure.
//
// Purely combinational; the cache keeps each set's re-reference prediction
// values (RRPVs) and feeds them in. Three results are produced in parallel:
//
//  * victim / rrpv_aged: the way to replace. An invalid way is taken first
//    (lowest index) and no RRPV changes. Otherwise all RRPVs are aged by the
//    amount that brings the largest one to RRPV_MAX (the same result as
//    SRRIP's "increment all and retry" loop) and the victim is the lowest
//    way at RRPV_MAX; when `pressure` is set and that way is a TLB block, the
//    lowest non-TLB way at RRPV_MAX is taken instead, and the TLB block is
//    evicted only if no such way exists.
//  * rrpv_after_fill: rrpv_aged with fill_way set to its insertion value:
//    0 for a TLB block under pressure, RRPV_MAX otherwise.
//  * rrpv_after_hit: hit_way decremented by 3 for a TLB block under
//    pressure, by 1 otherwise, saturating at 0.
//
// All of this follows the paper's pseudocode. The 2-bit RRPV width is the
// usual SRRIP choice and is assumed; "TLB block" covers nested TLB blocks.
module tlb_aware_srrip #(
  parameter int unsigned WAYS   = 16,
  parameter int unsigned RRPV_W = 2,
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic [WAYS-1:0]              valid,
  input  logic [WAYS-1:0]              is_tlb,
  input  logic [WAYS-1:0][RRPV_W-1:0]  rrpv,
  input  logic                         pressure,
  output logic [WAY_W-1:0]             victim,
  output logic [WAYS-1:0][RRPV_W-1:0]  rrpv_aged,
  input  logic [WAY_W-1:0]             fill_way,
  input  logic                         fill_is_tlb,
  output logic [WAYS-1:0][RRPV_W-1:0]  rrpv_after_fill,
  input  logic [WAY_W-1:0]             hit_way,
  input  logic                         hit_is_tlb,
  output logic [WAYS-1:0][RRPV_W-1:0]  rrpv_after_hit
);

  localparam logic [RRPV_W-1:0] RRPV_MAX = '1;

  logic              any_invalid;
  logic [WAY_W-1:0]  first_invalid;
  logic [RRPV_W-1:0] max_rrpv;
  logic [RRPV_W-1:0] delta;
  logic              found_any, found_data;
  logic [WAY_W-1:0]  first_any, first_data;

  always_comb begin
    any_invalid   = 1'b0;
    first_invalid = '0;
    max_rrpv      = '0;
    for (int i = WAYS - 1; i >= 0; i--) begin
      if (!valid[i]) begin
        any_invalid   = 1'b1;
        first_invalid = WAY_W'(i);
      end
      if (rrpv[i] > max_rrpv) max_rrpv = rrpv[i];
    end
    delta = RRPV_MAX - max_rrpv;

    found_any  = 1'b0;
    found_data = 1'b0;
    first_any  = '0;
    first_data = '0;
    for (int i = WAYS - 1; i >= 0; i--) begin
      rrpv_aged[i] = any_invalid ? rrpv[i] : rrpv[i] + delta;
      if (rrpv[i] == max_rrpv) begin
        found_any = 1'b1;
        first_any = WAY_W'(i);
        if (!is_tlb[i]) begin
          found_data = 1'b1;
          first_data = WAY_W'(i);
        end
      end
    end

    if (any_invalid)                                   victim = first_invalid;
    else if (pressure && is_tlb[first_any] && found_data) victim = first_data;
    else                                               victim = first_any;

    rrpv_after_fill = rrpv_aged;
    rrpv_after_fill[fill_way] = (fill_is_tlb && pressure) ? '0 : RRPV_MAX;

    rrpv_after_hit = rrpv;
    if (hit_is_tlb && pressure)
      rrpv_after_hit[hit_way] = (int'(rrpv[hit_way]) > 3) ? RRPV_W'(int'(rrpv[hit_way]) - 3) : '0;
    else
      rrpv_after_hit[hit_way] = (rrpv[hit_way] != '0) ? rrpv[hit_way] - RRPV_W'(1) : '0;
  end

  // found_any is always set when every way is valid.
  logic unused_found;
  assign unused_found = found_any;

endmodule
