// ptw_cp: page table walk cost predictor (PTW-CP) with its bypass logic.
//
// On an L2 TLB miss or eviction the MMU hands this block the two counters of
// the page's PTE: the 3-bit PTW frequency and the 4-bit PTW cost. Four
// comparators test whether the pair lies inside a bounding box, and the page
// is predicted costly-to-translate if it does. The box edges are four
// programmable threshold registers that reset to the paper's box, cost 1..12
// and frequency 1..7, edges included. When the L2 cache's MPKI is high
// (l2c_high_mpki), caching data pays little, so the predictor is bypassed and
// the TLB block is inserted regardless (insert = 1, bypassed = 1).
//
// Timing: the prediction is combinational from freq/cost, i.e. it is made in
// the cycle the counters arrive. Threshold registers are written one per cycle
// through cfg_we/cfg_sel/cfg_data (sel 0 freq min, 1 freq max, 2 cost min,
// 3 cost max). The register write port and its encoding are this design's
// own; the comparators, their number and the thresholds are the paper's.
module ptw_cp
  import victima_pkg::*;
#(
  parameter logic [FREQ_W-1:0] FREQ_MIN = 3'd1,
  parameter logic [FREQ_W-1:0] FREQ_MAX = 3'd7,
  parameter logic [COST_W-1:0] COST_MIN = 4'd1,
  parameter logic [COST_W-1:0] COST_MAX = 4'd12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [1:0]        cfg_sel,
  input  logic [3:0]        cfg_data,
  input  logic [FREQ_W-1:0] freq,
  input  logic [COST_W-1:0] cost,
  input  logic              l2c_high_mpki,
  output logic              costly,
  output logic              insert,
  output logic              bypassed
);

  logic [FREQ_W-1:0] freq_lo_q, freq_hi_q;
  logic [COST_W-1:0] cost_lo_q, cost_hi_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      freq_lo_q <= FREQ_MIN;
      freq_hi_q <= FREQ_MAX;
      cost_lo_q <= COST_MIN;
      cost_hi_q <= COST_MAX;
    end else if (cfg_we) begin
      unique case (cfg_sel)
        2'd0: freq_lo_q <= cfg_data[FREQ_W-1:0];
        2'd1: freq_hi_q <= cfg_data[FREQ_W-1:0];
        2'd2: cost_lo_q <= cfg_data;
        default: cost_hi_q <= cfg_data;
      endcase
    end
  end

  logic ge_freq, le_freq, ge_cost, le_cost;
  always_comb begin
    ge_freq  = freq >= freq_lo_q;
    le_freq  = freq <= freq_hi_q;
    ge_cost  = cost >= cost_lo_q;
    le_cost  = cost <= cost_hi_q;
    costly   = ge_freq && le_freq && ge_cost && le_cost;
    bypassed = l2c_high_mpki;
    insert   = bypassed || costly;
  end

endmodule
