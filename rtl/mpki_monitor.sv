// mpki_monitor: misses-per-kilo-instruction detector.
//
// Counts retired instructions (instr_inc, up to 7 per cycle) and events
// (event_i, one per cycle at most) over epochs of EPOCH_KI*1000 instructions.
// At the end of each epoch it compares the event count with
// THRESH_MPKI*EPOCH_KI and holds the result until the next epoch ends:
// mpki_gt when MPKI > THRESH_MPKI, mpki_ge when MPKI >= THRESH_MPKI. Both
// flags are 0 after reset.
//
// Victima uses two of these: L2 TLB MPKI > 5 means high translation pressure
// (the TLB-aware L2 replacement policy), L2 cache MPKI >= 5 bypasses the
// PTW cost predictor (the predictor is consulted only below 5). The threshold
// is the paper's; the epoch mechanism and its length (1000 instructions, the
// epoch the paper uses for its reach measurements) are this design's choice.
module mpki_monitor #(
  parameter int unsigned THRESH_MPKI = 5,
  parameter int unsigned EPOCH_KI    = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [2:0] instr_inc,
  input  logic       event_i,
  output logic       mpki_gt,
  output logic       mpki_ge
);

  localparam int unsigned EPOCH = EPOCH_KI * 1000;
  localparam int unsigned LIMIT = THRESH_MPKI * EPOCH_KI;
  localparam int unsigned IW = $clog2(EPOCH + 8);
  localparam int unsigned EW = $clog2(EPOCH + 2);

  logic [IW-1:0] instr_q;
  logic [EW-1:0] events_q;
  logic [IW-1:0] instr_next;
  logic [EW-1:0] events_next;

  always_comb begin
    instr_next  = instr_q + IW'(instr_inc);
    events_next = events_q + EW'(event_i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      instr_q  <= '0;
      events_q <= '0;
      mpki_gt  <= 1'b0;
      mpki_ge  <= 1'b0;
    end else if (instr_next >= IW'(EPOCH)) begin
      mpki_gt  <= events_next > EW'(LIMIT);
      mpki_ge  <= events_next >= EW'(LIMIT);
      instr_q  <= instr_next - IW'(EPOCH);
      events_q <= '0;
    end else begin
      instr_q  <= instr_next;
      events_q <= (events_next == '1) ? events_q : events_next;
    end
  end

endmodule
