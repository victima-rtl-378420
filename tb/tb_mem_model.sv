// tb_mem_model: behavioural main memory with an x86-64 page-table builder.
//
// Not synthesizable; stands for the DRAM (or L3) behind the L2 cache in the
// testbenches. Storage is a sparse associative array of 64-byte lines
// (unwritten lines read as zero). Line requests (mem_req_t, valid/ready,
// ready always high) are served in order: a read is answered LATENCY cycles
// later by one resp_valid pulse, a write completes at once with no response.
//
// Backdoor tasks for testbenches: rd_word/wr_word access 64-bit words, and
// map_page(cr3_ppn, va, ppn, is_2m) builds the four-level page table for one
// mapping, allocating table pages from frame 0x1000 upwards on first use
// (entries: P = bit 0, PS = bit 7 for a 2 MB leaf, frame in bits 51:12).
module tb_mem_model
  import victima_pkg::*;
#(
  parameter int unsigned LATENCY = 40
) (
  input  logic              clk,
  input  logic              req_valid,
  output logic              req_ready,
  input  mem_req_t          req,
  output logic              resp_valid,
  output logic [LINE_W-1:0] resp_data
);

  logic [LINE_W-1:0] lines [logic [LINE_ADDR_W-1:0]];
  logic [PPN_W-1:0]  next_frame = 40'h1000;
  int unsigned       n_reads = 0;
  int unsigned       n_writes = 0;

  logic                   busy = 1'b0;
  int unsigned            cnt = 0;
  logic [LINE_ADDR_W-1:0] pend_line;

  assign req_ready = !busy;

  function automatic logic [LINE_W-1:0] rd_line(input logic [LINE_ADDR_W-1:0] l);
    if (lines.exists(l)) return lines[l];
    return '0;
  endfunction

  function automatic logic [63:0] rd_word(input logic [PA_W-1:0] pa);
    logic [LINE_W-1:0] d;
    d = rd_line(pa[PA_W-1:6]);
    return d[pa[5:3]*64 +: 64];
  endfunction

  task automatic wr_word(input logic [PA_W-1:0] pa, input logic [63:0] v);
    logic [LINE_W-1:0] d;
    d = rd_line(pa[PA_W-1:6]);
    d[pa[5:3]*64 +: 64] = v;
    lines[pa[PA_W-1:6]] = d;
  endtask

  task automatic map_page(input logic [PPN_W-1:0] cr3, input logic [VA_W-1:0] va,
                          input logic [PPN_W-1:0] ppn, input bit is_2m);
    logic [PPN_W-1:0] tbl;
    logic [PA_W-1:0]  ea;
    logic [63:0]      e;
    int               lvl;
    tbl = cr3;
    for (lvl = 4; lvl >= 1; lvl--) begin
      ea = {tbl, va[12 + 9*(lvl-1) +: 9], 3'b000};
      if ((lvl == 2 && is_2m) || lvl == 1) begin
        e = '0;
        e[PA_W-1:12] = ppn;
        e[0] = 1'b1;
        e[1] = 1'b1;
        e[7] = is_2m;
        wr_word(ea, e);
        break;
      end
      e = rd_word(ea);
      if (!e[0]) begin
        e = '0;
        e[PA_W-1:12] = next_frame;
        e[0] = 1'b1;
        e[1] = 1'b1;
        next_frame = next_frame + 1;
        wr_word(ea, e);
      end
      tbl = e[PA_W-1:12];
    end
  endtask

  always @(posedge clk) begin
    resp_valid <= 1'b0;
    if (busy) begin
      if (cnt <= 1) begin
        busy       <= 1'b0;
        resp_valid <= 1'b1;
        resp_data  <= rd_line(pend_line);
      end else begin
        cnt <= cnt - 1;
      end
    end else if (req_valid) begin
      if (req.we) begin
        lines[req.line] = req.wdata;
        n_writes++;
      end else begin
        busy      <= 1'b1;
        cnt       <= LATENCY;
        pend_line <= req.line;
        n_reads++;
      end
    end
  end

endmodule
