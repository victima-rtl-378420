// l2_port_arbiter: shares the L2 cache's single request port among N
// requesters with fixed priority (requester 0 highest).
//
// The L2 cache answers one request at a time, so the arbiter records which
// requester's request was accepted and routes the next response pulse to it
// (in_resp_valid[owner]); the response payload itself is broadcast by the
// parent. Requests keep the valid/ready rule: a requester holds its valid and
// request stable until its ready. Used inside the MMU (controller over
// walker) and at the top (MMU over the L1 caches' port). This is glue of this
// design's own; the paper does not describe how the port is shared.
module l2_port_arbiter
  import victima_pkg::*;
#(
  parameter int unsigned N = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N-1:0]    in_valid,
  output logic [N-1:0]    in_ready,
  input  l2_req_t         in_req [N],
  output logic [N-1:0]    in_resp_valid,
  output logic            out_valid,
  input  logic            out_ready,
  output l2_req_t         out_req,
  input  logic            out_resp_valid
);

  localparam int unsigned OW = (N > 1) ? $clog2(N) : 1;

  logic [OW-1:0] grant, owner_q;

  always_comb begin
    grant = '0;
    for (int i = N - 1; i >= 0; i--)
      if (in_valid[i]) grant = OW'(i);
    out_valid = |in_valid;
    out_req   = in_req[grant];
  end

  always_comb begin
    in_ready  = '0;
    in_ready[grant] = out_ready && out_valid;
  end

  always_comb begin
    in_resp_valid = '0;
    in_resp_valid[owner_q] = out_resp_valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      owner_q <= '0;
    else if (out_valid && out_ready) owner_q <= grant;
  end

endmodule
