// req_arbiter: N-to-1 request crossbar with response routing, joining the
// L1 caches of all compute units to the single shared L2 port.
//
// Requests: a round-robin arbiter picks one valid input per cycle, starting
// from the input after the last one granted, and passes its request on with
// the input's index written into the top PORT_W bits of the id (the lower
// bits keep the requester's own id, which must fit in them). Responses: the
// top PORT_W bits of a response id select the input to return it to; those
// bits are cleared on the way back, so every requester sees its own id.
// Back-pressure is passed straight through in both directions. The path is
// combinational: a request granted in a cycle is presented downstream in the
// same cycle.
//
// The paper shows only that all L1s share one L2 (its system figure); the
// round-robin policy and the id scheme are this design's choices.
module req_arbiter
  import gpu_cache_pkg::*;
#(
  parameter int unsigned N = 96,
  localparam int unsigned PORT_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  in_req_valid,
  output logic [N-1:0]  in_req_ready,
  input  creq_t [N-1:0] in_req,
  output logic [N-1:0]  in_rsp_valid,
  input  logic [N-1:0]  in_rsp_ready,
  output crsp_t [N-1:0] in_rsp,
  output logic          out_req_valid,
  input  logic          out_req_ready,
  output creq_t         out_req,
  input  logic          out_rsp_valid,
  output logic          out_rsp_ready,
  input  crsp_t         out_rsp
);

  localparam int unsigned LOW_W = ID_W - PORT_W;

  logic [PORT_W-1:0] ptr;
  logic [PORT_W-1:0] grant;
  logic              any;

  always_comb begin
    int unsigned p;
    any   = 1'b0;
    grant = '0;
    for (int unsigned k = 0; k < N; k++) begin
      p = (32'(ptr) + k) % N;
      if (!any && in_req_valid[p]) begin
        any   = 1'b1;
        grant = PORT_W'(p);
      end
    end
  end

  always_comb begin
    out_req_valid = any;
    out_req       = in_req[grant];
    out_req.id    = {grant, in_req[grant].id[LOW_W-1:0]};
    in_req_ready  = '0;
    in_req_ready[grant] = any && out_req_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                          ptr <= '0;
    else if (any && out_req_ready)       ptr <= (grant == PORT_W'(N - 1)) ? '0 : grant + 1'b1;
  end

  logic [PORT_W-1:0] rport;
  assign rport = out_rsp.id[ID_W-1 -: PORT_W];

  always_comb begin
    in_rsp_valid = '0;
    for (int unsigned i = 0; i < N; i++) begin
      in_rsp[i]    = out_rsp;
      in_rsp[i].id = {{PORT_W{1'b0}}, out_rsp.id[LOW_W-1:0]};
    end
    in_rsp_valid[rport] = out_rsp_valid;
    out_rsp_ready       = in_rsp_ready[rport];
  end

  // A requester's id must leave room for the port number.
  for (genvar i = 0; i < N; i++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      in_req_valid[i] |-> (in_req[i].id[ID_W-1 -: PORT_W] == '0));
  end

endmodule
