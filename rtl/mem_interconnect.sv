// mem_interconnect: the system interconnect in front of main memory, shared
// by the GPU's L2 and the CPU cache hierarchy's last level.
//
// Two request ports (0 = GPU L2, 1 = CPU last-level cache) compete for the
// single HBM port. When both are valid the port not served last wins, so
// neither side can starve the other. A forwarded request's id has its top
// bit replaced by the port number (both clients must keep that bit zero);
// memory responses are steered back by that bit, which is cleared again.
// Back-pressure passes straight through; the path is combinational.
//
// The paper names this interconnect in its system figure and says no more;
// the alternating arbitration and the id scheme are this design's choices.
// Coherence between the CPU and GPU caches (the system directory) is not
// part of this block.
module mem_interconnect
  import gpu_cache_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // clients
  input  logic [1:0]  c_req_valid,
  output logic [1:0]  c_req_ready,
  input  creq_t [1:0] c_req,
  output logic [1:0]  c_rsp_valid,
  input  logic [1:0]  c_rsp_ready,
  output crsp_t [1:0] c_rsp,
  // memory
  output logic        m_req_valid,
  input  logic        m_req_ready,
  output creq_t       m_req,
  input  logic        m_rsp_valid,
  output logic        m_rsp_ready,
  input  crsp_t       m_rsp
);

  logic last;   // port served last
  logic sel;

  always_comb begin
    if (c_req_valid == 2'b11) sel = ~last;
    else                      sel = c_req_valid[1];
  end

  always_comb begin
    m_req_valid        = |c_req_valid;
    m_req              = c_req[sel];
    m_req.id[ID_W-1]   = sel;
    c_req_ready        = '0;
    c_req_ready[sel]   = m_req_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n)                          last <= 1'b1;
    else if (m_req_valid && m_req_ready) last <= sel;
  end

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      c_rsp[i]          = m_rsp;
      c_rsp[i].id[ID_W-1] = 1'b0;
    end
    c_rsp_valid               = '0;
    c_rsp_valid[m_rsp.id[ID_W-1]] = m_rsp_valid;
    m_rsp_ready               = c_rsp_ready[m_rsp.id[ID_W-1]];
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    c_req_valid[0] |-> !c_req[0].id[ID_W-1]);
  assert property (@(posedge clk) disable iff (!rst_n)
    c_req_valid[1] |-> !c_req[1].id[ID_W-1]);

endmodule
