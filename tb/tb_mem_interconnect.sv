// tb_mem_interconnect: self-checking test of the system interconnect that
// shares the HBM port between the GPU L2 (port 0) and the CPU side (port 1).
//
// Both ports stream requests; while both are valid the grants must
// alternate, each port's requests must come out in order with the port in
// the id's top bit, and memory responses must be steered back by that bit
// with it cleared. Memory back-pressure is random.
module tb_mem_interconnect;
  import gpu_cache_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  [1:0] c_req_valid, c_req_ready, c_rsp_valid, c_rsp_ready;
  creq_t [1:0] c_req;
  crsp_t [1:0] c_rsp;
  logic m_req_valid, m_req_ready, m_rsp_valid, m_rsp_ready;
  creq_t m_req;
  crsp_t m_rsp;

  mem_interconnect dut (.clk, .rst_n, .c_req_valid, .c_req_ready, .c_req,
                        .c_rsp_valid, .c_rsp_ready, .c_rsp,
                        .m_req_valid, .m_req_ready, .m_req,
                        .m_rsp_valid, .m_rsp_ready, .m_rsp);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int sent [2], seen [2];
  int last_port;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic monitor();
    if (m_req_valid && m_req_ready) begin
      int p;
      p = int'(m_req.id[15]);
      check(m_req.addr == laddr_t'({4'(p), 24'(seen[p])}), "request in order, unchanged");
      check(m_req.id[14:0] == 15'(p + 7), "client id kept");
      if (c_req_valid == 2'b11 && last_port >= 0) check(p != last_port, "alternation when both wait");
      last_port = p;
      seen[p]++;
    end
  endtask

  initial begin : main
    logic [1:0] fire;
    last_port = -1;
    sent[0] = 0; sent[1] = 0; seen[0] = 0; seen[1] = 0;
    c_req_valid = '0; c_req = '0; c_rsp_ready = '1; m_req_ready = 0; m_rsp_valid = 0; m_rsp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    fire = '0;
    @(negedge clk);
    for (int cyc = 0; cyc < 5000; cyc++) begin
      c_req_valid &= ~fire;
      for (int p = 0; p < 2; p++) if (fire[p]) sent[p]++;
      for (int p = 0; p < 2; p++) if (!c_req_valid[p] && $urandom_range(0, 2) != 0) begin
        c_req_valid[p] = 1;
        c_req[p].addr  = laddr_t'({4'(p), 24'(sent[p])});
        c_req[p].id    = id_t'(p + 7);
      end
      m_req_ready = ($urandom_range(0, 3) != 0);
      m_rsp_valid = 1;
      m_rsp.id    = {1'($urandom), 15'($urandom)};
      m_rsp.data  = line_t'($urandom);
      #1;
      check(c_rsp_valid == (2'b01 << m_rsp.id[15]), "response steered by top id bit");
      check(c_rsp[m_rsp.id[15]].id == {1'b0, m_rsp.id[14:0]}, "response id restored");
      check(c_rsp[m_rsp.id[15]].data == m_rsp.data, "response data");
      monitor();
      fire = c_req_valid & c_req_ready;
      @(negedge clk);
    end
    for (int p = 0; p < 2; p++) if (fire[p]) sent[p]++;
    @(negedge clk);
    c_req_valid = '0;
    m_rsp_valid = 0;
    repeat (2) @(posedge clk);
    check(sent[0] == seen[0] && sent[1] == seen[1], "every request delivered once");
    check(seen[0] > 1000 && seen[1] > 1000, "both clients served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
