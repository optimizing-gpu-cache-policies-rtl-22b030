// tb_req_arbiter: self-checking test of the L1-to-L2 crossbar at its default
// width (96 requesters: 64 L1 data caches and 32 instruction caches).
//
// Directed: with all 96 inputs requesting, grants must come in round-robin
// order, one per cycle. Random: inputs raise requests at random with random
// downstream back-pressure; every request must appear downstream exactly
// once, unchanged except for its port number in the id, and each input's
// requests in order. Every response sent back up with a port number in its
// id must reach that port, with the id's port bits cleared.
module tb_req_arbiter;
  import gpu_cache_pkg::*;

  localparam int unsigned N = 96;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  [N-1:0] in_req_valid, in_req_ready, in_rsp_valid, in_rsp_ready;
  creq_t [N-1:0] in_req;
  crsp_t [N-1:0] in_rsp;
  logic out_req_valid, out_req_ready, out_rsp_valid, out_rsp_ready;
  creq_t out_req;
  crsp_t out_rsp;

  req_arbiter dut (.clk, .rst_n, .in_req_valid, .in_req_ready, .in_req,
                   .in_rsp_valid, .in_rsp_ready, .in_rsp,
                   .out_req_valid, .out_req_ready, .out_req,
                   .out_rsp_valid, .out_rsp_ready, .out_rsp);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int sent [N];   // requests sent by each input
  int seen [N];   // requests of each input seen downstream

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // downstream monitor, called mid-cycle: request k of input i carries
  // address {i, k}
  task automatic monitor();
    if (out_req_valid && out_req_ready) begin
      int p;
      p = int'(out_req.id[15:9]);
      check(p < N, "port number in range");
      if (p < N) begin
        check(out_req.addr == laddr_t'({8'(p), 20'(seen[p])}), "request unchanged and in order");
        check(out_req.id[8:0] == 9'(p + 1), "requester id kept in low bits");
        seen[p]++;
      end
    end
  endtask

  initial begin : main
    int last, got;
    logic [N-1:0] fire;
    in_req_valid = '0; in_rsp_ready = '0; out_req_ready = 0; out_rsp_valid = 0; out_rsp = '0;
    for (int i = 0; i < N; i++) begin sent[i] = 0; seen[i] = 0; in_req[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // directed round robin: all requesting, ready always
    @(negedge clk);
    for (int i = 0; i < N; i++) begin
      in_req_valid[i] = 1; in_req[i].addr = laddr_t'({8'(i), 20'(0)}); in_req[i].id = id_t'(i + 1);
    end
    out_req_ready = 1;
    last = -1;
    for (int c = 0; c < N; c++) begin
      #1;
      got = -1;
      for (int i = 0; i < N; i++) if (in_req_ready[i]) got = i;
      check(got == c, "round-robin grant order");
      monitor();
      @(negedge clk);
      in_req_valid[got] = 0;
      sent[got]++;
    end
    out_req_ready = 0;

    // random traffic
    fire = '0;
    @(negedge clk);
    for (int cyc = 0; cyc < 20000 + N + 2; cyc++) begin
      in_req_valid &= ~fire;
      for (int i = 0; i < N; i++) if (fire[i]) sent[i]++;
      if (cyc < 20000) begin
        for (int i = 0; i < N; i++) begin
          if (!in_req_valid[i] && $urandom_range(0, 9) == 0) begin
            in_req_valid[i] = 1;
            in_req[i].addr  = laddr_t'({8'(i), 20'(sent[i])});
            in_req[i].id    = id_t'(i + 1);
            in_req[i].pc    = pc_t'($urandom);
          end
        end
        out_req_ready = ($urandom_range(0, 3) != 0);
      end else begin
        out_req_ready = 1'b1;   // drain
      end
      out_rsp_valid = 1;
      out_rsp.id    = {7'($urandom_range(0, N - 1)), 9'($urandom)};
      out_rsp.data  = line_t'($urandom);
      in_rsp_ready  = {N{1'b1}};
      #1;
      check(in_rsp_valid == (N'(1) << out_rsp.id[15:9]), "response steered to its port");
      check(in_rsp[out_rsp.id[15:9]].id == {7'd0, out_rsp.id[8:0]}, "response id restored");
      check(in_rsp[out_rsp.id[15:9]].data == out_rsp.data, "response data");
      check(out_rsp_ready, "response ready from port");
      monitor();
      fire = in_req_valid & in_req_ready;
      @(negedge clk);
    end
    in_req_valid &= ~fire;
    for (int i = 0; i < N; i++) if (fire[i]) sent[i]++;
    for (int i = 0; i < N; i++) check(sent[i] == seen[i], "every request delivered once");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
