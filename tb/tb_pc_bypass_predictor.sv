// tb_pc_bypass_predictor: self-checking test of the PC-based reuse
// predictor at its defaults (256 entries, 3-bit counters, threshold 4,
// sampling one in 32).
//
// Directed: a fresh PC is predicted "cache"; four dead evictions make it
// predicted dead; the first use after that is sampled (allocated), the next
// 31 bypass, the one after is sampled again; hits bring it back to "cache";
// counters saturate; simultaneous opposite updates cancel. Random: 20000
// cycles of random training and lookups against a reference model.
module tb_pc_bypass_predictor;
  import gpu_cache_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  pc_t        lookup_pc;
  logic [7:0] lookup_sig, reuse_sig, dead_sig;
  logic       predict_bypass, lookup_use, reuse_v, dead_v;

  pc_bypass_predictor dut (
    .clk, .rst_n, .lookup_pc, .lookup_sig, .predict_bypass, .lookup_use,
    .train_reuse_valid(reuse_v), .train_reuse_sig(reuse_sig),
    .train_dead_valid(dead_v), .train_dead_sig(dead_sig)
  );

  int m_cnt [256];
  int m_samp;

  function automatic logic [7:0] hash(pc_t pc);
    return pc[9:2] ^ pc[17:10];
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one cycle: drive, compare combinational outputs, update model
  task automatic step(pc_t pc, bit use_, bit rv, logic [7:0] rs, bit dv, logic [7:0] ds);
    logic [7:0] s;
    bit dead;
    @(negedge clk);
    lookup_pc = pc; lookup_use = use_;
    reuse_v = rv; reuse_sig = rs; dead_v = dv; dead_sig = ds;
    #1;
    s = hash(pc);
    dead = (m_cnt[s] >= 4);
    check(lookup_sig == s, "signature");
    check(predict_bypass == (dead && m_samp != 0), "prediction");
    if (use_ && dead) m_samp = (m_samp + 1) % 32;
    if (!(rv && dv && rs == ds)) begin
      if (rv && m_cnt[rs] > 0) m_cnt[rs]--;
      if (dv && m_cnt[ds] < 7) m_cnt[ds]++;
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    pc_t p;
    logic [7:0] s;
    lookup_pc = '0; lookup_use = 0; reuse_v = 0; dead_v = 0; reuse_sig = 0; dead_sig = 0;
    for (int i = 0; i < 256; i++) m_cnt[i] = 0;
    m_samp = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    p = 48'h1234;
    s = hash(p);
    step(p, 1, 0, 0, 0, 0);
    check(!predict_bypass, "fresh PC cached");
    for (int k = 0; k < 4; k++) step(p, 0, 0, 0, 1, s);
    step(p, 1, 0, 0, 0, 0);
    check(!predict_bypass, "first dead prediction is sampled");
    for (int k = 0; k < 31; k++) begin
      step(p, 1, 0, 0, 0, 0);
      check(predict_bypass, "dead PC bypasses");
    end
    step(p, 1, 0, 0, 0, 0);
    check(!predict_bypass, "sampled again after 32 uses");
    for (int k = 0; k < 10; k++) step(p, 0, 0, 0, 1, s);
    check(m_cnt[s] == 7, "model saturates");
    step(p, 0, 1, s, 1, s);   // cancel
    for (int k = 0; k < 4; k++) step(p, 0, 1, s, 0, 0);
    step(p, 1, 0, 0, 0, 0);
    check(!predict_bypass, "reused PC cached again");

    for (int n = 0; n < 20000; n++)
      step(pc_t'({$urandom, $urandom}) & 48'h0000_0000_0FFC, 1'($urandom), 1'($urandom),
           8'($urandom_range(0, 7)), 1'($urandom), 8'($urandom_range(0, 7)));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
