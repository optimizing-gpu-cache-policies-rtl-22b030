// tb_gpu_mem_system: end-to-end test of the whole GPU memory hierarchy at a
// reduced size (4 CUs with 16 KB L1 data caches, 2 shared 32 KB instruction
// caches, a 64 KB L2, interconnect and HBM model), so it simulates in
// well under a second. The access pattern follows the L2's set count, so N_CU and
// L2_BYTES below can be raised up to the defaults (64 CUs, 4 MB).
//
// All CUs run concurrently, each as its own process, through a small
// kernel-like access pattern:
//   A  loads of 32 lines shared by all CUs (L2 coalescing and hits), then a
//      reload of 8 of them (L1 hits);
//   B  partial stores to 8 private lines of one DRAM row (combined in the
//      L2), then loads of them (refill of partly written lines);
//   C  (one CU after the other) 20 loads from a "streaming" PC that all map to the set holding the
//      first of those dirty lines: this fills all 16 ways with pending
//      misses (allocation bypass in L1 and L2), evicts the dirty line
//      (cache rinsing of its 7 row mates);
//   A' four of those loads repeated at once (L1 miss coalescing);
//   D  20 more streaming loads to the same set, evicting never-reused lines
//      so the predictor learns that this PC's data is dead, after which its
//      misses bypass the L2;
//   E  two full-line stores that stay dirty in the L2 until the flush,
//      read back (L2 hits).
// Meanwhile every instruction cache fetches 8 shared lines twice and the
// CPU port loads and stores its own lines. Then SYNC_FLUSH must leave
// memory equal to the testbench's shadow copy and SYNC_INV must turn the
// L1 hits of phase A into misses. Every load's data is checked. Each
// mechanism (L1 hit, coalescing, allocation bypass in L1 and L2, stall,
// dirty eviction, rinse, PC bypass, flush write-back, invalidate) is counted
// and a failure is recorded for any that never happened.
module tb_gpu_mem_system;
  import gpu_cache_pkg::*;

  localparam int unsigned N_CU     = 4;
  localparam int unsigned L2_BYTES = 65536;
  localparam int unsigned L2_SETS  = L2_BYTES / LINE_BYTES / 16;
  localparam int unsigned N_IC     = N_CU / 2;
  localparam int unsigned N_L1 = N_CU + N_IC;
  localparam int unsigned LAT  = 300;  // long enough to keep many misses in flight

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  [N_CU-1:0] cu_req_valid, cu_req_ready, cu_rsp_valid, cu_rsp_ready;
  creq_t [N_CU-1:0] cu_req;
  crsp_t [N_CU-1:0] cu_rsp;
  logic  [N_IC-1:0] if_req_valid, if_req_ready, if_rsp_valid, if_rsp_ready;
  creq_t [N_IC-1:0] if_req;
  crsp_t [N_IC-1:0] if_rsp;
  logic sync_valid, sync_ready, sync_done;
  sync_op_e sync_op;
  logic cpu_req_valid, cpu_req_ready, cpu_rsp_valid, cpu_rsp_ready;
  creq_t cpu_req;
  crsp_t cpu_rsp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  creq_t mem_req;
  crsp_t mem_rsp;
  cache_stats_t l2_stats;
  cache_stats_t [N_L1-1:0] l1_stats;

  gpu_mem_system #(.N_CU(N_CU), .L2_BYTES(L2_BYTES)) dut (
    .clk, .rst_n,
    .cu_req_valid, .cu_req_ready, .cu_req, .cu_rsp_valid, .cu_rsp_ready, .cu_rsp,
    .if_req_valid, .if_req_ready, .if_req, .if_rsp_valid, .if_rsp_ready, .if_rsp,
    .sync_valid, .sync_op, .sync_ready, .sync_done,
    .cpu_req_valid, .cpu_req_ready, .cpu_req, .cpu_rsp_valid, .cpu_rsp_ready, .cpu_rsp,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_rsp_valid, .mem_rsp_ready, .mem_rsp,
    .l2_stats, .l1_stats
  );

  hbm_model #(.LATENCY(LAT)) u_mem (
    .clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready), .rsp(mem_rsp)
  );

  // ------------------------------------------------------------ reference
  line_t shadow [laddr_t];
  // per port p (0..63 CUs, 64..95 I-caches, 96 CPU): key (p << 16) | id
  line_t exp_data [int];
  line_t got_data [int];
  int    next_id [N_L1 + 1];
  int    n_done = 0;   // finished CU, I-cache and CPU programs
  int    c_turn = 0;   // CU whose phase C may run
  string phase [N_CU]; // where each CU's program is, for the watchdog
  int    waiting [N_CU]; // id each CU waits for

  function automatic line_t init_line(laddr_t a);
    line_t l;
    for (int w = 0; w < 16; w++) l[32*w +: 32] = {a, 4'(w)};
    return l;
  endfunction

  function automatic line_t sh(laddr_t a);
    return shadow.exists(a) ? shadow[a] : init_line(a);
  endfunction

  function automatic line_t memline(laddr_t a);
    return u_mem.mem.exists(a) ? u_mem.mem[a] : init_line(a);
  endfunction

  function automatic line_t pattern(int seed);
    line_t l;
    for (int w = 0; w < 16; w++) l[32*w +: 32] = 32'(seed * 32'h9E3779B1 + w);
    return l;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  assign cu_rsp_ready  = '1;
  assign if_rsp_ready  = '1;
  assign cpu_rsp_ready = 1'b1;

  always @(posedge clk) begin
    for (int i = 0; i < N_CU; i++)
      if (cu_rsp_valid[i]) got_data[(i << 16) | int'(cu_rsp[i].id)] = cu_rsp[i].data;
    for (int i = 0; i < N_IC; i++)
      if (if_rsp_valid[i]) got_data[((N_CU + i) << 16) | int'(if_rsp[i].id)] = if_rsp[i].data;
    if (cpu_rsp_valid) got_data[(N_L1 << 16) | int'(cpu_rsp.id)] = cpu_rsp.data;
  end

  // issue one request on port p (CU, I-cache or CPU); returns its key
  task automatic issue(int p, mem_op_e op, laddr_t a, pc_t pc, bmask_t m, line_t d, output int key);
    creq_t r;
    int id;
    id  = next_id[p]++;
    key = (p << 16) | id;
    r.op = op; r.addr = a; r.pc = pc; r.mask = m; r.data = d; r.id = id_t'(id);
    @(negedge clk);
    if (p < N_CU) begin
      cu_req_valid[p] = 1'b1; cu_req[p] = r;
      while (!cu_req_ready[p]) @(negedge clk);
    end else if (p < N_L1) begin
      if_req_valid[p-N_CU] = 1'b1; if_req[p-N_CU] = r;
      while (!if_req_ready[p-N_CU]) @(negedge clk);
    end else begin
      cpu_req_valid = 1'b1; cpu_req = r;
      while (!cpu_req_ready) @(negedge clk);
    end
    @(posedge clk);
    if (op == OP_STORE) begin
      line_t l;
      l = sh(a);
      for (int i = 0; i < LINE_BYTES; i++) if (m[i]) l[8*i +: 8] = d[8*i +: 8];
      shadow[a] = l;
    end else begin
      exp_data[key] = sh(a);
    end
    @(negedge clk);
    if (p < N_CU)      cu_req_valid[p] = 1'b0;
    else if (p < N_L1) if_req_valid[p-N_CU] = 1'b0;
    else               cpu_req_valid = 1'b0;
  endtask

  task automatic wait_check(int key, string what);
    if ((key >> 16) < N_CU) waiting[key >> 16] = key & 'hFFFF;
    while (!got_data.exists(key)) @(posedge clk);
    check(got_data[key] == exp_data[key], what);
  endtask

  task automatic do_sync(sync_op_e op);
    @(negedge clk);
    sync_valid = 1'b1;
    sync_op    = op;
    while (!sync_ready) @(negedge clk);
    @(negedge clk);
    sync_valid = 1'b0;
    while (!sync_done) @(negedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    for (int i = 0; i < N_CU; i++) $display("  CU %0d in phase %s waiting for id %0d, next id %0d", i, phase[i], waiting[i], next_id[i]);
    $display("  L2 state %0d mshr %b fq %0d held %0d", dut.u_l2.u_cache.state,
             dut.u_l2.u_cache.mshr_v, dut.u_l2.u_cache.fq_cnt, dut.u_l2.u_cache.req_held);
    $display("  L1D0 state %0d mshr %b fq %0d held %0d", dut.g_l1d[0].u_l1d.u_cache.state,
             dut.g_l1d[0].u_l1d.u_cache.mshr_v, dut.g_l1d[0].u_l1d.u_cache.fq_cnt, dut.g_l1d[0].u_l1d.u_cache.req_held);
    $display("  L1D1 state %0d mshr %b fq %0d held %0d", dut.g_l1d[1].u_l1d.u_cache.state,
             dut.g_l1d[1].u_l1d.u_cache.mshr_v, dut.g_l1d[1].u_l1d.u_cache.fq_cnt, dut.g_l1d[1].u_l1d.u_cache.req_held);
    $display("  hbm pending %0d xbar l2 req v %b r %b", u_mem.pend.size(), dut.l2_req_valid, dut.l2_req_ready);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam pc_t PC_R = 48'h1004;   // reused data
  localparam pc_t PC_W = 48'h2008;   // stores
  localparam pc_t PC_D = 48'h33F0;   // streaming, never reused
  localparam pc_t PC_E = 48'h4010;   // phase E stores (PC_W is trained dead by then)
  localparam laddr_t SHARED = 28'h0010000;
  localparam laddr_t PRIV   = 28'h0100000;  // CU i: row PRIV + 32*i
  localparam laddr_t STREAM = 28'h0200000;
  localparam laddr_t CODE   = 28'h0300000;
  localparam laddr_t CPUBUF = 28'h0800000;

  // ------------------------------------------------------------ CU program
  task automatic cu_program(int i);
    int keys[48];
    int key;
    phase[i] = "A";
    // A: shared reads, then L1 reuse
    for (int j = 0; j < 32; j++) issue(i, OP_LOAD, SHARED + laddr_t'(j), PC_R, '0, '0, keys[j]);
    for (int j = 0; j < 4; j++)  issue(i, OP_LOAD, SHARED + laddr_t'(j), PC_R, '0, '0, keys[32 + j]);
    for (int j = 0; j < 36; j++) wait_check(keys[j], "A: shared load");
    for (int j = 0; j < 8; j++)  issue(i, OP_LOAD, SHARED + laddr_t'(j), PC_R, '0, '0, keys[j]);
    for (int j = 0; j < 8; j++)  wait_check(keys[j], "A: reload");
    phase[i] = "B";
    // B: partial stores to 8 lines of a private DRAM row, then read back
    for (int j = 0; j < 8; j++) begin
      issue(i, OP_STORE, PRIV + laddr_t'(32 * i + j), PC_W, 64'h0000_FFFF_0000_00FF,
            pattern(i * 100 + j), key);
      while (!got_data.exists(key)) @(posedge clk);
    end
    for (int j = 1; j < 8; j += 2) issue(i, OP_LOAD, PRIV + laddr_t'(32 * i + j), PC_R, '0, '0, keys[j]);
    for (int j = 1; j < 8; j += 2) wait_check(keys[j], "B: load of combined stores");
    // C: 20 streaming loads into the set of the row's first line, one CU
    // at a time so that each burst has the L2's MSHRs to itself; then two
    // of them again while they are still pending (L1 coalescing)
    phase[i] = "C";
    while (c_turn != i) @(posedge clk);
    for (int k = 0; k < 20; k++)
      issue(i, OP_LOAD, STREAM + laddr_t'(i * 'h10000 + k * L2_SETS + (32 * i) % L2_SETS), PC_D, '0, '0, keys[k]);
    issue(i, OP_LOAD, STREAM + laddr_t'(i * 'h10000 + 0 * L2_SETS + (32 * i) % L2_SETS), PC_D, '0, '0, keys[40]);
    issue(i, OP_LOAD, STREAM + laddr_t'(i * 'h10000 + 19 * L2_SETS + (32 * i) % L2_SETS), PC_D, '0, '0, keys[41]);
    for (int k = 0; k < 20; k++) wait_check(keys[k], "C: streaming load");
    wait_check(keys[40], "C: coalesced streaming load");
    wait_check(keys[41], "C: coalesced streaming load");
    c_turn++;
    phase[i] = "D";
    // D: 20 more into the same set
    for (int k = 20; k < 40; k++) begin
      issue(i, OP_LOAD, STREAM + laddr_t'(i * 'h10000 + k * L2_SETS + (32 * i) % L2_SETS), PC_D, '0, '0, keys[k]);
      wait_check(keys[k], "D: streaming load");
    end
    phase[i] = "E";
    // E: dirty data left in the L2 for the flush
    for (int j = 16; j < 18; j++) begin
      issue(i, OP_STORE, PRIV + laddr_t'(32 * i + j), PC_E, '1, pattern(i * 100 + j), key);
      while (!got_data.exists(key)) @(posedge clk);
    end
    // ... and read back from the L2 (they are not in the L1)
    for (int j = 16; j < 18; j++) begin
      issue(i, OP_LOAD, PRIV + laddr_t'(32 * i + j), PC_R, '0, '0, key);
      wait_check(key, "E: L2 hit on stored line");
    end
    n_done++;
  endtask

  task automatic ic_program(int j);
    int keys[8];
    for (int pass = 0; pass < 2; pass++) begin
      for (int k = 0; k < 8; k++) issue(N_CU + j, OP_LOAD, CODE + laddr_t'(k), PC_R, '0, '0, keys[k]);
      for (int k = 0; k < 8; k++) wait_check(keys[k], "I-fetch");
    end
    n_done++;
  endtask

  task automatic cpu_program();
    int key;
    for (int k = 0; k < 16; k++) begin
      issue(N_L1, OP_STORE, CPUBUF + laddr_t'(k), 48'h0, '1, pattern(5000 + k), key);
      issue(N_L1, OP_LOAD, CPUBUF + laddr_t'(k ^ 1), 48'h0, '0, '0, key);
      wait_check(key, "CPU load");
    end
    n_done++;
  endtask

  function automatic int l1_sum_ab();
    int s = 0;
    for (int i = 0; i < N_L1; i++) s += int'(l1_stats[i].alloc_bypass);
    return s;
  endfunction

  function automatic int l1_sum_hits();
    int s = 0;
    for (int i = 0; i < N_L1; i++) s += int'(l1_stats[i].hits);
    return s;
  endfunction

  function automatic int l1_sum_coal();
    int s = 0;
    for (int i = 0; i < N_L1; i++) s += int'(l1_stats[i].coalesced);
    return s;
  endfunction

  function automatic int l1_sum_stall();
    int s = 0;
    for (int i = 0; i < N_L1; i++) s += int'(l1_stats[i].stall_cycles);
    return s;
  endfunction

  task automatic mechanism(string name, int count);
    $display("mechanism %-28s %0d", name, count);
    check(count > 0, {"mechanism never happened: ", name});
  endtask

  initial begin : main
    int r0, key, t0;
    int keys[8];
    cu_req_valid = '0; cu_req = '0; if_req_valid = '0; if_req = '0;
    cpu_req_valid = 1'b0; cpu_req = '0; sync_valid = 1'b0; sync_op = SYNC_INV;
    for (int p = 0; p <= N_L1; p++) next_id[p] = 1;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    t0 = int'($time / 10);

    for (int i = 0; i < N_CU; i++) begin
      automatic int ii = i;
      fork cu_program(ii); join_none
    end
    for (int j = 0; j < N_IC; j++) begin
      automatic int jj = j;
      fork ic_program(jj); join_none
    end
    fork cpu_program(); join_none
    wait (n_done == N_L1 + 1);
    $display("kernel phase done after %0d cycles", int'($time / 10) - t0);

    do_sync(SYNC_FLUSH);
    foreach (shadow[a]) check(memline(a) == shadow[a], "memory equals shadow after SYNC_FLUSH");

    do_sync(SYNC_INV);
    r0 = u_mem.reads;
    for (int j = 0; j < 8; j++) issue(0, OP_LOAD, SHARED + laddr_t'(j), PC_R, '0, '0, keys[j]);
    for (int j = 0; j < 8; j++) wait_check(keys[j], "load after SYNC_INV");
    check(u_mem.reads == r0 + 8, "SYNC_INV emptied L1 and L2 of clean data");

    $display("L2: req=%0d hit=%0d miss=%0d coal=%0d stall=%0d ab=%0d pcb=%0d ewb=%0d rwb=%0d fwb=%0d",
             l2_stats.requests, l2_stats.hits, l2_stats.misses, l2_stats.coalesced,
             l2_stats.stall_cycles, l2_stats.alloc_bypass, l2_stats.pc_bypass,
             l2_stats.evict_wb, l2_stats.rinse_wb, l2_stats.flush_wb);
    $display("HBM: reads=%0d writes=%0d row hits=%0d row misses=%0d",
             u_mem.reads, u_mem.writes, u_mem.row_hits, u_mem.row_misses);
    mechanism("L1 hit", l1_sum_hits());
    mechanism("L1 miss coalescing", l1_sum_coal());
    mechanism("L1 allocation bypass", l1_sum_ab());
    mechanism("L2 hit", int'(l2_stats.hits));
    mechanism("L2 miss coalescing", int'(l2_stats.coalesced));
    mechanism("L2 allocation bypass", int'(l2_stats.alloc_bypass));
    mechanism("cache stall (L1 or L2)", int'(l2_stats.stall_cycles) + l1_sum_stall());
    mechanism("L2 dirty eviction", int'(l2_stats.evict_wb));
    mechanism("L2 cache rinse write-back", int'(l2_stats.rinse_wb));
    mechanism("L2 PC-based bypass", int'(l2_stats.pc_bypass));
    mechanism("L2 flush write-back", int'(l2_stats.flush_wb));
    mechanism("CPU port traffic", 16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
