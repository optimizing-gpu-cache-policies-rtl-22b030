// tb_gpu_l2_cache: self-checking test of the shared L2 at its full size
// (4 MB, 16 ways) with all optimisations on, against the HBM model.
//
// Every load's data is compared with a shadow copy of memory kept by the
// testbench (stores update it when issued). Sections:
//   miss then hit (hit answered 2 cycles after acceptance; miss after at
//   least the memory latency), coalescing of three loads into one memory
//   read, store combining without memory traffic and refill of a partly
//   written line, allocation bypass when all 16 ways of a set are pending
//   (with no stall cycles), rinsing of three other dirty lines of a DRAM row
//   when one dirty line of that row is evicted (written back in a burst of
//   row hits), training of the PC predictor until a PC's misses bypass the
//   cache (loads and stores), SYNC_FLUSH leaving memory equal to the shadow,
//   and SYNC_INV turning a former hit into a miss.
module tb_gpu_l2_cache;
  import gpu_cache_pkg::*;

  localparam int unsigned LAT = 100;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic up_req_valid, up_req_ready, up_rsp_valid, up_rsp_ready;
  creq_t up_req;
  crsp_t up_rsp;
  logic dn_req_valid, dn_req_ready, dn_rsp_valid, dn_rsp_ready;
  creq_t dn_req;
  crsp_t dn_rsp;
  logic sync_valid, sync_ready, sync_done;
  sync_op_e sync_op;
  cache_stats_t stats;

  gpu_l2_cache dut (
    .clk, .rst_n,
    .up_req_valid, .up_req_ready, .up_req,
    .up_rsp_valid, .up_rsp_ready, .up_rsp,
    .dn_req_valid, .dn_req_ready, .dn_req,
    .dn_rsp_valid, .dn_rsp_ready, .dn_rsp,
    .sync_valid, .sync_op, .sync_ready, .sync_done,
    .stats
  );

  hbm_model #(.LATENCY(LAT)) u_mem (
    .clk, .rst_n,
    .req_valid(dn_req_valid), .req_ready(dn_req_ready), .req(dn_req),
    .rsp_valid(dn_rsp_valid), .rsp_ready(dn_rsp_ready), .rsp(dn_rsp)
  );

  // ------------------------------------------------------------ reference
  line_t shadow [laddr_t];
  line_t exp_data [int];
  line_t got_data [int];
  time   t_acc [int];
  time   t_rsp [int];
  int    next_id = 1;

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
      $display("FAIL: %s", what);
    end
  endtask

  assign up_rsp_ready = 1'b1;
  always @(posedge clk) begin
    if (up_rsp_valid) begin
      got_data[int'(up_rsp.id)] = up_rsp.data;
      t_rsp[int'(up_rsp.id)]    = $time;
    end
  end

  task automatic issue(mem_op_e op, laddr_t a, pc_t pc, bmask_t m, line_t d, output int id);
    id = next_id++;
    @(negedge clk);
    up_req_valid = 1'b1;
    up_req.op    = op;
    up_req.addr  = a;
    up_req.pc    = pc;
    up_req.mask  = m;
    up_req.data  = d;
    up_req.id    = id_t'(id);
    while (!up_req_ready) @(negedge clk);
    @(posedge clk);
    t_acc[id] = $time;
    if (op == OP_STORE) begin
      line_t l;
      l = sh(a);
      for (int i = 0; i < LINE_BYTES; i++) if (m[i]) l[8*i +: 8] = d[8*i +: 8];
      shadow[a] = l;
    end else begin
      exp_data[id] = sh(a);
    end
    @(negedge clk);
    up_req_valid = 1'b0;
  endtask

  task automatic wait_rsp(int id);
    while (!t_rsp.exists(id)) @(posedge clk);
  endtask

  task automatic load(laddr_t a, pc_t pc, output int id);
    issue(OP_LOAD, a, pc, '0, '0, id);
  endtask

  task automatic load_wait(laddr_t a, pc_t pc, string what, output int id);
    issue(OP_LOAD, a, pc, '0, '0, id);
    wait_rsp(id);
    check(got_data[id] == exp_data[id], {what, ": load data"});
  endtask

  task automatic store(laddr_t a, pc_t pc, bmask_t m, line_t d);
    int id;
    issue(OP_STORE, a, pc, m, d, id);
    wait_rsp(id);
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

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam pc_t PC_N = 48'h104;  // neutral PCs
  localparam pc_t PC_S = 48'h208;
  localparam pc_t PC_D = 48'h3F0;  // a PC whose lines are never reused

  initial begin : main
    int id, id2, ids[20];
    int r0, w0, rh0;
    laddr_t A, B, C, base, a;
    up_req_valid = 1'b0;
    up_req       = '0;
    sync_valid   = 1'b0;
    sync_op      = SYNC_INV;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---- miss, then hit
    A = 28'h100;
    r0 = u_mem.reads;
    load_wait(A, PC_N, "first miss", id);
    check(u_mem.reads == r0 + 1, "miss reads memory once");
    check((t_rsp[id] - t_acc[id]) / 10 >= 64'(LAT) && (t_rsp[id] - t_acc[id]) / 10 <= 64'(LAT + 12),
          "miss latency within memory latency + 12");
    load_wait(A, PC_N, "hit", id);
    check((t_rsp[id] - t_acc[id]) / 10 == 2, "hit answered 2 cycles after acceptance");
    check(u_mem.reads == r0 + 1, "hit does not read memory");
    check(stats.hits == 1, "hit counted");

    // ---- coalescing
    B = 28'h200;
    r0 = u_mem.reads;
    load(B, PC_N, ids[0]);
    load(B, PC_N, ids[1]);
    load(B, PC_N, ids[2]);
    for (int k = 0; k < 3; k++) begin
      wait_rsp(ids[k]);
      check(got_data[ids[k]] == exp_data[ids[k]], "coalesced load data");
    end
    check(u_mem.reads == r0 + 1, "three loads to one line: one memory read");
    check(stats.coalesced == 2, "two loads coalesced");

    // ---- store combining (CacheRW)
    C = 28'h300;
    w0 = u_mem.writes;
    r0 = u_mem.reads;
    store(C, PC_S, 64'h0000_0000_0000_000F, pattern(1));
    store(C, PC_S, 64'h0000_0000_0000_0F00, pattern(2));
    check(u_mem.writes == w0, "combined stores stay in the L2");
    check(u_mem.reads == r0, "store miss does not fetch the line");
    load_wait(C, PC_N, "load of a partly written line", id);
    check(u_mem.reads == r0 + 1, "partly written line is refilled once");
    check(u_mem.writes == w0, "refill keeps the dirty bytes in the L2");

    // ---- allocation bypass: 16 pending misses fill set 0x055
    r0 = u_mem.reads;
    for (int k = 1; k <= 17; k++) load(laddr_t'((k << 12) | 32'h055), PC_N, ids[k-1]);
    repeat (3) @(posedge clk);
    check(stats.alloc_bypass == 1, "17th miss to a fully pending set is bypassed");
    check(stats.stall_cycles == 0, "no stall cycles with allocation bypass");
    for (int k = 0; k < 17; k++) begin
      wait_rsp(ids[k]);
      check(got_data[ids[k]] == exp_data[ids[k]], "load data in fully pending set");
    end
    check(u_mem.reads == r0 + 17, "17 memory reads");
    r0 = u_mem.reads;
    load_wait(laddr_t'((17 << 12) | 32'h055), PC_N, "bypassed line reloaded", id);
    check(u_mem.reads == r0 + 1, "bypassed line was not inserted");

    // ---- rinsing: four dirty lines of one DRAM row, evict one
    base = 28'h40000;       // row 0x2000, lines in sets 0..3
    for (int k = 0; k < 4; k++) store(base + laddr_t'(k), PC_S, 64'h00FF_0000_0000_00FF, pattern(10 + k));
    for (int k = 1; k <= 15; k++) load_wait(laddr_t'((k + 32'h50) << 12), PC_N, "set-0 filler", id);
    w0  = u_mem.writes;
    rh0 = u_mem.row_hits;
    // evicting line in a different DRAM bank from the rinsed row
    load_wait(laddr_t'(32'h61 << 12), PC_N, "load evicting a dirty line", id);
    repeat (40) @(posedge clk);
    check(stats.evict_wb == 1, "one dirty eviction");
    check(stats.rinse_wb == 3, "three lines rinsed");
    check(u_mem.writes == w0 + 4, "four write-backs");
    check(u_mem.wlog.size() >= 4, "write log");
    for (int k = 0; k < 4; k++)
      check(u_mem.wlog[u_mem.wlog.size() - 4 + k] == base + laddr_t'(k), "rinse order: victim then row mates");
    check(u_mem.row_hits >= rh0 + 3, "rinse write-backs hit the open DRAM row");
    for (int k = 0; k < 4; k++) check(memline(base + laddr_t'(k)) == sh(base + laddr_t'(k)), "rinsed data in memory");

    // ---- PC-based bypassing
    for (int k = 1; k <= 20; k++) load_wait(laddr_t'((k << 12) | 32'h0AA), PC_D, "dead-PC load", id);
    check(stats.pc_bypass == 0, "no PC bypass before training");
    load_wait(laddr_t'((21 << 12) | 32'h0AA), PC_D, "sampled load", id);
    check(stats.pc_bypass == 0, "first predicted-dead miss is sampled (allocated)");
    load_wait(laddr_t'((22 << 12) | 32'h0AA), PC_D, "predicted-dead load", id);
    check(stats.pc_bypass == 1, "predicted-dead miss bypasses the L2");
    r0 = u_mem.reads;
    load_wait(laddr_t'((22 << 12) | 32'h0AA), PC_N, "reload of PC-bypassed line", id2);
    check(u_mem.reads == r0 + 1, "PC-bypassed line was not inserted");
    w0 = u_mem.writes;
    store(laddr_t'((23 << 12) | 32'h0AA), PC_D, '1, pattern(30));
    check(stats.pc_bypass == 2, "predicted-dead store bypasses the L2");
    check(u_mem.writes == w0 + 1, "bypassed store written through");
    check(memline(laddr_t'((23 << 12) | 32'h0AA)) == pattern(30), "bypassed store data");

    // ---- flush and invalidate
    do_sync(SYNC_FLUSH);
    check(stats.flush_wb >= 1, "flush wrote back dirty lines");
    foreach (shadow[k]) check(memline(k) == shadow[k], "memory equals shadow after flush");
    do_sync(SYNC_INV);
    r0 = u_mem.reads;
    load_wait(A, PC_N, "load after invalidate", id);
    check(u_mem.reads == r0 + 1, "former hit misses after SYNC_INV");

    $display("stats: req=%0d hit=%0d miss=%0d coal=%0d stall=%0d ab=%0d pcb=%0d ewb=%0d rwb=%0d fwb=%0d",
             stats.requests, stats.hits, stats.misses, stats.coalesced, stats.stall_cycles,
             stats.alloc_bypass, stats.pc_bypass, stats.evict_wb, stats.rinse_wb, stats.flush_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
