// tb_gpu_l1_dcache: self-checking test of the per-CU L1 data cache at its
// full size (16 KB, 16 ways), with the HBM model standing in for the L2.
//
// Every load's data is compared with a shadow copy of memory. Sections:
// miss then hit (hit answered 2 cycles after acceptance), coalescing of
// three loads into one read, stores written through (each store reaches the
// next level at once, a present copy is updated, an absent line is not
// allocated), allocation bypass when all 16 ways of a set are pending, and
// SYNC_INV turning a former hit into a miss.
module tb_gpu_l1_dcache;
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

  gpu_l1_dcache dut (
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

  localparam pc_t PC_N = 48'h104;

  initial begin : main
    int id, ids[20];
    int r0, w0;
    laddr_t A, B, C;
    up_req_valid = 1'b0;
    up_req       = '0;
    sync_valid   = 1'b0;
    sync_op      = SYNC_INV;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    A = 28'h12;
    r0 = u_mem.reads;
    load_wait(A, PC_N, "first miss", id);
    check(u_mem.reads == r0 + 1, "miss reads next level once");
    load_wait(A, PC_N, "hit", id);
    check((t_rsp[id] - t_acc[id]) / 10 == 2, "hit answered 2 cycles after acceptance");
    check(u_mem.reads == r0 + 1, "hit does not go to the next level");

    B = 28'h23;
    r0 = u_mem.reads;
    load(B, PC_N, ids[0]);
    load(B, PC_N, ids[1]);
    load(B, PC_N, ids[2]);
    for (int k = 0; k < 3; k++) begin
      wait_rsp(ids[k]);
      check(got_data[ids[k]] == exp_data[ids[k]], "coalesced load data");
    end
    check(u_mem.reads == r0 + 1, "three loads to one line: one read");
    check(stats.coalesced == 2, "two loads coalesced");

    // stores bypass the L1 (write-through, no allocate)
    w0 = u_mem.writes;
    store(A, PC_N, 64'h0000_0000_0000_F0F0, pattern(5));
    check(u_mem.writes == w0 + 1, "store to a present line written through");
    check(memline(A) == sh(A), "written-through data in next level");
    r0 = u_mem.reads;
    load_wait(A, PC_N, "load after store to present line", id);
    check(u_mem.reads == r0, "present copy updated in place");
    C = 28'h777;
    store(C, PC_N, '1, pattern(6));
    check(u_mem.writes == w0 + 2, "store to an absent line written through");
    load_wait(C, PC_N, "load after store to absent line", id);
    check(u_mem.reads == r0 + 1, "store did not allocate");

    // allocation bypass: 16 pending misses in set 5
    r0 = u_mem.reads;
    for (int k = 1; k <= 17; k++) load(laddr_t'((k << 4) | 5), PC_N, ids[k-1]);
    repeat (3) @(posedge clk);
    check(stats.alloc_bypass == 1, "17th miss to a fully pending set is bypassed");
    check(stats.stall_cycles == 0, "no stall cycles with allocation bypass");
    for (int k = 0; k < 17; k++) begin
      wait_rsp(ids[k]);
      check(got_data[ids[k]] == exp_data[ids[k]], "load data in fully pending set");
    end
    check(u_mem.reads == r0 + 17, "17 reads");

    do_sync(SYNC_INV);
    r0 = u_mem.reads;
    load_wait(A, PC_N, "load after invalidate", id);
    check(u_mem.reads == r0 + 1, "former hit misses after SYNC_INV");
    check(stats.misses >= 1 && stats.hits >= 2, "counters");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
