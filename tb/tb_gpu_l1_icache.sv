// tb_gpu_l1_icache: self-checking test of the instruction cache shared by
// two CUs (32 KB, 16 ways), with the HBM model standing in for the L2.
//
// Two CUs (modelled as two fetches of each line) fetch a loop of lines
// twice; every fetch's data is checked, the first pass must miss once per
// line (fetches of the same line by both CUs coalesce), the second pass must
// hit without reaching the next level, and SYNC_INV must empty the cache.
module tb_gpu_l1_icache;
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

  gpu_l1_icache dut (
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
    int id, ids[40];
    int r0;
    up_req_valid = 1'b0;
    up_req       = '0;
    sync_valid   = 1'b0;
    sync_op      = SYNC_INV;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    r0 = u_mem.reads;
    for (int k = 0; k < 20; k++) begin
      load(laddr_t'(28'h800 + k), PC_N, ids[2*k]);
      load(laddr_t'(28'h800 + k), PC_N, ids[2*k+1]);
    end
    for (int k = 0; k < 40; k++) begin
      wait_rsp(ids[k]);
      check(got_data[ids[k]] == exp_data[ids[k]], "first-pass fetch data");
    end
    check(u_mem.reads == r0 + 20, "one read per line for two CUs");
    check(stats.coalesced == 20, "second CU's fetch coalesced");
    r0 = u_mem.reads;
    for (int k = 0; k < 20; k++) begin
      load_wait(laddr_t'(28'h800 + k), PC_N, "second-pass fetch", id);
      check((t_rsp[id] - t_acc[id]) / 10 == 2, "fetch hit in 2 cycles");
    end
    check(u_mem.reads == r0, "second pass hits");
    do_sync(SYNC_INV);
    load_wait(laddr_t'(28'h800), PC_N, "fetch after invalidate", id);
    check(u_mem.reads == r0 + 1, "SYNC_INV emptied the cache");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
