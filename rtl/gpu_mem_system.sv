// gpu_mem_system: the GPU memory hierarchy of a CPU-GPU APU, with the
// adaptive L2 policy (CacheRW plus allocation bypass, cache rinsing and
// PC-based bypassing).
//
// Structure (following the paper's system figure and table):
//   N_CU compute-unit ports, each into its own L1 data cache (gpu_l1_dcache);
//   N_CU/2 instruction-fetch ports, each into an L1 instruction cache shared
//   by two CUs (gpu_l1_icache);
//   a crossbar (req_arbiter) joining all N_CU*3/2 L1s to one shared L2
//   (gpu_l2_cache);
//   the system interconnect (mem_interconnect) sharing the memory port
//   between the L2 and the CPU side; the HBM port and the CPU port are the
//   top's ports, since the memory device and the CPUs are outside this RTL.
//
// Synchronisation: a command on sync_* is sent to the caches it concerns
// and sync_done pulses when all of them have finished. SYNC_INV (kernel
// boundary) self-invalidates every L1 and the L2's clean data; SYNC_FLUSH
// (system-scope release) writes back all dirty data of the L2; the L1s hold
// no dirty data. While a command is in progress, each cache finishes what
// it has outstanding first.
//
// Ids: a CU's request id comes back unchanged on its response; the
// crossbar puts its port number in the top 7 bits of ids going to the L2,
// so L1 ids into the crossbar use the low 9 bits (the L1s use their MSHR
// number); ids on the CPU port must keep bit 15 clear.
//
// The numbers of CUs and cache sizes are the paper's; the synchronisation
// sequencing and all port formats are this design's choices.
module gpu_mem_system
  import gpu_cache_pkg::*;
#(
  parameter int unsigned N_CU          = 64,
  parameter int unsigned L1D_BYTES     = 16384,
  parameter int unsigned L1I_BYTES     = 32768,
  parameter int unsigned L2_BYTES      = 4194304,
  localparam int unsigned N_IC         = N_CU / 2,
  localparam int unsigned N_L1         = N_CU + N_IC
) (
  input  logic                clk,
  input  logic                rst_n,
  // compute-unit data ports
  input  logic  [N_CU-1:0]    cu_req_valid,
  output logic  [N_CU-1:0]    cu_req_ready,
  input  creq_t [N_CU-1:0]    cu_req,
  output logic  [N_CU-1:0]    cu_rsp_valid,
  input  logic  [N_CU-1:0]    cu_rsp_ready,
  output crsp_t [N_CU-1:0]    cu_rsp,
  // instruction-fetch ports, one per CU pair
  input  logic  [N_IC-1:0]    if_req_valid,
  output logic  [N_IC-1:0]    if_req_ready,
  input  creq_t [N_IC-1:0]    if_req,
  output logic  [N_IC-1:0]    if_rsp_valid,
  input  logic  [N_IC-1:0]    if_rsp_ready,
  output crsp_t [N_IC-1:0]    if_rsp,
  // synchronisation
  input  logic                sync_valid,
  input  sync_op_e            sync_op,
  output logic                sync_ready,
  output logic                sync_done,
  // CPU side of the system interconnect
  input  logic                cpu_req_valid,
  output logic                cpu_req_ready,
  input  creq_t               cpu_req,
  output logic                cpu_rsp_valid,
  input  logic                cpu_rsp_ready,
  output crsp_t               cpu_rsp,
  // HBM port
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output creq_t               mem_req,
  input  logic                mem_rsp_valid,
  output logic                mem_rsp_ready,
  input  crsp_t               mem_rsp,
  // counters
  output cache_stats_t        l2_stats,
  output cache_stats_t [N_L1-1:0] l1_stats
);

  // ---------------------------------------------------------------- L1s
  logic  [N_L1-1:0] x_req_valid, x_req_ready, x_rsp_valid, x_rsp_ready;
  creq_t [N_L1-1:0] x_req;
  crsp_t [N_L1-1:0] x_rsp;

  // synchronisation fan-out: one request line and done flag per cache,
  // index N_L1 is the L2
  logic [N_L1:0] s_valid, s_ready, s_done, s_issued, s_finished, s_want;
  logic          s_busy;
  sync_op_e      s_op;

  for (genvar i = 0; i < N_CU; i++) begin : g_l1d
    gpu_l1_dcache #(.SIZE_BYTES(L1D_BYTES)) u_l1d (
      .clk         (clk),
      .rst_n       (rst_n),
      .up_req_valid(cu_req_valid[i]),
      .up_req_ready(cu_req_ready[i]),
      .up_req      (cu_req[i]),
      .up_rsp_valid(cu_rsp_valid[i]),
      .up_rsp_ready(cu_rsp_ready[i]),
      .up_rsp      (cu_rsp[i]),
      .dn_req_valid(x_req_valid[i]),
      .dn_req_ready(x_req_ready[i]),
      .dn_req      (x_req[i]),
      .dn_rsp_valid(x_rsp_valid[i]),
      .dn_rsp_ready(x_rsp_ready[i]),
      .dn_rsp      (x_rsp[i]),
      .sync_valid  (s_valid[i]),
      .sync_op     (s_op),
      .sync_ready  (s_ready[i]),
      .sync_done   (s_done[i]),
      .stats       (l1_stats[i])
    );
  end

  for (genvar i = 0; i < N_IC; i++) begin : g_l1i
    gpu_l1_icache #(.SIZE_BYTES(L1I_BYTES)) u_l1i (
      .clk         (clk),
      .rst_n       (rst_n),
      .up_req_valid(if_req_valid[i]),
      .up_req_ready(if_req_ready[i]),
      .up_req      (if_req[i]),
      .up_rsp_valid(if_rsp_valid[i]),
      .up_rsp_ready(if_rsp_ready[i]),
      .up_rsp      (if_rsp[i]),
      .dn_req_valid(x_req_valid[N_CU+i]),
      .dn_req_ready(x_req_ready[N_CU+i]),
      .dn_req      (x_req[N_CU+i]),
      .dn_rsp_valid(x_rsp_valid[N_CU+i]),
      .dn_rsp_ready(x_rsp_ready[N_CU+i]),
      .dn_rsp      (x_rsp[N_CU+i]),
      .sync_valid  (s_valid[N_CU+i]),
      .sync_op     (s_op),
      .sync_ready  (s_ready[N_CU+i]),
      .sync_done   (s_done[N_CU+i]),
      .stats       (l1_stats[N_CU+i])
    );
  end

  // ---------------------------------------------------------------- crossbar
  logic  l2_req_valid, l2_req_ready, l2_rsp_valid, l2_rsp_ready;
  creq_t l2_req;
  crsp_t l2_rsp;

  req_arbiter #(.N(N_L1)) u_xbar (
    .clk          (clk),
    .rst_n        (rst_n),
    .in_req_valid (x_req_valid),
    .in_req_ready (x_req_ready),
    .in_req       (x_req),
    .in_rsp_valid (x_rsp_valid),
    .in_rsp_ready (x_rsp_ready),
    .in_rsp       (x_rsp),
    .out_req_valid(l2_req_valid),
    .out_req_ready(l2_req_ready),
    .out_req      (l2_req),
    .out_rsp_valid(l2_rsp_valid),
    .out_rsp_ready(l2_rsp_ready),
    .out_rsp      (l2_rsp)
  );

  // ---------------------------------------------------------------- L2
  logic  [1:0] ic_req_valid, ic_req_ready, ic_rsp_valid, ic_rsp_ready;
  creq_t [1:0] ic_req;
  crsp_t [1:0] ic_rsp;

  gpu_l2_cache #(.SIZE_BYTES(L2_BYTES)) u_l2 (
    .clk         (clk),
    .rst_n       (rst_n),
    .up_req_valid(l2_req_valid),
    .up_req_ready(l2_req_ready),
    .up_req      (l2_req),
    .up_rsp_valid(l2_rsp_valid),
    .up_rsp_ready(l2_rsp_ready),
    .up_rsp      (l2_rsp),
    .dn_req_valid(ic_req_valid[0]),
    .dn_req_ready(ic_req_ready[0]),
    .dn_req      (ic_req[0]),
    .dn_rsp_valid(ic_rsp_valid[0]),
    .dn_rsp_ready(ic_rsp_ready[0]),
    .dn_rsp      (ic_rsp[0]),
    .sync_valid  (s_valid[N_L1]),
    .sync_op     (s_op),
    .sync_ready  (s_ready[N_L1]),
    .sync_done   (s_done[N_L1]),
    .stats       (l2_stats)
  );

  // ---------------------------------------------------------------- interconnect
  assign ic_req_valid[1] = cpu_req_valid;
  assign cpu_req_ready   = ic_req_ready[1];
  assign ic_req[1]       = cpu_req;
  assign cpu_rsp_valid   = ic_rsp_valid[1];
  assign ic_rsp_ready[1] = cpu_rsp_ready;
  assign cpu_rsp         = ic_rsp[1];

  mem_interconnect u_ic (
    .clk        (clk),
    .rst_n      (rst_n),
    .c_req_valid(ic_req_valid),
    .c_req_ready(ic_req_ready),
    .c_req      (ic_req),
    .c_rsp_valid(ic_rsp_valid),
    .c_rsp_ready(ic_rsp_ready),
    .c_rsp      (ic_rsp),
    .m_req_valid(mem_req_valid),
    .m_req_ready(mem_req_ready),
    .m_req      (mem_req),
    .m_rsp_valid(mem_rsp_valid),
    .m_rsp_ready(mem_rsp_ready),
    .m_rsp      (mem_rsp)
  );

  // ---------------------------------------------------------------- sync fan-out
  // SYNC_INV goes to every cache, SYNC_FLUSH only to the L2.
  always_comb begin
    s_want = '0;
    if (s_op == SYNC_INV) s_want = '1;
    else                  s_want[N_L1] = 1'b1;
  end

  assign sync_ready = !s_busy;
  assign s_valid    = s_busy ? (s_want & ~s_issued) : '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s_busy     <= 1'b0;
      s_op       <= SYNC_INV;
      s_issued   <= '0;
      s_finished <= '0;
      sync_done  <= 1'b0;
    end else begin
      sync_done <= 1'b0;
      if (!s_busy) begin
        if (sync_valid) begin
          s_busy     <= 1'b1;
          s_op       <= sync_op;
          s_issued   <= '0;
          s_finished <= '0;
        end
      end else begin
        s_issued   <= s_issued | (s_valid & s_ready);
        s_finished <= s_finished | s_done;
        if (((s_finished | s_done) & s_want) == s_want) begin
          s_busy    <= 1'b0;
          sync_done <= 1'b1;
        end
      end
    end
  end

endmodule
