// gpu_l1_dcache: per-compute-unit L1 data cache.
//
// 16 KB, 64-byte lines, 16 ways (16 sets) as in the paper's system table.
// Loads are cached, with misses to the same line coalesced; stores bypass
// the L1 (write-through, no allocate): a present copy is updated and the
// store is forwarded to the L2, and the CU gets its acknowledgement once
// the L2 port has taken the store. A load that would have to wait for a way
// because all ways of its set are pending is sent to the L2 uncached
// (allocation bypass). SYNC_INV self-invalidates all valid data at a kernel
// boundary. The controller is gpu_cache (interface and timing are described
// there). The MSHR count (32, more than the 16 ways so that allocation
// bypass can act) and coalescing depth are this design's choices.
module gpu_l1_dcache
  import gpu_cache_pkg::*;
#(
  parameter int unsigned SIZE_BYTES    = 16384,
  parameter int unsigned WAYS          = 16,
  parameter int unsigned NUM_MSHR      = 32,
  parameter int unsigned NUM_TARGETS   = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         up_req_valid,
  output logic         up_req_ready,
  input  creq_t        up_req,
  output logic         up_rsp_valid,
  input  logic         up_rsp_ready,
  output crsp_t        up_rsp,
  output logic         dn_req_valid,
  input  logic         dn_req_ready,
  output creq_t        dn_req,
  input  logic         dn_rsp_valid,
  output logic         dn_rsp_ready,
  input  crsp_t        dn_rsp,
  input  logic         sync_valid,
  input  sync_op_e     sync_op,
  output logic         sync_ready,
  output logic         sync_done,
  output cache_stats_t stats
);

  gpu_cache #(
    .SIZE_BYTES   (SIZE_BYTES),
    .WAYS         (WAYS),
    .NUM_MSHR     (NUM_MSHR),
    .NUM_TARGETS  (NUM_TARGETS),
    .STORE_CACHE  (1'b0),
    .ALLOC_BYPASS (1'b1),
    .RINSE        (1'b0),
    .PC_BYPASS    (1'b0)
  ) u_cache (
    .clk         (clk),
    .rst_n       (rst_n),
    .up_req_valid(up_req_valid),
    .up_req_ready(up_req_ready),
    .up_req      (up_req),
    .up_rsp_valid(up_rsp_valid),
    .up_rsp_ready(up_rsp_ready),
    .up_rsp      (up_rsp),
    .dn_req_valid(dn_req_valid),
    .dn_req_ready(dn_req_ready),
    .dn_req      (dn_req),
    .dn_rsp_valid(dn_rsp_valid),
    .dn_rsp_ready(dn_rsp_ready),
    .dn_rsp      (dn_rsp),
    .sync_valid  (sync_valid),
    .sync_op     (sync_op),
    .sync_ready  (sync_ready),
    .sync_done   (sync_done),
    .stats       (stats)
  );

endmodule
