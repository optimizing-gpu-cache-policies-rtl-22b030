// gpu_l2_cache: the GPU's shared last-level cache, configured as the full
// optimised policy: loads cached, stores combined (CacheRW), allocation
// bypass, row-locality-aware rinsing and PC-based bypassing all enabled.
//
// 4 MB, 64-byte lines, 16 ways (4096 sets) as in the paper's system table.
// Reads are allocated and filled; stores are written into the line with a
// byte dirty mask and reach DRAM only on eviction, rinse or a SYNC_FLUSH
// (the system-scope release). SYNC_INV self-invalidates clean data at a
// kernel boundary. The controller itself is gpu_cache; its comment gives
// the interface and timing. Upstream ids are passed back unchanged; memory
// reads use the MSHR number as id. MSHR count, coalescing depth, the
// dirty-block-index size, the 2 KB DRAM row and the predictor table size
// are this design's choices, since the paper does not give them.
module gpu_l2_cache
  import gpu_cache_pkg::*;
#(
  parameter int unsigned SIZE_BYTES    = 4194304,
  parameter int unsigned WAYS          = 16,
  parameter int unsigned NUM_MSHR      = 32,
  parameter int unsigned NUM_TARGETS   = 8,
  parameter int unsigned DBI_ENTRIES   = 512,
  parameter int unsigned LINES_PER_ROW = 32,
  parameter int unsigned PRED_ENTRIES  = 256
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
    .STORE_CACHE  (1'b1),
    .ALLOC_BYPASS (1'b1),
    .RINSE        (1'b1),
    .PC_BYPASS    (1'b1),
    .DBI_ENTRIES  (DBI_ENTRIES),
    .LINES_PER_ROW(LINES_PER_ROW),
    .PRED_ENTRIES (PRED_ENTRIES)
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
