// gpu_l1_icache: instruction cache shared by two compute units.
//
// 32 KB, 64-byte lines, 16 ways (32 sets) as in the paper's system table;
// the paper gives nothing else about it. Built as a read-only use of the
// same controller as the data caches: instruction fetches (loads) are
// cached and coalesced, misses go to the L2. Two CUs share one port; they
// tell their fetches apart by the id they attach. SYNC_INV drops all lines.
// Stores are not expected; if one arrives it is forwarded like an L1 store.
// The MSHR count is this design's choice.
module gpu_l1_icache
  import gpu_cache_pkg::*;
#(
  parameter int unsigned SIZE_BYTES    = 32768,
  parameter int unsigned WAYS          = 16,
  parameter int unsigned NUM_MSHR      = 8,
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
