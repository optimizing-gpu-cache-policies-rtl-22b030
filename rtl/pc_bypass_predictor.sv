// pc_bypass_predictor: PC-indexed reuse predictor that decides whether an L2
// miss should allocate a line or bypass the cache.
//
// The L2 applies this to loads and stores alike. A table of ENTRIES
// saturating counters is indexed by a hash (signature) of the requesting
// instruction's PC. Each allocated cache line remembers the signature of the
// instruction that brought it in and whether it has been hit since. A hit on
// a line not yet reused decrements that signature's counter ("this PC's
// data is reused"); evicting a line that was never reused increments it
// ("this PC's data is dead on arrival"). A miss is bypassed when the
// counter of its PC has reached THRESHOLD. So that a PC predicted dead can
// recover, one in SAMPLE_PERIOD would-be bypasses is allocated anyway.
//
// Interface: lookup is combinational (lookup_pc -> lookup_sig,
// predict_bypass). lookup_use is pulsed when the cache acts on a prediction
// (advances the sampling counter). Training inputs take effect at the next
// clock edge; both may be asserted in one cycle. Reset is synchronous.
//
// The idea (PC-based reuse prediction, from earlier work on adaptive GPU
// cache bypassing, applied here to the L2 for loads and stores) is the
// paper's; table size, counter width, threshold, the hash and the sampling
// are this design's choices, as the paper gives none of them.
module pc_bypass_predictor
  import gpu_cache_pkg::*;
#(
  parameter int unsigned ENTRIES       = 256,
  parameter int unsigned CNT_W         = 3,
  parameter int unsigned THRESHOLD     = 4,
  parameter int unsigned SAMPLE_PERIOD = 32,
  localparam int unsigned SIG_W        = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup
  input  pc_t              lookup_pc,
  output logic [SIG_W-1:0] lookup_sig,
  output logic             predict_bypass,
  input  logic             lookup_use,
  // training
  input  logic             train_reuse_valid,
  input  logic [SIG_W-1:0] train_reuse_sig,
  input  logic             train_dead_valid,
  input  logic [SIG_W-1:0] train_dead_sig
);

  localparam int unsigned SAMP_W = (SAMPLE_PERIOD > 1) ? $clog2(SAMPLE_PERIOD) : 1;
  localparam logic [CNT_W-1:0] CNT_MAX = '1;

  logic [CNT_W-1:0]  cnt [ENTRIES];
  logic [SAMP_W-1:0] sample_cnt;
  logic              predicted_dead;

  // Instructions are 4-byte aligned: fold two fields above bit 2.
  assign lookup_sig     = lookup_pc[2 +: SIG_W] ^ lookup_pc[2+SIG_W +: SIG_W];
  assign predicted_dead = (cnt[lookup_sig] >= CNT_W'(THRESHOLD));
  assign predict_bypass = predicted_dead && (sample_cnt != '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) cnt[i] <= '0;
      sample_cnt <= '0;
    end else begin
      if (lookup_use && predicted_dead)
        sample_cnt <= (sample_cnt == SAMP_W'(SAMPLE_PERIOD - 1)) ? '0 : sample_cnt + 1'b1;
      if (train_reuse_valid && train_dead_valid && train_reuse_sig == train_dead_sig) begin
        // opposite updates of one entry cancel
      end else begin
        if (train_reuse_valid && cnt[train_reuse_sig] != '0)
          cnt[train_reuse_sig] <= cnt[train_reuse_sig] - 1'b1;
        if (train_dead_valid && cnt[train_dead_sig] != CNT_MAX)
          cnt[train_dead_sig] <= cnt[train_dead_sig] + 1'b1;
      end
    end
  end

endmodule
