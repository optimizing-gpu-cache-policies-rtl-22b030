// gpu_cache: set-associative, non-blocking GPU cache controller used for the
// per-CU L1 data cache, the L1 instruction cache and the shared L2.
//
// What it does
//   Loads are cached: a hit is answered from the data array; a miss
//   allocates a way (state PEND), takes a miss-status register (MSHR) and
//   sends one line read downstream; later loads to the same line are
//   coalesced onto that MSHR (up to NUM_TARGETS) and all are answered when
//   the fill returns.
//   Stores depend on STORE_CACHE. With STORE_CACHE=0 (L1) a store updates a
//   present copy and is forwarded downstream (write-through, no allocate).
//   With STORE_CACHE=1 (L2, policy "CacheRW") a store is combined into the
//   cache: the written bytes are kept in the line with a per-byte dirty
//   mask, without fetching the rest of the line (state PART), until the line
//   is evicted, rinsed or flushed.
//   Allocation bypass (ALLOC_BYPASS=1): if every way of the target set is
//   PEND, a request that would have to wait for a way is instead sent
//   downstream uncached (a load still gets an MSHR so that later loads to
//   that line coalesce onto it, but the fill is not inserted).
//   Cache rinsing (RINSE=1): a dirty_block_index tracks dirty lines per
//   DRAM row; when a dirty line is evicted the other dirty lines of its row
//   are written back right after it.
//   PC-based bypassing (PC_BYPASS=1): a pc_bypass_predictor says, from the
//   PC of a missing load or store, whether the line will be reused; if not,
//   the miss is served uncached like an allocation bypass.
//   Synchronisation: SYNC_INV self-invalidates valid clean data (dirty
//   bytes are kept as PART lines); SYNC_FLUSH writes back every dirty line.
//   Both wait until no miss is outstanding, then walk all sets.
//
// How it works
//   One finite-state machine serves one thing at a time in this order of
//   priority: returning fills, pending rinses, a request held by a stall,
//   a synchronisation, a new request. A request whose resources are busy
//   (no free MSHR, target list full, all ways PEND without allocation
//   bypass, or a store to a PEND line in a write-through cache) is held and
//   retried; every cycle it is held counts as a stall cycle. Fills are
//   buffered in a NUM_MSHR-deep queue so the downstream side never waits on
//   this cache (one entry per possible outstanding read). Tag and data
//   arrays are read combinationally and written at the clock edge. After
//   reset the controller spends SETS cycles clearing the tag array before it
//   accepts requests. Victims: an invalid way if there is one, otherwise the
//   first non-PEND way at or after a per-set round-robin pointer.
//
// Interface (valid/ready handshakes, all synchronous to clk, synchronous
// active-low reset):
//   up_req/up_rsp   requests from the level above, responses (load data,
//                   store acknowledgements) back to it, tagged by id
//   dn_req/dn_rsp   line reads/writes to the level below; read responses
//                   carry the MSHR number in id; store responses are dropped
//   sync_*          sync_valid/sync_ready accept a command, sync_done pulses
//                   when it has completed
//   stats           event counters
// Timing: a load hit is answered two cycles after it is accepted; a miss is
// sent downstream two cycles after acceptance (three with a dirty victim).
//
// The policies, the three optimisations and the sizes in the wrappers
// follow the paper; state encoding, MSHR organisation, replacement, the
// handling of partial lines and all timing are this design's own choices.
module gpu_cache
  import gpu_cache_pkg::*;
#(
  parameter int unsigned SIZE_BYTES    = 16384,
  parameter int unsigned WAYS          = 16,
  parameter int unsigned NUM_MSHR      = 16,
  parameter int unsigned NUM_TARGETS   = 8,
  parameter bit          STORE_CACHE   = 1'b0,
  parameter bit          ALLOC_BYPASS  = 1'b1,
  parameter bit          RINSE         = 1'b0,
  parameter bit          PC_BYPASS     = 1'b0,
  parameter int unsigned DBI_ENTRIES   = 512,
  parameter int unsigned LINES_PER_ROW = 32,
  parameter int unsigned PRED_ENTRIES  = 256
) (
  input  logic         clk,
  input  logic         rst_n,
  // upstream
  input  logic         up_req_valid,
  output logic         up_req_ready,
  input  creq_t        up_req,
  output logic         up_rsp_valid,
  input  logic         up_rsp_ready,
  output crsp_t        up_rsp,
  // downstream
  output logic         dn_req_valid,
  input  logic         dn_req_ready,
  output creq_t        dn_req,
  input  logic         dn_rsp_valid,
  output logic         dn_rsp_ready,
  input  crsp_t        dn_rsp,
  // synchronisation
  input  logic         sync_valid,
  input  sync_op_e     sync_op,
  output logic         sync_ready,
  output logic         sync_done,
  // counters
  output cache_stats_t stats
);

  localparam int unsigned LINES  = SIZE_BYTES / LINE_BYTES;
  localparam int unsigned SETS   = LINES / WAYS;
  localparam int unsigned SET_W  = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W  = LADDR_W - SET_W;
  localparam int unsigned IDX_W  = SET_W + WAY_W;
  localparam int unsigned M_W    = (NUM_MSHR > 1) ? $clog2(NUM_MSHR) : 1;
  localparam int unsigned T_W    = $clog2(NUM_TARGETS + 1);
  localparam int unsigned SIG_W  = $clog2(PRED_ENTRIES);
  localparam int unsigned LROW_W = $clog2(LINES_PER_ROW);
  localparam int unsigned ROW_W  = LADDR_W - LROW_W;
  localparam int unsigned RQ_D   = 4;  // rinse queue depth

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    line_state_e      st;
    bmask_t           dmask;
    logic [SIG_W-1:0] sig;     // predictor signature of the allocating PC
    logic             reused;  // hit since allocation
  } way_meta_t;

  typedef enum logic [4:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_RDHIT, S_EVICT_WB, S_ALLOC, S_MEMRD,
    S_FWD, S_ACK, S_FILL, S_FILL_RSP, S_RINSE_LK, S_RINSE_WB,
    S_SYNC_INV, S_FLUSH_LK, S_FLUSH_WB, S_SYNC_DONE
  } state_e;

  // ---------------------------------------------------------------- storage
  way_meta_t        meta_mem [SETS][WAYS];
  logic [WAY_W-1:0] rr_mem   [SETS];
  line_t            data_mem [SETS*WAYS];

  logic [NUM_MSHR-1:0] mshr_v;
  laddr_t              mshr_addr  [NUM_MSHR];
  logic                mshr_alloc [NUM_MSHR];
  logic [WAY_W-1:0]    mshr_way   [NUM_MSHR];
  logic [T_W-1:0]      mshr_ntgt  [NUM_MSHR];
  id_t                 mshr_tgt   [NUM_MSHR][NUM_TARGETS];

  // fill queue
  crsp_t            fq      [NUM_MSHR];
  logic [M_W-1:0]   fq_wp, fq_rp;
  logic [M_W:0]     fq_cnt;

  // rinse queue
  logic [ROW_W-1:0]         rq_row [RQ_D];
  logic [LINES_PER_ROW-1:0] rq_vec [RQ_D];
  logic [1:0]               rq_wp, rq_rp;
  logic [2:0]               rq_cnt;

  // ---------------------------------------------------------------- state
  state_e            state;
  creq_t             req_q;
  logic              req_held;      // request accepted, not yet served
  logic              req_stalled;   // held request found its resources busy
  logic [WAY_W-1:0]  way_q;         // way chosen for hit / victim
  logic [M_W-1:0]    mshr_q;        // MSHR in use
  logic [SET_W-1:0]  walk_set;      // init / sync walk
  logic              sync_busy;
  sync_op_e          sync_op_q;
  logic [ROW_W-1:0]         rn_row;
  logic [LINES_PER_ROW-1:0] rn_vec;
  line_t             fill_line_q;
  crsp_t             fill_q;
  logic [T_W-1:0]    tgt_k;
  logic [WAY_W-1:0]  flush_way;
  cache_stats_t      st_q;

  // ---------------------------------------------------------------- lookup
  laddr_t             look_addr;
  logic [SET_W-1:0]   look_set;
  logic [TAG_W-1:0]   look_tag;
  way_meta_t          cur [WAYS];
  logic               hit;
  logic [WAY_W-1:0]   hit_way;
  line_state_e        hit_st;
  logic               victim_ok;
  logic [WAY_W-1:0]   victim_way;
  logic               mshr_match;
  logic [M_W-1:0]     mshr_match_idx;
  logic               mshr_free;
  logic [M_W-1:0]     mshr_free_idx;
  logic [SIG_W-1:0]   pred_sig;
  logic               pred_bypass;
  logic [LROW_W-1:0]  rn_bit;
  logic               rn_any;
  logic               flush_any;
  logic [WAY_W-1:0]   flush_first;

  always_comb begin
    unique case (state)
      S_RINSE_LK, S_RINSE_WB: look_addr = {rn_row, rn_bit};
      default:                look_addr = req_q.addr;
    endcase
  end
  assign look_set = (state inside {S_SYNC_INV, S_FLUSH_LK, S_FLUSH_WB})
                    ? walk_set : look_addr[SET_W-1:0];
  assign look_tag = look_addr[LADDR_W-1:SET_W];

  always_comb begin
    for (int w = 0; w < WAYS; w++) cur[w] = meta_mem[look_set][w];
  end

  always_comb begin
    hit     = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!hit && cur[w].st != LS_INV && cur[w].tag == look_tag) begin
        hit     = 1'b1;
        hit_way = WAY_W'(w);
      end
    end
    hit_st = cur[hit_way].st;
  end

  // victim: an invalid way, else the first non-PEND way from the pointer
  always_comb begin
    logic [WAY_W-1:0] w;
    victim_ok  = 1'b0;
    victim_way = '0;
    for (int k = 0; k < WAYS; k++) begin
      if (!victim_ok && cur[k].st == LS_INV) begin
        victim_ok  = 1'b1;
        victim_way = WAY_W'(k);
      end
    end
    for (int k = 0; k < WAYS; k++) begin
      w = WAY_W'((32'(rr_mem[look_set]) + 32'(k)) % WAYS);
      if (!victim_ok && cur[w].st != LS_PEND) begin
        victim_ok  = 1'b1;
        victim_way = w;
      end
    end
  end

  always_comb begin
    mshr_match     = 1'b0;
    mshr_match_idx = '0;
    mshr_free      = 1'b0;
    mshr_free_idx  = '0;
    for (int m = 0; m < NUM_MSHR; m++) begin
      if (!mshr_match && mshr_v[m] && mshr_addr[m] == req_q.addr) begin
        mshr_match     = 1'b1;
        mshr_match_idx = M_W'(m);
      end
      if (!mshr_free && !mshr_v[m]) begin
        mshr_free     = 1'b1;
        mshr_free_idx = M_W'(m);
      end
    end
  end

  always_comb begin
    rn_any = 1'b0;
    rn_bit = '0;
    for (int b = 0; b < LINES_PER_ROW; b++) begin
      if (!rn_any && rn_vec[b]) begin
        rn_any = 1'b1;
        rn_bit = LROW_W'(b);
      end
    end
  end

  always_comb begin
    flush_any   = 1'b0;
    flush_first = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!flush_any && cur[w].dmask != '0 && cur[w].st != LS_INV) begin
        flush_any   = 1'b1;
        flush_first = WAY_W'(w);
      end
    end
  end

  // ------------------------------------------------------ optimisation units
  logic             dbi_op_valid;
  logic [1:0]       dbi_op;
  laddr_t           dbi_addr;
  logic             dbi_clear;
  logic             dbi_rinse_valid;
  logic [ROW_W-1:0] dbi_rinse_row;
  logic [LINES_PER_ROW-1:0] dbi_rinse_vec;

  logic             pr_use;
  logic             pr_reuse_v, pr_dead_v;
  logic [SIG_W-1:0] pr_reuse_sig, pr_dead_sig;

  if (RINSE) begin : g_dbi
    dirty_block_index #(
      .ENTRIES      (DBI_ENTRIES),
      .LINES_PER_ROW(LINES_PER_ROW)
    ) u_dbi (
      .clk        (clk),
      .rst_n      (rst_n),
      .op_valid   (dbi_op_valid),
      .op         (dbi_op),
      .op_addr    (dbi_addr),
      .clear_all  (dbi_clear),
      .rinse_valid(dbi_rinse_valid),
      .rinse_row  (dbi_rinse_row),
      .rinse_vec  (dbi_rinse_vec)
    );
  end else begin : g_no_dbi
    assign dbi_rinse_valid = 1'b0;
    assign dbi_rinse_row   = '0;
    assign dbi_rinse_vec   = '0;
  end

  if (PC_BYPASS) begin : g_pred
    pc_bypass_predictor #(
      .ENTRIES(PRED_ENTRIES)
    ) u_pred (
      .clk              (clk),
      .rst_n            (rst_n),
      .lookup_pc        (req_q.pc),
      .lookup_sig       (pred_sig),
      .predict_bypass   (pred_bypass),
      .lookup_use       (pr_use),
      .train_reuse_valid(pr_reuse_v),
      .train_reuse_sig  (pr_reuse_sig),
      .train_dead_valid (pr_dead_v),
      .train_dead_sig   (pr_dead_sig)
    );
  end else begin : g_no_pred
    assign pred_sig    = '0;
    assign pred_bypass = 1'b0;
  end

  // ------------------------------------------------------------ decisions
  // Outcome of S_LOOKUP for the held request.
  typedef enum logic [3:0] {
    D_STALL, D_HIT, D_COALESCE, D_REFILL, D_ALLOC, D_BYPASS,
    D_ST_HIT, D_ST_FWD
  } dec_e;
  dec_e dec;
  logic dec_pc_bypass, dec_alloc_bypass, dec_use_pred;

  always_comb begin
    logic want_cache;
    dec              = D_STALL;
    dec_pc_bypass    = 1'b0;
    dec_alloc_bypass = 1'b0;
    dec_use_pred     = 1'b0;
    want_cache       = !(PC_BYPASS && pred_bypass);
    if (req_q.op == OP_LOAD) begin
      if (hit && hit_st == LS_FULL) begin
        dec = D_HIT;
      end else if (hit && hit_st == LS_PEND) begin
        dec = (mshr_match && mshr_ntgt[mshr_match_idx] < T_W'(NUM_TARGETS)) ? D_COALESCE : D_STALL;
      end else if (hit) begin // PART: fetch the rest of the line
        dec = (!mshr_match && mshr_free) ? D_REFILL : D_STALL;
      end else if (mshr_match) begin // uncached read of this line pending
        dec = (mshr_ntgt[mshr_match_idx] < T_W'(NUM_TARGETS)) ? D_COALESCE : D_STALL;
      end else if (!mshr_free) begin
        dec = D_STALL;
      end else begin
        dec_use_pred = PC_BYPASS;
        if (!want_cache) begin
          dec = D_BYPASS; dec_pc_bypass = 1'b1;
        end else if (victim_ok) begin
          dec = D_ALLOC;
        end else if (ALLOC_BYPASS) begin
          dec = D_BYPASS; dec_alloc_bypass = 1'b1;
        end
      end
    end else if (!STORE_CACHE) begin
      // write-through: update a present copy, forward downstream
      if (hit && hit_st == LS_PEND) dec = D_STALL;
      else                          dec = D_ST_FWD;
    end else begin
      if (hit) begin
        dec = D_ST_HIT;
      end else begin
        dec_use_pred = PC_BYPASS;
        if (!want_cache) begin
          dec = D_ST_FWD; dec_pc_bypass = 1'b1;
        end else if (victim_ok) begin
          dec = D_ALLOC;
        end else if (ALLOC_BYPASS) begin
          dec = D_ST_FWD; dec_alloc_bypass = 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------------ handshakes
  logic take_fill, take_rinse, take_held, take_sync, take_req;
  always_comb begin
    take_fill  = (state == S_IDLE) && (fq_cnt != '0);
    take_rinse = (state == S_IDLE) && !take_fill && (rq_cnt != '0);
    take_held  = (state == S_IDLE) && !take_fill && !take_rinse && req_held;
    take_sync  = (state == S_IDLE) && !take_fill && !take_rinse && !req_held &&
                 sync_busy && (mshr_v == '0);
    take_req   = (state == S_IDLE) && !take_fill && !take_rinse && !req_held &&
                 !sync_busy && up_req_valid;
  end
  assign up_req_ready = (state == S_IDLE) && !(fq_cnt != '0) && !(rq_cnt != '0) &&
                        !req_held && !sync_busy;
  assign sync_ready   = !sync_busy && (state != S_INIT);
  assign dn_rsp_ready = (dn_rsp.op == OP_STORE) || (fq_cnt != (M_W+1)'(NUM_MSHR));

  // line indices
  logic [IDX_W-1:0] line_idx, victim_idx, flush_idx, fill_idx;
  laddr_t           victim_addr, flush_addr;
  assign line_idx    = {look_set, way_q};
  assign victim_idx  = {look_set, way_q};
  assign victim_addr = {cur[way_q].tag, look_set};
  assign flush_idx   = {walk_set, flush_way};
  assign flush_addr  = {cur[flush_way].tag, walk_set};
  assign fill_idx    = {mshr_addr[fill_q.id[M_W-1:0]][SET_W-1:0], mshr_way[fill_q.id[M_W-1:0]]};

  // ------------------------------------------------------------ outputs
  always_comb begin
    up_rsp_valid = 1'b0;
    up_rsp       = '0;
    dn_req_valid = 1'b0;
    dn_req       = '0;
    unique case (state)
      S_RDHIT: begin
        up_rsp_valid = 1'b1;
        up_rsp.op    = OP_LOAD;
        up_rsp.id    = req_q.id;
        up_rsp.data  = data_mem[line_idx];
      end
      S_ACK: begin
        up_rsp_valid = 1'b1;
        up_rsp.op    = OP_STORE;
        up_rsp.id    = req_q.id;
      end
      S_FILL_RSP: begin
        up_rsp_valid = 1'b1;
        up_rsp.op    = OP_LOAD;
        up_rsp.id    = mshr_tgt[mshr_q][tgt_k[$clog2(NUM_TARGETS)-1:0]];
        up_rsp.data  = fill_line_q;
      end
      S_EVICT_WB: begin
        dn_req_valid = 1'b1;
        dn_req.op    = OP_STORE;
        dn_req.addr  = victim_addr;
        dn_req.pc    = req_q.pc;
        dn_req.mask  = cur[way_q].dmask;
        dn_req.data  = data_mem[victim_idx];
      end
      S_MEMRD: begin
        dn_req_valid = 1'b1;
        dn_req.op    = OP_LOAD;
        dn_req.addr  = req_q.addr;
        dn_req.pc    = req_q.pc;
        dn_req.id    = id_t'(mshr_q);
      end
      S_FWD: begin
        dn_req_valid = 1'b1;
        dn_req       = req_q;
        dn_req.id    = '0;
      end
      S_RINSE_WB: begin
        dn_req_valid = 1'b1;
        dn_req.op    = OP_STORE;
        dn_req.addr  = look_addr;
        dn_req.mask  = cur[way_q].dmask;
        dn_req.data  = data_mem[line_idx];
      end
      S_FLUSH_WB: begin
        dn_req_valid = 1'b1;
        dn_req.op    = OP_STORE;
        dn_req.addr  = flush_addr;
        dn_req.mask  = cur[flush_way].dmask;
        dn_req.data  = data_mem[flush_idx];
      end
      default: ;
    endcase
  end

  // DBI and predictor side-band (combinational from state)
  always_comb begin
    dbi_op_valid = 1'b0;
    dbi_op       = 2'd0;
    dbi_addr     = req_q.addr;
    dbi_clear    = 1'b0;
    pr_use       = 1'b0;
    pr_reuse_v   = 1'b0;
    pr_reuse_sig = cur[hit_way].sig;
    pr_dead_v    = 1'b0;
    pr_dead_sig  = cur[way_q].sig;
    unique case (state)
      S_LOOKUP: begin
        pr_use = dec_use_pred;
        if ((dec == D_HIT || dec == D_COALESCE || dec == D_ST_HIT) && hit && !cur[hit_way].reused)
          pr_reuse_v = 1'b1;
        if (dec == D_ST_HIT && cur[hit_way].dmask == '0) begin
          dbi_op_valid = 1'b1; dbi_op = 2'd0; // SET
        end
      end
      S_EVICT_WB: if (dn_req_ready) begin
        dbi_op_valid = 1'b1; dbi_op = 2'd1;   // EVICT
        dbi_addr     = victim_addr;
      end
      S_ALLOC: begin
        if (cur[way_q].st != LS_INV && !cur[way_q].reused) pr_dead_v = 1'b1;
        if (req_q.op == OP_STORE) begin
          dbi_op_valid = 1'b1; dbi_op = 2'd0; // SET
        end
      end
      S_FLUSH_LK: if (!flush_any && walk_set == SET_W'(SETS - 1)) dbi_clear = 1'b1;
      default: ;
    endcase
  end

  assign stats     = st_q;
  assign sync_done = (state == S_SYNC_DONE);

  // ------------------------------------------------------------ main FSM
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_INIT;
      walk_set  <= '0;
      req_held  <= 1'b0;
      req_stalled <= 1'b0;
      sync_busy <= 1'b0;
      sync_op_q <= SYNC_INV;
      mshr_v    <= '0;
      fq_wp     <= '0;
      fq_rp     <= '0;
      fq_cnt    <= '0;
      rq_wp     <= '0;
      rq_rp     <= '0;
      rq_cnt    <= '0;
      rn_row    <= '0;
      rn_vec    <= '0;
      st_q      <= '0;
      req_q     <= '0;
      way_q     <= '0;
      mshr_q    <= '0;
      tgt_k     <= '0;
      flush_way <= '0;
      fill_q    <= '0;
      fill_line_q <= '0;
    end else begin
      // ---- fill queue push (independent of the FSM)
      logic fq_pop, rq_pop;
      fq_pop = 1'b0;
      rq_pop = 1'b0;
      if (dn_rsp_valid && dn_rsp_ready && dn_rsp.op == OP_LOAD) begin
        fq[fq_wp] <= dn_rsp;
        fq_wp     <= (fq_wp == M_W'(NUM_MSHR - 1)) ? '0 : fq_wp + 1'b1;
      end
      // ---- rinse queue push
      if (dbi_rinse_valid) begin
        rq_row[rq_wp] <= dbi_rinse_row;
        rq_vec[rq_wp] <= dbi_rinse_vec;
        rq_wp         <= rq_wp + 1'b1;
      end
      // ---- synchronisation command
      if (sync_valid && sync_ready) begin
        sync_busy <= 1'b1;
        sync_op_q <= sync_op;
      end
      if (req_stalled || (state == S_LOOKUP && dec == D_STALL))
        st_q.stall_cycles <= st_q.stall_cycles + 1;

      unique case (state)
        S_INIT: begin
          for (int w = 0; w < WAYS; w++) begin
            meta_mem[walk_set][w].st     <= LS_INV;
            meta_mem[walk_set][w].dmask  <= '0;
            meta_mem[walk_set][w].tag    <= '0;
            meta_mem[walk_set][w].sig    <= '0;
            meta_mem[walk_set][w].reused <= 1'b0;
          end
          rr_mem[walk_set] <= '0;
          walk_set <= walk_set + 1'b1;
          if (walk_set == SET_W'(SETS - 1)) state <= S_IDLE;
        end

        S_IDLE: begin
          if (take_fill) begin
            fill_q <= fq[fq_rp];
            mshr_q <= fq[fq_rp].id[M_W-1:0];
            fq_rp  <= (fq_rp == M_W'(NUM_MSHR - 1)) ? '0 : fq_rp + 1'b1;
            fq_pop = 1'b1;
            state  <= S_FILL;
          end else if (take_rinse) begin
            rn_row <= rq_row[rq_rp];
            rn_vec <= rq_vec[rq_rp];
            rq_rp  <= rq_rp + 1'b1;
            rq_pop = 1'b1;
            state  <= S_RINSE_LK;
          end else if (take_held) begin
            state <= S_LOOKUP;
          end else if (take_sync) begin
            walk_set <= '0;
            state    <= (sync_op_q == SYNC_FLUSH) ? S_FLUSH_LK : S_SYNC_INV;
          end else if (take_req) begin
            req_q    <= up_req;
            req_held <= 1'b1;
            st_q.requests <= st_q.requests + 1;
            state    <= S_LOOKUP;
          end
        end

        S_LOOKUP: begin
          req_stalled <= (dec == D_STALL);
          if (dec_pc_bypass)    st_q.pc_bypass    <= st_q.pc_bypass + 1;
          if (dec_alloc_bypass) st_q.alloc_bypass <= st_q.alloc_bypass + 1;
          if ((dec == D_HIT || dec == D_COALESCE || dec == D_ST_HIT) && hit && !cur[hit_way].reused)
            meta_mem[look_set][hit_way].reused <= 1'b1;
          unique case (dec)
            D_STALL: begin
              state <= S_IDLE;          // retry later; req_held stays set
            end
            D_HIT: begin
              req_held <= 1'b0;
              way_q    <= hit_way;
              st_q.hits <= st_q.hits + 1;
              state    <= S_RDHIT;
            end
            D_COALESCE: begin
              req_held <= 1'b0;
              mshr_tgt[mshr_match_idx][mshr_ntgt[mshr_match_idx][$clog2(NUM_TARGETS)-1:0]] <= req_q.id;
              mshr_ntgt[mshr_match_idx] <= mshr_ntgt[mshr_match_idx] + 1'b1;
              st_q.coalesced <= st_q.coalesced + 1;
              state    <= S_IDLE;
            end
            D_REFILL: begin
              req_held <= 1'b0;
              meta_mem[look_set][hit_way].st <= LS_PEND;
              mshr_v[mshr_free_idx]     <= 1'b1;
              mshr_addr[mshr_free_idx]  <= req_q.addr;
              mshr_alloc[mshr_free_idx] <= 1'b1;
              mshr_way[mshr_free_idx]   <= hit_way;
              mshr_ntgt[mshr_free_idx]  <= T_W'(1);
              mshr_tgt[mshr_free_idx][0] <= req_q.id;
              mshr_q   <= mshr_free_idx;
              st_q.misses <= st_q.misses + 1;
              state    <= S_MEMRD;
            end
            D_ALLOC: begin
              req_held <= 1'b0;
              way_q    <= victim_way;
              st_q.misses <= st_q.misses + 1;
              rr_mem[look_set] <= WAY_W'((32'(victim_way) + 1) % WAYS);
              if (req_q.op == OP_LOAD) mshr_q <= mshr_free_idx;
              state <= (cur[victim_way].st != LS_INV && cur[victim_way].dmask != '0)
                       ? S_EVICT_WB : S_ALLOC;
            end
            D_BYPASS: begin // uncached load with an MSHR for coalescing
              req_held <= 1'b0;
              mshr_v[mshr_free_idx]     <= 1'b1;
              mshr_addr[mshr_free_idx]  <= req_q.addr;
              mshr_alloc[mshr_free_idx] <= 1'b0;
              mshr_way[mshr_free_idx]   <= '0;
              mshr_ntgt[mshr_free_idx]  <= T_W'(1);
              mshr_tgt[mshr_free_idx][0] <= req_q.id;
              mshr_q   <= mshr_free_idx;
              st_q.misses <= st_q.misses + 1;
              state    <= S_MEMRD;
            end
            D_ST_HIT: begin
              req_held <= 1'b0;
              st_q.hits <= st_q.hits + 1;
              for (int b = 0; b < LINE_BYTES; b++)
                if (req_q.mask[b]) data_mem[{look_set, hit_way}][8*b +: 8] <= req_q.data[8*b +: 8];
              meta_mem[look_set][hit_way].dmask <= cur[hit_way].dmask | req_q.mask;
              if (hit_st == LS_PART && (cur[hit_way].dmask | req_q.mask) == '1)
                meta_mem[look_set][hit_way].st <= LS_FULL;
              state <= S_ACK;
            end
            D_ST_FWD: begin
              req_held <= 1'b0;
              if (hit && hit_st == LS_FULL) begin
                st_q.hits <= st_q.hits + 1;
                for (int b = 0; b < LINE_BYTES; b++)
                  if (req_q.mask[b]) data_mem[{look_set, hit_way}][8*b +: 8] <= req_q.data[8*b +: 8];
              end else begin
                st_q.misses <= st_q.misses + 1;
              end
              state <= S_FWD;
            end
            default: state <= S_IDLE;
          endcase
        end

        S_RDHIT: if (up_rsp_ready) state <= S_IDLE;

        S_EVICT_WB: if (dn_req_ready) begin
          st_q.evict_wb <= st_q.evict_wb + 1;
          state <= S_ALLOC;
        end

        S_ALLOC: begin
          meta_mem[look_set][way_q].tag    <= look_tag;
          meta_mem[look_set][way_q].sig    <= pred_sig;
          meta_mem[look_set][way_q].reused <= 1'b0;
          if (req_q.op == OP_LOAD) begin
            meta_mem[look_set][way_q].st    <= LS_PEND;
            meta_mem[look_set][way_q].dmask <= '0;
            mshr_v[mshr_q]     <= 1'b1;
            mshr_addr[mshr_q]  <= req_q.addr;
            mshr_alloc[mshr_q] <= 1'b1;
            mshr_way[mshr_q]   <= way_q;
            mshr_ntgt[mshr_q]  <= T_W'(1);
            mshr_tgt[mshr_q][0] <= req_q.id;
            state <= S_MEMRD;
          end else begin
            meta_mem[look_set][way_q].st    <= (req_q.mask == '1) ? LS_FULL : LS_PART;
            meta_mem[look_set][way_q].dmask <= req_q.mask;
            for (int b = 0; b < LINE_BYTES; b++)
              data_mem[line_idx][8*b +: 8] <= req_q.mask[b] ? req_q.data[8*b +: 8] : 8'h00;
            state <= S_ACK;
          end
        end

        S_MEMRD: if (dn_req_ready) state <= S_IDLE;

        S_FWD: if (dn_req_ready) state <= S_ACK;

        S_ACK: if (up_rsp_ready) state <= S_IDLE;

        S_FILL: begin
          if (mshr_alloc[mshr_q]) begin
            line_t merged;
            bmask_t dm;
            dm = meta_mem[mshr_addr[mshr_q][SET_W-1:0]][mshr_way[mshr_q]].dmask;
            for (int b = 0; b < LINE_BYTES; b++)
              merged[8*b +: 8] = dm[b] ? data_mem[fill_idx][8*b +: 8] : fill_q.data[8*b +: 8];
            data_mem[fill_idx] <= merged;
            fill_line_q        <= merged;
            meta_mem[mshr_addr[mshr_q][SET_W-1:0]][mshr_way[mshr_q]].st <= LS_FULL;
          end else begin
            fill_line_q <= fill_q.data;
          end
          tgt_k <= '0;
          state <= S_FILL_RSP;
        end

        S_FILL_RSP: if (up_rsp_ready) begin
          if (tgt_k + 1'b1 == mshr_ntgt[mshr_q]) begin
            mshr_v[mshr_q] <= 1'b0;
            state <= S_IDLE;
          end
          tgt_k <= tgt_k + 1'b1;
        end

        S_RINSE_LK: begin
          if (!rn_any) begin
            state <= S_IDLE;
          end else if (hit && cur[hit_way].dmask != '0 && hit_st != LS_PEND) begin
            way_q <= hit_way;
            state <= S_RINSE_WB;
          end else begin
            rn_vec[rn_bit] <= 1'b0;
          end
        end

        S_RINSE_WB: if (dn_req_ready) begin
          meta_mem[look_set][way_q].dmask <= '0;
          if (cur[way_q].st == LS_PART) meta_mem[look_set][way_q].st <= LS_INV;
          rn_vec[rn_bit] <= 1'b0;
          st_q.rinse_wb  <= st_q.rinse_wb + 1;
          state <= S_RINSE_LK;
        end

        S_SYNC_INV: begin
          for (int w = 0; w < WAYS; w++) begin
            if (cur[w].st == LS_FULL)
              meta_mem[walk_set][w].st <= (cur[w].dmask == '0) ? LS_INV : LS_PART;
          end
          walk_set <= walk_set + 1'b1;
          if (walk_set == SET_W'(SETS - 1)) state <= S_SYNC_DONE;
        end

        S_FLUSH_LK: begin
          if (flush_any) begin
            flush_way <= flush_first;
            state     <= S_FLUSH_WB;
          end else begin
            walk_set <= walk_set + 1'b1;
            if (walk_set == SET_W'(SETS - 1)) state <= S_SYNC_DONE;
          end
        end

        S_FLUSH_WB: if (dn_req_ready) begin
          meta_mem[walk_set][flush_way].dmask <= '0;
          if (cur[flush_way].st == LS_PART) meta_mem[walk_set][flush_way].st <= LS_INV;
          st_q.flush_wb <= st_q.flush_wb + 1;
          state <= S_FLUSH_LK;
        end

        S_SYNC_DONE: begin
          sync_busy <= 1'b0;
          state     <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase

      // ---- queue occupancy
      if ((dn_rsp_valid && dn_rsp_ready && dn_rsp.op == OP_LOAD) && !fq_pop) fq_cnt <= fq_cnt + 1'b1;
      else if (!(dn_rsp_valid && dn_rsp_ready && dn_rsp.op == OP_LOAD) && fq_pop) fq_cnt <= fq_cnt - 1'b1;
      if (dbi_rinse_valid && !rq_pop) rq_cnt <= rq_cnt + 1'b1;
      else if (!dbi_rinse_valid && rq_pop) rq_cnt <= rq_cnt - 1'b1;
    end
  end

  // ------------------------------------------------------------ assertions
  // A fill must belong to a live MSHR.
  assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_FILL) |-> mshr_v[mshr_q]);
  // The downstream request is held stable until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
    (dn_req_valid && !dn_req_ready) |=> dn_req_valid);
  // The rinse queue never overflows.
  assert property (@(posedge clk) disable iff (!rst_n) rq_cnt <= 3'(RQ_D));

endmodule
