// gpu_cache_pkg: types and constants shared by the GPU cache hierarchy.
//
// All levels (L1 data, L1 instruction, L2, memory side) speak the same
// request/response format, so a cache's downstream port can be wired
// straight to the next level's upstream port. Addresses are line addresses
// (byte address >> 6). A request carries a whole 64-byte line plus a byte
// mask, the PC of the issuing instruction (used by the L2 bypass predictor)
// and a requester tag that the responder echoes. Loads are answered with
// the line; stores are posted (acknowledged by the cache that takes them).
//
// The 64-byte line and the 16 GB (2^34 byte) physical memory come from the
// paper's system table; tag, PC and ID widths are this design's choice.
package gpu_cache_pkg;

  localparam int unsigned PADDR_W    = 34;              // 16 GB HBM2
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_W     = LINE_BYTES * 8;  // 512
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);
  localparam int unsigned LADDR_W    = PADDR_W - OFF_W; // 28
  localparam int unsigned PC_W       = 48;              // GCN3 program counter
  localparam int unsigned ID_W       = 16;              // requester tag

  typedef logic [LADDR_W-1:0]    laddr_t;
  typedef logic [LINE_W-1:0]     line_t;
  typedef logic [LINE_BYTES-1:0] bmask_t;
  typedef logic [PC_W-1:0]       pc_t;
  typedef logic [ID_W-1:0]       id_t;

  typedef enum logic {
    OP_LOAD  = 1'b0,
    OP_STORE = 1'b1
  } mem_op_e;

  typedef struct packed {
    mem_op_e op;
    laddr_t  addr;
    pc_t     pc;
    bmask_t  mask;   // bytes written by a store; ignored for loads
    line_t   data;   // store data; ignored for loads
    id_t     id;
  } creq_t;

  typedef struct packed {
    mem_op_e op;     // OP_LOAD: data valid; OP_STORE: acknowledgement
    id_t     id;
    line_t   data;
  } crsp_t;

  // Synchronisation commands (kernel boundary / system-scope release).
  typedef enum logic {
    SYNC_INV   = 1'b0, // self-invalidate clean valid data
    SYNC_FLUSH = 1'b1  // write back all dirty data
  } sync_op_e;

  // State of one cache line.
  typedef enum logic [1:0] {
    LS_INV  = 2'd0,  // nothing valid
    LS_PART = 2'd1,  // only the dirty bytes (dmask) are valid
    LS_FULL = 2'd2,  // whole line valid, dmask bytes dirty
    LS_PEND = 2'd3   // fill outstanding; dmask bytes already valid and dirty
  } line_state_e;

  // Event counters exported by every cache.
  typedef struct packed {
    logic [31:0] requests;
    logic [31:0] hits;
    logic [31:0] misses;
    logic [31:0] coalesced;     // load merged into a pending miss
    logic [31:0] stall_cycles;  // cycles a ready request was blocked
    logic [31:0] alloc_bypass;  // would-block allocations turned into bypasses
    logic [31:0] pc_bypass;     // requests bypassed on the predictor's advice
    logic [31:0] evict_wb;      // dirty victims written back
    logic [31:0] rinse_wb;      // extra write-backs triggered by rinsing
    logic [31:0] flush_wb;      // write-backs done by a flush
  } cache_stats_t;

endpackage
