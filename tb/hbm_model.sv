// hbm_model: behavioural model of the HBM main memory for simulation only
// (not synthesizable; not part of the design).
//
// Takes one request per cycle (ready is always high). Stores update a
// sparse line store at once; loads are answered, in order, LATENCY cycles
// after they are taken. A line never written reads as a fixed pattern of
// its address (init_line), so a testbench can predict every value. For row
// locality, lines are grouped into DRAM rows of ROW_LINES consecutive lines
// spread over BANKS banks (16 channels x 16 banks); each bank keeps one
// open row and every access counts as a row hit or a row miss. The last
// addresses written are kept in wlog for ordering checks.
module hbm_model
  import gpu_cache_pkg::*;
#(
  parameter int unsigned LATENCY   = 100,
  parameter int unsigned ROW_LINES = 32,
  parameter int unsigned BANKS     = 256
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  output logic  req_ready,
  input  creq_t req,
  output logic  rsp_valid,
  input  logic  rsp_ready,
  output crsp_t rsp
);

  typedef struct {
    longint unsigned due;
    crsp_t           r;
  } pend_t;

  line_t           mem [laddr_t];
  pend_t           pend [$];
  laddr_t          wlog [$];
  longint unsigned open_row [BANKS];
  logic            row_open [BANKS];
  longint unsigned cyc;
  int unsigned     reads, writes, row_hits, row_misses;

  function automatic line_t init_line(laddr_t a);
    line_t l;
    for (int w = 0; w < 16; w++) l[32*w +: 32] = {a, 4'(w)};
    return l;
  endfunction

  function automatic line_t peek(laddr_t a);
    return mem.exists(a) ? mem[a] : init_line(a);
  endfunction

  assign req_ready = 1'b1;

  always_comb begin
    rsp_valid = 1'b0;
    rsp       = '0;
    if (pend.size() != 0 && pend[0].due <= cyc) begin
      rsp_valid = 1'b1;
      rsp       = pend[0].r;
    end
  end

  always @(posedge clk) begin
    if (!rst_n) begin
      cyc = 0;
      pend.delete();
      for (int b = 0; b < BANKS; b++) row_open[b] = 1'b0;
    end else begin
      if (rsp_valid && rsp_ready) void'(pend.pop_front());
      if (req_valid) begin
        longint unsigned r;
        int unsigned     b;
        line_t           l;
        pend_t           p;
        r = longint'(req.addr) / 64'(ROW_LINES);
        b = int'(r % 64'(BANKS));
        if (row_open[b] && open_row[b] == r / 64'(BANKS)) row_hits++;
        else row_misses++;
        row_open[b] = 1'b1;
        open_row[b] = r / 64'(BANKS);
        if (req.op == OP_STORE) begin
          l = peek(req.addr);
          for (int i = 0; i < LINE_BYTES; i++)
            if (req.mask[i]) l[8*i +: 8] = req.data[8*i +: 8];
          mem[req.addr] = l;
          writes++;
          wlog.push_back(req.addr);
          if (wlog.size() > 64) void'(wlog.pop_front());
        end else begin
          p.due    = cyc + 64'(LATENCY);
          p.r.op   = OP_LOAD;
          p.r.id   = req.id;
          p.r.data = peek(req.addr);
          pend.push_back(p);
          reads++;
        end
      end
      cyc++;
    end
  end

  initial begin
    reads = 0; writes = 0; row_hits = 0; row_misses = 0; cyc = 0;
  end

endmodule
