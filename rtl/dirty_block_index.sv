// dirty_block_index: per-DRAM-row record of which L2 blocks are dirty,
// used to trigger row-locality-aware cache rinsing.
//
// The L2 reports each change in a block's dirtiness. The index keeps, for
// each tracked DRAM row, a bit vector with one bit per cache line of that
// row. When the L2 evicts a dirty block, the index hands back the other
// dirty blocks of the same row so the L2 can write them back together with
// the victim, giving the DRAM a burst of hits to one open row (a "rinse").
//
// Organisation: ENTRIES direct-mapped entries indexed by the low bits of the
// row number, each holding the rest of the row number as a tag and a
// LINES_PER_ROW-bit vector. A row address is the line address with its low
// log2(LINES_PER_ROW) bits removed. When a new row needs an entry that holds
// another row with dirty blocks, that row is rinsed too, so every dirty
// block the L2 has told the index about is either tracked or being written
// back (as in the original dirty-block index).
//
// Operations, one per cycle, op_valid high:
//   DBI_SET   block op_addr became dirty
//   DBI_EVICT dirty block op_addr is being evicted: rinse the rest of its row
//   DBI_CLEAN block op_addr was written back by other means
// clear_all empties the index (after a full flush). A rinse comes out one
// cycle after the operation that causes it, as rinse_valid for one cycle.
//
// The paper gives the function (a dirty block index tracking dirty blocks per
// DRAM row, and rinsing the row when a dirty block is evicted); the
// direct-mapped organisation, its size and the 2 KB row (32 lines) are this
// design's choices.
module dirty_block_index
  import gpu_cache_pkg::*;
#(
  parameter int unsigned ENTRIES       = 512,
  parameter int unsigned LINES_PER_ROW = 32,
  localparam int unsigned LROW_W       = $clog2(LINES_PER_ROW),
  localparam int unsigned ROW_W        = LADDR_W - LROW_W,
  localparam int unsigned IDX_W        = $clog2(ENTRIES),
  localparam int unsigned TAG_W        = ROW_W - IDX_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     op_valid,
  input  logic [1:0]               op,        // 0 SET, 1 EVICT, 2 CLEAN
  input  laddr_t                   op_addr,
  input  logic                     clear_all,
  output logic                     rinse_valid,
  output logic [ROW_W-1:0]         rinse_row,
  output logic [LINES_PER_ROW-1:0] rinse_vec
);

  localparam logic [1:0] DBI_SET = 2'd0, DBI_EVICT = 2'd1, DBI_CLEAN = 2'd2;

  logic [ENTRIES-1:0]       valid;
  logic [TAG_W-1:0]         tag  [ENTRIES];
  logic [LINES_PER_ROW-1:0] vec  [ENTRIES];

  logic [ROW_W-1:0]         row;
  logic [IDX_W-1:0]         idx;
  logic [TAG_W-1:0]         rtag;
  logic [LINES_PER_ROW-1:0] bit1;
  logic                     match;

  assign row   = op_addr[LADDR_W-1:LROW_W];
  assign idx   = row[IDX_W-1:0];
  assign rtag  = row[ROW_W-1:IDX_W];
  assign bit1  = LINES_PER_ROW'(1) << op_addr[LROW_W-1:0];
  assign match = valid[idx] && (tag[idx] == rtag);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid       <= '0;
      rinse_valid <= 1'b0;
      rinse_row   <= '0;
      rinse_vec   <= '0;
    end else begin
      rinse_valid <= 1'b0;
      if (clear_all) begin
        valid <= '0;
      end else if (op_valid) begin
        unique case (op)
          DBI_SET: begin
            if (match) begin
              vec[idx] <= vec[idx] | bit1;
            end else begin
              if (valid[idx] && vec[idx] != '0) begin
                rinse_valid <= 1'b1;
                rinse_row   <= {tag[idx], idx};
                rinse_vec   <= vec[idx];
              end
              valid[idx] <= 1'b1;
              tag[idx]   <= rtag;
              vec[idx]   <= bit1;
            end
          end
          DBI_EVICT: begin
            if (match) begin
              if ((vec[idx] & ~bit1) != '0) begin
                rinse_valid <= 1'b1;
                rinse_row   <= row;
                rinse_vec   <= vec[idx] & ~bit1;
              end
              valid[idx] <= 1'b0;
            end
          end
          DBI_CLEAN: begin
            if (match) begin
              vec[idx] <= vec[idx] & ~bit1;
              if ((vec[idx] & ~bit1) == '0) valid[idx] <= 1'b0;
            end
          end
          default: ;
        endcase
      end
    end
  end

endmodule
