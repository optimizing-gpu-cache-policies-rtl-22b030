// tb_dirty_block_index: self-checking test of the dirty-block index at its
// default size (512 entries, 32 lines per DRAM row).
//
// A directed part marks four lines of one row dirty and evicts one: the
// other three must come back as a rinse one cycle later. A conflicting row
// must rinse the row it displaces, CLEAN must drop a line, and clear_all
// must empty the index. A random part then runs 20000 operations against a
// reference model kept in the testbench (an associative array per entry)
// and compares every rinse.
module tb_dirty_block_index;
  import gpu_cache_pkg::*;

  localparam int unsigned ENTRIES = 512;
  localparam int unsigned LPR     = 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic op_valid, clear_all, rinse_valid;
  logic [1:0] op;
  laddr_t op_addr;
  logic [LADDR_W-6:0] rinse_row;
  logic [LPR-1:0] rinse_vec;

  dirty_block_index dut (.clk, .rst_n, .op_valid, .op, .op_addr, .clear_all,
                         .rinse_valid, .rinse_row, .rinse_vec);

  // reference: per entry index, row held and its vector
  logic                  m_valid [ENTRIES];
  logic [LADDR_W-6:0]    m_row   [ENTRIES];
  logic [LPR-1:0]        m_vec   [ENTRIES];
  logic                  e_valid;
  logic [LADDR_W-6:0]    e_row;
  logic [LPR-1:0]        e_vec;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // apply one operation to the model and to the DUT, then compare the rinse
  task automatic do_op(logic [1:0] o, laddr_t a);
    logic [LADDR_W-6:0] row;
    int unsigned idx;
    logic [LPR-1:0] b;
    row = a[LADDR_W-1:5];
    idx = int'(row % ENTRIES);
    b   = LPR'(1) << a[4:0];
    e_valid = 1'b0;
    case (o)
      2'd0: if (m_valid[idx] && m_row[idx] == row) m_vec[idx] |= b;
            else begin
              if (m_valid[idx] && m_vec[idx] != 0) begin e_valid = 1; e_row = m_row[idx]; e_vec = m_vec[idx]; end
              m_valid[idx] = 1; m_row[idx] = row; m_vec[idx] = b;
            end
      2'd1: if (m_valid[idx] && m_row[idx] == row) begin
              if ((m_vec[idx] & ~b) != 0) begin e_valid = 1; e_row = row; e_vec = m_vec[idx] & ~b; end
              m_valid[idx] = 0;
            end
      2'd2: if (m_valid[idx] && m_row[idx] == row) begin
              m_vec[idx] &= ~b;
              if (m_vec[idx] == 0) m_valid[idx] = 0;
            end
      default: ;
    endcase
    @(negedge clk);
    op_valid = 1'b1; op = o; op_addr = a;
    @(negedge clk);
    op_valid = 1'b0;
    check(rinse_valid == e_valid, "rinse presence");
    if (e_valid && rinse_valid) check(rinse_row == e_row && rinse_vec == e_vec, "rinse row and vector");
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    laddr_t base;
    op_valid = 0; clear_all = 0; op = 0; op_addr = '0;
    for (int i = 0; i < ENTRIES; i++) begin m_valid[i] = 0; m_row[i] = '0; m_vec[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    base = 28'h0012340;             // row 0x91A, line 0
    for (int k = 0; k < 4; k++) do_op(2'd0, base + laddr_t'(k * 3));
    do_op(2'd1, base + 3);          // evict line 3
    check(e_valid && e_vec == 32'h0000_0241, "directed: rinse of lines 0, 6, 9");
    do_op(2'd0, base);              // new entry for the row
    do_op(2'd0, base + laddr_t'(ENTRIES * LPR)); // same entry, other row
    check(e_valid && e_vec == 32'h1, "directed: displaced row rinsed");
    do_op(2'd0, base + laddr_t'(ENTRIES * LPR) + 1);
    do_op(2'd2, base + laddr_t'(ENTRIES * LPR));  // clean line 0
    do_op(2'd1, base + laddr_t'(ENTRIES * LPR) + 5); // evict a line: rest is line 1
    check(e_valid && e_vec == 32'h2, "directed: CLEAN dropped a line");

    @(negedge clk); clear_all = 1; @(negedge clk); clear_all = 0;
    for (int i = 0; i < ENTRIES; i++) m_valid[i] = 0;

    for (int n = 0; n < 20000; n++) begin
      laddr_t a;
      a = laddr_t'({$urandom_range(0, 3), 9'($urandom_range(0, 15)), 5'($urandom)});
      do_op(2'($urandom_range(0, 2)), a);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
