// tb_hier_dirty_tree -- self-checking test of the HIER dirty-row tree at the
// paper's size (2048 rows, arity 16). A bit-per-row reference array mirrors
// random set/clear updates (repeated updates included). The test checks the
// root count against the reference, the tree's storage (2772 bits), and many
// searches "first dirty row at or after the cursor" against a linear scan of
// the reference, including a fully clean bank and a cursor past the last
// dirty row. A search (q_start to q_done) takes one cycle to accept and one
// per tree level: exactly 4 cycles for a bank with a single dirty row, and
// never more than 10 (two restarts from the root after exhausted subtrees).
// Stimulus is applied on the falling clock edge.
module tb_hier_dirty_tree;
  localparam int ROWS = 2048;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic upd_valid = 0, upd_dirty = 0, q_start = 0;
  logic [10:0] upd_row = '0, q_cursor = '0;
  logic q_busy, q_done, q_found;
  logic [10:0] q_row;
  logic [11:0] dirty_rows;
  bit   ref_d [ROWS];

  hier_dirty_tree #(.ROWS(ROWS), .D(16)) dut (
    .clk, .rst_n, .upd_valid, .upd_row, .upd_dirty, .q_start, .q_cursor,
    .q_busy, .q_done, .q_found, .q_row, .dirty_rows_o(dirty_rows));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic update(int r, bit d);
    upd_valid = 1; upd_row = 11'(r); upd_dirty = d;
    @(negedge clk);
    upd_valid = 0;
    ref_d[r] = d;
  endtask

  function automatic int ref_count();
    int n = 0;
    for (int i = 0; i < ROWS; i++) n += int'(ref_d[i]);
    return n;
  endfunction

  task automatic search(int cur, output int cycles, output bit found, output int row);
    q_start = 1; q_cursor = 11'(cur);
    @(negedge clk);
    q_start = 0;
    cycles = 1;
    while (!q_done && cycles < 100) begin @(negedge clk); cycles++; end
    found = q_found; row = int'(q_row);
  endtask

  task automatic check_search(int cur);
    int cyc, row, exp_row;
    bit found;
    exp_row = -1;
    for (int i = cur; i < ROWS; i++) if (exp_row < 0 && ref_d[i]) exp_row = i;
    search(cur, cyc, found, row);
    check(found == (exp_row >= 0), $sformatf("cursor %0d found flag", cur));
    if (exp_row >= 0) check(row == exp_row, $sformatf("cursor %0d: row %0d exp %0d", cur, row, exp_row));
    check(cyc <= 10, $sformatf("search took %0d cycles", cyc));
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, row;
    bit found;
    for (int i = 0; i < ROWS; i++) ref_d[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(dut.STORAGE_BITS == 2772, "HIER storage is 2772 bits");
    search(0, cyc, found, row);
    check(!found, "clean bank: nothing found");
    // single dirty row: accepted, then straight down the three levels
    update(1234, 1);
    search(0, cyc, found, row);
    check(found && row == 1234 && cyc == 4, $sformatf("single row: %0d in %0d cycles", row, cyc));
    update(1234, 1);
    @(negedge clk);
    check(dirty_rows == 1, "repeated set counted once");
    update(1234, 0);
    @(negedge clk);
    check(dirty_rows == 0, "clear brings root to 0");
    // random traffic
    for (int round = 0; round < 20; round++) begin
      for (int u = 0; u < 150; u++) update(int'($urandom % ROWS), ($urandom % 3) != 0);
      @(negedge clk);
      check(int'(dirty_rows) == ref_count(), $sformatf("root count %0d exp %0d", dirty_rows, ref_count()));
      for (int q = 0; q < 20; q++) check_search(int'($urandom % ROWS));
      check_search(0);
      check_search(ROWS - 1);
    end
    // drain everything through searches, as a power-down walk does
    begin
      int cur;
      cur = 0;
      forever begin
        search(cur, cyc, found, row);
        if (!found) break;
        check(ref_d[row], "walk returns dirty row");
        update(row, 0);
        cur = row + 1;
        if (cur >= ROWS) break;
      end
    end
    @(negedge clk);
    check(dirty_rows == 0 && ref_count() == 0, "bank drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
