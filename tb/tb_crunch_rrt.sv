// tb_crunch_rrt -- self-checking test of the region remapping table.
// Reads all 32 rows and checks, from first principles rather than from the
// table's formula: every row is a permutation of the 8 bank ids; no two rows
// are rotations of each other; with any single bank off, its 32 regions fail
// over (to the next bank in the row, cyclically) to each of the other seven
// banks 4 or 5 times; the table is 32 x 24 bits = 96 bytes; and row 0 holds
// the order 0 5 7 6 2 4 3 1.
module tb_crunch_rrt;
  import crunch_pkg::*;

  int checks = 0, failures = 0;
  logic [4:0] sr;
  rrt_row_t   row;
  int         tbl [32][8];

  crunch_rrt dut (.sr_idx(sr), .row_o(row));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int row0 [8] = '{0, 5, 7, 6, 2, 4, 3, 1};
    check($bits(row) * 32 == 96 * 8, "RRT is 96 bytes");
    for (int s = 0; s < 32; s++) begin
      bit [7:0] seen;
      seen = '0;
      sr = 5'(s);
      #1;
      for (int j = 0; j < 8; j++) begin
        tbl[s][j] = int'(row[j*3 +: 3]);
        seen[tbl[s][j]] = 1'b1;
      end
      check(seen == 8'hff, $sformatf("row %0d is a permutation", s));
    end
    for (int j = 0; j < 8; j++) check(tbl[0][j] == row0[j], $sformatf("row 0 position %0d", j));
    // rotation equivalence
    for (int a = 0; a < 32; a++)
      for (int b = a + 1; b < 32; b++) begin
        bit rot_eq;
        rot_eq = 1'b0;
        for (int r = 0; r < 8; r++) begin
          bit same;
          same = 1'b1;
          for (int j = 0; j < 8; j++) if (tbl[a][j] != tbl[b][(j + r) % 8]) same = 1'b0;
          if (same) rot_eq = 1'b1;
        end
        check(!rot_eq, $sformatf("rows %0d and %0d not rotation equivalent", a, b));
      end
    // single-failure fail-over balance
    for (int x = 0; x < 8; x++) begin
      int cnt [8];
      cnt = '{default: 0};
      for (int s = 0; s < 32; s++)
        for (int j = 0; j < 8; j++)
          if (tbl[s][j] == x) cnt[tbl[s][(j + 1) % 8]]++;
      for (int y = 0; y < 8; y++)
        if (y != x) check(cnt[y] == 4 || cnt[y] == 5,
                          $sformatf("bank %0d fails over to %0d %0d times", x, y, cnt[y]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
