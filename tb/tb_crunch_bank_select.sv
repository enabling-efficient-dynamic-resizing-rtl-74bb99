// tb_crunch_bank_select -- self-checking test of the priority bank selection.
// Random permutations (Fisher-Yates with $urandom), positions and active
// vectors are applied; the expected bank is found by a reference walk that
// scans the permutation from the position with wrap-around. Also checks that
// with all banks on the result is the permutation entry itself and that an
// all-off vector raises no_bank.
module tb_crunch_bank_select;
  import crunch_pkg::*;

  int checks = 0, failures = 0;
  rrt_row_t   perm;
  bank_t      pos, bank;
  bank_mask_t act;
  logic       none;

  crunch_bank_select dut (.perm_i(perm), .pos_i(pos), .active_i(act), .bank_o(bank), .no_bank_o(none));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int p [8];
      int exp_b;
      for (int i = 0; i < 8; i++) p[i] = i;
      for (int i = 7; i > 0; i--) begin
        automatic int j = int'($urandom % (i + 1));
        automatic int tmp = p[i];
        p[i] = p[j]; p[j] = tmp;
      end
      for (int i = 0; i < 8; i++) perm[i*3 +: 3] = 3'(p[i]);
      pos = 3'($urandom % 8);
      act = (t % 10 == 0) ? 8'hff : 8'($urandom);
      if (t == 5) act = 8'h00;
      #1;
      exp_b = -1;
      for (int k = 0; k < 8; k++)
        if (exp_b < 0 && act[p[(int'(pos) + k) % 8]]) exp_b = p[(int'(pos) + k) % 8];
      if (exp_b < 0) check(none, "no active bank flagged");
      else check(!none && int'(bank) == exp_b,
                 $sformatf("perm/pos %0d act %b: got %0d exp %0d", pos, act, bank, exp_b));
      if (act == 8'hff) check(int'(bank) == p[pos], "all on: bank = perm[pos]");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
