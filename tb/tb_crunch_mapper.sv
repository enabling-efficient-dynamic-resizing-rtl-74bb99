// tb_crunch_mapper -- self-checking test of the address-to-bank mapping.
// Checks the address field split against hand-computed bit slices, and the
// consistent-hashing properties over all 256 regions: with all banks on every
// bank owns 32 regions; turning banks off along the balanced shut-down
// patterns 11110111, 11010111, ... 10000000 (bank 0 leftmost) moves only the
// regions of the banks just turned off, every region lands on an active bank,
// and with one bank off each other bank owns 36 or 37 regions. The ratio of
// most- to least-loaded bank is printed for each pattern.
module tb_crunch_mapper;
  import crunch_pkg::*;

  int checks = 0, failures = 0;
  line_addr_t line;
  bank_mask_t act;
  logic [1:0] ch;
  bank_t      bank;
  row_t       row;
  tag_t       tag;
  logic       none;

  crunch_mapper dut (.line_i(line), .active_i(act), .ch_o(ch), .bank_o(bank),
                     .row_o(row), .tag_o(tag), .no_bank_o(none));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bank_mask_t pat(string s);
    bank_mask_t m;
    for (int i = 0; i < 8; i++) m[i] = (s[i] == "1");
    return m;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic string pats [8] = '{"11111111", "11110111", "11010111", "11010101",
                        "10010101", "10010001", "10000001", "10000000"};
    int prev [256];
    // field split
    act = 8'hff;
    for (int t = 0; t < 200; t++) begin
      line = {$urandom, $urandom};
      #1;
      check(ch == line[1:0], "channel bits");
      check(row == line[20:10], "row bits");
      check(tag == {line[41:21], line[9:2]}, "tag = upper bits + region");
    end
    for (int p = 0; p < 8; p++) begin
      int cnt [8];
      int mx, mn;
      cnt = '{default: 0};
      mx = 0; mn = 1 << 30;
      act = pat(pats[p]);
      for (int r = 0; r < 256; r++) begin
        line = 42'(r) << 2;
        #1;
        check(!none && act[bank], $sformatf("pattern %s region %0d on active bank", pats[p], r));
        cnt[bank]++;
        if (p > 0 && act[prev[r]]) check(int'(bank) == prev[r],
            $sformatf("pattern %s region %0d stayed", pats[p], r));
        prev[r] = int'(bank);
      end
      for (int b = 0; b < 8; b++) if (act[b]) begin
        if (cnt[b] > mx) mx = cnt[b];
        if (cnt[b] < mn) mn = cnt[b];
        if (p == 0) check(cnt[b] == 32, "all on: 32 regions per bank");
        if (p == 1) check(cnt[b] == 36 || cnt[b] == 37, $sformatf("one off: bank %0d owns %0d", b, cnt[b]));
      end
      $display("pattern %s: regions per active bank max %0d min %0d", pats[p], mx, mn);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
