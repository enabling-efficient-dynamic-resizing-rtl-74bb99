// tb_crunch_channel -- self-checking test of one channel of CRUNCH: the
// transition engine together with the eight real HIER trees, against the
// behavioural DRAM-cache model. Dirty rows are announced to HIER through the
// demand-side update port, as a cache controller would. Power-down 11111111
// -> 11010101 (banks 2, 4 and 6 off, bank 0 leftmost): every dirty block of
// the leaving banks must be found by the HIER walk and land, dirty and with
// its data, in the bank the mapper gives under the new vector; blocks of the
// other banks stay; the HIER root counters of the leaving banks end at zero.
// Power-up back to 11111111: the displaced dirty blocks return home.
module tb_crunch_channel;
  import crunch_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ DUT
  logic       start = 0;
  bank_mask_t new_mask = '1;
  logic       busy;
  bank_mask_t active, pwr_en;
  logic       dc_valid [1], dc_ready [1], dc_rvalid [1];
  dc_cmd_t    dc_cmd [1];
  row_meta_t  dc_rmeta [1];
  blk_t       dc_rdata [1];
  logic       wb_valid;
  wb_req_t    wb;
  logic [31:0] n_mig, n_wb, n_rows;
  bank_mask_t pwr_arr [1];

  logic       ext_valid = 0, ext_dirty = 0;
  bank_t      ext_bank = '0;
  row_t       ext_row = '0;
  logic [ROW_W:0] dirty_rows [NUM_BANKS];

  crunch_channel #(.CH_ID(0)) dut (
    .clk, .rst_n, .start_i(start), .new_mask_i(new_mask),
    .busy_o(busy), .active_o(active), .pwr_en_o(pwr_en),
    .ext_hu_valid_i(ext_valid), .ext_hu_bank_i(ext_bank), .ext_hu_row_i(ext_row),
    .ext_hu_dirty_i(ext_dirty),
    .dc_valid_o(dc_valid[0]), .dc_ready_i(dc_ready[0]), .dc_cmd_o(dc_cmd[0]),
    .dc_rvalid_i(dc_rvalid[0]), .dc_rmeta_i(dc_rmeta[0]), .dc_rdata_i(dc_rdata[0]),
    .wb_valid_o(wb_valid), .wb_ready_i(1'b1), .wb_o(wb),
    .dirty_rows_o(dirty_rows),
    .n_migrated_o(n_mig), .n_writeback_o(n_wb), .n_rows_o(n_rows));

  assign pwr_arr[0] = pwr_en;
  dram_cache_model #(.NCH(1), .LAT(2)) u_mem (
    .clk, .rst_n, .dc_valid, .dc_ready, .dc_cmd, .dc_rvalid, .dc_rmeta, .dc_rdata, .pwr_en(pwr_arr));

  // memory write-back sink
  blk_t mem [line_addr_t];
  always @(posedge clk) if (wb_valid) mem[wb.line] = wb.data;

  // mapper used to place the test lines
  line_addr_t m_line;
  bank_mask_t m_act;
  logic [1:0] m_ch;
  bank_t      m_bank;
  row_t       m_row;
  tag_t       m_tag;
  logic       m_none;
  crunch_mapper u_map (.line_i(m_line), .active_i(m_act), .ch_o(m_ch), .bank_o(m_bank),
                       .row_o(m_row), .tag_o(m_tag), .no_bank_o(m_none));

  typedef struct { line_addr_t line; int bank; int row; bit dirty; blk_t data; } rec_t;
  rec_t recs [$];

  function automatic blk_t pattern(line_addr_t l);
    return {16{l[31:0] ^ 32'hA5A5_0000}};
  endfunction

  // place a line of channel 0 whose all-on bank is `bank` in row `row`
  task automatic new_line(int bank, int row, output line_addr_t l);
    do begin
      m_line = line_addr_t'({$urandom, $urandom});
      m_line[1:0] = 2'b00;
      m_line[20:10] = 11'(row);
      m_act = '1;
      #1;
    end while (int'(m_bank) != bank);
    l = m_line;
  endtask

  task automatic preload(int bank, int row, bit dirty);
    line_addr_t l;
    int w;
    rec_t r;
    new_line(bank, row, l);
    w = u_mem.find(0, bank, row, line_tag(l));
    if (w >= 0) return;
    for (w = 0; w < WAYS; w++) if (!u_mem.is_valid(0, bank, row, w)) break;
    if (w == WAYS) return;
    u_mem.put(0, bank, row, w, line_tag(l), dirty, pattern(l));
    if (dirty) begin
      @(negedge clk);
      ext_valid = 1; ext_bank = bank_t'(bank); ext_row = row_t'(row); ext_dirty = 1;
      @(negedge clk);
      ext_valid = 0;
    end
    r.line = l; r.bank = bank; r.row = row; r.dirty = dirty; r.data = pattern(l);
    recs.push_back(r);
  endtask

  // where should a line be after the transition to `mask`
  function automatic int where(line_addr_t l, int row, output bit dirty, output blk_t d);
    for (int b = 0; b < NUM_BANKS; b++) begin
      int w = u_mem.find(0, b, row, line_tag(l));
      if (w >= 0) begin
        dirty = u_mem.is_dirty(0, b, row, w); d = u_mem.get_data(0, b, row, w);
        return b;
      end
    end
    dirty = 0; d = '0;
    return -1;
  endfunction

  task automatic run_transition(bank_mask_t m, output int cycles);
    @(negedge clk);
    new_mask = m; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (busy && cycles < 2000000) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    #200ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, n_dirty4, cmds0, mig0, full_row, dst, n_back;
    line_addr_t xl;
    rec_t r;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(active == 8'hff && pwr_en == 8'hff, "reset: all banks on");
    // dirty and clean lines in bank 4, dirty lines elsewhere
    for (int i = 0; i < 120; i++) preload(2 * (1 + int'($urandom % 3)), int'($urandom % 64), 1'b1);
    for (int i = 0; i < 40; i++)  preload(2 * (1 + int'($urandom % 3)), int'($urandom % 64), 1'b0);
    for (int i = 0; i < 80; i++)  preload(int'($urandom % 8), int'($urandom % 64), 1'b1);
    // a destination row that is full of dirty blocks
    full_row = 1000;
    preload(4, full_row, 1'b1);
    xl = recs[recs.size() - 1].line;
    m_line = xl; m_act = 8'b1010_1011; #1;
    dst = int'(m_bank);
    for (int i = 0; i < 200 && u_mem.find(0, dst, full_row, '0) < 100; i++) begin
      int w;
      for (w = 0; w < WAYS; w++) if (!u_mem.is_valid(0, dst, full_row, w)) break;
      if (w == WAYS) break;
      preload(dst, full_row, 1'b1);
    end
    n_dirty4 = 0;
    foreach (recs[i]) if ((recs[i].bank inside {2, 4, 6}) && recs[i].dirty) n_dirty4++;


    // ---------------------------------------------------- power-down
    cmds0 = u_mem.n_cmds[0];
    run_transition(8'b1010_1011, cyc);   // bank 0 = bit 0: pattern 11110111
    $display("power-down of banks 2, 4, 6: %0d cycles, %0d migrated, %0d written back, %0d rows",
             cyc, n_mig, n_wb, n_rows);
    check(!busy && active == 8'b1010_1011 && pwr_en == 8'b1010_1011, "down: masks");
    check(int'(n_mig) == n_dirty4, $sformatf("migrated %0d exp %0d", n_mig, n_dirty4));
    check(n_wb == 1, "one dirty victim written back");
    check(dirty_rows[2] == 0 && dirty_rows[4] == 0 && dirty_rows[6] == 0, "HIER of leaving banks empty");
    check(u_mem.n_cmds[0] - cmds0 == int'(n_rows) + 4 * int'(n_mig) + int'(n_wb),
          $sformatf("DRAM commands %0d", u_mem.n_cmds[0] - cmds0));
    check(u_mem.errors == 0, "no command to a powered-off bank");
    foreach (recs[i]) begin
      bit d; blk_t v; int b;
      r = recs[i];
      b = where(r.line, r.row, d, v);
      m_line = r.line; m_act = 8'b1010_1011; #1;
      if ((r.bank inside {2, 4, 6}) && !r.dirty) check(b < 0, "clean block of a leaving bank dropped");
      else if (b < 0) check(mem.exists(r.line) && mem[r.line] == r.data,
                            $sformatf("evicted line %h in memory", r.line));
      else begin
        check(b == int'(m_bank) && d && v == r.data,
              $sformatf("line %h in bank %0d exp %0d", r.line, b, m_bank));
        if (!(r.bank inside {2, 4, 6})) check(b == r.bank, "non-displaced line unmoved");
      end
    end

    // ---------------------------------------------------- power-up
    mig0 = int'(n_mig);
    n_back = 0;
    foreach (recs[i]) if ((recs[i].bank inside {2, 4, 6}) && recs[i].dirty) begin
      bit d; blk_t v;
      if (where(recs[i].line, recs[i].row, d, v) >= 0) n_back++;
    end
    run_transition(8'hff, cyc);
    $display("power-up of banks 2, 4, 6: %0d cycles, %0d repatriated", cyc, int'(n_mig) - mig0);
    check(!busy && active == 8'hff && pwr_en == 8'hff, "up: masks");
    check(int'(n_mig) - mig0 == n_back, $sformatf("repatriated %0d exp %0d", int'(n_mig) - mig0, n_back));
    foreach (recs[i]) begin
      bit d; blk_t v; int b;
      r = recs[i];
      if (r.dirty) begin
        b = where(r.line, r.row, d, v);
        if (b >= 0) check(b == r.bank && d && v == r.data,
                          $sformatf("after up: line %h in bank %0d exp %0d", r.line, b, r.bank));
        else check(mem.exists(r.line) && mem[r.line] == r.data, "after up: line in memory");
      end
    end
    check(u_mem.errors == 0, "no command to a powered-off bank (up)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
