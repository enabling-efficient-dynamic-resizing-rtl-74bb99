// tb_crunch_top_seq -- end-to-end test of the CRUNCH substrate at full size
// (4 channels x 8 banks x 2048 rows x 29 ways, default parameters) with the
// sequential shut-down order: bank 0 first, then bank 1, and so on. It is the
// same test as tb_crunch_top except for the order, plus a load-balance check
// after each step: the 256 regions of a channel, mapped through the top's
// mapping port, must land within a few regions of 256/(banks on) per bank,
// which is what lets a power manager pick only how many banks to keep on.
//
// The testbench plays the demand-side cache controller: it maps every access
// through the top's mapping port, performs it on the behavioural DRAM-cache
// model (hit; or fill into an invalid, clean or random way, writing a dirty
// victim back to a golden memory), and reports the row's new dirty state on
// the HIER update port. Every read is checked against the last value written
// to that line. Traffic is concentrated on a few rows so that sets overflow.
//
// The cache is shrunk along 01111111, 00111111 ... 00000001 (bank 0
// leftmost) and then brought back to 11111111, with traffic
// between the transitions and with accesses attempted during them (which
// must wait for stall_o to fall). Checked: read data, that every access maps
// to a powered-on bank, that no command goes to a powered-off bank, that
// lines of banks staying on are not moved on power-down, and the counts of
// each mechanism: power-down migration, power-up repatriation, write-back of
// a dirty victim during migration, demand stalled by a transition, HIER
// pruning (fewer rows visited than a full walk), read hits on migrated lines.
module tb_crunch_top_seq;
  import crunch_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ DUT
  line_addr_t line = '0;
  logic [CH_W-1:0] map_ch;
  bank_t      map_bank;
  row_t       map_row;
  tag_t       map_tag;
  logic       map_none, stall;
  logic       hu_valid [NUM_CH];
  bank_t      hu_bank  [NUM_CH];
  row_t       hu_row   [NUM_CH];
  logic       hu_dirty [NUM_CH];
  logic       start = 0;
  bank_mask_t new_mask = '1, active;
  bank_mask_t pwr_en [NUM_CH];
  logic       dc_valid [NUM_CH], dc_ready [NUM_CH], dc_rvalid [NUM_CH];
  dc_cmd_t    dc_cmd [NUM_CH];
  row_meta_t  dc_rmeta [NUM_CH];
  blk_t       dc_rdata [NUM_CH];
  logic       wb_valid [NUM_CH], wb_ready [NUM_CH];
  wb_req_t    wb [NUM_CH];
  logic [ROW_W:0] dirty_rows [NUM_CH][NUM_BANKS];
  logic [31:0] n_mig [NUM_CH], n_wb [NUM_CH], n_rows [NUM_CH];

  crunch_top dut (
    .clk, .rst_n, .line_i(line), .map_ch_o(map_ch), .map_bank_o(map_bank),
    .map_row_o(map_row), .map_tag_o(map_tag), .map_none_o(map_none), .stall_o(stall),
    .hu_valid_i(hu_valid), .hu_bank_i(hu_bank), .hu_row_i(hu_row), .hu_dirty_i(hu_dirty),
    .start_i(start), .new_mask_i(new_mask), .active_o(active), .pwr_en_o(pwr_en),
    .dc_valid_o(dc_valid), .dc_ready_i(dc_ready), .dc_cmd_o(dc_cmd),
    .dc_rvalid_i(dc_rvalid), .dc_rmeta_i(dc_rmeta), .dc_rdata_i(dc_rdata),
    .wb_valid_o(wb_valid), .wb_ready_i(wb_ready), .wb_o(wb),
    .dirty_rows_o(dirty_rows), .n_migrated_o(n_mig), .n_writeback_o(n_wb), .n_rows_o(n_rows));

  dram_cache_model #(.NCH(NUM_CH), .LAT(2)) u_mem (
    .clk, .rst_n, .dc_valid, .dc_ready, .dc_cmd, .dc_rvalid, .dc_rmeta, .dc_rdata, .pwr_en);

  // golden state: last value written to each line; memory behind the cache
  blk_t golden [line_addr_t];
  blk_t mem    [line_addr_t];

  initial for (int c = 0; c < NUM_CH; c++) begin
    hu_valid[c] = 0; hu_bank[c] = '0; hu_row[c] = '0; hu_dirty[c] = 0; wb_ready[c] = 1;
  end

  always @(posedge clk)
    for (int c = 0; c < NUM_CH; c++) if (wb_valid[c] && wb_ready[c]) mem[wb[c].line] = wb[c].data;

  function automatic blk_t mem_value(line_addr_t l);
    if (mem.exists(l)) return mem[l];
    return {16{l[31:0]}};
  endfunction

  function automatic blk_t golden_value(line_addr_t l);
    if (golden.exists(l)) return golden[l];
    return {16{l[31:0]}};
  endfunction

  // ------------------------------------------------ mechanism counters
  int n_stalled = 0, n_demand_wb = 0, n_hits = 0, n_hit_moved = 0, n_pruned = 0;
  int n_down_mig = 0, n_up_mig = 0, n_mig_wb = 0;
  bit moved [line_addr_t];

  function automatic line_addr_t rand_line();
    line_addr_t l;
    l = '0;
    l[CH_W-1:0]                = CH_W'($urandom);
    l[CH_W +: REGION_W]        = REGION_W'($urandom);
    l[CH_W+REGION_W +: ROW_W]  = ROW_W'($urandom % 4);
    l[CH_W+REGION_W+ROW_W +: 6] = 6'($urandom);
    return l;
  endfunction

  // one demand access, applied on the falling edge
  task automatic access(line_addr_t l, bit write);
    bit wbk, hit;
    line_addr_t wl;
    blk_t wd, v;
    int c, b, r;
    if (stall) begin
      n_stalled++;
      while (stall) @(negedge clk);
    end
    line = l;
    #1;
    c = int'(map_ch); b = int'(map_bank); r = int'(map_row);
    check(!map_none && active[b] && pwr_en[c][b], "access maps to a powered bank");
    if (write) begin
      v = {16{$urandom}};
      u_mem.demand_write(c, b, r, map_tag, v, wbk, wl, wd);
      golden[l] = v;
      if (moved.exists(l)) moved.delete(l);
    end else begin
      hit = u_mem.demand_read(c, b, r, map_tag, v);
      if (hit) begin
        n_hits++;
        if (moved.exists(l)) n_hit_moved++;
      end else begin
        v = mem_value(l);
        u_mem.demand_fill(c, b, r, map_tag, v, wbk, wl, wd);
      end
      check(v == golden_value(l), $sformatf("read of line %h (%s)", l, hit ? "hit" : "miss"));
    end
    if (wbk) begin mem[wl] = wd; n_demand_wb++; end
    hu_valid[c] = 1; hu_bank[c] = bank_t'(b); hu_row[c] = row_t'(r);
    hu_dirty[c] = u_mem.row_dirty(c, b, r);
    @(negedge clk);
    hu_valid[c] = 0;
  endtask

  task automatic traffic(int n, int write_pct);
    for (int i = 0; i < n; i++) access(rand_line(), int'($urandom % 100) < write_pct);
  endtask

  // remember the dirty lines of banks that stay on, to see they do not move
  typedef struct { line_addr_t l; int c; int b; int r; } loc_t;

  task automatic transition(bank_mask_t m);
    int mig0 [NUM_CH], rows0 [NUM_CH], wb0 [NUM_CH], walked;
    int mig, rows, wbs;
    bank_mask_t old;
    loc_t keep [$];
    old = active;
    for (int c = 0; c < NUM_CH; c++) begin
      mig0[c] = int'(n_mig[c]); rows0[c] = int'(n_rows[c]); wb0[c] = int'(n_wb[c]);
    end
    // dirty lines of banks that remain on and are not touched by a power-up
    if ((m & ~old) == '0)
      foreach (golden[l]) begin
        loc_t x;
        line = l; #1;
        x.l = l; x.c = int'(map_ch); x.b = int'(map_bank); x.r = int'(map_row);
        if (m[x.b] && u_mem.find(x.c, x.b, x.r, map_tag) >= 0) keep.push_back(x);
        if (keep.size() >= 3000) break;
      end
    @(negedge clk);
    new_mask = m; start = 1;
    @(negedge clk);
    start = 0;
    // demand traffic arrives during the transition and must wait
    fork
      access(rand_line(), 1'b0);
    join
    while (stall) @(negedge clk);
    mig = 0; rows = 0; wbs = 0;
    for (int c = 0; c < NUM_CH; c++) begin
      mig += int'(n_mig[c]) - mig0[c]; rows += int'(n_rows[c]) - rows0[c];
      wbs += int'(n_wb[c]) - wb0[c];
    end
    walked = 0;
    for (int b = 0; b < NUM_BANKS; b++)
      if ((old[b] && !m[b]) || ((m & ~old) != '0 && old[b] && m[b])) walked += NUM_CH * ROWS;
    if (rows < walked) n_pruned++;
    if ((m & ~old) != '0) n_up_mig += mig; else n_down_mig += mig;
    n_mig_wb += wbs;
    check(active == m, "new bank vector active");
    for (int c = 0; c < NUM_CH; c++) check(pwr_en[c] == m, "power enables follow the vector");
    check(u_mem.errors == 0, "no DRAM command to a powered-off bank");
    foreach (keep[i]) begin
      line = keep[i].l; #1;
      // it stays where it was, unless a migrated block evicted it to memory
      check(u_mem.find(keep[i].c, keep[i].b, keep[i].r, map_tag) >= 0 ||
            mem_value(keep[i].l) == golden_value(keep[i].l), "line of a bank staying on not moved");
    end
    // lines that were displaced: note them to count hits on migrated lines
    foreach (golden[l]) moved[l] = 1'b1;
    $display("transition to %b (bank 0 first): %0d blocks migrated, %0d victims written back, %0d rows visited (%0d in a full walk)",
             {<<{m}}, mig, wbs, rows, walked);
  endtask

  // regions per powered bank of channel 0, against the ideal 256/(banks on)
  task automatic balance(bank_mask_t m);
    int cnt [NUM_BANKS];
    int n_on, hi, lo, ideal_hi, ideal_lo;
    foreach (cnt[b]) cnt[b] = 0;
    for (int r = 0; r < (1 << REGION_W); r++) begin
      line = line_addr_t'(r) << CH_W; #1;
      cnt[map_bank]++;
    end
    n_on = $countones(m);
    ideal_lo = (1 << REGION_W) / n_on;
    ideal_hi = ((1 << REGION_W) + n_on - 1) / n_on;
    hi = 0; lo = 1 << REGION_W;
    for (int b = 0; b < NUM_BANKS; b++)
      if (m[b]) begin
        if (cnt[b] > hi) hi = cnt[b];
        if (cnt[b] < lo) lo = cnt[b];
      end else check(cnt[b] == 0, $sformatf("no region on powered-off bank %0d", b));
    $display("  %0d banks on: regions per bank max %0d min %0d (ideal %0d..%0d)",
             n_on, hi, lo, ideal_lo, ideal_hi);
    check(hi <= ideal_hi + 3 && lo >= ideal_lo - 4, "regions spread evenly over the banks on");
  endtask

  initial begin
    #300ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bank_mask_t pats [7];
    // bank 0 is the leftmost character in the printed patterns: bit 0 here
    pats = '{8'b1111_1110, 8'b1111_1100, 8'b1111_1000, 8'b1111_0000,
             8'b1110_0000, 8'b1100_0000, 8'b1000_0000};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(active == 8'hff, "all banks on after reset");
    traffic(4000, 70);
    foreach (pats[p]) begin
      transition(pats[p]);
      balance(pats[p]);
      traffic(400, 50);
    end
    transition(8'hff);
    traffic(1500, 30);
    // read back everything that was ever written
    foreach (golden[l]) access(l, 1'b0);
    $display("mechanisms: down-migrations %0d, up-repatriations %0d, migration write-backs %0d, stalled accesses %0d, pruned walks %0d, hits on moved lines %0d, demand write-backs %0d, hits %0d",
             n_down_mig, n_up_mig, n_mig_wb, n_stalled, n_pruned, n_hit_moved, n_demand_wb, n_hits);
    check(n_down_mig > 0, "power-down migration happened");
    check(n_up_mig > 0, "power-up repatriation happened");
    check(n_mig_wb > 0, "dirty victim written back during migration");
    check(n_stalled > 0, "demand access stalled by a transition");
    check(n_pruned > 0, "HIER pruned a bank walk");
    check(n_hit_moved > 0, "hit on a migrated line");
    check(n_demand_wb > 0, "demand eviction of a dirty line");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
