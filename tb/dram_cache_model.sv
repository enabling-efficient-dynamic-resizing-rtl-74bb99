// dram_cache_model -- behavioural model of the die-stacked DRAM cache arrays
// (not synthesizable, testbench only).
//
// Holds, for NCH channels x 8 banks x ROWS rows x 29 ways, the tag state
// (valid, dirty, widened tag) and the 64 B data of each way, in associative
// arrays so that only touched ways cost memory. It serves the dc_* command
// port of each channel with a fixed latency of LAT cycles and one command in
// flight, ignores the command port while rst_n is low, and flags any command
// to a bank whose power enable is low. When a
// bank's power enable falls, its contents are lost, as in real DRAM.
//
// The demand side of the testbench reads and writes through the tasks
// demand_read / demand_write / demand_fill, which act as a simple cache
// controller: hit, or install in an invalid, then a clean, then a random way,
// handing a dirty victim back for write-back.
module dram_cache_model
  import crunch_pkg::*;
#(
  parameter int NCH = 4,
  parameter int LAT = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       dc_valid [NCH],
  output logic       dc_ready [NCH],
  input  dc_cmd_t    dc_cmd   [NCH],
  output logic       dc_rvalid[NCH],
  output row_meta_t  dc_rmeta [NCH],
  output blk_t       dc_rdata [NCH],
  input  bank_mask_t pwr_en   [NCH]
);

  way_meta_t meta [longint];
  blk_t      data [longint];

  int        errors = 0;
  int        n_cmds [NCH];
  int        cnt    [NCH];
  logic      pend   [NCH];
  bank_mask_t pwr_prev [NCH];

  function automatic longint key(int ch, int bank, int row, int way);
    return ((longint'(ch) * NUM_BANKS + bank) * ROWS + row) * 32 + way;
  endfunction

  function automatic way_meta_t get_meta(int ch, int bank, int row, int way);
    longint k = key(ch, bank, row, way);
    if (meta.exists(k)) return meta[k];
    return '0;
  endfunction

  function automatic blk_t get_data(int ch, int bank, int row, int way);
    longint k = key(ch, bank, row, way);
    if (data.exists(k)) return data[k];
    return '0;
  endfunction

  function automatic void put(int ch, int bank, int row, int way, tag_t t, logic d, blk_t v);
    way_meta_t m;
    m.valid = 1'b1; m.dirty = d; m.tag = t;
    meta[key(ch, bank, row, way)] = m;
    data[key(ch, bank, row, way)] = v;
  endfunction

  function automatic bit is_valid(int ch, int bank, int row, int way);
    way_meta_t m = get_meta(ch, bank, row, way);
    return m.valid;
  endfunction

  function automatic bit is_dirty(int ch, int bank, int row, int way);
    way_meta_t m = get_meta(ch, bank, row, way);
    return m.valid && m.dirty;
  endfunction

  function automatic bit row_dirty(int ch, int bank, int row);
    for (int w = 0; w < WAYS; w++) begin
      way_meta_t m = get_meta(ch, bank, row, w);
      if (m.valid && m.dirty) return 1'b1;
    end
    return 1'b0;
  endfunction

  function automatic int find(int ch, int bank, int row, tag_t t);
    for (int w = 0; w < WAYS; w++) begin
      way_meta_t m = get_meta(ch, bank, row, w);
      if (m.valid && m.tag == t) return w;
    end
    return -1;
  endfunction

  // Choose a way for a new line; a dirty victim is handed back.
  function automatic int victim(int ch, int bank, int row, output bit wb,
                                output line_addr_t wl, output blk_t wd);
    int w;
    wb = 1'b0; wl = '0; wd = '0;
    for (w = 0; w < WAYS; w++) if (!is_valid(ch, bank, row, w)) return w;
    for (w = 0; w < WAYS; w++) if (!is_dirty(ch, bank, row, w)) return w;
    w  = int'($urandom % WAYS);
    wb = 1'b1;
    begin
      way_meta_t m = get_meta(ch, bank, row, w);
      wl = tag_to_line(m.tag, row_t'(row), CH_W'(ch));
    end
    wd = get_data(ch, bank, row, w);
    return w;
  endfunction

  function automatic void demand_write(int ch, int bank, int row, tag_t t, blk_t v,
                                       output bit wb, output line_addr_t wl, output blk_t wd);
    int w = find(ch, bank, row, t);
    wb = 1'b0; wl = '0; wd = '0;
    if (w < 0) w = victim(ch, bank, row, wb, wl, wd);
    put(ch, bank, row, w, t, 1'b1, v);
  endfunction

  function automatic bit demand_read(int ch, int bank, int row, tag_t t, output blk_t v);
    int w = find(ch, bank, row, t);
    v = '0;
    if (w < 0) return 1'b0;
    v = get_data(ch, bank, row, w);
    return 1'b1;
  endfunction

  function automatic void demand_fill(int ch, int bank, int row, tag_t t, blk_t v,
                                      output bit wb, output line_addr_t wl, output blk_t wd);
    int w = victim(ch, bank, row, wb, wl, wd);
    put(ch, bank, row, w, t, 1'b0, v);
  endfunction

  function automatic void erase_bank(int ch, int bank);
    longint lo = key(ch, bank, 0, 0);
    longint hi = key(ch, bank + 1, 0, 0);
    longint doomed [$];
    foreach (meta[k]) if (k >= lo && k < hi) doomed.push_back(k);
    foreach (doomed[i]) begin
      meta.delete(doomed[i]);
      if (data.exists(doomed[i])) data.delete(doomed[i]);
    end
  endfunction

  initial begin
    for (int c = 0; c < NCH; c++) begin
      pend[c] = 1'b0; cnt[c] = 0; n_cmds[c] = 0; pwr_prev[c] = '1;
      dc_rvalid[c] = 1'b0; dc_rmeta[c] = '0; dc_rdata[c] = '0;
    end
  end

  always_comb for (int c = 0; c < NCH; c++) dc_ready[c] = !pend[c];

  always @(posedge clk) begin
    for (int c = 0; c < NCH; c++) begin
      for (int b = 0; b < NUM_BANKS; b++)
        if (pwr_prev[c][b] && !pwr_en[c][b]) erase_bank(c, b);
      pwr_prev[c] = pwr_en[c];
      dc_rvalid[c] <= 1'b0;
      if (pend[c]) begin
        if (cnt[c] <= 1) begin pend[c] <= 1'b0; dc_rvalid[c] <= 1'b1; end
        else cnt[c] <= cnt[c] - 1;
      end else if (rst_n && dc_valid[c]) begin
        dc_cmd_t cmd;
        cmd = dc_cmd[c];
        n_cmds[c]++;
        if (!pwr_en[c][cmd.bank]) begin
          errors++;
          $display("MODEL: ch%0d command to powered-off bank %0d at %0t", c, cmd.bank, $time);
        end
        case (cmd.op)
          DC_RD_META: for (int w = 0; w < WAYS; w++)
                        dc_rmeta[c][w] <= get_meta(c, cmd.bank, cmd.row, w);
          DC_RD_BLK:  dc_rdata[c] <= get_data(c, cmd.bank, cmd.row, cmd.way);
          DC_WR_BLK:  put(c, cmd.bank, cmd.row, cmd.way, cmd.tag, cmd.dirty, cmd.data);
          DC_INV:     begin
                        longint k;
                        k = key(c, cmd.bank, cmd.row, cmd.way);
                        if (meta.exists(k)) meta.delete(k);
                      end
          default: ;
        endcase
        pend[c] <= 1'b1;
        cnt[c]  <= LAT;
      end
    end
  end

endmodule
