// crunch_transition_ctrl -- bank power-down / power-up transition engine of
// one DRAM-cache channel under CRUNCH.
//
// A transition is requested with start_i and the new vector of powered banks.
// Banks that turn on are powered first. The engine then walks "source" banks:
// the banks that turn off, and, when some bank turns on, every bank that stays
// on (under consistent hashing the displaced blocks of a returning bank may
// sit in any active bank). In each source bank it asks that bank's HIER tree
// for the next row holding a dirty block, reads the row's tags, and for every
// dirty block recomputes the bank under the new vector (RRT + priority
// selection). A block whose bank changed is migrated: read from the source,
// installed in the same row of the new bank, and invalidated in the source.
// Clean blocks are not moved: in a bank that turns off they are dropped.
// When a row has no dirty block left its HIER leaf is cleared. When all
// sources are done the leaving banks are powered off and the new vector
// becomes the active one. Demand accesses must be held off while busy_o is
// high (the cache does not serve requests during a transition).
//
// Install policy in the destination row (this design's choice; the paper does
// not describe one): a way holding the same tag is overwritten; otherwise an
// invalid way, otherwise a clean way, otherwise a round-robin victim which is
// written back to memory first.
//
// Interfaces (one command outstanding at a time):
//   DRAM cache: dc_valid_o/dc_ready_i carry a dc_cmd_t; each command is
//     answered by one dc_rvalid_i pulse, with dc_rmeta_i for DC_RD_META and
//     dc_rdata_i for DC_RD_BLK (an acknowledgement for the writes).
//   Memory write-back: wb_valid_o/wb_ready_i with a wb_req_t.
//   HIER: hq_* searches the tree of bank hq_bank_o; hu_* updates a row leaf.
// Timing: the row scan looks at one way per cycle; each migration costs four
// DRAM commands (five plus a write-back when a dirty victim must leave).
module crunch_transition_ctrl
  import crunch_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [CH_W-1:0] ch_id_i,
  // transition request
  input  logic            start_i,
  input  bank_mask_t      new_mask_i,
  output logic            busy_o,
  output bank_mask_t      active_o,
  output bank_mask_t      pwr_en_o,
  // HIER search / update
  output logic            hq_start_o,
  output bank_t           hq_bank_o,
  output row_t            hq_cursor_o,
  input  logic            hq_done_i,
  input  logic            hq_found_i,
  input  row_t            hq_row_i,
  output logic            hu_valid_o,
  output bank_t           hu_bank_o,
  output row_t            hu_row_o,
  output logic            hu_dirty_o,
  // DRAM cache command port
  output logic            dc_valid_o,
  input  logic            dc_ready_i,
  output dc_cmd_t         dc_cmd_o,
  input  logic            dc_rvalid_i,
  input  row_meta_t       dc_rmeta_i,
  input  blk_t            dc_rdata_i,
  // off-chip write-back port
  output logic            wb_valid_o,
  input  logic            wb_ready_i,
  output wb_req_t         wb_o,
  // statistics
  output logic [31:0]     n_migrated_o,
  output logic [31:0]     n_writeback_o,
  output logic [31:0]     n_rows_o
);

  typedef enum logic [4:0] {
    T_IDLE, T_PICK, T_FIND, T_FIND_W, T_CMD, T_RSP, T_GOT_META, T_SCAN,
    T_GOT_BLK, T_GOT_DMETA, T_GOT_VICT, T_WB, T_WROTE, T_INVD, T_ROWEND,
    T_FINISH
  } tstate_e;

  tstate_e    st_q, ret_q;
  bank_mask_t active_q, new_q, pwr_q, src_set_q;
  bank_t      src_q, dst_q;
  row_t       row_q, cursor_q;
  row_meta_t  meta_q, rsp_meta_q;
  blk_t       blk_q, rsp_data_q;
  way_t       way_q, dway_q, rr_q;
  logic       keep_q;
  tag_t       tag_q;
  dc_cmd_t    cmd_q;
  wb_req_t    wb_q;
  logic [31:0] n_mig_q, n_wb_q, n_rows_q;

  // ---------------------------------------------- new bank of the scanned way
  way_meta_t cur_way;
  region_t   cur_region;
  rrt_row_t  perm;
  bank_t     new_bank;
  logic      no_bank;

  assign cur_way    = meta_q[way_q];
  assign cur_region = tag_region(cur_way.tag);

  crunch_rrt u_rrt (
    .sr_idx (cur_region[REGION_W-1 -: SR_W]),
    .row_o  (perm)
  );

  crunch_bank_select u_sel (
    .perm_i    (perm),
    .pos_i     (cur_region[BANK_W-1:0]),
    .active_i  (new_q),
    .bank_o    (new_bank),
    .no_bank_o (no_bank)
  );

  // ------------------------------------------- destination way selection
  way_t pick_way;
  logic pick_dirty_victim;

  always_comb begin
    logic found_tag, found_inv, found_clean;
    way_t w_tag, w_inv, w_clean;
    found_tag = 1'b0; found_inv = 1'b0; found_clean = 1'b0;
    w_tag = '0; w_inv = '0; w_clean = '0;
    for (int unsigned w = 0; w < WAYS; w++) begin
      if (!found_tag && rsp_meta_q[w].valid && rsp_meta_q[w].tag == tag_q) begin
        found_tag = 1'b1; w_tag = way_t'(w);
      end
      if (!found_inv && !rsp_meta_q[w].valid) begin
        found_inv = 1'b1; w_inv = way_t'(w);
      end
      if (!found_clean && rsp_meta_q[w].valid && !rsp_meta_q[w].dirty) begin
        found_clean = 1'b1; w_clean = way_t'(w);
      end
    end
    pick_dirty_victim = 1'b0;
    if (found_tag)        pick_way = w_tag;
    else if (found_inv)   pick_way = w_inv;
    else if (found_clean) pick_way = w_clean;
    else begin
      pick_way          = rr_q;
      pick_dirty_victim = 1'b1;
    end
  end

  // lowest bank of the remaining source set
  bank_t next_src;
  always_comb begin
    next_src = '0;
    for (int i = NUM_BANKS - 1; i >= 0; i--) if (src_set_q[i]) next_src = bank_t'(i);
  end

  // ------------------------------------------------------------ outputs
  assign busy_o        = (st_q != T_IDLE);
  assign active_o      = active_q;
  assign pwr_en_o      = pwr_q;
  assign hq_start_o    = (st_q == T_FIND);
  assign hq_bank_o     = src_q;
  assign hq_cursor_o   = cursor_q;
  assign dc_valid_o    = (st_q == T_CMD);
  assign dc_cmd_o      = cmd_q;
  assign wb_valid_o    = (st_q == T_WB);
  assign wb_o          = wb_q;
  assign n_migrated_o  = n_mig_q;
  assign n_writeback_o = n_wb_q;
  assign n_rows_o      = n_rows_q;

  always_comb begin
    hu_valid_o = 1'b0;
    hu_bank_o  = src_q;
    hu_row_o   = row_q;
    hu_dirty_o = 1'b0;
    if (st_q == T_WROTE) begin
      hu_valid_o = 1'b1;
      hu_bank_o  = dst_q;
      hu_dirty_o = 1'b1;
    end else if (st_q == T_ROWEND && !keep_q) begin
      hu_valid_o = 1'b1;
    end
  end

  function automatic dc_cmd_t mk_cmd(dc_op_e op, bank_t b, row_t r, way_t w,
                                     tag_t t, logic d, blk_t data);
    dc_cmd_t c;
    c.op = op; c.bank = b; c.row = r; c.way = w; c.tag = t; c.dirty = d; c.data = data;
    return c;
  endfunction

  // ------------------------------------------------------------ main FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= T_IDLE;
      ret_q      <= T_IDLE;
      active_q   <= '1;          // all banks on out of reset
      pwr_q      <= '1;
      new_q      <= '1;
      src_set_q  <= '0;
      src_q      <= '0;
      dst_q      <= '0;
      row_q      <= '0;
      cursor_q   <= '0;
      meta_q     <= '0;
      rsp_meta_q <= '0;
      blk_q      <= '0;
      rsp_data_q <= '0;
      way_q      <= '0;
      dway_q     <= '0;
      rr_q       <= '0;
      keep_q     <= 1'b0;
      tag_q      <= '0;
      cmd_q      <= '0;
      wb_q       <= '0;
      n_mig_q    <= '0;
      n_wb_q     <= '0;
      n_rows_q   <= '0;
    end else begin
      unique case (st_q)
        T_IDLE: if (start_i && new_mask_i != active_q) begin
          automatic bank_mask_t leaving = active_q & ~new_mask_i;
          automatic bank_mask_t joining = new_mask_i & ~active_q;
          new_q     <= new_mask_i;
          pwr_q     <= active_q | new_mask_i;     // returning banks on first
          src_set_q <= leaving | ((joining != '0) ? (active_q & new_mask_i) : '0);
          st_q      <= T_PICK;
        end
        T_PICK: begin
          if (src_set_q == '0) st_q <= T_FINISH;
          else begin
            src_q               <= next_src;
            src_set_q[next_src] <= 1'b0;
            cursor_q            <= '0;
            st_q                <= T_FIND;
          end
        end
        T_FIND:   st_q <= T_FIND_W;
        T_FIND_W: if (hq_done_i) begin
          if (hq_found_i) begin
            row_q    <= hq_row_i;
            n_rows_q <= n_rows_q + 1;
            cmd_q    <= mk_cmd(DC_RD_META, src_q, hq_row_i, '0, '0, 1'b0, '0);
            ret_q    <= T_GOT_META;
            st_q     <= T_CMD;
          end else st_q <= T_PICK;
        end
        T_CMD: if (dc_ready_i) st_q <= T_RSP;
        T_RSP: if (dc_rvalid_i) begin
          rsp_meta_q <= dc_rmeta_i;
          rsp_data_q <= dc_rdata_i;
          st_q       <= ret_q;
        end
        T_GOT_META: begin
          meta_q <= rsp_meta_q;
          way_q  <= '0;
          keep_q <= 1'b0;
          st_q   <= T_SCAN;
        end
        T_SCAN: begin
          if (cur_way.valid && cur_way.dirty && !no_bank && new_bank != src_q) begin
            tag_q <= cur_way.tag;
            dst_q <= new_bank;
            cmd_q <= mk_cmd(DC_RD_BLK, src_q, row_q, way_q, '0, 1'b0, '0);
            ret_q <= T_GOT_BLK;
            st_q  <= T_CMD;
          end else begin
            if (cur_way.valid && cur_way.dirty) keep_q <= 1'b1;
            if (way_q == way_t'(WAYS - 1)) st_q <= T_ROWEND;
            else way_q <= way_q + 1'b1;
          end
        end
        T_GOT_BLK: begin
          blk_q <= rsp_data_q;
          cmd_q <= mk_cmd(DC_RD_META, dst_q, row_q, '0, '0, 1'b0, '0);
          ret_q <= T_GOT_DMETA;
          st_q  <= T_CMD;
        end
        T_GOT_DMETA: begin
          dway_q <= pick_way;
          if (pick_dirty_victim) begin
            rr_q  <= (rr_q == way_t'(WAYS - 1)) ? '0 : rr_q + 1'b1;
            wb_q.line <= tag_to_line(rsp_meta_q[pick_way].tag, row_q, ch_id_i);
            cmd_q <= mk_cmd(DC_RD_BLK, dst_q, row_q, pick_way, '0, 1'b0, '0);
            ret_q <= T_GOT_VICT;
          end else begin
            cmd_q <= mk_cmd(DC_WR_BLK, dst_q, row_q, pick_way, tag_q, 1'b1, blk_q);
            ret_q <= T_WROTE;
          end
          st_q <= T_CMD;
        end
        T_GOT_VICT: begin
          wb_q.data <= rsp_data_q;
          st_q      <= T_WB;
        end
        T_WB: if (wb_ready_i) begin
          n_wb_q <= n_wb_q + 1;
          cmd_q  <= mk_cmd(DC_WR_BLK, dst_q, row_q, dway_q, tag_q, 1'b1, blk_q);
          ret_q  <= T_WROTE;
          st_q   <= T_CMD;
        end
        T_WROTE: begin                      // HIER: destination row now dirty
          cmd_q <= mk_cmd(DC_INV, src_q, row_q, way_q, '0, 1'b0, '0);
          ret_q <= T_INVD;
          st_q  <= T_CMD;
        end
        T_INVD: begin
          n_mig_q <= n_mig_q + 1;
          if (way_q == way_t'(WAYS - 1)) st_q <= T_ROWEND;
          else begin
            way_q <= way_q + 1'b1;
            st_q  <= T_SCAN;
          end
        end
        T_ROWEND: begin                     // HIER: clear the row if clean now
          if (row_q == row_t'(ROWS - 1)) st_q <= T_PICK;
          else begin
            cursor_q <= row_q + 1'b1;
            st_q     <= T_FIND;
          end
        end
        T_FINISH: begin
          active_q <= new_q;
          pwr_q    <= new_q;
          st_q     <= T_IDLE;
        end
        default: st_q <= T_IDLE;
      endcase
    end
  end

  // A command offered to the DRAM cache stays put until it is taken.
  a_dc_stable: assert property (@(posedge clk) disable iff (!rst_n)
    dc_valid_o && !dc_ready_i |=> dc_valid_o && $stable(dc_cmd_o));
  a_wb_stable: assert property (@(posedge clk) disable iff (!rst_n)
    wb_valid_o && !wb_ready_i |=> wb_valid_o && $stable(wb_o));

endmodule
