// crunch_channel -- CRUNCH logic of one DRAM-cache channel.
//
// Holds one HIER dirty-row tree per bank and the transition engine, and
// connects them: the engine's row searches go to the tree of the bank it is
// walking, and the row-dirty updates of the engine and of the demand-side
// cache controller go to the tree of the bank they name. The demand side
// reports a row's new state (holds a dirty block / is clean) on ext_hu_*
// whenever one of its accesses changes it; the engine has priority, but
// demand traffic is held off while busy_o is high, so the two do not meet in
// practice.
//
// All ports of the engine towards the DRAM cache and the off-chip memory are
// passed through; pwr_en_o drives the power switches of the banks.
module crunch_channel
  import crunch_pkg::*;
#(
  parameter int unsigned CH_ID = 0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start_i,
  input  bank_mask_t      new_mask_i,
  output logic            busy_o,
  output bank_mask_t      active_o,
  output bank_mask_t      pwr_en_o,
  input  logic            ext_hu_valid_i,
  input  bank_t           ext_hu_bank_i,
  input  row_t            ext_hu_row_i,
  input  logic            ext_hu_dirty_i,
  output logic            dc_valid_o,
  input  logic            dc_ready_i,
  output dc_cmd_t         dc_cmd_o,
  input  logic            dc_rvalid_i,
  input  row_meta_t       dc_rmeta_i,
  input  blk_t            dc_rdata_i,
  output logic            wb_valid_o,
  input  logic            wb_ready_i,
  output wb_req_t         wb_o,
  output logic [ROW_W:0]  dirty_rows_o [NUM_BANKS],
  output logic [31:0]     n_migrated_o,
  output logic [31:0]     n_writeback_o,
  output logic [31:0]     n_rows_o
);

  logic  hq_start, hq_done, hq_found;
  bank_t hq_bank;
  row_t  hq_cursor, hq_row;
  logic  hu_valid, hu_dirty;
  bank_t hu_bank;
  row_t  hu_row;

  logic  t_hu_valid, t_hu_dirty;
  bank_t t_hu_bank;
  row_t  t_hu_row;

  logic [NUM_BANKS-1:0] b_done, b_found;
  row_t                 b_row [NUM_BANKS];

  crunch_transition_ctrl u_tc (
    .clk, .rst_n,
    .ch_id_i       (CH_W'(CH_ID)),
    .start_i, .new_mask_i, .busy_o, .active_o, .pwr_en_o,
    .hq_start_o    (hq_start),
    .hq_bank_o     (hq_bank),
    .hq_cursor_o   (hq_cursor),
    .hq_done_i     (hq_done),
    .hq_found_i    (hq_found),
    .hq_row_i      (hq_row),
    .hu_valid_o    (t_hu_valid),
    .hu_bank_o     (t_hu_bank),
    .hu_row_o      (t_hu_row),
    .hu_dirty_o    (t_hu_dirty),
    .dc_valid_o, .dc_ready_i, .dc_cmd_o, .dc_rvalid_i, .dc_rmeta_i, .dc_rdata_i,
    .wb_valid_o, .wb_ready_i, .wb_o,
    .n_migrated_o, .n_writeback_o, .n_rows_o
  );

  // update source: engine first, then the demand side
  always_comb begin
    if (t_hu_valid) begin
      hu_valid = 1'b1; hu_bank = t_hu_bank; hu_row = t_hu_row; hu_dirty = t_hu_dirty;
    end else begin
      hu_valid = ext_hu_valid_i; hu_bank = ext_hu_bank_i;
      hu_row   = ext_hu_row_i;   hu_dirty = ext_hu_dirty_i;
    end
  end

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_hier
    hier_dirty_tree #(.ROWS(ROWS), .D(HIER_D)) u_hier (
      .clk, .rst_n,
      .upd_valid    (hu_valid && hu_bank == bank_t'(b)),
      .upd_row      (hu_row),
      .upd_dirty    (hu_dirty),
      .q_start      (hq_start && hq_bank == bank_t'(b)),
      .q_cursor     (hq_cursor),
      .q_busy       (),
      .q_done       (b_done[b]),
      .q_found      (b_found[b]),
      .q_row        (b_row[b]),
      .dirty_rows_o (dirty_rows_o[b])
    );
  end

  assign hq_done  = b_done[hq_bank];
  assign hq_found = b_found[hq_bank];
  assign hq_row   = b_row[hq_bank];

endmodule
