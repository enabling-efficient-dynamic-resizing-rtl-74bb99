// crunch_top -- CRUNCH bank-remapping substrate of a four-channel,
// eight-banks-per-channel die-stacked DRAM cache (128 MB, 2 KB rows).
//
// Demand side: line_i is mapped, in the same cycle, to its channel, bank,
// row and widened tag through the region remapping table and the active-bank
// vector of its channel; the cache controller that performs the tag check and
// data access (not part of this design) uses map_* and must not issue while
// stall_o is high. It reports every change of a row's dirty state on hu_*.
//
// Resizing: start_i with new_mask_i starts a transition in all channels at
// once (all channels keep the same set of banks on). Each channel migrates its
// own dirty blocks over its own DRAM-cache port (dc_*) and write-back port
// (wb_*); stall_o stays high until every channel has finished, and pwr_en_o
// gives the power-switch enables of each channel's banks.
module crunch_top
  import crunch_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // demand-side mapping
  input  line_addr_t      line_i,
  output logic [CH_W-1:0] map_ch_o,
  output bank_t           map_bank_o,
  output row_t            map_row_o,
  output tag_t            map_tag_o,
  output logic            map_none_o,
  output logic            stall_o,
  // dirty-row updates from the demand side, one port per channel
  input  logic            hu_valid_i [NUM_CH],
  input  bank_t           hu_bank_i  [NUM_CH],
  input  row_t            hu_row_i   [NUM_CH],
  input  logic            hu_dirty_i [NUM_CH],
  // resizing request
  input  logic            start_i,
  input  bank_mask_t      new_mask_i,
  output bank_mask_t      active_o,
  output bank_mask_t      pwr_en_o   [NUM_CH],
  // DRAM-cache command ports
  output logic            dc_valid_o [NUM_CH],
  input  logic            dc_ready_i [NUM_CH],
  output dc_cmd_t         dc_cmd_o   [NUM_CH],
  input  logic            dc_rvalid_i[NUM_CH],
  input  row_meta_t       dc_rmeta_i [NUM_CH],
  input  blk_t            dc_rdata_i [NUM_CH],
  // write-back ports towards off-chip memory
  output logic            wb_valid_o [NUM_CH],
  input  logic            wb_ready_i [NUM_CH],
  output wb_req_t         wb_o       [NUM_CH],
  // HIER root counters and transition statistics
  output logic [ROW_W:0]  dirty_rows_o [NUM_CH][NUM_BANKS],
  output logic [31:0]     n_migrated_o [NUM_CH],
  output logic [31:0]     n_writeback_o[NUM_CH],
  output logic [31:0]     n_rows_o     [NUM_CH]
);

  logic       busy   [NUM_CH];
  bank_mask_t active [NUM_CH];

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    crunch_channel #(.CH_ID(c)) u_ch (
      .clk, .rst_n,
      .start_i, .new_mask_i,
      .busy_o         (busy[c]),
      .active_o       (active[c]),
      .pwr_en_o       (pwr_en_o[c]),
      .ext_hu_valid_i (hu_valid_i[c] && !busy[c]),
      .ext_hu_bank_i  (hu_bank_i[c]),
      .ext_hu_row_i   (hu_row_i[c]),
      .ext_hu_dirty_i (hu_dirty_i[c]),
      .dc_valid_o     (dc_valid_o[c]),
      .dc_ready_i     (dc_ready_i[c]),
      .dc_cmd_o       (dc_cmd_o[c]),
      .dc_rvalid_i    (dc_rvalid_i[c]),
      .dc_rmeta_i     (dc_rmeta_i[c]),
      .dc_rdata_i     (dc_rdata_i[c]),
      .wb_valid_o     (wb_valid_o[c]),
      .wb_ready_i     (wb_ready_i[c]),
      .wb_o           (wb_o[c]),
      .dirty_rows_o   (dirty_rows_o[c]),
      .n_migrated_o   (n_migrated_o[c]),
      .n_writeback_o  (n_writeback_o[c]),
      .n_rows_o       (n_rows_o[c])
    );
  end

  always_comb begin
    stall_o = 1'b0;
    for (int c = 0; c < NUM_CH; c++) stall_o |= busy[c];
  end

  // all channels change together, so channel 0 stands for the cache
  assign active_o = active[0];

  crunch_mapper u_map (
    .line_i    (line_i),
    .active_i  (active[line_channel(line_i)]),
    .ch_o      (map_ch_o),
    .bank_o    (map_bank_o),
    .row_o     (map_row_o),
    .tag_o     (map_tag_o),
    .no_bank_o (map_none_o)
  );

endmodule
