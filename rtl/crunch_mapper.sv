// crunch_mapper -- address-to-bank mapping of a DRAM-cache access.
//
// Splits a line address into channel, region, row and upper tag bits (layout
// in crunch_pkg), reads the super-region's row from the RRT and selects the
// first active bank from the region's position. The row inside the bank does
// not change when the bank changes, so the tag stored in the row is widened
// with the region index (as with bank fail-over, where tags carry the
// bank-selection bits).
//
// Combinational: line_i in, channel/bank/row/tag out in the same cycle.
module crunch_mapper
  import crunch_pkg::*;
(
  input  line_addr_t        line_i,
  input  bank_mask_t        active_i,
  output logic [CH_W-1:0]   ch_o,
  output bank_t             bank_o,
  output row_t              row_o,
  output tag_t              tag_o,
  output logic              no_bank_o
);

  region_t  region;
  rrt_row_t perm;

  assign region = line_region(line_i);
  assign ch_o   = line_channel(line_i);
  assign row_o  = line_row(line_i);
  assign tag_o  = line_tag(line_i);

  crunch_rrt u_rrt (
    .sr_idx (region[REGION_W-1 -: SR_W]),
    .row_o  (perm)
  );

  crunch_bank_select u_sel (
    .perm_i    (perm),
    .pos_i     (region[BANK_W-1:0]),
    .active_i  (active_i),
    .bank_o    (bank_o),
    .no_bank_o (no_bank_o)
  );

endmodule
