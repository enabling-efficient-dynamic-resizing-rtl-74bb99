// crunch_pkg -- shared constants, types and helper functions of the CRUNCH
// bank-remapping substrate for a die-stacked DRAM cache.
//
// Geometry (one DRAM-cache channel): 8 banks, 2 KB rows, one cache set per row
// with 29 ways, 2048 rows per bank; four channels in the whole cache (128 MB).
// These numbers are the evaluated configuration. The physical-address layout,
// the widened tag and the command bundles towards the DRAM and the off-chip
// memory are this design's own choices.
//
// Line address (physical address without the 6 offset bits of a 64 B block):
//   [CH_W-1:0]                         channel
//   [CH_W +: REGION_W]                 region index (super-region | position)
//   [CH_W+REGION_W +: ROW_W]           row (= set) inside the bank
//   [LINE_W-1 : CH_W+REGION_W+ROW_W]   upper tag bits
// The tag kept in the DRAM row is {upper tag bits, region index}: the region
// index is what lets a line be re-homed after its bank changed.
//
// Region remapping table (RRT): super-region s holds the cyclic order
//   RRT[s][j] = RRT_BASE[(s / 8) % 4][j] XOR (s % 8)
// The four base orders were chosen so that, over the 32 rows, the bank that
// follows any bank b (its fail-over bank when b alone is off) is each of the
// other seven banks four or five times, and no two rows are rotations of each
// other.
package crunch_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned NUM_CH     = 4;     // channels per DRAM stack
  localparam int unsigned CH_W       = 2;
  localparam int unsigned NUM_BANKS  = 8;     // banks per channel
  localparam int unsigned BANK_W     = 3;
  localparam int unsigned NUM_SR     = 32;    // super-regions (RRT rows)
  localparam int unsigned SR_W       = 5;
  localparam int unsigned REGION_W   = SR_W + BANK_W;   // 256 regions
  localparam int unsigned ROWS       = 2048;  // rows (sets) per bank
  localparam int unsigned ROW_W      = 11;
  localparam int unsigned WAYS       = 29;    // ways per set (one 2 KB row)
  localparam int unsigned WAY_W      = 5;
  localparam int unsigned BLK_BITS   = 512;   // 64 B cache block
  localparam int unsigned PA_W       = 48;    // physical address bits
  localparam int unsigned LINE_W     = PA_W - 6;
  localparam int unsigned TAGHI_W    = LINE_W - CH_W - REGION_W - ROW_W;
  localparam int unsigned TAG_W      = TAGHI_W + REGION_W;
  localparam int unsigned HIER_D     = 16;    // HIER tree arity

  typedef logic [BANK_W-1:0]    bank_t;
  typedef logic [NUM_BANKS-1:0] bank_mask_t;
  typedef logic [ROW_W-1:0]     row_t;
  typedef logic [WAY_W-1:0]     way_t;
  typedef logic [REGION_W-1:0]  region_t;
  typedef logic [TAG_W-1:0]     tag_t;
  typedef logic [LINE_W-1:0]    line_addr_t;
  typedef logic [BLK_BITS-1:0]  blk_t;
  typedef logic [NUM_BANKS*BANK_W-1:0] rrt_row_t;   // 24-bit RRT entry

  // --------------------------------------------------- DRAM-cache commands
  typedef enum logic [1:0] {
    DC_RD_META = 2'd0,   // read the tag/state of all ways of one row
    DC_RD_BLK  = 2'd1,   // read the data of one way
    DC_WR_BLK  = 2'd2,   // write data, tag and state of one way (valid=1)
    DC_INV     = 2'd3    // invalidate one way
  } dc_op_e;

  typedef struct packed {
    dc_op_e op;
    bank_t  bank;
    row_t   row;
    way_t   way;
    tag_t   tag;
    logic   dirty;
    blk_t   data;
  } dc_cmd_t;

  typedef struct packed {
    logic valid;
    logic dirty;
    tag_t tag;
  } way_meta_t;

  typedef way_meta_t [WAYS-1:0] row_meta_t;

  // Write-back of one block to off-chip memory.
  typedef struct packed {
    line_addr_t line;
    blk_t       data;
  } wb_req_t;

  // ------------------------------------------------------- address helpers
  function automatic logic [CH_W-1:0] line_channel(line_addr_t l);
    return l[CH_W-1:0];
  endfunction

  function automatic region_t line_region(line_addr_t l);
    return l[CH_W +: REGION_W];
  endfunction

  function automatic row_t line_row(line_addr_t l);
    return l[CH_W+REGION_W +: ROW_W];
  endfunction

  function automatic tag_t line_tag(line_addr_t l);
    return {l[LINE_W-1 -: TAGHI_W], l[CH_W +: REGION_W]};
  endfunction

  function automatic region_t tag_region(tag_t t);
    return t[REGION_W-1:0];
  endfunction

  // Rebuild the line address from a stored tag, its row and its channel.
  function automatic line_addr_t tag_to_line(tag_t t, row_t r, logic [CH_W-1:0] ch);
    return {t[TAG_W-1 -: TAGHI_W], r, t[REGION_W-1:0], ch};
  endfunction

  // ------------------------------------------------------------- RRT content
  typedef logic [2:0] base_order_t [4][8];
  localparam base_order_t RRT_BASE = '{
    '{3'd0, 3'd5, 3'd7, 3'd6, 3'd2, 3'd4, 3'd3, 3'd1},
    '{3'd0, 3'd6, 3'd2, 3'd1, 3'd4, 3'd7, 3'd5, 3'd3},
    '{3'd0, 3'd4, 3'd3, 3'd1, 3'd7, 3'd6, 3'd2, 3'd5},
    '{3'd0, 3'd7, 3'd4, 3'd6, 3'd3, 3'd5, 3'd2, 3'd1}
  };

  // Bank id at position j of super-region s (8-bank tables only).
  function automatic bank_t rrt_entry(int unsigned s, int unsigned j);
    return bank_t'(RRT_BASE[(s / 8) % 4][j % 8] ^ 3'(s % 8));
  endfunction

endpackage
