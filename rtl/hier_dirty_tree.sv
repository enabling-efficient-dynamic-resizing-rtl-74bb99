// hier_dirty_tree -- hierarchical dirty bits (HIER) of one DRAM-cache bank.
//
// A perfectly balanced D-ary tree of counters over the bank's rows. A leaf is
// one bit per row: the row holds at least one dirty block. Each node above
// counts the dirty rows below it, and the root counts the dirty rows of the
// whole bank. With the paper's R = 2048 rows and D = 16 the levels are
// 2048 x 1 bit, 128 x 5 bits, 8 x 9 bits and one 12-bit root: 2772 bits,
// the figure the paper gives. The shape is fixed to three levels above the
// leaves, the root having ROWS/(D*D) children, which fits the paper's size.
//
// Update port: upd_valid with upd_row and upd_dirty (1 = the row now holds a
// dirty block, 0 = the row is now clean). An update that does not change the
// leaf is ignored; one that does is carried up to the root in the same cycle
// (the paper only says propagation is short and off the critical path).
//
// Search port: a pulse on q_start with q_cursor asks for the first dirty row
// at or after q_cursor. The walk reads one tree node (all children of it) per
// cycle: root level, then the middle level, then a leaf word, skipping every
// subtree whose counter is zero. q_done pulses with q_found and q_row; a
// search takes 3 cycles when the first candidate subtree holds the answer and
// restarts from the root after a subtree below the cursor is exhausted.
// The update and search ports may be used in the same cycle.
module hier_dirty_tree #(
  parameter int unsigned ROWS = 2048,
  parameter int unsigned D    = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     upd_valid,
  input  logic [$clog2(ROWS)-1:0]  upd_row,
  input  logic                     upd_dirty,
  input  logic                     q_start,
  input  logic [$clog2(ROWS)-1:0]  q_cursor,
  output logic                     q_busy,
  output logic                     q_done,
  output logic                     q_found,
  output logic [$clog2(ROWS)-1:0]  q_row,
  output logic [$clog2(ROWS+1)-1:0] dirty_rows_o
);

  localparam int unsigned RW   = $clog2(ROWS);
  localparam int unsigned DW   = $clog2(D);
  localparam int unsigned NL   = ROWS / D;         // leaf words
  localparam int unsigned RF   = ROWS / (D * D);   // root fan-out
  localparam int unsigned RFW  = (RF > 1) ? $clog2(RF) : 1;
  localparam int unsigned W1   = $clog2(D + 1);
  localparam int unsigned W2   = $clog2(D * D + 1);
  localparam int unsigned WR   = $clog2(ROWS + 1);
  // Storage of the whole tree, in bits (2772 for the default size).
  localparam int unsigned STORAGE_BITS = ROWS + NL * W1 + RF * W2 + WR;

  logic [D-1:0]  leaf_q [NL];
  logic [W1-1:0] l1_q   [NL];    // one counter per leaf word
  logic [W2-1:0] l2_q   [RF];    // one counter per middle node
  logic [WR-1:0] root_q;

  assign dirty_rows_o = root_q;

  // ------------------------------------------------------------- updates
  logic [RW-DW-1:0] u_l1;
  logic [RFW-1:0]   u_l2;
  logic [DW-1:0]    u_bit;
  logic             u_change;

  assign u_l1     = upd_row[RW-1:DW];
  assign u_l2     = RFW'(upd_row >> (2 * DW));
  assign u_bit    = upd_row[DW-1:0];
  assign u_change = upd_valid && (leaf_q[u_l1][u_bit] != upd_dirty);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < NL; i++) begin
        leaf_q[i] <= '0;
        l1_q[i]   <= '0;
      end
      for (int unsigned i = 0; i < RF; i++) l2_q[i] <= '0;
      root_q <= '0;
    end else if (u_change) begin
      leaf_q[u_l1][u_bit] <= upd_dirty;
      if (upd_dirty) begin
        l1_q[u_l1] <= l1_q[u_l1] + 1'b1;
        l2_q[u_l2] <= l2_q[u_l2] + 1'b1;
        root_q     <= root_q + 1'b1;
      end else begin
        l1_q[u_l1] <= l1_q[u_l1] - 1'b1;
        l2_q[u_l2] <= l2_q[u_l2] - 1'b1;
        root_q     <= root_q - 1'b1;
      end
    end
  end

  // ------------------------------------------------------------- search
  typedef enum logic [1:0] {S_IDLE, S_ROOT, S_MID, S_LEAF} walk_e;
  walk_e         st_q;
  logic [RW:0]   cur_q;       // one extra bit marks "past the last row"

  logic [RFW-1:0]   c2;
  logic [DW-1:0]    c1, c0;
  assign c2 = RFW'(cur_q[RW-1:0] >> (2 * DW));
  assign c1 = cur_q[2*DW-1:DW];
  assign c0 = cur_q[DW-1:0];

  // First non-zero child at or after a start index, for each level.
  logic            f2_ok, f1_ok, f0_ok;
  logic [RFW-1:0]  f2;
  logic [DW-1:0]   f1, f0;
  logic [RW-DW-1:0] mid_base;

  assign mid_base = (RW-DW)'(c2) << DW;

  always_comb begin
    f2_ok = 1'b0; f2 = '0;
    for (int unsigned i = 0; i < RF; i++)
      if (!f2_ok && i >= c2 && l2_q[i] != '0) begin f2_ok = 1'b1; f2 = RFW'(i); end
    f1_ok = 1'b0; f1 = '0;
    for (int unsigned i = 0; i < D; i++)
      if (!f1_ok && i >= c1 && l1_q[mid_base + (RW-DW)'(i)] != '0) begin
        f1_ok = 1'b1; f1 = DW'(i);
      end
    f0_ok = 1'b0; f0 = '0;
    for (int unsigned i = 0; i < D; i++)
      if (!f0_ok && i >= c0 && leaf_q[cur_q[RW-1:DW]][i]) begin f0_ok = 1'b1; f0 = DW'(i); end
  end

  // Cursor at the start of the next leaf word / next middle node.
  logic [RW:0] next_leaf_word, next_mid_node;
  assign next_leaf_word = ({cur_q[RW:DW], {DW{1'b0}}}) + (RW+1)'(D);
  assign next_mid_node  = ({cur_q[RW:2*DW], {(2*DW){1'b0}}}) + (RW+1)'(D * D);

  assign q_busy = (st_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q    <= S_IDLE;
      cur_q   <= '0;
      q_done  <= 1'b0;
      q_found <= 1'b0;
      q_row   <= '0;
    end else begin
      q_done <= 1'b0;
      unique case (st_q)
        S_IDLE: if (q_start) begin
          cur_q <= {1'b0, q_cursor};
          st_q  <= S_ROOT;
        end
        S_ROOT: begin
          if (cur_q[RW] || root_q == '0 || !f2_ok) begin
            q_done <= 1'b1; q_found <= 1'b0; st_q <= S_IDLE;
          end else begin
            if (f2 != c2) cur_q <= (RW+1)'(f2) << (2 * DW);
            st_q <= S_MID;
          end
        end
        S_MID: begin
          if (!f1_ok) begin
            cur_q <= next_mid_node;
            st_q  <= S_ROOT;
          end else begin
            if (f1 != c1) cur_q <= {cur_q[RW:2*DW], f1, {DW{1'b0}}};
            st_q <= S_LEAF;
          end
        end
        S_LEAF: begin
          if (!f0_ok) begin
            cur_q <= next_leaf_word;
            st_q  <= S_ROOT;
          end else begin
            q_done  <= 1'b1;
            q_found <= 1'b1;
            q_row   <= {cur_q[RW-1:DW], f0};
            st_q    <= S_IDLE;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

endmodule
