// crunch_rrt -- Region Remapping Table (RRT) of CRUNCH.
//
// A read-only table with one row per super-region. Each row is a wide word
// holding a permutation of all bank ids: 32 rows of 8 x 3-bit bank ids
// (24 bits, 96 bytes in all) by default, as in the paper. Position j of row s
// is the bank that owns region {s, j} when all banks are on; the order of the
// row is also the fail-over order within that super-region.
//
// The content is fixed at design time. The paper only asks for 32 row
// permutations that are not rotations of each other and whose fail-over banks
// are evenly spread when one bank is off; the XOR-translate construction of
// crunch_pkg::rrt_entry (four base orders, each XORed with 0..7) is this
// design's own way to meet that. The table therefore only supports 8 banks.
//
// Interface: sr_idx selects a row, row_o returns it (bank at position j in
// bits [3j+2:3j]). Read is combinational, like a small ROM in the controller.
module crunch_rrt
  import crunch_pkg::*;
#(
  parameter int unsigned N_SR = NUM_SR
) (
  input  logic [$clog2(N_SR)-1:0] sr_idx,
  output rrt_row_t                row_o
);

  function automatic rrt_row_t build_row(int unsigned s);
    rrt_row_t r;
    for (int unsigned j = 0; j < NUM_BANKS; j++) r[j*BANK_W +: BANK_W] = rrt_entry(s, j);
    return r;
  endfunction

  rrt_row_t table_q [N_SR];

  always_comb begin
    for (int unsigned s = 0; s < N_SR; s++) table_q[s] = build_row(s);
  end

  assign row_o = table_q[sr_idx];

endmodule
