// crunch_bank_select -- priority selection of the bank for one region.
//
// Given the RRT row of the address's super-region (a permutation of bank ids),
// the position of the region inside that super-region and the vector of
// powered-on banks, return the first active bank found walking the
// permutation from that position onwards, wrapping around to the start of the
// same super-region (the multi-namespace variant of consistent hashing). With
// all banks on this is simply row[pos].
//
// Purely combinational: the paper only requires the selection to run at
// hardware speed, comparable to ordinary bank-index selection. no_bank_o is
// raised when no bank is active (the cache is fully off).
module crunch_bank_select
  import crunch_pkg::*;
(
  input  rrt_row_t   perm_i,
  input  bank_t      pos_i,
  input  bank_mask_t active_i,
  output bank_t      bank_o,
  output logic       no_bank_o
);

  always_comb begin
    bank_o    = '0;
    no_bank_o = 1'b1;
    for (int unsigned k = 0; k < NUM_BANKS; k++) begin
      automatic bank_t idx  = bank_t'(pos_i + bank_t'(k));   // wraps modulo 8
      automatic bank_t cand = perm_i[idx*BANK_W +: BANK_W];
      if (no_bank_o && active_i[cand]) begin
        bank_o    = cand;
        no_bank_o = 1'b0;
      end
    end
  end

endmodule
