// flat_checksum -- first-step unit of the majority-logic decoder, one per 2-flat.
//
// For the 2-flat U = FLAT_POS[FLAT_IDX] it forms six check sums, each the
// parity of the received word over one 3-flat V that contains U. Every such
// V is the support of a word of the dual code, so on a codeword all six sums
// are 0, and with at most three errors each sum equals the error parity on U
// plus the error parity on V \ U. The six V meet only in U, so at most three
// sums are disturbed by errors outside U, and the majority vote (4 of 6)
// returns the parity of the number of errors on U: odd = 1.
//
// Of the seven 3-flats through U the one holding the zero vector (position 31)
// is left out, so y[31] is never read; this lets the decoder serve the
// punctured [31,16,7] cyclic code unchanged. The masks come from
// rm25_pkg::check_masks at elaboration time. Purely combinational. The method
// and the choice of the six 3-flats are the published ones; the order of the
// six sums (by increasing direction w) is this design's own.
module flat_checksum
  import rm25_pkg::*;
#(
  parameter int unsigned FLAT_IDX = 0   // 0..29, index into FLAT_POS
) (
  input  word_t             y,     // received word
  output logic [CHECKS-1:0] sums,  // the six check sums
  output logic              odd    // odd number of errors on the 2-flat
);

  localparam mask6_t MASKS = check_masks(FLAT_IDX);

  always_comb begin
    for (int unsigned c = 0; c < CHECKS; c++) sums[c] = ^(y & MASKS[c]);
  end

  maj_gate #(.N_IN(CHECKS), .THRESH(MAJ_THRESH)) u_maj (
    .in_bits (sums),
    .out     (odd)
  );

endmodule
