// info_bit_corrector -- second-step unit of the majority-logic decoder, one per
// information position j.
//
// Its inputs are the first-step outputs of the six 2-flats that meet pairwise
// only in position j. An error at j makes all six of them odd; an error
// elsewhere touches at most one of them. With at most three errors in the
// word, at least four of the six are odd exactly when position j is wrong,
// so a 4-of-6 majority gate decides, and the received bit is inverted when
// it fires. Purely combinational.
module info_bit_corrector
  import rm25_pkg::*;
(
  input  logic                     y_bit,     // received bit at position j
  input  logic [FLATS_PER_POS-1:0] flat_odd,  // first-step outputs of its 6 flats
  output logic                     err,       // position j is in error
  output logic                     info_bit   // corrected bit
);

  maj_gate #(.N_IN(FLATS_PER_POS), .THRESH(MAJ_THRESH)) u_maj (
    .in_bits (flat_odd),
    .out     (err)
  );

  assign info_bit = y_bit ^ err;

endmodule
