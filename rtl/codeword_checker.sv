// codeword_checker -- checks the decoder's premise of at most t errors.
//
// The majority-logic decoder is only correct when no more than t = 3 errors
// hit the whole word. To test that after the fact, the corrected information
// is encoded again and the Hamming distance between that codeword and the
// received word is counted; the premise holds (ok = 1) when the distance is
// at most T. Four errors are therefore always caught on RM(2,5), whose
// minimum distance is 8. With punctured = 1 the word is taken as one of the
// [31,16,7] cyclic code obtained by deleting position 31, and bit 31 is left
// out of the count. Purely combinational.
//
// The re-encoding test itself is the published way of validating the result;
// reporting the distance and the punctured-mode input are this design's own.
module codeword_checker
  import rm25_pkg::*;
#(
  parameter int unsigned T_MAX = T   // largest accepted distance
) (
  input  word_t      y,          // received word
  input  info_t      info,       // corrected information from the decoder
  input  logic       punctured,  // 1: ignore position 31
  output logic [5:0] distance,       // distance of the re-encoded word to y
  output logic       ok          // distance <= T_MAX
);

  word_t reenc;
  word_t diff;

  rm25_sys_encoder u_enc (
    .info     (info),
    .codeword (reenc)
  );

  always_comb begin
    diff = reenc ^ y;
    if (punctured) diff[N-1] = 1'b0;
    distance = '0;
    for (int unsigned i = 0; i < N; i++) distance += 6'(diff[i]);
  end

  assign ok = (32'(distance) <= T_MAX);

endmodule
