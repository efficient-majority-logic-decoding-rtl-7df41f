// rm25_info_decoder -- two-step majority-logic decoder for RM(2,5) that
// corrects the 16 information positions {0,...,15} only.
//
// Step 1: 30 flat_checksum units, one per 2-flat of rm25_pkg::FLAT_POS, each
// deciding whether the errors on its 2-flat are odd in number. Step 2: 16
// info_bit_corrector units; the one for position j takes the six 2-flats that
// contain j (rm25_pkg::flats_at_pos) and flips bit j on a 4-of-6 majority.
// That is 30 + 16 = 46 majority gates, against 48 + 32 = 80 when every
// position is corrected. Correct output is guaranteed for up to three errors
// anywhere in the 32-bit word; beyond that the output is undefined, which
// codeword_checker detects.
//
// y[31] is not read (see flat_checksum), so a word of the punctured [31,16,7]
// code can be applied with bit 31 at any value. Purely combinational: the
// path is two majority gates deep after the 8-input parity trees.
module rm25_info_decoder
  import rm25_pkg::*;
(
  input  word_t                y,         // received word, bit j = position j
  output info_t                info,      // corrected information bits
  output info_t                err_pos,   // information positions that were flipped
  output logic [NUM_FLATS-1:0] flat_odd   // first-step outputs
);

  for (genvar f = 0; f < NUM_FLATS; f++) begin : g_step1
    flat_checksum #(.FLAT_IDX(f)) u_flat (
      .y    (y),
      .sums (),
      .odd  (flat_odd[f])
    );
  end

  for (genvar j = 0; j < K; j++) begin : g_step2
    localparam flat_sel_t SEL = flats_at_pos(j);
    logic [FLATS_PER_POS-1:0] votes;
    always_comb begin
      for (int unsigned i = 0; i < FLATS_PER_POS; i++) votes[i] = flat_odd[SEL[i]];
    end
    info_bit_corrector u_corr (
      .y_bit    (y[j]),
      .flat_odd (votes),
      .err      (err_pos[j]),
      .info_bit (info[j])
    );
  end

endmodule
