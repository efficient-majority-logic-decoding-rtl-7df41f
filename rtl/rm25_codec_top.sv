// rm25_codec_top -- RM(2,5) codec with majority-logic decoding at the
// information positions.
//
// Encode path: a 16-bit information word is encoded systematically
// (rm25_sys_encoder) and registered. Decode path: a 32-bit received word goes
// through the two-step majority-logic decoder (rm25_info_decoder, 46 majority
// gates) and through codeword_checker, which re-encodes the result and reports
// whether the word was within t = 3 errors of it; the result is registered.
// dec_punctured_i marks a word of the punctured [31,16,7] code, whose bit 31
// is then ignored.
//
// Timing: each path has one register stage, so a result appears one clock
// after its input with dec_valid_o/enc_valid_o high, and a new word may be
// applied every clock. There is no back-pressure. rst_n is asynchronous and
// active low; it clears the valid flags only. The register stages and this
// port list are this design's own choice; the decoding is the published one.
module rm25_codec_top
  import rm25_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // encoder
  input  logic        enc_valid_i,
  input  info_t       enc_info_i,
  output logic        enc_valid_o,
  output word_t       enc_word_o,
  // decoder
  input  logic        dec_valid_i,
  input  word_t       dec_word_i,
  input  logic        dec_punctured_i,
  output logic        dec_valid_o,
  output dec_result_t dec_result_o
);

  word_t                enc_word;
  info_t                dec_info;
  info_t                dec_err;
  logic [5:0]           distance;
  logic                 ok;

  rm25_sys_encoder u_enc (
    .info     (enc_info_i),
    .codeword (enc_word)
  );

  rm25_info_decoder u_dec (
    .y        (dec_word_i),
    .info     (dec_info),
    .err_pos  (dec_err),
    .flat_odd ()
  );

  codeword_checker u_chk (
    .y         (dec_word_i),
    .info      (dec_info),
    .punctured (dec_punctured_i),
    .distance      (distance),
    .ok        (ok)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enc_valid_o <= 1'b0;
      dec_valid_o <= 1'b0;
    end else begin
      enc_valid_o <= enc_valid_i;
      dec_valid_o <= dec_valid_i;
    end
  end

  always_ff @(posedge clk) begin
    if (enc_valid_i) enc_word_o <= enc_word;
    if (dec_valid_i) dec_result_o <= '{info: dec_info, err_pos: dec_err, distance: distance, ok: ok};
  end

endmodule
