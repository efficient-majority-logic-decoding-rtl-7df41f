// rm25_sys_encoder -- systematic encoder for RM(2,5), information positions {0..15}.
//
// codeword = info * G, where G = rm25_pkg::GEN_ROWS is the generator matrix in
// systematic form: positions 0..15 of the codeword repeat the information
// vector and positions 16..31 are parity bits, each the XOR of the
// information bits whose row has a 1 in that column. Purely combinational.
module rm25_sys_encoder
  import rm25_pkg::*;
(
  input  info_t info,      // information vector
  output word_t codeword   // codeword, bit j = position j
);

  always_comb begin
    codeword = '0;
    for (int unsigned i = 0; i < K; i++)
      if (info[i]) codeword ^= GEN_ROWS[i];
  end

endmodule
