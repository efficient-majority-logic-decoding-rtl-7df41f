// tb_rm_ref_pkg -- reference model of RM(2,5) for the testbenches.
//
// It works from the algebraic definition of the code rather than from the
// design's tables: RM(2,5) is spanned by the evaluations of the 16 Boolean
// monomials of degree <= 2 in the five coordinates of the point alpha^p
// (position 31 being the zero point). Random codewords are random sums of
// these 16 words, and since the code is self-dual a word belongs to it exactly
// when it is orthogonal to all 16. Nothing here is synthesizable design.
package tb_rm_ref_pkg;

  typedef logic [31:0] word_t;

  // alpha^p in GF(32), alpha^5 = alpha^2 + 1; position 31 is the zero point.
  function automatic logic [4:0] ref_point(input int p);
    logic [4:0] v;
    if (p == 31) return 5'd0;
    v = 5'd1;
    repeat (p) v = v[4] ? {v[3:0], 1'b0} ^ 5'b00101 : {v[3:0], 1'b0};
    return v;
  endfunction

  // Evaluation word of monomial number n: 0 -> 1, 1..5 -> x_i, 6..15 -> x_i x_k.
  function automatic word_t monomial_word(input int n);
    word_t w;
    int a, b, idx;
    idx = 6; a = -1; b = -1;
    if (n >= 1 && n <= 5) a = n - 1;
    for (int i = 0; i < 5; i++)
      for (int k = i + 1; k < 5; k++) begin
        if (idx == n) begin a = i; b = k; end
        idx++;
      end
    for (int p = 0; p < 32; p++) begin
      logic [4:0] v = ref_point(p);
      w[p] = (a < 0) ? 1'b1 : (b < 0) ? v[a] : (v[a] & v[b]);
    end
    return w;
  endfunction

  function automatic word_t random_codeword();
    word_t c = '0;
    for (int n = 0; n < 16; n++) if ($urandom_range(1, 0) == 1) c ^= monomial_word(n);
    return c;
  endfunction

  function automatic bit in_code(input word_t c);
    for (int n = 0; n < 16; n++) if (^(c & monomial_word(n))) return 1'b0;
    return 1'b1;
  endfunction

  function automatic int popcount(input word_t w);
    int s = 0;
    for (int i = 0; i < 32; i++) s += int'(w[i]);
    return s;
  endfunction

  // Error word with exactly w distinct positions drawn from 0..lim-1.
  function automatic word_t random_error(input int w, input int lim);
    word_t e = '0;
    while (popcount(e) < w) e[$urandom_range(lim - 1, 0)] = 1'b1;
    return e;
  endfunction

endpackage
