// rm25_pkg -- shared types, constants and elaboration-time tables for the
// information-position majority-logic decoder of the Reed--Muller code RM(2,5).
//
// Code geometry. RM(2,5) has length 32, dimension 16 and minimum distance 8,
// so it corrects t = 3 errors. Its positions are the 32 points of the affine
// space Z_2^5, identified with GF(32) = GF(2)[x]/(1 + x^2 + x^5): position j
// (0 <= j <= 30) is alpha^j and position 31 is the zero vector. Bit j of every
// 32-bit word in this design is position j.
//
// Decoder tables. The information positions are {0,...,15} (the orbit
// representative of type (1)). FLAT_POS lists the 30 affine 2-flats (4 points
// each) whose first-step majority gates suffice to correct all 16 information
// positions; every information position lies in exactly six of them and those
// six meet pairwise only in that position. The list and its order are the
// published ones (9 flats with 4 information positions, 18 with 3, 3 with 2).
//
// From a 2-flat U the functions below derive, at elaboration time:
//   check_masks(f)  the six 3-flats V = U u (U + w) containing U that do not
//                   contain the zero vector (so position 31 is never read and
//                   the same tables serve the punctured [31,16,7] cyclic code);
//                   a check sum is the parity of the received word over V.
//   flats_at_pos(j) the indices of the six 2-flats that contain position j,
//                   which feed the second-step gate of information position j.
//
// Encoder table. GEN_ROWS is the systematic generator matrix for information
// positions {0..15} (row i has a 1 in column i and zeros in the other columns
// 0..15), written with bit j = column j.
package rm25_pkg;

  localparam int unsigned M          = 5;                  // Z_2^m
  localparam int unsigned R          = 2;                  // order r
  localparam int unsigned N          = 1 << M;             // code length 32
  localparam int unsigned K          = 16;                 // dimension
  localparam int unsigned T          = (1 << (M - R - 1)) - 1;  // 3 errors
  localparam int unsigned NUM_FLATS  = 30;                 // first-step gates
  localparam int unsigned CHECKS     = (1 << (M - R)) - 2; // 6 check sums per flat
  localparam int unsigned FLATS_PER_POS = CHECKS;          // 6 flats per position
  localparam int unsigned MAJ_THRESH = 1 << (M - R - 1);   // 4 of 6
  localparam logic [M-1:0] FIELD_POLY = 5'b00101;          // alpha^5 = alpha^2 + 1

  typedef logic [N-1:0]            word_t;   // received word / codeword
  typedef logic [K-1:0]            info_t;   // information vector
  typedef logic [$clog2(N)-1:0]    pos_t;    // a position 0..31
  typedef logic [M-1:0]            vec_t;    // a point of Z_2^5
  typedef logic [CHECKS-1:0][N-1:0] mask6_t; // six check-sum masks
  typedef logic [FLATS_PER_POS-1:0][$clog2(NUM_FLATS)-1:0] flat_sel_t;

  // Decoder output bundle.
  typedef struct packed {
    info_t          info;      // corrected information bits
    info_t          err_pos;   // information positions that were flipped
    logic [5:0]     distance;  // distance of the re-encoded word to the input
    logic           ok;        // distance <= T: the t-error assumption holds
  } dec_result_t;

  // The 30 2-flats, as positions, in the published order.
  localparam pos_t FLAT_POS [NUM_FLATS][4] = '{
    '{ 0,  1,  8, 12}, '{ 0,  4,  5,  7}, '{ 1,  6,  7, 13}, '{ 1,  9, 11, 15},
    '{ 2,  4,  9, 12}, '{ 2,  6, 10, 15}, '{ 2,  7,  8, 14}, '{ 3,  5, 10, 13},
    '{ 4,  6, 11, 14},
    '{ 0,  2, 13, 25}, '{ 0,  3,  9, 17}, '{ 0, 10, 11, 26}, '{ 0, 14, 15, 18},
    '{ 1,  3, 14, 26}, '{ 1,  4, 10, 18}, '{ 2,  5, 11, 19}, '{ 3,  4,  8, 22},
    '{ 3,  6, 12, 20}, '{ 3,  7, 11, 16}, '{ 4, 13, 15, 17}, '{ 5,  6,  9, 22},
    '{ 5,  8, 15, 26}, '{ 5, 12, 14, 28}, '{ 7, 10, 12, 27}, '{ 8,  9, 10, 19},
    '{ 9, 13, 14, 16}, '{11, 12, 13, 22},
    '{ 1,  2, 17, 22}, '{ 6,  8, 24, 25}, '{ 7, 15, 25, 30}
  };

  // Systematic generator matrix, information positions {0..15}; bit j = column j.
  localparam word_t GEN_ROWS [K] = '{
    32'h8FAF_0001, 32'h9F5E_0002, 32'hBEBC_0004, 32'hFD78_0008,
    32'h755F_0010, 32'hE511_0020, 32'h458D_0040, 32'h84B5_0080,
    32'h896A_0100, 32'h92D4_0200, 32'hA5A8_0400, 32'hCB50_0800,
    32'h190F_1000, 32'h321E_2000, 32'h643C_4000, 32'hC7D7_8000
  };

  // Point of Z_2^5 at position p: alpha^p, or 0 for p = 31.
  function automatic vec_t pos_to_vec(input int unsigned p);
    vec_t v;
    if (p >= N - 1) return '0;
    v = vec_t'(1);
    for (int unsigned i = 0; i < p; i++)
      v = v[M-1] ? ((v << 1) ^ FIELD_POLY) : (v << 1);
    return v;
  endfunction

  // Position of a point of Z_2^5 (inverse of pos_to_vec).
  function automatic int unsigned vec_to_pos(input vec_t v);
    for (int unsigned p = 0; p < N; p++)
      if (pos_to_vec(p) == v) return p;
    return 0;
  endfunction

  // Characteristic vector of the 2-flat f.
  function automatic word_t flat_mask(input int unsigned f);
    word_t m = '0;
    for (int unsigned i = 0; i < 4; i++) m[FLAT_POS[f][i]] = 1'b1;
    return m;
  endfunction

  // Masks of the six 3-flats that contain the 2-flat f and avoid the zero
  // vector. A 3-flat through U = a + L (L a 2-dim subspace) is U u (U + w)
  // for w outside L; the seven distinct ones are found by scanning w in
  // increasing order and keeping each new one that does not hold position 31.
  function automatic mask6_t check_masks(input int unsigned f);
    mask6_t masks = '0;
    vec_t   u [4];
    vec_t   lin [4];
    word_t  m;
    int unsigned n = 0;
    for (int unsigned i = 0; i < 4; i++) u[i] = pos_to_vec(32'(FLAT_POS[f][i]));
    for (int unsigned i = 0; i < 4; i++) lin[i] = u[0] ^ u[i];
    for (int unsigned w = 0; w < N; w++) begin
      logic in_l, seen;
      in_l = 1'b0;
      for (int unsigned i = 0; i < 4; i++) if (lin[i] == vec_t'(w)) in_l = 1'b1;
      if (!in_l) begin
        m = flat_mask(f);
        for (int unsigned i = 0; i < 4; i++) m[vec_to_pos(u[i] ^ vec_t'(w))] = 1'b1;
        seen = 1'b0;
        for (int unsigned k = 0; k < CHECKS; k++) if (k < n && masks[k] == m) seen = 1'b1;
        if (!seen && !m[N-1] && n < CHECKS) begin
          masks[n] = m;
          n++;
        end
      end
    end
    return masks;
  endfunction

  // Indices of the six 2-flats that contain position p, in increasing order.
  function automatic flat_sel_t flats_at_pos(input int unsigned p);
    flat_sel_t sel = '0;
    int unsigned n = 0;
    word_t m;
    for (int unsigned f = 0; f < NUM_FLATS; f++) begin
      m = flat_mask(f);
      if (m[p] && n < FLATS_PER_POS) begin
        sel[n] = ($clog2(NUM_FLATS))'(f);
        n++;
      end
    end
    return sel;
  endfunction

endpackage
