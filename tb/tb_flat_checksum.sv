// tb_flat_checksum -- tests the first-step unit of every one of the 30 2-flats.
//
// For each unit the testbench recovers the six check-sum masks by applying
// single-bit words and checks that each is an 8-point affine 3-flat of
// GF(32) that contains the unit's 2-flat and avoids position 31, and that the
// six are distinct. It then applies codewords plus 0..3 random errors and
// checks that every sum is the error parity over its mask and that the vote
// equals the error parity on the 2-flat.
module tb_flat_checksum;
  import tb_rm_ref_pkg::*;
  localparam int NF = 30;

  int checks = 0, failures = 0;
  word_t y;
  logic [5:0] sums [NF];
  logic       odd  [NF];

  for (genvar f = 0; f < NF; f++) begin : g
    flat_checksum #(.FLAT_IDX(f)) dut (.y(y), .sums(sums[f]), .odd(odd[f]));
  end

  function automatic word_t flat_word(input int f);
    word_t m = '0;
    for (int i = 0; i < 4; i++) m[rm25_pkg::FLAT_POS[f][i]] = 1'b1;
    return m;
  endfunction

  // point of each position and position of each point, filled at time 0
  logic [4:0] pt [32];
  int         pos_of [32];

  function automatic bit is_affine3(input word_t m);
    // 8 points, closed under a + b + c
    int pts [8];
    int n = 0;
    int p = 0;
    while (p < 32) begin
      if (m[p]) begin
        if (n == 8) return 0;
        pts[n] = p;
        n++;
      end
      p++;
    end
    if (n != 8) return 0;
    for (int a = 0; a < n; a++)
      for (int b = 0; b < n; b++)
        for (int c = 0; c < n; c++)
          if (!m[pos_of[pt[pts[a]] ^ pt[pts[b]] ^ pt[pts[c]]]]) return 0;
    return 1;
  endfunction

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t masks [NF][6];
    for (int p = 0; p < 32; p++) begin
      pt[p] = ref_point(p);
      pos_of[ref_point(p)] = p;
    end
    for (int f = 0; f < NF; f++) for (int c = 0; c < 6; c++) masks[f][c] = '0;
    for (int p = 0; p < 32; p++) begin
      y = word_t'(1) << p;
      #1;
      for (int f = 0; f < NF; f++) for (int c = 0; c < 6; c++) masks[f][c][p] = sums[f][c];
    end
    for (int f = 0; f < NF; f++) begin
      for (int c = 0; c < 6; c++) begin
        checks++;
        if (!is_affine3(masks[f][c]) || (masks[f][c] & flat_word(f)) != flat_word(f) || masks[f][c][31]) begin
          failures++; $display("FAIL flat %0d check %0d mask %h", f, c, masks[f][c]);
        end
        for (int c2 = 0; c2 < c; c2++) begin
          checks++;
          if (masks[f][c] == masks[f][c2]) begin failures++; $display("FAIL flat %0d duplicate masks", f); end
        end
      end
    end
    for (int it = 0; it < 2000; it++) begin
      automatic word_t c = random_codeword();
      automatic word_t e = random_error(it % 4, 32);
      y = c ^ e;
      #1;
      for (int f = 0; f < NF; f++) begin
        checks++;
        if (odd[f] !== ^(e & flat_word(f))) begin
          failures++; $display("FAIL flat %0d e=%h odd=%b", f, e, odd[f]);
        end
        for (int k = 0; k < 6; k++) begin
          checks++;
          if (sums[f][k] !== ^(e & masks[f][k])) begin failures++; $display("FAIL sum flat %0d", f); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
