// tb_rm25_info_decoder -- exhaustive error-pattern test of the decoder.
//
// Every error pattern of weight 0..3 over the 32 positions (5489 patterns) is
// added to a fresh random codeword; the corrected information must equal
// positions 0..15 of the codeword and err_pos must equal the error pattern on
// those positions. A second pass checks punctured use: up to three errors on
// positions 0..30 with bit 31 set at random must decode the same way.
module tb_rm25_info_decoder;
  import tb_rm_ref_pkg::*;
  int checks = 0, failures = 0;
  word_t y;
  logic [15:0] info, err_pos;
  logic [29:0] flat_odd;
  int corrected = 0;

  rm25_info_decoder dut (.y(y), .info(info), .err_pos(err_pos), .flat_odd(flat_odd));

  task automatic apply(input word_t c, input word_t e);
    y = c ^ e;
    #1;
    checks++;
    if (info !== c[15:0] || err_pos !== e[15:0]) begin
      failures++;
      if (failures < 10) $display("FAIL c=%h e=%h info=%h err=%h", c, e, info, err_pos);
    end
    if (e[15:0] != 0) corrected++;
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(random_codeword(), '0);
    for (int a = 0; a < 32; a++) begin
      apply(random_codeword(), word_t'(1) << a);
      for (int b = a + 1; b < 32; b++) begin
        apply(random_codeword(), (word_t'(1) << a) | (word_t'(1) << b));
        for (int c = b + 1; c < 32; c++)
          apply(random_codeword(), (word_t'(1) << a) | (word_t'(1) << b) | (word_t'(1) << c));
      end
    end
    for (int it = 0; it < 3000; it++) begin
      automatic word_t e = random_error(it % 4, 31);
      e[31] = 1'($urandom_range(1, 0));
      apply(random_codeword(), e);
    end
    $display("patterns with information errors corrected: %0d", corrected);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
