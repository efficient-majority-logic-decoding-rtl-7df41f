// tb_rm25_codec_top -- end-to-end test of the codec at its default (and only)
// configuration.
//
// Phase 1 streams random information words through the encode path and checks
// each codeword one clock later: systematic on positions 0..15 and a word of
// RM(2,5) by the monomial test. Phase 2 takes those codewords, adds 0..4
// errors, sets the punctured flag on some words (then bit 31 is randomised
// and errors stay on positions 0..30) and streams them through the decode
// path with random idle cycles. Every result must arrive exactly one clock
// after its input; with at most three errors the information and the flipped
// positions must be exact and the distance must equal the error count; with
// four errors on the full code the word must be flagged.
//
// Each mechanism is counted (clean words, information-bit corrections,
// parity-only errors, four-error detection, punctured words, idle cycles,
// back-to-back words, encodes) and a mechanism that never occurred is a failure.
module tb_rm25_codec_top;
  import tb_rm_ref_pkg::*;
  import rm25_pkg::dec_result_t;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic enc_valid_i = 0, enc_valid_o;
  logic [15:0] enc_info_i = '0;
  word_t enc_word_o;
  logic dec_valid_i = 0, dec_punctured_i = 0, dec_valid_o;
  word_t dec_word_i = '0;
  dec_result_t dec_result_o;

  rm25_codec_top dut (.*);

  always #5 clk = ~clk;

  localparam int NWORDS = 4000;
  word_t cws [NWORDS];
  int n_clean, n_info_corr, n_parity_only, n_detect4, n_punct, n_idle, n_b2b, n_enc;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic mech(input string name, input int n);
    checks++;
    $display("%-28s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never occurred: %s", name); end
  endtask

  initial begin
    logic [15:0] info;
    word_t e, y;
    int w;
    bit p, prev_valid;
    repeat (3) @(posedge clk);
    // valid flags must be low out of reset
    checks++;
    if (enc_valid_o || dec_valid_o) begin failures++; $display("FAIL valid out of reset"); end
    rst_n = 1;

    // ---- phase 1: encode ----
    for (int i = 0; i < NWORDS; i++) begin
      @(negedge clk);
      info = 16'($urandom);
      enc_valid_i = 1; enc_info_i = info;
      @(posedge clk); #1;
      checks++;
      if (!enc_valid_o || enc_word_o[15:0] !== info || !in_code(enc_word_o)) begin
        failures++;
        if (failures < 10) $display("FAIL encode %h -> %h", info, enc_word_o);
      end
      cws[i] = enc_word_o;
      n_enc++;
    end
    @(negedge clk); enc_valid_i = 0;
    @(posedge clk); #1;
    checks++;
    if (enc_valid_o) begin failures++; $display("FAIL encode valid stuck"); end

    // ---- phase 2: decode ----
    prev_valid = 0;
    for (int i = 0; i < NWORDS; i++) begin
      @(negedge clk);
      if ($urandom_range(3, 0) == 0) begin
        // idle cycle: no result may appear
        dec_valid_i = 0;
        dec_word_i = word_t'($urandom);
        @(posedge clk); #1;
        checks++;
        if (dec_valid_o) begin failures++; $display("FAIL result without input"); end
        n_idle++;
        prev_valid = 0;
        @(negedge clk);
      end
      p = ($urandom_range(4, 0) == 0);
      w = p ? (i % 4) : (i % 5);
      e = random_error(w, p ? 31 : 32);
      y = cws[i] ^ e;
      if (p) y[31] = 1'($urandom);
      dec_valid_i = 1; dec_word_i = y; dec_punctured_i = p;
      if (prev_valid) n_b2b++;
      prev_valid = 1;
      @(posedge clk); #1;
      checks++;
      if (!dec_valid_o) begin failures++; $display("FAIL no result one clock after input"); end
      else if (w <= 3) begin
        checks++;
        if (dec_result_o.info !== cws[i][15:0] || dec_result_o.err_pos !== e[15:0]
            || int'(dec_result_o.distance) != w || !dec_result_o.ok) begin
          failures++;
          if (failures < 10) $display("FAIL decode c=%h e=%h p=%0b -> %p", cws[i], e, p, dec_result_o);
        end
        if (w == 0) n_clean++;
        else if (e[15:0] != 0) n_info_corr++;
        else n_parity_only++;
        if (p) n_punct++;
      end else begin
        checks++;
        if (dec_result_o.ok) begin failures++; $display("FAIL 4 errors accepted e=%h", e); end
        else n_detect4++;
      end
    end
    @(negedge clk); dec_valid_i = 0;

    mech("encodes", n_enc);
    mech("clean words", n_clean);
    mech("information-bit corrections", n_info_corr);
    mech("parity-only errors", n_parity_only);
    mech("four-error detections", n_detect4);
    mech("punctured-code words", n_punct);
    mech("idle cycles", n_idle);
    mech("back-to-back words", n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
