// tb_rm25_sys_encoder -- checks that the encoder is systematic on positions
// 0..15 and that its output is a word of RM(2,5) (orthogonal to all
// monomials of degree <= 2), for every unit vector and for random inputs.
module tb_rm25_sys_encoder;
  import tb_rm_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [15:0] info;
  word_t cw;

  rm25_sys_encoder dut (.info(info), .codeword(cw));

  task automatic check_one(input logic [15:0] v);
    info = v;
    #1;
    checks++;
    if (cw[15:0] !== v || !in_code(cw)) begin
      failures++; $display("FAIL info=%h cw=%h", v, cw);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_one('0);
    for (int i = 0; i < 16; i++) check_one(16'(1) << i);
    for (int it = 0; it < 2000; it++) check_one(16'($urandom));
    // linearity against the reference code: a reference codeword's own
    // information bits must reproduce it
    for (int it = 0; it < 500; it++) begin
      automatic word_t c = random_codeword();
      info = c[15:0];
      #1;
      checks++;
      if (cw !== c) begin failures++; $display("FAIL reencode %h -> %h", c, cw); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
