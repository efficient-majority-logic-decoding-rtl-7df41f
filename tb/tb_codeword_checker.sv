// tb_codeword_checker -- applies a codeword plus 0..6 errors together with
// that codeword's own information bits, in both modes, and checks the
// reported distance (which must leave out position 31 in punctured mode) and
// the accept flag (distance <= 3). Wrong information must be rejected when
// few errors are present, since distinct codewords are 8 apart.
module tb_codeword_checker;
  import tb_rm_ref_pkg::*;
  int checks = 0, failures = 0;
  word_t y;
  logic [15:0] info;
  logic punct, ok;
  logic [5:0] distance_o;

  codeword_checker dut (.y(y), .info(info), .punctured(punct), .distance(distance_o), .ok(ok));

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 3000; it++) begin
      automatic word_t c = random_codeword();
      automatic word_t e = random_error(it % 7, 32);
      int w;
      punct = 1'(it / 7 % 2);
      y = c ^ e; info = c[15:0];
      #1;
      w = popcount(e) - ((punct && e[31]) ? 1 : 0);
      checks += 2;
      if (int'(distance_o) != w) begin failures++; $display("FAIL distance_o %0d vs %0d", distance_o, w); end
      if (ok !== (w <= 3)) begin failures++; $display("FAIL ok"); end
      // wrong information with at most 2 errors is never accepted
      if (popcount(e) <= 2) begin
        info = c[15:0] ^ 16'(1 << $urandom_range(15, 0));
        #1;
        checks++;
        if (ok) begin failures++; $display("FAIL accepted wrong info"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
