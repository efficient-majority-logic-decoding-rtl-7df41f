// tb_maj_gate -- exhaustive test of the threshold gate, at the decoder's
// 4-of-6 setting and at a 2-of-3 setting.
module tb_maj_gate;
  int checks = 0, failures = 0;
  logic [5:0] a6;  logic o6;
  logic [2:0] a3;  logic o3;

  maj_gate                          dut  (.in_bits(a6), .out(o6));
  maj_gate #(.N_IN(3), .THRESH(2))  dut3 (.in_bits(a3), .out(o3));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 64; v++) begin
      a6 = 6'(v); a3 = 3'(v);
      #1;
      checks++;
      if (o6 !== ($countones(a6) >= 4)) begin failures++; $display("FAIL 6-in %b -> %b", a6, o6); end
      if (v < 8) begin
        checks++;
        if (o3 !== ($countones(a3) >= 2)) begin failures++; $display("FAIL 3-in %b -> %b", a3, o3); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
