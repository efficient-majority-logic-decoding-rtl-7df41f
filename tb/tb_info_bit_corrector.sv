// tb_info_bit_corrector -- exhaustive test of the second-step unit: all 64
// vote patterns with both received bit values.
module tb_info_bit_corrector;
  int checks = 0, failures = 0;
  logic y_bit, err, info_bit;
  logic [5:0] votes;

  info_bit_corrector dut (.y_bit(y_bit), .flat_odd(votes), .err(err), .info_bit(info_bit));

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 128; v++) begin
      {y_bit, votes} = 7'(v);
      #1;
      checks += 2;
      if (err !== ($countones(votes) >= 4)) begin failures++; $display("FAIL err %b", votes); end
      if (info_bit !== (y_bit ^ ($countones(votes) >= 4))) begin failures++; $display("FAIL bit %b %b", y_bit, votes); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
