// tb_lut_c: exhaustive check of the exponent output cell (bit kept unless zero).
module tb_lut_c;
  int checks = 0, failures = 0;
  logic pe_n, zero, o6;

  lut_c dut (.pe_n(pe_n), .zero(zero), .o6(o6));

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {zero, pe_n} = 2'(i);
      #1;
      checks++;
      if (o6 !== (i == 1)) begin
        failures++;
        $display("FAIL pe=%b zero=%b got %b", pe_n, zero, o6);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
