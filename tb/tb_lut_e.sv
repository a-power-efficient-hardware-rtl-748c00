// tb_lut_e: exhaustive check of a lower mantissa cell against the mantissa
// rule: 0 for a zero operand, P_m[k+1] when the carry bits are 2'b10, else P_m[k].
module tb_lut_e;
  int checks = 0, failures = 0;
  logic m1, m, k1, k, zero, o6;

  lut_e dut (.pm_m1(m1), .pm_m(m), .pm_k1(k1), .pm_k(k), .zero(zero), .o6(o6));

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      logic e;
      {zero, m1, m, k1, k} = 5'(i);
      #1;
      if (zero)                 e = 1'b0;
      else if ({m1, m} == 2'b10) e = k1;
      else                      e = k;
      checks++;
      if (o6 !== e) begin
        failures++;
        $display("FAIL carry=%b%b k1=%b k=%b zero=%b got %b", m1, m, k1, k, zero, o6);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
