// tb_lut_d: exhaustive check of the top mantissa cell against the mantissa
// rule: 0 for a zero operand, 1 when the carry bits are 2'b10, else P_m[m-1].
module tb_lut_d;
  int checks = 0, failures = 0;
  logic m1, m, k, zero, o6;

  lut_d dut (.pm_m1(m1), .pm_m(m), .pm_k(k), .zero(zero), .o6(o6));

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      logic e;
      {zero, m1, m, k} = 4'(i);
      #1;
      if (zero)                 e = 1'b0;
      else if ({m1, m} == 2'b10) e = 1'b1;
      else                      e = k;
      checks++;
      if (o6 !== e) begin
        failures++;
        $display("FAIL carry=%b%b k=%b zero=%b got %b", m1, m, k, zero, o6);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
