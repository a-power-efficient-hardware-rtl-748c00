// tb_lut_b: exhaustive check of the adder LUT cell. In addition mode o5 must be
// the half-sum and o6 the and of the operands; in subtraction mode the second
// operand is inverted first. Also checks that o5/o6 plus a carry-in give a
// correct full-adder sum and carry (o5 ? cin : o6).
module tb_lut_b;
  int checks = 0, failures = 0;
  logic a, b, ci, o5, o6;

  lut_b dut (.add1(a), .add2(b), .ci(ci), .o5(o5), .o6(o6));

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      int bb, sum, cin;
      {ci, a, b} = 3'(i);
      #1;
      bb = ci ? (b ? 0 : 1) : (b ? 1 : 0);
      checks++;
      if (o5 !== 1'((a + bb) % 2) || o6 !== 1'((a + bb) / 2)) begin
        failures++;
        $display("FAIL a=%b b=%b ci=%b: o5=%b o6=%b", a, b, ci, o5, o6);
      end
      for (cin = 0; cin < 2; cin++) begin
        sum = a + bb + cin;
        checks++;
        if ((o5 ^ 1'(cin)) !== 1'(sum % 2) || (o5 ? 1'(cin) : o6) !== 1'(sum / 2)) begin
          failures++;
          $display("FAIL full adder a=%b b=%b ci=%b cin=%0d", a, b, ci, cin);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
