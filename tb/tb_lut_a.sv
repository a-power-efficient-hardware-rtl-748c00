// tb_lut_a: exhaustive check of the sign cell against the truth table of xor.
module tb_lut_a;
  int checks = 0, failures = 0;
  logic xs, ys, o6;
  logic exp_tab [4] = '{1'b0, 1'b1, 1'b1, 1'b0};   // index {xs, ys}

  lut_a dut (.x_sign(xs), .y_sign(ys), .o6(o6));

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {xs, ys} = 2'(i);
      #1;
      checks++;
      if (o6 !== exp_tab[i]) begin
        failures++;
        $display("FAIL x=%b y=%b got %b", xs, ys, o6);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
