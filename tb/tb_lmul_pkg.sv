// tb_lmul_pkg: checks the constants of lmul_pkg against the values written out
// by hand: the bias* table for all six FP8 formats, the biases and the L-Mul
// offsets 2^(m - l(m)).
module tb_lmul_pkg;
  import lmul_pkg::*;
  int checks = 0, failures = 0;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // bias* for [m+1,m] = 00, 11, others, per format E6M1 .. E1M6
  int exp00 [6] = '{-31, -15, -7, -3, -1, 0};
  int exp11 [6] = '{-29, -13, -5, -1,  1, 2};
  int expot [6] = '{-30, -14, -6, -2,  0, 1};
  int expoff[6] = '{1, 1, 1, 2, 2, 4};
  int expl  [6] = '{1, 2, 3, 3, 4, 4};

  initial begin : watchdog
    #1000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 6; i++) begin
      int ew, mw;
      ew = 6 - i;
      mw = 1 + i;
      check($sformatf("bias* 00 E%0dM%0d", ew, mw), bias_star(ew, 2'b00), exp00[i]);
      check($sformatf("bias* 11 E%0dM%0d", ew, mw), bias_star(ew, 2'b11), exp11[i]);
      check($sformatf("bias* 01 E%0dM%0d", ew, mw), bias_star(ew, 2'b01), expot[i]);
      check($sformatf("bias* 10 E%0dM%0d", ew, mw), bias_star(ew, 2'b10), expot[i]);
      check($sformatf("bias E%0d", ew), bias(ew), -exp00[i]);
      check($sformatf("l(%0d)", mw), l_of_m(mw), expl[i]);
      check($sformatf("offset M%0d", mw), lmul_offset(mw), expoff[i]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
