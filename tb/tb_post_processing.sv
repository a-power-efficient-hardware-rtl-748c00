// tb_post_processing: drives the post-processing stage of the E4M3 and E1M6
// formats with random operands and random raw adder results, and compares the
// packed product with the paper's rules written out directly: sign = x7^y7;
// zero if either magnitude is 0; exponent pe (0 when zero); mantissa
// {1, pm[MW-1:1]} for carry 2'b10, else pm[MW-1:0] (0 when zero).
module tb_post_processing;
  int checks = 0, failures = 0;
  int n_zero = 0, n_shift = 0;

  logic [7:0] x, y;
  logic [4:0] pe3;  logic [4:0] pm3;  logic [8:0] p3;   // MW = 3, EW = 4
  logic [1:0] pe6;  logic [7:0] pm6;  logic [8:0] p6;   // MW = 6, EW = 1

  post_processing #(.MW(3)) u3 (.fp8_x(x), .fp8_y(y), .pe(pe3), .pm(pm3), .product(p3));
  post_processing #(.MW(6)) u6 (.fp8_x(x), .fp8_y(y), .pe(pe6), .pm(pm6), .product(p6));

  function automatic logic [8:0] expect_p(input int mw, input int pe, input int pm,
                                          input logic [7:0] xx, input logic [7:0] yy);
    int c, mant;
    logic zero;
    zero = (xx[6:0] == 0) || (yy[6:0] == 0);
    c = pm >> mw;
    mant = (c == 2) ? ((1 << (mw - 1)) + ((pm % (1 << mw)) / 2)) : (pm % (1 << mw));
    if (zero) begin
      pe = 0;
      mant = 0;
    end
    return 9'(((xx[7] ^ yy[7]) ? 256 : 0) + (pe << mw) + mant);
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      x = 8'($urandom);
      y = 8'($urandom);
      if (t % 7 == 0) x[6:0] = 7'd0;
      if (t % 11 == 0) y[6:0] = 7'd0;
      pe3 = 5'($urandom); pm3 = 5'($urandom);
      pe6 = 2'($urandom); pm6 = 8'($urandom);
      #1;
      if (x[6:0] == 0 || y[6:0] == 0) n_zero++;
      if (pm3[4:3] == 2'b10) n_shift++;
      checks += 2;
      if (p3 !== expect_p(3, int'(pe3), int'(pm3), x, y)) begin
        failures++;
        $display("FAIL MW=3 x=%h y=%h pe=%0d pm=%b: got %b", x, y, pe3, pm3, p3);
      end
      if (p6 !== expect_p(6, int'(pe6), int'(pm6), x, y)) begin
        failures++;
        $display("FAIL MW=6 x=%h y=%h pe=%0d pm=%b: got %b", x, y, pe6, pm6, p6);
      end
    end
    checks++;
    if (n_zero == 0 || n_shift == 0) begin
      failures++;
      $display("FAIL zero (%0d) or shift (%0d) case never driven", n_zero, n_shift);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
