// tb_exponent_adder: exhaustive check of the exponent adder for all six FP8
// formats (EW = 6 .. 1): every pair of exponent fields and every value of the
// mantissa carry bits. Expected: (x_e + y_e + bias*) mod 2^(EW+1), with bias*
// taken from a table written out by hand (-bias, -bias+1, -bias+2).
module tb_exponent_adder;
  int checks = 0, failures = 0;
  int n_done = 0;
  int biases [7] = '{0, 0, 1, 3, 7, 15, 31};   // index EW

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 1; g <= 6; g++) begin : g_fmt
    localparam int EW = g;
    logic [EW-1:0] xe, ye;
    logic [1:0]    cy;
    logic [EW:0]   pe;

    exponent_adder #(.EW(EW)) dut (.x_e(xe), .y_e(ye), .pm_carry(cy), .pe(pe));

    initial begin
      #(g);
      for (int i = 0; i < (1 << EW); i++)
        for (int j = 0; j < (1 << EW); j++)
          for (int c = 0; c < 4; c++) begin
            int adj, e;
            xe = EW'(i); ye = EW'(j); cy = 2'(c);
            #10;
            adj = (c == 0) ? 0 : (c == 3) ? 2 : 1;
            e = (i + j - biases[EW] + adj) & ((1 << (EW + 1)) - 1);
            checks++;
            if (int'(pe) != e) begin
              failures++;
              $display("FAIL EW=%0d xe=%0d ye=%0d carry=%0d: got %0d expected %0d",
                       EW, i, j, c, pe, e);
            end
          end
      n_done++;
    end
  end

  initial begin
    wait (n_done == 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
