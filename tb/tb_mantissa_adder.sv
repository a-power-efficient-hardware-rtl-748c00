// tb_mantissa_adder: exhaustive check of the mantissa adder for all six FP8
// formats (MW = 1 .. 6): pm must equal x_m + y_m + 2^(MW - l(MW)), the offset
// written out by hand (1, 1, 1, 2, 2, 4). Also counts how often each carry
// pattern P_m[MW+1:MW] occurs, and requires 00, 01 and 10 to occur.
module tb_mantissa_adder;
  int checks = 0, failures = 0;
  int n_done = 0;
  int offs [7] = '{0, 1, 1, 1, 2, 2, 4};   // index MW
  int carry_seen [4] = '{0, 0, 0, 0};

  initial begin : watchdog
    #1000000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar g = 1; g <= 6; g++) begin : g_fmt
    localparam int MW = g;
    logic [MW-1:0] xm, ym;
    logic [MW+1:0] pm;

    mantissa_adder #(.MW(MW)) dut (.x_m(xm), .y_m(ym), .pm(pm));

    initial begin
      #(g);
      for (int i = 0; i < (1 << MW); i++)
        for (int j = 0; j < (1 << MW); j++) begin
          xm = MW'(i); ym = MW'(j);
          #10;
          checks++;
          carry_seen[int'(pm[MW+1:MW])]++;
          if (int'(pm) != i + j + offs[MW]) begin
            failures++;
            $display("FAIL MW=%0d xm=%0d ym=%0d: got %0d expected %0d",
                     MW, i, j, pm, i + j + offs[MW]);
          end
        end
      n_done++;
    end
  end

  initial begin
    wait (n_done == 6);
    $display("carry patterns 00:%0d 01:%0d 10:%0d 11:%0d",
             carry_seen[0], carry_seen[1], carry_seen[2], carry_seen[3]);
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (carry_seen[c] == 0) begin
        failures++;
        $display("FAIL carry pattern %0d never occurred", c);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
