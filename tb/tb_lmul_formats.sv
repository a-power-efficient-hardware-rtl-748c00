// tb_lmul_formats: runs the multiplier in all six FP8 formats (E6M1, E5M2,
// E4M3, E3M4, E2M5, E1M6) over every one of the 65536 operand pairs.
//
// Each format is one lmul_fp8 instance with MW set; every product is compared
// with the reference model two cycles after its operands were applied. For
// each format the test also reports error statistics of the approximation
// against the exact product of the two FP8 values (subnormal inputs decoded as
// such): error probability EP, mean absolute error MAE, mean relative error
// MRE, mean squared error MSE and normalised error distance NED (mean error
// over the largest error), over the pairs with a nonzero exact product whose result exponent stays inside the
// 0 .. 2^(EW+1)-1 range of the output word. These statistics are printed for
// information only; the pass criterion is bit-exact agreement with the model,
// plus the renormalisation case "carry 2'b10" occurring in the formats with
// four or more mantissa bits.
module tb_lmul_formats;
  import lmul_ref_pkg::*;

  localparam int LAT = 2;

  int checks = 0, failures = 0;
  int n_done = 0;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (70000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fp8_value(input int mw, input int mag);
    int ew, e, m, b, sc;
    ew = 7 - mw;
    b  = ref_bias(ew);
    e  = mag >> mw;
    m  = mag % (1 << mw);
    sc = (e == 0) ? 1 - b : e - b;
    if (e == 0) return (2.0 ** sc) * (real'(m) / real'(1 << mw));
    return (2.0 ** sc) * (1.0 + real'(m) / real'(1 << mw));
  endfunction

  initial begin
    rst_n = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
  end

  for (genvar g = 1; g <= 6; g++) begin : g_fmt
    localparam int MW = g;
    localparam int EW = 7 - g;
    logic [7:0] x, y;
    logic [8:0] p;
    logic [7:0] hx [$];
    logic [7:0] hy [$];

    lmul_fp8 #(.MW(MW)) dut (.clk(clk), .rst_n(rst_n), .fp8_x(x), .fp8_y(y), .product(p));

    initial begin
      int n_c10, n_err, n_stat, bad;
      real sum_rel, sum_ed, sum_ed2, max_ed;
      n_c10 = 0; n_err = 0; n_stat = 0; sum_rel = 0.0; bad = 0;
      sum_ed = 0.0; sum_ed2 = 0.0; max_ed = 0.0;
      x = '0; y = '0;
      wait (rst_n === 1'b1);
      for (int i = 0; i < 65536 + LAT; i++) begin
        @(negedge clk);
        if (i >= LAT) begin
          logic [7:0] ox, oy;
          int c, raw_e;
          ox = hx.pop_front();
          oy = hy.pop_front();
          checks++;
          if (p !== lmul_ref(MW, ox, oy)) begin
            failures++;
            bad++;
            if (bad < 5)
              $display("FAIL E%0dM%0d %h x %h: got %b expected %b", EW, MW, ox, oy, p,
                       lmul_ref(MW, ox, oy));
          end
          c = ref_carry(MW, ox, oy);
          if (c == 2 && ox[6:0] != 0 && oy[6:0] != 0) n_c10++;
          raw_e = int'(ox[6:0] >> MW) + int'(oy[6:0] >> MW) - ref_bias(EW)
                  + ((c == 0) ? 0 : (c == 3) ? 2 : 1);
          if (ox[7] == 1'b0 && oy[7] == 1'b0 && raw_e >= 0 && raw_e < (1 << (EW + 1))) begin
            real ex, ap;
            int pexp;
            pexp = int'(p[7:MW]) - ref_bias(EW);
            ex = fp8_value(MW, int'(ox[6:0])) * fp8_value(MW, int'(oy[6:0]));
            if (ex != 0.0) begin
              ap = (2.0 ** pexp) *
                   (1.0 + real'(int'(p[MW-1:0])) / real'(1 << MW));
              n_stat++;
              if (ap != ex) n_err++;
              begin
                real ed;
                ed = (ap > ex) ? (ap - ex) : (ex - ap);
                sum_rel += ed / ex;
                sum_ed  += ed;
                sum_ed2 += ed * ed;
                if (ed > max_ed) max_ed = ed;
              end
            end
          end
        end
        if (i < 65536) begin
          x = 8'(i >> 8);
          y = 8'(i);
          hx.push_back(x);
          hy.push_back(y);
        end
      end
      $display("E%0dM%0d: %0d pairs, mismatches=%0d, carry10=%0d, over %0d in-range pairs: EP=%.3f MAE=%.3g MRE=%.3f MSE=%.3g NED=%.3f",
               EW, MW, 65536, bad, n_c10, n_stat, real'(n_err) / real'(n_stat),
               sum_ed / real'(n_stat), sum_rel / real'(n_stat), sum_ed2 / real'(n_stat),
               sum_ed / real'(n_stat) / max_ed);
      if (MW >= 4) begin
        checks++;
        if (n_c10 == 0) begin
          failures++;
          $display("FAIL E%0dM%0d: carry pattern 2'b10 never occurred", EW, MW);
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
