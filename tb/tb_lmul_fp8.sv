// tb_lmul_fp8: end-to-end test of the registered L-Mul multiplier at its
// default parameters (E4M3).
//
// Checks that reset clears the output, then streams all 65536 operand pairs,
// one per clock, and compares every product with the reference model
// (lmul_ref_pkg) two cycles after the pair was applied, which also checks the
// two-cycle latency and the one-pair-per-cycle rate. A few hand-worked products
// are checked as well, e.g. 7.5 x 7.5: mantissas 7 + 7 + 1 = 15 = 2'b01_111,
// exponent 9 + 9 - 7 + 1 = 12, product 9'b0_01100_111 (= 60.0).
// Counts how often each mechanism of the datapath occurs and fails if one
// never does: a zero operand, each mantissa carry pattern that E4M3 can reach
// (00 and 01), a negative product, and an exponent outside the FP8 range
// (bit EW of the 5-bit exponent set, or wrapped below zero).
module tb_lmul_fp8;
  import lmul_ref_pkg::*;

  localparam int MW = 3;
  localparam int EW = 4;
  localparam int LAT = 2;

  int checks = 0, failures = 0;
  int n_zero = 0, n_c00 = 0, n_c01 = 0, n_neg = 0, n_range = 0;

  logic       clk = 1'b0;
  logic       rst_n;
  logic [7:0] x, y;
  logic [8:0] p;

  lmul_fp8 dut (.clk(clk), .rst_n(rst_n), .fp8_x(x), .fp8_y(y), .product(p));

  always #5 clk = ~clk;

  // operands applied at each cycle, for checking LAT cycles later
  logic [7:0] hx [$];
  logic [7:0] hy [$];

  initial begin : watchdog
    repeat (70000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic directed(input logic [7:0] a, input logic [7:0] b, input logic [8:0] e);
    @(negedge clk);
    x = a; y = b;
    repeat (LAT) @(posedge clk);
    #1;
    checks++;
    if (p !== e) begin
      failures++;
      $display("FAIL directed %h x %h: got %b expected %b", a, b, p, e);
    end
  endtask

  initial begin
    rst_n = 1'b0;
    x = 8'h4F; y = 8'h4F;
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (p !== '0) begin
      failures++;
      $display("FAIL product not cleared by reset: %b", p);
    end
    @(negedge clk);
    rst_n = 1'b1;

    directed(8'h4F, 8'h4F, 9'b0_01100_111);   // 7.5 x 7.5 -> 60
    directed(8'h38, 8'h38, 9'b0_00111_001);   // 1.0 x 1.0 -> 1.125 (offset 2^-3)
    directed(8'hC0, 8'h38, 9'b1_01000_001);   // -2.0 x 1.0 -> -2.25
    directed(8'h80, 8'h4F, 9'b1_00000_000);   // -0 x 7.5 -> zero, sign kept
    directed(8'h7E, 8'h7E, 9'b0_11000_101);   // 448 x 448: 6+6+1=13, 15+15-7+1=24

    // exhaustive stream, one pair per cycle; outputs checked LAT cycles later
    for (int i = 0; i < 65536 + LAT; i++) begin
      @(negedge clk);
      if (i >= LAT) begin
        logic [7:0] ox, oy;
        logic [8:0] e;
        int c;
        ox = hx.pop_front();
        oy = hy.pop_front();
        e  = lmul_ref(MW, ox, oy);
        c  = ref_carry(MW, ox, oy);
        checks++;
        if (p !== e) begin
          failures++;
          if (failures < 10)
            $display("FAIL %h x %h: got %b expected %b", ox, oy, p, e);
        end
        if (ox[6:0] == 0 || oy[6:0] == 0) n_zero++;
        else begin
          if (c == 0) n_c00++;
          if (c == 1) n_c01++;
          if (int'(ox[6:3]) + int'(oy[6:3]) - 7 + c >= 16 ||
              int'(ox[6:3]) + int'(oy[6:3]) - 7 + c < 0) n_range++;
        end
        if (p[8]) n_neg++;
      end
      if (i < 65536) begin
        x = 8'(i >> 8);
        y = 8'(i);
        hx.push_back(x);
        hy.push_back(y);
      end
    end

    $display("mechanisms: zero=%0d carry00=%0d carry01=%0d negative=%0d out_of_range=%0d",
             n_zero, n_c00, n_c01, n_neg, n_range);
    checks++;
    if (n_zero == 0 || n_c00 == 0 || n_c01 == 0 || n_neg == 0 || n_range == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
