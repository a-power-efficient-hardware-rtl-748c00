// tb_cc_adder: checks the LUT + carry-chain adder at several widths (3, 5, 7,
// 8 and a two-chain 12) in addition and subtraction mode against integer
// arithmetic: sum modulo 2^N and the carry out (for subtraction: a >= b).
module tb_cc_adder;
  int checks = 0, failures = 0;

  logic [11:0] a, b;
  logic        sub;
  logic [2:0]  s3;  logic c3;
  logic [4:0]  s5;  logic c5;
  logic [6:0]  s7;  logic c7;
  logic [7:0]  s8;  logic c8;
  logic [11:0] s12; logic c12;

  cc_adder #(.N(3))  u3  (.a(a[2:0]), .b(b[2:0]), .sub(sub), .sum(s3),  .cout(c3));
  cc_adder #(.N(5))  u5  (.a(a[4:0]), .b(b[4:0]), .sub(sub), .sum(s5),  .cout(c5));
  cc_adder #(.N(7))  u7  (.a(a[6:0]), .b(b[6:0]), .sub(sub), .sum(s7),  .cout(c7));
  cc_adder #(.N(8))  u8  (.a(a[7:0]), .b(b[7:0]), .sub(sub), .sum(s8),  .cout(c8));
  cc_adder #(.N(12)) u12 (.a(a),      .b(b),      .sub(sub), .sum(s12), .cout(c12));

  task automatic chk(input int n, input int got_s, input int got_c);
    int av, bv, full, es, ec;
    av = int'(a) % (1 << n);
    bv = int'(b) % (1 << n);
    if (sub) begin
      full = av - bv;
      ec   = (av >= bv) ? 1 : 0;
    end else begin
      full = av + bv;
      ec   = (full >= (1 << n)) ? 1 : 0;
    end
    es = ((full % (1 << n)) + (1 << n)) % (1 << n);
    checks++;
    if (got_s != es || got_c != ec) begin
      failures++;
      $display("FAIL N=%0d sub=%b a=%0d b=%0d: got %0d/%0d expected %0d/%0d",
               n, sub, av, bv, got_s, got_c, es, ec);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      a   = 12'($urandom);
      b   = 12'($urandom);
      sub = (t >= 10000);
      #1;
      chk(3,  int'(s3),  int'(c3));
      chk(5,  int'(s5),  int'(c5));
      chk(7,  int'(s7),  int'(c7));
      chk(8,  int'(s8),  int'(c8));
      chk(12, int'(s12), int'(c12));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
