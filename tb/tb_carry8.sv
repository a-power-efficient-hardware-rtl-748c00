// tb_carry8: drives the chain as an 8-bit adder (s = a ^ b, di = a & b, or
// di = a, both valid generate inputs) and compares the sum and every carry out
// with integer addition. Also a chain of pure propagates passes ci through.
module tb_carry8;
  int checks = 0, failures = 0;
  logic       ci;
  logic [7:0] s, di, o, co;

  carry8 dut (.ci(ci), .s(s), .di(di), .o(o), .co(co));

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int a, b, c;
      a  = int'($urandom_range(255));
      b  = int'($urandom_range(255));
      c  = int'($urandom_range(1));
      ci = 1'(c);
      s  = 8'(a ^ b);
      di = (t % 2 == 0) ? 8'(a & b) : 8'(a);
      #1;
      checks++;
      if (o !== 8'(a + b + c)) begin
        failures++;
        $display("FAIL sum a=%0d b=%0d ci=%0d got %0d", a, b, c, o);
      end
      for (int i = 0; i < 8; i++) begin
        int lo;
        lo = (a % (1 << (i + 1))) + (b % (1 << (i + 1))) + c;
        checks++;
        if (co[i] !== 1'(lo >> (i + 1))) begin
          failures++;
          $display("FAIL co[%0d] a=%0d b=%0d ci=%0d", i, a, b, c);
        end
      end
    end
    s = 8'hFF; di = 8'h00; ci = 1'b1;
    #1;
    checks++;
    if (co !== 8'hFF || o !== 8'h00) begin
      failures++;
      $display("FAIL propagate chain: o=%h co=%h", o, co);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
