// exponent_adder: the exponent half of the L-Mul datapath.
//
// Computes pe = x_e + y_e + bias*(pm_carry), modulo 2^(EW+1), with two chained
// adders as in the paper: an EW-bit adder for x_e + y_e, whose carry out becomes
// bit EW of the second operand, then an (EW+1)-bit adder that adds bias*.
// bias* folds the format's exponent bias together with the renormalisation
// step demanded by the mantissa carry bits pm_carry = P_m[MW+1:MW]:
// -bias for 00, -bias+2 for 11, -bias+1 otherwise (the paper's bias* table).
// bias* is added as an (EW+1)-bit two's-complement constant with carry-in 0;
// the carry out of the second adder is dropped, so a product whose exponent
// leaves the range 0 .. 2^(EW+1)-1 wraps around (the paper does not describe
// overflow or underflow handling).
// Purely combinational.
module exponent_adder
  import lmul_pkg::*;
#(
  parameter int unsigned EW = 4      // exponent bits (E4M3: 4)
) (
  input  logic [EW-1:0] x_e,
  input  logic [EW-1:0] y_e,
  input  logic [1:0]    pm_carry,    // P_m[MW+1:MW] from the mantissa adder
  output logic [EW:0]   pe
);
  localparam logic [EW:0] BIAS_00 = (EW + 1)'(bias_star(EW, CARRY_00));
  localparam logic [EW:0] BIAS_01 = (EW + 1)'(bias_star(EW, CARRY_01));
  localparam logic [EW:0] BIAS_11 = (EW + 1)'(bias_star(EW, CARRY_11));

  logic [EW-1:0] s1;
  logic          c1;
  logic [EW:0]   bias_sel;
  logic          c2_unused;

  always_comb begin
    unique case (mant_carry_e'(pm_carry))
      CARRY_00: bias_sel = BIAS_00;
      CARRY_11: bias_sel = BIAS_11;
      default:  bias_sel = BIAS_01;   // CARRY_01, CARRY_10
    endcase
  end

  cc_adder #(.N(EW)) u_stage1 (.a(x_e), .b(y_e), .sub(1'b0), .sum(s1), .cout(c1));
  cc_adder #(.N(EW + 1)) u_stage2 (.a({c1, s1}), .b(bias_sel), .sub(1'b0),
                                   .sum(pe), .cout(c2_unused));
endmodule
