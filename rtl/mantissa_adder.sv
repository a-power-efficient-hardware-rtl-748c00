// mantissa_adder: the mantissa half of the L-Mul datapath.
//
// Computes pm = x_m + y_m + lmul_offset(MW), an (MW+2)-bit result, with two
// chained adders as in the paper: an MW-bit adder for x_m + y_m, whose carry
// out becomes bit MW of the second operand, then an (MW+1)-bit adder that adds
// the constant 2km = 2^(MW - l(MW)). pm[MW+1:MW] are the two carry bits that
// decide the renormalisation (see post_processing); pm[MW-1:0] is the
// unnormalised fraction. Both adders add (carry-in 0), as the grounded carry-in
// of both chains in the paper's datapath drawing shows.
// Purely combinational.
module mantissa_adder
  import lmul_pkg::*;
#(
  parameter int unsigned MW = 3      // mantissa bits (E4M3: 3)
) (
  input  logic [MW-1:0] x_m,
  input  logic [MW-1:0] y_m,
  output logic [MW+1:0] pm
);
  localparam logic [MW:0] KM2 = (MW + 1)'(lmul_offset(MW));

  logic [MW-1:0] s1;
  logic          c1;
  logic [MW:0]   s2;
  logic          c2;

  cc_adder #(.N(MW)) u_stage1 (.a(x_m), .b(y_m), .sub(1'b0), .sum(s1), .cout(c1));
  cc_adder #(.N(MW + 1)) u_stage2 (.a({c1, s1}), .b(KM2), .sub(1'b0), .sum(s2), .cout(c2));

  assign pm = {c2, s2};
endmodule
