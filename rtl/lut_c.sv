// lut_c: one exponent bit of the product.
//
// O6 = pe_n & ~zero: the bit of the exponent adder's result, cleared when
// either operand is zero (the paper's LUT_C). One instance per exponent bit.
// Purely combinational.
module lut_c (
  input  logic pe_n,   // P_e[n]
  input  logic zero,   // an operand is +/-0
  output logic o6
);
  always_comb o6 = pe_n & ~zero;
endmodule
