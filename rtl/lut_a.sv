// lut_a: sign of the L-Mul product.
//
// One LUT configuration of the multiplier: O6 = fp8_x[7] xor fp8_y[7]. The sign
// is not cleared for a zero operand, exactly as in the paper's LUT_A, which has
// no "zero" input. Purely combinational.
module lut_a (
  input  logic x_sign,   // fp8_x[7]
  input  logic y_sign,   // fp8_y[7]
  output logic o6        // sign of the product
);
  always_comb o6 = x_sign ^ y_sign;
endmodule
