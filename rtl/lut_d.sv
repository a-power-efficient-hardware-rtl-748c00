// lut_d: the highest mantissa bit of the product.
//
// When the mantissa carry bits P_m[MW+1:MW] are 2'b10 the unnormalised result
// is 11.x and is shifted right by one, so the top mantissa bit becomes the
// leading 1; otherwise it is P_m[MW-1]. The bit is cleared for a zero operand.
// O6 = ((pm_m1 & ~pm_m) | pm_k) & ~zero, following the paper's mantissa
// equation (its LUT_D). Purely combinational.
module lut_d (
  input  logic pm_m1,  // P_m[MW+1]
  input  logic pm_m,   // P_m[MW]
  input  logic pm_k,   // P_m[MW-1]
  input  logic zero,
  output logic o6
);
  always_comb o6 = ((pm_m1 & ~pm_m) | pm_k) & ~zero;
endmodule
