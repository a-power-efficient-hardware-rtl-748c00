// lut_e: one of the lower mantissa bits of the product.
//
// Mantissa bit k (k < MW-1) is P_m[k+1] when the carry bits P_m[MW+1:MW] are
// 2'b10 (result shifted right by one) and P_m[k] otherwise; it is cleared for
// a zero operand. This follows the paper's mantissa equation (its LUT_E).
// Purely combinational.
module lut_e (
  input  logic pm_m1,  // P_m[MW+1]
  input  logic pm_m,   // P_m[MW]
  input  logic pm_k1,  // P_m[k+1]
  input  logic pm_k,   // P_m[k]
  input  logic zero,
  output logic o6
);
  logic shift;
  always_comb begin
    shift = pm_m1 & ~pm_m;
    o6    = (shift ? pm_k1 : pm_k) & ~zero;
  end
endmodule
