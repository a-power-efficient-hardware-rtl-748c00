// lmul_datapath: combinational L-Mul FP8 multiplier (no registers).
//
// fp8_x and fp8_y are FP8 words {sign, exponent[EW-1:0], mantissa[MW-1:0]}.
// The mantissa adder forms x_m + y_m + 2^(MW-l(MW)); its two carry bits pick
// the bias* constant that the exponent adder adds to x_e + y_e; the
// post-processing stage applies the sign, the zero rule and the mantissa
// shift. product is {sign, exponent[EW:0], mantissa[MW-1:0]} (9 bits).
module lmul_datapath #(
  parameter int unsigned MW = 3,
  parameter int unsigned EW = 7 - MW
) (
  input  logic [7:0]       fp8_x,
  input  logic [7:0]       fp8_y,
  output logic [EW+MW+1:0] product
);
  logic [MW+1:0] pm;
  logic [EW:0]   pe;

  mantissa_adder #(.MW(MW)) u_mant (.x_m(fp8_x[MW-1:0]), .y_m(fp8_y[MW-1:0]), .pm(pm));

  exponent_adder #(.EW(EW)) u_exp (.x_e(fp8_x[6:MW]), .y_e(fp8_y[6:MW]),
                                   .pm_carry(pm[MW+1:MW]), .pe(pe));

  post_processing #(.MW(MW), .EW(EW)) u_post (.fp8_x(fp8_x), .fp8_y(fp8_y),
                                              .pe(pe), .pm(pm), .product(product));
endmodule
