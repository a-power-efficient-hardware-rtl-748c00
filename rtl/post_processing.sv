// post_processing: sign, zero handling and renormalisation of the L-Mul product.
//
// Takes the two FP8 operands (for the sign and the zero test) and the raw
// results of the exponent adder (pe, EW+1 bits) and the mantissa adder (pm,
// MW+2 bits), and packs the product {sign, exponent[EW:0], mantissa[MW-1:0]},
// EW+MW+2 = 9 bits. The exponent keeps one bit more than an FP8 exponent, as in
// the paper's output word.
//   sign     : lut_a, x[7] xor y[7]
//   zero     : x[6:0] == 0 or y[6:0] == 0 (the rule printed in the paper's
//              datapath drawing)
//   exponent : one lut_c per bit, pe cleared when zero
//   mantissa : lut_d for the top bit, one lut_e per lower bit: {1, pm[MW-1:1]}
//              when pm[MW+1:MW] = 2'b10, pm[MW-1:0] otherwise, 0 when zero.
// The renormalisation step for the exponent is already inside pe (bias*).
// Purely combinational.
module post_processing #(
  parameter int unsigned MW = 3,           // mantissa bits
  parameter int unsigned EW = 7 - MW       // exponent bits
) (
  input  logic [7:0]        fp8_x,
  input  logic [7:0]        fp8_y,
  input  logic [EW:0]       pe,
  input  logic [MW+1:0]     pm,
  output logic [EW+MW+1:0]  product
);
  logic zero;
  logic sign;
  logic [EW:0]   exp_o;
  logic [MW-1:0] man_o;

  assign zero = (fp8_x[6:0] == 7'd0) || (fp8_y[6:0] == 7'd0);

  lut_a u_sign (.x_sign(fp8_x[7]), .y_sign(fp8_y[7]), .o6(sign));

  for (genvar n = 0; n <= EW; n++) begin : g_exp
    lut_c u_c (.pe_n(pe[n]), .zero(zero), .o6(exp_o[n]));
  end

  lut_d u_d (.pm_m1(pm[MW+1]), .pm_m(pm[MW]), .pm_k(pm[MW-1]), .zero(zero),
             .o6(man_o[MW-1]));

  for (genvar k = 0; k + 1 < MW; k++) begin : g_man
    lut_e u_e (.pm_m1(pm[MW+1]), .pm_m(pm[MW]), .pm_k1(pm[k+1]), .pm_k(pm[k]),
               .zero(zero), .o6(man_o[k]));
  end

  assign product = {sign, exp_o, man_o};
endmodule
