// lut_b: the LUT half of one adder bit, feeding one cell (CC) of a carry chain.
//
// o5 is the half-sum (propagate) and o6 the carry-generate of add1 and add2.
// When ci (the carry-in of the adder's least significant cell) is 1, the adder
// subtracts and add2 is inverted first: o5 = add1 xor ~add2. Together with one
// carry-chain cell this forms a full adder, O = o5 xor carry-in.
//
// Follows the paper for o5 (sum, with the inversion for subtraction) and for
// o6 = add1 & add2 in addition mode. In subtraction mode o6 uses the inverted
// operand, add1 & ~add2, which is this design's choice: with the literal
// add1 & add2 the chain could never generate a carry while subtracting.
// Purely combinational.
module lut_b (
  input  logic add1,
  input  logic add2,
  input  logic ci,     // 0: add, 1: subtract
  output logic o5,     // propagate / half-sum, to the carry chain's select input
  output logic o6      // generate, to the carry chain's data input
);
  logic add2_eff;
  always_comb begin
    add2_eff = add2 ^ ci;
    o5       = add1 ^ add2_eff;
    o6       = add1 & add2_eff;
  end
endmodule
