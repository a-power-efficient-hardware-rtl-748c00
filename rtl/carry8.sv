// carry8: logic model of an 8-cell FPGA carry chain (one CC per bit).
//
// Each cell i takes a propagate bit s[i] and a generate bit di[i]. The carry
// into cell 0 is ci. Cell i outputs o[i] = s[i] xor c[i] and passes on
// c[i+1] = s[i] ? c[i] : di[i], which is co[i]. This is the fast carry-lookahead
// chain of the logic slice: a multiplexer and an XOR per bit, as in the slice
// drawing of the paper. On an FPGA this maps onto the vendor's carry primitive;
// here it is written as plain logic so that any tool can build it.
// Purely combinational.
module carry8 (
  input  logic       ci,
  input  logic [7:0] s,    // propagate, from the LUTs' sum output
  input  logic [7:0] di,   // generate, from the LUTs' carry output
  output logic [7:0] o,    // sum bits
  output logic [7:0] co    // carry out of every cell
);
  logic [8:0] c;

  assign c[0] = ci;
  for (genvar i = 0; i < 8; i++) begin : g_cell
    assign o[i]     = s[i] ^ c[i];
    assign c[i + 1] = s[i] ? c[i] : di[i];
  end
  assign co = c[8:1];
endmodule
