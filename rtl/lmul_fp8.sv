// lmul_fp8: registered L-Mul FP8 approximate multiplier (top level).
//
// L-Mul replaces the mantissa product of a floating-point multiply by a
// constant: (1+mx)(1+my) ~ 1 + mx + my + 2^-l(m). What remains is two small
// adders (exponent and mantissa) and a little post-processing, which map onto
// LUTs and carry chains.
//
// Interface: fp8_x and fp8_y are captured in input registers on every rising
// clock edge; the combinational datapath (lmul_datapath) feeds an output
// register. product = {sign, exponent[EW:0], mantissa[MW-1:0]}, 9 bits, with
// the exponent in the operands' bias and one bit wider than theirs.
// Timing: a pair presented before edge t appears on product after edge t+1
// (two-cycle latency), one new pair per cycle.
// The register count (8 + 8 + 9 = 25 flip-flops) matches the paper's reported
// flip-flop count; the input/output registers themselves are described in the
// paper, the active-low asynchronous reset that clears them is this design's
// choice. MW selects the format (1..6: E6M1 .. E1M6); the default 3 is E4M3,
// the paper's main configuration.
module lmul_fp8 #(
  parameter int unsigned MW = 3,
  parameter int unsigned EW = 7 - MW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [7:0]       fp8_x,
  input  logic [7:0]       fp8_y,
  output logic [EW+MW+1:0] product
);
  logic [7:0]       x_q, y_q;
  logic [EW+MW+1:0] product_d;

  initial begin
    assert (MW >= 1 && MW <= 6 && EW == 7 - MW)
      else $error("lmul_fp8: MW must be 1..6 and EW = 7 - MW");
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_q <= '0;
      y_q <= '0;
    end else begin
      x_q <= fp8_x;
      y_q <= fp8_y;
    end
  end

  lmul_datapath #(.MW(MW), .EW(EW)) u_dp (.fp8_x(x_q), .fp8_y(y_q), .product(product_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) product <= '0;
    else        product <= product_d;
  end
endmodule
