// cc_adder: N-bit adder/subtractor made of N lut_b cells and a carry chain.
//
// sum = a + b (sub = 0) or a - b (sub = 1), both modulo 2^N; cout is the carry
// out of the top cell (for subtraction: 1 when a >= b). Each bit is one lut_b
// (half-sum and generate) plus one carry-chain cell; ceil(N/8) carry8 chains are
// cascaded, the unused cells of the last one getting zero inputs. The carry-in
// of the least significant cell is sub, as in the paper: 0 adds, 1 subtracts.
// The sum bits of padding cells (o above N-1) and their carries are left
// unused: they belong to carry-chain cells that the adder does not need.
// Purely combinational.
module cc_adder #(
  parameter int unsigned N = 4
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic         sub,
  output logic [N-1:0] sum,
  output logic         cout
);
  localparam int unsigned CHAINS = (N + 7) / 8;
  localparam int unsigned W      = CHAINS * 8;

  logic [W-1:0] s, di, o, co;

  for (genvar i = 0; i < W; i++) begin : g_bit
    if (i < N) begin : g_lut
      lut_b u_lut (.add1(a[i]), .add2(b[i]), .ci(sub), .o5(s[i]), .o6(di[i]));
    end else begin : g_pad
      assign s[i]  = 1'b0;
      assign di[i] = 1'b0;
    end
  end

  for (genvar k = 0; k < CHAINS; k++) begin : g_chain
    logic cin;
    if (k == 0) begin : g_first
      assign cin = sub;
    end else begin : g_next
      assign cin = co[8*k - 1];
    end
    carry8 u_carry (.ci(cin), .s(s[8*k +: 8]), .di(di[8*k +: 8]),
                    .o(o[8*k +: 8]), .co(co[8*k +: 8]));
  end

  assign sum  = o[N-1:0];
  assign cout = co[N-1];
endmodule
