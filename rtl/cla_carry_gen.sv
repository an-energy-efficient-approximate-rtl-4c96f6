// Carry generator of the truncated final addition.
//
// Returns only the carry out of a + b (W bits, no carry-in), i.e. the carry
// that the discarded low columns of the two reduced rows send into the kept
// high columns. It computes bit generate g = a AND b and propagate p = a OR b
// and combines them in a log-depth prefix of group (G, P) pairs, the
// carry-lookahead recurrence G = G_hi OR (P_hi AND G_lo); no sum bits are
// formed, which is cheaper than a full adder of the same width. The paper
// gives the width (7) and that it is CLA based; the prefix arrangement is this
// design's choice. Combinational.
module cla_carry_gen #(
  parameter int unsigned W = 7
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic         cout
);
  localparam int unsigned L = $clog2(W) + 1;

  logic [W-1:0] g [L];
  logic [W-1:0] p [L];

  assign g[0] = a & b;
  assign p[0] = a | b;

  for (genvar l = 1; l < L; l++) begin : g_lvl
    for (genvar i = 0; i < W; i++) begin : g_bit
      if (i >= (1 << (l - 1))) begin : g_comb
        assign g[l][i] = g[l-1][i] | (p[l-1][i] & g[l-1][i - (1 << (l - 1))]);
        assign p[l][i] = p[l-1][i] & p[l-1][i - (1 << (l - 1))];
      end else begin : g_pass
        assign g[l][i] = g[l-1][i];
        assign p[l][i] = p[l-1][i];
      end
    end
  end

  assign cout = g[L-1][W-1];
endmodule
