// Final adder: hybrid carry-select adder.
//
// Adds the two reduced rows of the kept product columns plus the carry from
// the carry generator, sum = (a + b + cin) mod 2^W. The low LW bits use a
// Kogge-Stone parallel-prefix adder; the high W-LW bits are computed twice,
// for carry-in 0 and 1, with 4-bit carry-lookahead groups, and the carry out
// of the low section selects between them. The paper names this structure
// (13 bits, Kogge-Stone and carry-lookahead sections, carry-select); the
// split point and group size are this design's choice. Combinational.
module hybrid_csel_adder #(
  parameter int unsigned W  = 13,
  parameter int unsigned LW = 6
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] sum
);
  localparam int unsigned HW = W - LW;
  localparam int unsigned L  = $clog2(LW + 1) + 1;

  // ---- low section: Kogge-Stone over LW bits plus the carry-in as bit -1
  logic [LW:0] g [L];
  logic [LW:0] p [L];
  logic [LW-1:0] lo_p;
  logic          lo_cout;

  assign g[0] = {a[LW-1:0] & b[LW-1:0], cin};
  assign p[0] = {a[LW-1:0] ^ b[LW-1:0], 1'b0};
  assign lo_p = a[LW-1:0] ^ b[LW-1:0];

  for (genvar l = 1; l < L; l++) begin : g_ks
    for (genvar i = 0; i <= LW; i++) begin : g_bit
      if (i >= (1 << (l - 1))) begin : g_comb
        assign g[l][i] = g[l-1][i] | (p[l-1][i] & g[l-1][i - (1 << (l - 1))]);
        assign p[l][i] = p[l-1][i] & p[l-1][i - (1 << (l - 1))];
      end else begin : g_pass
        assign g[l][i] = g[l-1][i];
        assign p[l][i] = p[l-1][i];
      end
    end
  end

  // g[L-1][i] is the carry into bit i of the low section (bit 0 = cin)
  assign sum[LW-1:0] = lo_p ^ g[L-1][LW-1:0];
  assign lo_cout     = g[L-1][LW];

  // ---- high section: two CLA adders, select by the low carry
  logic [HW-1:0] hi0, hi1;

  function automatic logic [HW-1:0] cla_add(logic [HW-1:0] x, logic [HW-1:0] y, logic ci);
    logic [HW-1:0] gg, pp, s;
    logic [HW:0]   c;
    gg = x & y;
    pp = x ^ y;
    c[0] = ci;
    for (int j = 0; j < HW; j += 4) begin
      // carries inside a 4-bit group, expanded from the group carry-in
      for (int k = 0; k < 4 && j + k < HW; k++) begin
        logic t;
        t = c[j];
        for (int m = 0; m <= k; m++) begin
          t = gg[j+m] | (pp[j+m] & t);
        end
        c[j+k+1] = t;
      end
    end
    s = pp ^ c[HW-1:0];
    return s;
  endfunction

  assign hi0 = cla_add(a[W-1:LW], b[W-1:LW], 1'b0);
  assign hi1 = cla_add(a[W-1:LW], b[W-1:LW], 1'b1);
  assign sum[W-1:LW] = lo_cout ? hi1 : hi0;
endmodule
