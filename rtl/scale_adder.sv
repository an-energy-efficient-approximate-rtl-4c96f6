// Scale adder.
//
// Combines the decoded regimes and exponents of both operands into the scale
// of the product, 4*k + e in 2's complement. As in the paper's figure, the
// exponents and the first carry-in are added in one adder, the regimes in a
// second adder in parallel, and a third adder sums the regime sum shifted
// left by ES, the exponent sum and the second carry-in:
//   scale = 4 * ({ss_a,reg_a} + {ss_b,reg_b})
//         + ({ss_a,exp_a} + {ss_b,exp_b} + cin_a) + cin_b
// ss is the MSB of both the processed regime and the processed exponent.
// {ss,reg} is taken as signed, {ss,exp} as unsigned (see the decoders), which
// makes the sum exact. The carry-ins complete the 2's complement of negative
// operands whose fraction is zero. SW = 8 bits hold the range of the product
// of two posit<16,2> scales; that width is this design's choice.
// Purely combinational.
module scale_adder #(
  parameter int unsigned RW = 4,
  parameter int unsigned ES = 2,
  parameter int unsigned SW = 8
) (
  input  logic                 ss_a,
  input  logic [RW-1:0]        reg_a,
  input  logic [ES-1:0]        exp_a,
  input  logic                 cin_a,
  input  logic                 ss_b,
  input  logic [RW-1:0]        reg_b,
  input  logic [ES-1:0]        exp_b,
  input  logic                 cin_b,
  output logic signed [SW-1:0] scale
);
  logic signed [RW+1:0] reg_sum;
  logic        [ES+1:0] exp_sum;

  assign reg_sum = (RW + 2)'($signed({ss_a, reg_a})) + (RW + 2)'($signed({ss_b, reg_b}));
  assign exp_sum = (ES + 2)'({ss_a, exp_a}) + (ES + 2)'({ss_b, exp_b}) + (ES + 2)'(cin_a);
  assign scale   = (SW'(reg_sum) <<< ES) + $signed(SW'(exp_sum)) + $signed(SW'(cin_b));
endmodule
