// Posit<16,2> multiply / approximate-divide unit (top level).
//
// result = a * b when div = 0 (exact product, rounded to nearest on the 13
// product bits kept) and result ~ a / b when div = 1, computed as a times an
// approximate reciprocal of b that Decoder B forms from b's bits with one
// 2's complement and one table subtraction. Dataflow:
//   Decoder A (a) and Decoder B (b, div) -> sign, ss, regime, exponent,
//   fraction, carry-in and zero/NaR flag of each operand;
//   scale adder -> scale of the product; significand multiplier on
//   {1, frac_a} x {1, frac_b} -> top 13 product bits; rounding circuit ->
//   rounded scale and fraction; sign XOR; exception detector on the flags,
//   signs and div; encoder -> 16-bit posit.
// The whole path is combinational; a caller may register inputs and output.
// Structure and connections follow the paper's architecture figure.
module posit_muldiv
  import posit_pkg::*;
#(
  parameter int unsigned LUT_AW_P = LUT_AW
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic         div,
  output logic [N-1:0] result
);
  logic          sign_a, ss_a, cin_a, chck_a;
  logic          sign_b, ss_b, cin_b, chck_b;
  logic [RW-1:0] reg_a, reg_b;
  logic [ES-1:0] exp_a, exp_b;
  logic [FW-1:0] frac_a, frac_b, frac_r;
  logic signed [SW-1:0] scale;
  logic [SW-2:0] scale_r;
  logic [PW-1:0] prod;
  logic          sign_o;
  excep_e        excep;

  posit_decoder_a #(.N(N), .ES(ES)) u_dec_a (
    .in_p(a), .sign(sign_a), .ss(ss_a), .regime(reg_a), .expo(exp_a),
    .frac(frac_a), .sadd_cin(cin_a), .chck(chck_a)
  );

  posit_decoder_b #(.N(N), .ES(ES), .LUT_AW(LUT_AW_P)) u_dec_b (
    .in_p(b), .div(div), .sign(sign_b), .ss(ss_b), .regime(reg_b), .expo(exp_b),
    .frac(frac_b), .sadd_cin(cin_b), .chck(chck_b)
  );

  scale_adder #(.RW(RW), .ES(ES), .SW(SW)) u_sadd (
    .ss_a(ss_a), .reg_a(reg_a), .exp_a(exp_a), .cin_a(cin_a),
    .ss_b(ss_b), .reg_b(reg_b), .exp_b(exp_b), .cin_b(cin_b),
    .scale(scale)
  );

  sig_mult #(.W(SIGW)) u_mult (
    .a({1'b1, frac_a}), .b({1'b1, frac_b}), .prod(prod)
  );

  round_unit u_round (
    .scale_in(scale), .prod(prod), .scale_out(scale_r), .frac_out(frac_r)
  );

  assign sign_o = sign_a ^ sign_b;

  exception_detector u_exc (
    .div(div), .sign_a(sign_a), .chck_a(chck_a), .sign_b(sign_b), .chck_b(chck_b),
    .excep(excep)
  );

  posit_encoder u_enc (
    .sign(sign_o), .scale(scale_r), .frac(frac_r), .excep(excep), .posit_out(result)
  );
endmodule
