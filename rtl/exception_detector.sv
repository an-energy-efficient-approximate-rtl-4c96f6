// Exception detector.
//
// Decides from the decoders' zero/NaR flags (chck = all bits below the sign
// are zero), the operand signs and the mode whether the result is a normal
// number (00), zero (01) or NaR (11); the encoder then forces the output.
// The rows printed in the paper's excep table are reproduced as given:
//   div  sA chkA  sB chkB | excep
//    x   x   0    x   0   |  00  normal
//    0   0   1    x   0   |  01  0 * b
//    0   x   0    0   1   |  01  a * 0
//    0   x   0    1   1   |  11  a * NaR
//    1   x   0    1   1   |  01  a / NaR (as printed; posit arithmetic
//                                 would give NaR here)
//    1   0   1    0   1   |  11  0 / 0
// Combinations the table leaves out are this design's choice, following
// posit arithmetic: a NaR operand gives NaR, a / 0 gives NaR, 0 / b and
// 0 * 0 give zero. Purely combinational.
module exception_detector
  import posit_pkg::*;
(
  input  logic   div,
  input  logic   sign_a,
  input  logic   chck_a,
  input  logic   sign_b,
  input  logic   chck_b,
  output excep_e excep
);
  logic a_zero, a_nar, b_zero, b_nar;

  assign a_zero = chck_a & ~sign_a;
  assign a_nar  = chck_a &  sign_a;
  assign b_zero = chck_b & ~sign_b;
  assign b_nar  = chck_b &  sign_b;

  always_comb begin
    if (!chck_a && !chck_b)      excep = EXC_NONE;
    else if (a_nar)              excep = EXC_NAR;
    else if (!div) begin
      if (b_nar)                 excep = EXC_NAR;
      else                       excep = EXC_ZERO;   // a zero operand
    end else begin
      if (b_nar && !chck_a)      excep = EXC_ZERO;   // printed row: a / NaR
      else if (b_nar)            excep = EXC_NAR;    // 0 / NaR
      else if (b_zero)           excep = EXC_NAR;    // a / 0, 0 / 0
      else                       excep = EXC_ZERO;   // 0 / b
    end
  end
endmodule
