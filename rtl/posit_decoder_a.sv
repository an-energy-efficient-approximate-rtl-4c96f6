// Decoder A: posit decoder without reciprocal mode.
//
// Splits an <N,ES> posit into the fields the rest of the unit needs. Negative
// posits are not 2's complemented up front; instead the fields are corrected
// in parallel:
//   ctrl   = sign XOR first regime bit: 1 when the regime of |x| is k >= 0.
//   count  = run length of the regime (leading bit counter on in_p[N-2:0]).
//   regime = ctrl ? count-1 : ~count, and ss = ~ctrl. The pair {ss,regime}
//            is read as a signed number (k, or k-1 when ss = 1) and {ss,expo}
//            as an unsigned one (e, or e+4 when ss = 1), so that
//            4*{ss,regime} + {ss,expo} = 4k + e.
//   expo   = exponent bits, inverted for a negative input.
//   frac   = fraction bits, 2's complemented for a negative input.
//   sadd_cin = sign AND (fraction bits all zero): the carry that the 2's
//            complement of a negative input would push into the exponent
//            and regime, added later by the scale adder.
//   chck   = all bits below the sign are zero (input is 0 or NaR).
// After shifting in_p[N-2:0] left by count, the terminating regime bit sits in
// sh[N-2], the exponent in sh[N-3:N-ES-2] and the fraction in sh[N-ES-3:1];
// bits shifted past a short posit's end read as zero, as posits require.
//
// Field slices, widths and the mux arrangement follow the paper's decoder
// figure; the meaning given to {ss,regime} and {ss,expo} is this design's
// reading of it. Purely combinational, no clock.
module posit_decoder_a #(
  parameter int unsigned N  = 16,
  parameter int unsigned ES = 2,
  localparam int unsigned RW = $clog2(N - 2),
  localparam int unsigned FW = N - ES - 3
) (
  input  logic [N-1:0]  in_p,
  output logic          sign,
  output logic          ss,
  output logic [RW-1:0] regime,
  output logic [ES-1:0] expo,
  output logic [FW-1:0] frac,
  output logic          sadd_cin,
  output logic          chck
);
  logic          ctrl;
  logic [RW-1:0] count, reg_raw;
  logic [N-2:0]  sh;
  logic [FW-1:0] fr, fr_m;

  assign sign = in_p[N-1];
  assign ctrl = sign ^ in_p[N-2];
  assign ss   = ~ctrl;

  lbc #(.W(N - 1), .CW(RW)) u_lbc (.din(in_p[N-2:0]), .count(count));

  assign reg_raw = count - RW'(ctrl);
  assign regime  = ss ? ~reg_raw : reg_raw;

  assign sh   = in_p[N-2:0] << count;
  assign expo = sign ? ~sh[N-3:N-ES-2] : sh[N-3:N-ES-2];
  assign fr   = sh[N-ES-3:1];
  assign fr_m = sign ? ~fr : fr;
  assign frac = fr_m + FW'(sign);

  assign sadd_cin = sign & ~|fr;
  assign chck     = ~|in_p[N-2:0];
endmodule
