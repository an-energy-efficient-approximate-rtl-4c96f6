// Decoder B: posit decoder with approximate-reciprocal mode.
//
// With div = 0 it behaves exactly like Decoder A. With div = 1 it decodes the
// approximate reciprocal of the input instead:
//   * sign XOR div replaces the sign in every place Decoder A uses it (ctrl,
//     exponent and fraction inversion, fraction increment, sadd_cin). A
//     positive input is thereby 2's complemented with its sign kept, and a
//     negative input is decoded from its raw bits. Either way the fields are
//     those of the posit 2^(N-1) - |x| (sign excluded), whose value is
//     (2 - f) / (2 x) for an input x (1 + f): a linear stand-in for
//     1 / (x (1 + f)), exact when f = 0.
//   * The EC table is addressed by the top LUT_AW bits of the divisor's own
//     fraction f. For a positive input the fraction mux outputs ~f, so the
//     address is its top bits inverted; for a negative input the mux outputs
//     the 2's complement of f, so the address is the top bits of its 2's
//     complement (inverted, plus one when the lower bits are all zero).
//   * EC is subtracted from the 2's complemented fraction. When the fraction
//     is smaller than EC (f just below 1) the result is clamped to 0.
//   * LUT_AW = 0 builds the decoder without a table: the reciprocal is the
//     uncorrected 2's complement (the "no MSBs used" configuration).
// The sign output is the raw input sign; the unit's output sign is the XOR of
// the two operand signs in both modes, since 1/x has the sign of x.
//
// The XOR of sign and div, the gated complemented table and the subtraction
// follow the paper. How the address is formed, the clamp at zero, and doing
// the subtraction after the 2's complement increment are this design's
// choices. Purely combinational.
module posit_decoder_b #(
  parameter int unsigned N      = 16,
  parameter int unsigned ES     = 2,
  parameter int unsigned LUT_AW = 5,
  localparam int unsigned RW = $clog2(N - 2),
  localparam int unsigned FW = N - ES - 3,
  localparam int unsigned DW = 9
) (
  input  logic [N-1:0]  in_p,
  input  logic          div,
  output logic          sign,
  output logic          ss,
  output logic [RW-1:0] regime,
  output logic [ES-1:0] expo,
  output logic [FW-1:0] frac,
  output logic          sadd_cin,
  output logic          chck
);
  logic          sgn_eff, ctrl;
  logic [RW-1:0] count, reg_raw;
  logic [N-2:0]  sh;
  logic [FW-1:0] fr, fr_m, pre;
  logic [DW-1:0] ec_n;
  logic [FW:0]   diff;

  assign sign    = in_p[N-1];
  assign sgn_eff = sign ^ div;
  assign ctrl    = sgn_eff ^ in_p[N-2];
  assign ss      = ~ctrl;

  lbc #(.W(N - 1), .CW(RW)) u_lbc (.din(in_p[N-2:0]), .count(count));

  assign reg_raw = count - RW'(ctrl);
  assign regime  = ss ? ~reg_raw : reg_raw;

  assign sh   = in_p[N-2:0] << count;
  assign expo = sgn_eff ? ~sh[N-3:N-ES-2] : sh[N-3:N-ES-2];
  assign fr   = sh[N-ES-3:1];
  assign fr_m = sgn_eff ? ~fr : fr;

  if (LUT_AW > 0) begin : g_lut
    logic [LUT_AW-1:0] addr;
    // table address: top bits of the divisor's fraction
    assign addr = ~fr_m[FW-1 -: LUT_AW]
                + LUT_AW'(sign & ~|fr_m[FW-LUT_AW-1:0]);
    ec_lut #(.AW(LUT_AW), .DW(DW), .FB(FW)) u_lut (.addr(addr), .en(div), .ec_n(ec_n));
  end else begin : g_no_lut
    // complement of EC = 0 in divide mode, nothing in multiply mode
    assign ec_n = {DW{div}};
  end

  // 2's complement, then subtract EC: pre + ~EC + 1 in FW+1 bits; bit FW = borrow
  assign pre  = fr_m + FW'(sgn_eff);
  assign diff = {1'b0, pre} + {div, {(FW - DW){div}}, ec_n} + (FW + 1)'(div);
  assign frac = (div && diff[FW]) ? '0 : diff[FW-1:0];

  assign sadd_cin = sgn_eff & ~|fr;
  assign chck     = ~|in_p[N-2:0];
endmodule
