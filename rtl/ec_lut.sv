// Error-correction table of the approximate reciprocal.
//
// 2's complementing a posit while keeping its sign approximates the posit's
// reciprocal: the fraction of 1/(1+f) is replaced by the line 1 - f. The
// error is reduced by subtracting EC = f(1-f)/(1+f) * 2^FB, the value that
// minimises the squared relative error at fraction f. The table holds EC for
// 2^AW intervals of f, addressed by the top AW bits of the divisor's
// fraction. Entry a is evaluated at the lower end of its interval,
// f = a / 2^AW, and rounded to the nearest integer:
//   EC[a] = round( 2^FB * a (D - a) / (D (D + a)) ),  D = 2^AW.
// With AW = 5, FB = 11 the largest entry is 351, so DW = 9 bits suffice.
// Entries are stored complemented (the decoder subtracts them) and the output
// is forced to zero when en (the div input) is low.
//
// The formula, the 2^5 x 9 size, the complemented storage and the gating come
// from the paper. The paper does not state where in its interval an entry is
// evaluated; the lower end is used because it reproduces the published error
// figures (mean relative error 0.38 % for 2^5 entries). Evaluating at the
// middle of the interval instead would roughly halve that error. The table
// is built at elaboration by a constant function, so it synthesises to a
// 2^AW-entry ROM. Combinational.
module ec_lut #(
  parameter int unsigned AW = 5,
  parameter int unsigned DW = 9,
  parameter int unsigned FB = 11
) (
  input  logic [AW-1:0] addr,
  input  logic          en,
  output logic [DW-1:0] ec_n
);
  function automatic logic [DW-1:0] ec_value(int unsigned idx);
    longint unsigned n, d, num, den;
    n   = longint'(idx);
    d   = longint'(1) << AW;
    num = (longint'(1) << FB) * n * (d - n);
    den = d * (d + n);
    return DW'((2 * num + den) / (2 * den));
  endfunction

  logic [DW-1:0] rom [2**AW];

  for (genvar a = 0; a < 2**AW; a++) begin : g_rom
    assign rom[a] = ~ec_value(a);
  end

  assign ec_n = en ? rom[addr] : '0;
endmodule
