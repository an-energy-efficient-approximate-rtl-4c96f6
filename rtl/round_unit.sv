// Rounding circuit.
//
// Turns the scale from the scale adder and the 13 kept product bits
// prod = (a*b)[23:11] into the scale and 11-bit fraction the encoder packs,
// already rounded so that the encoder may simply drop what does not fit.
//   1. Normalise: if prod[12] is set the significand is in [2,4), so the
//      scale is incremented and prod[11:1] is the fraction with prod[0] one
//      extra bit; otherwise prod[10:0] is the fraction and the extra bit is 0.
//   2. The output regime of k = scale >> 2 takes r = k+2 (k >= 0) or 1-k
//      (k < 0) bits, leaving keep = 15 - r bits for exponent and fraction.
//      Round to nearest, ties to even, at that position: guard = first
//      dropped bit, sticky = OR of the rest of the available bits. The
//      increment is added to the whole {scale, fraction} word, so a carry
//      runs on into the exponent and regime, matching the posit encoding.
//      When keep = 0 the last kept bit is the regime's own last bit, which is
//      1 for k < 0 and 0 for k >= 0.
//   3. Dropped bits are cleared. k >= 14 saturates to maxpos (scale 56) and
//      k <= -15 to minpos (scale -56): a posit result never rounds to zero
//      or to NaR.
// Only the 13 product bits the multiplier computes are seen; lower product
// bits count as zero. The paper names this block only; everything above is
// this design's own choice. Purely combinational.
module round_unit
  import posit_pkg::*;
(
  input  logic signed [SW-1:0] scale_in,
  input  logic [PW-1:0]        prod,
  output logic [SW-2:0]        scale_out,
  output logic [FW-1:0]        frac_out
);
  localparam int unsigned ZW = SW + FW + 1;   // {scale, fraction, extra bit}
  localparam int signed KMAX = 14;             // maxpos regime for N = 16
  localparam int signed SMAX = 4 * KMAX;       // maxpos scale

  logic               norm;
  logic signed [SW:0] sc;
  logic [FW:0]        fx;                     // fraction and extra bit
  logic signed [SW-2:0] k;
  logic [ZW-1:0]      z, zr;
  logic [4:0]         lp;                     // position of the kept LSB in z
  logic               lsb, guard, sticky, rup;

  assign norm = prod[PW-1];
  assign sc   = (SW + 1)'(scale_in) + (SW + 1)'(norm);
  assign fx   = norm ? prod[PW-2:0] : {prod[PW-3:0], 1'b0};
  assign k    = sc[SW:ES];
  assign z    = {sc[SW-1:0], fx};

  always_comb begin
    // regime length r; the kept LSB is z bit r-1
    if (k >= 0) lp = 5'(k + 1);
    else        lp = 5'(-k);
    lsb    = (lp == 5'(FW + ES + 1)) ? k[SW-2] : z[lp];
    guard  = z[lp-1];
    sticky = |(z & ((ZW'(1) << (lp - 1)) - ZW'(1)));
    rup    = guard & (sticky | lsb);
    zr     = (z & ~((ZW'(1) << lp) - ZW'(1))) + (ZW'(rup) << lp);

    if (sc >= (SW + 1)'(SMAX)) begin
      scale_out = (SW - 1)'(SMAX);
      frac_out  = '0;
    end else if (sc < (SW + 1)'(-SMAX)) begin
      scale_out = (SW - 1)'(-SMAX);
      frac_out  = '0;
    end else begin
      scale_out = zr[ZW-2:FW+1];
      frac_out  = zr[FW:1];
    end
  end
endmodule
