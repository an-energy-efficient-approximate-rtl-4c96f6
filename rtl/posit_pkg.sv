// Shared constants of the posit<16,2> multiply/divide datapath.
//
// The unit works on 16-bit posits with a 2-bit exponent field (ES = 2), the
// main configuration of the design. Derived widths: the regime count and the
// processed regime are ceil(log2(N-2)) = 4 bits, the fraction is N-ES-3 = 11
// bits, the significand with its hidden bit is 12 bits, and the scale
// (4*k + e of the result, before rounding) is 8 bits of 2's complement.
// The exception code returned by the exception detector is an enum.
package posit_pkg;
  localparam int unsigned N    = 16;
  localparam int unsigned ES   = 2;
  localparam int unsigned RW   = $clog2(N - 2);     // processed regime width
  localparam int unsigned FW   = N - ES - 3;        // fraction width
  localparam int unsigned SIGW = FW + 1;            // significand incl. hidden bit
  localparam int unsigned PW   = SIGW + 1;          // kept product bits
  localparam int unsigned SW   = RW + ES + 2;       // scale width
  localparam int unsigned LUT_AW = 5;               // EC table address bits
  localparam int unsigned LUT_DW = 9;               // EC table entry bits

  // excep[1:0]: 00 normal, 01 zero, 11 NaR
  typedef enum logic [1:0] {
    EXC_NONE = 2'b00,
    EXC_ZERO = 2'b01,
    EXC_NAR  = 2'b11
  } excep_e;
endpackage
