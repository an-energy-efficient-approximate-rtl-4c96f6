// Posit encoder for <16,2>.
//
// Packs sign, scale (4k + e, 7-bit 2's complement) and an 11-bit fraction into
// a 16-bit posit, producing the 2's complement form of negative results
// directly instead of negating a finished positive posit. The fraction must
// already be rounded with the bits that do not fit cleared (round_unit).
//   * Exponent and fraction, {scale[1:0], frac}, are XORed with the sign and
//     incremented by it: their 2's complement for a negative result.
//   * Control module: exp_zero and m_zero flag an all-zero exponent and
//     fraction. For a negative result with both zero the increment carries
//     into the regime and moves its terminating bit by one place; sr1 and sr2
//     encode that move, inv says whether the regime is a run of ones ended
//     by a zero (AND path) or a run of zeros ended by a one (OR path).
//   * The processed regime scale[5:2] XOR scale[6] (run length minus one)
//     plus sr1 plus sr2 is the position of the terminating regime bit,
//     counted from the top; a 4x16 decoder turns it into a one-hot word,
//     XORed with inv.
//   * The 2's complemented exponent/fraction word is shifted by the same
//     amount to sit just below the terminator, filled above with ones on the
//     AND path and zeros on the OR path, and merged with the decoder word by
//     OR or AND, chosen by sign XOR scale[6].
//   * excep[0] forces bits 14..0 (and the sign) to zero; excep[1] ORs into
//     the sign bit, giving 0x0000 for zero and 0x8000 for NaR.
// The block structure and signal names follow the paper's encoder figure.
// The exact conditions for sr1/sr2, the shifter fill and gating the sign
// with excep[0] are this design's choices. Purely combinational.
module posit_encoder
  import posit_pkg::*;
(
  input  logic          sign,
  input  logic [SW-2:0] scale,
  input  logic [FW-1:0] frac,
  input  excep_e        excep,
  output logic [N-1:0]  posit_out
);
  localparam int unsigned EFW = ES + FW;      // exponent + fraction width

  logic           exp_zero, m_zero, sr1, sr2, inv, sel;
  logic [EFW-1:0] ef;
  logic [3:0]     proc_reg, shamt;
  logic [N-1:0]   dec, decx, body;
  logic [N+EFW:0] ysh;

  // control module
  assign exp_zero = ~|scale[ES-1:0];
  assign m_zero   = ~|frac;
  assign sr1      = ~(sign & exp_zero & m_zero & ~scale[SW-2]);
  assign sr2      =   sign & exp_zero & m_zero &  scale[SW-2];
  assign inv      = ~(sign ^ scale[SW-2]);
  assign sel      =   sign ^ scale[SW-2];

  // exponent and fraction, 2's complemented for a negative result
  assign ef = ({scale[ES-1:0], frac} ^ {EFW{sign}}) + EFW'(sign);

  // terminating regime bit position
  assign proc_reg = scale[SW-3:ES] ^ {4{scale[SW-2]}};
  assign shamt    = proc_reg + 4'(sr1) + 4'(sr2);
  assign dec      = N'(1) << (N - 1 - int'(shamt));
  assign decx     = dec ^ {N{inv}};

  // exponent/fraction placed below the terminator, filled above
  assign ysh  = (N + EFW + 1)'($signed({~sel, ef, {N{1'b0}}}) >>> shamt);
  assign body = sel ? (ysh[N+EFW -: N] | decx) : (ysh[N+EFW -: N] & decx);

  assign posit_out[N-2:0] = body[N-1:1] & {(N - 1){~excep[0]}};
  assign posit_out[N-1]   = (sign & ~excep[0]) | excep[1];
endmodule
