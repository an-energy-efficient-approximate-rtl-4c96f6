// 2's complement block of the partial-product generator.
//
// Negates a W-bit row when sel is high, without a separate increment and
// without an extra sign bit in the LSB column: bits up to and including the
// first 1 from the LSB pass unchanged, every bit above it is inverted. Bit
// cell i keeps a flag C_i = (A_i AND sel) OR C_{i-1} (C_{-1} = 0) meaning
// "a 1 has been seen below", and outputs S_i = A_i XOR C_{i-1}. With sel low
// no flag is ever raised and no output bit toggles, so zero-padded rows cost
// no switching. A zero row stays zero. Combinational ripple of W cells.
// The cell follows the paper's description of its 2's complement block.
module twos_comp_blk #(
  parameter int unsigned W = 14
) (
  input  logic [W-1:0] a,
  input  logic         sel,
  output logic [W-1:0] s
);
  logic [W-1:0] c;

  assign c[0] = a[0] & sel;
  assign s[0] = a[0];

  for (genvar i = 1; i < W; i++) begin : g_cell
    assign c[i] = (a[i] & sel) | c[i-1];
    assign s[i] = a[i] ^ c[i-1];
  end
endmodule
