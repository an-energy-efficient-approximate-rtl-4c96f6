// Leading bit counter.
//
// Counts how many bits at the top of din are equal to its MSB, i.e. the run
// length of a posit regime. With the MSB at 1 it is a leading-one counter,
// with the MSB at 0 a leading-zero counter. Implemented as a priority scan:
// the XOR of each bit with the MSB marks where the run ends, and the first
// such mark below the MSB gives the count. A run that fills all of din gives
// count = W. Purely combinational.
//
// The decoders of the paper use such a counter; its internal structure is
// this design's own choice.
module lbc #(
  parameter int unsigned W  = 15,
  parameter int unsigned CW = 4
) (
  input  logic [W-1:0]  din,
  output logic [CW-1:0] count
);
  logic [W-1:0] diff;

  assign diff = din ^ {W{din[W-1]}};

  always_comb begin
    count = CW'(W);
    for (int i = 0; i < W; i++) begin
      // scanning from the LSB up, the last hit is the highest differing bit
      if (diff[i]) count = CW'(W - 1 - i);
    end
  end
endmodule
