// qc_rotate - cyclic lane rotation for a quasi-cyclic LDPC block.
//
// A block word holds Z lanes of W bits. The output lane r is the input lane
// (r + shift) mod Z, so reading a block column through a circulant with
// shift s lines its lanes up with the Z check rows of the layer. Rotating
// again by (Z - s) mod Z puts the lanes back. The rotation is built as one
// variable part-select of the word written twice in a row, which synthesis
// turns into a log2(Z)-level barrel shifter. Purely combinational.
// This helper is this design's own; the decoder's internal structure is
// not described in the source it is built from.
module qc_rotate #(
  parameter int Z  = 1600,
  parameter int W  = 10,
  parameter int SW = (Z <= 2) ? 1 : $clog2(Z)
) (
  input  logic [Z-1:0][W-1:0] din,
  input  logic [SW-1:0]       shift,   // 0..Z-1
  output logic [Z-1:0][W-1:0] dout
);

  logic [2*Z*W-1:0] twice;

  always_comb begin
    twice = {din, din};
    dout  = twice[shift*W +: Z*W];
  end

endmodule
