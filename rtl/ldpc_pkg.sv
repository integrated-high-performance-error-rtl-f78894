// ldpc_pkg - code definition and fixed-point helpers shared by the two
// decoding stages.
//
// The decoder works on a quasi-cyclic (QC) parity-check matrix H made of
// MB x NB square blocks of size Z. A block is either all-zero or a cyclically
// shifted identity: in block row i (a "layer") with shift s on block column j,
// check row r (0..Z-1) of the layer touches variable j*Z + (r+s) mod Z.
// Each layer has exactly DEG = 4 non-zero blocks:
//   k = 0, 1 : two distinct information block columns (0..KB-1),
//   k = 2    : parity block column KB+i, shift 0,
//   k = 3    : parity block column KB+((i-1) mod MB) (wrapped dual diagonal).
// The code rate is KB/NB. The block columns and shifts are computed by the
// closed formulas in base_col() and base_shift(); no table is stored.
//
// The layout of the matrix is this design's own: the multi-edge-type code
// the decoder was built for is not published. Only its length (80000) and
// its rates (0.2, 0.1) are followed here. Z = 1600, NB = 50 gives N = 80000.
// KB = 10 gives rate 0.2, and KB = 5 (with MB = 45) gives rate 0.1.
//
// LLRs are W-bit two's-complement fixed-point numbers. With W = 10 this is
// 1 sign, 4 integer and 5 fraction bits; the threshold Delta is counted in
// LSBs (Delta = 165 is 5.16). The value -2^(W-1) is never produced:
// saturation is symmetric, so |x| always fits in W-1 bits.
package ldpc_pkg;

  localparam int DEG = 4;          // non-zero blocks per layer
  localparam int KW  = 2;          // bits to index an edge inside a layer

  // Default code: rate 0.2, length 80000.
  localparam int Z_DEF  = 1600;
  localparam int NB_DEF = 50;
  localparam int MB_DEF = 40;
  localparam int W_DEF  = 10;

  // Block column of edge k (0..DEG-1) of layer i.
  function automatic int base_col(int i, int k, int kb, int mb);
    case (k)
      0:       return i % kb;
      1:       return (i + 1 + (i / kb) % (kb - 1)) % kb;
      2:       return kb + i;
      default: return kb + ((i + mb - 1) % mb);
    endcase
  endfunction

  // Cyclic shift of edge k of layer i, 0..z-1.
  function automatic int base_shift(int i, int k, int z);
    if (k == 2) return 0;
    return (i * 73 + k * 151 + (i * i * 17) % z + 29) % z;
  endfunction

  // Number of bits needed to count 0..n-1 (at least 1).
  function automatic int cbits(int n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
