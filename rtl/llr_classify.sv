// llr_classify - step (a) of the residual-bit-error correction for one LLR
// (combinational).
//
// The hard decision is u = 1 when LLR <= 0 and u = 0 when LLR > 0, and the
// bit is suspicious when its reliability |LLR| is below the threshold Delta.
// Both rules are the source's; Delta is given in LSBs of the W-bit
// fixed-point LLR.
module llr_classify #(
  parameter int W = 10
) (
  input  logic [W-1:0] llr,
  input  logic [W-1:0] delta,    // unsigned threshold
  output logic         u,
  output logic         e
);
  logic [W-1:0] mag;
  always_comb begin
    mag = llr[W-1] ? W'(-llr) : llr;
    u   = llr[W-1] || (llr == '0);
    e   = mag < delta;
  end
endmodule
