// minsum_lane - one check row of the layered decoder (combinational).
//
// Read phase: takes the rotated posterior L and the old check message R of
// edge k, forms Q = L - R with saturation, and updates the row's running
// two smallest magnitudes (min1, min2), the edge of min1 and the sign
// accumulator (syndrome bit XOR all sign bits of Q).
// Write phase: from the stored Q of edge k and the row state it forms the
// new check message R' = (-1)^(sacc XOR sign Q) * 3/4 * (min over the other
// edges) and the new posterior L = Q + R', saturated.
// Negative values mean "bit is 1". Saturation is symmetric at
// +-(2^(W-1)-1). The scaled min-sum rule and its 3/4 factor are this
// design's choice for the check-node update; the source names the
// algorithm only as layered BP.
module minsum_lane #(
  parameter int W  = 10,
  parameter int KW = 2
) (
  input  logic [W-1:0]  l_rot,    // posterior of edge k, rotated onto this row
  input  logic [W-1:0]  r_old,    // old check message of edge k (0 in iteration 1)
  input  logic [KW-1:0] k,        // edge index within the layer
  input  logic          syn,      // syndrome bit of this row
  input  logic [W-2:0]  min1,
  input  logic [W-2:0]  min2,
  input  logic [KW-1:0] mpos,
  input  logic          sacc,
  output logic [W-1:0]  q,        // read phase: Q of edge k
  output logic [W-2:0]  min1_n,
  output logic [W-2:0]  min2_n,
  output logic [KW-1:0] mpos_n,
  output logic          sacc_n,
  input  logic [W-1:0]  q_k,      // write phase: stored Q of edge k
  output logic [W-1:0]  r_new,
  output logic [W-1:0]  l_new
);

  localparam int MW = W - 1;
  localparam logic signed [W:0] LMAX = (W+1)'((1 << (W - 1)) - 1);

  function automatic logic [W-1:0] sat(input logic signed [W:0] x);
    if (x > LMAX)       return LMAX[W-1:0];
    else if (x < -LMAX) return W'(-LMAX);
    else                return x[W-1:0];
  endfunction

  logic signed [W:0] dq, dl;
  logic [MW-1:0]     qmag, m;
  logic [MW+1:0]     m3;

  always_comb begin
    dq   = $signed({l_rot[W-1], l_rot}) - $signed({r_old[W-1], r_old});
    q    = sat(dq);
    qmag = q[W-1] ? MW'(-q) : q[MW-1:0];
    if (k == '0) begin
      min1_n = qmag;
      min2_n = '1;
      mpos_n = '0;
      sacc_n = syn ^ q[W-1];
    end else begin
      min1_n = min1;
      min2_n = min2;
      mpos_n = mpos;
      sacc_n = sacc ^ q[W-1];
      if (qmag < min1) begin
        min2_n = min1;
        min1_n = qmag;
        mpos_n = k;
      end else if (qmag < min2) begin
        min2_n = qmag;
      end
    end
    m     = (mpos == k) ? min2 : min1;
    m3    = {2'b00, m} + {1'b0, m, 1'b0};                 // 3*m
    r_new = (sacc ^ q_k[W-1]) ? W'(-(m3 >> 2)) : W'(m3 >> 2);
    dl    = $signed({q_k[W-1], q_k}) + $signed({r_new[W-1], r_new});
    l_new = sat(dl);
  end

endmodule
