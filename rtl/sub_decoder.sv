// sub_decoder - first decoding stage: fixed-point layered belief
// propagation over one frame.
//
// A frame is N = Z*NB channel LLRs R (from Alice's reconciliation) plus the
// Z*MB bits of Bob's syndrome s. The decoder looks for the word u with
// u*H^T = s, so the sign of every check-to-variable message is flipped where
// the syndrome bit is 1. It runs exactly t_max (port max_iter) iterations,
// as the throughput formula T = fc*N/(D*t_max) assumes, and then offers the
// posterior LLRs and the syndrome to the second stage, which judges the
// frame. There is no early stop.
//
// One iteration sweeps the MB layers in order; all Z check rows of a layer
// run in parallel, one lane each. A layer takes 2*DEG cycles:
//   read  (DEG cycles) : per edge k, read the posterior block column,
//                        rotate it onto the rows, subtract the old check
//                        message (Q = L - R), keep Q, and track min1, min2,
//                        the position of min1 and the sign product;
//   write (DEG cycles) : per edge k, form the new check message R' (scaled
//                        min-sum, x3/4), L = Q + R', rotate back and write
//                        the posterior and R' back.
// So D = 2*DEG*MB cycles per iteration (320 with the defaults), and a frame
// occupies the decoder for NB load beats + t_max*D + NB output beats.
// Memories are arrays with combinational read (distributed RAM style).
//
// What follows the source: layered BP as the first stage, t_max iterations,
// W-bit fixed point (W=10: 1 sign, 4 integer, 5 fraction bits), syndrome-
// based reverse reconciliation, the frame length. This design's own: the
// scaled min-sum check-node rule in place of exact BP, the 3/4 factor, the
// code layout (see ldpc_pkg), the streaming interface, saturating adders,
// and max_iter = 0 passing the channel LLRs straight through.
//
// Interface: frames come in as NB beats (in_valid/in_ready), beat b holding
// block column b of R and, for b < MB, layer b of s. They leave the same way
// (out_valid/out_ready, out_last on beat NB-1). in_ready is high only while
// the decoder is idle, so it takes one frame at a time.
module sub_decoder
  import ldpc_pkg::*;
#(
  parameter int Z   = Z_DEF,
  parameter int NB  = NB_DEF,
  parameter int MB  = MB_DEF,
  parameter int W   = W_DEF,
  parameter int ITW = 6
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ITW-1:0]       max_iter,   // t_max, sampled at the last input beat
  // frame in
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [Z-1:0][W-1:0]  in_llr,
  input  logic [Z-1:0]         in_syn,
  // frame out, to the second stage
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [Z-1:0][W-1:0]  out_llr,
  output logic [Z-1:0]         out_syn,
  output logic                 out_last,
  output logic                 busy
);

  localparam int KB  = NB - MB;
  localparam int CW  = cbits(NB);
  localparam int LW  = cbits(MB);
  localparam int SW  = cbits(Z);
  localparam int MW  = W - 1;

  typedef enum logic [1:0] {S_LOAD, S_READ, S_WRITE, S_OUT} state_t;
  typedef logic [Z-1:0][W-1:0] word_t;

  // ---- code tables (constants) ----
  logic [CW-1:0] col_tab [MB][DEG];
  logic [SW-1:0] sh_tab  [MB][DEG];
  logic [SW-1:0] ush_tab [MB][DEG];   // (Z - shift) mod Z
  for (genvar i = 0; i < MB; i++) begin : g_row
    for (genvar j = 0; j < DEG; j++) begin : g_edge
      assign col_tab[i][j] = CW'(base_col(i, j, KB, MB));
      assign sh_tab[i][j]  = SW'(base_shift(i, j, Z));
      assign ush_tab[i][j] = SW'((Z - base_shift(i, j, Z)) % Z);
    end
  end

  // ---- storage ----
  word_t          lmem [NB];          // posterior LLRs, one block column per word
  word_t          rmem [MB*DEG];      // check-to-variable messages, one per edge block
  logic [Z-1:0]   smem [MB];          // syndrome, one layer per word
  word_t          qbuf [DEG];         // Q = L - R of the current layer
  logic [Z-1:0][MW-1:0] min1, min2, min1_n, min2_n;   // per row: two smallest |Q|
  logic [Z-1:0][KW-1:0] mpos, mpos_n;                 // per row: edge of min1
  logic [Z-1:0]         sacc, sacc_n;                 // per row: s XOR sign bits

  state_t         state;
  logic [CW-1:0]  beat;
  logic [LW-1:0]  layer;
  logic [KW-1:0]  k;
  logic [ITW-1:0] iter, tmax_q;

  // ---- datapath ----
  logic [CW-1:0]  cur_col;
  logic [SW-1:0]  cur_sh, cur_ush;
  word_t          lrot, rold, qv, qsel, rnew, lnew, lnew_back;
  logic [Z-1:0]   ssel;

  always_comb begin
    cur_col = col_tab[layer][k];
    cur_sh  = sh_tab[layer][k];
    cur_ush = ush_tab[layer][k];
  end

  qc_rotate #(.Z(Z), .W(W), .SW(SW)) u_rot_rd (.din(lmem[cur_col]), .shift(cur_sh),  .dout(lrot));
  qc_rotate #(.Z(Z), .W(W), .SW(SW)) u_rot_wr (.din(lnew),          .shift(cur_ush), .dout(lnew_back));

  always_comb begin
    rold = (iter == '0) ? word_t'(0) : rmem[layer*DEG + int'(k)];
    qsel = qbuf[k];
    ssel = smem[layer];
  end

  for (genvar r = 0; r < Z; r++) begin : g_lane
    minsum_lane #(.W(W), .KW(KW)) u_lane (
      .l_rot (lrot[r]), .r_old(rold[r]), .k(k), .syn(ssel[r]),
      .min1  (min1[r]), .min2(min2[r]), .mpos(mpos[r]), .sacc(sacc[r]),
      .q     (qv[r]),   .min1_n(min1_n[r]), .min2_n(min2_n[r]),
      .mpos_n(mpos_n[r]), .sacc_n(sacc_n[r]),
      .q_k   (qsel[r]), .r_new(rnew[r]), .l_new(lnew[r])
    );
  end

  // ---- control ----
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state  <= S_LOAD;
      beat   <= '0;
      layer  <= '0;
      k      <= '0;
      iter   <= '0;
      tmax_q <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (beat == CW'(NB - 1)) begin
            beat   <= '0;
            tmax_q <= max_iter;
            iter   <= '0;
            layer  <= '0;
            k      <= '0;
            state  <= (max_iter == '0) ? S_OUT : S_READ;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_READ: begin
          k <= k + 1'b1;
          if (k == KW'(DEG - 1)) state <= S_WRITE;
        end
        S_WRITE: begin
          k <= k + 1'b1;
          if (k == KW'(DEG - 1)) begin
            if (layer == LW'(MB - 1)) begin
              layer <= '0;
              iter  <= iter + 1'b1;
              state <= (iter + 1'b1 == tmax_q) ? S_OUT : S_READ;
            end else begin
              layer <= layer + 1'b1;
              state <= S_READ;
            end
          end
        end
        S_OUT: if (out_ready) begin
          if (beat == CW'(NB - 1)) begin
            beat  <= '0;
            state <= S_LOAD;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // ---- memories and per-row state ----
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      lmem[beat] <= in_llr;
      if (int'(beat) < MB) smem[LW'(beat)] <= in_syn;
    end
    if (state == S_READ) begin
      qbuf[k] <= qv;
      min1    <= min1_n;
      min2    <= min2_n;
      mpos    <= mpos_n;
      sacc    <= sacc_n;
    end
    if (state == S_WRITE) begin
      lmem[cur_col]             <= lnew_back;
      rmem[layer*DEG + int'(k)] <= rnew;
    end
  end

  always_comb begin
    in_ready  = (state == S_LOAD);
    out_valid = (state == S_OUT);
    out_llr   = lmem[beat];
    out_syn   = (int'(beat) < MB) ? smem[LW'(beat)] : '0;
    out_last  = (state == S_OUT) && (beat == CW'(NB - 1));
    busy      = (state != S_LOAD) || (beat != '0);
  end

endmodule
