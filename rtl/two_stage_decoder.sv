// two_stage_decoder - two-stage LDPC decoder for reverse reconciliation in
// CV-QKD: three first-stage decoders share one second-stage corrector.
//
// Frames (channel LLRs R of Alice plus Bob's syndrome s) are dealt to the
// NDEC = 3 sub_decoder instances in turn: frame f goes to decoder f mod 3.
// Each runs t_max layered iterations and then hands its posterior LLRs to
// the single error_bits_erase, which takes the decoders in the same fixed
// order, so frames leave in the order they came. The second stage needs
// only a few sweeps (each as long as one iteration), so with t_max
// iterations per frame in three decoders it is idle most of the time and
// does not limit throughput. If it is still busy when a decoder finishes,
// that decoder holds its frame (s2_wait) and takes no new frame until the
// frame has been handed on.
//
// Throughput at the defaults: a decoder is busy NB + t_max*D + NB cycles
// per frame of N = Z*NB bits, D = 2*DEG*MB = 320, so three decoders give
// about 3*fc*N/(D*t_max); at t_max = 15 that is 50 bits per clock cycle.
//
// Following the source: three first-stage decoders, one second-stage
// module, pipelined behind them, inputs R and s, output u. This design's
// own: the round-robin dealing and collecting, the beat streams and the
// status ports.
//
// Interface: in_* takes a frame as NB beats (beat b: LLR block column b and,
// for b < MB, syndrome layer b); out_* gives NB beats of Z decided bits with
// the frame's status. max_iter and delta are configuration inputs, sampled
// per frame.
module two_stage_decoder
  import ldpc_pkg::*;
#(
  parameter int Z        = Z_DEF,
  parameter int NB       = NB_DEF,
  parameter int MB       = MB_DEF,
  parameter int W        = W_DEF,
  parameter int ITW      = 6,
  parameter int NDEC     = 3,
  parameter int MAX_PASS = 8,
  parameter int PW       = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [ITW-1:0]       max_iter,      // t_max of the first stage
  input  logic [W-1:0]         delta,         // threshold of the second stage
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [Z-1:0][W-1:0]  in_llr,
  input  logic [Z-1:0]         in_syn,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [Z-1:0]         out_bits,
  output logic                 out_last,
  output logic                 out_ok,
  output logic                 out_stage1_ok,
  output logic [PW-1:0]        out_passes,
  output logic [NDEC-1:0]      dec_busy,      // per first-stage decoder
  output logic                 s2_wait        // a finished frame waits for stage 2
);

  localparam int CW  = cbits(NB);
  localparam int DW  = cbits(NDEC);

  logic [DW-1:0] wr_sel, rd_sel;
  logic [CW-1:0] in_beat;

  logic [NDEC-1:0]     d_in_valid, d_in_ready, d_out_valid, d_out_ready, d_out_last;
  logic [Z-1:0][W-1:0] d_out_llr [NDEC];
  logic [Z-1:0]        d_out_syn [NDEC];

  logic                s2_in_valid, s2_in_ready;
  logic [Z-1:0][W-1:0] s2_in_llr;
  logic [Z-1:0]        s2_in_syn;

  for (genvar i = 0; i < NDEC; i++) begin : g_dec
    assign d_in_valid[i]  = in_valid && (wr_sel == DW'(i));
    assign d_out_ready[i] = s2_in_ready && (rd_sel == DW'(i));
    sub_decoder #(.Z(Z), .NB(NB), .MB(MB), .W(W), .ITW(ITW)) u_dec (
      .clk, .rst_n, .max_iter,
      .in_valid (d_in_valid[i]),  .in_ready (d_in_ready[i]),
      .in_llr, .in_syn,
      .out_valid(d_out_valid[i]), .out_ready(d_out_ready[i]),
      .out_llr  (d_out_llr[i]),   .out_syn  (d_out_syn[i]),
      .out_last (d_out_last[i]),  .busy     (dec_busy[i])
    );
  end

  always_comb begin
    in_ready    = d_in_ready[wr_sel];
    s2_in_valid = d_out_valid[rd_sel];
    s2_in_llr   = d_out_llr[rd_sel];
    s2_in_syn   = d_out_syn[rd_sel];
    s2_wait     = |d_out_valid && !s2_in_ready;
  end

  error_bits_erase #(.Z(Z), .NB(NB), .MB(MB), .W(W), .MAX_PASS(MAX_PASS), .PW(PW)) u_erase (
    .clk, .rst_n, .delta,
    .in_valid (s2_in_valid), .in_ready(s2_in_ready),
    .in_llr   (s2_in_llr),   .in_syn  (s2_in_syn),
    .out_valid, .out_ready, .out_bits, .out_last, .out_ok, .out_stage1_ok, .out_passes
  );

  // Deal frames in turn and collect them in the same order.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wr_sel  <= '0;
      rd_sel  <= '0;
      in_beat <= '0;
    end else begin
      if (in_valid && in_ready) begin
        if (in_beat == CW'(NB - 1)) begin
          in_beat <= '0;
          wr_sel  <= (wr_sel == DW'(NDEC - 1)) ? '0 : wr_sel + 1'b1;
        end else begin
          in_beat <= in_beat + 1'b1;
        end
      end
      if (s2_in_valid && s2_in_ready && d_out_last[rd_sel])
        rd_sel <= (rd_sel == DW'(NDEC - 1)) ? '0 : rd_sel + 1'b1;
    end
  end

endmodule
