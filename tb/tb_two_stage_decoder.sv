// tb_two_stage_decoder - end-to-end test of the two-stage decoder on a
// small code (Z=16, NB=10, MB=8: rate 0.2, N=160) with all three first-stage
// decoders and the shared second stage. Stimulus and checks are in
// two_stage_env.
module tb_two_stage_decoder;
  localparam int Z = 16, NB = 10, MB = 8, W = 10, ITW = 6, NDEC = 3, MAX_PASS = 8, PW = 4;

  logic clk = 0;
  logic rst_n, in_valid, in_ready, out_valid, out_ready, out_last, out_ok, out_stage1_ok, s2_wait;
  logic [ITW-1:0] max_iter;
  logic [W-1:0] delta;
  logic [Z-1:0][W-1:0] in_llr;
  logic [Z-1:0] in_syn, out_bits;
  logic [PW-1:0] out_passes;
  logic [NDEC-1:0] dec_busy;

  always #5 clk = ~clk;

  two_stage_decoder #(.Z(Z), .NB(NB), .MB(MB), .W(W), .ITW(ITW), .NDEC(NDEC),
                      .MAX_PASS(MAX_PASS), .PW(PW)) dut (.*);
  two_stage_env #(.Z(Z), .NB(NB), .MB(MB), .W(W), .ITW(ITW), .NDEC(NDEC), .PW(PW),
                  .MAX_PASS(MAX_PASS), .DELTA(165), .TMAX_B(15), .NB_FRAMES(9)) env (.*);
endmodule
