// tb_two_stage_full - end-to-end test of the two-stage decoder at its
// default size: rate 0.2, Z = 1600, N = 80000 bits per frame, W = 10,
// three first-stage decoders. Phase B runs t_max = 15 with Delta = 165, the
// operating point of the rate-0.2 decoder. Stimulus and checks are in
// two_stage_env.
module tb_two_stage_full;
  import ldpc_pkg::*;
  localparam int Z = Z_DEF, NB = NB_DEF, MB = MB_DEF, W = W_DEF;
  localparam int ITW = 6, NDEC = 3, PW = 4;

  logic clk = 0;
  logic rst_n, in_valid, in_ready, out_valid, out_ready, out_last, out_ok, out_stage1_ok, s2_wait;
  logic [ITW-1:0] max_iter;
  logic [W-1:0] delta;
  logic [Z-1:0][W-1:0] in_llr;
  logic [Z-1:0] in_syn, out_bits;
  logic [PW-1:0] out_passes;
  logic [NDEC-1:0] dec_busy;

  always #5 clk = ~clk;

  two_stage_decoder dut (.*);
  two_stage_env #(.Z(Z), .NB(NB), .MB(MB), .W(W), .ITW(ITW), .NDEC(NDEC), .PW(PW),
                  .MAX_PASS(8), .DELTA(165), .TMAX_B(15), .NB_FRAMES(6),
                  .WATCHDOG(200_000)) env (.*);
endmodule
