// tb_two_stage_rate01 - end-to-end test of the two-stage decoder set up for
// the rate-0.1 operating point: W = 12 (1 sign, 4 integer, 7 fraction
// bits), Delta = 530, t_max = 20, with a small rate-0.1 code (Z=16, NB=20,
// MB=18, N=320). Stimulus and checks are in two_stage_env.
module tb_two_stage_rate01;
  localparam int Z = 16, NB = 20, MB = 18, W = 12, ITW = 6, NDEC = 3, MAX_PASS = 8, PW = 4;

  logic clk = 0;
  logic rst_n, in_valid, in_ready, out_valid, out_ready, out_last, out_ok, out_stage1_ok, s2_wait;
  logic [ITW-1:0] max_iter;
  logic [W-1:0] delta;
  logic [Z-1:0][W-1:0] in_llr;
  logic [Z-1:0] in_syn, out_bits;
  logic [PW-1:0] out_passes;
  logic [NDEC-1:0] dec_busy;

  always #5 clk = ~clk;

  // last-resort stop; the environment's own watchdog normally ends first
  initial begin
    #50_000_000;
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

  two_stage_decoder #(.Z(Z), .NB(NB), .MB(MB), .W(W), .ITW(ITW), .NDEC(NDEC),
                      .MAX_PASS(MAX_PASS), .PW(PW)) dut (.*);
  two_stage_env #(.Z(Z), .NB(NB), .MB(MB), .W(W), .ITW(ITW), .NDEC(NDEC), .PW(PW),
                  .MAX_PASS(MAX_PASS), .DELTA(530), .TMAX_B(20), .NB_FRAMES(12),
                  .AMP_B(240), .NOISE_B(400)) env (.*);
endmodule
