// two_stage_env - stimulus and checking for the whole two-stage decoder.
//
// Connects to the decoder's ports. Phase A streams a mix of frames with
// random output back-pressure: clean frames decoded by the first stage
// alone, noisy frames with few iterations, frames sent with t_max = 0 whose
// weak wrong bits only the second stage can repair, and frames too noisy to
// decode. Phase B streams NB_FRAMES frames at t_max = TMAX_B with no
// back-pressure and measures the spacing of output frames against the
// three-decoder throughput (2*NB + t_max*D)/3 cycles per frame.
// Every output bit and status flag is compared with the reference model in
// frame order. The env counts how often each mechanism occurred (first-stage
// success, second-stage repair, failure, a finished frame waiting for the
// second stage, all three decoders busy at once, output back-pressure) and
// counts a failure for any that never did. It prints TB_RESULT and ends the
// simulation.
module two_stage_env
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;
#(
  parameter int Z        = 16,
  parameter int NB       = 10,
  parameter int MB       = 8,
  parameter int W        = 10,
  parameter int ITW      = 6,
  parameter int NDEC     = 3,
  parameter int PW       = 4,
  parameter int MAX_PASS = 8,
  parameter int DELTA    = 165,
  parameter int TMAX_B   = 15,
  parameter int NB_FRAMES = 6,
  parameter int AMP_B    = 60,     // phase B channel: +-AMP_B plus uniform noise
  parameter int NOISE_B  = 100,
  parameter int WATCHDOG = 2_000_000
) (
  input  logic                clk,
  output logic                rst_n,
  output logic [ITW-1:0]      max_iter,
  output logic [W-1:0]        delta,
  output logic                in_valid,
  input  logic                in_ready,
  output logic [Z-1:0][W-1:0] in_llr,
  output logic [Z-1:0]        in_syn,
  input  logic                out_valid,
  output logic                out_ready,
  input  logic [Z-1:0]        out_bits,
  input  logic                out_last,
  input  logic                out_ok,
  input  logic                out_stage1_ok,
  input  logic [PW-1:0]       out_passes,
  input  logic [NDEC-1:0]     dec_busy,
  input  logic                s2_wait
);
  localparam int D = 2 * DEG * MB;
  localparam int N = Z * NB;

  typedef struct {
    bit [N-1:0] uh;
    bit [N-1:0] u;
    bit ok;
    bit s1ok;
    bit kc;
    int passes;
  } exp_t;

  exp_t exp_q [$];
  int checks = 0, failures = 0;
  int n_undet = 0, n_s1ok = 0, n_repair = 0, n_fail = 0, n_wait = 0, n_all_busy = 0, n_bp = 0;
  int frames_in = 0, frames_out = 0, total_frames;
  bit phase_b = 0, rand_bp = 1;
  longint cyc = 0;
  longint t_start [$];

  ldpc_ref #(Z, NB, MB, W) ref_m;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    cyc++;
    if (s2_wait) n_wait++;
    if (&dec_busy) n_all_busy++;
    if (out_valid && !out_ready) n_bp++;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(int tmax, bit kc = 1);
    exp_t e;
    e.kc = kc;
    ref_m.stage1(tmax);
    e.passes = ref_m.stage2(DELTA, MAX_PASS, e.ok, e.s1ok);
    for (int n = 0; n < N; n++) begin
      e.uh[n] = ref_m.uh[n];
      e.u[n]  = ref_m.u[n];
    end
    exp_q.push_back(e);
    max_iter = ITW'(tmax);
    for (int b = 0; b < NB; b++) begin
      for (int r = 0; r < Z; r++) begin
        in_llr[r] = W'(ref_m.llr[b * Z + r]);
        in_syn[r] = (b < MB) ? ref_m.syn[b * Z + r] : 1'b0;
      end
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
    end
    in_valid = 0;
    frames_in++;
  endtask

  // driver
  initial begin
    void'($urandom(5));
    ref_m = new();
    total_frames = 12 + NB_FRAMES;
    rst_n = 0; in_valid = 0; in_llr = '0; in_syn = '0;
    max_iter = '0; delta = W'(DELTA);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // phase A
    ref_m.make_frame(200, 150);   send(2);            // clean
    ref_m.make_crafted(3, 20, DELTA); send(0);        // repaired by stage 2
    ref_m.make_frame(30, 120);    send(1, 0);
    ref_m.make_crafted(300, 600, DELTA); send(0);     // unsolvable
    ref_m.make_frame(200, 150);   send(1);
    ref_m.make_crafted(5, 30, DELTA); send(0);
    ref_m.make_frame(40, 110);    send(2, 0);
    ref_m.make_frame(20, 160);    send(1, 0);
    ref_m.make_crafted(2, 10, DELTA); send(0);
    ref_m.make_frame(60, 100);    send(3, 0);
    ref_m.make_frame(200, 150);   send(0);
    ref_m.make_crafted(8, 40, DELTA); send(1);
    // phase B
    wait (frames_out == 12);
    phase_b = 1;
    for (int i = 0; i < NB_FRAMES; i++) begin
      ref_m.make_frame(AMP_B, NOISE_B);
      send(TMAX_B, 0);
    end
  end

  // monitor
  initial begin
    out_ready = 0;
    wait (rst_n);
    while (frames_out < total_frames) begin
      exp_t e;
      int nref, nkey;
      nref = 0;
      nkey = 0;
      for (int b = 0; b < NB; b++) begin
        out_ready = phase_b ? 1'b1 : ($urandom_range(3, 0) != 0);
        @(posedge clk);
        while (!(out_valid && out_ready)) begin
          #1 out_ready = phase_b ? 1'b1 : ($urandom_range(3, 0) != 0);
          @(posedge clk);
        end
        if (b == 0) begin
          t_start.push_back(cyc);
          e = exp_q.pop_front();
          check(out_ok == e.ok, $sformatf("frame %0d: out_ok", frames_out));
          check(out_stage1_ok == e.s1ok, $sformatf("frame %0d: out_stage1_ok", frames_out));
          check(int'(out_passes) == e.passes, $sformatf("frame %0d: passes %0d, expected %0d", frames_out, out_passes, e.passes));
          if (e.s1ok) n_s1ok++;
          else if (e.ok) n_repair++;
          else n_fail++;
        end
        for (int r = 0; r < Z; r++) begin
          if (out_bits[r] != e.uh[b * Z + r]) nref++;
          if (out_bits[r] != e.u[b * Z + r]) nkey++;
        end
        check(out_last == (b == NB - 1), "out_last");
        #1;
      end
      check(nref == 0, $sformatf("frame %0d: %0d bits differ from the reference", frames_out, nref));
      // A noisy frame may settle on another word with the same syndrome;
      // that is a property of the code, so it is only counted.
      if (e.ok && nkey != 0) n_undet++;
      if (e.ok && e.kc) check(nkey == 0, $sformatf("frame %0d: reported ok but differs from the key", frames_out));
      frames_out++;
    end
    // phase B spacing, from the first frame of the second round on
    if (NB_FRAMES >= 2 * NDEC) begin
      real per, expect_per;
      per = real'(t_start[total_frames - 1] - t_start[12 + NDEC - 1]) / real'(total_frames - 1 - (12 + NDEC - 1));
      expect_per = real'(2 * NB + TMAX_B * D) / real'(NDEC);
      $display("phase B: %0.1f cycles per frame, three-decoder bound %0.1f, %0.2f bits/cycle",
               per, expect_per, real'(N) / per);
      check(per <= expect_per * 1.05 && per >= expect_per * 0.95, "throughput off the three-decoder rate");
    end
    $display("frames reported ok that differ from the key: %0d", n_undet);
    $display("mechanisms: stage1 ok %0d, stage2 repair %0d, failed %0d, wait cycles %0d, all-busy cycles %0d, back-pressure cycles %0d",
             n_s1ok, n_repair, n_fail, n_wait, n_all_busy, n_bp);
    check(n_s1ok > 0, "no frame decoded by the first stage alone");
    check(n_repair > 0, "no frame repaired by the second stage");
    check(n_fail > 0, "no undecodable frame");
    check(n_wait > 0, "no decoder ever waited for the second stage");
    check(n_all_busy > 0, "the three decoders were never busy together");
    check(n_bp > 0, "no output back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
