// tb_error_bits_erase - self-checking test of the second decoding stage.
//
// Small code (Z=16, NB=10, MB=8, N=160), MAX_PASS lowered to 3 so that the
// pass cap is reached. Each frame is a random key with its syndrome and a
// made-up posterior: reliable bits with the right sign and |LLR| >= Delta,
// a share of right bits with small |LLR| (suspicious but correct) and a
// share of wrong bits with small |LLR| (the residual errors). Decided bits,
// out_ok, out_stage1_ok and the pass count are compared with the reference
// model; frames reported ok must equal the key; the time from the last input
// beat to the first output beat must be passes * D cycles. Frames with no
// errors, with errors that peel away, with the pass cap hit and with too many
// suspicious bits to solve must all occur.
module tb_error_bits_erase;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int Z = 16, NB = 10, MB = 8, W = 10, MAX_PASS = 3, PW = 4;
  localparam int D = 2 * DEG * MB;
  localparam int DELTA = 165;

  logic clk = 0, rst_n = 0;
  logic [W-1:0] delta;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last, out_ok, out_stage1_ok;
  logic [PW-1:0] out_passes;
  logic [Z-1:0][W-1:0] in_llr;
  logic [Z-1:0] in_syn, out_bits;

  int checks = 0, failures = 0;
  int n_clean = 0, n_fixed = 0, n_capped = 0, n_failed = 0;

  error_bits_erase #(.Z(Z), .NB(NB), .MB(MB), .W(W), .MAX_PASS(MAX_PASS), .PW(PW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  ldpc_ref #(Z, NB, MB, W) ref_m;

  // p_err, p_sus in 1/1000
  task automatic run_frame(int p_err, int p_sus);
    int t_load, t_out, passes, nerr = 0, nkey = 0;
    bit ok, s1ok;
    for (int n = 0; n < ref_m.N; n++) begin
      int x = int'($urandom_range(999, 0));
      int mag;
      ref_m.u[n] = 1'($urandom_range(1, 0));
      if (x < p_err) begin
        mag = int'($urandom_range(DELTA - 1, 0));
        ref_m.post[n] = ref_m.u[n] ? mag : -mag;       // wrong side (or 0)
        if (mag == 0) ref_m.post[n] = ref_m.u[n] ? 1 : 0;
      end else if (x < p_err + p_sus) begin
        mag = int'($urandom_range(DELTA - 1, 1));
        ref_m.post[n] = ref_m.u[n] ? -mag : mag;
      end else begin
        mag = int'($urandom_range(511, DELTA));
        ref_m.post[n] = ref_m.u[n] ? -mag : mag;
      end
    end
    ref_m.make_syndrome();
    passes = ref_m.stage2(DELTA, MAX_PASS, ok, s1ok);
    for (int b = 0; b < NB; b++) begin
      for (int r = 0; r < Z; r++) begin
        in_llr[r] = W'(ref_m.post[b * Z + r]);
        in_syn[r] = (b < MB) ? ref_m.syn[b * Z + r] : 1'b0;
      end
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #1;
    end
    in_valid = 0;
    t_load = $time / 10;
    for (int b = 0; b < NB; b++) begin
      out_ready = ($urandom_range(3, 0) != 0);
      @(posedge clk);
      while (!(out_valid && out_ready)) begin
        if (b == 0 && !out_valid) t_out = $time / 10;
        #1 out_ready = ($urandom_range(3, 0) != 0);
        @(posedge clk);
      end
      if (b == 0) begin
        check(t_out - t_load == passes * D, $sformatf("latency %0d, expected %0d", t_out - t_load, passes * D));
        check(out_ok == ok, "out_ok");
        check(out_stage1_ok == s1ok, "out_stage1_ok");
        check(int'(out_passes) == passes, $sformatf("passes %0d, expected %0d", out_passes, passes));
      end
      for (int r = 0; r < Z; r++) begin
        if (out_bits[r] != ref_m.uh[b * Z + r]) nerr++;
        if (out_bits[r] != ref_m.u[b * Z + r]) nkey++;
      end
      check(out_last == (b == NB - 1), "out_last");
      #1;
    end
    out_ready = 0;
    check(nerr == 0, $sformatf("%0d bits differ from the reference", nerr));
    if (ok) check(nkey == 0, "frame reported ok but differs from the key");
    if (s1ok) n_clean++;
    else if (ok) n_fixed++;
    else n_failed++;
    if (passes == MAX_PASS + 1) n_capped++;
  endtask

  initial begin
    void'($urandom(11));
    ref_m = new();
    delta = W'(DELTA);
    in_llr = '0;
    in_syn = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_frame(0, 0);
    run_frame(0, 30);
    for (int i = 0; i < 8; i++) run_frame(15, 40);
    for (int i = 0; i < 6; i++) run_frame(40, 120);
    run_frame(100, 400);
    run_frame(250, 700);
    run_frame(300, 700);
    $display("frames: clean %0d, fixed %0d, failed %0d, pass cap hit %0d", n_clean, n_fixed, n_failed, n_capped);
    check(n_clean > 0, "no clean frame");
    check(n_fixed > 0, "no frame repaired by the second stage");
    check(n_failed > 0, "no unsolvable frame");
    check(n_capped > 0, "pass cap never reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
