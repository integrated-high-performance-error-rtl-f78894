// tb_sub_decoder - self-checking test of the first decoding stage.
//
// Small code (Z=16, NB=10, MB=8: rate 0.2, N=160). Random keys with noisy
// channel LLRs are decoded for several t_max values, including 0 (the
// channel LLRs pass straight through). Every posterior LLR and every
// syndrome bit is compared with the edge-by-edge reference model, and the
// decoding time is checked against t_max * D cycles, D = 2*DEG*MB.
// The output side is stalled at random to exercise the handshake.
module tb_sub_decoder;
  import ldpc_pkg::*;
  import ldpc_ref_pkg::*;

  localparam int Z = 16, NB = 10, MB = 8, W = 10, ITW = 6;
  localparam int D = 2 * DEG * MB;

  logic clk = 0, rst_n = 0;
  logic [ITW-1:0] max_iter;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last, busy;
  logic [Z-1:0][W-1:0] in_llr, out_llr;
  logic [Z-1:0] in_syn, out_syn;

  int checks = 0, failures = 0;

  sub_decoder #(.Z(Z), .NB(NB), .MB(MB), .W(W), .ITW(ITW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
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

  task automatic run_frame(int tmax, int amp, int noise);
    int t_load, t_out;
    int nerr = 0;
    ref_m.make_frame(amp, noise);
    ref_m.stage1(tmax);
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
    t_load = $time / 10;
    for (int b = 0; b < NB; b++) begin
      out_ready = ($urandom_range(3, 0) != 0);
      @(posedge clk);
      while (!(out_valid && out_ready)) begin
        if (b == 0 && !out_valid) t_out = $time / 10;
        #1 out_ready = ($urandom_range(3, 0) != 0);
        @(posedge clk);
      end
      if (b == 0 && tmax > 0) check(t_out - t_load == tmax * D, $sformatf("latency %0d, expected %0d", t_out - t_load, tmax * D));
      for (int r = 0; r < Z; r++) begin
        if ($signed(out_llr[r]) != ref_m.post[b * Z + r]) nerr++;
        if (b < MB && out_syn[r] != ref_m.syn[b * Z + r]) nerr++;
      end
      check(out_last == (b == NB - 1), "out_last");
      #1;
    end
    out_ready = 0;
    check(nerr == 0, $sformatf("t_max=%0d: %0d words differ from the reference", tmax, nerr));
  endtask

  initial begin
    void'($urandom(7));
    ref_m = new();
    max_iter = '0;
    in_llr = '0;
    in_syn = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    run_frame(3, 40, 70);
    run_frame(1, 60, 90);
    run_frame(0, 60, 90);
    run_frame(5, 30, 60);
    run_frame(2, 500, 100);   // saturating values
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
