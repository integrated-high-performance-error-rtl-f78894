// error_bits_erase - second decoding stage: residual bit error correction
// by thresholding and syndrome peeling.
//
// The first stage leaves a few wrong bits, and those bits nearly always have
// small reliability |LLR|. This stage loads a frame's posterior LLRs and
// syndrome and:
//   (a) marks every bit with |LLR| < Delta as suspicious (set e), the rest
//       as reliable (set e-bar), and takes u = 1 where LLR <= 0;
//   (b) for every check row computes s_c = s XOR (parity of its reliable
//       bits);
//   (c) where a row holds exactly one suspicious bit, sets that bit to the
//       row's s_c and moves it to the reliable set;
//   (d) repeats (b)-(c) until no row with exactly one suspicious bit is left.
// No information beyond the syndrome already sent is used.
//
// Hardware: one pass of (b)-(c) sweeps the MB layers exactly like a
// decoding iteration, with Z rows per layer in parallel (erase_lane). Per
// layer, DEG read cycles gather the row state and DEG write cycles apply the
// fixes and write u and e back, so one pass takes D = 2*DEG*MB cycles, the
// same D as one first-stage iteration. A fix made in one layer is seen by
// the layers after it in the same pass (in-place update). The order only
// changes how many passes it takes, not the final result: peeling ends at
// the same set of unsolved bits whatever the order. The
// same sweep checks every row against the syndrome. A pass that fixes
// nothing ends the frame, and its check says whether the frame is now
// correct (out_ok). At most MAX_PASS passes are made; if the last one still
// fixed bits, one more pass only checks. The cap, the in-place update and the
// status outputs are this design's own choices; steps (a)-(d) and the rule
// for u follow the source.
//
// Interface: the frame arrives as NB beats (in_*), in the format that
// sub_decoder sends, and leaves as NB beats of Z decided bits (out_*), with
// out_ok, out_stage1_ok (no bit changed and all checks held in the first
// pass, i.e. the first stage had already succeeded) and out_passes held
// through the output beats. delta is sampled at the first input beat.
module error_bits_erase
  import ldpc_pkg::*;
#(
  parameter int Z        = Z_DEF,
  parameter int NB       = NB_DEF,
  parameter int MB       = MB_DEF,
  parameter int W        = W_DEF,
  parameter int MAX_PASS = 8,
  parameter int PW       = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [W-1:0]         delta,      // threshold, LSBs of the LLR
  // frame in, from a sub_decoder
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [Z-1:0][W-1:0]  in_llr,
  input  logic [Z-1:0]         in_syn,
  // corrected frame out
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [Z-1:0]         out_bits,
  output logic                 out_last,
  output logic                 out_ok,
  output logic                 out_stage1_ok,
  output logic [PW-1:0]        out_passes
);

  localparam int KB = NB - MB;
  localparam int CW = cbits(NB);
  localparam int LW = cbits(MB);
  localparam int SW = cbits(Z);

  typedef enum logic [1:0] {S_LOAD, S_READ, S_WRITE, S_OUT} state_t;

  // ---- code tables (constants) ----
  logic [CW-1:0] col_tab [MB][DEG];
  logic [SW-1:0] sh_tab  [MB][DEG];
  logic [SW-1:0] ush_tab [MB][DEG];
  for (genvar i = 0; i < MB; i++) begin : g_row
    for (genvar j = 0; j < DEG; j++) begin : g_edge
      assign col_tab[i][j] = CW'(base_col(i, j, KB, MB));
      assign sh_tab[i][j]  = SW'(base_shift(i, j, Z));
      assign ush_tab[i][j] = SW'((Z - base_shift(i, j, Z)) % Z);
    end
  end

  // ---- storage ----
  logic [Z-1:0] umem [NB];     // hard decisions
  logic [Z-1:0] emem [NB];     // 1 = suspicious (in e)
  logic [Z-1:0] smem [MB];     // syndrome

  logic [Z-1:0][1:0]    cnt, cnt_n;
  logic [Z-1:0][KW-1:0] kpos, kpos_n;
  logic [Z-1:0]         sc, sc_n, sa, sa_n;

  state_t        state;
  logic [CW-1:0] beat;
  logic [LW-1:0] layer;
  logic [KW-1:0] k;
  logic [PW-1:0] pass;
  logic [W-1:0]  delta_q;
  logic          fixed_any, flipped_any, all_ok, verify_only;
  logic          ok_q, s1ok_q;
  logic [PW-1:0] passes_q;

  // ---- datapath ----
  logic [CW-1:0] cur_col;
  logic [SW-1:0] cur_sh, cur_ush;
  logic [Z-1:0]  u_rot, e_rot, ssel, fix, u_new, e_new, u_back, e_back;
  logic [Z-1:0]  in_u, in_e;
  logic [W-1:0]  delta_use;

  always_comb begin
    cur_col   = col_tab[layer][k];
    cur_sh    = sh_tab[layer][k];
    cur_ush   = ush_tab[layer][k];
    ssel      = smem[layer];
    delta_use = (beat == '0) ? delta : delta_q;
  end

  qc_rotate #(.Z(Z), .W(1), .SW(SW)) u_rot_u  (.din(umem[cur_col]), .shift(cur_sh),  .dout(u_rot));
  qc_rotate #(.Z(Z), .W(1), .SW(SW)) u_rot_e  (.din(emem[cur_col]), .shift(cur_sh),  .dout(e_rot));
  qc_rotate #(.Z(Z), .W(1), .SW(SW)) u_back_u (.din(u_new),         .shift(cur_ush), .dout(u_back));
  qc_rotate #(.Z(Z), .W(1), .SW(SW)) u_back_e (.din(e_new),         .shift(cur_ush), .dout(e_back));

  for (genvar r = 0; r < Z; r++) begin : g_lane
    llr_classify #(.W(W)) u_cls (.llr(in_llr[r]), .delta(delta_use), .u(in_u[r]), .e(in_e[r]));
    erase_lane #(.KW(KW)) u_lane (
      .k(k), .syn(ssel[r]), .u_rot(u_rot[r]), .e_rot(e_rot[r]),
      .cnt(cnt[r]), .kpos(kpos[r]), .sc(sc[r]), .sa(sa[r]),
      .cnt_n(cnt_n[r]), .kpos_n(kpos_n[r]), .sc_n(sc_n[r]), .sa_n(sa_n[r]),
      .fix_en(!verify_only), .fix(fix[r]), .u_new(u_new[r]), .e_new(e_new[r])
    );
  end

  // ---- control ----
  logic last_edge, last_layer, frame_done;
  always_comb begin
    last_edge  = (k == KW'(DEG - 1));
    last_layer = (layer == LW'(MB - 1));
    // the sweep that ends now: did it change anything?
    frame_done = verify_only || !(fixed_any || (|fix));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_LOAD;
      beat        <= '0;
      layer       <= '0;
      k           <= '0;
      pass        <= '0;
      delta_q     <= '0;
      fixed_any   <= 1'b0;
      flipped_any <= 1'b0;
      all_ok      <= 1'b1;
      verify_only <= 1'b0;
      ok_q        <= 1'b0;
      s1ok_q      <= 1'b0;
      passes_q    <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          if (beat == '0) delta_q <= delta;
          if (beat == CW'(NB - 1)) begin
            beat        <= '0;
            layer       <= '0;
            k           <= '0;
            pass        <= '0;
            fixed_any   <= 1'b0;
            flipped_any <= 1'b0;
            all_ok      <= 1'b1;
            verify_only <= 1'b0;
            state       <= S_READ;
          end else begin
            beat <= beat + 1'b1;
          end
        end
        S_READ: begin
          k <= k + 1'b1;
          if (last_edge) state <= S_WRITE;
        end
        S_WRITE: begin
          k <= k + 1'b1;
          if (k == '0) all_ok <= all_ok && (sa == '0);
          if (|fix) fixed_any <= 1'b1;
          if (|(fix & (u_new ^ u_rot))) flipped_any <= 1'b1;
          if (last_edge) begin
            layer <= last_layer ? '0 : layer + 1'b1;
            state <= S_READ;
            if (last_layer) begin
              pass        <= pass + 1'b1;
              fixed_any   <= 1'b0;
              flipped_any <= 1'b0;
              all_ok      <= 1'b1;
              if (pass == '0)
                s1ok_q <= all_ok && !(flipped_any || (|(fix & (u_new ^ u_rot))));
              if (frame_done) begin
                ok_q     <= all_ok;
                passes_q <= pass + 1'b1;
                state    <= S_OUT;
              end else if (pass + 1'b1 == PW'(MAX_PASS)) begin
                verify_only <= 1'b1;
              end
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

  // ---- memories and row state ----
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      umem[beat] <= in_u;
      emem[beat] <= in_e;
      if (int'(beat) < MB) smem[LW'(beat)] <= in_syn;
    end
    if (state == S_READ) begin
      cnt  <= cnt_n;
      kpos <= kpos_n;
      sc   <= sc_n;
      sa   <= sa_n;
    end
    if (state == S_WRITE) begin
      umem[cur_col] <= u_back;
      emem[cur_col] <= e_back;
    end
  end

  always_comb begin
    in_ready      = (state == S_LOAD);
    out_valid     = (state == S_OUT);
    out_bits      = umem[beat];
    out_last      = (state == S_OUT) && (beat == CW'(NB - 1));
    out_ok        = ok_q;
    out_stage1_ok = s1ok_q;
    out_passes    = passes_q;
  end

endmodule
