// ldpc_ref_pkg - reference model for the testbenches.
//
// A plain, bit-serial model of the code and of both decoding stages. It
// walks the parity-check matrix edge by edge with integer arithmetic and
// knows nothing of the hardware's lanes, rotations, memories or state
// machines. Fixed-point rules are those the hardware documents: symmetric
// saturation at +-(2^(W-1)-1), scaled min-sum with factor 3/4 (floor),
// strict "<" when tracking the two minima, u = 1 for LLR <= 0, suspicious
// when |LLR| < Delta, layers in order and fixes seen at once by later
// layers.
package ldpc_ref_pkg;
  import ldpc_pkg::*;

  class ldpc_ref #(int Z = 16, int NB = 10, int MB = 8, int W = 10);
    localparam int N    = Z * NB;
    localparam int M    = Z * MB;
    localparam int KB   = NB - MB;
    localparam int LMAX = (1 << (W - 1)) - 1;

    int col [MB][DEG];
    int sh  [MB][DEG];
    bit u    [];    // the key the frame was made from
    int llr  [];    // channel LLRs
    bit syn  [];    // syndrome u*H^T
    int post [];    // posterior LLRs after the first stage
    int rmsg [];    // check messages
    bit uh   [];    // decided bits after the second stage
    bit es   [];    // suspicious set

    function new();
      for (int l = 0; l < MB; l++)
        for (int k = 0; k < DEG; k++) begin
          col[l][k] = base_col(l, k, KB, MB);
          sh[l][k]  = base_shift(l, k, Z);
        end
      u = new[N]; llr = new[N]; syn = new[M]; post = new[N];
      rmsg = new[M * DEG]; uh = new[N]; es = new[N];
    endfunction

    // variable of edge k of check row m
    function int var_of(int m, int k);
      int l = m / Z, r = m % Z;
      return col[l][k] * Z + (r + sh[l][k]) % Z;
    endfunction

    function int sat(int x);
      if (x > LMAX)  return LMAX;
      if (x < -LMAX) return -LMAX;
      return x;
    endfunction

    function int iabs(int x);
      return (x < 0) ? -x : x;
    endfunction

    function void make_syndrome();
      for (int m = 0; m < M; m++) begin
        bit p = 0;
        for (int k = 0; k < DEG; k++) p ^= u[var_of(m, k)];
        syn[m] = p;
      end
    endfunction

    // random key; LLR = +-amp + uniform noise in [-noise, noise]
    function void make_frame(int amp, int noise);
      for (int n = 0; n < N; n++) begin
        int v;
        u[n] = 1'($urandom_range(1, 0));
        v = (u[n] ? -amp : amp) + int'($urandom_range(2 * noise, 0)) - noise;
        llr[n] = sat(v);
      end
      make_syndrome();
    endfunction

    // random key; channel LLRs made so that a share p_err (per mille) of
    // bits is wrong with |LLR| < delta, a share p_sus is right with
    // |LLR| < delta, and the rest is right with |LLR| >= delta
    function void make_crafted(int p_err, int p_sus, int delta);
      for (int n = 0; n < N; n++) begin
        int x = int'($urandom_range(999, 0));
        int mag;
        u[n] = 1'($urandom_range(1, 0));
        if (x < p_err) begin
          mag = int'($urandom_range(delta - 1, 1));
          llr[n] = u[n] ? mag : -mag;
        end else if (x < p_err + p_sus) begin
          mag = int'($urandom_range(delta - 1, 1));
          llr[n] = u[n] ? -mag : mag;
        end else begin
          mag = int'($urandom_range(LMAX, delta));
          llr[n] = u[n] ? -mag : mag;
        end
      end
      make_syndrome();
    endfunction

    // number of check rows the bits b[] violate
    function int bad_rows(bit b []);
      int c = 0;
      for (int m = 0; m < M; m++) begin
        bit p = syn[m];
        for (int k = 0; k < DEG; k++) p ^= b[var_of(m, k)];
        c += p;
      end
      return c;
    endfunction

    function void stage1(int tmax);
      for (int n = 0; n < N; n++) post[n] = llr[n];
      for (int i = 0; i < M * DEG; i++) rmsg[i] = 0;
      for (int it = 0; it < tmax; it++)
        for (int m = 0; m < M; m++) begin
          int q [DEG];
          int min1, min2, pos;
          bit sg;
          sg = syn[m];
          min1 = LMAX; min2 = LMAX; pos = 0;
          for (int k = 0; k < DEG; k++) begin
            q[k] = sat(post[var_of(m, k)] - rmsg[m * DEG + k]);
            sg ^= (q[k] < 0);
            if (k == 0) begin
              min1 = iabs(q[k]);
            end else if (iabs(q[k]) < min1) begin
              min2 = min1; min1 = iabs(q[k]); pos = k;
            end else if (iabs(q[k]) < min2) begin
              min2 = iabs(q[k]);
            end
          end
          for (int k = 0; k < DEG; k++) begin
            int mag, r;
            mag = (k == pos) ? min2 : min1;
            r   = (3 * mag) / 4;
            if (sg ^ (q[k] < 0)) r = -r;
            rmsg[m * DEG + k]  = r;
            post[var_of(m, k)] = sat(q[k] + r);
          end
        end
    endfunction

    // second stage on post[]; returns the number of sweeps made
    function int stage2(int delta, int max_pass, output bit ok, output bit s1ok);
      int  pass = 0;
      bit  verify = 0;
      for (int n = 0; n < N; n++) begin
        uh[n] = (post[n] <= 0);
        es[n] = (iabs(post[n]) < delta);
      end
      forever begin
        bit fixed = 0, flipped = 0, allok = 1;
        for (int m = 0; m < M; m++) begin
          int  ne = 0, kp = 0;
          bit  sc = syn[m], sa = syn[m];
          for (int k = 0; k < DEG; k++) begin
            int v = var_of(m, k);
            sa ^= uh[v];
            if (es[v]) begin
              if (ne == 0) kp = k;
              ne++;
            end else sc ^= uh[v];
          end
          if (sa) allok = 0;
          if (!verify && ne == 1) begin
            int v = var_of(m, kp);
            if (uh[v] != sc) flipped = 1;
            uh[v] = sc; es[v] = 0; fixed = 1;
          end
        end
        pass++;
        if (pass == 1) s1ok = allok && !flipped;
        if (verify || !fixed) begin
          ok = allok;
          return pass;
        end
        if (pass == max_pass) verify = 1;
      end
    endfunction
  endclass

endpackage
