// lscd_ref_pkg: behavioural reference for the decoder testbenches.
//
// lscd_ref is a straightforward list SC decoder that keeps a full copy of
// every path (LLRs of every stage, decoded bits, CRC, metric) and copies
// whole paths at each list-management step, instead of the pointer-based,
// copy-free storage of the RTL. It follows the same fixed-point rules
// (min-sum F, saturating G, Q_PM metric saturation, LCLM candidates, serial
// 2L-to-L pruning with index-ordered ties, metric normalisation and CRC path
// choice), so its decoded vector must equal the RTL's bit for bit.
// The package also holds the code construction and channel helpers used to
// build test frames: Bhattacharyya-bound construction, polar encoder, CRC
// and BPSK/AWGN LLRs.
package lscd_ref_pkg;

  class lscd_ref #(int N = 64, int L = 4, int MLOG = 2, int QPM = 9, int R = 8);
    localparam int NL = $clog2(N);
    localparam int M  = 1 << MLOG;
    localparam int NC = 1 << M;

    int          btype [N];     // 0 frozen, 1 reliable, 2 unreliable
    logic [R-1:0] poly;

    // per-path state
    int   alpha [L][NL+1][N];
    bit   uh    [L][N];
    int   na    [L][NL+1][N];   // copies made at list management
    bit   nu    [L][N];
    int   pm    [L];
    bit   ok    [L];
    logic [R-1:0] crc [L];

    // statistics of the last decode
    int   n_nosort, n_multisort, n_notfull, n_sortrounds;
    int   sel, best_pm_path;
    bit   pass;

    function new(logic [R-1:0] p);
      poly = p;
    endfunction

    static function int f(int a, int b);
      int ma, mb, mn;
      ma = a < 0 ? -a : a;
      mb = b < 0 ? -b : b;
      mn = ma < mb ? ma : mb;
      return ((a < 0) != (b < 0)) ? -mn : mn;
    endfunction

    static function int g(bit s, int a, int b);
      int r;
      r = s ? b - a : b + a;
      if (r > 127) r = 127;
      if (r < -127) r = -127;
      return r;
    endfunction

    function logic [R-1:0] crc_step(logic [R-1:0] c, bit b);
      bit fb;
      fb = c[R-1] ^ b;
      return {c[R-2:0], 1'b0} ^ (fb ? poly : '0);
    endfunction

    // polar transform of n bits in place: x = u * F^{(x)log2(n)}
    static function void xform(ref bit v[], input int n);
      for (int h = 1; h < n; h *= 2)
        for (int i = 0; i < n; i++)
          if ((i & h) == 0) v[i] ^= v[i + h];
    endfunction

    task automatic decode(input int llr [N], output bit uout [N]);
      int pmax;
      pmax = (1 << QPM) - 1;
      for (int l = 0; l < L; l++) begin
        ok[l] = (l == 0); pm[l] = 0; crc[l] = '0;
        for (int i = 0; i < N; i++) alpha[l][NL][i] = llr[i];
      end
      n_nosort = 0; n_multisort = 0; n_notfull = 0; n_sortrounds = 0;
      for (int j = 0; j < N / M; j++) begin
        int stop, base;
        base = j * M;
        if (j == 0) stop = NL - 1;
        else begin
          int t; t = 0;
          while (((j >> t) & 1) == 0) t++;
          stop = MLOG + t;
        end
        for (int s = stop; s >= MLOG; s--) begin
          for (int l = 0; l < L; l++) begin
            if (s == stop && j != 0) begin
              bit beta [];
              int b0;
              beta = new[1 << s];
              b0 = base - (1 << s);
              for (int i = 0; i < (1 << s); i++) beta[i] = uh[l][b0 + i];
              xform(beta, 1 << s);
              for (int i = 0; i < (1 << s); i++)
                alpha[l][s][i] = g(beta[i], alpha[l][s+1][i], alpha[l][s+1][(1 << s) + i]);
            end else begin
              for (int i = 0; i < (1 << s); i++)
                alpha[l][s][i] = f(alpha[l][s+1][i], alpha[l][s+1][(1 << s) + i]);
            end
          end
        end
        // list management
        begin
          int cpm [L][NC]; int cu [L][NC]; bit cok [L][NC];
          int kt [L]; int ku [L]; int kp [L]; bit ko [L];
          int umask, fmask, nvalid, rounds;
          umask = 0; fmask = 0; nvalid = 0;
          for (int i = 0; i < M; i++) begin
            if (btype[base + i] == 2) umask |= (1 << i);
            if (btype[base + i] == 0) fmask |= (1 << i);
          end
          for (int l = 0; l < L; l++) nvalid += ok[l];
          if (nvalid < L) n_notfull++;
          for (int l = 0; l < L; l++)
            for (int k = 0; k < NC; k++) begin
              bit found; int best, bu;
              found = 0; best = 0; bu = 0;
              for (int u = 0; u < NC; u++) begin
                bit v []; int met;
                if ((u & fmask) != 0 || (u & umask) != (k & umask)) continue;
                v = new[M];
                for (int i = 0; i < M; i++) v[i] = (u >> i) & 1;
                xform(v, M);
                met = pm[l];
                for (int i = 0; i < M; i++) begin
                  int a; a = alpha[l][MLOG][i];
                  if (v[i] != (a < 0)) met += (a < 0 ? -a : a);
                end
                if (!found || met < best) begin found = 1; best = met; bu = u; end
              end
              cok[l][k] = ok[l] && found && ((k & ~umask) == 0);
              cpm[l][k] = best > pmax ? pmax : best;
              cu[l][k]  = bu;
            end
          for (int l = 0; l < L; l++) begin
            kt[l] = l; ku[l] = cu[l][0]; kp[l] = cpm[l][0]; ko[l] = cok[l][0];
          end
          rounds = 0;
          for (int k = 1; k < NC; k++) begin
            int it [2*L]; int iu [2*L]; int ip [2*L]; bit io [2*L];
            int order [$];
            if ((k & ~umask) != 0) continue;
            rounds++;
            for (int l = 0; l < L; l++) begin
              it[l] = kt[l]; iu[l] = ku[l]; ip[l] = kp[l]; io[l] = ko[l];
              it[L+l] = l; iu[L+l] = cu[l][k]; ip[L+l] = cpm[l][k]; io[L+l] = cok[l][k];
            end
            // stable selection of the L best: valid first, then metric
            for (int r = 0; r < L; r++) begin
              int bi; bi = -1;
              for (int i = 0; i < 2 * L; i++) begin
                bit used; used = 0;
                foreach (order[q]) if (order[q] == i) used = 1;
                if (used) continue;
                if (bi < 0 || (io[i] && !io[bi]) || (io[i] == io[bi] && ip[i] < ip[bi])) bi = i;
              end
              order.push_back(bi);
            end
            for (int r = 0; r < L; r++) begin
              kt[r] = it[order[r]]; ku[r] = iu[order[r]]; kp[r] = ip[order[r]]; ko[r] = io[order[r]];
            end
          end
          if (rounds == 0) n_nosort++;
          if (rounds >= 2) n_multisort++;
          n_sortrounds += rounds;
          // commit: copy whole paths
          begin
            logic [R-1:0] nc [L];
            int   mn;
            mn = pmax;
            for (int l = 0; l < L; l++) if (ko[l] && kp[l] < mn) mn = kp[l];
            for (int l = 0; l < L; l++) begin
              for (int st = MLOG + 1; st < NL; st++)
                for (int i = 0; i < (1 << st); i++) na[l][st][i] = alpha[kt[l]][st][i];
              for (int i = 0; i < base; i++) nu[l][i] = uh[kt[l]][i];
              nc[l] = crc[kt[l]];
              for (int i = 0; i < M; i++) begin
                nu[l][base + i] = (ku[l] >> i) & 1;
                if (btype[base + i] != 0) nc[l] = crc_step(nc[l], nu[l][base + i]);
              end
            end
            for (int l = 0; l < L; l++) begin
              for (int st = MLOG + 1; st < NL; st++)
                for (int i = 0; i < (1 << st); i++) alpha[l][st][i] = na[l][st][i];
              for (int i = 0; i < base + M; i++) uh[l][i] = nu[l][i];
              crc[l] = nc[l];
              pm[l] = (kp[l] - mn) & pmax; ok[l] = ko[l];
            end
          end
        end
      end
      // path choice
      begin
        int bp, ba;
        bp = -1; ba = -1;
        for (int l = 0; l < L; l++) begin
          if (ok[l] && (ba < 0 || pm[l] < pm[ba])) ba = l;
          if (ok[l] && crc[l] == '0 && (bp < 0 || pm[l] < pm[bp])) bp = l;
        end
        pass = (bp >= 0);
        sel = pass ? bp : ba;
        best_pm_path = ba;
        for (int i = 0; i < N; i++) uout[i] = uh[sel][i];
      end
    endtask
  endclass

  // Bhattacharyya parameters of the N bit channels at design value z0
  // (bit b of the index, from the top, selects the worse (0) or better (1)
  // branch of the split at stage b).
  function automatic void bhattacharyya(input int n, input real z0, ref real z []);
    int nl;
    nl = $clog2(n);
    z = new[n];
    for (int i = 0; i < n; i++) begin
      real v;
      v = z0;
      for (int b = nl - 1; b >= 0; b--)
        v = ((i >> b) & 1) ? v * v : 2.0 * v - v * v;
      z[i] = v;
    end
  endfunction

  // Gaussian sample (Box-Muller) from $urandom
  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1_000_000, 1)) ) / 1_000_001.0;
    u2 = (real'($urandom_range(1_000_000, 0)) ) / 1_000_001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

endpackage
