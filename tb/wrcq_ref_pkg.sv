// wrcq_ref_pkg: bit-exact software model of the layered W-RCQ decoder, used by
// the end-to-end testbenches, plus helpers to build a test code and channel
// LLRs.
//
// The model follows the decoder equations directly, one layer at a time:
//   v2c  = sat(l - R'_{t-1}(u_old))           (0 subtracted in iteration 0)
//   q    = Q_t(v2c)
//   u    = sign product and minimum index over the other edges of the check
//   l    = sat(v2c + R'_t(u))
// with R'(d) = sign * max(0, tau_d - beta) (offset mode) or
// sign * min(127, round(tau_d * beta / 2^(b_v-1))) (multiplicative mode), and a
// parity check of all hard decisions after every iteration. It also counts
// how often saturation, the ReLU floor, the top quantizer index and a change of
// quantizer pair between iterations occur, so that a testbench can show each
// happened.
package wrcq_ref_pkg;

  class wrcq_ref_model;
    int Z, MB, NB, DC_MAX, IT_MAX, BV, BC, NQ, NRC, NCC;
    // code
    int deg[];                 // [MB]
    int col[][];               // [MB][DC_MAX]
    int shf[][];               // [MB][DC_MAX]
    int rcl[];                 // [MB]
    int ccl[];                 // [NB]
    // decoder tables
    int w[];                   // [IT_MAX*NRC*NCC]
    int tau[][];               // [NQ][2^(BC-1)]
    int qsel[];                // [IT_MAX]
    int nms, max_iter, share_from, num_layers;
    // state
    int post[][];              // [NB][Z]
    int c2v[][][];             // [MB][DC_MAX][Z]
    int iters, converged;
    // event counters
    int n_sat, n_relu, n_qtop, n_qswitch, n_shared;

    function new(int z, int mb, int nb, int dc, int itm, int bv, int bc, int nq, int nrc, int ncc);
      Z = z; MB = mb; NB = nb; DC_MAX = dc; IT_MAX = itm; BV = bv; BC = bc; NQ = nq; NRC = nrc; NCC = ncc;
      deg = new[MB]; col = new[MB]; shf = new[MB]; rcl = new[MB]; ccl = new[NB];
      foreach (col[m]) begin col[m] = new[DC_MAX]; shf[m] = new[DC_MAX]; end
      w = new[IT_MAX*NRC*NCC]; tau = new[NQ]; foreach (tau[q]) tau[q] = new[1 << (BC-1)];
      qsel = new[IT_MAX];
      post = new[NB]; foreach (post[n]) post[n] = new[Z];
      c2v = new[MB]; foreach (c2v[m]) begin c2v[m] = new[DC_MAX]; foreach (c2v[m][k]) c2v[m][k] = new[Z]; end
      nms = 0; max_iter = IT_MAX; share_from = IT_MAX; num_layers = MB;
      n_sat = 0; n_relu = 0; n_qtop = 0; n_qswitch = 0; n_shared = 0;
    endfunction

    function int maxv();
      return (1 << (BV-1)) - 1;
    endfunction

    function int sat(int a);
      if (a > maxv())  begin n_sat++; return maxv(); end
      if (a < -maxv()) begin n_sat++; return -maxv(); end
      return a;
    endfunction

    // Channel LLRs and tau thresholds use a grid of 2^frac steps per unit.
    function void set_power_quantizer(int q, real c, real gamma, int frac);
      int nt = 1 << (BC-1);
      for (int j = 0; j < nt; j++) tau[q][j] = $rtoi((2.0 ** frac) * c * ((real'(j) / nt) ** gamma) + 0.5);
      tau[q][0] = 0;
    endfunction

    function int wset(int t);
      return (t < share_from) ? t : share_from;
    endfunction

    function int recon(int d, int q, int beta);
      int nt = 1 << (BC-1);
      int r = tau[q][d % nt];
      int mg;
      if (nms != 0) begin
        mg = (r * beta + (1 << (BV-2))) >> (BV-1);
        if (mg > maxv()) mg = maxv();
      end else begin
        mg = (r > beta) ? r - beta : 0;
        if ((d % nt) != 0 && r <= beta) n_relu++;
      end
      return (d >= nt) ? -mg : mg;
    endfunction

    function int quant(int x, int q);
      int nt = 1 << (BC-1);
      int mg = (x < 0) ? -x : x;
      int j = 0;
      if (mg > maxv()) mg = maxv();
      while (j < nt - 1 && mg >= tau[q][j+1]) j++;
      if (j == nt - 1) n_qtop++;
      return ((x < 0) ? nt : 0) + j;
    endfunction

    function int weight(int t, int m, int n);
      return w[(wset(t) * NRC + rcl[m]) * NCC + ccl[n]];
    endfunction

    function bit parity_ok();
      for (int m = 0; m < num_layers; m++)
        for (int j = 0; j < Z; j++) begin
          int p = 0;
          for (int k = 0; k < deg[m]; k++) p ^= (post[col[m][k]][(j + shf[m][k]) % Z] < 0) ? 1 : 0;
          if (p != 0) return 0;
        end
      return 1;
    endfunction

    // Decodes the LLRs already placed in post[][].
    function void decode();
      int nt = 1 << (BC-1);
      int v2c[][];
      int qv[][];
      v2c = new[DC_MAX]; qv = new[DC_MAX];
      foreach (v2c[k]) begin v2c[k] = new[Z]; qv[k] = new[Z]; end
      converged = 0;
      for (int t = 0; t < max_iter; t++) begin
        if (t > 0 && qsel[t] != qsel[t-1]) n_qswitch++;
        if (t > share_from) n_shared++;
        for (int m = 0; m < num_layers; m++) begin
          for (int k = 0; k < deg[m]; k++) begin
            int n = col[m][k];
            for (int j = 0; j < Z; j++) begin
              int l = post[n][(j + shf[m][k]) % Z];
              int old = (t > 0) ? recon(c2v[m][k][j], qsel[t-1], weight(t-1, m, n)) : 0;
              v2c[k][j] = sat(l - old);
              qv[k][j]  = quant(v2c[k][j], qsel[t]);
            end
          end
          for (int k = 0; k < deg[m]; k++) begin
            int n = col[m][k];
            for (int j = 0; j < Z; j++) begin
              int s = 0, mn = nt - 1, u;
              for (int o = 0; o < deg[m]; o++) if (o != k) begin
                s ^= qv[o][j] / nt;
                if ((qv[o][j] % nt) < mn) mn = qv[o][j] % nt;
              end
              u = s * nt + mn;
              c2v[m][k][j] = u;
              post[n][(j + shf[m][k]) % Z] = sat(v2c[k][j] + recon(u, qsel[t], weight(t, m, n)));
            end
          end
        end
        iters = t + 1;
        if (parity_ok()) begin
          converged = 1;
          return;
        end
      end
    endfunction

    // Cycles from the start pulse to done for a decode of `it` iterations.
    function int cycles(int it);
      int per = 2;
      for (int m = 0; m < num_layers; m++) per += 3 * deg[m] + 1;
      return 1 + it * per;
    endfunction
  endclass

  // Code in which every block column meets all layers but one: column n is
  // left out of layer (n mod MB); shifts are random.
  function automatic void build_code(wrcq_ref_model md);
    for (int m = 0; m < md.MB; m++) md.deg[m] = 0;
    for (int n = 0; n < md.NB; n++)
      for (int m = 0; m < md.MB; m++)
        if (m != n % md.MB) begin
          md.col[m][md.deg[m]] = n;
          md.shf[m][md.deg[m]] = $urandom % md.Z;
          md.deg[m]++;
        end
  endfunction

  // Rate-compatible protograph-style code: layer r meets block column 8 + r
  // (a new parity column of degree 1 unless later layers also pick it) and
  // 1 + r % 4 (or all 8 for r = 0) random earlier columns, so that the
  // first L layers with the first 8 + L columns form a code of rate 8/(8+L).
  // Layers are kept within DC_MAX circulants. Shifts are random.
  function automatic void build_rc_code(wrcq_ref_model md);
    for (int r = 0; r < md.MB; r++) begin
      int want, c;
      bit used[];
      used = new[8 + r + 1];
      md.deg[r] = 0;
      want = (r == 0) ? 8 : 2 + r % 4;
      if (want > md.DC_MAX - 1) want = md.DC_MAX - 1;
      if (r == 0) for (int n = 0; n < 8; n++) used[n] = 1;
      else begin
        int got = 0;
        while (got < want) begin
          c = $urandom % (8 + r);
          if (!used[c]) begin used[c] = 1; got++; end
        end
      end
      used[8 + r] = 1;
      for (int n = 0; n <= 8 + r; n++) if (used[n]) begin
        md.col[r][md.deg[r]] = n;
        md.shf[r][md.deg[r]] = $urandom % md.Z;
        md.deg[r]++;
      end
    end
  endfunction

  // Degree class of every layer and block column: classes are numbered in
  // order of first appearance of each distinct degree, capped at NRC-1/NCC-1.
  function automatic void degree_classes(wrcq_ref_model md);
    int vdeg[];
    int seen[$];
    int idx[$];
    vdeg = new[md.NB];
    for (int m = 0; m < md.MB; m++) for (int k = 0; k < md.deg[m]; k++) vdeg[md.col[m][k]]++;
    seen.delete();
    for (int m = 0; m < md.MB; m++) begin
      idx = seen.find_first_index(x) with (x == md.deg[m]);
      if (idx.size() == 0) begin seen.push_back(md.deg[m]); md.rcl[m] = seen.size() - 1; end
      else md.rcl[m] = idx[0];
      if (md.rcl[m] >= md.NRC) md.rcl[m] = md.NRC - 1;
    end
    seen.delete();
    for (int n = 0; n < md.NB; n++) begin
      idx = seen.find_first_index(x) with (x == vdeg[n]);
      if (idx.size() == 0) begin seen.push_back(vdeg[n]); md.ccl[n] = seen.size() - 1; end
      else md.ccl[n] = idx[0];
      if (md.ccl[n] >= md.NCC) md.ccl[n] = md.NCC - 1;
    end
  endfunction

  // BPSK all-zero codeword over AWGN with standard deviation sigma; LLR
  // 2y/sigma^2 on a grid of 2^frac steps per unit, saturated to b_v bits.
  function automatic int channel_llr(real sigma, int frac, int bv);
    real u1, u2, nz, y, l;
    int li, mx;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    nz = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
    y  = 1.0 + sigma * nz;
    l  = 2.0 * y / (sigma * sigma) * (2.0 ** frac);
    li = (l >= 0.0) ? $rtoi(l + 0.5) : -$rtoi(-l + 0.5);
    mx = (1 << (bv - 1)) - 1;
    if (li > mx) li = mx;
    if (li < -mx) li = -mx;
    return li;
  endfunction

endpackage
