// tb_phmm_pkg: test-side pHMM model shared by the core and top testbenches.
//
// phmm_model builds a traditional pHMM of L positions (state 3k match, 3k+1
// insertion, 3k+2 deletion; M_k -> M_k+1, I_k, D_k+1; I_k -> I_k, M_k+1;
// D_k -> M_k+1, D_k+1) with random probabilities, a random DNA sequence, the
// per-state graph records the accelerator reads, and a reference Baum-Welch
// in double precision: Forward, Backward, the histogram filter rule, and the
// re-estimated transition and emission probabilities. Every state emits, as
// in the equations the accelerator implements.
package tb_phmm_pkg;
  import aphmm_pkg::*;

  // IEEE single <-> double conversions done on the bit patterns (denormals
  // flushed to zero, rounding to nearest on the way down)
  function automatic fp32_t r2f(real r);
    logic [63:0] d;
    int          e;
    logic [23:0] m;
    d = $realtobits(r);
    e = int'(d[62:52]) - 1023 + 127;
    if (d[62:52] == '0 || e <= 0) return {d[63], 31'd0};
    m = {1'b0, d[51:29]} + 24'(d[28]);
    if (m[23]) begin e++; m = '0; end
    if (e >= 255) return {d[63], 8'hFF, 23'd0};
    return {d[63], 8'(e), m[22:0]};
  endfunction
  function automatic real f2r(fp32_t f);
    if (f[30:23] == '0) return 0.0;
    return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
  endfunction

  // small hash used as a reproducible random source
  function automatic int unsigned hrand(int unsigned x);
    x = x * 32'd1103515245 + 32'd12345;
    x = x ^ (x >> 13);
    x = x * 32'd2654435761;
    return x ^ (x >> 16);
  endfunction

  localparam int MAXN = 96;   // largest model the class holds

  class phmm_model;
    int     L, N, T, fsize;
    bit     filter_en;
    // graph: successor lists
    int     nsucc [MAXN];
    int     succ  [MAXN][9];
    real    alpha [MAXN][9];  // alpha[i][k] = alpha_{i, succ[i][k]}
    real    emis  [MAXN][4];
    real    pi    [MAXN];
    int     seq   [];         // seq[t], t = 1..T
    // reference results
    real    F [][], B [][];
    bit     fkeep [][], bkeep [][];
    real    tnum [MAXN][9];
    bit     tseen [MAXN][9];
    real    enum_ [MAXN][4], eden [MAXN];

    function void add_succ(int i, int j);
      int n;
      n = nsucc[i];
      succ[i][n] = j;
      nsucc[i] = n + 1;
    endfunction

    function new(int L_, int T_, bit filt, int fs, int seed);
      int s;
      real sum;
      s = seed;
      L = L_; N = 3 * L_; T = T_; filter_en = filt; fsize = fs;
      for (int i = 0; i < N; i++) begin
        int k = i / 3, ty = i % 3;
        nsucc[i] = 0;
        if (ty == 0) begin                       // match
          if (k + 1 < L) begin add_succ(i, 3*(k+1)); end
          add_succ(i, 3*k + 1);
          if (k + 1 < L) begin add_succ(i, 3*(k+1) + 2); end
        end else if (ty == 1) begin              // insertion
          add_succ(i, i);
          if (k + 1 < L) begin add_succ(i, 3*(k+1)); end
        end else begin                           // deletion
          if (k + 1 < L) begin add_succ(i, 3*(k+1)); end
          if (k + 1 < L) begin add_succ(i, 3*(k+1) + 2); end
        end
        sum = 0;
        for (int j = 0; j < nsucc[i]; j++) begin
          alpha[i][j] = 0.2 + real'(hrand(s + i*17 + j) % 1000) / 1000.0;
          sum += alpha[i][j];
        end
        for (int j = 0; j < nsucc[i]; j++) alpha[i][j] /= sum;
        sum = 0;
        for (int c = 0; c < 4; c++) begin
          emis[i][c] = 0.05 + real'(hrand(s + i*31 + c + 7) % 1000) / 1000.0;
          sum += emis[i][c];
        end
        for (int c = 0; c < 4; c++) emis[i][c] /= sum;
        pi[i] = (i == 0) ? 0.9 : ((i == 1) ? 0.1 : 0.0);
      end
      seq = new[T + 1];
      for (int t = 1; t <= T; t++) seq[t] = int'(hrand(s + 1000 + t) % 4);
    endfunction

    // graph record as the accelerator reads it
    function graph_rec_t rec(dir_e d, int id);
      graph_rec_t r;
      int n;
      r = '0;
      if (d == DIR_BWD) begin
        for (int k = 0; k < nsucc[id]; k++) begin
          r.nbr_vld[k] = 1'b1;
          r.nbr_id[k]  = sid_t'(succ[id][k]);
          r.alpha[k]   = r2f(alpha[id][k]);
          for (int c = 0; c < 4; c++) r.emis[k][c] = r2f(emis[succ[id][k]][c]);
        end
      end else begin
        n = 0;
        for (int i = 0; i < N; i++)
          for (int k = 0; k < nsucc[i]; k++)
            if (succ[i][k] == id) begin
              r.nbr_vld[n] = 1'b1;
              r.nbr_id[n]  = sid_t'(i);
              r.alpha[n]   = r2f(alpha[i][k]);
              n++;
            end
        for (int k = 0; k < 9; k++)
          for (int c = 0; c < 4; c++) r.emis[k][c] = r2f(emis[id][c]);
      end
      r.pi = r2f(pi[id]);
      return r;
    endfunction

    static function int bin16(real v);
      int b;
      if (v >= 1.0) return 15;
      b = int'($floor(v * 16.0));
      return (b < 0) ? 0 : b;
    endfunction

    // histogram filter rule on one timestamp's values
    function void filt(ref real v [], ref bit keep []);
      int cnt [16];
      int cum, cut;
      keep = new[N];
      foreach (cnt[b]) cnt[b] = 0;
      for (int i = 0; i < N; i++) cnt[bin16(v[i])]++;
      cum = 0; cut = 0;
      for (int b = 15; b >= 0; b--) begin
        if (cum + cnt[b] >= fsize || b == 0) begin cut = b; break; end
        cum += cnt[b];
      end
      for (int i = 0; i < N; i++) keep[i] = !filter_en || (bin16(v[i]) >= cut);
    endfunction

    function void run();
      F = new[T + 2]; B = new[T + 2]; fkeep = new[T + 2]; bkeep = new[T + 2];
      for (int t = 0; t <= T + 1; t++) begin
        F[t] = new[N]; B[t] = new[N];
        foreach (F[t][i]) begin F[t][i] = 0; B[t][i] = 0; end
      end
      for (int i = 0; i < N; i++) F[1][i] = pi[i] * emis[i][seq[1]];
      filt(F[1], fkeep[1]);
      for (int t = 2; t <= T; t++) begin
        for (int i = 0; i < N; i++) if (fkeep[t-1][i])
          for (int k = 0; k < nsucc[i]; k++)
            F[t][succ[i][k]] += F[t-1][i] * alpha[i][k] * emis[succ[i][k]][seq[t]];
        filt(F[t], fkeep[t]);
      end
      for (int i = 0; i < N; i++) B[T][i] = 1.0;
      filt(B[T], bkeep[T]);
      for (int i = 0; i < N; i++) begin
        eden[i] = 0;
        for (int k = 0; k < 9; k++) begin tnum[i][k] = 0; tseen[i][k] = 0; end
        for (int c = 0; c < 4; c++) enum_[i][c] = 0;
      end
      for (int t = T - 1; t >= 1; t--) begin
        for (int i = 0; i < N; i++)
          for (int k = 0; k < nsucc[i]; k++) begin
            int j = succ[i][k];
            if (bkeep[t+1][j]) begin
              real ae = alpha[i][k] * emis[j][seq[t+1]];
              B[t][i]    += B[t+1][j] * ae;
              tnum[i][k] += ae * F[t][i] * B[t+1][j];
              tseen[i][k] = 1;
            end
          end
        filt(B[t], bkeep[t]);
      end
      for (int t = 1; t <= T; t++)
        for (int i = 0; i < N; i++) begin
          enum_[i][seq[t]] += F[t][i] * B[t][i];
          eden[i]          += F[t][i] * B[t][i];
        end
    endfunction

    function real alpha_new(int i, int k);
      real d = 0;
      for (int x = 0; x < 9; x++) d += tnum[i][x];
      return (d == 0) ? 0.0 : tnum[i][k] / d;
    endfunction
    function real emis_new(int i, int c);
      return (eden[i] == 0) ? 0.0 : enum_[i][c] / eden[i];
    endfunction
  endclass

  // relative comparison with an absolute floor for tiny values
  function automatic bit close(real got, real exp, real rel);
    real d = (got > exp) ? got - exp : exp - got;
    real m = (exp < 0) ? -exp : exp;
    return (d <= rel * m) || (d < 1e-30);
  endfunction
endpackage
