// lsc_ref_pkg: reference models for the list SC decoder testbenches.
//
// lsc_ref is a plain behavioural list SC decoder written the textbook way:
// every path keeps a full private copy of its LLs, which is copied whole on
// path duplication, and the partial sums are recomputed from the decided
// bits by re-encoding (x = u * F^{(x)n}). It shares no structure with the
// RTL (no pointer memory, no partial-sum update walk), only the arithmetic
// (min-sum f, g, integer negative LLs) and the path ordering rule (live
// paths first, smaller metric, lower candidate index 2l+u) that make the
// result bit-exact. It also provides encoding, a Bhattacharyya-bound frozen
// set and an AWGN channel with the quantised LLs round((y - mu(x))^2),
// saturated to Q_ch bits.
package lsc_ref_pkg;

  // polar transform x = u * F^{(x)m}, F = [1 0; 1 1], on m = log2(n) bits
  function automatic void encode(ref bit v[], input int n);
    for (int h = 1; h < n; h *= 2)
      for (int base = 0; base < n; base += 2 * h)
        for (int j = base; j < base + h; j++)
          v[j] = v[j] ^ v[j+h];
  endfunction

  // frozen set: the n-k indices with the largest Bhattacharyya parameter
  function automatic void frozen_set(output bit fz[], input int n, input int k,
                                     input real z0);
    real z[];
    int  order[];
    int  logn = $clog2(n);
    z = new[n];
    order = new[n];
    fz = new[n];
    for (int i = 0; i < n; i++) begin
      real t = z0;
      for (int b = logn - 1; b >= 0; b--)
        t = ((i >> b) & 1) ? t * t : 2.0 * t - t * t;
      z[i] = t;
      order[i] = i;
    end
    // selection sort by z descending
    for (int a = 0; a < n; a++)
      for (int b = a + 1; b < n; b++)
        if (z[order[b]] > z[order[a]]) begin
          int t2 = order[a];
          order[a] = order[b];
          order[b] = t2;
        end
    for (int i = 0; i < n; i++) fz[i] = 1'b0;
    for (int a = 0; a < n - k; a++) fz[order[a]] = 1'b1;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic int quant(input real v, input int qch);
    int q = int'(v + 0.5);
    int mx = (1 << qch) - 1;
    return (q > mx) ? mx : q;
  endfunction

  class lsc_ref #(int N = 1024, int L = 2);
    localparam int LOGN = $clog2(N);
    int ll [L][LOGN+1][N][2];
    bit u  [L][N];
    bit live [L];
    int best_metric;
    int selections;

    function automatic void decode(input int ch[][2], input bit fz[],
                                   output bit out[]);
      int m [L][2];
      int key [2*L];
      int rank [2*L];
      int par [L];
      bit ub [L];
      int nll [L][LOGN+1][N][2];
      bit nu  [L][N];
      bit nlive [L];
      selections = 0;
      for (int l = 0; l < L; l++) begin
        live[l] = (l == 0);
        for (int i = 0; i < N; i++) begin
          u[l][i] = 0;
          ll[l][LOGN][i][0] = ch[i][0];
          ll[l][LOGN][i][1] = ch[i][1];
        end
      end
      for (int k = 0; k < N; k++) begin
        int s0 = LOGN - 1;
        if (k != 0) for (int b = LOGN - 1; b >= 0; b--) if ((k >> b) & 1) s0 = b;
        for (int l = 0; l < L; l++) begin
          for (int s = s0; s >= 0; s--) begin
            int h = 1 << s;
            bit v[];
            v = new[h];
            if ((k >> s) & 1) begin
              int base = (k >> (s + 1)) << (s + 1);
              for (int j = 0; j < h; j++) v[j] = u[l][base + j];
              encode(v, h);
            end
            for (int j = 0; j < h; j++) begin
              int a0 = ll[l][s+1][j][0], a1 = ll[l][s+1][j][1];
              int b0 = ll[l][s+1][j+h][0], b1 = ll[l][s+1][j+h][1];
              if ((k >> s) & 1) begin
                ll[l][s][j][0] = (v[j] ? a1 : a0) + b0;
                ll[l][s][j][1] = (v[j] ? a0 : a1) + b1;
              end else begin
                ll[l][s][j][0] = (a0 + b0 < a1 + b1) ? a0 + b0 : a1 + b1;
                ll[l][s][j][1] = (a1 + b0 < a0 + b1) ? a1 + b0 : a0 + b1;
              end
            end
          end
          m[l][0] = ll[l][0][0][0];
          m[l][1] = ll[l][0][0][1];
        end
        if (fz[k] && k < N - 1) begin
          for (int l = 0; l < L; l++) u[l][k] = 0;
        end else begin
          selections++;
          for (int c = 0; c < 2 * L; c++)
            key[c] = (live[c/2] ? 0 : (1 << 30)) + m[c/2][c%2];
          for (int c = 0; c < 2 * L; c++) begin
            rank[c] = 0;
            for (int d = 0; d < 2 * L; d++)
              if (key[d] < key[c] || (key[d] == key[c] && d < c)) rank[c]++;
          end
          for (int c = 0; c < 2 * L; c++)
            if (rank[c] < L) begin
              par[rank[c]] = c / 2;
              ub[rank[c]] = c % 2;
            end
          // full state copy from the parents
          for (int l = 0; l < L; l++) begin
            nlive[l] = live[par[l]];
            for (int i = 0; i < N; i++) nu[l][i] = u[par[l]][i];
            nu[l][k] = ub[l];
            for (int s = 0; s < LOGN; s++)
              for (int j = 0; j < (1 << s); j++) nll[l][s][j] = ll[par[l]][s][j];
          end
          for (int l = 0; l < L; l++) begin
            live[l] = nlive[l];
            u[l] = nu[l];
            for (int s = 0; s < LOGN; s++)
              for (int j = 0; j < (1 << s); j++) ll[l][s][j] = nll[l][s][j];
          end
          best_metric = m[par[0]][ub[0]];
        end
      end
      out = new[N];
      for (int i = 0; i < N; i++) out[i] = u[0][i];
    endfunction
  endclass

endpackage
