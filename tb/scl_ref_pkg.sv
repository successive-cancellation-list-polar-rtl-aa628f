// scl_ref_pkg: bit-exact reference model of the LLR-SCL decoder for the
// testbenches, written independently of the RTL's memory layout and schedule.
//
// For every bit i and path l it recomputes the last-stage LLR from the channel
// LLRs by walking the polar tree top-down (f toward the left half, g with the
// re-encoded left half toward the right half), using the same quantised
// arithmetic as the PEs (min-sum f, saturating g) and the same metric update
// as the MCUs. Pruning keeps the L best candidates ordered by
// (valid, metric, lower candidate index 2*l+b), which is the order the
// hardware sorting network produces.
package scl_ref_pkg;

  class scl_ref #(int N = 64, int L = 4, int Q = 8, int PMW = 8);
    int  maxmag = (1 << (Q - 1)) - 1;
    int  pmin   = -(1 << (PMW - 1));
    bit  u   [L][N];
    int  m   [L];
    bit  v   [L];
    bit  u_hat [N];
    int  best_m;
    // event counters
    int  n_llr_sat, n_pm_sat, n_copy, n_ties, n_frozen, n_free, n_invalid_kept;

    function int sat(int x);
      if (x > maxmag) return maxmag;
      if (x < -maxmag) return -maxmag;
      return x;
    endfunction

    // Natural-order polar transform of x[0..len-1] in place.
    static function void encode(ref bit x[N], input int len);
      for (int s = 1; s < len; s *= 2)
        for (int j = 0; j < len; j += 2 * s)
          for (int k = 0; k < s; k++) x[j + k] ^= x[j + k + s];
    endfunction

    function int bit_llr(int l, int i, const ref int ch[N]);
      int  alpha [N];
      int  nxt   [N];
      bit  beta  [N];
      int  len, off, idx, half, t;
      for (int k = 0; k < N; k++) alpha[k] = ch[k];
      len = N; off = 0; idx = i;
      while (len > 1) begin
        half = len / 2;
        if (idx < half) begin
          for (int k = 0; k < half; k++) begin
            int a = alpha[k], b = alpha[k + half];
            int mg = (a < 0 ? -a : a) < (b < 0 ? -b : b) ? (a < 0 ? -a : a) : (b < 0 ? -b : b);
            nxt[k] = ((a < 0) != (b < 0)) ? -mg : mg;
          end
        end else begin
          for (int k = 0; k < N; k++) beta[k] = 1'b0;
          for (int k = 0; k < half; k++) beta[k] = u[l][off + k];
          encode(beta, half);
          for (int k = 0; k < half; k++) begin
            t = beta[k] ? alpha[k + half] - alpha[k] : alpha[k + half] + alpha[k];
            if (t > maxmag || t < -maxmag) n_llr_sat++;
            nxt[k] = sat(t);
          end
          off += half;
          idx -= half;
        end
        for (int k = 0; k < half; k++) alpha[k] = nxt[k];
        len = half;
      end
      return alpha[0];
    endfunction

    function int pen(int mm, int c);
      int r = mm - (c < 0 ? -c : c);
      if (r < pmin) begin n_pm_sat++; r = pmin; end
      return r;
    endfunction

    function void decode(const ref int ch[N], const ref bit frozen[N]);
      int  c0 [L];
      int  cm [2*L];
      bit  used [2*L];
      bit  nu [L][N];
      int  nm [L];
      bit  nv [L];
      int  best, src;
      for (int l = 0; l < L; l++) begin
        m[l] = 0; v[l] = (l == 0);
        for (int k = 0; k < N; k++) u[l][k] = 1'b0;
      end
      for (int i = 0; i < N; i++) begin
        for (int l = 0; l < L; l++) begin
          int c = bit_llr(l, i, ch);
          cm[2*l]   = (c < 0) ? pen(m[l], c) : m[l];
          cm[2*l+1] = (c < 0) ? m[l] : pen(m[l], c);
        end
        if (frozen[i]) begin
          n_frozen++;
          for (int l = 0; l < L; l++) begin
            m[l] = cm[2*l];
            u[l][i] = 1'b0;
          end
        end else begin
          n_free++;
          for (int j = 0; j < 2*L; j++) used[j] = 1'b0;
          for (int j = 0; j < 2*L; j++)
            for (int j2 = j + 1; j2 < 2*L; j2++)
              if (v[j/2] && v[j2/2] && cm[j] == cm[j2]) n_ties++;
          for (int r = 0; r < L; r++) begin
            best = -1;
            for (int j = 0; j < 2*L; j++) begin
              if (used[j]) continue;
              if (best < 0) best = j;
              else if (v[j/2] && !v[best/2]) best = j;
              else if (v[j/2] == v[best/2] && cm[j] > cm[best]) best = j;
            end
            used[best] = 1'b1;
            src = best / 2;
            if (src != r && v[src]) n_copy++;
            if (!v[src]) n_invalid_kept++;
            for (int k = 0; k < N; k++) nu[r][k] = u[src][k];
            nu[r][i] = best[0];
            nm[r] = cm[best];
            nv[r] = v[src];
          end
          for (int l = 0; l < L; l++) begin
            u[l] = nu[l]; m[l] = nm[l]; v[l] = nv[l];
          end
        end
      end
      best = 0;
      for (int l = 1; l < L; l++)
        if ((v[l] && !v[best]) || (v[l] == v[best] && m[l] > m[best])) best = l;
      for (int k = 0; k < N; k++) u_hat[k] = u[best][k];
      best_m = m[best];
    endfunction
  endclass

endpackage
