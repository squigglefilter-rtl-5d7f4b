// sf_tb_pkg: reference models used by the SquiggleFilter testbenches.
//
// sdtw_rows computes the modified sDTW matrix cell by cell, row after row, in
// plain integer arithmetic (no systolic timing) and returns the last row's
// costs and bonuses:
//   S[i,j] = |Q[i]-R[j]| + min(S[i-1,j-1] - B[i-1,j-1], S[i-1,j])
//   B[i,j] = BONUS                        after a diagonal step
//          = min(B[i-1,j], MAX_BONUS) + BONUS after a vertical step
// (the vertical step is taken on ties; column 0 has no diagonal predecessor
// unless the boundary row is the all-zero row of a new read).
// norm_exact is the integer normalisation the normaliser performs, norm_real
// the same normalisation in floating point.
package sf_tb_pkg;

  function automatic int iabs(int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic void sdtw_rows(
    input  int q[], input int r[], input bit cont,
    input  int bc[], input int bb[],
    input  int bonus, input int max_bonus,
    output int oc[], output int ob[]
  );
    int n, m;
    int pc[], pb[], cc[], cb[];
    n = q.size();
    m = r.size();
    pc = new[m];
    pb = new[m];
    cc = new[m];
    cb = new[m];
    for (int j = 0; j < m; j++) begin
      pc[j] = cont ? bc[j] : 0;
      pb[j] = cont ? bb[j] : 0;
    end
    for (int i = 0; i < n; i++) begin
      for (int j = 0; j < m; j++) begin
        bit has_diag;
        int diag, vert, best;
        bit mv;
        has_diag = (j > 0) || (i == 0 && !cont);
        diag = (j > 0) ? pc[j-1] - pb[j-1] : 0;
        vert = pc[j];
        mv   = has_diag && (diag < vert);
        best = mv ? diag : vert;
        cc[j] = iabs(q[i] - r[j]) + best;
        cb[j] = mv ? bonus : (((pb[j] > max_bonus) ? max_bonus : pb[j]) + bonus);
      end
      pc = cc;
      pb = cb;
    end
    oc = pc;
    ob = pb;
  endfunction

  function automatic int min_of(int v[]);
    int mn;
    mn = v[0];
    foreach (v[k]) if (v[k] < mn) mn = v[k];
    return mn;
  endfunction

  function automatic void norm_exact(input int x[], output int z[]);
    longint n, sum, sad, recip, dev, z256;
    n = x.size();
    z = new[x.size()];
    sum = 0;
    foreach (x[k]) sum += x[k];
    sad = 0;
    foreach (x[k]) begin
      dev = n * x[k] - sum;
      sad += (dev < 0) ? -dev : dev;
    end
    recip = (sad == 0) ? 0 : (n << 40) / sad;
    foreach (x[k]) begin
      dev  = n * x[k] - sum;
      z256 = (sad == 0) ? 0 : ((dev * recip) >>> 32);
      if (z256 > 1024) z256 = 1024;
      if (z256 < -1024) z256 = -1024;
      z256 = (z256 + 4) >>> 3;
      if (z256 > 127) z256 = 127;
      z[k] = int'(z256);
    end
  endfunction

  function automatic void norm_real(input int x[], output int z[]);
    real mean, mad, v;
    int n;
    n = x.size();
    z = new[n];
    mean = 0.0;
    foreach (x[k]) mean += x[k];
    mean = mean / n;
    mad = 0.0;
    foreach (x[k]) mad += (x[k] > mean) ? (x[k] - mean) : (mean - x[k]);
    mad = mad / n;
    foreach (x[k]) begin
      v = (mad == 0.0) ? 0.0 : (x[k] - mean) / mad;
      if (v > 4.0) v = 4.0;
      if (v < -4.0) v = -4.0;
      v = v * 32.0;
      z[k] = $rtoi((v >= 0.0) ? v + 0.5 : v - 0.5);
      if (z[k] > 127) z[k] = 127;
    end
  endfunction

  // a piecewise-constant random squiggle: levels held for 4..16 samples
  function automatic void make_levels(input int len, input int lo, input int hi, output int s[]);
    int lvl, hold;
    s = new[len];
    hold = 0;
    lvl = lo;
    for (int k = 0; k < len; k++) begin
      if (hold == 0) begin
        lvl  = lo + int'($urandom_range(hi - lo));
        hold = 4 + int'($urandom_range(12));
      end
      s[k] = lvl;
      hold--;
    end
  endfunction

endpackage
