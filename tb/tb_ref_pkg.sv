// tb_ref_pkg: reference model for the trigger-waveform testbenches.
//
// Holds the received sample history and computes, straight from the
// definitions, the correlation rho_n = sum_k b_k x_{n-k}, the window energy
// and the hit decision |rho_n|^2 > 32 * ||x_n||^2 (metric above 1/4 with
// ||b||^2 = 128). The Golay sequence is rebuilt here by recursion
// (a' = [a b], b' = [a -b]) rather than taken from the design package.
package tb_ref_pkg;

  int smp_i[$];
  int smp_q[$];

  // g_k in {0,1}, k = 0..31
  function automatic bit golay(int k);
    int a[$], b[$], na[$], nb[$];
    a = '{1}; b = '{1};
    while (a.size() < 32) begin
      na = a; nb = a;
      foreach (b[i]) begin na.push_back(b[i]); nb.push_back(-b[i]); end
      a = na; b = nb;
    end
    return a[k] > 0;
  endfunction

  function automatic int coef(int k);   // b_k in {-1,+1}
    return golay(31 - k / 4) ? 1 : -1;
  endfunction

  int coef_tab[128];
  function automatic void init();
    for (int k = 0; k < 128; k++) coef_tab[k] = coef(k);
    smp_i.delete(); smp_q.delete();
  endfunction

  function automatic int si(int n); return (n < 0 || n >= smp_i.size()) ? 0 : smp_i[n]; endfunction
  function automatic int sq(int n); return (n < 0 || n >= smp_q.size()) ? 0 : smp_q[n]; endfunction

  // Hit decision for the window ending at sample n.
  function automatic bit hit(int n);
    longint ri, rq, e;
    ri = 0; rq = 0; e = 0;
    for (int k = 0; k < 128; k++) begin
      ri += longint'(coef_tab[k]) * si(n - k);
      rq += longint'(coef_tab[k]) * sq(n - k);
      e  += longint'(si(n - k)) * si(n - k) + longint'(sq(n - k)) * sq(n - k);
    end
    return (ri * ri + rq * rq) > 32 * e;
  endfunction

  // Detection of the PPD with lag l at beat t (window ends at 8t+7-l).
  function automatic bit det(int t, int l);
    for (int r = 0; r < 4; r++) begin
      int n;
      n = 8 * (t - 16 * r) + 7 - l;
      if (n < 0) return 0;
      if (!hit(n)) return 0;
    end
    return 1;
  endfunction

  // One sample of the trigger waveform (m = 0..511) at amplitude amp.
  function automatic int sync_chip(int m, int amp);
    return golay((m / 4) % 32) ? amp : -amp;
  endfunction

endpackage
