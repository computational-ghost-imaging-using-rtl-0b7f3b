// cgi_ref_pkg -- reference models used by the testbenches.
//
// mseq_ref produces the maximum-length sequence a(n+71) = a(n) xor a(n+6) one
// bit at a time, starting from a(0..70) = seed[70..0].  It is a plain serial
// definition of the sequence, written independently of the 64-bit-per-clock
// register it is used to check.  avg_term is the addend of an ensemble
// average, S * 2^12 / 2^log2n truncated, in integer arithmetic.
package cgi_ref_pkg;

  class mseq_ref;
    bit [70:0] win;   // win[70] = a(n) (next bit returned), win[0] = a(n+70)
    function new(bit [70:0] seed);
      win = seed;
    endfunction
    function bit next();
      bit b, nb;
      b   = win[70];
      nb  = win[70] ^ win[64];       // a(n+71) = a(n) ^ a(n+6)
      win = {win[69:0], nb};
      return b;
    endfunction
  endclass

  function automatic longint unsigned avg_term(longint unsigned s, int log2n);
    return (s * 4096) >> log2n;
  endfunction

  // Host-side and expected-result model of one reconstruction.
  //   pattern bit of pixel q (raster index) for pattern i:
  //     word w = (q / nmod) * n + i of the sequence, bit q % nmod of it,
  //     i.e. sequence bit a(nmod*w + q % nmod)
  //   host values: R'_i = popcount(I_i) >> rsh (a constant scale of R_i,
  //     which leaves the DGI result's shape unchanged and keeps <R'> in
  //     9 bits), <R'> = floor(sum R'_i / n),
  //     <R'I>(q) = floor(4096 * sum R'_i I_i(q) / n)
  //   expected circuit output:
  //     <SI>(q) = sum over i with I_i(q) of avg_term(S_i)
  //     <S>     = sum avg_term(S_i)
  //     O(q)    = <R'> <SI>(q) - floor(<S>) <R'I>(q)
  class cgi_model;
    int n, log2n, npix, nmod, passes, rsh;
    bit pat [][];          // [i][q]
    longint unsigned rcnt [];
    longint unsigned r_avg;
    longint unsigned ria [];
    longint unsigned s [];

    function new(int n_, int npix_, int nmod_, bit [70:0] seed);
      mseq_ref r = new(seed);
      n = n_; npix = npix_; nmod = nmod_; passes = npix / nmod;
      log2n = $clog2(n);
      rsh = (npix > 511) ? 1 : 0;
      pat  = new[n];
      foreach (pat[i]) pat[i] = new[npix];
      rcnt = new[n];
      ria  = new[npix];
      s    = new[n];
      for (int p = 0; p < passes; p++)
        for (int i = 0; i < n; i++)
          for (int j = 0; j < nmod; j++)
            pat[i][p*nmod + j] = r.next();
      r_avg = 0;
      foreach (rcnt[i]) begin
        rcnt[i] = 0;
        for (int q = 0; q < npix; q++) rcnt[i] += pat[i][q];
        rcnt[i] >>= rsh;
        r_avg += rcnt[i];
      end
      r_avg >>= log2n;
      for (int q = 0; q < npix; q++) begin
        longint unsigned acc = 0;
        for (int i = 0; i < n; i++) if (pat[i][q]) acc += rcnt[i];
        ria[q] = (acc * 4096) >> log2n;
      end
    endfunction

    // light through a binary object: S_i = 255 * |I_i and T| / |T|
    function void expose(bit obj []);
      int tot = 0;
      foreach (obj[q]) tot += obj[q];
      for (int i = 0; i < n; i++) begin
        int c = 0;
        for (int q = 0; q < npix; q++) if (pat[i][q] && obj[q]) c++;
        s[i] = longint'(255 * c) / longint'(tot);
      end
    endfunction

    function void expected(ref longint o []);
      longint unsigned s_avg = 0;
      o = new[npix];
      foreach (s[i]) s_avg += avg_term(s[i], log2n);
      for (int q = 0; q < npix; q++) begin
        longint unsigned sia = 0;
        for (int i = 0; i < n; i++) if (pat[i][q]) sia += avg_term(s[i], log2n);
        o[q] = longint'(r_avg * sia) - longint'((s_avg >> 12) * ria[q]);
      end
    endfunction
  endclass

endpackage
