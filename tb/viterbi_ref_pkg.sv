// viterbi_ref_pkg: behavioural reference for the sequence detector, used by
// the testbenches to work out expected values independently of the RTL.
//
// Predecessors are found by k-mer overlap rather than by the closed-form
// index formulas the RTL uses: state x may step into y when the last k-1
// bases of x equal the first k-1 bases of y, and may skip into y when the
// last k-2 bases of x equal the first k-2 bases of y. Candidates are listed
// stay first, then steps, then skips, each in ascending x - the pointer order
// the hardware uses. Arithmetic is done in 64 bits; minimum searches return
// the first minimum.
package viterbi_ref_pkg;
  localparam int K  = 3;
  localparam int NS = 4 ** K;
  localparam int NT = 21;

  // the 21 predecessor states of y, in pointer order
  function automatic void preds(input int y, output int p [NT]);
    int c = 1;
    p[0] = y;
    for (int x = 0; x < NS; x++)
      if ((x % (4 ** (K - 1))) == (y / 4)) begin p[c] = x; c++; end
    for (int x = 0; x < NS; x++)
      if ((x % (4 ** (K - 2))) == (y / 16)) begin p[c] = x; c++; end
  endfunction

  // Full Viterbi over one chunk. beta[m][n] is the pointer of state n at
  // event m+1 (row m of the pointer buffer); path is the traceback result.
  class viterbi;
    longint alpha [NS];
    int     beta  [][NS];
    int     path  [];
    int     last_min;
    int     n_stay, n_step, n_skip;

    function void run(int M, int x [], int tprob [NT], int mu [NS], int sigma [NS]);
      longint ap [NS];
      int     p [NT];
      beta = new[M];
      path = new[M];
      foreach (alpha[n]) alpha[n] = 0;
      for (int m = 0; m < M; m++) begin
        longint mn;
        for (int n = 0; n < NS; n++) begin
          longint best; int bi;
          preds(n, p);
          best = alpha[p[0]] + tprob[0]; bi = 0;
          for (int t = 1; t < NT; t++)
            if (alpha[p[t]] + tprob[t] < best) begin best = alpha[p[t]] + tprob[t]; bi = t; end
          if (m > 0) beta[m-1][n] = bi;
          ap[n] = best + longint'(x[m] - mu[n]) * longint'(x[m] - mu[n]) - sigma[n];
        end
        mn = ap[0]; last_min = 0;
        for (int n = 1; n < NS; n++) if (ap[n] < mn) begin mn = ap[n]; last_min = n; end
        for (int n = 0; n < NS; n++) alpha[n] = ap[n] - mn;
      end
      n_stay = 0; n_step = 0; n_skip = 0;
      path[M-1] = last_min;
      for (int m = M - 2; m >= 0; m--) begin
        int r = beta[m][path[m+1]];
        preds(path[m+1], p);
        path[m] = p[r];
        if (r == 0) n_stay++; else if (r <= 4) n_step++; else n_skip++;
      end
    endfunction
  endclass

  // Synthetic nanopore-like model and events: a random base sequence read
  // through a 3-mer pore; each event samples the current k-mer's mean plus
  // noise; the pore sometimes stays on a k-mer or skips a base.
  class workload;
    int tprob [NT];
    int mu    [NS];
    int sigma [NS];
    int x     [];
    int truth [];

    function void make_model();
      for (int n = 0; n < NS; n++) begin
        mu[n]    = 300 + 55 * n + $urandom_range(0, 20);   // well separated levels
        sigma[n] = $urandom_range(0, 400);
      end
      tprob[0] = 2000;                                     // stay
      for (int t = 1; t <= 4; t++)  tprob[t] = 600;        // step
      for (int t = 5; t < NT; t++)  tprob[t] = 5000;       // skip
    endfunction

    function void make_events(int M, int noise);
      int s;
      x = new[M];
      truth = new[M];
      s = $urandom_range(0, NS - 1);
      for (int m = 0; m < M; m++) begin
        int r = $urandom_range(0, 99);
        if (m > 0) begin
          if (r < 15)      s = s;                                        // stay
          else if (r < 90) s = ((s * 4) % NS) + $urandom_range(0, 3);    // step
          else             s = ((s * 16) % NS) + $urandom_range(0, 15);  // skip
        end
        truth[m] = s;
        x[m] = mu[s] + $urandom_range(0, 2 * noise) - noise;
        if (x[m] < 0) x[m] = 0;
        if (x[m] > 4095) x[m] = 4095;
      end
    endfunction
  endclass
endpackage
