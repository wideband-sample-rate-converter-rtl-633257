// tb_ref_pkg: plain serial reference models for the testbenches.
//
// These compute the decimators the textbook way, one sample at a time, with no
// parallel decomposition, folding or time-sharing:
//   cic_model  N integrators on every sample (128-bit, no wrap), keep the
//              samples with n mod R == PHASE, taken DELAY samples late, N combs
//              of differential delay M (default 1), then round half up by
//              ceil(log2((R*M)^N)) bits and saturate;
//   hb_model   full convolution y(m) = sum_k h(k) x(2m+1-k) over all 2N+1 taps,
//              then round half up by 15 bits and saturate.
// Outputs are appended to the public queue `out`. Only the coefficient values
// are taken from src_pkg.
package tb_ref_pkg;

  typedef logic signed [127:0] wide_t;

  function automatic longint rnd(wide_t v, int sh, int wout);
    wide_t r, maxv, minv;
    r = (sh > 0) ? ((v + (wide_t'(1) <<< (sh - 1))) >>> sh) : v;
    maxv = (wide_t'(1) <<< (wout - 1)) - 1;
    minv = -(wide_t'(1) <<< (wout - 1));
    if (r > maxv) r = maxv;
    if (r < minv) r = minv;
    return longint'(r);
  endfunction

  // ceil(log2(r^n))
  function automatic int growth(int r, int n);
    wide_t p;
    int b;
    p = 1;
    for (int i = 0; i < n; i++) p = p * r;
    b = 0;
    while ((wide_t'(1) <<< b) < p) b++;
    return b;
  endfunction

  class cic_model;
    int R, N, PHASE, DELAY, M;
    longint n, nout;
    wide_t integ [];
    wide_t dline [$];   // last DELAY+1 outputs of the integrator chain
    wide_t comb_d [];   // comb stage s keeps its last M inputs at s*M + (k mod M)
    longint out [$];

    function new(int r, int nst, int phase, int delay, int m = 1);
      R = r; N = nst; PHASE = phase; DELAY = delay; M = m; n = 0; nout = 0;
      integ  = new[N];
      comb_d = new[N * M];
      foreach (integ[s])  integ[s] = 0;
      foreach (comb_d[s]) comb_d[s] = 0;
      dline = {};
      for (int i = 0; i < DELAY; i++) dline.push_back(0);
    endfunction

    function void push(longint x);
      wide_t v, t;
      int k;
      v = wide_t'(x);
      for (int s = 0; s < N; s++) begin
        integ[s] = integ[s] + v;
        v = integ[s];
      end
      dline.push_back(v);
      v = dline.pop_front();       // integrator output DELAY samples ago
      if (n % longint'(R) == longint'(PHASE)) begin
        k = int'(nout % longint'(M));
        for (int s = 0; s < N; s++) begin
          t = v - comb_d[s * M + k];
          comb_d[s * M + k] = v;
          v = t;
        end
        out.push_back(rnd(v, growth(R * M, N), 16));
        nout++;
      end
      n++;
    endfunction
  endclass

  class hb_model;
    int NH;
    int h [];
    longint hist [$];   // hist[0] newest
    longint n;
    longint out [$];

    function new(int n_half);
      NH = n_half;
      n = 0;
      h = new[2 * NH + 1];
      foreach (h[k]) h[k] = src_pkg::hb_coef(NH, k);
      hist = {};
      for (int i = 0; i <= 2 * NH; i++) hist.push_back(0);
    endfunction

    function void push(longint x);
      wide_t acc;
      hist.push_front(x);
      void'(hist.pop_back());
      if (n % 2 == 1) begin
        acc = 0;
        for (int k = 0; k <= 2 * NH; k++) acc = acc + wide_t'(h[k]) * wide_t'(hist[k]);
        out.push_back(rnd(acc, src_pkg::COEF_FRAC, 16));
      end
      n++;
    endfunction
  endclass

endpackage
