// src_pkg: constants and elaboration-time functions shared by the sample rate
// converter.
//
// The default sizes are those of the parallel-serial SRC design example:
// 80 input lanes of 16-bit samples (20 GSPS at a 250 MHz lane clock), a
// parallel CIC of N=5 stages decimating by 20, two parallel halfband stages of
// order 122, a serial CIC programmable from 1 to 4000 and three serial halfband
// stages of order 238.
//
// The halfband coefficients are not published with the design, so they are
// computed here: an ideal halfband impulse response 0.5*sinc((k-N)/2)
// multiplied by a Kaiser window with beta = 0.1102*(70-8.7) = 6.755 (Kaiser's
// formula for 70 dB stop-band attenuation), rounded to Q1.15. The centre tap
// is exactly 0.5 and every tap at an even offset from the centre is exactly 0,
// which is what the two-path structure relies on. Everything in this package
// is evaluated at elaboration; none of it becomes hardware.
package src_pkg;

  // Design-example sizes.
  localparam int LANES      = 80;    // input lanes
  localparam int SAMPLE_W   = 16;    // input/output sample width
  localparam int PCIC_R     = 20;    // parallel CIC decimation
  localparam int CIC_N      = 5;     // CIC stages (both CICs)
  localparam int PHB_N      = 61;    // parallel halfband: order 2*N = 122
  localparam int SHB_N      = 119;   // serial halfband: order 2*N = 238
  localparam int SHB_MULTS  = 30;    // multipliers per serial halfband
  localparam int SCIC_R_MAX = 4000;  // serial CIC maximum decimation
  localparam int SHB_STAGES = 3;     // serial halfband stages
  localparam int COEF_W     = 16;    // coefficient width, Q1.15
  localparam int COEF_FRAC  = 15;    // fractional bits of a coefficient

  localparam real KAISER_BETA = 6.755;

  // ceil(log2(r**n)) for r >= 1: the CIC bit growth.
  function automatic int cic_growth(int r, int n);
    longint unsigned p;
    int b;
    p = 1;
    for (int i = 0; i < n; i++) p = p * longint'(r);
    b = 0;
    while ((longint'(1) << b) < p) b++;
    return b;
  endfunction

  // Zeroth-order modified Bessel function of the first kind (series).
  function automatic real bessel_i0(real x);
    real s, t;
    s = 1.0;
    t = 1.0;
    for (int k = 1; k < 40; k++) begin
      t = t * (x / (2.0 * k));
      s = s + t * t;
    end
    return s;
  endfunction

  // Tap k (0..2N) of the length 2N+1 halfband, in Q1.15.
  function automatic int hb_coef(int n_half, int k);
    real r, w, h, arg;
    r = real'(k - n_half) / real'(n_half);
    w = bessel_i0(KAISER_BETA * $sqrt(1.0 - r * r)) / bessel_i0(KAISER_BETA);
    if (k == n_half) return 1 << (COEF_FRAC - 1);        // exactly 0.5
    if (((k - n_half) % 2) == 0) return 0;                // exact zeros
    arg = 3.14159265358979323846 * real'(k - n_half) / 2.0;
    h = 0.5 * $sin(arg) / arg * w;
    return $rtoi(h * real'(1 << COEF_FRAC) + (h >= 0.0 ? 0.5 : -0.5));
  endfunction

  // Index of the j-th nonzero tap left of the centre: the taps k < N with
  // (k - N) odd are k = j*2 + (N+1)%2.
  function automatic int hb_tap(int n_half, int j);
    return 2 * j + ((n_half + 1) % 2);
  endfunction

  // Number of distinct nonzero coefficients besides the centre tap.
  function automatic int hb_ncoef(int n_half);
    return (n_half + 1) / 2;
  endfunction

  // Round half up by `sh` bits, then saturate to `wout` bits.
  function automatic longint round_sat(longint v, int sh, int wout);
    longint r, maxv, minv;
    r = (sh > 0) ? ((v + (longint'(1) << (sh - 1))) >>> sh) : v;
    maxv = (longint'(1) << (wout - 1)) - 1;
    minv = -(longint'(1) << (wout - 1));
    if (r > maxv) return maxv;
    if (r < minv) return minv;
    return r;
  endfunction

endpackage
