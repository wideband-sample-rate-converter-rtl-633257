// psrc_multitone_tb: multitone anti-aliasing workload at total decimation 80.
//
// The input, at 20 GSPS on 80 lanes, is a wanted band of eight equal tones at
// 10, 20, ..., 80 MHz plus an unwanted band of eight equal tones at 175, 185,
// ..., 245 MHz, all of amplitude 1900 with random phases. Decimated to
// 250 MSPS, the unwanted tones would fold onto 75, 65, ..., 5 MHz, between the
// wanted ones. After the filters have settled, 500 output samples (all tones
// on exact bins, 0.5 MHz apart) are correlated with each tone frequency.
//
// Checks:
//   * each wanted tone has the amplitude predicted from the filter responses:
//     CIC gain 20^5/2^22 times (sin(pi f R)/(R sin(pi f)))^5 times the
//     magnitude responses of the two halfbands, each computed here as
//     sum_k h(k) cos(2 pi f (k - N)) from the coefficient values, within
//     0.05 dB;
//   * the spread of the wanted tones' gains (passband ripple over 10-80 MHz)
//     is at most 0.7241 dB, the value quoted for ratio 80;
//   * every folded tone is at least 70 dB below the weakest wanted tone;
//   * 500 + settling outputs arrive, one per input vector.
module psrc_multitone_tb;
  import src_pkg::*;
  localparam int L = 80;
  localparam int SETTLE = 300, NOUT = 500, NT = 8;
  localparam real PI = 3.141592653589793;
  localparam real AMP = 1900.0;

  logic clk = 0, rst_n = 0, cfg_load = 0, in_valid = 0;
  logic [11:0] cfg_rate = 12'd1;
  logic [1:0]  cfg_hb_used = 2'd0;
  logic signed [15:0] x [L];
  logic mid_valid, out_valid;
  logic signed [15:0] mid, y;

  int checks = 0, failures = 0;
  int nout = 0, nin = 0;
  real phw [NT], pha [NT];                 // tone phases
  real rew [NT], imw [NT], rea [NT], ima [NT];

  psrc_top dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // wanted tone t at 10(t+1) MHz, unwanted at 175 + 10t MHz, folding to
  // 250 - (175 + 10t) = 75 - 10t MHz; as fractions of the 250 MHz output rate
  function automatic real fw(int t); return 10.0 * (t + 1) / 250.0; endfunction
  function automatic real ff(int t); return (75.0 - 10.0 * t) / 250.0; endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    int m;
    m = nout - SETTLE;
    if (m >= 0 && m < NOUT) begin
      for (int t = 0; t < NT; t++) begin
        rew[t] += real'(y) * $cos(2.0 * PI * fw(t) * m);
        imw[t] += real'(y) * $sin(2.0 * PI * fw(t) * m);
        rea[t] += real'(y) * $cos(2.0 * PI * ff(t) * m);
        ima[t] += real'(y) * $sin(2.0 * PI * ff(t) * m);
      end
    end
    nout++;
  end

  // halfband magnitude response at f (cycles per input sample)
  function automatic real hb_mag(int n_half, real f);
    real s;
    s = 0.0;
    for (int k = 0; k <= 2 * n_half; k++)
      s += real'(hb_coef(n_half, k)) / real'(1 << COEF_FRAC) * $cos(2.0 * PI * f * (k - n_half));
    return (s < 0.0) ? -s : s;
  endfunction

  // expected output amplitude of a tone of frequency fm MHz
  function automatic real expect_amp(real fm);
    real fc, c;
    fc = fm / 20000.0;
    c = $sin(PI * fc * PCIC_R) / (PCIC_R * $sin(PI * fc));
    return AMP * (3200000.0 / 4194304.0) * $pow(c, CIC_N)
         * hb_mag(PHB_N, fm / 1000.0) * hb_mag(PHB_N, fm / 500.0);
  endfunction

  function automatic real db(real a, real b);
    return 20.0 * $log10(a / b);
  endfunction

  initial begin
    real aw, aa, e, d, gmin, gmax, wmin;
    for (int t = 0; t < NT; t++) begin
      phw[t] = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      pha[t] = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      rew[t] = 0; imw[t] = 0; rea[t] = 0; ima[t] = 0;
    end
    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    cfg_rate = 12'd1;
    cfg_hb_used = 2'd0;
    cfg_load = 1;
    @(negedge clk);
    cfg_load = 0;

    // every tone is a multiple of 5 MHz: the input repeats every 4000 samples
    for (int v = 0; v < SETTLE + NOUT; v++) begin
      @(negedge clk);
      in_valid = 1;
      for (int l = 0; l < L; l++) begin
        real s, n;
        n = real'((v * L + l) % 4000);
        s = 0.0;
        for (int t = 0; t < NT; t++) begin
          s += AMP * $cos(2.0 * PI * n * (10.0 * (t + 1)) / 20000.0 + phw[t]);
          s += AMP * $cos(2.0 * PI * n * (175.0 + 10.0 * t) / 20000.0 + pha[t]);
        end
        x[l] = 16'($rtoi(s));
      end
      nin++;
    end
    @(negedge clk) in_valid = 0;
    repeat (100) @(posedge clk);

    checks++;
    if (nout != nin) begin
      failures++;
      $display("%0d outputs for %0d input vectors", nout, nin);
    end

    gmin = 1.0e9; gmax = -1.0e9; wmin = 1.0e9;
    for (int t = 0; t < NT; t++) begin
      aw = 2.0 * $sqrt(rew[t] * rew[t] + imw[t] * imw[t]) / NOUT;
      e = expect_amp(10.0 * (t + 1));
      d = db(aw, e);
      $display("wanted %0d MHz: amplitude %0.3f, expected %0.3f (%0.4f dB)", 10 * (t + 1), aw, e, d);
      checks++;
      if (d > 0.05 || d < -0.05) failures++;
      if (db(aw, AMP) < gmin) gmin = db(aw, AMP);
      if (db(aw, AMP) > gmax) gmax = db(aw, AMP);
      if (aw < wmin) wmin = aw;
    end
    $display("passband spread 10-80 MHz: %0.4f dB", gmax - gmin);
    checks++;
    if (gmax - gmin > 0.7241) failures++;

    for (int t = 0; t < NT; t++) begin
      aa = 2.0 * $sqrt(rea[t] * rea[t] + ima[t] * ima[t]) / NOUT;
      $display("unwanted %0d MHz folded to %0d MHz: %0.1f dB below the weakest wanted tone",
               175 + 10 * t, 75 - 10 * t, -db(aa + 1e-9, wmin));
      checks++;
      if (db(aa + 1e-9, wmin) > -70.0) failures++;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
