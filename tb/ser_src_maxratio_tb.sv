// ser_src_maxratio_tb: response of the serial half at the largest ratio.
//
// ser_src at its default sizes, set to CIC ratio 4000 with all three halfbands
// (serial decimation 32000; behind the parallel half's 80 this is the total
// 2,560,000). The input stands for the 250 MSPS stream from the parallel half,
// one sample per clock: three wanted tones at 500, 1500 and 2500 Hz and three
// unwanted tones at 4812.5, 5812.5 and 6812.5 Hz, amplitude 5000 each. At the
// 7812.5 Hz output rate the unwanted tones would fold onto 3000, 2000 and
// 1000 Hz. After settling, 250 output samples (all tones on exact bins,
// 31.25 Hz apart) are correlated with each tone frequency.
//
// Checks:
//   * each wanted tone has the amplitude predicted from the CIC gain
//     4000^5/2^60, the CIC response (sin(pi f R)/(R sin(pi f)))^5 and the
//     three halfband responses, each computed here as
//     sum_k h(k) cos(2 pi f (k - N)) from the coefficient values, within
//     0.05 dB;
//   * every folded tone is at least 70 dB below the weakest wanted tone;
//   * the output count is one per 32000 inputs.
// The parallel half is not in this test: at these frequencies its response is
// flat to within 0.01 dB, apart from its fixed gain.
module ser_src_maxratio_tb;
  import src_pkg::*;
  localparam int RATE = 4000, HB = 3, DEC = RATE * 8;
  localparam int SETTLE = 240, NOUT = 250, NT = 3;
  localparam real PI = 3.141592653589793;
  localparam real AMP = 5000.0;
  localparam real FS_IN = 250.0e6, FS_OUT = FS_IN / DEC;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, out_valid;
  logic [11:0] rate = 12'(RATE);
  logic [1:0]  hb_used = 2'(HB);
  logic signed [15:0] x = '0, y;

  int checks = 0, failures = 0;
  int nout = 0;
  longint nin = 0;
  real fw [NT], fu [NT], phw [NT], phu [NT];
  real rew [NT], imw [NT], reu [NT], imu [NT];

  ser_src dut (.*);

  always #1 clk = ~clk;

  initial begin
    repeat ((SETTLE + NOUT + 10) * DEC) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int m;
    m = nout - SETTLE;
    if (m >= 0 && m < NOUT) begin
      for (int t = 0; t < NT; t++) begin
        rew[t] += real'(y) * $cos(2.0 * PI * fw[t] / FS_OUT * m);
        imw[t] += real'(y) * $sin(2.0 * PI * fw[t] / FS_OUT * m);
        reu[t] += real'(y) * $cos(2.0 * PI * (FS_OUT - fu[t]) / FS_OUT * m);
        imu[t] += real'(y) * $sin(2.0 * PI * (FS_OUT - fu[t]) / FS_OUT * m);
      end
    end
    nout++;
  end

  function automatic real hb_mag(int n_half, real f);
    real s;
    s = 0.0;
    for (int k = 0; k <= 2 * n_half; k++)
      s += real'(hb_coef(n_half, k)) / real'(1 << COEF_FRAC) * $cos(2.0 * PI * f * (k - n_half));
    return (s < 0.0) ? -s : s;
  endfunction

  function automatic real expect_amp(real f);
    real fc, c;
    fc = f / FS_IN;
    c = $sin(PI * fc * RATE) / (RATE * $sin(PI * fc));
    return AMP * (1.024e18 / $pow(2.0, 60.0)) * $pow(c, CIC_N)
         * hb_mag(SHB_N, f / (FS_IN / RATE)) * hb_mag(SHB_N, f / (FS_IN / RATE / 2))
         * hb_mag(SHB_N, f / (FS_IN / RATE / 4));
  endfunction

  function automatic real db(real a, real b);
    return 20.0 * $log10(a / b);
  endfunction

  initial begin
    real aw, au, e, d, wmin;
    for (int t = 0; t < NT; t++) begin
      fw[t] = 500.0 + 1000.0 * t;
      fu[t] = FS_OUT - 1000.0 * (t + 1);
      phw[t] = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      phu[t] = 2.0 * PI * real'($urandom % 1000) / 1000.0;
      rew[t] = 0; imw[t] = 0; reu[t] = 0; imu[t] = 0;
    end
    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    @(negedge clk);

    // every tone is a multiple of 31.25 Hz: the input repeats every 8e6 samples
    while (nout < SETTLE + NOUT) begin
      real s, n;
      n = real'(nin % 64'd8000000);
      s = 0.0;
      for (int t = 0; t < NT; t++) begin
        s += AMP * $cos(2.0 * PI * n * fw[t] / FS_IN + phw[t]);
        s += AMP * $cos(2.0 * PI * n * fu[t] / FS_IN + phu[t]);
      end
      in_valid = 1;
      x = 16'($rtoi(s));
      nin++;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (20) @(posedge clk);

    checks++;
    if (longint'(nout) != nin / DEC) begin
      failures++;
      $display("%0d outputs for %0d inputs", nout, nin);
    end

    wmin = 1.0e9;
    for (int t = 0; t < NT; t++) begin
      aw = 2.0 * $sqrt(rew[t] * rew[t] + imw[t] * imw[t]) / NOUT;
      e = expect_amp(fw[t]);
      d = db(aw, e);
      $display("wanted %0.1f Hz: amplitude %0.3f, expected %0.3f (%0.4f dB)", fw[t], aw, e, d);
      checks++;
      if (d > 0.05 || d < -0.05) failures++;
      if (aw < wmin) wmin = aw;
    end
    for (int t = 0; t < NT; t++) begin
      au = 2.0 * $sqrt(reu[t] * reu[t] + imu[t] * imu[t]) / NOUT;
      $display("unwanted %0.1f Hz folded to %0.1f Hz: %0.1f dB below the weakest wanted tone",
               fu[t], FS_OUT - fu[t], -db(au + 1e-9, wmin));
      checks++;
      if (db(au + 1e-9, wmin) > -70.0) failures++;
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
