// psrc_alias_tb: anti-aliasing workload at total decimation 80.
//
// The input, at 20 GSPS on 80 lanes, is the sum of a wanted 50 MHz tone and an
// unwanted 7.04 GHz tone of equal amplitude (16000, about -6 dBFS each).
// Decimated to 250 MSPS, the 7.04 GHz tone would fold onto 40 MHz. After the
// filters have settled, 2000 output samples are correlated with complex
// exponentials at 50 MHz and 40 MHz (both fall on exact bins: 400 and 320
// cycles in 2000 samples). Checks: the wanted tone comes out with the
// expected gain (parallel CIC gain 20^5/2^22 times a halfband passband gain
// close to 1, within 1 dB), and the folded tone is at least 70 dB below it.
// A second pass, with the unwanted tone alone, checks the same bound against
// the first pass's wanted level.
module psrc_alias_tb;
  localparam int L = 80;
  localparam int SETTLE = 300, NOUT = 2000;
  localparam real TWO_PI = 6.283185307179586;

  logic clk = 0, rst_n = 0, cfg_load = 0, in_valid = 0;
  logic [11:0] cfg_rate = 12'd1;
  logic [1:0]  cfg_hb_used = 2'd0;
  logic signed [15:0] x [L];
  logic mid_valid, out_valid;
  logic signed [15:0] mid, y;

  int checks = 0, failures = 0;
  int nout = 0;
  real re50, im50, re40, im40;
  bit use_wanted = 1;

  psrc_top dut (.*);

  always #2 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    int m;
    m = nout - SETTLE;
    if (m >= 0 && m < NOUT) begin
      re50 += real'(y) * $cos(TWO_PI * 0.2  * m);
      im50 += real'(y) * $sin(TWO_PI * 0.2  * m);
      re40 += real'(y) * $cos(TWO_PI * 0.16 * m);
      im40 += real'(y) * $sin(TWO_PI * 0.16 * m);
    end
    nout++;
  end

  task automatic run_pass();
    longint n;
    real ph;
    re50 = 0; im50 = 0; re40 = 0; im40 = 0;
    nout = 0;
    n = 0;
    while (nout < SETTLE + NOUT) begin
      @(negedge clk);
      in_valid = 1;
      for (int l = 0; l < L; l++) begin
        ph = TWO_PI * real'(n);
        x[l] = 16'($rtoi((use_wanted ? 16000.0 * $cos(ph * 0.0025) : 0.0)
                         + 16000.0 * $cos(ph * 0.352)));
        n++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (100) @(posedge clk);
  endtask

  function automatic real db(real a, real b);
    return 20.0 * $log10(a / b);
  endfunction

  initial begin
    real a50, a40, a40_alone, expect50;
    repeat (4) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    cfg_rate = 12'd1;
    cfg_hb_used = 2'd0;
    cfg_load = 1;
    @(negedge clk);
    cfg_load = 0;

    run_pass();
    a50 = 2.0 * $sqrt(re50 * re50 + im50 * im50) / NOUT;
    a40 = 2.0 * $sqrt(re40 * re40 + im40 * im40) / NOUT;
    use_wanted = 0;
    run_pass();
    a40_alone = 2.0 * $sqrt(re40 * re40 + im40 * im40) / NOUT;

    // CIC response at 50 MHz: (sin(pi f R)/(R sin(pi f)))^5, f = 50e6/20e9.
    expect50 = 16000.0 * (3200000.0 / 4194304.0)
             * $pow($sin(3.141592653589793 * 0.0025 * 20) / (20.0 * $sin(3.141592653589793 * 0.0025)), 5);
    $display("wanted 50 MHz: amplitude %0.2f (expected about %0.2f)", a50, expect50);
    $display("folded 7.04 GHz at 40 MHz: %0.1f dB with both tones, %0.1f dB alone",
             db(a40 + 1e-9, a50), db(a40_alone + 1e-9, a50));
    checks++;
    if (db(a50, expect50) > 1.0 || db(a50, expect50) < -1.0) failures++;
    checks++;
    if (db(a40 + 1e-9, a50) > -70.0) failures++;
    checks++;
    if (db(a40_alone + 1e-9, a50) > -70.0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
