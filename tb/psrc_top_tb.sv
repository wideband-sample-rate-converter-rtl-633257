// psrc_top_tb: end-to-end test of the parallel-serial SRC at its full size
// (80 lanes, parallel CIC R = 20, two parallel halfbands, serial CIC and three
// serial halfbands), with no parameter overrides.
//
// The input is a two-tone signal (50 MHz and 7.04 GHz at 20 GSPS) plus a DC
// offset and noise. The intermediate stream y'(m) is compared, sample by
// sample and for the whole run, with a serial CIC model and two halfband
// models, and must appear once per input vector. The run is split into
// segments with different serial configurations (ratio, halfband stages
// used): total decimations 80, 160, 320, 640, 1600, 3200, 3840, 4480 and
// 5120, a ratio of 0 that must be taken as 1, and an out-of-range ratio 4095 that must be
// clamped to 4000, once without halfbands (total 320,000: the clamp shows in
// the output count, 5 for 20,100 samples, and in the CIC gain) and once with
// all three (total 2,560,000, the largest). Before each segment the pipeline
// is drained and cfg_load applied; the serial output is then compared with
// serial models fed with that segment's y'(m) samples, and its count must
// equal the number of y'(m) samples divided by rate * 2^hb_used.
//
// Mechanisms counted (each must occur): reconfiguration, serial halfband
// bypass, all serial halfbands used, serial CIC ratio 1, serial CIC ratio > 1,
// ratio clamping, input gaps.
module psrc_top_tb;
  import tb_ref_pkg::*;
  localparam int L = 80;

  logic clk = 0, rst_n = 0, cfg_load = 0, in_valid = 0;
  logic [11:0] cfg_rate = 12'd1;
  logic [1:0]  cfg_hb_used = 2'd0;
  logic signed [15:0] x [L];
  logic mid_valid, out_valid;
  logic signed [15:0] mid, y;

  int checks = 0, failures = 0;
  int n_mid = 0, n_out = 0, seg_mid = 0;
  bit seg_active = 0;
  int seg_k = 0;
  longint n_samp = 0;
  cic_model pcic;
  hb_model  phb1, phb2;
  cic_model scic;
  hb_model  shb [3];
  longint   sexp [$];
  // mechanism counters
  int m_reconfig = 0, m_bypass = 0, m_allhb = 0, m_r1 = 0, m_rgt1 = 0, m_clamp = 0, m_gap = 0;

  psrc_top dut (.*);

  always #2 clk = ~clk;    // 250 MHz

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Push one serial-part input through the serial models up to the used stage.
  function automatic void serial_push(longint v);
    scic.push(v);
    while (scic.out.size() > 0) begin
      longint a;
      a = scic.out.pop_front();
      if (seg_k == 0) sexp.push_back(a); else shb[0].push(a);
    end
    for (int i = 0; i < 3; i++)
      while (shb[i].out.size() > 0) begin
        longint a;
        a = shb[i].out.pop_front();
        if (seg_k == i + 1) sexp.push_back(a); else if (i < 2) shb[i+1].push(a);
      end
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (mid_valid) begin
      longint e;
      e = phb2.out.pop_front();
      checks++;
      if (longint'(mid) != e) begin
        failures++;
        if (failures < 10) $display("mid %0d: got %0d expected %0d", n_mid, mid, e);
      end
      n_mid++;
      if (seg_active) begin
        serial_push(longint'(mid));
        seg_mid++;
      end
    end
    if (out_valid) begin
      longint e;
      checks++;
      if (sexp.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        e = sexp.pop_front();
        if (longint'(y) != e) begin
          failures++;
          if (failures < 10) $display("out %0d: got %0d expected %0d", n_out, y, e);
        end
      end
      n_out++;
    end
  end

  task automatic send_vectors(int nvec, int gap_pct);
    int sent;
    real ph;
    sent = 0;
    while (sent < nvec) begin
      @(negedge clk);
      in_valid = ($urandom % 100 >= gap_pct);
      if (!in_valid) m_gap++;
      else begin
        for (int l = 0; l < L; l++) begin
          ph = 6.283185307179586 * real'(n_samp);
          x[l] = 16'($rtoi(3000.0 + 11000.0 * $cos(ph * 0.0025) + 11000.0 * $cos(ph * 0.352))
                 + int'($urandom % 1001) - 500);
          pcic.push(longint'(x[l]));
          n_samp++;
        end
        while (pcic.out.size() > 0) phb1.push(pcic.out.pop_front());
        while (phb1.out.size() > 0) phb2.push(phb1.out.pop_front());
        sent++;
      end
    end
    @(negedge clk) in_valid = 0;
  endtask

  // One serial configuration: drain, load, run, drain, check counts.
  task automatic segment(int rate_in, int k, int nvec, int gap_pct);
    int r, expected;
    repeat (80) @(posedge clk);
    seg_active = 0;
    @(negedge clk);
    cfg_rate = 12'(rate_in);
    cfg_hb_used = 2'(k);
    cfg_load = 1;
    @(negedge clk);
    cfg_load = 0;
    repeat (3) @(negedge clk);
    r = (rate_in == 0) ? 1 : (rate_in > 4000) ? 4000 : rate_in;
    if (r != rate_in) m_clamp++;
    if (r == 1) m_r1++; else m_rgt1++;
    if (k < 3) m_bypass++; else m_allhb++;
    m_reconfig++;
    seg_k = k;
    scic = new(r, 5, r - 1, 4);
    for (int i = 0; i < 3; i++) shb[i] = new(119);
    sexp = {};
    seg_mid = 0;
    n_out = 0;
    seg_active = 1;
    send_vectors(nvec, gap_pct);
    repeat (80) @(posedge clk);
    expected = seg_mid / (r * (1 << k));
    checks++;
    if (n_out != expected || sexp.size() != 0) begin
      failures++;
      $display("ratio %0d: %0d outputs, expected %0d", 80 * r * (1 << k), n_out, expected);
    end else
      $display("total ratio %0d: %0d outputs checked", 80 * r * (1 << k), n_out);
  endtask

  initial begin
    pcic = new(20, 5, 0, 0);
    phb1 = new(61);
    phb2 = new(61);
    repeat (4) @(posedge clk);
    rst_n <= 1;
    segment(1,    0,   400, 10);   // total 80
    segment(1,    1,   800,  0);   // 160
    segment(1,    2,  1600,  5);   // 320
    segment(1,    3,  3200,  0);   // 640
    segment(20,   0,  4000,  0);   // 1600
    segment(5,    3,  8000,  3);   // 3200
    segment(6,    3,  9600,  0);   // 3840
    segment(7,    3,  6720,  0);   // 4480
    segment(8,    3,  7680,  2);   // 5120
    segment(0,    1,   400,  0);   // ratio 0 taken as 1: 160
    segment(4095, 0, 20100,  0);   // clamped to 4000: 320,000
    segment(4095, 3, 70000,  0);   // clamped to 4000: 2,560,000
    checks++;
    if (n_mid == 0) failures++;
    if (m_reconfig == 0) begin failures++; $display("no reconfiguration"); end
    if (m_bypass == 0)   begin failures++; $display("no halfband bypass"); end
    if (m_allhb == 0)    begin failures++; $display("no full halfband cascade"); end
    if (m_r1 == 0)       begin failures++; $display("no ratio-1 CIC"); end
    if (m_rgt1 == 0)     begin failures++; $display("no ratio>1 CIC"); end
    if (m_clamp == 0)    begin failures++; $display("no clamped ratio"); end
    if (m_gap == 0)      begin failures++; $display("no input gap"); end
    $display("mechanisms: reconfig=%0d bypass=%0d all_hb=%0d r1=%0d r>1=%0d clamp=%0d gaps=%0d",
             m_reconfig, m_bypass, m_allhb, m_r1, m_rgt1, m_clamp, m_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
