// par_src_tb: the parallel SRC (80 lanes, decimation 80) against a serial CIC
// model followed by two serial halfband models. Input: a sum of two tones plus
// noise, with random gaps. One output per input vector, 23 clocks later.
module par_src_tb;
  import tb_ref_pkg::*;
  localparam int L = 80, LAT = 23;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [15:0] x [L];
  logic signed [15:0] y;
  int checks = 0, failures = 0, cycle = 0, nvec = 0, nout = 0;
  int in_cycle [$];
  cic_model cic_m;
  hb_model hb1_m, hb2_m;

  par_src dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e;
    checks++;
    if (cycle - in_cycle.pop_front() != LAT) begin failures++; $display("latency mismatch"); end
    e = hb2_m.out.pop_front();
    checks++;
    if (longint'(y) != e) begin
      failures++;
      if (failures < 10) $display("out %0d: got %0d expected %0d", nout, y, e);
    end
    nout++;
  end

  initial begin
    longint n;
    real ph;
    cic_m = new(20, 5, 0, 0);
    hb1_m = new(61);
    hb2_m = new(61);
    n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int v = 0; v < 2500; v++) begin
      @(negedge clk);
      in_valid = ($urandom % 6 != 0);
      if (in_valid) begin
        for (int l = 0; l < L; l++) begin
          ph = real'(n);
          x[l] = 16'($rtoi(14000.0 * $sin(ph * 0.0021) + 9000.0 * $sin(ph * 0.37))
                 + int'($urandom % 2001) - 1000);
          cic_m.push(longint'(x[l]));
          n++;
        end
        // The two halfband models consume the CIC model's output as it appears.
        while (cic_m.out.size() > 0) hb1_m.push(cic_m.out.pop_front());
        while (hb1_m.out.size() > 0) hb2_m.push(hb1_m.out.pop_front());
        in_cycle.push_back(cycle);
        nvec++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (nout != nvec) begin failures++; $display("%0d outputs for %0d inputs", nout, nvec); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
