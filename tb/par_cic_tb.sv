// par_cic_tb: the 80-lane parallel CIC (R = 20, N = 5) against a serial CIC
// model run on the interleaved stream. Input: a full-scale positive step, a
// full-scale negative step, then random samples, with random gaps in
// in_valid. Every output lane is compared, and each output vector must appear
// 17 clocks after the input vector that completes it. A second, small
// instance (8 lanes, R = 4, N = 3, comb delay M = 2) runs on the same input
// lanes 0..7 against its own model, with latency 11.
module par_cic_tb;
  import tb_ref_pkg::*;
  localparam int L = 80, R = 20, N = 5, LO = L / R, LAT = 17;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [15:0] x [L];
  logic signed [15:0] y [LO];
  int checks = 0, failures = 0, cycle = 0, nvec = 0, nout = 0;
  int in_cycle [$];
  cic_model ref_m;

  par_cic #(.L(L), .R(R), .N(N)) dut (.*);

  // small instance with M = 2
  localparam int L2 = 8, R2 = 4, N2 = 3, M2 = 2, LO2 = L2 / R2, LAT2 = 11;
  logic signed [15:0] x2 [L2];
  logic signed [15:0] y2 [LO2];
  logic out_valid2;
  int in_cycle2 [$];
  int nout2 = 0;
  cic_model ref_m2;

  always_comb for (int l = 0; l < L2; l++) x2[l] = x[l];

  par_cic #(.L(L2), .R(R2), .N(N2), .M(M2)) dut2 (
    .clk, .rst_n, .in_valid, .x(x2), .out_valid(out_valid2), .y(y2)
  );

  always @(posedge clk) if (rst_n && out_valid2) begin
    checks++;
    if (cycle - in_cycle2.pop_front() != LAT2) begin
      failures++;
      $display("M=2 instance latency mismatch");
    end
    for (int k = 0; k < LO2; k++) begin
      longint e;
      e = ref_m2.out.pop_front();
      checks++;
      if (longint'(y2[k]) != e) begin
        failures++;
        if (failures < 10) $display("M=2 out %0d lane %0d: got %0d expected %0d", nout2, k, y2[k], e);
      end
    end
    nout2++;
  end

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
    checks++;
    if (cycle - in_cycle.pop_front() != LAT) begin
      failures++;
      $display("latency mismatch");
    end
    for (int k = 0; k < LO; k++) begin
      longint e;
      e = ref_m.out.pop_front();
      checks++;
      if (longint'(y[k]) != e) begin
        failures++;
        if (failures < 10) $display("out %0d lane %0d: got %0d expected %0d", nout, k, y[k], e);
      end
    end
    nout++;
  end

  initial begin
    ref_m = new(R, N, 0, 0);
    ref_m2 = new(R2, N2, 0, 0, M2);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int v = 0; v < 1200; v++) begin
      @(negedge clk);
      in_valid = ($urandom % 5 != 0);
      if (in_valid) begin
        for (int l = 0; l < L; l++) begin
          if (nvec < 100)      x[l] = 16'sd32767;
          else if (nvec < 200) x[l] = -16'sd32768;
          else                 x[l] = 16'($urandom);
          ref_m.push(longint'(x[l]));
        end
        for (int l = 0; l < L2; l++) ref_m2.push(longint'(x[l]));
        in_cycle.push_back(cycle);
        in_cycle2.push_back(cycle);
        nvec++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (nout != nvec) begin failures++; $display("%0d outputs for %0d inputs", nout, nvec); end
    checks++;
    if (nout2 != nvec) begin failures++; $display("M=2: %0d outputs for %0d inputs", nout2, nvec); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
