// par_halfband_tb: the 4-lane parallel halfband (order 122, N odd) against a
// full serial convolution. Input: an impulse (the output then reads out the
// coefficients), a slow full-scale square wave whose overshoot must saturate
// the output at least once, then random samples, with random gaps. Each
// output vector must appear 3 clocks after its input vector. A second,
// small instance (2 lanes, order 20, N even) runs on the same stream to cover
// the other tap pattern, where the nonzero taps sit at odd indices.
module par_halfband_tb;
  import tb_ref_pkg::*;
  localparam int LI = 4, LO = 2, NH = 61, LAT = 3;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [15:0] x [LI];
  logic signed [15:0] y [LO];
  int checks = 0, failures = 0, cycle = 0, nvec = 0, nout = 0;
  int in_cycle [$];
  hb_model ref_m, ref_e;
  int nsat = 0;

  par_halfband #(.L_IN(LI), .N_HALF(NH)) dut (.*);

  // Even-N instance: 2 lanes in, 1 out, fed two lanes per clock from a queue.
  logic signed [15:0] xe [2];
  logic signed [15:0] ye [1];
  logic ve_in = 0, ve_out;
  int nout_e = 0;
  par_halfband #(.L_IN(2), .N_HALF(10)) dut_even (
    .clk, .rst_n, .in_valid(ve_in), .x(xe), .out_valid(ve_out), .y(ye));

  always @(posedge clk) if (rst_n && ve_out) begin
    longint e;
    e = ref_e.out.pop_front();
    checks++;
    if (longint'(ye[0]) != e) begin
      failures++;
      if (failures < 10) $display("even-N out %0d: got %0d expected %0d", nout_e, ye[0], e);
    end
    nout_e++;
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
    if (cycle - in_cycle.pop_front() != LAT) begin failures++; $display("latency mismatch"); end
    for (int k = 0; k < LO; k++) begin
      longint e;
      e = ref_m.out.pop_front();
      checks++;
      if (y[k] == 16'sd32767 || y[k] == -16'sd32768) nsat++;
      if (longint'(y[k]) != e) begin
        failures++;
        if (failures < 10) $display("out %0d lane %0d: got %0d expected %0d", nout, k, y[k], e);
      end
    end
    nout++;
  end

  initial begin
    int n;
    ref_m = new(NH);
    ref_e = new(10);
    n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int v = 0; v < 3000; v++) begin
      @(negedge clk);
      in_valid = ($urandom % 4 != 0);
      if (in_valid) begin
        for (int l = 0; l < LI; l++) begin
          if (n < 200)       x[l] = (n == 0) ? 16'sd32767 : 16'sd0;
          else if (n < 2000) x[l] = ((n / 40) % 2 == 0) ? 16'sd32767 : -16'sd32768;
          else               x[l] = 16'($urandom);
          ref_m.push(longint'(x[l]));
          n++;
        end
        in_cycle.push_back(cycle);
        nvec++;
        // The even-N instance sees lanes 0,1 of each vector.
        xe[0] = x[0];
        xe[1] = x[1];
        ve_in = 1;
        ref_e.push(longint'(x[0]));
        ref_e.push(longint'(x[1]));
      end else begin
        ve_in = 0;
      end
    end
    @(negedge clk) begin
      in_valid = 0;
      ve_in = 0;
    end
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (nout != nvec) begin failures++; $display("%0d outputs for %0d inputs", nout, nvec); end
    checks++;
    if (nout_e != nvec) begin failures++; $display("even-N: %0d outputs for %0d inputs", nout_e, nvec); end
    checks++;
    if (nsat == 0) begin failures++; $display("no saturated output"); end
    $display("saturated outputs: %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
