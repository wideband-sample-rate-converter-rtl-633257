// ser_halfband_tb: the serial halfband (order 238, 30 multipliers, 2 passes)
// against a full serial convolution. An impulse, a slow full-scale square wave
// (its overshoot must saturate the output at least once) and random samples are sent first at the maximum rate of one per clock, then
// with random gaps. Each output must appear 4 clocks after the second input
// of its pair.
module ser_halfband_tb;
  import tb_ref_pkg::*;
  localparam int NH = 119, LAT = 4;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, out_valid;
  logic signed [15:0] x, y;
  int checks = 0, failures = 0, cycle = 0, nout = 0, sent = 0;
  int pair_cycle [$];
  hb_model ref_m;
  int nsat = 0;

  ser_halfband dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e;
    checks += 2;
    if (cycle - pair_cycle.pop_front() != LAT) begin failures++; $display("latency mismatch"); end
    e = ref_m.out.pop_front();
    if (y == 16'sd32767 || y == -16'sd32768) nsat++;
    if (longint'(y) != e) begin
      failures++;
      if (failures < 10) $display("out %0d: got %0d expected %0d", nout, y, e);
    end
    nout++;
  end

  initial begin
    ref_m = new(NH);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 8000; i++) begin
      @(negedge clk);
      in_valid = (i < 4000) ? 1'b1 : ($urandom % 3 != 0);
      if (in_valid) begin
        if (sent < 300)       x = (sent == 0) ? 16'sd32767 : 16'sd0;
        else if (sent < 1500) x = ((sent / 60) % 2 == 0) ? 16'sd32767 : -16'sd32768;
        else                  x = 16'($urandom);
        ref_m.push(longint'(x));
        if (sent % 2 == 1) pair_cycle.push_back(cycle);
        sent++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (nout != sent / 2) begin failures++; $display("%0d outputs for %0d inputs", nout, sent); end
    checks++;
    if (nsat == 0) begin failures++; $display("no saturated output"); end
    $display("saturated outputs: %0d", nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
