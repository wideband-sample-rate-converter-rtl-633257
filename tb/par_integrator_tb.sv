// par_integrator_tb: drives random 80-lane vectors with random gaps in
// in_valid and compares every output lane with a serial running sum of the
// interleaved stream (modulo 2^38). Checks the 2-clock latency on every vector.
module par_integrator_tb;
  localparam int L = 80;
  localparam int W = 38;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [W-1:0] x [L];
  logic signed [W-1:0] y [L];
  logic signed [W-1:0] exp_q [$];
  int in_cycle [$];
  int cycle = 0, checks = 0, failures = 0, nout = 0;
  logic signed [W-1:0] run = '0;

  par_integrator #(.L(L), .W(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor.
  always @(posedge clk) if (rst_n && out_valid) begin
    logic signed [W-1:0] e;
    int c;
    c = in_cycle.pop_front();
    checks++;
    if (cycle - c != 2) begin
      failures++;
      $display("latency %0d, expected 2", cycle - c);
    end
    for (int l = 0; l < L; l++) begin
      e = exp_q.pop_front();
      checks++;
      if (y[l] !== e) begin
        failures++;
        if (failures < 10) $display("vec %0d lane %0d: got %0d expected %0d", nout, l, y[l], e);
      end
    end
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int v = 0; v < 400; v++) begin
      @(negedge clk);
      if ($urandom % 4 == 0) begin
        in_valid = 0;
      end else begin
        in_valid = 1;
        for (int l = 0; l < L; l++) begin
          x[l] = (v < 20) ? W'(32767) : W'($signed(16'($urandom)));
          run = run + x[l];
          exp_q.push_back(run);
        end
        in_cycle.push_back(cycle);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || nout == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
