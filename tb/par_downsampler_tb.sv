// par_downsampler_tb: 80 lanes carrying their serial sample index; the output
// must carry indices 0, 20, 40, 60 of each vector, one clock later.
module par_downsampler_tb;
  localparam int L = 80, R = 20, W = 38;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [W-1:0] x [L];
  logic signed [W-1:0] y [L/R];
  int checks = 0, failures = 0, sent = 0, got = 0, cycle = 0;
  int in_cycle [$];

  par_downsampler #(.L(L), .R(R), .W(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (cycle - in_cycle.pop_front() != 1) begin failures++; $display("latency"); end
    for (int k = 0; k < L / R; k++) begin
      checks++;
      if (y[k] !== W'(got * L + k * R)) begin
        failures++;
        $display("vec %0d lane %0d: got %0d expected %0d", got, k, y[k], got * L + k * R);
      end
    end
    got++;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (300) begin
      @(negedge clk);
      in_valid = ($urandom % 3 != 0);
      if (in_valid) begin
        for (int l = 0; l < L; l++) x[l] = W'(sent * L + l);
        sent++;
        in_cycle.push_back(cycle);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (got != sent) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
