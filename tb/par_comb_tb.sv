// par_comb_tb: random 4-lane vectors with gaps; every output lane must equal
// the serial first difference x(n) - x(n-1) of the interleaved stream
// (x(-1) = 0), one clock after its input. Two more instances on the same
// input check differential delays M = 3 (within one clock) and M = 6 (reaching
// two clocks back) against x(n) - x(n-M).
module par_comb_tb;
  localparam int L = 4, W = 38;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [W-1:0] x [L];
  logic signed [W-1:0] y [L];
  logic signed [W-1:0] exp_q [$];
  int checks = 0, failures = 0, cycle = 0;
  int in_cycle [$];
  logic signed [W-1:0] prev = '0;

  par_comb #(.L(L), .W(W)) dut (.*);

  logic signed [W-1:0] ser [$];   // whole serial input stream
  logic signed [W-1:0] y3 [L];
  logic signed [W-1:0] y6 [L];
  logic ov3, ov6;
  int base [$];                   // serial index of lane 0 of each input vector

  par_comb #(.L(L), .M(3), .W(W)) dut3 (.clk, .rst_n, .in_valid, .x, .out_valid(ov3), .y(y3));
  par_comb #(.L(L), .M(6), .W(W)) dut6 (.clk, .rst_n, .in_valid, .x, .out_valid(ov6), .y(y6));

  function automatic logic signed [W-1:0] at(int n);
    return (n < 0) ? '0 : ser[n];
  endfunction

  always @(posedge clk) if (rst_n && ov3) begin
    int b;
    b = base.pop_front();
    checks++;
    if (!ov6) begin failures++; $display("M=6 instance out of step"); end
    for (int l = 0; l < L; l++) begin
      checks += 2;
      if (y3[l] !== at(b + l) - at(b + l - 3)) begin
        failures++;
        if (failures < 10) $display("M=3 lane %0d: got %0d", l, y3[l]);
      end
      if (y6[l] !== at(b + l) - at(b + l - 6)) begin
        failures++;
        if (failures < 10) $display("M=6 lane %0d: got %0d", l, y6[l]);
      end
    end
  end

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
    for (int l = 0; l < L; l++) begin
      logic signed [W-1:0] e;
      e = exp_q.pop_front();
      checks++;
      if (y[l] !== e) begin
        failures++;
        if (failures < 10) $display("lane %0d: got %0d expected %0d", l, y[l], e);
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (500) begin
      @(negedge clk);
      in_valid = ($urandom % 4 != 0);
      if (in_valid) begin
        for (int l = 0; l < L; l++) begin
          x[l] = W'({$urandom, $urandom});
          exp_q.push_back(x[l] - prev);
          prev = x[l];
        end
        base.push_back(ser.size());
        for (int l = 0; l < L; l++) ser.push_back(x[l]);
        in_cycle.push_back(cycle);
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
