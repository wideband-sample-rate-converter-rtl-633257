// ser_cic_tb: the serial CIC at ratios 1, 2, 3, 5, 20, 137 and 4000 against
// the serial model (output k = ideal CIC at input k*R + R-1 - 4). Between
// ratios the block is cleared. Random samples, a full-scale step (checks the
// rate-dependent scaling saturates nowhere) and random gaps. For each ratio
// the number of outputs must be inputs / R, and each output must appear
// N + 2 = 7 clocks after the input that completes its group.
module ser_cic_tb;
  import tb_ref_pkg::*;
  localparam int N = 5, LAT = 7;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, out_valid;
  logic [11:0] rate = 12'd1;
  logic signed [15:0] x, y;
  int checks = 0, failures = 0, cycle = 0, nout = 0;
  int dec_cycle [$];
  cic_model ref_m;

  ser_cic dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e;
    checks += 2;
    if (cycle - dec_cycle.pop_front() != LAT) begin failures++; $display("latency mismatch"); end
    e = ref_m.out.pop_front();
    if (longint'(y) != e) begin
      failures++;
      if (failures < 10) $display("rate %0d out %0d: got %0d expected %0d", rate, nout, y, e);
    end
    nout++;
  end

  task automatic run_rate(int r, int nin);
    int sent;
    @(negedge clk);
    rate = 12'(r);
    clear = 1;
    @(negedge clk);
    clear = 0;
    ref_m = new(r, N, r - 1, N - 1);
    nout = 0;
    sent = 0;
    while (sent < nin) begin
      @(negedge clk);
      in_valid = ($urandom % 4 != 0);
      if (in_valid) begin
        x = (sent < nin / 3) ? 16'sd32767 : 16'($urandom);
        ref_m.push(longint'(x));
        if (sent % r == r - 1) dec_cycle.push_back(cycle);
        sent++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (nout != nin / r || ref_m.out.size() != 0) begin
      failures++;
      $display("rate %0d: %0d outputs, expected %0d", r, nout, nin / r);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run_rate(1, 300);
    run_rate(2, 300);
    run_rate(3, 600);
    run_rate(5, 600);
    run_rate(20, 2000);
    run_rate(137, 6850);
    run_rate(4000, 40000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
