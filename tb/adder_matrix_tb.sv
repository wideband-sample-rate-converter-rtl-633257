// adder_matrix_tb: random 80-lane vectors, each lane compared with a running
// sum computed lane by lane (modulo 2^W), plus all-ones and extreme vectors.
module adder_matrix_tb;
  localparam int L = 80;
  localparam int W = 38;

  logic signed [W-1:0] x [L];
  logic signed [W-1:0] s [L];
  int checks = 0, failures = 0;

  adder_matrix #(.L(L), .W(W)) dut (.x(x), .lane_sum(s));

  task automatic check_vec();
    logic signed [W-1:0] acc;
    #1;
    acc = '0;
    for (int l = 0; l < L; l++) begin
      acc = acc + x[l];
      checks++;
      if (s[l] !== acc) begin
        failures++;
        if (failures < 10) $display("lane %0d: got %0d expected %0d", l, s[l], acc);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) x[l] = W'(1);
    check_vec();
    for (int l = 0; l < L; l++) x[l] = {1'b0, {(W-1){1'b1}}};
    check_vec();
    for (int l = 0; l < L; l++) x[l] = (l % 2 == 0) ? W'(-5) : W'(l);
    check_vec();
    repeat (200) begin
      for (int l = 0; l < L; l++) x[l] = W'({$urandom, $urandom});
      check_vec();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
