// ser_src_tb: the serial SRC in several configurations (ratio, halfband
// stages used) against a serial CIC model followed by as many halfband models.
// The block is cleared between configurations. Input at the full rate of one
// sample per clock, then with gaps. Checks every output and the output count.
module ser_src_tb;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, out_valid;
  logic [11:0] rate = 12'd1;
  logic [1:0]  hb_used = 2'd0;
  logic signed [15:0] x, y;
  int checks = 0, failures = 0, nout = 0;
  cic_model cic_m;
  hb_model  hb_m [3];
  longint   expq [$];

  ser_src dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    longint e;
    checks++;
    e = expq.pop_front();
    if (longint'(y) != e) begin
      failures++;
      if (failures < 10) $display("R=%0d hb=%0d out %0d: got %0d expected %0d", rate, hb_used, nout, y, e);
    end
    nout++;
  end

  task automatic run_cfg(int r, int k, int nin);
    int sent, total;
    @(negedge clk);
    rate = 12'(r);
    hb_used = 2'(k);
    clear = 1;
    @(negedge clk);
    clear = 0;
    cic_m = new(r, 5, r - 1, 4);
    for (int i = 0; i < 3; i++) hb_m[i] = new(119);
    nout = 0;
    sent = 0;
    total = 0;
    while (sent < nin) begin
      @(negedge clk);
      in_valid = (sent < nin / 2) ? 1'b1 : ($urandom % 3 != 0);
      if (in_valid) begin
        x = 16'($rtoi(20000.0 * $sin(real'(sent) * 0.013))) + 16'($urandom % 512);
        cic_m.push(longint'(x));
        // Chain the models through the used stages.
        while (cic_m.out.size() > 0) begin
          longint v;
          v = cic_m.out.pop_front();
          if (k == 0) expq.push_back(v); else hb_m[0].push(v);
        end
        for (int i = 0; i < 3; i++)
          while (hb_m[i].out.size() > 0) begin
            longint v;
            v = hb_m[i].out.pop_front();
            if (k == i + 1) expq.push_back(v); else if (i < 2) hb_m[i+1].push(v);
          end
        sent++;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (40) @(posedge clk);
    total = nin / (r * (1 << k));
    checks++;
    if (nout != total || expq.size() != 0) begin
      failures++;
      $display("R=%0d hb=%0d: %0d outputs, expected %0d", r, k, nout, total);
      expq = {};
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    run_cfg(1, 0, 400);
    run_cfg(1, 1, 800);
    run_cfg(1, 2, 1600);
    run_cfg(1, 3, 3200);
    run_cfg(3, 2, 4800);
    run_cfg(20, 3, 16000);
    run_cfg(7, 1, 2800);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
