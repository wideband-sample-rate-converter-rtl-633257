// ser_cic: serial CIC decimator with a run-time decimation ratio.
//
// N pipelined integrators run on every input sample, a counter keeps the last
// sample of every group of `rate` inputs, and N combs (M = 1) run on the kept
// samples. Integrator s adds the previous-sample value of integrator s-1, so
// the integrator chain is the ideal one delayed by N-1 samples: output k equals
// the ideal CIC output taken at input index k*rate + rate-1 - (N-1).
//
// Internal width WIN + ceil(N*log2 R_MAX) (76 bits for the defaults) covers
// every ratio. The result is shifted right by ceil(log2(rate^N)), rounded half
// up and saturated to WOUT bits, so the DC gain rate^N / 2^shift stays in
// (0.5, 1] at every ratio. The stage count, M = 1 and the ratio range follow
// the design example; the scaling rule, the kept phase and the pipelining are
// this design's choice.
//
// Interface: `rate` (1..R_MAX) must be held steady; assert `clear` for a clock
// after changing it. in_valid may be high every clock. Latency from the
// deciding input to out_valid: N + 2 clocks.
module ser_cic
  import src_pkg::*;
#(
  parameter int N     = CIC_N,
  parameter int R_MAX = SCIC_R_MAX,
  parameter int WIN   = SAMPLE_W,
  parameter int WOUT  = SAMPLE_W,
  parameter int RW    = $clog2(R_MAX + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic [RW-1:0]          rate,
  input  logic                   in_valid,
  input  logic signed [WIN-1:0]  x,
  output logic                   out_valid,
  output logic signed [WOUT-1:0] y
);

  localparam int W  = WIN + cic_growth(R_MAX, N);
  localparam int SW = $clog2(W + 1);
  localparam int PW = RW * N;

  logic signed [W-1:0] integ [N];
  logic [RW-1:0]       cnt;
  logic                dec_v;
  logic signed [W-1:0] cdly  [N];      // comb delay registers
  logic signed [W-1:0] cout  [N];      // comb outputs
  logic                cv    [N];
  logic [SW-1:0]       shift_q;

  // Output shift = ceil(log2(rate^N)) = bit length of rate^N - 1.
  function automatic logic [SW-1:0] growth_of(logic [RW-1:0] r);
    logic [PW-1:0] p;
    logic [SW-1:0] b;
    p = PW'(r);
    for (int i = 1; i < N; i++) p = p * PW'(r);
    p = p - 1'b1;
    b = '0;
    for (int i = 0; i < PW; i++) if (p[i]) b = SW'(i + 1);
    return b;
  endfunction

  always_ff @(posedge clk) begin
    shift_q <= growth_of((rate == '0) ? RW'(1) : rate);
    if (!rst_n || clear) begin
      for (int s = 0; s < N; s++) begin
        integ[s] <= '0;
        cdly[s]  <= '0;
        cv[s]    <= 1'b0;
      end
      cnt       <= '0;
      dec_v     <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      // Integrators and decimation counter.
      dec_v <= 1'b0;
      if (in_valid) begin
        integ[0] <= integ[0] + W'(x);
        for (int s = 1; s < N; s++) integ[s] <= integ[s] + integ[s-1];
        if (cnt >= rate - 1'b1) begin
          cnt   <= '0;
          dec_v <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
      // Combs, one register stage each.
      cv[0] <= dec_v;
      if (dec_v) begin
        cdly[0] <= integ[N-1];
        cout[0] <= integ[N-1] - cdly[0];
      end
      for (int s = 1; s < N; s++) begin
        cv[s] <= cv[s-1];
        if (cv[s-1]) begin
          cdly[s] <= cout[s-1];
          cout[s] <= cout[s-1] - cdly[s];
        end
      end
      // Scaling.
      out_valid <= cv[N-1];
      if (cv[N-1]) y <= scale(cout[N-1], shift_q);
    end
  end

  function automatic logic signed [WOUT-1:0] scale(logic signed [W-1:0] v, logic [SW-1:0] sh);
    logic signed [W:0] t;
    logic signed [W:0] half;
    half = (sh == '0) ? '0 : ((W+1)'(1) <<< (sh - 1'b1));
    t = ((W+1)'(v) + half) >>> sh;
    if (t > (W+1)'((1 <<< (WOUT-1)) - 1)) return {1'b0, {(WOUT-1){1'b1}}};
    if (t < -(W+1)'(1 <<< (WOUT-1)))      return {1'b1, {(WOUT-1){1'b0}}};
    return WOUT'(t);
  endfunction

endmodule
