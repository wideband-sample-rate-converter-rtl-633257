// par_halfband: parallel two-path halfband decimator by 2.
//
// L_IN lane-ordered samples arrive per clock (lane 0 oldest) and L_IN/2
// samples leave. The filter has length 2N+1 with h(N) = 0.5, h(k) = 0 for
// (k - N) even, k != N, and h(k) = h(2N-k) otherwise. Output m is
//   y(m) = x(2m+1-N)/2 + sum_j c_j * ( x(2m+1-k_j) + x(2m+1-(2N-k_j)) ),
// where k_j runs over the (N+1)/2 nonzero taps left of the centre. The first
// term is the delay-only path (a shift, no multiplier); the sum is the
// polyphase path with symmetric pre-addition, so each output lane uses
// (N+1)/2 multipliers: 62 for the 4-lane stage and 31 for the 2-lane stage of
// the design example. Each output lane is an FIR on a time-shifted copy of the
// stream, as in a parallel FIR; the history of the last 2N samples is kept in
// registers.
//
// The two-path split, symmetric pre-addition and sizes follow the paper; the
// coefficient design (src_pkg::hb_coef), the decimation phase (output m aligned
// to input 2m+1) and the rounding are this design's choice.
//
// Interface: in_valid qualifies x; out_valid qualifies y. Latency: 3 clocks
// (pre-add, multiply, sum with round-half-up by 15 bits and saturation).
module par_halfband
  import src_pkg::*;
#(
  parameter int L_IN   = 4,
  parameter int N_HALF = PHB_N,
  parameter int WIN    = SAMPLE_W,
  parameter int WOUT   = SAMPLE_W,
  parameter int CW     = COEF_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [WIN-1:0]  x [L_IN],
  output logic                   out_valid,
  output logic signed [WOUT-1:0] y [L_IN/2]
);

  localparam int LO   = L_IN / 2;
  localparam int NC   = hb_ncoef(N_HALF);
  localparam int HIST = 2 * N_HALF;            // samples kept from past clocks
  localparam int WINW = L_IN - 1 + 2 * N_HALF; // window needed (index 0 newest)
  localparam int PW   = WIN + 1 + CW;          // product width
  localparam int AW   = PW + $clog2(NC + 1) + 1;

  typedef logic signed [CW-1:0] coef_t;
  typedef coef_t coef_arr_t [NC];

  function automatic coef_arr_t make_coefs();
    coef_arr_t c;
    for (int j = 0; j < NC; j++) c[j] = coef_t'(hb_coef(N_HALF, hb_tap(N_HALF, j)));
    return c;
  endfunction

  localparam coef_arr_t COEF = make_coefs();

  if (L_IN % 2 != 0) begin : g_bad_lanes
    $error("par_halfband: L_IN (%0d) must be even", L_IN);
  end

  logic signed [WIN-1:0] hist [HIST];   // hist[0] = newest sample of the previous clock
  logic signed [WIN-1:0] win  [WINW];   // win[0] = newest sample of this clock

  always_comb begin
    for (int i = 0; i < L_IN; i++) win[i] = x[L_IN-1-i];
    for (int i = L_IN; i < WINW; i++) win[i] = hist[i - L_IN];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < HIST; i++) hist[i] <= '0;
    end else if (in_valid) begin
      for (int i = 0; i < HIST; i++) hist[i] <= win[i];
    end
  end

  // Stage 1: symmetric pre-addition and centre tap.
  logic signed [WIN:0]   pre_q    [LO][NC];
  logic signed [WIN-1:0] centre_q [LO];
  // Stage 2: products.
  logic signed [PW-1:0]  prod_q   [LO][NC];
  logic signed [WIN-1:0] centre_qq[LO];
  logic                  v1, v2;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      out_valid <= v2;
    end

    if (in_valid)
      for (int p = 0; p < LO; p++) begin
        // newest sample of output p is input lane 2p+1, at window index L_IN-2-2p
        centre_q[p] <= win[L_IN - 2 - 2*p + N_HALF];
        for (int j = 0; j < NC; j++)
          pre_q[p][j] <= (WIN+1)'(win[L_IN - 2 - 2*p + hb_tap(N_HALF, j)])
                       + (WIN+1)'(win[L_IN - 2 - 2*p + 2*N_HALF - hb_tap(N_HALF, j)]);
      end

    if (v1)
      for (int p = 0; p < LO; p++) begin
        centre_qq[p] <= centre_q[p];
        for (int j = 0; j < NC; j++) prod_q[p][j] <= PW'(pre_q[p][j]) * PW'(COEF[j]);
      end

    if (v2)
      for (int p = 0; p < LO; p++) y[p] <= WOUT'(round_sat(sum_lane(p), COEF_FRAC, WOUT));
  end

  // Sum of one output lane's products plus the centre tap (0.5 = 2^(COEF_FRAC-1)).
  function automatic longint sum_lane(int p);
    logic signed [AW-1:0] acc;
    acc = AW'(centre_qq[p]) <<< (COEF_FRAC - 1);
    for (int j = 0; j < NC; j++) acc = acc + AW'(prod_q[p][j]);
    return longint'(acc);
  endfunction

endmodule
