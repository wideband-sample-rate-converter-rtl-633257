// ser_halfband: serial halfband decimator by 2 with time-shared multipliers.
//
// The last 2N+1 input samples sit in a shift register. After every second
// input (inputs 1, 3, 5, ... counted from 0), output m is computed as
//   y(m) = x(2m+1-N)/2 + sum_j c_j * ( x(2m+1-k_j) + x(2m+1-(2N-k_j)) ),
// i.e. the centre tap is a shift and the (N+1)/2 symmetric nonzero taps are
// pre-added (60 for order 238). The pre-added pairs are captured in one clock,
// then MULTS multipliers work through them in ceil(60/MULTS) passes (2 passes
// of 30 for the defaults). Since outputs are due at most every second clock,
// two passes always keep up with one input per clock.
//
// The order, coefficient width and multiplier count follow the design example;
// the coefficient design (src_pkg::hb_coef), the decimation phase and the
// pass scheduling are this design's choice.
//
// Interface: in_valid at most once per clock; `clear` empties the shift
// register. Latency: PASSES + 2 clocks after the second input of a pair.
module ser_halfband
  import src_pkg::*;
#(
  parameter int N_HALF = SHB_N,
  parameter int MULTS  = SHB_MULTS,
  parameter int WIN    = SAMPLE_W,
  parameter int WOUT   = SAMPLE_W,
  parameter int CW     = COEF_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   in_valid,
  input  logic signed [WIN-1:0]  x,
  output logic                   out_valid,
  output logic signed [WOUT-1:0] y
);

  localparam int NC     = hb_ncoef(N_HALF);
  localparam int PASSES = (NC + MULTS - 1) / MULTS;
  localparam int TAPS   = 2 * N_HALF + 1;
  localparam int PW     = WIN + 1 + CW;
  localparam int AW     = PW + $clog2(NC + 1) + 1;
  localparam int PCW    = (PASSES > 1) ? $clog2(PASSES) : 1;

  typedef logic signed [CW-1:0] coef_t;
  typedef coef_t coef_arr_t [PASSES * MULTS];

  // Coefficients padded with zeros to a whole number of passes.
  function automatic coef_arr_t make_coefs();
    coef_arr_t c;
    for (int j = 0; j < PASSES * MULTS; j++)
      c[j] = (j < NC) ? coef_t'(hb_coef(N_HALF, hb_tap(N_HALF, j))) : '0;
    return c;
  endfunction

  localparam coef_arr_t COEF = make_coefs();

  logic signed [WIN-1:0] taps [TAPS];          // taps[0] = newest
  logic                  phase;                // 1: next input completes a pair
  logic                  trig;
  logic signed [WIN:0]   pre_q [PASSES * MULTS];
  logic signed [WIN-1:0] centre_q;
  logic                  busy;
  logic [PCW-1:0]        pass;
  logic signed [AW-1:0]  acc, acc_next;

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      for (int i = 0; i < TAPS; i++) taps[i] <= '0;
      phase     <= 1'b0;
      trig      <= 1'b0;
      busy      <= 1'b0;
      pass      <= '0;
      out_valid <= 1'b0;
    end else begin
      trig      <= 1'b0;
      out_valid <= 1'b0;
      if (in_valid) begin
        taps[0] <= x;
        for (int i = 1; i < TAPS; i++) taps[i] <= taps[i-1];
        phase <= ~phase;
        trig  <= phase;
      end

      // Capture: symmetric pre-addition on the window ending at input 2m+1.
      if (trig) begin
        centre_q <= taps[N_HALF];
        for (int j = 0; j < PASSES * MULTS; j++)
          pre_q[j] <= (j < NC)
              ? (WIN+1)'(taps[hb_tap(N_HALF, j)]) + (WIN+1)'(taps[2*N_HALF - hb_tap(N_HALF, j)])
              : '0;
        busy <= 1'b1;
        pass <= '0;
      end

      // Multiply-accumulate passes of MULTS products each; round after the last.
      if (busy) begin
        acc <= acc_next;
        if (int'(pass) == PASSES - 1) begin
          if (!trig) busy <= 1'b0;
          out_valid <= 1'b1;
          y <= WOUT'(round_sat(longint'(acc_next), COEF_FRAC, WOUT));
        end else begin
          pass <= pass + 1'b1;
        end
      end
    end
  end

  always_comb
    acc_next = ((pass == '0) ? (AW'(centre_q) <<< (COEF_FRAC - 1)) : acc) + pass_sum(pass);

  function automatic logic signed [AW-1:0] pass_sum(logic [PCW-1:0] pi);
    logic signed [AW-1:0] s;
    s = '0;
    for (int j = 0; j < MULTS; j++)
      s = s + AW'(pre_q[int'(pi) * MULTS + j]) * AW'(COEF[int'(pi) * MULTS + j]);
    return s;
  endfunction

  // A new pair must not arrive before the previous output's passes are done.
  assert property (@(posedge clk) disable iff (!rst_n || clear)
                   trig |-> (!busy || int'(pass) == PASSES - 1))
    else $error("ser_halfband: inputs arrive faster than one per clock");

endmodule
