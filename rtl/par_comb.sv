// par_comb: one comb stage of the parallel CIC, differential delay M.
//
// The serial comb y(n) = x(n) - x(n-M) on a lane-ordered parallel stream
// (serial sample n in lane n mod L, lane 0 oldest): lane l subtracts the
// sample M positions earlier, which is lane l-M of the same clock or, for
// l < M, one of the last M samples of earlier valid clocks, kept in
// registers. All L subtractions run at once. This is the paper's parallel comb;
// the design example uses M = 1, where lane 0 subtracts the previous clock's
// last lane. M may be larger than L.
//
// Interface: in_valid qualifies x. Latency: 1 clock. Reset clears the kept
// samples to 0, i.e. the stream is taken to start after zeros.
module par_comb #(
  parameter int L = 4,
  parameter int M = 1,
  parameter int W = 38
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x [L],
  output logic                out_valid,
  output logic signed [W-1:0] y [L]
);

  // win[i] is serial sample (t*L + i - M): the M kept samples, then this clock.
  logic signed [W-1:0] hist [M];     // hist[M-1] = newest sample of the previous clock
  logic signed [W-1:0] win  [M + L];

  always_comb begin
    for (int i = 0; i < M; i++) win[i] = hist[i];
    for (int i = 0; i < L; i++) win[M + i] = x[i];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < M; i++) hist[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < M; i++) hist[i] <= win[L + i];
        for (int l = 0; l < L; l++) y[l] <= x[l] - win[l];
      end
    end
  end

endmodule
