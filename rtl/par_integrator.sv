// par_integrator: one integrator stage of the parallel CIC.
//
// The serial integrator y(n) = y(n-1) + x(n) is computed for L samples per
// clock. Sample n of the serial stream sits in lane n mod L of clock n / L
// (lane 0 oldest). With I(t,l) the lane integral of clock t,
//   y(t,l) = A(t-1) + I(t,l),   A(t) = A(t-1) + I(t,L-1),
// so only the single accumulator A keeps a one-clock recursive loop; the lane
// integral is a feed-forward adder matrix and the final additions form an
// adder line. The decomposition is the paper's; the two register levels
// (after the adder matrix, then after the adder line and accumulator) are this
// design's choice.
//
// Interface: in_valid qualifies x; state advances only on valid vectors.
// Latency: 2 clocks from in_valid to out_valid. Arithmetic wraps modulo 2^W as
// in any CIC integrator. Synchronous active-low reset clears the accumulator.
module par_integrator #(
  parameter int L = 80,
  parameter int W = 38
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x [L],
  output logic                out_valid,
  output logic signed [W-1:0] y [L]
);

  logic signed [W-1:0] lane_sum   [L];
  logic signed [W-1:0] lane_sum_q [L];
  logic                lane_valid_q;
  logic signed [W-1:0] acc;          // A(t-1): sum of all earlier clocks

  adder_matrix #(.L(L), .W(W)) u_matrix (.x(x), .lane_sum(lane_sum));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lane_valid_q <= 1'b0;
    end else begin
      lane_valid_q <= in_valid;
    end
    if (in_valid) lane_sum_q <= lane_sum;
  end

  // Adder line and serial integrator.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= lane_valid_q;
      if (lane_valid_q) begin
        acc <= acc + lane_sum_q[L-1];
        for (int l = 0; l < L; l++) y[l] <= acc + lane_sum_q[l];
      end
    end
  end

endmodule
