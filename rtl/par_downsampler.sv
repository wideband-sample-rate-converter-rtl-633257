// par_downsampler: parallel decimation by R of an L-lane stream.
//
// With L a multiple of R, every clock holds exactly L/R samples to keep: input
// lanes 0, R, 2R, ... (serial sample indices n with n mod R = 0). Output lane k
// carries input lane k*R, so the output is again a lane-ordered parallel stream
// with L/R lanes. The paper names this unit without describing it; the lane
// selection and the kept phase are this design's choice.
//
// Interface: in_valid qualifies x. Latency: 1 clock (registered output).
module par_downsampler #(
  parameter int L = 80,
  parameter int R = 20,
  parameter int W = 38
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x [L],
  output logic                out_valid,
  output logic signed [W-1:0] y [L/R]
);

  if (L % R != 0) begin : g_bad_ratio
    $error("par_downsampler: L (%0d) must be a multiple of R (%0d)", L, R);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid)
      for (int k = 0; k < L / R; k++) y[k] <= x[k * R];
  end

endmodule
