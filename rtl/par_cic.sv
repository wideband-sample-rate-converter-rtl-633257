// par_cic: parallel CIC decimator (N integrators, decimation by R, N combs).
//
// L lane-ordered input samples arrive per clock (lane 0 oldest). Each
// integrator stage is a par_integrator (adder matrix + accumulator + adder
// line), so the recursive loop is one accumulator per stage regardless of L.
// The parallel downsampler keeps lanes 0, R, 2R, ..., leaving L/R lanes, and
// N parallel combs of differential delay M (1 in the paper's design) follow.
// The result equals, sample for sample, a serial Hogenauer CIC run on the
// interleaved stream and decimated at indices n = 0, R, 2R, ...
//
// Arithmetic runs at the full Hogenauer width WIN + ceil(N*log2(R*M)) (38 bits
// for the defaults) and wraps. The output is that value shifted right by
// ceil(N*log2(R*M)) with round-half-up and saturation to WOUT bits, a gain of
// (R*M)^N / 2^ceil(N*log2(R*M)) (0.763 for R = 20, N = 5, M = 1). Structure
// and sizes follow the paper; widths, scaling and register placement are this
// design's choice.
//
// Interface: in_valid qualifies x; out_valid qualifies y.
// Latency: 2N + 1 + N + 1 clocks (17 for N = 5).
module par_cic
  import src_pkg::*;
#(
  parameter int L    = LANES,
  parameter int R    = PCIC_R,
  parameter int N    = CIC_N,
  parameter int M    = 1,
  parameter int WIN  = SAMPLE_W,
  parameter int WOUT = SAMPLE_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [WIN-1:0]  x [L],
  output logic                   out_valid,
  output logic signed [WOUT-1:0] y [L/R]
);

  localparam int GROWTH = cic_growth(R * M, N);
  localparam int W      = WIN + GROWTH;
  localparam int LO     = L / R;

  logic signed [W-1:0] int_d [N+1][L];
  logic                int_v [N+1];
  logic signed [W-1:0] ds_d  [LO];
  logic                ds_v;
  logic signed [W-1:0] cmb_d [N+1][LO];
  logic                cmb_v [N+1];

  always_comb begin
    for (int l = 0; l < L; l++) int_d[0][l] = W'(x[l]);  // sign extension
    int_v[0] = in_valid;
  end

  for (genvar s = 0; s < N; s++) begin : g_int
    par_integrator #(.L(L), .W(W)) u_int (
      .clk, .rst_n,
      .in_valid(int_v[s]), .x(int_d[s]),
      .out_valid(int_v[s+1]), .y(int_d[s+1])
    );
  end

  par_downsampler #(.L(L), .R(R), .W(W)) u_ds (
    .clk, .rst_n,
    .in_valid(int_v[N]), .x(int_d[N]),
    .out_valid(ds_v), .y(ds_d)
  );

  always_comb begin
    cmb_d[0] = ds_d;
    cmb_v[0] = ds_v;
  end

  for (genvar s = 0; s < N; s++) begin : g_comb
    par_comb #(.L(LO), .M(M), .W(W)) u_comb (
      .clk, .rst_n,
      .in_valid(cmb_v[s]), .x(cmb_d[s]),
      .out_valid(cmb_v[s+1]), .y(cmb_d[s+1])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= cmb_v[N];
    if (cmb_v[N])
      for (int k = 0; k < LO; k++)
        y[k] <= WOUT'(round_sat(longint'(cmb_d[N][k]), GROWTH, WOUT));
  end

endmodule
