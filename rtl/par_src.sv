// par_src: parallel sample rate converter, the wideband half of the design.
//
// A par_cic (L = 80 lanes, R = 20) turns 80 samples per clock into 4, and two
// par_halfband stages turn 4 into 2 and 2 into 1: one output sample per clock,
// a fixed decimation of 80 (20 GSPS in, 250 MSPS out at a 250 MHz clock).
// The cascade and its sizes follow the design example.
//
// Interface: in_valid qualifies one vector of L samples, lane 0 oldest;
// out_valid qualifies y. Latency: 17 (CIC) + 3 + 3 (halfbands) clocks.
module par_src
  import src_pkg::*;
#(
  parameter int L      = LANES,
  parameter int R      = PCIC_R,
  parameter int N_HALF = PHB_N
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic signed [SAMPLE_W-1:0] x [L],
  output logic                       out_valid,
  output logic signed [SAMPLE_W-1:0] y
);

  localparam int L1 = L / R;     // lanes after the CIC
  localparam int L2 = L1 / 2;    // after the first halfband

  if (L1 != 4) begin : g_bad_lanes
    $error("par_src: the CIC must leave 4 lanes for the two halfband stages (L/R = %0d)", L1);
  end

  logic                       cic_v, hb1_v, hb2_v;
  logic signed [SAMPLE_W-1:0] cic_y [L1];
  logic signed [SAMPLE_W-1:0] hb1_y [L2];
  logic signed [SAMPLE_W-1:0] hb2_y [1];

  par_cic #(.L(L), .R(R)) u_cic (
    .clk, .rst_n, .in_valid, .x,
    .out_valid(cic_v), .y(cic_y)
  );

  par_halfband #(.L_IN(L1), .N_HALF(N_HALF)) u_hb1 (
    .clk, .rst_n, .in_valid(cic_v), .x(cic_y),
    .out_valid(hb1_v), .y(hb1_y)
  );

  par_halfband #(.L_IN(L2), .N_HALF(N_HALF)) u_hb2 (
    .clk, .rst_n, .in_valid(hb1_v), .x(hb1_y),
    .out_valid(hb2_v), .y(hb2_y)
  );

  assign out_valid = hb2_v;
  assign y         = hb2_y[0];

endmodule
