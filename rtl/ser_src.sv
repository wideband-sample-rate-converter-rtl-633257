// ser_src: serial sample rate converter, the flexible-ratio half of the design.
//
// A ser_cic with a run-time ratio `rate` (1..4000) is followed by three
// ser_halfband stages in cascade. `hb_used` (0..3) selects how many of them
// are in the path; the others are bypassed and receive no valid samples.
// The serial decimation is rate * 2^hb_used, from 1 to 32000. The cascade
// (CIC, then three halfbands) follows the design example; the stage bypass is
// this design's way of reaching the ratios below 8 that the example lists.
//
// Interface: rate and hb_used held steady; pulse `clear` after changing them.
// One input per clock at most. Latency: CIC latency plus 3 clocks per used
// halfband stage (plus the halfbands' wait for a second input).
module ser_src
  import src_pkg::*;
#(
  parameter int HB_STAGES = SHB_STAGES,
  parameter int R_MAX     = SCIC_R_MAX,
  parameter int N_HALF    = SHB_N,
  parameter int RW        = $clog2(R_MAX + 1),
  parameter int HW        = $clog2(HB_STAGES + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       clear,
  input  logic [RW-1:0]              rate,
  input  logic [HW-1:0]              hb_used,
  input  logic                       in_valid,
  input  logic signed [SAMPLE_W-1:0] x,
  output logic                       out_valid,
  output logic signed [SAMPLE_W-1:0] y
);

  logic                       sv [HB_STAGES+1];
  logic signed [SAMPLE_W-1:0] sd [HB_STAGES+1];

  ser_cic #(.R_MAX(R_MAX), .RW(RW)) u_cic (
    .clk, .rst_n, .clear, .rate,
    .in_valid, .x,
    .out_valid(sv[0]), .y(sd[0])
  );

  for (genvar i = 0; i < HB_STAGES; i++) begin : g_hb
    ser_halfband #(.N_HALF(N_HALF)) u_hb (
      .clk, .rst_n, .clear,
      .in_valid(sv[i] && (HW'(i) < hb_used)), .x(sd[i]),
      .out_valid(sv[i+1]), .y(sd[i+1])
    );
  end

  always_comb begin
    out_valid = sv[0];
    y         = sd[0];
    for (int i = 1; i <= HB_STAGES; i++)
      if (HW'(i) == hb_used) begin
        out_valid = sv[i];
        y         = sd[i];
      end
  end

endmodule
