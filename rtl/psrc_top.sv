// psrc_top: cascaded parallel-serial sample rate converter.
//
// The wideband front half (par_src) decimates an 80-lane stream by a fixed 80
// to one sample per clock; the flexible back half (ser_src) decimates that by
// rate * 2^hb_used. Total decimation: 80 * rate * 2^hb_used, from 80 to
// 2,560,000 (rate 1..4000, hb_used 0..3). With a 250 MHz clock and 80 lanes
// the input is 20 GSPS and the output rate runs from 250 MSPS down to
// 7.8125 kSPS. The parallel-then-serial split follows the paper; the
// configuration port is this design's own.
//
// Configuration: cfg_load latches cfg_rate and cfg_hb_used (rate 0 is taken
// as 1, rates above 4000 as 4000, hb_used above 3 as 3) and clears the serial
// half one clock later; the parallel half keeps running. The intermediate
// single-lane stream y'(m) is brought out on mid/mid_valid.
//
// Interface: one vector of 80 samples (lane 0 oldest) per clock with in_valid;
// out_valid marks each output sample.
module psrc_top
  import src_pkg::*;
#(
  parameter int L = LANES
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_load,
  input  logic [11:0]                cfg_rate,
  input  logic [1:0]                 cfg_hb_used,
  input  logic                       in_valid,
  input  logic signed [SAMPLE_W-1:0] x [L],
  output logic                       mid_valid,
  output logic signed [SAMPLE_W-1:0] mid,
  output logic                       out_valid,
  output logic signed [SAMPLE_W-1:0] y
);

  localparam int RW = $clog2(SCIC_R_MAX + 1);

  logic [RW-1:0] rate_q;
  logic [1:0]    hb_q;
  logic          clear_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rate_q  <= RW'(1);
      hb_q    <= '0;
      clear_q <= 1'b0;
    end else begin
      clear_q <= cfg_load;
      if (cfg_load) begin
        rate_q <= (cfg_rate == '0) ? RW'(1)
                : (int'(cfg_rate) > SCIC_R_MAX) ? RW'(SCIC_R_MAX) : RW'(cfg_rate);
        hb_q   <= (int'(cfg_hb_used) > SHB_STAGES) ? 2'(SHB_STAGES) : cfg_hb_used;
      end
    end
  end

  par_src #(.L(L)) u_par (
    .clk, .rst_n, .in_valid, .x,
    .out_valid(mid_valid), .y(mid)
  );

  ser_src u_ser (
    .clk, .rst_n, .clear(clear_q),
    .rate(rate_q), .hb_used(hb_q),
    .in_valid(mid_valid && !clear_q), .x(mid),
    .out_valid, .y
  );

endmodule
