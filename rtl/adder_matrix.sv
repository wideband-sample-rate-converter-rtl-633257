// adder_matrix: lane integral of one clock's L samples,
//   lane_sum[l] = x[0] + x[1] + ... + x[l].
//
// Built as the recursive halving adder matrix: the lanes are padded to the next
// power of two P, and in row r (block size 2^(r+1)) the last lane of the lower
// half of every block is added to each lane of the upper half of that block.
// After log2(P) rows every lane holds its prefix sum. Padded lanes are fed with
// zero and dropped at the output; the kept lanes never depend on them. This is
// the structure of the paper's 8-lane example generalised to any L; the padding
// for non-power-of-two L follows the paper too.
//
// Interface: combinational, W-bit two's-complement lanes, modulo 2^W.
// Depth: ceil(log2 L) adders. Registers are left to the user (par_integrator).
module adder_matrix #(
  parameter int L = 80,
  parameter int W = 38
) (
  input  logic signed [W-1:0] x        [L],
  output logic signed [W-1:0] lane_sum [L]
);

  localparam int ROWS = (L > 1) ? $clog2(L) : 0;
  localparam int P    = 1 << ROWS;

  // g_row[r].v holds the lanes after row r; each row has its own array so
  // that no signal feeds itself.
  logic signed [W-1:0] padded [P];

  for (genvar l = 0; l < P; l++) begin : g_in
    if (l < L) begin : g_lane
      assign padded[l] = x[l];
    end else begin : g_pad
      assign padded[l] = '0;
    end
  end

  for (genvar r = 0; r <= ROWS; r++) begin : g_row
    logic signed [W-1:0] v [P];
    if (r == 0) begin : g_first
      assign v = padded;
    end else begin : g_next
      for (genvar l = 0; l < P; l++) begin : g_col
        // lane l is in the upper half of its block of 2^r lanes when bit r-1 is set
        if (((l >> (r - 1)) & 1) == 1) begin : g_add
          assign v[l] = g_row[r-1].v[l] + g_row[r-1].v[((l >> (r - 1)) << (r - 1)) - 1];
        end else begin : g_pass
          assign v[l] = g_row[r-1].v[l];
        end
      end
    end
  end

  for (genvar l = 0; l < L; l++) begin : g_out
    assign lane_sum[l] = g_row[ROWS].v[l];
  end

endmodule
