// dsac_prob_lut: Probability LUT that turns the minimum count into the
// stochastic replacement decision.
//
// For every possible minimum count m the table holds a 20-bit threshold
// T(m) = floor(2^20 / (m + 1)) - 1. A new row may replace the minimum-count
// row only if PRBS <= T(m), which for a uniform 20-bit PRBS happens with
// probability about 1/(m+1); otherwise STOCHASTIC_REPLACEMENT goes high and
// the row is filtered out. m = 0 gives T = 2^20 - 1, i.e. replacement is
// certain (used for insertion into an empty entry and after a TRR).
// The table has 2^CNT_W entries, written as a ROM that is filled from that
// formula at start-up (a synthesis tool maps it to a ROM).
// Purely combinational: read, compare.
module dsac_prob_lut #(
  parameter int unsigned CNT_W  = dsac_pkg::CNT_W,
  parameter int unsigned PRBS_W = dsac_pkg::PRBS_W
) (
  input  logic [CNT_W-1:0]  min_cnt,
  input  logic [PRBS_W-1:0] prbs,
  output logic              stochastic_replacement,
  output logic [PRBS_W-1:0] threshold
);
  localparam int unsigned DEPTH = 1 << CNT_W;
  logic [PRBS_W-1:0] lut [DEPTH];

  // Read-only table, filled once at start-up from the formula above.
  initial begin
    for (int m = 0; m < int'(DEPTH); m++)
      lut[m] = PRBS_W'((64'd1 << PRBS_W) / (64'(m) + 64'd1) - 64'd1);
  end

  assign threshold              = lut[min_cnt];
  assign stochastic_replacement = (prbs > threshold);
endmodule
