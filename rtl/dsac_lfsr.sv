// dsac_lfsr: 20-bit linear-feedback shift register, the uniform random source
// of the stochastic replacement.
//
// Fibonacci form of the maximal-length polynomial x^20 + x^17 + 1 (period
// 2^20 - 1); the polynomial is this design's choice. It advances one step per
// ACTIVE command (step), so every incoming row sees a fresh PRBS value, and is
// reloaded from the Seed Mixer once per refresh window (load, which has
// priority). A zero seed would lock the register, so it is replaced by 1.
// Reset loads 1. Output prbs is the register itself.
module dsac_lfsr #(
  parameter int unsigned W = dsac_pkg::PRBS_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  input  logic         load,
  input  logic [W-1:0] seed,
  output logic [W-1:0] prbs
);
  logic fb;
  assign fb = prbs[W-1] ^ prbs[16];   // taps 20 and 17

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      prbs <= W'(1);
    else if (load)   prbs <= (seed == '0) ? W'(1) : seed;
    else if (step)   prbs <= {prbs[W-2:0], fb};
  end
endmodule
