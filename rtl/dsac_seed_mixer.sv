// dsac_seed_mixer: Seed Mixer for the DSAC random source.
//
// Once per refresh window (all_cell_ref_done, one-cycle pulse) it forms a new
// 20-bit seed from the chip-unique PUF value, its previous seed and the current
// LFSR state, and strobes seed_load one cycle later so the LFSR restarts from
// it. The sequence is thus unique per chip and changes every window, which
// keeps an attacker from predicting it. The mixing function
// seed' = rotl(seed, 7) ^ puf ^ prbs is this design's choice; the reset seed is
// the PUF value itself.
module dsac_seed_mixer #(
  parameter int unsigned W = dsac_pkg::PRBS_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] puf,
  input  logic [W-1:0] prbs,
  input  logic         all_cell_ref_done,
  output logic [W-1:0] seed,
  output logic         seed_load
);
  logic [W-1:0] rot;
  assign rot = {seed[W-8:0], seed[W-1:W-7]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      seed      <= puf;
      seed_load <= 1'b0;
    end else begin
      seed_load <= all_cell_ref_done;
      if (all_cell_ref_done) seed <= rot ^ puf ^ prbs;
    end
  end
endmodule
