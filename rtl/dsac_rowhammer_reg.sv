// dsac_rowhammer_reg: the RowHammer Register, which holds the current
// aggressor row RH (the count-table row with the largest count).
//
// It loads at the end of every maximum search (load high while MAX_OR_MIN is
// high). Besides the row it keeps the one-hot pointer of the entry it came from,
// so the controller can reset that entry's counter once the TRR is done, and a
// flag that the maximum count was non-zero: when every count is zero no TRR is
// issued. Keeping the pointer and the flag is this design's choice.
// One register stage, active-low async reset to "no aggressor".
module dsac_rowhammer_reg #(
  parameter int unsigned ROW_W = dsac_pkg::ROW_W,
  parameter int unsigned N     = dsac_pkg::NUM_ENTRIES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [ROW_W-1:0] row_in,
  input  logic [N-1:0]     pnt_in,
  input  logic             nonzero_in,
  output logic [ROW_W-1:0] rh,
  output logic [N-1:0]     rh_pnt,
  output logic             rh_valid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rh       <= '0;
      rh_pnt   <= '0;
      rh_valid <= 1'b0;
    end else if (load) begin
      rh       <= row_in;
      rh_pnt   <= pnt_in;
      rh_valid <= nonzero_in;
    end
  end
endmodule
