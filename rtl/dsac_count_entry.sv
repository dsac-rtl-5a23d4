// dsac_count_entry: one entry of the DSAC count table, a Row Register paired
// with a Row Counter.
//
// The Row Register stores the row address of a tracked aggressor candidate
// and a valid bit (an empty entry is the "None" of the DSAC pseudocode). The
// Row Counter holds the approximate activation count of that row. Approximate
// counting means that when a new row replaces the stored one, the count is not
// cleared: the new row inherits the old count and adds one, exactly as the
// Space-Saving style update count(x) = count(y) + 1 requires.
//
// Interface (all actions on the rising clock edge, active-low async reset):
//   load_row  - store new_row, set valid (insertion or replacement)
//   inc       - add inc_val to the count (1 per ACTIVE, or the time weight)
//   clr_cnt   - clear the count after a TRR; the row stays stored
// clr_cnt has priority over inc. The counter saturates at its maximum: a
// choice of this design, the count never reaches it while TRR runs at the
// adaptive threshold.
module dsac_count_entry #(
  parameter int unsigned ROW_W = dsac_pkg::ROW_W,
  parameter int unsigned CNT_W = dsac_pkg::CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load_row,
  input  logic [ROW_W-1:0] new_row,
  input  logic             inc,
  input  logic [CNT_W-1:0] inc_val,
  input  logic             clr_cnt,
  output logic [ROW_W-1:0] row,
  output logic             valid,
  output logic [CNT_W-1:0] cnt
);
  logic [CNT_W:0] sum;
  assign sum = {1'b0, cnt} + {1'b0, inc_val};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row   <= '0;
      valid <= 1'b0;
    end else if (load_row) begin
      row   <= new_row;
      valid <= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        cnt <= '0;
    else if (clr_cnt)  cnt <= '0;
    else if (inc)      cnt <= sum[CNT_W] ? '1 : sum[CNT_W-1:0];
  end
endmodule
