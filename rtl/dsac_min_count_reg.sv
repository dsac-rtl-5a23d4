// dsac_min_count_reg: Min. Count Register. During the minimum search
// (MAX_OR_MIN low) it captures the smallest count of the table, found by the
// tournament, and holds it as MIN_CNT for the Probability LUT while the
// table is updated and the maximum search runs.
//
// Loads when capture is high and max_or_min is low; holds otherwise. Reset
// value 0 (replacement probability 1). One register stage.
module dsac_min_count_reg #(
  parameter int unsigned CNT_W = dsac_pkg::CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             max_or_min,
  input  logic             capture,
  input  logic [CNT_W-1:0] min_in,
  output logic [CNT_W-1:0] min_cnt
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       min_cnt <= '0;
    else if (capture && !max_or_min)  min_cnt <= min_in;
  end
endmodule
