// dsac_match_node: one match-up of the single-elimination tournament that
// finds the minimum or maximum count in the DSAC count table. It is the
// Comparator (one per match-up) together with its 2-to-1 Count MUX.
//
// With max_or_min low the smaller count wins; with it high the larger count
// wins. Ties go to the lower-index side (a) in a minimum search, so the low
// index entry is replaced first, and to the higher-index side (b) in a maximum
// search, so the most recently filled entry is picked (temporal locality).
// sel is the comparator output (MAX_OR_MIN#k): 1 when side b wins. The live
// flags let a table whose size is not a power of two be padded with dummy
// leaves that never win; this padding is this design's own addition.
// Purely combinational.
module dsac_match_node #(
  parameter int unsigned CNT_W = dsac_pkg::CNT_W
) (
  input  logic             max_or_min,
  input  logic [CNT_W-1:0] cnt_a,
  input  logic             live_a,
  input  logic [CNT_W-1:0] cnt_b,
  input  logic             live_b,
  output logic             sel,
  output logic [CNT_W-1:0] cnt_win,
  output logic             live_win
);
  always_comb begin
    if (!live_b)          sel = 1'b0;
    else if (!live_a)     sel = 1'b1;
    else if (max_or_min)  sel = (cnt_b >= cnt_a);
    else                  sel = (cnt_b <  cnt_a);
    cnt_win  = sel ? cnt_b : cnt_a;
    live_win = live_a | live_b;
  end
endmodule
