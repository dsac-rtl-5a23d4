// dsac_trr_module: the DSAC TRR module of one DRAM bank, RowHammer and
// RowBleed tracking with stochastic replacement and time-weighted counting.
//
// It ties together the TRR Module Controller (schedulers and TRR threshold),
// the TRR Row Detector (count table, tournament, RowHammer register, victim
// row calculator), the Min. Count Register, the Probability LUT, the 20-bit
// LFSR with its Seed Mixer, and the Time-Weighted Counter.
//
// Per ACTIVE (3 cycles): the row is compared with the table; on a hit its
// count goes up by 1; on a miss it replaces the minimum-count entry y with
// probability 1/(count(y)+1) and inherits count(y)+1, else it is dropped.
// The LFSR steps once per ACTIVE. Per PRECHARGE (3 cycles): the open time of
// the row adds alpha*ceil(log2(tRAS/tRASmin)) to its count. Per REFRESH: if
// the sum of counts is at least TRR_TH and some count is non-zero, the rows
// RH-1, RH+1, ..., RH-R, RH+R around the largest-count row RH are put out on
// victim with victim_valid (one per cycle, 2R cycles), and RH's counter is
// cleared. The refresh itself is carried out by the DRAM, outside this RTL.
// Once per refresh window (all_cell_ref_done) the LFSR is reseeded from the
// PUF through the Seed Mixer.
// Commands are one-cycle pulses on clk; osc_tick is the oscillator tick used
// to time tRAS.
// Some sub-block outputs stay unconnected here and show up as unused in
// lint: the LUT threshold (only its compare is used), the Time-Weighted
// Counter's weight_valid (the controller sequences the weight add itself) and
// the detector's table contents (rows, cnts, valids), which exist for
// observation in simulation. The reset/assertion note of the controller
// (SYNCASYNCNET) applies to this module and to dsac_top as well.
module dsac_trr_module
#(
  parameter int unsigned N              = dsac_pkg::NUM_ENTRIES,
  parameter int unsigned ROW_W          = dsac_pkg::ROW_W,
  parameter int unsigned CNT_W          = dsac_pkg::CNT_W,
  parameter int unsigned PRBS_W         = dsac_pkg::PRBS_W,
  parameter int unsigned TRR_TH         = dsac_pkg::TRR_TH,
  parameter int unsigned BLAST_RADIUS   = 2,
  parameter int unsigned TRAS_MIN_TICKS = 42,
  parameter int unsigned ALPHA          = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              act,
  input  logic [ROW_W-1:0]  active_row,
  input  logic              pre,
  input  logic              ref_cmd,
  input  logic              all_cell_ref_done,
  input  logic [PRBS_W-1:0] puf,
  input  logic              osc_tick,
  output logic [ROW_W-1:0]  victim,
  output logic              victim_valid,
  output logic              victim_in_range,
  output logic [ROW_W-1:0]  rh,
  output logic              rh_valid,
  output logic              trr_flag,
  output logic              trr_start,
  output logic              hit,
  output logic              replaced,
  output logic              filtered,
  output logic [CNT_W-1:0]  min_cnt,
  output logic              busy
);
  localparam int unsigned CNT_SUM_W = CNT_W + $clog2(N);
  localparam int unsigned X_W       = $clog2(BLAST_RADIUS + 1);
  localparam int unsigned WEIGHT_W  = 5;

  logic                 max_or_min, cap, upd, wadd, rh_load, trr_clr, plus_or_minus;
  logic [X_W-1:0]       x;
  logic [CNT_SUM_W-1:0] cnt_sum;
  logic [CNT_W-1:0]     win_cnt;
  logic [PRBS_W-1:0]    prbs, seed, threshold;
  logic                 seed_load, stochastic_replacement, weight_valid;
  logic [WEIGHT_W-1:0]  counter_weight;
  logic [N-1:0][ROW_W-1:0] rows;
  logic [N-1:0][CNT_W-1:0] cnts;
  logic [N-1:0]            valids;

  dsac_trr_controller #(
    .CNT_SUM_W(CNT_SUM_W), .TRR_TH(TRR_TH), .BLAST_RADIUS(BLAST_RADIUS), .X_W(X_W)
  ) u_ctrl (
    .clk, .rst_n, .act, .pre, .ref_cmd,
    .cnt_sum, .rh_valid,
    .max_or_min, .cap, .upd, .wadd, .rh_load,
    .plus_or_minus, .x, .victim_valid, .trr_clr, .trr_flag, .trr_start, .busy
  );

  dsac_trr_row_detector #(
    .N(N), .ROW_W(ROW_W), .CNT_W(CNT_W), .CNT_SUM_W(CNT_SUM_W), .X_W(X_W), .WEIGHT_W(WEIGHT_W)
  ) u_det (
    .clk, .rst_n, .max_or_min, .cap, .active_row, .upd, .stochastic_replacement,
    .wadd, .counter_weight, .rh_load, .trr_clr, .x, .plus_or_minus,
    .win_cnt, .cnt_sum, .rh, .rh_valid, .victim, .victim_in_range,
    .hit, .replaced, .rows, .cnts, .valids
  );

  dsac_min_count_reg #(.CNT_W(CNT_W)) u_minreg (
    .clk, .rst_n, .max_or_min, .capture(cap), .min_in(win_cnt), .min_cnt
  );

  dsac_prob_lut #(.CNT_W(CNT_W), .PRBS_W(PRBS_W)) u_lut (
    .min_cnt, .prbs, .stochastic_replacement, .threshold
  );

  dsac_seed_mixer #(.W(PRBS_W)) u_seed (
    .clk, .rst_n, .puf, .prbs, .all_cell_ref_done, .seed, .seed_load
  );

  dsac_lfsr #(.W(PRBS_W)) u_lfsr (
    .clk, .rst_n, .step(cap), .load(seed_load), .seed, .prbs
  );

  dsac_time_weighted_counter #(
    .TICK_W(17), .TRAS_MIN_TICKS(TRAS_MIN_TICKS), .ALPHA(ALPHA), .WEIGHT_W(WEIGHT_W)
  ) u_twc (
    .clk, .rst_n, .osc_tick, .act(cap), .pre(pre && !busy),
    .counter_weight, .weight_valid
  );

  // A miss that the stochastic replacement filtered out (registered at upd).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   filtered <= 1'b0;
    else if (upd) filtered <= !hit && stochastic_replacement;
  end
endmodule
