// dsac_top: chip-level DSAC, one TRR module per DRAM bank.
//
// Every bank has its own complete DSAC TRR module (count table, tournament,
// LFSR, Probability LUT, Time-Weighted Counter), as in the 8-bank area
// budget of the LPDDR4 implementation; banks are tracked independently
// because each bank's rows are activated and refreshed on their own. The PUF
// value and the end-of-refresh-window strobe are shared; each bank's PUF
// input is the chip PUF XORed with the bank number so the banks' random
// sequences differ (this design's choice). The oscillator that times tRAS is
// outside the digital logic; its tick comes in on osc_tick.
// Ports: per-bank command pulses and row address in, per-bank victim row
// stream and aggressor out. All synchronous to clk.
// rst_n is the asynchronous reset of every flop and also disables the
// controllers' protocol assertions, which lint reports as SYNCASYNCNET.
module dsac_top
#(
  parameter int unsigned NUM_BANKS = dsac_pkg::NUM_BANKS,
  parameter int unsigned N         = dsac_pkg::NUM_ENTRIES
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [NUM_BANKS-1:0]           act,
  input  logic [NUM_BANKS-1:0][dsac_pkg::ROW_W-1:0] active_row,
  input  logic [NUM_BANKS-1:0]           pre,
  input  logic [NUM_BANKS-1:0]           ref_cmd,
  input  logic                           all_cell_ref_done,
  input  logic [dsac_pkg::PRBS_W-1:0]              puf,
  input  logic                           osc_tick,
  output logic [NUM_BANKS-1:0][dsac_pkg::ROW_W-1:0] victim,
  output logic [NUM_BANKS-1:0]           victim_valid,
  output logic [NUM_BANKS-1:0]           victim_in_range,
  output logic [NUM_BANKS-1:0][dsac_pkg::ROW_W-1:0] rh,
  output logic [NUM_BANKS-1:0]           rh_valid,
  output logic [NUM_BANKS-1:0]           trr_flag,
  output logic [NUM_BANKS-1:0]           trr_start,
  output logic [NUM_BANKS-1:0]           hit,
  output logic [NUM_BANKS-1:0]           replaced,
  output logic [NUM_BANKS-1:0]           filtered,
  output logic [NUM_BANKS-1:0][dsac_pkg::CNT_W-1:0] min_cnt,
  output logic [NUM_BANKS-1:0]           busy
);
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    dsac_trr_module #(.N(N)) u_trr (
      .clk               (clk),
      .rst_n             (rst_n),
      .act               (act[b]),
      .active_row        (active_row[b]),
      .pre               (pre[b]),
      .ref_cmd           (ref_cmd[b]),
      .all_cell_ref_done (all_cell_ref_done),
      .puf               (puf ^ dsac_pkg::PRBS_W'(b)),
      .osc_tick          (osc_tick),
      .victim            (victim[b]),
      .victim_valid      (victim_valid[b]),
      .victim_in_range   (victim_in_range[b]),
      .rh                (rh[b]),
      .rh_valid          (rh_valid[b]),
      .trr_flag          (trr_flag[b]),
      .trr_start         (trr_start[b]),
      .hit               (hit[b]),
      .replaced          (replaced[b]),
      .filtered          (filtered[b]),
      .min_cnt           (min_cnt[b]),
      .busy              (busy[b])
    );
  end
endmodule
