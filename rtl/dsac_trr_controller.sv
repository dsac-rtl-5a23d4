// dsac_trr_controller: TRR Module Controller of one bank.
//
// It holds the two schedulers of the DSAC TRR module and the adaptive TRR
// threshold:
//  * Max. or Min. Scheduler (MAX_OR_MIN). An ACTIVE arrives with MAX_OR_MIN
//    low: in that cycle the row detector searches the minimum-count entry,
//    checks for a hit and the Min. Count Register captures the minimum. Next
//    cycle (ST_UPD) the table is updated (hit increment, or insertion /
//    stochastic replacement) and MAX_OR_MIN goes high; the cycle after
//    (ST_MAXS) the maximum search loads the RowHammer register. A PRECHARGE
//    adds the Time-Weighted Counting weight (ST_WADD) and re-runs the maximum
//    search.
//  * TRR_FLAG is high while the sum of all counts is at least TRR_TH
//    (RH_TH/2 - MAC_tREFI). A refresh command seen with TRR_FLAG high and a
//    non-zero aggressor starts a TRR.
//  * Plus or Minus Scheduler (PLUS_OR_MINUS, x). During a TRR x runs 1 ..
//    BLAST_RADIUS; for each x PLUS_OR_MINUS is low (victim RH-x) then high
//    (RH+x), one victim per cycle with victim_valid. Then the aggressor's
//    counter is reset (ST_CLR) and a new maximum search follows.
// Timing: ACTIVE busy 3 cycles, PRECHARGE 3, TRR 2*BLAST_RADIUS + 2. DRAM
// timing (tRAS, tRP, tRFC of tens of ns) keeps commands to one bank further
// apart; a command that arrives while busy is dropped and flagged by an
// assertion. The cycle split and the radius default of 2 (Extended
// RowHammer reaches rows +/-2) are this design's choices.
// The protocol assertions are disabled while rst_n is low; lint therefore
// sees rst_n used both as the flops' asynchronous reset and as a sampled
// signal (SYNCASYNCNET). That is intended and adds no logic.
module dsac_trr_controller
#(
  parameter int unsigned CNT_SUM_W    = 16,
  parameter int unsigned TRR_TH       = dsac_pkg::TRR_TH,
  parameter int unsigned BLAST_RADIUS = 2,
  parameter int unsigned X_W          = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 act,
  input  logic                 pre,
  input  logic                 ref_cmd,
  input  logic [CNT_SUM_W-1:0] cnt_sum,
  input  logic                 rh_valid,
  output logic                 max_or_min,
  output logic                 cap,
  output logic                 upd,
  output logic                 wadd,
  output logic                 rh_load,
  output logic                 plus_or_minus,
  output logic [X_W-1:0]       x,
  output logic                 victim_valid,
  output logic                 trr_clr,
  output logic                 trr_flag,
  output logic                 trr_start,
  output logic                 busy
);
  dsac_pkg::ctrl_state_e state;

  assign trr_flag   = (32'(cnt_sum) >= TRR_TH);
  assign busy       = (state != dsac_pkg::ST_IDLE);
  assign cap        = (state == dsac_pkg::ST_IDLE) && act;
  assign trr_start  = (state == dsac_pkg::ST_IDLE) && !act && !pre && ref_cmd && trr_flag && rh_valid;
  assign max_or_min = (state == dsac_pkg::ST_UPD) || (state == dsac_pkg::ST_MAXS) || (state == dsac_pkg::ST_WADD);
  assign upd        = (state == dsac_pkg::ST_UPD);
  assign wadd       = (state == dsac_pkg::ST_WADD);
  assign rh_load    = (state == dsac_pkg::ST_MAXS);
  assign victim_valid = (state == dsac_pkg::ST_VICT);
  assign trr_clr    = (state == dsac_pkg::ST_CLR);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= dsac_pkg::ST_IDLE;
      plus_or_minus <= 1'b0;
      x             <= X_W'(1);
    end else begin
      unique case (state)
        dsac_pkg::ST_IDLE: begin
          if (act)            state <= dsac_pkg::ST_UPD;
          else if (pre)       state <= dsac_pkg::ST_WADD;
          else if (trr_start) begin
            state         <= dsac_pkg::ST_VICT;
            plus_or_minus <= 1'b0;
            x             <= X_W'(1);
          end
        end
        dsac_pkg::ST_UPD:  state <= dsac_pkg::ST_MAXS;
        dsac_pkg::ST_WADD: state <= dsac_pkg::ST_MAXS;
        dsac_pkg::ST_MAXS: state <= dsac_pkg::ST_IDLE;
        dsac_pkg::ST_VICT: begin
          if (!plus_or_minus) begin
            plus_or_minus <= 1'b1;
          end else if (32'(x) < BLAST_RADIUS) begin
            plus_or_minus <= 1'b0;
            x             <= x + 1'b1;
          end else begin
            state <= dsac_pkg::ST_CLR;
          end
        end
        dsac_pkg::ST_CLR:  state <= dsac_pkg::ST_MAXS;
        default: state <= dsac_pkg::ST_IDLE;
      endcase
    end
  end

  // One command at a time: a bank never receives ACTIVE, PRECHARGE or
  // REFRESH while a previous command's sequence is still running.
  a_cmd_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (act || pre || ref_cmd) |-> (state == dsac_pkg::ST_IDLE))
    else $error("DSAC command while the TRR module is busy");
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({act, pre, ref_cmd}))
    else $error("DSAC: more than one command in a cycle");
endmodule
