// dsac_trr_row_detector: TRR Row Detector of one bank. It keeps the DSAC
// count table and finds the aggressor row RH and its victim rows.
//
// Contents: N count-table entries (Row Register + Row Counter), a compare of
// the incoming row against every valid Row Register (hit), the tournament of
// comparators and count MUXes with its pointer decoder, the RowHammer
// Register, the Victim Row Calculator and the adder that sums all counts for
// the adaptive TRR threshold.
//
// Operation, driven by dsac_trr_controller:
//  cap   (MAX_OR_MIN low) latch ACTIVE_ROW, the hit vector and the pointer to
//        the minimum-count entry (lowest index on a tie).
//  upd   on a hit, add 1 to the hit entry. On a miss the new row goes into the
//        pointed entry and that count adds 1 (count(x) = count(y) + 1),
//        unless stochastic_replacement is high, in which case the row is
//        filtered out and nothing changes. An empty entry has count 0, so the
//        minimum search points at it and the replacement probability
//        1/(0+1) = 1 makes this an insertion.
//  wadd  add counter_weight to the entry that holds the last activated row,
//        if it is still in the table (Time-Weighted Counting).
//  rh_load (MAX_OR_MIN high) load the maximum-count entry (highest index on
//        a tie) into the RowHammer Register.
//  trr_clr reset the counter of the entry the RowHammer Register came from.
// The victim output is combinational from RH, x and plus_or_minus.
module dsac_trr_row_detector #(
  parameter int unsigned N         = dsac_pkg::NUM_ENTRIES,
  parameter int unsigned ROW_W     = dsac_pkg::ROW_W,
  parameter int unsigned CNT_W     = dsac_pkg::CNT_W,
  parameter int unsigned CNT_SUM_W = CNT_W + $clog2(N),
  parameter int unsigned X_W       = 2,
  parameter int unsigned WEIGHT_W  = 5
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 max_or_min,
  input  logic                 cap,
  input  logic [ROW_W-1:0]     active_row,
  input  logic                 upd,
  input  logic                 stochastic_replacement,
  input  logic                 wadd,
  input  logic [WEIGHT_W-1:0]  counter_weight,
  input  logic                 rh_load,
  input  logic                 trr_clr,
  input  logic [X_W-1:0]       x,
  input  logic                 plus_or_minus,
  output logic [CNT_W-1:0]     win_cnt,
  output logic [CNT_SUM_W-1:0] cnt_sum,
  output logic [ROW_W-1:0]     rh,
  output logic                 rh_valid,
  output logic [ROW_W-1:0]     victim,
  output logic                 victim_in_range,
  output logic                 hit,
  output logic                 replaced,
  output logic [N-1:0][ROW_W-1:0] rows,
  output logic [N-1:0][CNT_W-1:0] cnts,
  output logic [N-1:0]            valids
);
  logic [N-1:0]     pnt;          // PNT_REG from the decoder
  logic [N-1:0]     match;        // incoming/latched row equals Row Register
  logic [N-1:0]     hit_q;
  logic [N-1:0]     min_pnt_q;
  logic [N-1:0]     rh_pnt;
  logic [ROW_W-1:0] in_row_q;     // last ACTIVE_ROW
  logic [ROW_W-1:0] filtered_row; // FILTERED_ROW: row allowed into the table
  logic [ROW_W-1:0] max_row;
  logic [N-1:0]     load_row, inc, clr;
  logic [N-1:0][CNT_W-1:0] inc_val;

  // Hit compare. During cap the incoming row is compared, otherwise the
  // latched one (used by the time-weight add).
  always_comb begin
    for (int i = 0; i < N; i++)
      match[i] = valids[i] && (rows[i] == (cap ? active_row : in_row_q));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_row_q  <= '0;
      hit_q     <= '0;
      min_pnt_q <= '0;
      replaced  <= 1'b0;
    end else begin
      if (cap) begin
        in_row_q  <= active_row;
        hit_q     <= match;
        min_pnt_q <= pnt;
      end
      if (upd) replaced <= (hit_q == '0) && !stochastic_replacement;
    end
  end
  assign hit = |hit_q;
  assign filtered_row = in_row_q;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      load_row[i] = upd && (hit_q == '0) && !stochastic_replacement && min_pnt_q[i];
      clr[i]      = trr_clr && rh_pnt[i];
      if (wadd) begin
        inc[i]     = match[i] && (counter_weight != '0);
        inc_val[i] = CNT_W'(counter_weight);
      end else begin
        inc[i]     = upd && (hit_q[i] || load_row[i]);
        inc_val[i] = CNT_W'(1);
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_entry
    dsac_count_entry #(.ROW_W(ROW_W), .CNT_W(CNT_W)) u_entry (
      .clk      (clk),
      .rst_n    (rst_n),
      .load_row (load_row[i]),
      .new_row  (filtered_row),
      .inc      (inc[i]),
      .inc_val  (inc_val[i]),
      .clr_cnt  (clr[i]),
      .row      (rows[i]),
      .valid    (valids[i]),
      .cnt      (cnts[i])
    );
  end

  dsac_tournament #(.N(N), .CNT_W(CNT_W)) u_tour (
    .max_or_min (max_or_min),
    .cnt        (cnts),
    .win_cnt    (win_cnt),
    .pnt        (pnt)
  );

  always_comb begin
    max_row = '0;
    cnt_sum = '0;
    for (int i = 0; i < N; i++) begin
      if (pnt[i]) max_row = rows[i];
      cnt_sum = cnt_sum + CNT_SUM_W'(cnts[i]);
    end
  end

  dsac_rowhammer_reg #(.ROW_W(ROW_W), .N(N)) u_rh (
    .clk        (clk),
    .rst_n      (rst_n),
    .load       (rh_load && max_or_min),
    .row_in     (max_row),
    .pnt_in     (pnt),
    .nonzero_in (win_cnt != '0),
    .rh         (rh),
    .rh_pnt     (rh_pnt),
    .rh_valid   (rh_valid)
  );

  dsac_victim_row_calc #(.ROW_W(ROW_W), .X_W(X_W)) u_vic (
    .rh            (rh),
    .x             (x),
    .plus_or_minus (plus_or_minus),
    .victim        (victim),
    .in_range      (victim_in_range)
  );
endmodule
