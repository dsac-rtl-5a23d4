// dsac_tournament: the single-elimination tournament over the count table.
//
// The N counts are the leaves of a binary tree of dsac_match_node match-ups;
// the loser of each match-up drops out, and the final's winner is the minimum
// (max_or_min low) or maximum (max_or_min high) count. When N is not a power
// of two the tree is padded with dummy leaves that never win. The comparator
// outputs of all match-ups go to dsac_pointer_decoder, which gives the one-hot
// pointer pnt to the winning entry. Purely combinational; depth is
// ceil(log2 N) comparators. For N = 4 the match-ups are the paper's
// Comparator #0 and #1 (first round) and #2 (final).
module dsac_tournament #(
  parameter int unsigned N     = dsac_pkg::NUM_ENTRIES,
  parameter int unsigned CNT_W = dsac_pkg::CNT_W
) (
  input  logic                      max_or_min,
  input  logic [N-1:0][CNT_W-1:0]   cnt,
  output logic [CNT_W-1:0]          win_cnt,
  output logic [N-1:0]              pnt
);
  localparam int unsigned LEVELS = (N < 2) ? 1 : $clog2(N);
  localparam int unsigned P      = 1 << LEVELS;

  logic [CNT_W-1:0] ncnt  [1:2*P-1];
  logic             nlive [1:2*P-1];
  logic [P-1:0]     sel;
  logic [P-1:0]     pnt_full;

  for (genvar i = 0; i < P; i++) begin : g_leaf
    if (i < N) begin : g_real
      assign ncnt[P+i]  = cnt[i];
      assign nlive[P+i] = 1'b1;
    end else begin : g_pad
      assign ncnt[P+i]  = '0;
      assign nlive[P+i] = 1'b0;
    end
  end

  assign sel[0] = 1'b0;
  for (genvar k = 1; k < P; k++) begin : g_node
    dsac_match_node #(.CNT_W(CNT_W)) u_match (
      .max_or_min (max_or_min),
      .cnt_a      (ncnt[2*k]),
      .live_a     (nlive[2*k]),
      .cnt_b      (ncnt[2*k+1]),
      .live_b     (nlive[2*k+1]),
      .sel        (sel[k]),
      .cnt_win    (ncnt[k]),
      .live_win   (nlive[k])
    );
  end

  dsac_pointer_decoder #(.LEVELS(LEVELS)) u_dec (
    .sel (sel),
    .pnt (pnt_full)
  );

  assign win_cnt = ncnt[1];
  assign pnt     = pnt_full[N-1:0];
endmodule
