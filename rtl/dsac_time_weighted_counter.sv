// dsac_time_weighted_counter: Time-Weighted Counter for RowBleed.
//
// A row that stays open long leaks its neighbours (RowBleed), and the leak
// grows roughly with the logarithm of the open time. This block times tRAS of
// the bank's open row in oscillator ticks (osc_tick, one pulse per tick,
// synchronous to clk) from ACTIVE to PRECHARGE, and at the precharge outputs
//   COUNTER_WEIGHT = ALPHA * ceil(log2(tRAS / tRASmin))
// (0 when tRAS <= tRASmin), the logarithm rounded up to an integer. The weight
// is added to the row's count on top of the 1 counted for the ACTIVE. The
// rounded-up logarithm is the smallest w with tRAS <= tRASmin * 2^w.
// weight_valid pulses one cycle after pre, with counter_weight held until the
// next precharge; a precharge with no open row gives weight 0. The tick counter saturates. Tick length (1 ns, so
// TRAS_MIN_TICKS = 42 for tRASmin = 42 ns) and the precharge-time update are
// this design's choices.
module dsac_time_weighted_counter #(
  parameter int unsigned TICK_W         = 17,
  parameter int unsigned TRAS_MIN_TICKS = 42,
  parameter int unsigned ALPHA          = 1,
  parameter int unsigned WEIGHT_W       = 5
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                osc_tick,
  input  logic                act,
  input  logic                pre,
  output logic [WEIGHT_W-1:0] counter_weight,
  output logic                weight_valid
);
  logic [TICK_W-1:0]   ticks;
  logic                open_row;
  logic [WEIGHT_W-1:0] w;

  // ceil(log2(ticks / tRASmin)) by comparison with tRASmin * 2^k.
  always_comb begin
    w = '0;
    for (int k = 1; k <= int'(TICK_W); k++) begin
      if (64'(ticks) > (64'(TRAS_MIN_TICKS) << (k - 1))) w = WEIGHT_W'(k);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ticks          <= '0;
      open_row       <= 1'b0;
      counter_weight <= '0;
      weight_valid   <= 1'b0;
    end else begin
      weight_valid <= 1'b0;
      if (act) begin
        ticks    <= '0;
        open_row <= 1'b1;
      end else if (pre) begin
        open_row       <= 1'b0;
        counter_weight <= open_row ? WEIGHT_W'(ALPHA * w) : '0;
        weight_valid   <= open_row;
      end else if (open_row && osc_tick && (ticks != '1)) begin
        ticks <= ticks + 1'b1;
      end
    end
  end
endmodule
