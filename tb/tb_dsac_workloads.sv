// tb_dsac_workloads: the malicious workloads of the evaluation run on one
// bank's DSAC TRR module in the evaluated configuration of 20 count-table
// entries (all other parameters at their defaults, TRR threshold 9745).
//
// Two patterns, both double-sided with uniform weight (aggressor rows base,
// base+2, base+4, ...; 255 activates per refresh interval shared equally):
//   TRRespass - the k aggressor rows in round-robin order
//   Random    - each activate picks one of the k rows at random
// for k = 1, 10, 20, 21, 100 and 255 rows. Each run resets the module and
// simulates one full refresh window of 8192 refresh intervals
// (+intervals=N overrides).
// Maximum Disturbance is the largest number of activates any aggressor row
// collects between two TRRs of that row within the run. It is printed for
// every run. Checks: while the attack has no more rows than the table has
// entries (k <= 20), no aggressor may reach RH_TH/2 = 10,000 activates;
// every TRR's victim rows are RH-1, RH+1, RH-2, RH+2 of an aggressor row;
// and runs with k > 20 must show stochastic filtering.
// The patterns, the 20 entries and the window length follow the published
// attack study; the row numbering, the 6-cycle command spacing and the row
// counts sampled are this bench's choices.
module tb_dsac_workloads;
  localparam int N = 20, MAC = 255, NK = 6;
  logic clk = 0, rst_n = 0;
  logic act = 0, pre = 0, ref_cmd = 0, all_cell_ref_done = 0, osc_tick = 1;
  logic [15:0] active_row = '0, victim, rh;
  logic [19:0] puf = 20'h2B7D1;
  logic victim_valid, victim_in_range, rh_valid, trr_flag, trr_start, hit, replaced, filtered, busy;
  logic [13:0] min_cnt;
  int checks = 0, failures = 0;
  int ks [NK] = '{1, 10, 20, 21, 100, 255};
  int acc [int];
  int maxd, n_trr, n_filt, k_cur, base;
  bit running = 0;

  dsac_trr_module #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // TRR monitor: aggressor and victim stream.
  initial begin
    forever begin
      @(negedge clk); #1;
      if (running && trr_start) begin
        logic [15:0] r;
        r = rh;
        n_trr++;
        chk(int'(r) >= base && int'(r) < base + 2 * k_cur && (int'(r) - base) % 2 == 0, "RH is an aggressor row");
        acc[int'(r)] = 0;
        for (int dx = 1; dx <= 2; dx++)
          for (int pm = 0; pm < 2; pm++) begin
            @(negedge clk); #1;
            chk(victim_valid && victim == (pm ? r + 16'(dx) : r - 16'(dx)), "victim row");
          end
      end
    end
  end

  task automatic run(input bit rnd, input int k, input int intervals);
    int rr = 0;
    rst_n = 0; running = 0; acc.delete(); maxd = 0; n_trr = 0; n_filt = 0; k_cur = k; base = 20000;
    repeat (2) @(negedge clk);
    rst_n = 1; running = 1;
    @(negedge clk);
    for (int t = 0; t < intervals; t++) begin
      for (int s = 0; s < MAC; s++) begin
        int i, r;
        if (rnd) i = $urandom_range(0, k - 1);
        else begin i = rr; rr = (rr + 1) % k; end
        r = base + 2 * i;
        active_row = 16'(r);
        acc[r] = acc.exists(r) ? acc[r] + 1 : 1;
        if (acc[r] > maxd) maxd = acc[r];
        act = 1; @(negedge clk); act = 0;
        @(negedge clk); @(negedge clk);
        if (filtered) n_filt++;
        pre = 1; @(negedge clk); pre = 0;
        @(negedge clk); @(negedge clk);
      end
      ref_cmd = 1; @(negedge clk); ref_cmd = 0;
      repeat (7) @(negedge clk);
    end
    running = 0;
    $display("%-9s %3d rows: Maximum Disturbance %6d  TRRs %5d  filtered %7d",
             rnd ? "Random" : "TRRespass", k, maxd, n_trr, n_filt);
    if (k <= N) chk(maxd < 10000, $sformatf("%0d rows: Maximum Disturbance %0d reaches RH_TH/2", k, maxd));
    else chk(n_filt > 0, "stochastic filtering with more rows than entries");
    if (intervals >= 1024) chk(n_trr > 0, "TRR performed");
  endtask

  initial begin
    int intervals;
    if (!$value$plusargs("intervals=%d", intervals)) intervals = 8192;
    for (int p = 0; p < 2; p++)
      for (int j = 0; j < NK; j++) run(p == 1, ks[j], intervals);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // Watchdog: 12 runs of 8192 intervals take about 151M clock cycles.
  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
