// tb_dsac_top: end-to-end test of the 8-bank DSAC design at its default
// parameters (4 count-table entries per bank, TRR threshold 9745) over one
// complete refresh window: 8192 refresh intervals of 255 activates each
// (2,088,960 activates per bank), a refresh command closing each interval and
// the end-of-window pulse that reseeds every bank's LFSR.
//
// Each bank receives its own double-sided, uniform-weight attack (aggressor
// rows base, base+2, base+4, ...):
//   bank 0 TRRespass 1 row     bank 4 random 4 rows
//   bank 1 TRRespass 2 rows    bank 5 random 100 rows
//   bank 2 TRRespass 4 rows    bank 6 random 255 rows
//   bank 3 TRRespass 20 rows   bank 7 TRRespass 8 rows at the bank edge (row 0)
// One activate in 256 keeps its row open for 100 oscillator ticks
// (tRAS > 2 x tRASmin) so Time-Weighted Counting adds weight.
//
// Checks: every TRR puts out RH-1, RH+1, RH-2, RH+2 of the RowHammer row it
// started with, RH is one of the bank's own aggressor rows, the edge flag is
// right, and a bank whose attack has no more rows than the table has entries
// never lets an aggressor reach RH_TH/2 = 10,000 activates without a TRR
// (Maximum Disturbance: activates of a row since its last TRR within the
// window). The Maximum Disturbance of every bank is printed. Each mechanism
// (hit, replacement, stochastic filtering, TRR, refresh without TRR, time
// weight, edge victim, reseed) is counted and must occur.
// Set +intervals=N on the command line to simulate only N intervals.
module tb_dsac_top;
  localparam int NB = 8, MAC = 255, WINDOW = 8192;
  logic clk = 0, rst_n = 0;
  logic [NB-1:0] act = '0, pre = '0, ref_cmd = '0;
  logic [NB-1:0][15:0] active_row = '0;
  logic all_cell_ref_done = 0, osc_tick = 1;
  logic [19:0] puf = 20'h3C5A9;
  logic [NB-1:0][15:0] victim, rh;
  logic [NB-1:0] victim_valid, victim_in_range, rh_valid, trr_flag, trr_start, hit, replaced, filtered, busy;
  logic [NB-1:0][13:0] min_cnt;
  int checks = 0, failures = 0;

  dsac_top dut (.*);
  always #5 clk = ~clk;

  int k_rows [NB] = '{1, 2, 4, 20, 4, 100, 255, 8};
  bit is_rand [NB] = '{0, 0, 0, 0, 1, 1, 1, 0};
  int base [NB] = '{1000, 2000, 3000, 4000, 5000, 6000, 10000, 0};
  int acc [NB][int];
  int maxd [NB];
  int n_hit = 0, n_rep = 0, n_filt = 0, n_trr = 0, n_skip = 0, n_w = 0, n_edge = 0, n_seed = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // Victim stream monitor, one per bank.
  for (genvar b = 0; b < NB; b++) begin : g_mon
    initial begin
      forever begin
        @(negedge clk); #1;
        if (rst_n && trr_start[b]) begin
          logic [15:0] r;
          r = rh[b];
          n_trr++;
          chk(int'(r) >= base[b] && int'(r) < base[b] + 2 * k_rows[b] && (int'(r) - base[b]) % 2 == 0,
              $sformatf("bank %0d RH %0d is not an aggressor", b, r));
          acc[b][int'(r)] = 0;
          for (int dx = 1; dx <= 2; dx++)
            for (int pm = 0; pm < 2; pm++) begin
              int e;
              @(negedge clk); #1;
              e = pm ? int'(r) + dx : int'(r) - dx;
              chk(victim_valid[b] && victim[b] == 16'(e) && victim_in_range[b] == (e >= 0),
                  $sformatf("bank %0d victim %0d exp %0d", b, victim[b], e));
              if (e < 0) n_edge++;
            end
        end
      end
    end
  end

  task automatic window_end();
    all_cell_ref_done = 1; @(negedge clk); all_cell_ref_done = 0; n_seed++;
    for (int b = 0; b < NB; b++) acc[b].delete();
  endtask

  initial begin
    int intervals, slot;
    int rr [NB];
    if (!$value$plusargs("intervals=%d", intervals)) intervals = WINDOW;
    for (int b = 0; b < NB; b++) begin maxd[b] = 0; rr[b] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < intervals; t++) begin
      for (slot = 0; slot < MAC; slot++) begin
        bit long_ras;
        long_ras = (((t * MAC + slot) % 256) == 17);
        for (int b = 0; b < NB; b++) begin
          int i, r;
          if (is_rand[b]) i = $urandom_range(0, k_rows[b] - 1);
          else begin i = rr[b]; rr[b] = (rr[b] + 1) % k_rows[b]; end
          r = base[b] + 2 * i;
          active_row[b] = 16'(r);
          acc[b][r] = acc[b].exists(r) ? acc[b][r] + 1 : 1;
          if (acc[b][r] > maxd[b]) maxd[b] = acc[b][r];
        end
        act = '1;
        @(negedge clk); act = '0;
        @(negedge clk); @(negedge clk);
        for (int b = 0; b < NB; b++) begin
          if (hit[b]) n_hit++;
          if (replaced[b]) n_rep++;
          if (filtered[b]) n_filt++;
        end
        if (long_ras) begin repeat (100) @(negedge clk); n_w++; end
        else @(negedge clk);
        pre = '1;
        @(negedge clk); pre = '0;
        @(negedge clk); @(negedge clk);
      end
      for (int b = 0; b < NB; b++) if (!(trr_flag[b] && rh_valid[b])) n_skip++;
      ref_cmd = '1;
      @(negedge clk); ref_cmd = '0;
      repeat (7) @(negedge clk);
      chk(busy == '0, "all banks idle after refresh");
    end
    window_end();
    for (int b = 0; b < NB; b++) begin
      $display("bank %0d %s %0d rows: Maximum Disturbance %0d", b, is_rand[b] ? "random" : "TRRespass", k_rows[b], maxd[b]);
      if (k_rows[b] <= 4 && intervals == WINDOW)
        chk(maxd[b] < 10000, $sformatf("bank %0d Maximum Disturbance %0d reaches RH_TH/2", b, maxd[b]));
    end
    $display("hits %0d replacements %0d filtered %0d TRRs %0d refresh-without-TRR %0d long-tRAS %0d edge-victims %0d reseeds %0d",
             n_hit, n_rep, n_filt, n_trr, n_skip, n_w, n_edge, n_seed);
    chk(n_hit > 0, "hit occurred");        chk(n_rep > 0, "replacement occurred");
    chk(n_filt > 0, "filtering occurred"); chk(n_trr > 0, "TRR occurred");
    chk(n_skip > 0, "refresh without TRR occurred"); chk(n_w > 0, "time weight occurred");
    chk(n_edge > 0, "edge victim occurred"); chk(n_seed > 0, "reseed occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
