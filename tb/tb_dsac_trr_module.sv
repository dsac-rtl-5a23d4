// tb_dsac_trr_module: self-checking test of one bank's DSAC TRR module.
//
// A reference model of the DSAC table runs next to the module. The random
// outcome of each replacement is the one thing the model takes from the
// module (its `replaced`/`filtered` flags); everything else is predicted:
// which entry is hit, inserted or replaced, all counts, MIN_CNT, the time
// weight ceil(log2(tRAS/tRASmin)) added at precharge, TRR_FLAG against the
// threshold, the RowHammer row, the victim sequence RH-1, RH+1, RH-2, RH+2
// with its edge flags and cycle timing, and the counter reset after TRR.
// The randomness itself is checked statistically: over all replacement
// decisions the number of replacements must lie within 5 standard
// deviations of the sum of 1/(MIN_CNT+1). The seed path is exercised by
// end-of-window pulses. The TRR threshold is lowered to 60 so TRRs are
// frequent; tRASmin is 4 ticks so weights reach several units.
module tb_dsac_trr_module;
  localparam int N = 4, TH = 60, TMIN = 4;
  logic clk = 0, rst_n = 0;
  logic act = 0, pre = 0, ref_cmd = 0, all_cell_ref_done = 0, osc_tick = 1;
  logic [15:0] active_row = '0, victim, rh;
  logic [19:0] puf = 20'h5A5A5;
  logic victim_valid, victim_in_range, rh_valid, trr_flag, trr_start, hit, replaced, filtered, busy;
  logic [13:0] min_cnt;
  int checks = 0, failures = 0;
  int n_hit = 0, n_ins = 0, n_rep = 0, n_filt = 0, n_trr = 0, n_w = 0, n_edge = 0, n_seed = 0, n_skip = 0;
  real exp_rep = 0, var_rep = 0; int got_rep = 0;

  logic [15:0] m_row [N]; bit m_valid [N]; int m_cnt [N]; logic [15:0] m_last;
  // tRAS as the testbench sees it: oscillator ticks on the clock edges
  // strictly between the ACTIVE edge and the PRECHARGE edge.
  bit m_open = 0; int m_ticks = 0;
  always @(posedge clk) begin
    if (act) begin m_open <= 1; m_ticks <= 0; end
    else if (pre) m_open <= 0;
    else if (m_open && osc_tick) m_ticks <= m_ticks + 1;
  end

  dsac_trr_module #(.N(N), .TRR_TH(TH), .TRAS_MIN_TICKS(TMIN)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int m_sum();
    int s = 0;
    for (int i = 0; i < N; i++) s += m_cnt[i];
    return s;
  endfunction

  task automatic compare(input string what);
    for (int i = 0; i < N; i++)
      chk(dut.valids[i] == m_valid[i] && dut.cnts[i] == 14'(m_cnt[i]) && (!m_valid[i] || dut.rows[i] == m_row[i]),
          $sformatf("%s entry %0d: row %h/%h cnt %0d/%0d", what, i, dut.rows[i], m_row[i], dut.cnts[i], m_cnt[i]));
  endtask

  task automatic do_act(input logic [15:0] r);
    int hi = -1, mi = 0, mn;
    for (int i = 0; i < N; i++) if (m_valid[i] && m_row[i] == r) hi = i;
    for (int i = 1; i < N; i++) if (m_cnt[i] < m_cnt[mi]) mi = i;
    mn = m_cnt[mi];
    @(negedge clk); act = 1; active_row = r;
    @(negedge clk); act = 0;
    chk(busy, "busy after ACTIVE");
    @(negedge clk); @(negedge clk);
    chk(!busy, "ACTIVE takes 3 cycles");
    chk(min_cnt == 14'(mn), $sformatf("MIN_CNT %0d/%0d", min_cnt, mn));
    chk(hit == (hi >= 0), "hit flag");
    if (hi >= 0) begin m_cnt[hi]++; n_hit++; chk(!replaced && !filtered, "hit not replaced"); end
    else begin
      chk(replaced != filtered, "miss is replaced xor filtered");
      if (mn == 0) chk(replaced, "P(r) = 1 at minimum count 0");
      if (m_valid[mi]) begin
        exp_rep += 1.0 / (mn + 1); var_rep += (1.0 / (mn + 1)) * (1.0 - 1.0 / (mn + 1));
        if (replaced) got_rep++;
      end
      if (replaced) begin
        if (m_valid[mi]) n_rep++; else n_ins++;
        m_row[mi] = r; m_valid[mi] = 1; m_cnt[mi]++;
      end else n_filt++;
    end
    m_last = r;
    compare("act");
  endtask

  task automatic do_pre(input int ticks);
    int w = 0;
    bit was_open;
    for (int i = 0; i < ticks; i++) @(negedge clk);
    @(negedge clk); pre = 1;
    was_open = m_open;
    while (was_open && longint'(m_ticks) > longint'(TMIN) * (longint'(1) << w)) w++;
    @(negedge clk); pre = 0;
    @(negedge clk); @(negedge clk);
    chk(!busy, "PRECHARGE takes 3 cycles");
    for (int i = 0; i < N; i++) if (m_valid[i] && m_row[i] == m_last) begin m_cnt[i] += w; if (w > 0) n_w++; end
    compare("pre");
  endtask

  task automatic do_ref();
    int mx = -1, mi = 0;
    bit flag;
    for (int i = 0; i < N; i++) if (m_cnt[i] >= mx) begin mx = m_cnt[i]; mi = i; end
    flag = (m_sum() >= TH);
    @(negedge clk);
    chk(trr_flag == flag, $sformatf("TRR_FLAG %b sum %0d", trr_flag, m_sum()));
    chk(rh_valid == (mx > 0) && (mx == 0 || rh == m_row[mi]), $sformatf("RH %h/%h", rh, m_row[mi]));
    ref_cmd = 1;
    @(negedge clk); ref_cmd = 0;
    if (flag && mx > 0) begin
      n_trr++;
      for (int dx = 1; dx <= 2; dx++)
        for (int pm = 0; pm < 2; pm++) begin
          int e;
          e = pm ? int'(m_row[mi]) + dx : int'(m_row[mi]) - dx;
          chk(victim_valid && victim == 16'(e) && victim_in_range == (e >= 0 && e <= 65535),
              $sformatf("victim %h valid %b exp %h", victim, victim_valid, 16'(e)));
          if (!(e >= 0 && e <= 65535)) n_edge++;
          @(negedge clk);
        end
      chk(!victim_valid, "victim stream is 4 rows");
      @(negedge clk); @(negedge clk);
      chk(!busy, "TRR sequence length");
      m_cnt[mi] = 0;
    end else begin
      n_skip++;
      chk(!victim_valid && !busy, "no TRR");
    end
    compare("ref");
  endtask

  initial begin
    logic [15:0] pool [10];
    pool = '{16'h0000, 16'h0001, 16'hFFFF, 16'h1234, 16'h1235, 16'h4000, 16'h8000, 16'h0101, 16'hFFFE, 16'h7777};
    for (int i = 0; i < N; i++) begin m_row[i] = '0; m_valid[i] = 0; m_cnt[i] = 0; end
    m_last = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      int k;
      k = $urandom_range(0, 99);
      if (k < 30) do_act(pool[$urandom_range(0, 9)]);
      else if (k < 45) do_act(16'($urandom));
      else if (k < 80) do_pre($urandom_range(0, 40));
      else if (k < 97) do_ref();
      else begin
        @(negedge clk); all_cell_ref_done = 1; @(negedge clk); all_cell_ref_done = 0; n_seed++;
      end
    end
    chk(real'(got_rep) > exp_rep - 5.0 * $sqrt(var_rep) && real'(got_rep) < exp_rep + 5.0 * $sqrt(var_rep),
        $sformatf("replacement count %0d, expected %f +- %f", got_rep, exp_rep, $sqrt(var_rep)));
    $display("replacements %0d, expected %f (sd %f)", got_rep, exp_rep, $sqrt(var_rep));
    $display("hits %0d insertions %0d replacements %0d filtered %0d TRRs %0d refresh-without-TRR %0d weights %0d edge-victims %0d reseeds %0d",
             n_hit, n_ins, n_rep, n_filt, n_trr, n_skip, n_w, n_edge, n_seed);
    chk(n_hit > 0 && n_ins > 0 && n_rep > 0 && n_filt > 0 && n_trr > 0 && n_skip > 0 && n_w > 0 && n_edge > 0 && n_seed > 0,
        "every mechanism occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
