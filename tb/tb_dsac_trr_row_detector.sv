// tb_dsac_trr_row_detector: self-checking test of the TRR Row Detector with
// the 4-entry table. The testbench plays the controller (cap / upd / rh_load,
// wadd, trr_clr with x and PLUS_OR_MINUS) and decides the stochastic
// replacement itself, so that a plain reference model of the DSAC table can
// be kept alongside:
//   hit -> count+1; miss -> lowest-index minimum entry takes the row and
//   count+1 unless filtered; weight add to the last row if present; maximum
//   entry (highest index on a tie) -> RH; TRR -> victims RH-1, RH+1, RH-2,
//   RH+2, then RH's count cleared.
// After every operation the whole table, RH, the sum of counts and the
// hit/replaced flags are compared. Rows come from a small pool so hits,
// insertions, replacements, filtering and ties all occur; each is counted
// and must have happened.
module tb_dsac_trr_row_detector;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  logic max_or_min, cap, upd, stochastic_replacement, wadd, rh_load, trr_clr, plus_or_minus;
  logic [15:0] active_row, rh, victim;
  logic [4:0] counter_weight;
  logic [1:0] x;
  logic [13:0] win_cnt;
  logic [15:0] cnt_sum;
  logic rh_valid, victim_in_range, hit, replaced;
  logic [N-1:0][15:0] rows;
  logic [N-1:0][13:0] cnts;
  logic [N-1:0] valids;
  int checks = 0, failures = 0;
  int n_hit = 0, n_ins = 0, n_rep = 0, n_filt = 0, n_trr = 0, n_w = 0;

  // Reference model.
  logic [15:0] m_row [N]; bit m_valid [N]; int m_cnt [N];
  logic [15:0] m_last; logic [15:0] m_rh; int m_rhi; bit m_rhv; bit m_hit, m_rep;

  dsac_trr_row_detector #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic compare(input string what);
    int s = 0;
    for (int i = 0; i < N; i++) begin
      chk(valids[i] == m_valid[i] && cnts[i] == 14'(m_cnt[i]) && (!m_valid[i] || rows[i] == m_row[i]),
          $sformatf("%s entry %0d: row %h/%h v %b/%b cnt %0d/%0d", what, i, rows[i], m_row[i], valids[i], m_valid[i], cnts[i], m_cnt[i]));
      s += m_cnt[i];
    end
    chk(cnt_sum == 16'(s), $sformatf("%s sum %0d/%0d", what, cnt_sum, s));
    chk(rh_valid == m_rhv && (!m_rhv || rh == m_rh), $sformatf("%s rh %h/%h v %b/%b", what, rh, m_rh, rh_valid, m_rhv));
  endtask

  task automatic model_max();
    int mx = -1;
    for (int i = 0; i < N; i++) if (m_cnt[i] >= mx) begin mx = m_cnt[i]; m_rhi = i; end
    m_rh = m_row[m_rhi]; m_rhv = (mx > 0);
  endtask

  task automatic do_act(input logic [15:0] r, input bit sr);
    int hi = -1, mi = 0;
    @(negedge clk); cap = 1; max_or_min = 0; active_row = r;
    @(negedge clk); cap = 0; upd = 1; max_or_min = 1; stochastic_replacement = sr; active_row = '0;
    @(negedge clk); upd = 0; rh_load = 1;
    @(negedge clk); rh_load = 0; max_or_min = 0;
    for (int i = 0; i < N; i++) if (m_valid[i] && m_row[i] == r) hi = i;
    for (int i = 1; i < N; i++) if (m_cnt[i] < m_cnt[mi]) mi = i;
    m_hit = (hi >= 0); m_rep = 0;
    if (m_hit) begin m_cnt[hi]++; n_hit++; end
    else if (!sr) begin
      if (m_valid[mi]) n_rep++; else n_ins++;
      m_row[mi] = r; m_valid[mi] = 1; m_cnt[mi]++; m_rep = 1;
    end else n_filt++;
    m_last = r;
    model_max();
    chk(hit == m_hit && replaced == m_rep, $sformatf("act %h hit %b/%b rep %b/%b", r, hit, m_hit, replaced, m_rep));
    compare("act");
  endtask

  task automatic do_weight(input int w);
    @(negedge clk); wadd = 1; max_or_min = 1; counter_weight = 5'(w);
    @(negedge clk); wadd = 0; rh_load = 1;
    @(negedge clk); rh_load = 0; max_or_min = 0;
    for (int i = 0; i < N; i++) if (m_valid[i] && m_row[i] == m_last) begin m_cnt[i] += w; if (w > 0) n_w++; end
    model_max();
    compare("weight");
  endtask

  task automatic do_trr();
    if (!m_rhv) return;
    n_trr++;
    for (int dx = 1; dx <= 2; dx++)
      for (int pm = 0; pm < 2; pm++) begin
        @(negedge clk); x = 2'(dx); plus_or_minus = 1'(pm);
        #1;
        chk(victim == (pm ? m_rh + 16'(dx) : m_rh - 16'(dx)), $sformatf("victim %h rh %h x %0d pm %0d", victim, m_rh, dx, pm));
      end
    @(negedge clk); trr_clr = 1;
    @(negedge clk); trr_clr = 0; rh_load = 1; max_or_min = 1;
    @(negedge clk); rh_load = 0; max_or_min = 0;
    m_cnt[m_rhi] = 0;
    model_max();
    compare("trr");
  endtask

  initial begin
    max_or_min = 0; cap = 0; upd = 0; stochastic_replacement = 0; wadd = 0; rh_load = 0; trr_clr = 0;
    plus_or_minus = 0; active_row = '0; counter_weight = '0; x = '0;
    for (int i = 0; i < N; i++) begin m_row[i] = '0; m_valid[i] = 0; m_cnt[i] = 0; end
    m_rhv = 0; m_rh = '0; m_rhi = 0; m_last = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    compare("reset");
    // Fig. 14 start: a x4, b x2, then c filtered twice and accepted once.
    repeat (4) do_act(16'h000a, 0);
    repeat (2) do_act(16'h000b, 0);
    do_act(16'h000c, 0); do_act(16'h000d, 0);   // fill the 4-entry table
    do_act(16'h0011, 1); do_act(16'h0011, 1); do_act(16'h0011, 0);
    for (int i = 0; i < 3000; i++) begin
      int op;
      op = $urandom_range(0, 99);
      if (op < 85) do_act(16'($urandom_range(100, 108)), ($urandom_range(0, 2) == 0));
      else if (op < 95) do_weight($urandom_range(0, 4));
      else do_trr();
    end
    chk(n_hit > 0 && n_ins > 0 && n_rep > 0 && n_filt > 0 && n_trr > 0 && n_w > 0,
        $sformatf("coverage hit %0d ins %0d rep %0d filt %0d trr %0d weight %0d", n_hit, n_ins, n_rep, n_filt, n_trr, n_w));
    $display("hits %0d insertions %0d replacements %0d filtered %0d TRRs %0d weights %0d", n_hit, n_ins, n_rep, n_filt, n_trr, n_w);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
