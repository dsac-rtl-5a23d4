// tb_dsac_count_entry: self-checking test of one count-table entry.
// A reference model in the testbench tracks row, valid and count while
// random operations (load, increment by 1 or a weight, clear) are applied;
// it also drives the counter into saturation. Checks after every cycle.
module tb_dsac_count_entry;
  localparam int ROW_W = 16, CNT_W = 14;
  logic clk = 0, rst_n = 0;
  logic load_row, inc, clr_cnt;
  logic [ROW_W-1:0] new_row, row;
  logic [CNT_W-1:0] inc_val, cnt;
  logic valid;
  int checks = 0, failures = 0;
  logic [ROW_W-1:0] m_row; logic m_valid; int m_cnt;

  dsac_count_entry dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s: row=%h/%h valid=%b/%b cnt=%0d/%0d", what, row, m_row, valid, m_valid, cnt, m_cnt); end
  endtask

  initial begin
    load_row = 0; inc = 0; clr_cnt = 0; new_row = '0; inc_val = '0;
    m_row = '0; m_valid = 0; m_cnt = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(valid == 0 && cnt == 0, "reset");
    for (int i = 0; i < 3000; i++) begin
      load_row = ($urandom_range(0, 9) == 0);
      inc      = ($urandom_range(0, 3) != 0);
      clr_cnt  = ($urandom_range(0, 40) == 0);
      new_row  = ROW_W'($urandom);
      inc_val  = (i > 2000) ? CNT_W'($urandom_range(1, 4000)) : CNT_W'($urandom_range(1, 3));
      @(posedge clk);
      if (load_row) begin m_row = new_row; m_valid = 1; end
      if (clr_cnt) m_cnt = 0;
      else if (inc) m_cnt = (m_cnt + inc_val > 16383) ? 16383 : m_cnt + inc_val;
      @(negedge clk);
      chk(row == m_row && valid == m_valid && cnt == CNT_W'(m_cnt), "op");
    end
    // Replacement keeps the old count: load a new row and increment together.
    clr_cnt = 0; load_row = 0; inc = 1; inc_val = 1;
    @(posedge clk); clr_cnt = 1; inc = 0; @(posedge clk); clr_cnt = 0; inc = 1;
    repeat (2) @(posedge clk);
    load_row = 1; new_row = 16'hBEEF; @(posedge clk); load_row = 0; inc = 0;
    @(negedge clk);
    chk(row == 16'hBEEF && cnt == 3, "replacement count(y)+1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
