// tb_dsac_lfsr: self-checking test of the 20-bit LFSR.
// Compares every step with a testbench model of x^20 + x^17 + 1, checks that
// it holds without step, that a seed loads (zero becomes 1), and that the
// sequence returns to its start after exactly 2^20 - 1 steps and not before
// (maximal length).
module tb_dsac_lfsr;
  logic clk = 0, rst_n = 0, step, load;
  logic [19:0] seed, prbs, m;
  int checks = 0, failures = 0;

  dsac_lfsr dut (.*);
  always #5 clk = ~clk;

  function automatic logic [19:0] nxt(logic [19:0] s);
    return {s[18:0], s[19] ^ s[16]};
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s prbs=%h exp=%h", what, prbs, m); end
  endtask

  initial begin
    int period, early;
    step = 0; load = 0; seed = '0; m = 20'd1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); chk(prbs == 20'd1, "reset");
    for (int i = 0; i < 2000; i++) begin
      step = 1'($urandom); load = ($urandom_range(0, 99) == 0);
      seed = (i % 3 == 0) ? 20'd0 : 20'($urandom);
      @(posedge clk);
      if (load) m = (seed == 0) ? 20'd1 : seed;
      else if (step) m = nxt(m);
      @(negedge clk);
      chk(prbs == m, "step");
    end
    // Period.
    @(negedge clk); load = 1; seed = 20'h12345; step = 0;
    @(negedge clk); load = 0; step = 1;
    chk(prbs == 20'h12345, "seed load");
    period = 0; early = 0;
    do begin
      @(negedge clk); period++;
      if (prbs == 20'h12345 && period < 1048575) early = 1;
      if (prbs == 20'd0) early = 1;
    end while (period < 1048575);
    chk(prbs == 20'h12345 && !early, "maximal period 2^20-1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #12000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
