// tb_dsac_time_weighted_counter: self-checking test of the Time-Weighted
// Counter. The row is held open for a chosen number of oscillator ticks and
// the weight at precharge is compared with ceil(log2(tRAS / tRASmin))
// computed here (0 when tRAS <= tRASmin), e.g. tRAS = 2 x tRASmin gives 1 as
// in the worked example, and the 70,200 ns maximum gives 11. Ticks arrive on
// random cycles to check that only ticks are counted.
module tb_dsac_time_weighted_counter;
  logic clk = 0, rst_n = 0, osc_tick, act, pre, weight_valid;
  logic [4:0] counter_weight;
  int checks = 0, failures = 0;

  dsac_time_weighted_counter dut (.*);
  always #5 clk = ~clk;

  function automatic int ref_w(int t);
    int w = 0;
    while (longint'(t) > longint'(42) * (longint'(1) << w)) w++;
    return w;
  endfunction

  task automatic open_for(int t);
    int n = 0;
    @(negedge clk); act = 1; @(negedge clk); act = 0;
    while (n < t) begin
      osc_tick = ($urandom_range(0, 2) != 0);
      if (osc_tick) n++;
      @(negedge clk);
    end
    osc_tick = 0; pre = 1; @(negedge clk); pre = 0;
    checks++;
    if (!weight_valid || counter_weight !== 5'(ref_w(t))) begin
      failures++; $display("FAIL tRAS=%0d weight=%0d exp=%0d valid=%b", t, counter_weight, ref_w(t), weight_valid);
    end
    @(negedge clk);
    checks++;
    if (weight_valid) begin failures++; $display("FAIL weight_valid longer than one cycle"); end
  endtask

  initial begin
    int ts[] = '{1, 41, 42, 43, 84, 85, 168, 169, 336, 337, 1000, 5376, 5377, 70200};
    osc_tick = 0; act = 0; pre = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (ts[i]) open_for(ts[i]);
    for (int i = 0; i < 20; i++) open_for($urandom_range(1, 3000));
    // A precharge with no open row gives no weight.
    @(negedge clk); pre = 1; @(negedge clk); pre = 0;
    checks++;
    if (weight_valid) begin failures++; $display("FAIL weight without an open row"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
