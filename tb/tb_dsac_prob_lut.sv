// tb_dsac_prob_lut: self-checking test of the Probability LUT.
// 1) Every table entry read back against floor(2^20/(m+1)) - 1 computed here.
// 2) The decision equals (prbs > threshold) for random inputs.
// 3) Rates: with uniform random PRBS the replacement rate for minimum counts
//    0, 1, 2, 3, 7 and 99 is within a few standard deviations of 1/(m+1)
//    (the Fig. 14 example: m = 2 gives 33%, m = 3 gives 25%).
module tb_dsac_prob_lut;
  logic [13:0] min_cnt;
  logic [19:0] prbs, threshold;
  logic stochastic_replacement;
  int checks = 0, failures = 0;

  dsac_prob_lut dut (.*);

  initial begin
    int ms[6] = '{0, 1, 2, 3, 7, 99};
    for (int m = 0; m < 16384; m++) begin
      min_cnt = 14'(m); prbs = 20'($urandom);
      #1;
      checks++;
      if (threshold !== 20'((64'd1 << 20) / (m + 1) - 1) ||
          stochastic_replacement !== (prbs > threshold)) begin
        failures++; $display("FAIL m=%0d thr=%0d", m, threshold);
      end
    end
    foreach (ms[k]) begin
      int rep, trials;
      real p, got, sd;
      rep = 0; trials = 40000;
      min_cnt = 14'(ms[k]);
      for (int t = 0; t < trials; t++) begin
        prbs = 20'($urandom); #1;
        if (!stochastic_replacement) rep++;
      end
      p = 1.0 / (ms[k] + 1); got = real'(rep) / trials;
      sd = $sqrt(p * (1.0 - p) / trials) + 1e-6;
      checks++;
      if (got < p - 5 * sd || got > p + 5 * sd) begin
        failures++; $display("FAIL rate m=%0d got %f want %f", ms[k], got, p);
      end else $display("min_cnt=%0d replacement rate %f (1/(m+1) = %f)", ms[k], got, p);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
