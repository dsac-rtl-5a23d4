// tb_dsac_seed_mixer: self-checking test of the Seed Mixer. The seed resets
// to the PUF value and, on each end-of-window pulse, becomes
// rotl(seed, 7) ^ puf ^ prbs, with seed_load following one cycle later.
// Also checks that two chips with different PUF values start from different
// seeds.
module tb_dsac_seed_mixer;
  logic clk = 0, rst_n = 0, all_cell_ref_done, seed_load, seed_load2;
  logic [19:0] puf, puf2, prbs, seed, seed2, m;
  logic m_ld;
  int checks = 0, failures = 0;

  dsac_seed_mixer dut  (.clk, .rst_n, .puf, .prbs, .all_cell_ref_done, .seed, .seed_load);
  dsac_seed_mixer dut2 (.clk, .rst_n, .puf(puf2), .prbs, .all_cell_ref_done, .seed(seed2), .seed_load(seed_load2));
  always #5 clk = ~clk;

  initial begin
    puf = 20'hA5C3E; puf2 = 20'h0F0F1; prbs = '0; all_cell_ref_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; m = puf; m_ld = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      checks++;
      if (seed !== m || seed_load !== m_ld) begin failures++; $display("FAIL seed=%h exp=%h ld=%b exp=%b", seed, m, seed_load, m_ld); end
      if (i == 0) begin
        checks++;
        if (seed == seed2) begin failures++; $display("FAIL two PUFs give one seed %h", seed); end
      end
      all_cell_ref_done = ($urandom_range(0, 4) == 0); prbs = 20'($urandom);
      @(posedge clk);
      m_ld = all_cell_ref_done;
      if (all_cell_ref_done) m = {m[12:0], m[19:13]} ^ puf ^ prbs;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
