// tb_dsac_trr_controller: self-checking test of the TRR Module Controller.
// Checks cycle by cycle:
//  ACTIVE   : cap with MAX_OR_MIN low in the command cycle, then upd and the
//             maximum search (rh_load) with MAX_OR_MIN high; busy 3 cycles.
//  PRECHARGE: wadd then rh_load.
//  REFRESH  : TRR_FLAG exactly at sum >= 9745 (RH_TH/2 - MAC_tREFI); with
//             the flag and a non-zero aggressor the victim sequence
//             (x, PLUS_OR_MINUS) = (1,0) (1,1) (2,0) (2,1), then the counter
//             reset and a maximum search, 2*2+2 cycles; no TRR without the
//             flag or with all counts zero.
module tb_dsac_trr_controller;
  logic clk = 0, rst_n = 0, act, pre, ref_cmd, rh_valid;
  logic [15:0] cnt_sum;
  logic max_or_min, cap, upd, wadd, rh_load, plus_or_minus, victim_valid, trr_clr, trr_flag, trr_start, busy;
  logic [1:0] x;
  int checks = 0, failures = 0;

  dsac_trr_controller dut (.*);
  always #5 clk = ~clk;

  // Expected output vector per cycle: {cap, max_or_min, upd, wadd, rh_load, victim_valid, trr_clr, busy}
  task automatic expect_cyc(input logic [7:0] e, input string what, input int ex = -1, input int epm = -1);
    #1;
    checks++;
    if ({cap, max_or_min, upd, wadd, rh_load, victim_valid, trr_clr, busy} !== e ||
        (ex >= 0 && (x !== 2'(ex) || plus_or_minus !== 1'(epm)))) begin
      failures++;
      $display("FAIL %s: got %b exp %b x=%0d pm=%b", what,
               {cap, max_or_min, upd, wadd, rh_load, victim_valid, trr_clr, busy}, e, x, plus_or_minus);
    end
    @(negedge clk);
  endtask

  initial begin
    act = 0; pre = 0; ref_cmd = 0; rh_valid = 0; cnt_sum = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // Threshold of Inequality (7).
    cnt_sum = 16'd9744; #1; checks++; if (trr_flag) begin failures++; $display("FAIL flag at 9744"); end
    cnt_sum = 16'd9745; #1; checks++; if (!trr_flag) begin failures++; $display("FAIL no flag at 9745"); end
    cnt_sum = 16'd0;
    // ACTIVE.
    act = 1;  expect_cyc(8'b1000_0000, "act cycle");
    act = 0;  expect_cyc(8'b0110_0001, "update");
              expect_cyc(8'b0100_1001, "max search");
              expect_cyc(8'b0000_0000, "idle");
    // PRECHARGE.
    pre = 1;  expect_cyc(8'b0000_0000, "pre cycle");
    pre = 0;  expect_cyc(8'b0101_0001, "weight add");
              expect_cyc(8'b0100_1001, "max search after pre");
    // REFRESH without flag.
    rh_valid = 1; ref_cmd = 1; expect_cyc(8'b0000_0000, "ref no flag");
    ref_cmd = 0;  expect_cyc(8'b0000_0000, "still idle");
    // REFRESH with flag but all counts zero.
    cnt_sum = 16'd20000; rh_valid = 0; ref_cmd = 1; #1;
    checks++; if (trr_start) begin failures++; $display("FAIL TRR with zero counts"); end
    expect_cyc(8'b0000_0000, "ref zero counts");
    ref_cmd = 0; expect_cyc(8'b0000_0000, "still idle 2");
    // REFRESH with flag.
    rh_valid = 1; ref_cmd = 1; #1;
    checks++; if (!trr_start) begin failures++; $display("FAIL no TRR start"); end
    expect_cyc(8'b0000_0000, "ref cycle");
    ref_cmd = 0;
    expect_cyc(8'b0000_0101, "RH-1", 1, 0);
    expect_cyc(8'b0000_0101, "RH+1", 1, 1);
    expect_cyc(8'b0000_0101, "RH-2", 2, 0);
    expect_cyc(8'b0000_0101, "RH+2", 2, 1);
    expect_cyc(8'b0000_0011, "counter reset");
    expect_cyc(8'b0100_1001, "max search after TRR");
    expect_cyc(8'b0000_0000, "idle after TRR");
    // Back-to-back activates at the minimum spacing of 3 cycles.
    for (int i = 0; i < 5; i++) begin
      act = 1; expect_cyc(8'b1000_0000, "act b2b");
      act = 0; expect_cyc(8'b0110_0001, "upd b2b");
               expect_cyc(8'b0100_1001, "max b2b");
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
