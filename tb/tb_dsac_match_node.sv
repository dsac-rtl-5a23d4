// tb_dsac_match_node: self-checking test of one tournament match-up.
// Random counts (with many ties) and live flags in both search modes; the
// expected winner follows the rules: smaller wins in a minimum search with
// ties to the low side, larger wins in a maximum search with ties to the high
// side, a non-live side never wins.
module tb_dsac_match_node;
  localparam int CNT_W = 14;
  logic max_or_min, live_a, live_b, sel, live_win;
  logic [CNT_W-1:0] cnt_a, cnt_b, cnt_win;
  int checks = 0, failures = 0;
  bit exp_sel;

  dsac_match_node dut (.*);

  initial begin
    for (int i = 0; i < 5000; i++) begin
      max_or_min = 1'($urandom);
      cnt_a = CNT_W'($urandom_range(0, 7));
      cnt_b = ($urandom_range(0, 3) == 0) ? cnt_a : CNT_W'($urandom_range(0, 7));
      if (i % 7 == 0) begin cnt_a = CNT_W'($urandom); cnt_b = CNT_W'($urandom); end
      live_a = ($urandom_range(0, 9) != 0);
      live_b = ($urandom_range(0, 9) != 0);
      #1;
      if (!live_b) exp_sel = 0;
      else if (!live_a) exp_sel = 1;
      else if (max_or_min) exp_sel = !(cnt_a > cnt_b);
      else exp_sel = (cnt_a > cnt_b);
      checks++;
      if (sel !== exp_sel || cnt_win !== (exp_sel ? cnt_b : cnt_a) || live_win !== (live_a | live_b)) begin
        failures++;
        $display("FAIL mode=%b a=%0d(%b) b=%0d(%b) sel=%b exp=%b", max_or_min, cnt_a, live_a, cnt_b, live_b, sel, exp_sel);
      end
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
