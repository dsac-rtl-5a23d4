// tb_dsac_min_count_reg: self-checking test of the Min. Count Register:
// captures min_in only when capture is high and MAX_OR_MIN is low.
module tb_dsac_min_count_reg;
  logic clk = 0, rst_n = 0, max_or_min, capture;
  logic [13:0] min_in, min_cnt, m;
  int checks = 0, failures = 0;

  dsac_min_count_reg dut (.*);
  always #5 clk = ~clk;

  initial begin
    max_or_min = 0; capture = 0; min_in = '0; m = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      checks++;
      if (min_cnt !== m) begin failures++; $display("FAIL min_cnt=%0d exp=%0d", min_cnt, m); end
      max_or_min = 1'($urandom); capture = 1'($urandom); min_in = 14'($urandom);
      @(posedge clk);
      if (capture && !max_or_min) m = min_in;
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
