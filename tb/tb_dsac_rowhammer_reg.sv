// tb_dsac_rowhammer_reg: self-checking test of the RowHammer Register:
// reset to "no aggressor", loads only when load is high, holds otherwise.
module tb_dsac_rowhammer_reg;
  logic clk = 0, rst_n = 0, load, nonzero_in, rh_valid;
  logic [15:0] row_in, rh, m_rh;
  logic [3:0] pnt_in, rh_pnt, m_pnt;
  logic m_v;
  int checks = 0, failures = 0;

  dsac_rowhammer_reg dut (.*);
  always #5 clk = ~clk;

  initial begin
    load = 0; row_in = '0; pnt_in = '0; nonzero_in = 0;
    m_rh = '0; m_pnt = '0; m_v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      checks++;
      if (rh !== m_rh || rh_pnt !== m_pnt || rh_valid !== m_v) begin
        failures++; $display("FAIL rh=%h exp=%h pnt=%b exp=%b v=%b exp=%b", rh, m_rh, rh_pnt, m_pnt, rh_valid, m_v);
      end
      load = 1'($urandom); row_in = 16'($urandom); pnt_in = 4'b1 << $urandom_range(0, 3);
      nonzero_in = 1'($urandom);
      @(posedge clk);
      if (load) begin m_rh = row_in; m_pnt = pnt_in; m_v = nonzero_in; end
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
