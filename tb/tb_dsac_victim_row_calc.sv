// tb_dsac_victim_row_calc: self-checking test of the victim row adder.
// RH - x and RH + x for random rows and every x, including both bank edges
// where the neighbour does not exist and in_range must drop.
module tb_dsac_victim_row_calc;
  logic [15:0] rh, victim;
  logic [1:0] x;
  logic plus_or_minus, in_range;
  int checks = 0, failures = 0;

  dsac_victim_row_calc dut (.*);

  task automatic one(input logic [15:0] r, input int dx, input bit pm);
    int e;
    rh = r; x = 2'(dx); plus_or_minus = pm;
    #1;
    e = pm ? int'(r) + dx : int'(r) - dx;
    checks++;
    if (victim !== 16'(e) || in_range !== (e >= 0 && e < 65536)) begin
      failures++; $display("FAIL rh=%0d x=%0d pm=%b victim=%0d in_range=%b", r, dx, pm, victim, in_range);
    end
  endtask

  initial begin
    for (int i = 0; i < 2000; i++) one(16'($urandom), $urandom_range(0, 3), 1'($urandom));
    for (int dx = 0; dx < 4; dx++) begin
      one(16'd0, dx, 0); one(16'd1, dx, 0); one(16'd65535, dx, 1); one(16'd65534, dx, 1);
      one(16'd0, dx, 1); one(16'd65535, dx, 0);
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
