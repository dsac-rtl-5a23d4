// tb_dsac_pointer_decoder: self-checking test of the pointer decoder.
// For the 4-entry table every combination of the three comparator outputs
// is checked against the decoding written out by hand (final = node 1,
// first round = nodes 2 and 3); an 8-entry decoder is checked against a
// recursive path walk.
module tb_dsac_pointer_decoder;
  logic [3:0] sel4, pnt4;
  logic [7:0] sel8, pnt8;
  int checks = 0, failures = 0;

  dsac_pointer_decoder #(.LEVELS(2)) dut4 (.sel(sel4), .pnt(pnt4));
  dsac_pointer_decoder #(.LEVELS(3)) dut8 (.sel(sel8), .pnt(pnt8));

  function automatic int walk8(logic [7:0] s);
    int n = 1;
    for (int l = 0; l < 3; l++) n = 2 * n + int'(s[n]);
    return n - 8;
  endfunction

  initial begin
    for (int v = 0; v < 16; v++) begin
      logic [3:0] exp;
      sel4 = 4'(v);
      #1;
      // sel4[1]: final (left = entries 0/1, right = entries 2/3)
      if (!sel4[1]) exp = sel4[2] ? 4'b0010 : 4'b0001;
      else          exp = sel4[3] ? 4'b1000 : 4'b0100;
      checks++;
      if (pnt4 !== exp) begin failures++; $display("FAIL sel4=%b pnt=%b exp=%b", sel4, pnt4, exp); end
    end
    for (int v = 0; v < 256; v++) begin
      sel8 = 8'(v);
      #1;
      checks++;
      if (pnt8 !== (8'b1 << walk8(sel8))) begin failures++; $display("FAIL sel8=%b pnt=%b", sel8, pnt8); end
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
