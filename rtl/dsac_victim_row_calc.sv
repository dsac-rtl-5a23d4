// dsac_victim_row_calc: Victim Row Calculator, a full adder that forms the
// address of a row next to the aggressor.
//
// victim = RH - x when plus_or_minus is low, RH + x when it is high, modulo
// the bank size. in_range is low when the result wrapped past either edge of
// the bank, i.e. the neighbour does not exist; reporting that instead of
// silently wrapping is this design's choice. Rows are assumed to be numbered
// in physical order. Purely combinational.
module dsac_victim_row_calc #(
  parameter int unsigned ROW_W = dsac_pkg::ROW_W,
  parameter int unsigned X_W   = 2
) (
  input  logic [ROW_W-1:0] rh,
  input  logic [X_W-1:0]   x,
  input  logic             plus_or_minus,
  output logic [ROW_W-1:0] victim,
  output logic             in_range
);
  logic [ROW_W:0] res;
  always_comb begin
    // Two's-complement subtract through the same adder: RH + ~x + 1.
    if (plus_or_minus) res = {1'b0, rh} + {1'b0, ROW_W'(x)};
    else               res = {1'b0, rh} + {1'b0, ~ROW_W'(x)} + (ROW_W+1)'(1);
    victim = res[ROW_W-1:0];
    // Add: carry out means overflow. Subtract: no carry out means borrow.
    in_range = plus_or_minus ? ~res[ROW_W] : (res[ROW_W] | (x == '0));
  end
endmodule
