// dsac_pointer_decoder: turns the comparator outputs of the tournament into a
// one-hot pointer (PNT_REG) to the winning count-table entry.
//
// The match-ups are numbered as a heap: node 1 is the final, node k has the
// children 2k and 2k+1, and the 2^LEVELS leaves are entries 0..2^LEVELS-1.
// sel[k] is 1 when the right (higher-index) child of node k won. The decoder
// walks from the final down the winner's path and raises one bit of pnt.
// For the 4-entry table (LEVELS=2) this is the decoding of MAX_OR_MIN#2 (the
// final, node 1) and MAX_OR_MIN#0/#1 (nodes 2 and 3) into PNT_REG#0..#3.
// Purely combinational; sel[0] is unused.
// The walk index node carries one bit more than the last level needs; its top
// bit is the root marker and is never read, which lint reports as unused.
module dsac_pointer_decoder #(
  parameter int unsigned LEVELS = 2
) (
  input  logic [(1<<LEVELS)-1:0] sel,
  output logic [(1<<LEVELS)-1:0] pnt
);
  logic [LEVELS:0] node;

  always_comb begin
    node = (LEVELS+1)'(1);
    for (int l = 0; l < int'(LEVELS); l++) begin
      node = {node[LEVELS-1:0], sel[node[LEVELS-1:0]]};
    end
    pnt = '0;
    pnt[node[LEVELS-1:0]] = 1'b1;
  end
endmodule
